// adc: behavioural model of the column ADC (mixed-signal in silicon).
//
// On a clock edge with start = 1 it converts the amplified column current in_na to
//   code = round(in_na / LSB_NA), limited to 0 .. 2^ADC_BITS - 1
// and raises valid for one cycle; ovf is raised with it when the input was above full
// scale and the code saturated. One LSB is the current of one unit weight times one
// unit input after the CSA, so the code is the integer dot product of the column.
// Latency: one clock from start to valid.
//
// The paper sizes the ADC with ceil(log2(w*m)); its own 4x4 example yields a 12, which
// that formula (3 bits) cannot hold, so the default width here, ADC_BITS from rram_pkg,
// covers the largest possible column sum instead. Rounding and the one-cycle conversion
// are this design's choices.
module adc
  import rram_pkg::*;
#(
  parameter int unsigned BITS   = ADC_BITS,
  parameter int          LSB_NA = ADC_LSB_NA
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  na_t             in_na,
  output logic [BITS-1:0] code,
  output logic            valid,
  output logic            ovf
);

  localparam longint FULL = (longint'(1) << BITS) - 1;

  longint q;
  always_comb begin
    if (in_na <= 0) q = 0;
    else            q = (longint'(in_na) + longint'(LSB_NA) / 2) / longint'(LSB_NA);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code  <= '0;
      valid <= 1'b0;
      ovf   <= 1'b0;
    end else begin
      valid <= start;
      if (start) begin
        code <= (q > FULL) ? BITS'(FULL) : BITS'(q);
        ovf  <= (q > FULL);
      end
    end
  end

endmodule
