// output_interface: the digital interface below the ADC. During a VMM it gathers the M
// column codes from the ADC into the output vector y and reports completion.
//
// clear (one cycle, at the start of a VMM) invalidates y and the overflow flag. Each cycle
// with adc_valid = 1 stores adc_code in y[col] and ORs adc_ovf into ovf. y_valid rises the
// cycle after the last of the M columns arrived and stays high until the next clear; it
// goes to the host and, as in the architecture's block diagram, back to the control
// circuit.
//
// The paper gives this interface only as a block that receives the ADC, Responses and
// TRNG outputs and feeds the control circuit; its registers are this design's choice.
module output_interface #(
  parameter int unsigned M    = 16,
  parameter int unsigned BITS = 8,
  localparam int unsigned SW  = (M > 1) ? $clog2(M) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic            adc_valid,
  input  logic [BITS-1:0] adc_code,
  input  logic            adc_ovf,
  input  logic [SW-1:0]   col,
  output logic [BITS-1:0] y [M],
  output logic            y_valid,
  output logic            ovf
);

  logic [M-1:0] seen;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < M; j++) y[j] <= '0;
      seen <= '0;
      ovf  <= 1'b0;
    end else if (clear) begin
      seen <= '0;
      ovf  <= 1'b0;
    end else if (adc_valid && (int'(col) < M)) begin
      y[col]    <= adc_code;
      seen[col] <= 1'b1;
      ovf       <= ovf | adc_ovf;
    end
  end

  assign y_valid = &seen;

endmodule
