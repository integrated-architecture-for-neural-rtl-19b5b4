// trng_buffer: the "TRNG" block. Random bits read from the crossbar after the 50%
// switching pulse arrive one per cycle (bit_valid); they are shifted into a WORD-bit
// register, first bit in the least significant position, and every WORD bits the full
// word is presented on word with a one-cycle word_valid strobe (the cycle after its last
// bit arrived). bit_count counts every bit ever received.
//
// The paper gives the block and the source of its bits; the word packing and the absence
// of post-processing are this design's choices.
module trng_buffer #(
  parameter int unsigned WORD = 16   // at least 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            bit_valid,
  input  logic            bit_in,
  output logic [WORD-1:0] word,
  output logic            word_valid,
  output logic [31:0]     bit_count
);

  localparam int unsigned CW = $clog2(WORD + 1);

  logic [WORD-2:0] shreg;  // bits received so far, newest at the top
  logic [CW-1:0]   fill;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg      <= '0;
      fill       <= '0;
      word       <= '0;
      word_valid <= 1'b0;
      bit_count  <= '0;
    end else begin
      word_valid <= 1'b0;
      if (bit_valid) begin
        bit_count <= bit_count + 32'd1;
        if (fill == CW'(WORD - 1)) begin
          word       <= {bit_in, shreg};
          word_valid <= 1'b1;
          fill       <= '0;
          shreg      <= '0;
        end else begin
          shreg <= {bit_in, shreg[WORD-2:1]};
          fill  <= fill + CW'(1);
        end
      end
    end
  end

endmodule
