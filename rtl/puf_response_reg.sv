// puf_response_reg: the "Responses" block. It collects the PUF response of one challenge,
// one bit per crossbar column (r_1 .. r_m), into an M-bit register that serves as the
// weight-locking key.
//
// clear (one cycle) empties the register at the start of a challenge. Each cycle with
// bit_valid = 1 stores bit_in at position col; key_valid rises in the cycle after the
// last of the M distinct columns has been stored and stays high until the next clear.
// A column written twice counts once.
//
// The paper gives the block and says the responses form the key; taking exactly one
// challenge's M bits as the key is this design's choice.
module puf_response_reg #(
  parameter int unsigned M  = 16,
  localparam int unsigned SW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          bit_valid,
  input  logic          bit_in,
  input  logic [SW-1:0] col,
  output logic [M-1:0]  key,
  output logic          key_valid
);

  logic [M-1:0] seen;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key  <= '0;
      seen <= '0;
    end else if (clear) begin
      key  <= '0;
      seen <= '0;
    end else if (bit_valid && (int'(col) < M)) begin
      key[col]  <= bit_in;
      seen[col] <= 1'b1;
    end
  end

  assign key_valid = &seen;

endmodule
