// column_mux: the (m x 1) multiplexer between the crossbar columns and the single sense
// path (CSA, DeMUX, ADC). In silicon it is an analog switch array; here it selects one of
// M integer column currents.
//
// The control circuit drives sel. The selected column is read during VMM, PUF and TRNG
// read-out, and is the column that the DeMUX grounds during a programming pulse.
// Combinational, no latency. An out-of-range sel gives 0.
//
// The paper gives the block and its place in the read path; the digital current word is
// this design's representation.
module column_mux #(
  parameter int unsigned M     = 16,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned SW   = (M > 1) ? $clog2(M) : 1
) (
  input  logic [WIDTH-1:0] col_in [M],
  input  logic [SW-1:0]    sel,
  output logic [WIDTH-1:0] out
);

  always_comb begin
    out = '0;
    for (int j = 0; j < M; j++)
      if (sel == SW'(j)) out = col_in[j];
  end

endmodule
