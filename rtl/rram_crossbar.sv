// rram_crossbar: behavioural model of the passive N x M RRAM crossbar (not synthesizable
// logic: in silicon this is an array of Pt/Ti/TiOx/HfO2/Pt resistive devices without
// selectors).
//
// Each device holds one of four conductance levels, 0 (HRS) to 3 (LRS), the 2-bit
// weight of the VMM. Reading is continuous: column j carries the current
//   col_na[j] = sum_i row_mv[i] * level[i][j] * G_STEP_US     (nA)
// which is Ohm's law per device and Kirchhoff's current law per column. With the rows at
// the DAC's input levels this current is the vector-matrix product.
//
// Programming: on a clock edge with pulse = 1, every device whose column is grounded
// (col_gnd[j], the DeMUX GND output) sees its row voltage:
//   V >= switching threshold    -> LRS (level 3). The threshold is V50_MV +/- D2D_SPREAD_MV,
//                                  fixed per device and die (hash of SEED, row, column),
//                                  plus a fresh +/- C2C_MV jitter on every pulse.
//   V <= -1400 / -1600 / -2000  -> level lowered to 2 / 1 / 0 (gradual RESET; -2.0 V is the
//                                  full RESET to HRS). A RESET never raises the level.
// A full SET (+2.0 V) exceeds every threshold, so SET is deterministic; the 50% pulse at
// V50_MV switches about half of a column, which is the TRNG entropy and the PUF state.
//
// From the paper: passive crossbar, multi-state levels, +/-2.0 V SET/RESET, gradual RESET
// from LRS with the reset amplitudes 1.0/1.4/1.6/2.0 V, random switching from the spread
// of switching thresholds. This model's own choices: conductance linear in the level with
// the HRS leakage neglected, the threshold distribution, no sneak paths, a fresh die in
// HRS, and a pulse applied in one clock edge (the control circuit times its 150 ns).
module rram_crossbar
  import rram_pkg::*;
#(
  parameter int unsigned N             = N_ROWS,
  parameter int unsigned M             = N_COLS,
  parameter int unsigned SEED          = 1,
  parameter int          V50           = V50_MV,
  parameter int          D2D_SPREAD_MV = 300,
  parameter int          C2C_MV        = 0
) (
  input  logic clk,
  input  mv_t  row_mv  [N],
  input  logic [M-1:0] col_gnd,
  input  logic pulse,
  output na_t  col_na  [M]
);

  logic [1:0] level [N][M];

  // Per-device SET threshold from a fixed hash: the die's device-to-device variation.
  function automatic int set_threshold(input int unsigned s, input int unsigned r,
                                       input int unsigned c);
    logic [31:0] x;
    x = (s * 32'h9E37_79B1) ^ (r << 16) ^ c ^ 32'h5bd1_e995;
    x = x ^ (x >> 16);
    x = x * 32'h85EB_CA6B;
    x = x ^ (x >> 13);
    x = x * 32'hC2B2_AE35;
    x = x ^ (x >> 16);
    return V50 - D2D_SPREAD_MV + int'(x % (2 * D2D_SPREAD_MV + 1));
  endfunction

  function automatic int c2c_jitter();
    if (C2C_MV == 0) return 0;
    return int'($urandom_range(2 * C2C_MV, 0)) - C2C_MV;
  endfunction

  // A fresh die: every device in HRS.
  initial begin
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++)
        level[i][j] = 2'd0;
  end

  always @(posedge clk) begin
    if (pulse) begin
      for (int j = 0; j < M; j++) begin
        if (col_gnd[j]) begin
          for (int i = 0; i < N; i++) begin
            int v;
            v = int'(row_mv[i]);
            if (v > 0) begin
              if (v >= set_threshold(SEED, i, j) + c2c_jitter()) level[i][j] <= 2'd3;
            end else if (v <= -2000) begin
              level[i][j] <= 2'd0;
            end else if (v <= -1600) begin
              if (level[i][j] > 2'd1) level[i][j] <= 2'd1;
            end else if (v <= -1400) begin
              if (level[i][j] > 2'd2) level[i][j] <= 2'd2;
            end
          end
        end
      end
    end
  end

  always_comb begin
    for (int j = 0; j < M; j++) begin
      col_na[j] = '0;
      for (int i = 0; i < N; i++)
        col_na[j] += na_t'(row_mv[i]) * na_t'(G_STEP_US) * na_t'({1'b0, level[i][j]});
    end
  end

endmodule
