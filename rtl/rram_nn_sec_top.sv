// rram_nn_sec_top: one RRAM crossbar shared by a neural-network vector-matrix multiplier,
// a true random number generator and a physical unclonable function, with the PUF key
// locking the network weights.
//
// Data path (left to right in the block diagram):
//   input_interface -> N x rram_dac -> rram_crossbar -> column_mux -> csa -> path_demux
//        -> adc -> output_interface   (VMM result y)
//        -> puf_response_reg         (PUF response = key, fed back to the weight lock)
//        -> trng_buffer              (random words)
//   control_circuit drives the row operation, MUX select, CSA, DeMUX and pulse timing.
// The DeMUX's GND output grounds the selected column while the row DACs pulse it.
//
// Host interface (all synchronous to clk, active-low asynchronous reset rst_n):
//   cmd/start/busy/done   start a command while busy = 0; done strobes at the end
//   x_load/x_in           input vector, 2 bits per row
//   chal_load/chal_in     PUF challenge, one bit per row
//   w_we/w_row/w_data     weight buffer, one row of M 2-bit weights per write
//   rd_row/rd_data        weight buffer XOR key: encrypted weights after CMD_LOCK
//   y/y_valid/adc_ovf     VMM result, one ADC code per column
//   key/key_valid         PUF response of the last challenge
//   trng_word/trng_valid  random words after CMD_TRNG; trng_bits counts random bits
// Timing: see control_circuit (e.g. a 16-column VMM takes 2 cycles per column plus 4).
//
// The architecture and the modes are the paper's; SEED names the simulated die (its
// device-to-device variation) and C2C_MV its cycle-to-cycle jitter, both model choices.
module rram_nn_sec_top
  import rram_pkg::*;
#(
  parameter int unsigned N      = N_ROWS,
  parameter int unsigned M      = N_COLS,
  parameter int unsigned BITS   = ADC_BITS,
  parameter int unsigned SEED   = 1,
  parameter int          C2C_MV = 0,
  localparam int unsigned RW    = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned CW    = (M > 1) ? $clog2(M) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cmd_e              cmd,
  input  logic              start,
  output logic              busy,
  output logic              done,
  input  logic              x_load,
  input  logic [X_BITS-1:0] x_in    [N],
  input  logic              chal_load,
  input  logic [N-1:0]      chal_in,
  input  logic              w_we,
  input  logic [RW-1:0]     w_row,
  input  logic [W_BITS-1:0] w_data  [M],
  input  logic [RW-1:0]     rd_row,
  output logic [W_BITS-1:0] rd_data [M],
  output logic [BITS-1:0]   y       [M],
  output logic              y_valid,
  output logic              adc_ovf,
  output logic [M-1:0]      key,
  output logic              key_valid,
  output logic [M-1:0]      trng_word,
  output logic              trng_valid,
  output logic [31:0]       trng_bits
);

  // Control signals.
  row_op_e         row_op;
  logic [RW-1:0]   row_sel;
  logic [CW-1:0]   prog_col, col_sel;
  logic            use_key, csa_en, sample, xbar_pulse, clr_resp, clr_y;
  na_t             iref_na;
  dst_e            dst;
  logic [$clog2(N+1)-1:0] chal_ones;

  // Analog path.
  drive_e          dac_drive [N];
  logic [1:0]      dac_code  [N];
  mv_t             row_mv    [N];
  na_t             col_na    [M];
  logic [31:0]     col_bits  [M];
  logic [31:0]     sel_bits;
  na_t             amp;
  logic            csa_bit, gnd;
  logic            adc_start, resp_valid, resp_bit, trng_bv, trng_bit;
  na_t             adc_in;
  logic [BITS-1:0] adc_code;
  logic            adc_valid, adc_ovf_s;
  logic [CW-1:0]   adc_col;
  logic [M-1:0]    col_gnd;

  control_circuit #(.N(N), .M(M)) u_ctrl (
    .clk, .rst_n, .cmd, .start, .busy, .done,
    .row_op, .row_sel, .prog_col, .use_key, .chal_ones,
    .col_sel, .csa_en, .iref_na, .dst, .sample, .xbar_pulse, .clr_resp, .clr_y,
    .y_valid
  );

  input_interface #(.N(N), .M(M), .W(W_BITS)) u_in (
    .clk, .rst_n, .x_load, .x_in, .chal_load, .chal_in, .w_we, .w_row, .w_data,
    .rd_row, .rd_data, .row_op, .row_sel, .prog_col, .use_key, .key, .chal_ones,
    .dac_drive, .dac_code
  );

  for (genvar i = 0; i < N; i++) begin : g_dac
    rram_dac u_dac (.drive(dac_drive[i]), .code(dac_code[i]), .v_mv(row_mv[i]));
  end

  always_comb begin
    for (int j = 0; j < M; j++) col_gnd[j] = gnd && (col_sel == CW'(j));
  end

  rram_crossbar #(.N(N), .M(M), .SEED(SEED), .C2C_MV(C2C_MV)) u_xbar (
    .clk, .row_mv, .col_gnd, .pulse(xbar_pulse), .col_na
  );

  always_comb begin
    for (int j = 0; j < M; j++) col_bits[j] = col_na[j];
  end

  column_mux #(.M(M), .WIDTH(32)) u_mux (.col_in(col_bits), .sel(col_sel), .out(sel_bits));

  csa u_csa (.en(csa_en), .i_na(na_t'(sel_bits)), .iref_na, .amp, .bit_out(csa_bit));

  path_demux u_demux (
    .sel(dst), .valid(sample), .amp, .bit_in(csa_bit),
    .adc_valid(adc_start), .adc_in, .resp_valid, .resp_bit,
    .trng_valid(trng_bv), .trng_bit, .gnd
  );

  adc #(.BITS(BITS)) u_adc (
    .clk, .rst_n, .start(adc_start), .in_na(adc_in),
    .code(adc_code), .valid(adc_valid), .ovf(adc_ovf_s)
  );

  // The ADC answers one cycle later; remember which column it is converting.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         adc_col <= '0;
    else if (adc_start) adc_col <= col_sel;
  end

  output_interface #(.M(M), .BITS(BITS)) u_out (
    .clk, .rst_n, .clear(clr_y), .adc_valid, .adc_code, .adc_ovf(adc_ovf_s),
    .col(adc_col), .y, .y_valid, .ovf(adc_ovf)
  );

  puf_response_reg #(.M(M)) u_resp (
    .clk, .rst_n, .clear(clr_resp), .bit_valid(resp_valid), .bit_in(resp_bit),
    .col(col_sel), .key, .key_valid
  );

  trng_buffer #(.WORD(M)) u_trng (
    .clk, .rst_n, .bit_valid(trng_bv), .bit_in(trng_bit),
    .word(trng_word), .word_valid(trng_valid), .bit_count(trng_bits)
  );

endmodule
