// input_interface: the digital interface on the row side of the crossbar. It holds what
// the host loads, and turns the operation chosen by the control circuit into a drive
// kind and code for every row DAC.
//
// Registers (written by the host, one clock each):
//   x      input vector, X_BITS per row             (x_load, x_in)
//   chal   PUF challenge, one bit per row           (chal_load, chal_in)
//   wbuf   weight buffer, N rows of M W-bit weights (w_we, w_row, w_data) - plain weights
//          for programming or locking, encrypted weights for unlocking.
// A weight_lock instance XORs the buffer with the PUF key; rd_row/rd_data let the host read
// that view (the encrypted weights after a lock), combinationally.
//
// Row drive per row_op (combinational):
//   OP_VMM   DRV_VMM with x[i]          OP_PUF   DRV_READ where chal[i] = 1
//   OP_CELL  DRV_READ on row_sel only   OP_SET / OP_RESET / OP_TRNG  same pulse on all rows
//   OP_VR    DRV_VR with the weight of row i in column prog_col, decrypted when use_key
// chal_ones counts the 1s in the challenge, for the CSA reference.
//
// The paper places a digital interface in front of the DACs and lets it apply the input
// vector, the challenge and the key-decrypted weights; the register set, the host ports
// and the encodings are this design's choices.
module input_interface
  import rram_pkg::*;
#(
  parameter int unsigned N = N_ROWS,
  parameter int unsigned M = N_COLS,
  parameter int unsigned W = W_BITS,
  localparam int unsigned RW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned CW = (M > 1) ? $clog2(M) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // host side
  input  logic               x_load,
  input  logic [X_BITS-1:0]  x_in     [N],
  input  logic               chal_load,
  input  logic [N-1:0]       chal_in,
  input  logic               w_we,
  input  logic [RW-1:0]      w_row,
  input  logic [W-1:0]       w_data   [M],
  input  logic [RW-1:0]      rd_row,
  output logic [W-1:0]       rd_data  [M],
  // control side
  input  row_op_e            row_op,
  input  logic [RW-1:0]      row_sel,
  input  logic [CW-1:0]      prog_col,
  input  logic               use_key,
  input  logic [M-1:0]       key,
  output logic [$clog2(N+1)-1:0] chal_ones,
  // to the DACs
  output drive_e             dac_drive [N],
  output logic [1:0]         dac_code  [N]
);

  logic [X_BITS-1:0] x    [N];
  logic [N-1:0]      chal;
  logic [W-1:0]      wbuf [N][M];
  logic [W-1:0]      wkey [N][M];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        x[i] <= '0;
        for (int j = 0; j < M; j++) wbuf[i][j] <= '0;
      end
      chal <= '0;
    end else begin
      if (x_load) x <= x_in;
      if (chal_load) chal <= chal_in;
      if (w_we && (int'(w_row) < N))
        for (int j = 0; j < M; j++) wbuf[w_row][j] <= w_data[j];
    end
  end

  weight_lock #(.N(N), .M(M), .W(W)) u_lock (
    .key  (key),
    .w_in (wbuf),
    .w_out(wkey)
  );

  always_comb begin
    for (int j = 0; j < M; j++)
      rd_data[j] = (int'(rd_row) < N) ? wkey[rd_row][j] : '0;
  end

  always_comb begin
    chal_ones = '0;
    for (int i = 0; i < N; i++)
      chal_ones += $clog2(N+1)'(chal[i]);
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      dac_drive[i] = DRV_OFF;
      dac_code[i]  = '0;
      unique case (row_op)
        OP_VMM: begin
          dac_drive[i] = DRV_VMM;
          dac_code[i]  = 2'(x[i]);
        end
        OP_PUF:   dac_drive[i] = chal[i] ? DRV_READ : DRV_OFF;
        OP_CELL:  dac_drive[i] = (row_sel == RW'(i)) ? DRV_READ : DRV_OFF;
        OP_SET:   dac_drive[i] = DRV_SET;
        OP_RESET: dac_drive[i] = DRV_RESET;
        OP_TRNG:  dac_drive[i] = DRV_TRNG;
        OP_VR: begin
          dac_drive[i] = DRV_VR;
          dac_code[i]  = 2'(use_key ? wkey[i][prog_col] : wbuf[i][prog_col]);
        end
        default: ;
      endcase
    end
  end

endmodule
