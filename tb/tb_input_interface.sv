// tb_input_interface: loads a random input vector, challenge and 16x16 weight buffer, then
// checks the drive kind and code of every row for each row operation, the challenge
// popcount, and the key-XORed read-back port, with and without use_key.
module tb_input_interface;
  import rram_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic x_load = 0, chal_load = 0, w_we = 0, use_key = 0;
  logic [1:0] x_in [16];
  logic [15:0] chal_in, key;
  logic [3:0] w_row, rd_row, row_sel, prog_col;
  logic [1:0] w_data [16];
  logic [1:0] rd_data [16];
  row_op_e row_op;
  logic [4:0] chal_ones;
  drive_e dac_drive [16];
  logic [1:0] dac_code [16];

  logic [1:0] ref_w [16][16];
  logic [1:0] ref_x [16];

  input_interface #(.N(16), .M(16), .W(2)) dut (
    .clk, .rst_n, .x_load, .x_in, .chal_load, .chal_in, .w_we, .w_row, .w_data, .rd_row,
    .rd_data, .row_op, .row_sel, .prog_col, .use_key, .key, .chal_ones, .dac_drive, .dac_code);

  always #5 clk = ~clk;

  initial begin
    repeat (200000 / 10) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic expect_row(input int i, input drive_e d, input logic [1:0] c, input string what);
    checks++;
    if (dac_drive[i] != d || (d inside {DRV_VMM, DRV_VR} && dac_code[i] != c)) begin
      failures++;
      $display("FAIL %s row %0d: drive=%s code=%0d expected %s/%0d", what, i,
               dac_drive[i].name(), dac_code[i], d.name(), c);
    end
  endtask

  initial begin
    int ones;
    row_op = OP_OFF; row_sel = 0; prog_col = 0; key = 0; rd_row = 0; w_row = 0; chal_in = 0;
    for (int i = 0; i < 16; i++) begin x_in[i] = 0; w_data[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) begin ref_x[i] = 2'($urandom()); x_in[i] = ref_x[i]; end
    chal_in = 16'($urandom());
    x_load = 1; chal_load = 1;
    @(negedge clk); x_load = 0; chal_load = 0;
    for (int i = 0; i < 16; i++) begin
      for (int j = 0; j < 16; j++) begin ref_w[i][j] = 2'($urandom()); w_data[j] = ref_w[i][j]; end
      w_row = 4'(i); w_we = 1;
      @(negedge clk);
    end
    w_we = 0;
    key = 16'($urandom());
    ones = 0;
    for (int i = 0; i < 16; i++) ones += int'(chal_in[i]);
    #1; checks++;
    if (int'(chal_ones) != ones) begin failures++; $display("FAIL chal_ones=%0d expected %0d", chal_ones, ones); end

    row_op = OP_VMM; #1;
    for (int i = 0; i < 16; i++) expect_row(i, DRV_VMM, ref_x[i], "VMM");
    row_op = OP_PUF; #1;
    for (int i = 0; i < 16; i++) expect_row(i, chal_in[i] ? DRV_READ : DRV_OFF, 0, "PUF");
    for (int r = 0; r < 16; r += 5) begin
      row_op = OP_CELL; row_sel = 4'(r); #1;
      for (int i = 0; i < 16; i++) expect_row(i, (i == r) ? DRV_READ : DRV_OFF, 0, "CELL");
    end
    row_op = OP_SET;   #1; for (int i = 0; i < 16; i++) expect_row(i, DRV_SET, 0, "SET");
    row_op = OP_RESET; #1; for (int i = 0; i < 16; i++) expect_row(i, DRV_RESET, 0, "RESET");
    row_op = OP_TRNG;  #1; for (int i = 0; i < 16; i++) expect_row(i, DRV_TRNG, 0, "TRNG");
    row_op = OP_OFF;   #1; for (int i = 0; i < 16; i++) expect_row(i, DRV_OFF, 0, "OFF");
    for (int c = 0; c < 16; c++) begin
      row_op = OP_VR; prog_col = 4'(c);
      use_key = 0; #1;
      for (int i = 0; i < 16; i++) expect_row(i, DRV_VR, ref_w[i][c], "VR");
      use_key = 1; #1;
      for (int i = 0; i < 16; i++) expect_row(i, DRV_VR, ref_w[i][c] ^ {2{key[c]}}, "VR key");
    end
    for (int r = 0; r < 16; r++) begin
      rd_row = 4'(r); #1;
      for (int j = 0; j < 16; j++) begin
        checks++;
        if (rd_data[j] != (ref_w[r][j] ^ {2{key[j]}})) begin
          failures++; $display("FAIL rd (%0d,%0d)", r, j);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
