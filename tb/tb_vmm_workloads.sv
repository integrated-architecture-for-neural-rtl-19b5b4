// tb_vmm_workloads: the two vector-matrix products that accompany the architecture, run
// through the whole design (program the weights, then VMM):
//   * the 4x4 worked example: 2-bit weights
//       1 2 3 3 / 0 3 0 1 / 2 2 0 1 / 3 2 2 1  (rows r0..r3, columns c0..c3)
//     and input vector (1,2,2,0) must give (5,12,3,7);
//   * the 16x16 map of 2-bit weights shown for the proof-of-concept crossbar, read from
//     weights16x16.hex (row by row), multiplied by 20 random input vectors and the
//     all-ones and all-threes vectors; the expected products are computed here.
// Also checks that every device holds its programmed weight afterwards.
module tb_vmm_workloads;
  import rram_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // ---------------- 4x4 example ----------------
  cmd_e cmd4;
  logic start4, busy4, done4, xl4, cl4, we4, yv4, ovf4, kv4, tv4;
  logic [1:0] x4 [4];
  logic [3:0] ch4, key4, tw4;
  logic [1:0] wr4, rr4;
  logic [1:0] wd4 [4];
  logic [1:0] rd4 [4];
  logic [7:0] y4 [4];
  logic [31:0] tb4;

  rram_nn_sec_top #(.N(4), .M(4)) u4 (
    .clk, .rst_n, .cmd(cmd4), .start(start4), .busy(busy4), .done(done4), .x_load(xl4),
    .x_in(x4), .chal_load(cl4), .chal_in(ch4), .w_we(we4), .w_row(wr4), .w_data(wd4),
    .rd_row(rr4), .rd_data(rd4), .y(y4), .y_valid(yv4), .adc_ovf(ovf4), .key(key4),
    .key_valid(kv4), .trng_word(tw4), .trng_valid(tv4), .trng_bits(tb4));

  task automatic run4(input cmd_e c);
    @(negedge clk); cmd4 = c; start4 = 1;
    @(negedge clk); start4 = 0; cmd4 = CMD_NOP;
    while (!done4) @(negedge clk);
    @(negedge clk);
  endtask

  // ---------------- 16x16 map ----------------
  cmd_e cmd;
  logic start, busy, done, xl, cl, we, yv, ovf, kv, tv;
  logic [1:0] x [16];
  logic [15:0] ch, key, tw;
  logic [3:0] wr, rr;
  logic [1:0] wd [16];
  logic [1:0] rd [16];
  logic [7:0] y [16];
  logic [31:0] tbits;

  rram_nn_sec_top u16 (
    .clk, .rst_n, .cmd, .start, .busy, .done, .x_load(xl), .x_in(x), .chal_load(cl),
    .chal_in(ch), .w_we(we), .w_row(wr), .w_data(wd), .rd_row(rr), .rd_data(rd), .y,
    .y_valid(yv), .adc_ovf(ovf), .key, .key_valid(kv), .trng_word(tw), .trng_valid(tv),
    .trng_bits(tbits));

  task automatic run16(input cmd_e c);
    @(negedge clk); cmd = c; start = 1;
    @(negedge clk); start = 0; cmd = CMD_NOP;
    while (!done) @(negedge clk);
    @(negedge clk);
  endtask

  logic [3:0] wmap [256];

  initial begin
    logic [1:0] W4 [4][4] = '{'{2'd1, 2'd2, 2'd3, 2'd3},
                             '{2'd0, 2'd3, 2'd0, 2'd1},
                             '{2'd2, 2'd2, 2'd0, 2'd1},
                             '{2'd3, 2'd2, 2'd2, 2'd1}};
    int Y4 [4] = '{5, 12, 3, 7};
    logic [1:0] W [16][16];

    cmd4 = CMD_NOP; start4 = 0; xl4 = 0; cl4 = 0; we4 = 0; wr4 = 0; rr4 = 0; ch4 = 0;
    cmd = CMD_NOP; start = 0; xl = 0; cl = 0; we = 0; wr = 0; rr = 0; ch = 0;
    for (int i = 0; i < 4; i++) begin x4[i] = 0; wd4[i] = 0; end
    for (int i = 0; i < 16; i++) begin x[i] = 0; wd[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 4x4 worked example
    for (int i = 0; i < 4; i++) begin
      @(negedge clk); we4 = 1; wr4 = 2'(i); wd4 = W4[i];
    end
    @(negedge clk); we4 = 0;
    run4(CMD_PROG);
    @(negedge clk); xl4 = 1; x4 = '{2'd1, 2'd2, 2'd2, 2'd0};
    @(negedge clk); xl4 = 0;
    run4(CMD_VMM);
    for (int j = 0; j < 4; j++)
      check(yv4 && int'(y4[j]) == Y4[j], $sformatf("example c%0d = %0d, expected %0d", j, y4[j], Y4[j]));

    // 16x16 weight map
    $readmemh("tb/weights16x16.hex", wmap);
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) begin
        check(wmap[i*16+j] <= 4'd3, $sformatf("map entry (%0d,%0d) = %0d", i, j, wmap[i*16+j]));
        W[i][j] = 2'(wmap[i*16+j]);
      end
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); we = 1; wr = 4'(i); wd = W[i];
    end
    @(negedge clk); we = 0;
    run16(CMD_PROG);
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++)
        check(u16.u_xbar.level[i][j] == W[i][j], $sformatf("device (%0d,%0d)", i, j));
    for (int t = 0; t < 22; t++) begin
      for (int i = 0; i < 16; i++)
        x[i] = (t == 20) ? 2'd1 : (t == 21) ? 2'd3 : 2'($urandom());
      @(negedge clk); xl = 1;
      @(negedge clk); xl = 0;
      run16(CMD_VMM);
      for (int j = 0; j < 16; j++) begin
        int s;
        s = 0;
        for (int i = 0; i < 16; i++) s += int'(x[i]) * int'(W[i][j]);
        check(yv && !ovf && int'(y[j]) == s, $sformatf("vector %0d column %0d = %0d, expected %0d", t, j, y[j], s));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
