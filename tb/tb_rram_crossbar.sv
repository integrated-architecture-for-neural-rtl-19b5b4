// tb_rram_crossbar: device-level checks of the crossbar model.
//  1. A 4x4 die is programmed column by column (SET, then gradual RESET with the amplitude
//     of each weight) with the weight matrix of the paper's worked example, then read with
//     its input vector (1,2,2,0) on the rows: the column currents must be
//     (5,12,3,7) x 100 mV x 203 uS. A pulse on an ungrounded column must change nothing.
//  2. Full RESET then the 50% pulse on a 16x16 die leaves 35-65% of the devices in LRS;
//     repeating it on the same die (no C2C jitter) gives the same pattern; a die with
//     another SEED differs in 25-75% of the devices; a die with C2C jitter does not repeat.
module tb_rram_crossbar;
  import rram_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (2000000 / 10) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // Small die for the worked example.
  mv_t  mv4 [4];
  logic [3:0] gnd4;
  logic p4 = 0;
  na_t  i4 [4];
  rram_crossbar #(.N(4), .M(4), .SEED(7)) u4 (.clk, .row_mv(mv4), .col_gnd(gnd4), .pulse(p4), .col_na(i4));

  // Full-size dies: a and b share stimulus, c has C2C jitter.
  mv_t  mv [16];
  logic [15:0] gnd;
  logic p = 0;
  na_t  ia [16], ib [16], ic [16];
  rram_crossbar #(.SEED(1))              ua (.clk, .row_mv(mv), .col_gnd(gnd), .pulse(p), .col_na(ia));
  rram_crossbar #(.SEED(2))              ub (.clk, .row_mv(mv), .col_gnd(gnd), .pulse(p), .col_na(ib));
  rram_crossbar #(.SEED(1), .C2C_MV(150)) uc (.clk, .row_mv(mv), .col_gnd(gnd), .pulse(p), .col_na(ic));

  logic [1:0] W [4][4] = '{'{2'd1, 2'd2, 2'd3, 2'd3},
                          '{2'd0, 2'd3, 2'd0, 2'd1},
                          '{2'd2, 2'd2, 2'd0, 2'd1},
                          '{2'd3, 2'd2, 2'd2, 2'd1}};
  int X [4] = '{1, 2, 2, 0};
  int Y [4] = '{5, 12, 3, 7};
  int VR [4] = '{-2000, -1600, -1400, -1000};

  task automatic pulse4(input int col, input int v [4]);
    @(negedge clk);
    for (int i = 0; i < 4; i++) mv4[i] = mv_t'(v[i]);
    gnd4 = 4'(1 << col); p4 = 1;
    @(negedge clk); p4 = 0; gnd4 = 0;
  endtask

  task automatic pulse16_all(input int v);
    for (int j = 0; j < 16; j++) begin
      @(negedge clk);
      for (int i = 0; i < 16; i++) mv[i] = mv_t'(v);
      gnd = 16'(1 << j); p = 1;
      @(negedge clk); p = 0; gnd = 0;
    end
  endtask

  task automatic entropy();
    pulse16_all(-2000);
    pulse16_all(1500);
  endtask

  function automatic logic [255:0] pattern_a();
    logic [255:0] r;
    for (int i = 0; i < 16; i++) for (int j = 0; j < 16; j++) r[i*16+j] = (ua.level[i][j] == 2'd3);
    return r;
  endfunction
  function automatic logic [255:0] pattern_b();
    logic [255:0] r;
    for (int i = 0; i < 16; i++) for (int j = 0; j < 16; j++) r[i*16+j] = (ub.level[i][j] == 2'd3);
    return r;
  endfunction
  function automatic logic [255:0] pattern_c();
    logic [255:0] r;
    for (int i = 0; i < 16; i++) for (int j = 0; j < 16; j++) r[i*16+j] = (uc.level[i][j] == 2'd3);
    return r;
  endfunction

  initial begin
    int v [4];
    logic [255:0] a1, a2, b1, c1, c2;
    int ones, diff;
    gnd4 = 0; gnd = 0;
    for (int i = 0; i < 4; i++) mv4[i] = 0;
    for (int i = 0; i < 16; i++) mv[i] = 0;

    // 1. worked example
    for (int j = 0; j < 4; j++) begin
      v = '{2000, 2000, 2000, 2000};
      pulse4(j, v);
      for (int i = 0; i < 4; i++) v[i] = VR[W[i][j]];
      pulse4(j, v);
    end
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (u4.level[i][j] != W[i][j]) begin failures++; $display("FAIL level(%0d,%0d)=%0d", i, j, u4.level[i][j]); end
      end
    // pulse with no column grounded: nothing may change
    @(negedge clk); for (int i = 0; i < 4; i++) mv4[i] = -2000; p4 = 1;
    @(negedge clk); p4 = 0;
    for (int i = 0; i < 4; i++) mv4[i] = mv_t'(X[i] * 100);
    #1;
    for (int j = 0; j < 4; j++) begin
      checks++;
      if (int'(i4[j]) != Y[j] * 100 * 203) begin
        failures++; $display("FAIL column %0d current %0d nA expected %0d", j, i4[j], Y[j] * 20300);
      end
    end

    // 2. random switching
    entropy();
    a1 = pattern_a(); b1 = pattern_b(); c1 = pattern_c();
    ones = $countones(a1);
    checks++;
    if (ones < 90 || ones > 166) begin failures++; $display("FAIL %0d of 256 devices in LRS", ones); end
    diff = $countones(a1 ^ b1);
    checks++;
    if (diff < 64 || diff > 192) begin failures++; $display("FAIL dies differ in %0d devices", diff); end
    entropy();
    a2 = pattern_a(); c2 = pattern_c();
    checks++;
    if (a1 != a2) begin failures++; $display("FAIL same die, no jitter, pattern changed"); end
    checks++;
    if (c1 == c2) begin failures++; $display("FAIL die with C2C jitter repeated its pattern"); end
    // read the 50% state of column 0 with all rows at the read voltage
    for (int i = 0; i < 16; i++) mv[i] = 200;
    #1;
    ones = 0;
    for (int i = 0; i < 16; i++) ones += int'(a1[i*16]);
    checks++;
    if (int'(ia[0]) != ones * 200 * 3 * 203) begin failures++; $display("FAIL TRNG column read %0d", ia[0]); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
