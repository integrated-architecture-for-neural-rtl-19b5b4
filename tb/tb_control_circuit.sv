// tb_control_circuit: runs every command with N = M = 4 and short pulses, and checks the
// schedule the controller emits: the number of pulses and their row operations, that each
// pulse grounds the column it selects, the columns and rows of each sample and its DeMUX
// output, the CSA references, clear strobes, and the busy cycle count of each command
// against the formula in the design notes.
module tb_control_circuit;
  import rram_pkg::*;
  localparam int N = 4, M = 4, P = 3, R = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, y_valid = 0;
  cmd_e cmd;
  logic busy, done, use_key, csa_en, sample, xbar_pulse, clr_resp, clr_y;
  row_op_e row_op;
  logic [1:0] row_sel, prog_col, col_sel;
  logic [2:0] chal_ones;
  na_t iref_na;
  dst_e dst;

  control_circuit #(.N(N), .M(M), .PULSE(P), .READ(R)) dut (
    .clk, .rst_n, .cmd, .start, .busy, .done, .row_op, .row_sel, .prog_col, .use_key,
    .chal_ones, .col_sel, .csa_en, .iref_na, .dst, .sample, .xbar_pulse, .clr_resp, .clr_y,
    .y_valid);

  always #5 clk = ~clk;

  initial begin
    repeat (1000000 / 10) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // Recorded per command.
  string trace [$];
  int busy_cycles, n_clr_resp, n_clr_y;

  always @(posedge clk) begin
    if (rst_n && busy) begin
      busy_cycles++;
      if (clr_resp) n_clr_resp++;
      if (clr_y) n_clr_y++;
      if (xbar_pulse) trace.push_back($sformatf("P%s.c%0d.%s", row_op.name(), col_sel, dst.name()));
      if (sample) trace.push_back($sformatf("S%s.r%0d.c%0d.%s.%0d", row_op.name(), row_sel, col_sel,
                                            dst.name(), iref_na));
    end
  end

  // ADC + output interface stand-in: y_valid two cycles after the last VMM sample.
  int vmm_samples;
  always @(posedge clk) begin
    if (clr_y) begin vmm_samples <= 0; y_valid <= 0; end
    else if (sample && dst == DST_ADC) vmm_samples <= vmm_samples + 1;
    else if (vmm_samples == M) y_valid <= 1;
  end

  task automatic run(input cmd_e c, output int cycles);
    trace.delete(); busy_cycles = 0; n_clr_resp = 0; n_clr_y = 0;
    @(negedge clk); cmd = c; start = 1;
    @(negedge clk); start = 0; cmd = CMD_NOP;
    while (!done) @(negedge clk);
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL %s: busy after done", c.name()); end
    cycles = busy_cycles;
  endtask

  function automatic string pulses(input string first, input string second);
    string s = "";
    for (int j = 0; j < M; j++)
      s = {s, $sformatf("P%s.c%0d.DST_GND ", first, j), $sformatf("P%s.c%0d.DST_GND ", second, j)};
    return s;
  endfunction

  function automatic string joined();
    string s = "";
    foreach (trace[k]) s = {s, trace[k], " "};
    return s;
  endfunction

  task automatic expect_trace(input string what, input string exp_s);
    string got;
    got = joined();
    checks++;
    if (got != exp_s) begin
      failures++;
      $display("FAIL %s trace\n  got      %s\n  expected %s", what, got, exp_s);
    end
  endtask

  task automatic expect_cycles(input string what, input int got, input int exp_c);
    checks++;
    if (got != exp_c) begin failures++; $display("FAIL %s busy %0d cycles, expected %0d", what, got, exp_c); end
  endtask

  initial begin
    int cyc;
    string s;
    int ref_cell, ref_puf;
    cmd = CMD_NOP; chal_ones = 3;
    ref_cell = I_LRS_READ_NA / 2;
    ref_puf = 3 * I_LRS_READ_NA / 2;
    repeat (2) @(negedge clk);
    rst_n = 1;

    run(CMD_PROG, cyc);
    expect_trace("PROG", pulses("OP_SET", "OP_VR"));
    expect_cycles("PROG", cyc, 1 + 2 * M * P + 1);
    checks++; if (use_key) begin failures++; $display("FAIL PROG uses key"); end

    run(CMD_VMM, cyc);
    s = "";
    for (int j = 0; j < M; j++) s = {s, $sformatf("SOP_VMM.r0.c%0d.DST_ADC.0 ", j)};
    expect_trace("VMM", s);
    expect_cycles("VMM", cyc, 1 + M * R + 2 + 1);
    checks++; if (n_clr_y != 1 || n_clr_resp != 0) begin failures++; $display("FAIL VMM clears"); end

    run(CMD_PUF, cyc);
    s = "";
    for (int j = 0; j < M; j++) s = {s, $sformatf("SOP_PUF.r0.c%0d.DST_RESP.%0d ", j, ref_puf)};
    expect_trace("PUF", s);
    expect_cycles("PUF", cyc, 1 + M * R + 1);
    checks++; if (n_clr_resp != 1) begin failures++; $display("FAIL PUF clear"); end

    run(CMD_TRNG, cyc);
    s = pulses("OP_RESET", "OP_TRNG");
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++) s = {s, $sformatf("SOP_CELL.r%0d.c%0d.DST_TRNG.%0d ", i, j, ref_cell)};
    expect_trace("TRNG", s);
    expect_cycles("TRNG", cyc, 1 + 2 * M * P + 1 + N * M * R + 1);

    run(CMD_LOCK, cyc);
    s = pulses("OP_RESET", "OP_TRNG");
    for (int j = 0; j < M; j++) s = {s, $sformatf("SOP_PUF.r0.c%0d.DST_RESP.%0d ", j, ref_puf)};
    expect_trace("LOCK", s);
    expect_cycles("LOCK", cyc, 1 + 2 * M * P + 1 + M * R + 1);

    run(CMD_UNLOCK, cyc);
    s = pulses("OP_RESET", "OP_TRNG");
    for (int j = 0; j < M; j++) s = {s, $sformatf("SOP_PUF.r0.c%0d.DST_RESP.%0d ", j, ref_puf)};
    s = {s, pulses("OP_SET", "OP_VR")};
    expect_trace("UNLOCK", s);
    expect_cycles("UNLOCK", cyc, 1 + 2 * M * P + 1 + M * R + 1 + 2 * M * P + 1);
    checks++; if (!use_key) begin failures++; $display("FAIL UNLOCK does not decrypt"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
