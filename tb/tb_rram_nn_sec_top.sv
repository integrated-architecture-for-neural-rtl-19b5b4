// tb_rram_nn_sec_top: end-to-end run of the whole architecture at its default size
// (16x16 crossbar, 2-bit weights and inputs), through the host ports only, with the
// expected values worked out here from the stimulus and from the device states:
//   1. CMD_PROG a random weight matrix, CMD_VMM with three random input vectors:
//      y[j] = sum_i x[i]*w[i][j], and the busy time of a VMM.
//   2. CMD_TRNG: 256 random bits, equal to the LRS/HRS state left in the devices, with a
//      35-65% share of ones.
//   3. CMD_LOCK (Algorithm 1) with a challenge: the key equals the response expected from
//      the device states; the encrypted weights read back equal w XOR key.
//   4. CMD_PUF with the same challenge twice more: same key (reliability).
//   5. The encrypted weights are loaded as a user would receive them, CMD_UNLOCK
//      (Algorithm 2): the key is regenerated, the devices hold the decrypted weights and
//      a VMM gives the plain-weight results.
// Every mechanism (programming pulse, each DeMUX output, each command) is counted and
// must have happened.
module tb_rram_nn_sec_top;
  import rram_pkg::*;
  localparam int N = 16, M = 16;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cmd_e cmd;
  logic start, busy, done, x_load, chal_load, w_we, y_valid, adc_ovf, key_valid, trng_valid;
  logic [1:0] x_in [N];
  logic [N-1:0] chal_in;
  logic [3:0] w_row, rd_row;
  logic [1:0] w_data [M];
  logic [1:0] rd_data [M];
  logic [7:0] y [M];
  logic [M-1:0] key, trng_word;
  logic [31:0] trng_bits;

  rram_nn_sec_top dut (
    .clk, .rst_n, .cmd, .start, .busy, .done, .x_load, .x_in, .chal_load, .chal_in,
    .w_we, .w_row, .w_data, .rd_row, .rd_data, .y, .y_valid, .adc_ovf, .key, .key_valid,
    .trng_word, .trng_valid, .trng_bits);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mechanism counters.
  int n_pulse, n_adc, n_resp, n_trng, n_gnd_cycles;
  int n_cmd [8];
  logic [M-1:0] trng_words [$];
  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.xbar_pulse) n_pulse++;
      if (dut.adc_start) n_adc++;
      if (dut.resp_valid) n_resp++;
      if (dut.trng_bv) n_trng++;
      if (dut.gnd) n_gnd_cycles++;
      if (trng_valid) trng_words.push_back(trng_word);
    end
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic run(input cmd_e c, output int cycles);
    @(negedge clk); cmd = c; start = 1;
    @(negedge clk); start = 0; cmd = CMD_NOP;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    @(negedge clk);
    n_cmd[int'(c)]++;
  endtask

  task automatic load_weights(input logic [1:0] w [N][M]);
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      w_we = 1; w_row = 4'(i);
      for (int j = 0; j < M; j++) w_data[j] = w[i][j];
    end
    @(negedge clk); w_we = 0;
  endtask

  task automatic load_x(input logic [1:0] x [N]);
    @(negedge clk); x_load = 1; x_in = x;
    @(negedge clk); x_load = 0;
  endtask

  task automatic load_chal(input logic [N-1:0] c);
    @(negedge clk); chal_load = 1; chal_in = c;
    @(negedge clk); chal_load = 0;
  endtask

  // VMM of x with w, compared with the outputs.
  task automatic vmm_check(input logic [1:0] w [N][M], input string what);
    logic [1:0] x [N];
    int cyc;
    for (int i = 0; i < N; i++) x[i] = 2'($urandom());
    load_x(x);
    run(CMD_VMM, cyc);
    check(cyc == 1 + M * READ_CYCLES + 2 + 1, $sformatf("%s VMM took %0d cycles", what, cyc));
    check(y_valid && !adc_ovf, $sformatf("%s y_valid=%0b ovf=%0b", what, y_valid, adc_ovf));
    for (int j = 0; j < M; j++) begin
      int s = 0;
      for (int i = 0; i < N; i++) s += int'(x[i]) * int'(w[i][j]);
      check(int'(y[j]) == s, $sformatf("%s y[%0d]=%0d expected %0d", what, j, y[j], s));
    end
  endtask

  // Expected PUF response from the device states: column current above half the LRS
  // current of the active rows.
  function automatic logic [M-1:0] expected_response(input logic [N-1:0] c);
    logic [M-1:0] r;
    int k, on;
    k = $countones(c);
    for (int j = 0; j < M; j++) begin
      on = 0;
      for (int i = 0; i < N; i++) if (c[i] && dut.u_xbar.level[i][j] == 2'd3) on++;
      r[j] = (2 * on > k);
    end
    return r;
  endfunction

  initial begin
    logic [1:0] w [N][M];
    logic [1:0] enc [N][M];
    logic [N-1:0] chal;
    logic [M-1:0] k_lock, k_exp;
    logic [255:0] state_bits, trng_all;
    int cyc, ones;

    cmd = CMD_NOP; start = 0; x_load = 0; chal_load = 0; w_we = 0; w_row = 0; rd_row = 0;
    chal_in = 0;
    for (int i = 0; i < N; i++) x_in[i] = 0;
    for (int j = 0; j < M; j++) w_data[j] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. plain weights, programmed and multiplied
    for (int i = 0; i < N; i++) for (int j = 0; j < M; j++) w[i][j] = 2'($urandom());
    load_weights(w);
    run(CMD_PROG, cyc);
    check(cyc == 1 + 2 * M * PULSE_CYCLES + 1, $sformatf("PROG took %0d cycles", cyc));
    for (int t = 0; t < 3; t++) vmm_check(w, "plain");

    // 2. TRNG
    trng_words.delete();
    run(CMD_TRNG, cyc);
    check(cyc == 1 + 2 * M * PULSE_CYCLES + 1 + N * M * READ_CYCLES + 1,
          $sformatf("TRNG took %0d cycles", cyc));
    check(trng_words.size() == N, $sformatf("%0d TRNG words", trng_words.size()));
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++) state_bits[i*M+j] = (dut.u_xbar.level[i][j] == 2'd3);
    for (int k = 0; k < trng_words.size() && k < N; k++) trng_all[k*M +: M] = trng_words[k];
    check(trng_all == state_bits, "TRNG bits differ from the device states");
    ones = $countones(trng_all);
    check(ones >= 90 && ones <= 166, $sformatf("TRNG ones %0d of 256", ones));

    // 3. lock
    chal = 16'($urandom()) | 16'h0101;
    load_chal(chal);
    run(CMD_LOCK, cyc);
    check(cyc == 1 + 2 * M * PULSE_CYCLES + 1 + M * READ_CYCLES + 1, $sformatf("LOCK took %0d cycles", cyc));
    k_exp = expected_response(chal);
    k_lock = key;
    check(key_valid && key == k_exp, $sformatf("LOCK key %h expected %h", key, k_exp));
    for (int i = 0; i < N; i++) begin
      @(negedge clk); rd_row = 4'(i); #1;
      for (int j = 0; j < M; j++) begin
        enc[i][j] = rd_data[j];
        check(rd_data[j] == (w[i][j] ^ {2{k_lock[j]}}), $sformatf("encrypted (%0d,%0d)", i, j));
      end
    end

    // 4. reliability: the same challenge again
    for (int t = 0; t < 2; t++) begin
      run(CMD_PUF, cyc);
      check(cyc == 1 + M * READ_CYCLES + 1, $sformatf("PUF took %0d cycles", cyc));
      check(key_valid && key == k_lock, $sformatf("PUF repeat key %h expected %h", key, k_lock));
    end

    // 5. unlock the received encrypted weights
    load_weights(enc);
    load_chal(chal);
    run(CMD_UNLOCK, cyc);
    check(cyc == 1 + 2 * M * PULSE_CYCLES + 1 + M * READ_CYCLES + 1 + 2 * M * PULSE_CYCLES + 1,
          $sformatf("UNLOCK took %0d cycles", cyc));
    check(key == k_lock, $sformatf("UNLOCK key %h expected %h", key, k_lock));
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++)
        check(dut.u_xbar.level[i][j] == w[i][j], $sformatf("device (%0d,%0d) after unlock", i, j));
    for (int t = 0; t < 3; t++) vmm_check(w, "unlocked");

    // Mechanisms
    check(n_cmd[int'(CMD_PROG)] > 0 && n_cmd[int'(CMD_VMM)] > 0 && n_cmd[int'(CMD_TRNG)] > 0 &&
          n_cmd[int'(CMD_PUF)] > 0 && n_cmd[int'(CMD_LOCK)] > 0 && n_cmd[int'(CMD_UNLOCK)] > 0,
          "a command was never run");
    check(n_pulse == 10 * M, $sformatf("%0d programming pulses, expected %0d", n_pulse, 10 * M));
    check(n_adc == 6 * M, $sformatf("%0d ADC samples", n_adc));
    check(n_resp == 4 * M, $sformatf("%0d response samples", n_resp));
    check(n_trng == N * M, $sformatf("%0d TRNG samples", n_trng));
    check(n_gnd_cycles == n_pulse * PULSE_CYCLES, $sformatf("%0d grounded cycles", n_gnd_cycles));
    $display("mechanisms: PROG %0d VMM %0d TRNG %0d PUF %0d LOCK %0d UNLOCK %0d | pulses %0d, DeMUX ADC %0d RESP %0d TRNG %0d GND-cycles %0d",
             n_cmd[int'(CMD_PROG)], n_cmd[int'(CMD_VMM)], n_cmd[int'(CMD_TRNG)], n_cmd[int'(CMD_PUF)],
             n_cmd[int'(CMD_LOCK)], n_cmd[int'(CMD_UNLOCK)], n_pulse, n_adc, n_resp, n_trng, n_gnd_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
