// tb_puf_metrics: the PUF quality figures over several simulated dies. Four full-size dies
// (SEED 1..4, i.e. four different device-to-device variation patterns) each get the 50%
// switching pulse once (CMD_LOCK), then answer the same 24 random challenges twice
// (CMD_PUF). From the 16-bit responses it computes
//   reliability  share of response bits equal in the two rounds (same die, same challenge)
//   uniformity   share of ones in the responses
//   uniqueness   mean Hamming distance between two dies' responses to a challenge
//   bit-aliasing mean over bit positions and challenges of the share of dies answering 1
// and checks reliability = 100%, uniqueness within 35-65% and the other two within
// 30-70% (an ideal PUF
// gives 50%). Each response is also checked against the one expected from the device
// states (column LRS count above half the active rows).
module tb_puf_metrics;
  import rram_pkg::*;
  localparam int D = 4, NCH = 24;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  cmd_e cmd;
  logic start, chal_load;
  logic [15:0] chal_in;
  logic [1:0] x_in [16];
  logic [1:0] w_data [16];
  logic busy [D], done [D], y_valid [D], adc_ovf [D], key_valid [D], trng_valid [D];
  logic [15:0] key [D], trng_word [D];
  logic [1:0] rd_data [D][16];
  logic [7:0] y [D][16];
  logic [31:0] trng_bits [D];
  logic [15:0] resp [2][D][NCH];

  for (genvar g = 0; g < D; g++) begin : g_die
    rram_nn_sec_top #(.SEED(g + 1)) u_die (
      .clk, .rst_n, .cmd, .start, .busy(busy[g]), .done(done[g]), .x_load(1'b0), .x_in,
      .chal_load, .chal_in, .w_we(1'b0), .w_row(4'd0), .w_data, .rd_row(4'd0),
      .rd_data(rd_data[g]), .y(y[g]), .y_valid(y_valid[g]), .adc_ovf(adc_ovf[g]),
      .key(key[g]), .key_valid(key_valid[g]), .trng_word(trng_word[g]),
      .trng_valid(trng_valid[g]), .trng_bits(trng_bits[g]));
  end

  // Expected response of die d from its device states.
  logic [1:0] lv [D][16][16];
  always_comb begin
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) begin
        lv[0][i][j] = g_die[0].u_die.u_xbar.level[i][j];
        lv[1][i][j] = g_die[1].u_die.u_xbar.level[i][j];
        lv[2][i][j] = g_die[2].u_die.u_xbar.level[i][j];
        lv[3][i][j] = g_die[3].u_die.u_xbar.level[i][j];
      end
  end

  function automatic logic [15:0] expected(input int d, input logic [15:0] c);
    logic [15:0] r;
    int on;
    for (int j = 0; j < 16; j++) begin
      on = 0;
      for (int i = 0; i < 16; i++) if (c[i] && lv[d][i][j] == 2'd3) on++;
      r[j] = (2 * on > $countones(c));
    end
    return r;
  endfunction

  task automatic run(input cmd_e c);
    @(negedge clk); cmd = c; start = 1;
    @(negedge clk); start = 0; cmd = CMD_NOP;
    while (!done[0]) @(negedge clk);
    @(negedge clk);
  endtask

  initial begin
    logic [15:0] chal [NCH];
    real rel, uni, uniq, alias_sum;
    int same, total, ones, hd, pairs, cnt;
    cmd = CMD_NOP; start = 0; chal_load = 0; chal_in = 0;
    for (int i = 0; i < 16; i++) begin x_in[i] = 0; w_data[i] = 0; end
    for (int k = 0; k < NCH; k++) chal[k] = 16'($urandom()) | 16'h0001;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // entropy once (CMD_LOCK = 50% pulse + one challenge)
    @(negedge clk); chal_load = 1; chal_in = chal[0];
    @(negedge clk); chal_load = 0;
    run(CMD_LOCK);
    for (int r = 0; r < 2; r++)
      for (int k = 0; k < NCH; k++) begin
        @(negedge clk); chal_load = 1; chal_in = chal[k];
        @(negedge clk); chal_load = 0;
        run(CMD_PUF);
        for (int d = 0; d < D; d++) begin
          resp[r][d][k] = key[d];
          check(key_valid[d] && key[d] == expected(d, chal[k]),
                $sformatf("die %0d challenge %h: response %h expected %h", d, chal[k], key[d], expected(d, chal[k])));
        end
      end

    same = 0; total = 0; ones = 0;
    for (int d = 0; d < D; d++)
      for (int k = 0; k < NCH; k++) begin
        same += 16 - $countones(resp[0][d][k] ^ resp[1][d][k]);
        ones += $countones(resp[0][d][k]);
        total += 16;
      end
    rel = 100.0 * same / total;
    uni = 100.0 * ones / total;
    hd = 0; pairs = 0;
    for (int a = 0; a < D; a++)
      for (int b = a + 1; b < D; b++)
        for (int k = 0; k < NCH; k++) begin
          hd += $countones(resp[0][a][k] ^ resp[0][b][k]);
          pairs++;
        end
    uniq = 100.0 * hd / (16 * pairs);
    alias_sum = 0.0;
    for (int k = 0; k < NCH; k++)
      for (int j = 0; j < 16; j++) begin
        cnt = 0;
        for (int d = 0; d < D; d++) cnt += int'(resp[0][d][k][j]);
        alias_sum += real'(cnt) / D;
      end
    alias_sum = 100.0 * alias_sum / (NCH * 16);
    $display("PUF over %0d dies x %0d challenges: reliability %.2f%%, uniformity %.2f%%, uniqueness %.2f%%, bit-aliasing %.2f%%",
             D, NCH, rel, uni, uniq, alias_sum);
    check(same == total, "reliability below 100%");
    check(uni > 30.0 && uni < 70.0, "uniformity out of range");
    check(uniq > 35.0 && uniq < 65.0, "uniqueness out of range");
    check(alias_sum > 30.0 && alias_sum < 70.0, "bit-aliasing out of range");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
