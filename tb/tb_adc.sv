// tb_adc: converts currents of k LSB (k = 0..255, plus offsets below half an LSB) and
// checks code = k with valid exactly one cycle after start; checks saturation and ovf
// above full scale, and an instance with 3-bit resolution (the width the paper's
// ceil(log2(w*m)) gives for a 4x4 array) saturating the 12 of its example.
module tb_adc;
  import rram_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  na_t in_na;
  logic [7:0] code;
  logic [2:0] code3;
  logic valid, ovf, valid3, ovf3;
  localparam int LSB = 100 * 203 * 4;

  adc dut (.clk, .rst_n, .start, .in_na, .code, .valid, .ovf);
  adc #(.BITS(3)) dut3 (.clk, .rst_n, .start, .in_na, .code(code3), .valid(valid3), .ovf(ovf3));

  always #5 clk = ~clk;

  initial begin
    repeat (200000 / 10) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic convert(input int cur, input int exp_code, input logic exp_ovf);
    @(negedge clk); in_na = cur; start = 1;
    @(negedge clk); start = 0;
    checks++;
    if (!valid || int'(code) != exp_code || ovf != exp_ovf) begin
      failures++;
      $display("FAIL in=%0d code=%0d valid=%0b ovf=%0b expected %0d/%0b", cur, code, valid, ovf,
               exp_code, exp_ovf);
    end
    @(negedge clk);
    checks++;
    if (valid) begin failures++; $display("FAIL valid held longer than one cycle"); end
  endtask

  initial begin
    in_na = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 256; k++) convert(k * LSB + (k % 3 - 1) * (LSB / 3), k, 1'b0);
    convert(300 * LSB, 255, 1'b1);
    convert(-5 * LSB, 0, 1'b0);
    // 3-bit instance
    @(negedge clk); in_na = 12 * LSB; start = 1;
    @(negedge clk); start = 0;
    checks++;
    if (!valid3 || code3 != 3'd7 || !ovf3) begin
      failures++; $display("FAIL 3-bit ADC: code=%0d ovf=%0b", code3, ovf3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
