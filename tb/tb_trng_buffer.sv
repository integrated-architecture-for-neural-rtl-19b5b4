// tb_trng_buffer: feeds random bits with random gaps and checks that each 16-bit word holds
// them first-bit-in-LSB, that word_valid is a single-cycle strobe per 16 bits, and the
// running bit count.
module tb_trng_buffer;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, bit_valid = 0, bit_in = 0;
  logic [15:0] word;
  logic word_valid;
  logic [31:0] bit_count;
  logic [15:0] expect_q [$];
  logic [15:0] cur;
  int nbits = 0, words = 0;

  trng_buffer #(.WORD(16)) dut (.clk, .rst_n, .bit_valid, .bit_in, .word, .word_valid, .bit_count);

  always #5 clk = ~clk;

  initial begin
    repeat (200000 / 10) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    if (rst_n && word_valid) begin
      checks++;
      words++;
      if (expect_q.size() == 0 || word != expect_q[0]) begin
        failures++; $display("FAIL word=%h", word);
      end
      if (expect_q.size() != 0) void'(expect_q.pop_front());
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 16 * 10; n++) begin
      while ($urandom_range(3, 0) == 0) begin bit_valid = 0; @(negedge clk); end
      bit_valid = 1; bit_in = 1'($urandom());
      cur[n % 16] = bit_in;
      nbits++;
      if (n % 16 == 15) expect_q.push_back(cur);
      @(negedge clk);
    end
    bit_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (words != 10 || bit_count != 32'(nbits)) begin
      failures++; $display("FAIL words=%0d bit_count=%0d expected 10/%0d", words, bit_count, nbits);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
