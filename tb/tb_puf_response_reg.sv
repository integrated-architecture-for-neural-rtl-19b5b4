// tb_puf_response_reg: stores random response bits in a random column order and checks the
// key, that key_valid rises only once all 16 columns arrived, and that clear empties it.
module tb_puf_response_reg;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, bit_valid = 0, bit_in = 0;
  logic [3:0] col;
  logic [15:0] key;
  logic key_valid;

  puf_response_reg #(.M(16)) dut (.clk, .rst_n, .clear, .bit_valid, .bit_in, .col, .key, .key_valid);

  always #5 clk = ~clk;

  initial begin
    repeat (100000 / 10) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [15:0] ref_key;
    int order [16];
    col = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      ref_key = 16'($urandom());
      for (int j = 0; j < 16; j++) order[j] = j;
      for (int j = 15; j > 0; j--) begin
        int k, tmp;
        k = int'($urandom_range(j, 0));
        tmp = order[j]; order[j] = order[k]; order[k] = tmp;
      end
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      checks++;
      if (key_valid || key != 0) begin failures++; $display("FAIL clear"); end
      for (int j = 0; j < 16; j++) begin
        bit_valid = 1; col = 4'(order[j]); bit_in = ref_key[order[j]];
        @(negedge clk);
        if (j < 15) begin
          checks++;
          if (key_valid) begin failures++; $display("FAIL key_valid after %0d bits", j + 1); end
        end
      end
      bit_valid = 0;
      checks++;
      if (!key_valid || key != ref_key) begin
        failures++; $display("FAIL key=%h expected %h valid=%0b", key, ref_key, key_valid);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
