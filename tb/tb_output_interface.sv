// tb_output_interface: delivers 16 ADC codes in random column order and checks the
// output vector, that y_valid rises only after the last column, the overflow flag, and
// that clear restarts collection.
module tb_output_interface;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0, adc_valid = 0, adc_ovf = 0;
  logic [7:0] adc_code;
  logic [3:0] col;
  logic [7:0] y [16];
  logic y_valid, ovf;

  output_interface #(.M(16), .BITS(8)) dut (.clk, .rst_n, .clear, .adc_valid, .adc_code,
                                             .adc_ovf, .col, .y, .y_valid, .ovf);

  always #5 clk = ~clk;

  initial begin
    repeat (100000 / 10) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [7:0] ref_y [16];
    int order [16];
    int ovf_col;
    col = 0; adc_code = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      ovf_col = (t % 2 == 1) ? int'($urandom_range(15, 0)) : -1;
      for (int j = 0; j < 16; j++) begin order[j] = j; ref_y[j] = 8'($urandom()); end
      for (int j = 15; j > 0; j--) begin
        int k, tmp;
        k = int'($urandom_range(j, 0));
        tmp = order[j]; order[j] = order[k]; order[k] = tmp;
      end
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      checks++;
      if (y_valid || ovf) begin failures++; $display("FAIL clear"); end
      for (int j = 0; j < 16; j++) begin
        adc_valid = 1; col = 4'(order[j]); adc_code = ref_y[order[j]];
        adc_ovf = (order[j] == ovf_col);
        @(negedge clk);
        if (j < 15) begin
          checks++;
          if (y_valid) begin failures++; $display("FAIL early y_valid"); end
        end
      end
      adc_valid = 0; adc_ovf = 0;
      checks++;
      if (!y_valid || ovf != (ovf_col >= 0)) begin
        failures++; $display("FAIL y_valid=%0b ovf=%0b", y_valid, ovf);
      end
      for (int j = 0; j < 16; j++) begin
        checks++;
        if (y[j] != ref_y[j]) begin failures++; $display("FAIL y[%0d]=%0d expected %0d", j, y[j], ref_y[j]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
