// tb_column_mux: fills the 16 inputs with random words and checks that every select
// value returns its own input, over several random fillings.
module tb_column_mux;
  int checks = 0, failures = 0;
  logic [31:0] col_in [16];
  logic [3:0]  sel;
  logic [31:0] out;

  column_mux #(.M(16), .WIDTH(32)) dut (.col_in(col_in), .sel(sel), .out(out));

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int r = 0; r < 8; r++) begin
      for (int j = 0; j < 16; j++) col_in[j] = $urandom();
      for (int j = 0; j < 16; j++) begin
        sel = 4'(j); #1;
        checks++;
        if (out !== col_in[j]) begin
          failures++;
          $display("FAIL sel=%0d out=%h expected %h", j, out, col_in[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
