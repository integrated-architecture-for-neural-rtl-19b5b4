// tb_csa: random currents and references; checks the amplified output (gain 4) and the
// comparison bit, including equal current and reference, and that en = 0 silences both.
module tb_csa;
  import rram_pkg::*;
  int checks = 0, failures = 0;
  logic en;
  na_t i_na, iref, amp;
  logic b;

  csa dut (.en(en), .i_na(i_na), .iref_na(iref), .amp(amp), .bit_out(b));

  task automatic check(input logic e, input int i, input int r);
    en = e; i_na = i; iref = r; #1;
    checks++;
    if (e && (int'(amp) != 4 * i || b != (i > r))) begin
      failures++;
      $display("FAIL i=%0d ref=%0d amp=%0d bit=%0b", i, r, amp, b);
    end
    if (!e && (amp != 0 || b)) begin
      failures++;
      $display("FAIL disabled CSA drives amp=%0d bit=%0b", amp, b);
    end
  endtask

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    check(1'b1, 1000, 1000);
    check(1'b1, 1001, 1000);
    check(1'b1, 999, 1000);
    check(1'b0, 5000, 10);
    for (int k = 0; k < 200; k++)
      check(1'b1, int'($urandom_range(500000, 0)), int'($urandom_range(500000, 0)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
