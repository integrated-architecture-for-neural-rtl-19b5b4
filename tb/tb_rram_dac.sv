// tb_rram_dac: checks every drive kind and code of one row DAC against the voltages
// listed in the design notes (v_k = k*100 mV, read 200 mV, +/-2000 mV SET/RESET,
// +1500 mV 50% pulse, gradual RESET -2000/-1600/-1400/-1000 mV for weights 0..3).
module tb_rram_dac;
  import rram_pkg::*;
  int checks = 0, failures = 0;
  drive_e drive;
  logic [1:0] code;
  mv_t v;

  rram_dac dut (.drive(drive), .code(code), .v_mv(v));

  task automatic expect_v(input drive_e d, input logic [1:0] c, input int mv);
    drive = d; code = c; #1;
    checks++;
    if (int'(v) != mv) begin
      failures++;
      $display("FAIL drive=%s code=%0d v=%0d expected %0d", d.name(), c, v, mv);
    end
  endtask

  initial begin
    #1000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int c = 0; c < 4; c++) begin
      expect_v(DRV_OFF,   2'(c), 0);
      expect_v(DRV_VMM,   2'(c), 100 * c);
      expect_v(DRV_READ,  2'(c), 200);
      expect_v(DRV_SET,   2'(c), 2000);
      expect_v(DRV_RESET, 2'(c), -2000);
      expect_v(DRV_TRNG,  2'(c), 1500);
    end
    expect_v(DRV_VR, 2'd0, -2000);
    expect_v(DRV_VR, 2'd1, -1600);
    expect_v(DRV_VR, 2'd2, -1400);
    expect_v(DRV_VR, 2'd3, -1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
