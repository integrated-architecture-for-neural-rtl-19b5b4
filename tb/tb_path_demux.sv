// tb_path_demux: for each of the four outputs (ADC, Responses, TRNG, GND) checks that a
// valid sample reaches only the selected output and that GND is raised only when selected.
module tb_path_demux;
  import rram_pkg::*;
  int checks = 0, failures = 0;
  dst_e sel;
  logic valid, bit_in;
  na_t amp, adc_in;
  logic adc_valid, resp_valid, resp_bit, trng_valid, trng_bit, gnd;

  path_demux dut (.sel, .valid, .amp, .bit_in, .adc_valid, .adc_in, .resp_valid, .resp_bit,
                  .trng_valid, .trng_bit, .gnd);

  task automatic check(input dst_e s, input logic v, input logic b);
    sel = s; valid = v; bit_in = b; amp = na_t'($urandom_range(100000, 1)); #1;
    checks++;
    if (adc_valid  != (v && s == DST_ADC)  || (s == DST_ADC && adc_in != amp) ||
        resp_valid != (v && s == DST_RESP) || (s == DST_RESP && resp_bit != b) ||
        trng_valid != (v && s == DST_TRNG) || (s == DST_TRNG && trng_bit != b) ||
        gnd != (s == DST_GND)) begin
      failures++;
      $display("FAIL sel=%s valid=%0b bit=%0b: adc %0b/%0d resp %0b/%0b trng %0b/%0b gnd %0b",
               s.name(), v, b, adc_valid, adc_in, resp_valid, resp_bit, trng_valid, trng_bit, gnd);
    end
  endtask

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int s = 0; s < 4; s++)
      for (int v = 0; v < 2; v++)
        for (int b = 0; b < 2; b++)
          check(dst_e'(s), 1'(v), 1'(b));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
