// path_demux: the (1 x 4) DeMUX behind the current sense amplifier. It decides where the
// sensed column goes:
//   DST_ADC   amplified current to the ADC                 (VMM, multi-state mode)
//   DST_RESP  comparison bit to the Responses register     (PUF, two-state mode; the ADC
//                                                           is bypassed)
//   DST_TRNG  comparison bit to the TRNG buffer            (TRNG read-out)
//   DST_GND   grounds the selected column                  (programming pulses)
// valid marks a sample; only the selected output's valid is raised. gnd does not need
// valid: the column stays grounded for as long as sel is DST_GND. Combinational.
//
// The paper draws the 1x4 DeMUX with outputs ADC, Responses and TRNG and says that the
// DeMUX connects the device's other terminal to GND for the TRNG; taking GND as the fourth
// output and the encoding are this design's choices.
module path_demux
  import rram_pkg::*;
(
  input  dst_e sel,
  input  logic valid,
  input  na_t  amp,
  input  logic bit_in,
  output logic adc_valid,
  output na_t  adc_in,
  output logic resp_valid,
  output logic resp_bit,
  output logic trng_valid,
  output logic trng_bit,
  output logic gnd
);

  always_comb begin
    adc_valid  = valid && (sel == DST_ADC);
    adc_in     = (sel == DST_ADC) ? amp : '0;
    resp_valid = valid && (sel == DST_RESP);
    resp_bit   = (sel == DST_RESP) && bit_in;
    trng_valid = valid && (sel == DST_TRNG);
    trng_bit   = (sel == DST_TRNG) && bit_in;
    gnd        = (sel == DST_GND);
  end

endmodule
