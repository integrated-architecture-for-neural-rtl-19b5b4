// csa: behavioural model of the current sense amplifier behind the column multiplexer
// (analog in silicon).
//
// It serves both readout styles of the architecture:
//   amp     = GAIN * i_na       the amplified column current, converted by the ADC (VMM)
//   bit_out = i_na > iref_na    a Boolean decision against the reference Vref (PUF
//                               response bit, TRNG device read)
// With en = 0 both outputs are 0. Combinational.
//
// The paper says the CSA amplifies the column current for digital conversion and turns
// the PUF column current into a response bit against Vref; the gain and the reference
// values (set by the control circuit) are this design's choices.
module csa
  import rram_pkg::*;
#(
  parameter int GAIN = CSA_GAIN
) (
  input  logic en,
  input  na_t  i_na,
  input  na_t  iref_na,
  output na_t  amp,
  output logic bit_out
);

  always_comb begin
    amp     = en ? na_t'(i_na * GAIN) : '0;
    bit_out = en && (i_na > iref_na);
  end

endmodule
