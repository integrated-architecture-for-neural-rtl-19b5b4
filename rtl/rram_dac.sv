// rram_dac: behavioural model of one row driver, the DAC at the left of each crossbar row
// (mixed-signal in silicon; here the voltage is an integer in millivolts).
//
// The input digital interface gives each row a drive kind and a 2-bit code; the DAC turns
// them into the row-line voltage:
//   DRV_VMM   code * V_STEP_MV    the input levels v0..v3 of a vector-matrix multiply
//   DRV_READ  V_READ_MV           read voltage (PUF challenge bit 1, TRNG device read)
//   DRV_SET   +V_SET_MV           SET pulse amplitude, 2.0 V
//   DRV_RESET -V_RESET_MV         full RESET pulse amplitude, -2.0 V
//   DRV_TRNG  +V50_MV             the 50% switching-probability pulse
//   DRV_VR    -vr_mv(code)        gradual RESET to weight level code (2.0/1.6/1.4/1.0 V)
//   DRV_OFF   0 V
// Combinational: the voltage follows drive and code in the same cycle.
//
// The paper gives the mapping of inputs to levels v0..v3, the 2.0 V SET/RESET pulses and
// the four gradual-RESET amplitudes; the level spacing, the read voltage, the 50% pulse
// amplitude and the use of the same driver for programming are this design's choices.
module rram_dac
  import rram_pkg::*;
(
  input  drive_e     drive,
  input  logic [1:0] code,
  output mv_t        v_mv
);

  always_comb begin
    unique case (drive)
      DRV_VMM:   v_mv = mv_t'(int'(code) * V_STEP_MV);
      DRV_READ:  v_mv = mv_t'(V_READ_MV);
      DRV_SET:   v_mv = mv_t'(V_SET_MV);
      DRV_RESET: v_mv = mv_t'(-V_RESET_MV);
      DRV_TRNG:  v_mv = mv_t'(V50_MV);
      DRV_VR:    v_mv = mv_t'(-vr_mv(code));
      default:   v_mv = '0;
    endcase
  end

endmodule
