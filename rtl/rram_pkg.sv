// rram_pkg: types and constants shared by the RRAM crossbar architecture that runs
// neural-network vector-matrix multiplication (VMM), a true random number generator
// (TRNG) and a physical unclonable function (PUF) on one passive crossbar.
//
// Electrical quantities travel between blocks as integers: row voltages in millivolts
// (mv_t, signed) and column currents in nanoamperes (na_t, signed). A conductance in
// microsiemens times a voltage in millivolts is a current in nanoamperes.
//
// From the paper: the 16x16 crossbar, 2-bit weights and 2-bit inputs, the +/-2.0 V
// SET/RESET pulses of 150 ns, and the four gradual-RESET amplitudes 1.0/1.4/1.6/2.0 V.
// This design's own choices: the read voltages, the conductance step, the 50%
// switching amplitude, the clock (100 MHz, so a 150 ns pulse is 15 cycles) and every
// encoding below. Not every module uses every constant, so a module compiled on its
// own may leave some of them unused.
package rram_pkg;

  // Array geometry and word sizes.
  parameter int unsigned N_ROWS = 16;  // crossbar rows (one DAC each)
  parameter int unsigned N_COLS = 16;  // crossbar columns
  parameter int unsigned W_BITS = 2;   // weight bits stored per device
  parameter int unsigned X_BITS = 2;   // input-vector bits per row
  // ADC wide enough for the largest column sum N*(2^W-1)*(2^X-1).
  parameter int unsigned ADC_BITS = $clog2(N_ROWS * ((1 << W_BITS) - 1) * ((1 << X_BITS) - 1) + 1);

  // Analog quantities as integers.
  typedef logic signed [15:0] mv_t;  // voltage, mV
  typedef logic signed [31:0] na_t;  // current, nA

  // Device and driver constants.
  parameter int V_SET_MV     = 2000;  // SET to LRS
  parameter int V_RESET_MV   = 2000;  // magnitude of the full RESET to HRS
  parameter int V_STEP_MV    = 100;   // VMM input level spacing: v_k = k * V_STEP_MV
  parameter int V_READ_MV    = 200;   // read voltage for TRNG read-out and PUF challenges
  parameter int V50_MV       = 1500;  // 50% switching-probability SET pulse
  parameter int G_STEP_US    = 203;   // conductance per weight level (LRS ~ 3 steps)
  parameter int CSA_GAIN     = 4;     // current sense amplifier gain
  parameter int PULSE_CYCLES = 15;    // 150 ns programming pulse at a 10 ns clock
  parameter int READ_CYCLES  = 2;     // settle + sample per column read

  // Current of one LRS device at the read voltage.
  parameter int I_LRS_READ_NA = V_READ_MV * G_STEP_US * ((1 << W_BITS) - 1);
  // ADC least significant bit: one unit weight x one unit input, after the CSA.
  parameter int ADC_LSB_NA = V_STEP_MV * G_STEP_US * CSA_GAIN;

  // Gradual-RESET amplitude (magnitude, mV) that leaves a device at weight level w.
  function automatic int vr_mv(input logic [1:0] w);
    case (w)
      2'd0:    return 2000;
      2'd1:    return 1600;
      2'd2:    return 1400;
      default: return 1000;
    endcase
  endfunction

  // What a row DAC drives.
  typedef enum logic [2:0] {
    DRV_OFF   = 3'd0,  // 0 V
    DRV_VMM   = 3'd1,  // input level code * V_STEP_MV
    DRV_READ  = 3'd2,  // V_READ_MV
    DRV_SET   = 3'd3,  // +V_SET_MV
    DRV_RESET = 3'd4,  // -V_RESET_MV
    DRV_TRNG  = 3'd5,  // +V50_MV
    DRV_VR    = 3'd6   // -vr_mv(code)
  } drive_e;

  // Row operation chosen by the control circuit for the input interface.
  typedef enum logic [2:0] {
    OP_OFF   = 3'd0,  // all rows 0 V
    OP_VMM   = 3'd1,  // every row at its input level
    OP_PUF   = 3'd2,  // rows whose challenge bit is 1 at the read voltage
    OP_CELL  = 3'd3,  // only row_sel at the read voltage
    OP_SET   = 3'd4,  // all rows SET pulse
    OP_RESET = 3'd5,  // all rows full RESET pulse
    OP_TRNG  = 3'd6,  // all rows 50% switching pulse
    OP_VR    = 3'd7   // each row the gradual RESET of its weight in prog_col
  } row_op_e;

  // Outputs of the 1x4 DeMUX behind the CSA.
  typedef enum logic [1:0] {
    DST_ADC  = 2'd0,
    DST_RESP = 2'd1,
    DST_TRNG = 2'd2,
    DST_GND  = 2'd3
  } dst_e;

  // Host commands.
  typedef enum logic [2:0] {
    CMD_NOP    = 3'd0,
    CMD_PROG   = 3'd1,  // write the weight buffer (as loaded) into the crossbar
    CMD_VMM    = 3'd2,  // multiply the input vector by the stored weights
    CMD_TRNG   = 3'd3,  // 50% switching pulse, then read every device as a random bit
    CMD_PUF    = 3'd4,  // apply the challenge, collect the response
    CMD_LOCK   = 3'd5,  // Algorithm 1: entropy init + PUF key; host reads encrypted weights
    CMD_UNLOCK = 3'd6   // Algorithm 2: entropy init + PUF key + program decrypted weights
  } cmd_e;

endpackage
