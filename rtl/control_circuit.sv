// control_circuit: the sequencer of the architecture. It reconfigures the one crossbar for
// each application by choosing, cycle by cycle, the row operation (through the input
// interface and the DACs), the column (MUX), the CSA enable and reference, and the DeMUX
// output, and by timing the programming pulses.
//
// A command is accepted on a cycle with start = 1 while busy = 0. It runs as a list of
// phases, each opened by one setup cycle (which clears the Responses register before a
// PUF phase and the output vector before a VMM):
//   CMD_PROG    PROG
//   CMD_VMM     VMM, then wait for y_valid
//   CMD_TRNG    ENTROPY, TRNG_READ
//   CMD_PUF     PUF
//   CMD_LOCK    ENTROPY, PUF                  (Algorithm 1, steps 1-4; the host then reads
//                                              the encrypted weights)
//   CMD_UNLOCK  ENTROPY, PUF, PROG with key   (Algorithm 2, steps 2-7)
// Phases, column by column (column j selected by the MUX):
//   ENTROPY    DeMUX to GND; full RESET pulse, then 50% switching pulse, PULSE_CYCLES each
//   PROG       DeMUX to GND; SET pulse, then gradual RESET to each row's weight
//   TRNG_READ  for each row and column: that device alone read, CSA against half the LRS
//              current, bit to the TRNG buffer; READ_CYCLES per device
//   PUF        challenge rows at the read voltage, CSA against half the LRS current of the
//              active rows, bit to Responses; READ_CYCLES per column
//   VMM        input levels on the rows, amplified current to the ADC; READ_CYCLES per column
// xbar_pulse marks the last cycle of a pulse (the crossbar applies it on that edge);
// sample marks the last cycle of a read (the DeMUX passes it as valid). done is a one-cycle
// strobe after the last phase. Cycle counts: PROG and ENTROPY 2*M*PULSE_CYCLES,
// TRNG_READ N*M*READ_CYCLES, PUF and VMM M*READ_CYCLES, plus one setup cycle per phase, the
// VMM's wait for the last ADC code, and the done cycle.
//
// The paper gives the modes, the order of the lock and unlock algorithms, the 150 ns
// pulse and the fact that the control circuit drives the MUX, CSA, DeMUX and the digital
// interface; the column-by-column schedule, the references, the command set and the
// handshake are this design's choices.
//
// iref_na uses the common 32-bit current type; its upper bits stay zero because the
// largest reference, N times half an LRS read current, needs about 20 bits.
module control_circuit
  import rram_pkg::*;
#(
  parameter int unsigned N        = N_ROWS,
  parameter int unsigned M        = N_COLS,
  parameter int unsigned PULSE    = PULSE_CYCLES,
  parameter int unsigned READ     = READ_CYCLES,
  localparam int unsigned RW      = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned CW      = (M > 1) ? $clog2(M) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  cmd_e           cmd,
  input  logic           start,
  output logic           busy,
  output logic           done,
  // to the input interface
  output row_op_e        row_op,
  output logic [RW-1:0]  row_sel,
  output logic [CW-1:0]  prog_col,
  output logic           use_key,
  input  logic [$clog2(N+1)-1:0] chal_ones,
  // to the read path
  output logic [CW-1:0]  col_sel,
  output logic           csa_en,
  output na_t            iref_na,
  output dst_e           dst,
  output logic           sample,
  output logic           xbar_pulse,
  output logic           clr_resp,
  output logic           clr_y,
  // from the output interface
  input  logic           y_valid
);

  typedef enum logic [2:0] {PH_ENTROPY, PH_PROG, PH_TRNG_READ, PH_PUF, PH_VMM, PH_END} phase_e;
  typedef enum logic [2:0] {S_IDLE, S_SETUP, S_PULSE, S_READ, S_WAITY, S_DONE} state_e;

  localparam int unsigned TW = $clog2((PULSE > READ ? PULSE : READ) + 1);

  state_e          state;
  phase_e          phase;
  cmd_e            cmd_q;
  logic [CW-1:0]   col;
  logic [RW-1:0]   row;
  logic            sub;    // 0: first pulse of a column, 1: second
  logic [TW-1:0]   cnt;

  function automatic phase_e first_phase(input cmd_e c);
    case (c)
      CMD_PROG: return PH_PROG;
      CMD_VMM:  return PH_VMM;
      CMD_PUF:  return PH_PUF;
      default:  return PH_ENTROPY;  // CMD_TRNG, CMD_LOCK, CMD_UNLOCK
    endcase
  endfunction

  function automatic phase_e next_phase(input cmd_e c, input phase_e p);
    case (p)
      PH_ENTROPY: return (c == CMD_TRNG) ? PH_TRNG_READ : PH_PUF;
      PH_PUF:     return (c == CMD_UNLOCK) ? PH_PROG : PH_END;
      default:    return PH_END;
    endcase
  endfunction

  wire last_col   = (col == CW'(M - 1));
  wire last_row   = (row == RW'(N - 1));
  wire pulse_end  = (cnt == TW'(PULSE - 1));
  wire read_end   = (cnt == TW'(READ - 1));
  wire accept     = (state == S_IDLE) && start && (cmd != CMD_NOP);

  // Where to go when the current phase has finished.
  phase_e np;
  state_e after_phase;
  always_comb begin
    np = next_phase(cmd_q, phase);
    if (phase == PH_VMM)   after_phase = S_WAITY;
    else if (np == PH_END) after_phase = S_DONE;
    else                   after_phase = S_SETUP;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      phase <= PH_END;
      cmd_q <= CMD_NOP;
      col   <= '0;
      row   <= '0;
      sub   <= 1'b0;
      cnt   <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (accept) begin
            cmd_q <= cmd;
            phase <= first_phase(cmd);
            state <= S_SETUP;
          end
        end
        S_SETUP: begin
          col <= '0;
          row <= '0;
          sub <= 1'b0;
          cnt <= '0;
          state <= (phase == PH_ENTROPY || phase == PH_PROG) ? S_PULSE : S_READ;
        end
        S_PULSE: begin
          if (!pulse_end) cnt <= cnt + TW'(1);
          else begin
            cnt <= '0;
            if (!sub) sub <= 1'b1;
            else begin
              sub <= 1'b0;
              if (!last_col) col <= col + CW'(1);
              else begin
                state <= after_phase;
                phase <= np;
              end
            end
          end
        end
        S_READ: begin
          if (!read_end) cnt <= cnt + TW'(1);
          else begin
            cnt <= '0;
            if (!last_col) col <= col + CW'(1);
            else if (phase == PH_TRNG_READ && !last_row) begin
              col <= '0;
              row <= row + RW'(1);
            end else begin
              state <= after_phase;
              phase <= np;
            end
          end
        end
        S_WAITY: if (y_valid) state <= S_DONE;
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Outputs.
  always_comb begin
    busy       = (state != S_IDLE);
    done       = (state == S_DONE);
    row_op     = OP_OFF;
    row_sel    = row;
    prog_col   = col;
    use_key    = (cmd_q == CMD_UNLOCK);
    col_sel    = col;
    csa_en     = 1'b0;
    iref_na    = '0;
    dst        = DST_ADC;
    sample     = 1'b0;
    xbar_pulse = 1'b0;
    clr_resp   = (state == S_SETUP) && (phase == PH_PUF);
    clr_y      = (state == S_SETUP) && (phase == PH_VMM);
    unique case (state)
      S_PULSE: begin
        dst        = DST_GND;
        xbar_pulse = pulse_end;
        if (phase == PH_ENTROPY) row_op = sub ? OP_TRNG : OP_RESET;
        else                     row_op = sub ? OP_VR   : OP_SET;
      end
      S_READ: begin
        csa_en = 1'b1;
        sample = read_end;
        unique case (phase)
          PH_TRNG_READ: begin
            row_op  = OP_CELL;
            dst     = DST_TRNG;
            iref_na = na_t'(I_LRS_READ_NA / 2);
          end
          PH_PUF: begin
            row_op  = OP_PUF;
            dst     = DST_RESP;
            iref_na = na_t'(int'(chal_ones) * I_LRS_READ_NA / 2);
          end
          default: begin
            row_op = OP_VMM;
            dst    = DST_ADC;
          end
        endcase
      end
      default: ;
    endcase
  end

  // Handshake and schedule rules.
  a_pulse_grounded: assert property (@(posedge clk)
    xbar_pulse |-> dst == DST_GND);
  a_sample_only_reading: assert property (@(posedge clk)
    sample |-> csa_en && dst != DST_GND);
  a_done_one_cycle: assert property (@(posedge clk)
    done |=> !done);

endmodule
