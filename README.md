# One RRAM crossbar for neural-network inference, random numbers and a PUF

A passive RRAM crossbar can do three different things, depending on how its row and column
lines are driven and where the column currents go:

* **Vector-matrix multiplication (VMM).** Multi-level devices store the weights of a neural
  network. Row voltages encode an input vector. Each column current is a dot product.
* **True random number generation (TRNG).** A programming pulse with a 50% switching
  probability sets a random half of the devices to the low-resistance state (LRS). Which
  half depends on device-to-device variation of the switching threshold. Reading the
  devices back gives random bits.
* **Physical unclonable function (PUF).** The same random device pattern is kept. A binary
  challenge selects rows. A current comparator turns each column current into one
  response bit. Another die with the same challenge has a different pattern and so gives
  a different response.

This RTL builds all three around one crossbar and one set of peripherals. It adds the
scheme that ties them together: **weight locking**. The PUF response to a chosen challenge
is the key. The weights are shipped XOR-encrypted with that key. Only the die that made the
key can recover them. That die regenerates the key, decrypts the weights, and programs
them into the same devices that held the random pattern.

Default size: 16 x 16 devices, 2-bit weights, 2-bit inputs, an 8-bit ADC and a 16-bit key.

## Block diagram

```
            host ports
   x, challenge, weights     cmd/start/busy/done
             |                      |
      input_interface <------ control_circuit ------+-----------+----------+
      (weight_lock inside)     |  row op, column, CSA reference, DeMUX output, pulse
             |                 |
      16 x rram_dac            |
             | row voltages    v
      rram_crossbar ---- column currents ---- column_mux ---- csa ---- path_demux
             ^                                                         |  |  |  |
             +------------- GND (grounds the selected column) ---------+  |  |  |
                                                            adc <---------+  |  |
                                                  output_interface (y)       |  |
                                               puf_response_reg (key) <------+  |
                                                        trng_buffer <-----------+
```

The key goes from `puf_response_reg` back into `input_interface`. There, `weight_lock`
XORs it with the weight buffer. The result is used two ways:

* The host reads it as the encrypted weights.
* `input_interface` drives it onto the DACs when it programs decrypted weights.

| file | block |
|---|---|
| `rram_pkg.sv` | sizes, voltages in mV, currents in nA, enums, derived constants |
| `rram_crossbar.sv` | behavioural device array: read currents, SET / RESET / gradual RESET, random switching |
| `rram_dac.sv` | behavioural row driver: input levels, read voltage, programming pulses |
| `column_mux.sv` | selects one column current |
| `csa.sv` | current sense amplifier: amplified current for the ADC, and comparison against a reference |
| `path_demux.sv` | 1-to-4 DeMUX: ADC, PUF responses, TRNG, or ground of the selected column |
| `adc.sv` | behavioural column ADC: rounding, saturation with an overflow flag, 1-cycle latency |
| `output_interface.sv` | collects one ADC code per column into the output vector `y` |
| `puf_response_reg.sv` | collects one response bit per column into the key |
| `trng_buffer.sv` | packs random bits into words |
| `weight_lock.sv` | XOR of each column's weights with that column's key bit |
| `input_interface.sv` | host registers and the per-row DAC drive for each row operation |
| `control_circuit.sv` | the sequencer |
| `rram_nn_sec_top.sv` | the whole architecture |

The crossbar, DACs and ADC are analog or mixed-signal in silicon. They are modelled at the
behavioural level with integer millivolts and nanoamperes. Everything else is ordinary
synchronous logic. The design has one clock and an active-low asynchronous reset.

## The device model

The whole design rests on the device model, so read this section before trusting any
number that comes out of the simulation.

**States.** Each device holds a level from 0 to 3:

* Level 3 is LRS.
* Level 0 is the high-resistance state (HRS).
* Levels 1 and 2 are intermediate states made by gradual RESET.

The conductance is `level x 203 uS`. LRS is therefore 609 uS, about 1.64 kOhm, the mean LRS
resistance of the Pt/Ti/TiOx/HfO2/Pt devices this architecture was designed for. HRS
(tens of kOhm) is treated as zero conductance.

**Reading.** Column current is `sum_i V_row[i] x G[i][j]`, from Ohm's law per device and
Kirchhoff's current law per column. There are no selectors, wire resistance or sneak paths.

**Programming.** Programming happens on one clock edge, the last cycle of a pulse. It
affects only devices whose column is grounded:

| row voltage | effect |
|---|---|
| +2.0 V | SET to level 3 (deterministic) |
| at or above the device's threshold | SET to level 3 |
| -2.0 V | full RESET to level 0 |
| -1.6 V | lowers the level to 1 |
| -1.4 V | lowers the level to 2 |
| -1.0 V | leaves an LRS device at 3 |

A RESET never raises a level.

**Multi-level weights by gradual RESET.** Weight `w` is written by a full SET, then a
negative pulse that depends on `w`:

| w | pulse |
|---|---|
| 0 | -2.0 V |
| 1 | -1.6 V |
| 2 | -1.4 V |
| 3 | -1.0 V |

**Randomness.** Each device's SET threshold is `1.5 V +/- 0.3 V`. The offset comes from a
hash of (`SEED`, row, column), so `SEED` plays the role of the die. The TRNG/PUF pulse is
+1.5 V, the median threshold, so each device switches with about 50% probability. An
optional cycle-to-cycle jitter `C2C_MV` can be added to every pulse. It defaults to 0, for
the reason given under "Departures".

**Read references.**

| quantity | value |
|---|---|
| read voltage | 200 mV |
| one LRS device at read | 200 mV x 609 uS = 121.8 uA |
| VMM input level spacing | 100 mV |
| CSA gain | 4 |
| ADC LSB | 100 mV x 203 uS x 4 = 81.2 uA, one unit of weight x input |

Because of the last line, the ADC code is the integer dot product itself. The ADC rounds
to the nearest code.

## Programming through the DeMUX ground

Programming is the least obvious part of the design, because the crossbar has no access
devices. A pulse must reach one column and no other. This design does that one column at
a time:

1. The column MUX selects column `j`.
2. The DeMUX routes the selected column to its fourth output, ground. `col_gnd[j]` is the
   only column at ground.
3. All rows carry the programming amplitude. Only devices in column `j` see a full voltage
   across them. Columns that are not grounded are treated as floating, with no voltage
   across their devices.
4. The pulse lasts `PULSE_CYCLES` = 15 cycles: 150 ns at a 100 MHz clock.

Each column gets two pulses:

* **weights:** SET on all rows, then each row's gradual-RESET amplitude for its own weight
  in column `j`. All 16 rows program in parallel.
* **entropy:** full RESET on all rows, then the 1.5 V switching pulse.

One pass over the array therefore takes `2 x 16 x 15 = 480` cycles.

## Reading: one path, three destinations

Reads are one column at a time, `READ_CYCLES` = 2 cycles each: one to settle, one to
sample. The control circuit sets four things for each read:

* the row drive;
* the CSA reference;
* the DeMUX output;
* the `sample` strobe on the last cycle.

| operation | rows | CSA | DeMUX | result |
|---|---|---|---|---|
| VMM | `x[i] x 100 mV` | gain 4, no comparison | ADC | 8-bit code into `y[j]` |
| PUF | 200 mV where `chal[i]` = 1 | compare with `ones(chal) x 121.8 uA / 2` | responses | `key[j]` |
| TRNG read-out | 200 mV on one row only | compare with 121.8 uA / 2 | TRNG buffer | one bit per device, row by row |

A PUF response bit is 1 when more than half of the challenged devices in that column are
in LRS. The ADC is bypassed for PUF and TRNG reads, because their result is one bit.

## Commands and schedule

The host writes its registers, pulses `start` with a command while `busy` = 0, and waits
for the one-cycle `done`. Each phase begins with one setup cycle. The setup cycle clears
the response register before a PUF phase and the output vector before a VMM.

| command | phases | cycles at 16 x 16 |
|---|---|---|
| `CMD_PROG` | program the weight buffer | 1 + 480 + 1 = 482 |
| `CMD_VMM` | VMM read, wait for the last ADC code | 1 + 32 + 2 + 1 = 36 |
| `CMD_TRNG` | entropy, read all 256 devices | 1 + 480 + 1 + 512 + 1 = 995 |
| `CMD_PUF` | PUF read with the loaded challenge | 1 + 32 + 1 = 34 |
| `CMD_LOCK` | entropy, PUF read | 1 + 480 + 1 + 32 + 1 = 515 |
| `CMD_UNLOCK` | entropy, PUF read, program the decrypted weights | 515 + 481 = 996 |

`xbar_pulse` marks the edge that applies a pulse, and `sample` the edge that takes a read.
Assertions in `control_circuit` check three rules:

* a pulse is only applied with the column grounded;
* a sample is only taken with the CSA on and the DeMUX not at ground;
* `done` lasts one cycle.

## Weight locking

**Lock (`CMD_LOCK`):**

1. The host loads the plain weights into the weight buffer (`w_we`, `w_row`, `w_data`) and
   a challenge (`chal_load`).
2. `CMD_LOCK` writes fresh entropy into the crossbar and reads the response to the
   challenge. That response is `key`.
3. The host reads the encrypted weights row by row through `rd_row`/`rd_data`. They are
   `w[i][j] XOR {2{key[j]}}`.
4. The host keeps the challenge/response pair and publishes the encrypted weights with the
   challenge. Storing the pair off-chip is outside this RTL.

**Unlock (`CMD_UNLOCK`):**

1. The host loads the encrypted weights and the challenge.
2. `CMD_UNLOCK` repeats the entropy pulse and regenerates the key.
3. It then programs each device with the decrypted weight `enc XOR key` (`use_key`). This
   overwrites the random pattern.
4. The next `CMD_VMM` uses the true weights. Another die produces another key, so it
   programs wrong weights.

Two properties are needed for unlocking to reproduce the key:

* The random pattern must come out the same on every entropy pulse on a given die. This
  model guarantees it because the thresholds are fixed per device and `C2C_MV` is 0.
* The key must not depend on the weights programmed before. It does not: the entropy
  phase starts every column with a full RESET.

## Host interface (`rram_nn_sec_top`)

| port | direction | meaning |
|---|---|---|
| `cmd`, `start`, `busy`, `done` | in, in, out, out | command handshake |
| `x_load`, `x_in[N]` | in | input vector, 2 bits per row |
| `chal_load`, `chal_in[N-1:0]` | in | challenge, one bit per row |
| `w_we`, `w_row`, `w_data[M]` | in | one row of the weight buffer per clock |
| `rd_row`, `rd_data[M]` | in, out | weight buffer XOR key (combinational) |
| `y[M]`, `y_valid`, `adc_ovf` | out | VMM result; `adc_ovf` if any column saturated |
| `key`, `key_valid` | out | response to the last challenge |
| `trng_word`, `trng_valid`, `trng_bits` | out | 16-bit random words (first bit in bit 0), running bit count |

**Parameters:**

* `N`, `M`: size.
* `BITS`: ADC width. The default covers the largest column sum, `16 x 3 x 3 = 144`.
* `SEED`: the die.
* `C2C_MV`: switching jitter.

The package also holds the electrical constants, which can be edited there.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops through a watchdog if it hangs.

| testbench | what it shows |
|---|---|
| `tb_rram_crossbar` | the 4x4 worked example below; gradual-RESET levels; near-50% random switching; different dies differ; the jitter option |
| `tb_control_circuit` | cycle-by-cycle traces and cycle counts of every command at 4x4 |
| `tb_rram_nn_sec_top` | the full 16 x 16 default design, end to end; see below |
| `tb_vmm_workloads` | the 4x4 worked example, and the 16 x 16 weight map in `tb/weights16x16.hex` times 22 input vectors |
| `tb_puf_metrics` | four dies (`SEED` 1 to 4) x 24 challenges, twice: reliability, uniformity, uniqueness and bit-aliasing |

`tb_rram_nn_sec_top` runs these steps:

1. program and multiply;
2. TRNG;
3. lock;
4. repeat the PUF;
5. unlock;
6. multiply again.

It counts every pulse, every DeMUX destination and every command, and fails if one never
happened. `tb_rram_crossbar` and `tb_vmm_workloads` check the worked example: weights
`[1 2 3 3; 0 3 0 1; 2 2 0 1; 3 2 2 1]` with input `(1,2,2,0)` give `(5,12,3,7)`.

`tb_puf_metrics` measures reliability 100%, uniformity 38.2%, uniqueness 45.1% and
bit-aliasing 38.2%. The published measurements are 100%, 49.79%, 47.78% and 48.57%; the
next section explains the gap in uniformity.

To simulate with Verilator 5, run from the directory that holds `rtl/` and `tb/`, because
the VMM testbench reads its hex file by a relative path:

```
verilator --binary --timing --assert -Irtl rtl/rram_pkg.sv tb/tb_rram_nn_sec_top.sv \
          --top-module tb_rram_nn_sec_top -o sim && obj_dir/sim
```

Replace the testbench name for the others. Each builds and runs in well under two minutes.

## Departures and simplifications

* **No sneak paths, and no HRS or intermediate-state variation in reads.** Read currents
  are ideal sums of level x 203 uS. VMM results are therefore exact, whereas real arrays
  accumulate error at the ADC input. The PUF response depends only on which devices
  switched. On silicon, sneak currents and resistance spread also feed into it.
* **Response ties.** With an even number of challenged rows, a column with exactly half its
  challenged devices in LRS equals the reference. The ideal comparator then answers 0.
  This is why uniformity and bit-aliasing come out near 38% instead of near 50%. A real
  CSA would resolve such ties through the resistance spread and sneak currents that the
  model leaves out.
* **Deterministic entropy.** `C2C_MV` defaults to 0, so a die re-creates exactly the same
  pattern. That makes the PUF 100% reliable and lets unlocking work. With jitter, the
  TRNG draws fresh bits on each pulse, but key regeneration may fail. The two goals pull
  against each other. The entropy pulse in this design is the same one for both.
* **ADC width.** The sizing rule `ceil(log2(w x m))` gives 3 bits for a 4x4 array with
  2-bit weights. The worked example's output of 12 does not fit in 3 bits. The default
  here is wide enough for any column sum: `ceil(log2(16 x 3 x 3 + 1)) = 8` bits.
* **Cipher.** Encryption is a per-column XOR with one 16-bit response. The key length and
  cipher were not specified. A longer key would take several challenges.
* **Electrical numbers chosen here:** the 100 mV input step, the 200 mV read voltage, the
  1.5 V +/- 0.3 V threshold spread, the CSA gain and the 100 MHz clock. The 2.0 V pulses,
  the 150 ns width and the four gradual-RESET amplitudes are taken from the device
  characterisation. The 10 ns pulse edges are not modelled.
* **Programming granularity.** Programming is one column per pulse pair, and unselected
  columns float. A real passive array would need a V/2 or V/3 biasing scheme to protect
  half-selected devices.
* **Not included:** the server that stores challenge/response pairs and the sharing
  platform. The host does their part through the ports.
