# LaserEscape in SystemVerilog: a laser-probing detector with real-time responses

Optical probing attacks read secrets out of a running chip through the back
side of the silicon. A focused infrared laser is scanned over the die. The
reflected light is modulated by the electrical activity of the transistors it
hits. Two variants matter here:

- **EOFM** (electro-optical frequency mapping) finds the flip-flops that toggle
  at a chosen frequency, and so locates key registers.
- **EOP** (electro-optical probing) parks the beam on one node and records its
  waveform, which reads the register value directly.

Both need the laser to dwell on or near the target for a long time, from
microseconds up to seconds per pixel.

LaserEscape uses one physical side effect: the probing laser heats the silicon
it illuminates. Heated logic is slower. The design places a tiny delay sensor
next to the registers it protects and tunes the sensor to the edge of a timing
failure. Even a slight slow-down from the laser then makes its output flip.
Post-processing turns those flips into an alarm. The alarm drives two
responses, both fast compared with the laser's dwell time:

1. **Polymorphic gates.** The protected combinational logic is built from
   look-up tables. One spare LUT input switches each gate between its real
   function and constant 0, and the alarm drives that input. Under attack the
   logic shows the prober nothing but zeros.
2. **Moving target.** The protected key registers are moved to another location
   and their bit order is reshuffled with fresh randomness. The circuit that uses
   the key keeps running. By the time the laser reaches the old place, the key
   is no longer there.

This RTL builds the detector, its tuning procedure, both responses and an I²C
control port. It does so as a single synthesizable design, plus behavioural
models of the FPGA delay primitives and routes that a simulator needs.

## Block overview

```
            +-------------------------- laser_escape_top ---------------------------+
 scl,sda -->| i2c_slave --> le_regs (control/status registers)                      |
            |                   | manual tune / thresholds / key / commands         |
            |   sensor_tuner ---+--> tune mux --> one_lut_sensor --> sync2           |
            |        ^                                   |                         |
            |        |                   zero_counter <--+--> pulse_counter        |
            |        +------- window results ----+-------------+                   |
            |                                    v                                 |
            |                              alarm_latch --> alarm                   |
            |             +----------------------+--------------+                  |
            |             v                                     v                  |
            |  poly_xor_target (poly_gate x W)      mtd_controller -> pr_trigger   |
            |             |                                     v                  |
            |          poly_c               prng_lfsr --> mtd_key_store --> key_out |
            +-------------------------------------------------------------------------+
```

| file | role |
|---|---|
| `laser_escape_pkg.sv` | shared sizes, the `tune_t` struct and the register map |
| `idelaye2_model.sv` | behavioural model of a 31-tap IDELAYE2 delay element |
| `idelay_chain.sv` | chain of 2^n IDELAYE2 elements set by one (n+5)-bit tune |
| `lut6.sv` | 6-input LUT |
| `route_delay_model.sv` | behavioural model of one heat-sensitive route plus LUT pin delay |
| `one_lut_sensor.sv` | the delay sensor |
| `sync2.sv` | two-flop synchroniser for the sensor output |
| `zero_counter.sv`, `pulse_counter.sv` | per-window statistics of the sensor output |
| `alarm_latch.sv` | threshold compare and sticky alarm |
| `sensor_tuner.sv` | automatic search for the sensor tune |
| `poly_gate.sv`, `poly_xor_target.sv` | polymorphic gates and a 4-bit XOR built from them |
| `prng_lfsr.sv` | 32-bit LFSR supplying the relocation randomness |
| `mtd_key_store.sv`, `mtd_controller.sv` | moving-target key registers and their trigger logic |
| `i2c_slave.sv`, `le_regs.sv` | control port and register file |
| `laser_env_pkg.sv` | simulation-only "laser": extra delay and jitter on the sensor's data path |

## How the 1LUT sensor sees a laser

The sensor is one LUT and one flip-flop. Its own clock is used twice:

- as **data**: through one IDELAYE2 (`data_tap`), the fabric route and a LUT, to
  the flip-flop's D input;
- as **clock**: through a chain of IDELAYE2 elements (`clk_tune`), to the
  flip-flop's clock input.

The flip-flop therefore samples the clock's own rising edge, delayed by the data
path, with the clock's rising edge delayed by the clock path. Suppose the data
edge arrives a little *before* the delayed clock edge. The flip-flop then sees a
1. If it arrives after, the flip-flop still sees the low half period, a 0. The
tune is chosen so that the data edge arrives just barely early. The output then
reads mostly 1, with occasional 0s caused by jitter. This near-failing setting
is called *metastable* below, following the usual usage for this sensor.

IDELAYE2 delays are compensated for process, voltage and temperature. The fabric
route and the LUT are not. When the laser heats the area, only the data path
slows down. The data edge slips behind the clock edge, and the zeros become
frequent.

LUT pins: `lut_sel[0]` and `lut_sel[1]` enter the LUT on pins i2 and i3. The
delayed clock enters on the four remaining pins i0, i1, i4 and i5. The select
chooses which of the four passes to the flip-flop, and each pin has a slightly
different internal delay. This gives a fine trim below one IDELAYE2 tap. In this
RTL select 0, 1, 2 and 3 pass i0, i1, i4 and i5 respectively.

### Clock-chain tune decoding

One IDELAYE2 spans only 31 taps. For more range the clock path uses a chain of
2^n elements, with n = 3 by default (8 elements). The chain is set by a single
(n+5)-bit number:

- the five low bits give the tap count of one "fine" element;
- the n high bits, k, say how many elements sit at the maximum tap (11111);
- all other elements sit at 0 taps.

The total delay therefore grows monotonically with the tune value: 31·k + low
bits taps, plus the fixed intrinsic delay of every element. In `idelay_chain`
the fine element is element LEN-1-k, counted from the input. The k elements
after it are at maximum and the ones before it are at zero. For example, a
4-long chain with tune 7'b1000101 gives taps 0, 5, 31, 31 from input to output.
`tb_idelay_chain` checks this example.

## From samples to an alarm

The sensor output changes on the *delayed* clock, so `sync2` brings it into the
system clock domain. Two counters then run over detection windows of `t_detect`
cycles (default 255):

- `zero_counter` counts the cycles with output 0 in each window;
- `pulse_counter` measures the length of each run of zeros and reports the
  longest run of the window. A run still open at the window end counts in
  both windows.

Both results are registered at the window end. `pulse_counter.max_valid` marks
the cycle in which both are valid. `alarm_latch` raises `detect` in a window
where the zero count exceeds `zc_thresh` or the longest run exceeds
`pl_thresh`, and sets the sticky `alarm`. The alarm stays set until it is
cleared over I²C. A detection in the same cycle as a clear wins.

The window of 255 cycles and the 8-long chain were picked so that both fit in
one I²C byte. The thresholds are left to the user: set them a safe margin above
the zero count seen at rest with the chosen tune. Register defaults are 32 and
255 (the pulse test is effectively off).

## Finding a tune automatically

`sensor_tuner` searches the three-dimensional tune space as follows:

1. For each data tap from 0 to `DATA_TAP_LAST` (31), binary-search the 8-bit
   clock tune with select 0. If a window is all zeros, the clock is too early,
   so search higher. If a window has no zeros, search lower. Anything in
   between is a metastable tune.
2. Around a metastable clock tune c, measure c-ADJ … c+ADJ (ADJ = 1) with each
   of the four select values. Each measurement lasts `T_SENSE_WINDOWS` windows,
   the t_sense interval.
3. Keep the best tune: the metastable tune with the lowest *maximum* zero count
   over its t_sense interval. "Metastable" here means 0 < max < t_detect.

The first window after each tune change is discarded because it was partly
taken with the old tune. The default `T_SENSE_WINDOWS = 39216` is 100 ms of
255-cycle windows at 100 MHz, so a full search takes tens of seconds of chip
time. Alarm detection is suspended while the tuner sweeps. The result is used
when `use_auto_tune` is set in CTRL. Otherwise the manual tune registers drive
the sensor.

## Polymorphic gates

`poly_gate` is a LUT whose truth table is two functions stacked. With the control
input (the LUT pin just above the function inputs) low, it computes `FUNC`. With
it high, it computes `ALT_FUNC`, which is constant 0 by default. The 64-bit INIT
is computed from the two functions by a function in the module. No table is
stored anywhere.

`poly_xor_target` is the protected function used to show the idea: 4-bit
registers a and b, and an output register c = a XOR b built from four such
gates. With the alarm up (and `poly_en` set), c becomes 0000. For example,
a = 0101 and b = 1010 give c = 1111 normally and 0000 under attack. The output
returns to normal once the alarm is cleared.

## Moving-target key store

The prototype this design follows moves the key flip-flops on an FPGA. A
processor rewrites a partial bitstream that places the registers at a random
location and in a random bit order, and then reconfigures that region. This
RTL realises the same relocation inside the fabric, with redundant registers
and multiplexers:

- **Coarse hiding.** There are `N_LOC` (8) banks of `KEY_W` (8) flip-flops.
  Exactly one bank holds the key; the others are all zero. For the physical
  effect, give each bank its own placement region (pblock/LOC constraints) so
  that the banks are far apart.
- **Fine hiding.** Inside its bank the key is stored permuted: slot p holds
  key bit `perm[p]`.

A relocation takes `KEY_W` cycles. For `KEY_W`-1 cycles it runs a Fisher-Yates
shuffle, drawing one index per cycle from a 32-bit LFSR word. It then draws a
new bank, always different from the current one. In one final cycle it writes
the key there in the new order and clears the old bank. The logical key output
`key_out` is valid throughout, so the user circuit never stalls. At 100 MHz a
move of the 8-bit key takes 80 ns.

`mtd_controller` starts a relocation on each rising edge of the alarm (when
`mtd_en` is set) or on an I²C command. It holds a request that arrives while a
move is running and counts the moves. It also pulses `pr_trigger`, so that a
chip that does use reconfiguration can hand the event to its processor.

The LFSR is not cryptographically strong. It stands in for the secure one-time
random source that the relocation needs. Replace it with a proper generator, or
seed it (`seed_load`) from one, in a real deployment.

## Register map (I²C target 0x42)

An I²C write sends the register address and then data bytes. A read first sets
the address with a write, then uses a repeated start to read. The address
auto-increments after each byte. SCL and SDA are oversampled by the system
clock: SCL must stay high and low for at least four system clock cycles each.
Clock stretching is not used.

| addr | name | bits |
|---|---|---|
| 00 | CTRL | [0] sensor_en (1), [1] use_auto_tune (0), [2] poly_en (1), [3] mtd_en (1) |
| 01 | CMD | write 1 to pulse: [0] alarm_clear, [1] tune_start, [2] key_load, [3] relocate |
| 02 / 03 / 04 | DATA_TAP / CLK_TUNE / LUT_SEL | manual tune |
| 05 | T_DETECT | window length (255) |
| 06 / 07 | ZC_THRESH / PL_THRESH | thresholds (32 / 255) |
| 08 | KEY | each write shifts a byte into the key word (last byte = least significant); CMD key_load stores it |
| 09 / 0A | POLY_A / POLY_B | XOR operands, loaded on write |
| 0B | KEY_SEL | which byte of the stored key KEY_OUT returns (0 = least significant) |
| 10 | STATUS | [0] alarm, [1] tune_busy, [2] tune_found, [3] reloc_busy |
| 11 / 12 | ZERO_CNT / MAX_PULSE | last window |
| 13–16 | BEST_TAP / BEST_CLK / BEST_SEL / BEST_MAXZC | tuner result |
| 17 / 18 | LOC / RELOC_CNT | key location, number of moves |
| 19 / 1A / 1B | POLY_C / KEY_OUT / ALARM_CNT | XOR output, key byte selected by KEY_SEL, detecting windows |

The register map, the addresses and all reset values except T_DETECT are this
design's own choices.

## Top-level interface and clocking

`laser_escape_top` has one clock, `clk`, which is also the sensor clock, and a
synchronous active-high reset `rst`. Its other ports are:

- `scl`, `sda_i` and `sda_oe` (open-drain pull-down) for I²C;
- `key_out` and `poly_c`, the outputs of the protected logic;
- `alarm`, `pr_trigger` and the raw `sensor_sample`, for observation.

In a real chip the sensor should run from an internal oscillator that an
attacker cannot reach. That oscillator is not part of this RTL. It would simply
drive `clk`, or a separate sensor clock if the sensor is split off.

Parameters: `KEY_W` 8, `N_LOC` 8, `POLY_W` 4, `T_SENSE_WINDOWS` 39216 and
`DATA_TAP_LAST` 31. The chain length is `CHAIN_LOG2` = 3 in the package.

## Simulation models and the "laser"

The IDELAYE2 and route models are behavioural (`timeunit 1ps`, transport delay):

- **IDELAYE2:** 600 ps intrinsic plus 78 ps per tap, unaffected by heat.
- **Route + LUT pin:** a base of 450, 500, 550 or 600 ps for pins i0, i1, i4 and
  i5. On top of that come `laser_env_pkg::heat_ps` and a pseudo-random jitter of
  0 … `jitter_ps` (150 ps) per edge.

A testbench emulates the laser by raising `heat_ps`. At 100 MHz with data tap 0
and select 0, clock tune 84 reads about 4 zeros per 255-cycle window at rest.
Heating by 100 ps gives about 175. Clock tune 80 reads all zeros, and 85
or more reads none. These numbers come from the models, not from measured
silicon. On a real FPGA the synthesizable blocks stay as they are. The models
are replaced by the vendor primitives (IDELAYE2 with IDELAYCTRL, the LUT placed
and fixed next to the target), and the tune must be searched again.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5, for
example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl -y tb \
  rtl/laser_env_pkg.sv rtl/laser_escape_pkg.sv tb/tb_laser_escape_top.sv \
  --top-module tb_laser_escape_top
./obj_dir/Vtb_laser_escape_top
```

- `tb_laser_escape_top` runs the whole design end to end, with the tuner
  shortened (2 windows per t_sense, data taps 0–1). The sequence is: set up over
  I²C, see no alarm at rest, apply the laser, and check detection by zero count
  and by pulse length. It then checks the zeroised XOR, the alarm-driven and
  manual relocations, clearing, and an automatic tuning run whose result is
  used for a second detection. It counts each of these mechanisms and fails if
  one never happened.
- `tb_laser_escape_full` runs one complete detect, respond and clear cycle with
  every parameter at its default. It does not start the tuner: at the default
  t_sense a tuning run is on the order of 10^10 clock cycles.
- `tb_sensor_trigger_eval` runs the sensor, synchroniser and zero counter at
  their default sizes. It collects 60 windows at each of five heating levels
  and prints the zero-count spread of each. With the model delays the resting
  maximum is about 16 of 255. The minimum at 100 ps of heating is about 158.
  The default threshold of 32 therefore has a wide margin on both sides.
- `tb_idelay_chain_ro` characterises the clock chain as one would on
  silicon. It closes an 11-stage ring oscillator through the 8-long chain and
  measures the period at every chain value. The result is linear and
  non-decreasing, from 20.05 ns at value 0 to 58.74 ns at 255 with the model
  delays. This span is what sets the clock-path range of the sensor.
- `tb_laser_escape_aes32` runs the same cycle with `KEY_W = 32`, the size of
  one AES state word, over 8 locations. It loads the key as four I²C bytes and
  reads it back byte by byte. `tb_mtd_key_store_aes32` tests the key store
  alone at that size.

## Where this design departs from the prototype it follows

- **Relocation mechanism.** The prototype moves registers by partial
  reconfiguration from a processor. Reconfiguring takes on the order of
  hundreds of microseconds. Here the move is done by redundant banks in logic
  and takes `KEY_W` cycles. The processor, the bitstream manipulation and the
  offline constraint flow are not included. `pr_trigger` marks where they would
  connect.
- **Tuner location.** The tuning procedure is described without saying where
  it runs; the prototype's sensor settings were reachable over I²C from an
  external controller. Here the search is on-chip logic. The ±1 neighbourhood,
  one window per binary-search step and the metastability test are this
  design's reading of the procedure.
- **Window length.** The window is 255 cycles. One description of the
  prototype's measurement mentions 256 samples; this design uses 255 so that the
  count fits in a byte.
- **Single clock.** The sensor and the control logic share one clock. There is
  no internal oscillator.
- **Alarm rule.** Whether the alarm uses the zero count, the pulse length or
  both, and all threshold values, are choices here. Detection is the OR of both
  tests with strict comparisons.
- **Delay numbers** in the models are plausible values, not measurements.
- **Not built:** the unprotected shift register used to demonstrate the attack
  itself, and any cryptographically secure random source. The default key is
  8 bits, the size of the register set the prototype protected; 32 bits is a
  parameter change.

Lint notes: a few signals in the top are brought out of blocks only for
observation in tests (`perm`, `bank_flat`, the XOR operands, the current run
length). The delay models use run-time delay values, which Verilator reports as
possibly zero.
