# Spike-based position control of a six-joint robot arm, in one SoC's programmable logic

This design controls the six DC motors of a Scorbot ER-VII robot arm with a
**spike-based PID controller per joint**, in the style of the ED-Scorbot
neuromorphic platform. Every quantity inside a controller is a *spike rate*, not
a number: the commanded position is a stream of spikes, the measured position
is a stream of spikes, their difference is a stream of spikes, and the motor is
driven by stretching each controller spike into a short pulse (pulse-frequency
modulation). The only multi-bit state is a handful of counters.

The controller used to be split over two FPGA boards joined by an SPI link, with
a PC in front. Here it lives in the programmable logic (PL) of a single
Zynq-7000-class SoC. The on-chip processor configures it through an AXI4-Lite
register file of 36 32-bit registers, six per joint, and reads the joint
positions back from the same registers.

```
              200 MHz ──► clk_div ──► 50 MHz (all logic, and the AXI port)
processor ══ AXI4-Lite ══► axi_lite_regs ── 6 × 6 registers ──┐
                                        ◄── 6 position counters ┤
                                                                ▼
                     ┌──────────── spid_joint (× 6) ─────────────────────────┐
 REF register ──► spike_gen ──ref-pos──►(+)                                   │
                                       hold_fire ──error──► spike_id ──► spike_exp ──► pfm_fwd / pfm_rev
 encoder A/B ──► spike_enc_gen ──speed──► spike_ig ──current-pos──►(−)        │        (to the H-bridge)
                                           └── 16-bit position counter ──► read-back
                     └────────────────────────────────────────────────────────┘
```

## 1. Spikes, rates and the closed loop

A spike stream is signed. On wires it is a `spike_t` (package `scorbot_pkg`):
two one-cycle strobes, `p` for a positive spike and `n` for a negative one.
Blocks never emit both in one cycle. The "value" a stream carries is its mean
rate: positive spikes per cycle minus negative spikes per cycle.

One joint's loop runs like this:

1. **Reference.** `spike_gen` turns the signed 16-bit reference `REF` into a
   spike train of rate `REF / ((REF_FD+1) · 32768)` spikes per cycle.
2. **Feedback.** The encoder gives one signed spike per quadrature edge: a speed
   signal. `spike_ig` integrates these spikes into the 16-bit absolute position
   counter `P`, which resets to 32768 (the zero of the signed position
   `P − 32768`). A second spike generator turns `P − 32768` into spikes at
   `(P − 32768) / ((IG_FD+1) · 32768)` spikes per cycle.
3. **Error.** `hold_fire` subtracts the feedback stream from the reference
   stream.
4. **I and D.** `spike_id` adds to the error an integral term and a derivative
   term, each formed from spikes (section 3).
5. **P and drive.** `spike_exp` turns every controller spike into `KP` cycles of
   forward or reverse drive. `KP` multiplies the whole controller output; it is
   the proportional gain.

The loop is at rest when the two rates into the subtractor are equal:

    P − 32768 = REF · (IG_FD + 1) / (REF_FD + 1)

So the ratio of the two dividers is the joint's scale between reference units
(the "spiking input", SI) and encoder counts. The arm's joints each have their
own scale. Joint 1 needs 1/k = 40.5 counts per SI unit, joint 2 14.77, joint 3
41.84 and joint 4 4.59. Divider pairs `(REF_FD, IG_FD)` of `(1, 80)`,
`(12, 191)`, `(5, 250)` and `(16, 77)` give these ratios to within 0.1 %. With
them, the joint limits of ±487, ±750, ±383 and ±1585 SI become position
excursions of about 19 700, 11 100, 16 000 and 7 300 counts. These fit the
±32 767 range of the 16-bit counter. `tb_joint_bounds` drives the full design to
these limits.

For a motor that moves one encoder step per `c` cycles of drive, the loop
behaves as a first-order system. Its time constant is
`c · 32768 · (IG_FD + 1) / KP` cycles when the integral and derivative terms
are off. Each error spike moves the shaft by `KP / c` steps, which is also the
size of the dither around the rest point.

## 2. The spike blocks

**`spike_gen`: number to spikes.** This is a reverse-bitwise generator. A
15-bit step counter advances once every `fd + 1` cycles. On each step it fires
if the bit-reversed step count is below `|value|`. Over one period of 2^15 steps
this gives exactly `|value|` spikes. Bit reversal spreads them evenly: any
half-period holds half of them, give or take one. Spikes carry the sign of
`value`. The output is registered.

**`hold_fire`: subtraction.** A small signed store counts spikes. Each positive
spike on `a`, or negative spike on `b`, adds one; the opposite kinds take one
away. A non-zero store fires only after it has been non-zero for `HOLD` cycles
(4 in the subtractor). After that it drains at one spike per cycle. So a spike
that is followed closely by an opposite spike never reaches the output: the two
cancel. Net spike counts are preserved exactly while the store, ±7 for
`CW = 4`, does not overflow. When it does overflow it saturates, which happens
only if the net input rate stays above one spike per cycle.

**`spike_ig`: integrate and generate.** This is an up/down counter that
saturates at 0 and 2^W − 1, followed by a `spike_gen` fed with
`count − OFFSET`. With W = 16 and OFFSET = 32768 it is the joint's position
counter. The same block, with a signed meaning, is the integrator inside
`spike_id`.

**`spike_enc_gen`: encoder to spikes.** Each encoder channel passes a two-flop
synchronizer. The sequence 00 → 10 → 11 → 01 on {A,B} gives positive spikes;
the reverse sequence gives negative ones. A change of both channels at once is
not a valid quadrature step and is dropped. From an input edge to its spike
takes three cycles.

**`spike_exp`: expander, P term and motor driver.** This block keeps a signed
count of drive still owed. A positive spike adds `KP` and a negative spike
subtracts `KP`. Each cycle the count moves one step toward zero, and its sign
selects `pfm_fwd` or `pfm_rev`. One lone spike therefore drives the motor for
exactly `KP` cycles, starting the next cycle. Over any long interval,
forward cycles minus reverse cycles equals `KP` times the net spike count.

## 3. The integral and derivative terms (`spike_id`)

This is the least obvious part of the controller, because both terms are built
from the same two primitives.

* **Integral.** A `spike_ig` counts the error spikes into a 16-bit signed
  integral, centred at 32768. Its generator emits spikes at a rate proportional
  to that integral, divided by `KI_FD + 1`. While the error is zero the integral
  stays put, and so does its spike rate. That is what removes a steady offset.
* **Derivative.** A `hold_fire` computes `d = error − feedback`, where the
  feedback is a `spike_ig` that integrates `d` itself (divider `KD_FD`). If the
  error rate stays constant, the feedback integrator charges up until its
  generated rate equals the error rate, and `d` falls to zero. A change in the
  error rate passes through until the integrator catches up. This is a
  first-order high-pass, the spike-domain derivative. Its time constant is
  `32768 · (KD_FD + 1)` cycles. The test measures the burst that a step from
  zero to 1/8 spike per cycle gives at `KD_FD = 1`: 8192 · (1 − e^−6) spikes,
  as the formula predicts.
* **Sum.** Two more `hold_fire` blocks add error, I and D. A sign-swapped stream
  on the subtracting input is an addition.

Writing 0 to `KI_FD` or `KD_FD` switches the term off. Its integrator keeps
counting, but its spikes are not added.

## 4. Register map

Byte address = 4 × register index, relative to the block's base address. The
system interconnect places that base wherever the software expects it; the slave
itself decodes only the low 8 address bits. Register `6·j + k` belongs to joint `j`
(0…5). Only bits 15:0 are used, except for the position read-back. All
registers reset to 0, so after reset every joint is idle at position 32768.

| k | name     | bits  | meaning |
|---|----------|-------|---------|
| 0 | `REF`    | 15:0  | signed reference, in spiking-input units (read/write) |
|   |          | 31:16 | the joint's position counter `P` (read only; writes ignored) |
| 1 | `REF_FD` | 15:0  | divider of the reference generator |
| 2 | `IG_FD`  | 15:0  | divider of the position-feedback generator |
| 3 | `KI_FD`  | 15:0  | divider of the integral generator; 0 = integral off |
| 4 | `KD_FD`  | 15:0  | divider of the derivative feedback; 0 = derivative off |
| 5 | `KP`     | 15:0  | drive cycles per controller spike (proportional gain) |

AXI4-Lite timing (`axi_lite_regs`):

* **Write.** The register is updated on the first clock edge that sees both
  AWVALID and WVALID. AWREADY and WREADY then pulse together one cycle later,
  and BVALID rises the cycle after that. A new write is not accepted while a
  response is pending. WSTRB byte enables are honoured.
* **Read.** ARREADY is high whenever no read data is waiting. RDATA and RVALID
  follow one cycle after the address handshake and are held until RREADY.
* **Out of range.** Addresses beyond the 36 registers read as 0 and ignore
  writes. They still answer OKAY.

Concurrent assertions in the module check that BVALID and RVALID, once raised,
stay raised (with stable RDATA) until accepted.

## 5. Clocking and reset

The board supplies 200 MHz. The controller gains were tuned for the original
50 MHz clock, so the logic runs at 50 MHz. `clk_div` divides by 4 with a
counter and drives the 50 MHz clock from a flip-flop. The AXI4-Lite port is in
the same 50 MHz domain. The top exports that clock as `clk_50`, so the
processor's interconnect can clock the port with it and no clock crossing is
needed. `rst_n` is asserted asynchronously. It is released through a two-flop
synchronizer on `clk_50`.

The differential-to-single-ended clock buffer is not part of the RTL. `clk_200`
is the single-ended clock after that buffer. On an FPGA, a vendor clock manager
would normally replace the counter divider; the divider keeps the design
portable.

## 6. Top-level ports (`edscorbot_pl_top`)

| port | dir | width | |
|------|-----|-------|-|
| `clk_200`, `rst_n` | in | 1 | board clock after the LVDS buffer, active-low reset |
| `clk_50` | out | 1 | logic and AXI clock |
| `s_axi_*` | | | AXI4-Lite slave: 8-bit addresses, 32-bit data |
| `enc_a`, `enc_b` | in | 6 | quadrature encoder channels, one bit per joint, asynchronous |
| `pfm_fwd`, `pfm_rev` | out | 6 | motor drive per joint, to level shifters, isolators and the H-bridge power boards |

The following are outside the logic and have no RTL: the processor system, the
level shifters and optocouplers, the H-bridge power stage, and the home and
limit microswitches. Those switches exist on the arm, but what the controller
should do with them (homing, end-stop behaviour) is not specified. No inputs
are provided for them.

## 7. What comes from the published description, and what is this design's own

These points follow the original platform's description:

* one spike-based PID per joint, six joints;
* the block chain of reference generator, hold-and-fire subtractor, ID
  controller, spike expander as the P stage, encoder-to-spike converter and an
  integrator from speed to position;
* the 16-bit position counter per joint, with its zero at 32768;
* an AXI4-Lite peripheral with 36 registers of 32 bits;
* the 200 MHz to 50 MHz clock.

These are this design's own choices, because the description does not give
them:

* the insides of every spike block (reverse-bitwise generation, the hold store
  of `hold_fire`, quadrature ×4 decoding and its direction, the owed-drive
  counter of the expander);
* how the I and D terms are formed, and the "0 = off" codes;
* the register map and the position read-back in bits 31:16;
* AXI response timing and out-of-range behaviour;
* the counter-based clock divider, the single clock domain for AXI, and the
  reset synchronizer;
* saturation instead of wrap-around in all counters;
* `HOLD = 4` and `CW = 4` for the subtractor, and `HOLD = 1` for the adders
  inside `spike_id`.

The gain values used in the testbenches (`KP = 64`, the divider pairs above)
are chosen so that a simple motor model settles. They are not calibrated values
for the real arm.

## 8. Sizes

After coarse synthesis (before technology mapping), the whole design is about
2 200 word-level cells and 2 600 flip-flop bits. The register file accounts for
1 152 bits. One joint controller is about 320 cells and 240 flip-flop bits.

## 9. Simulation

All RTL is SystemVerilog-2017. `scorbot_pkg.sv` must be read first. Each
testbench prints `TB_RESULT checks=N failures=M` and stops itself. A watchdog
fails it if it hangs. For example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/scorbot_pkg.sv tb/tb_edscorbot_pl_top.sv --top-module tb_edscorbot_pl_top
./obj_dir/Vtb_edscorbot_pl_top
```

| testbench | what it shows |
|-----------|---------------|
| `tb_clk_div` | 2 cycles high, 2 low at DIV = 4 |
| `tb_axi_lite_regs` | all 36 registers written and read back; byte strobes; read-only bits; out-of-range accesses; response timing with a slow master |
| `tb_spike_gen` | exactly \|value\| spikes per period for several references, including ±32767/−32768; even spreading; divider spacing |
| `tb_hold_fire` | hold delay; cancellation; net count preserved over 50 000 random cycles |
| `tb_spike_ig` | counter follows the input; generated count per period; saturation |
| `tb_spike_enc_gen` | one spike per edge in each direction; invalid steps dropped; 3-cycle latency |
| `tb_spike_exp` | `KP`-cycle pulses; opposite spikes; forward − reverse = `KP` × net count |
| `tb_spike_id` | pass-through with I and D off; integral count and its output; derivative burst size and decay |
| `tb_spid_joint` | one joint closing its loop around a motor model, for both signs, two divider ratios and with the integral term on |
| `tb_edscorbot_pl_top` | whole design at default parameters. All six joints are configured over AXI and settle to their references (joint 5 with I, joint 6 with D). Positions are read back over AXI, and joint 1 is reversed. Every mechanism must occur at least once |
| `tb_joint_bounds` | joints 1–4 driven to their travel limits with their SI-to-count ratios. Positions within 1 % of target and angles within 3 % of 155°, 85°, 112.5° and 90° |

Verilator has two-state simulation, so the testbenches raise `rst_n` at time
zero and drop it 1 ns later. This makes sure the asynchronous resets actually
fire.

The motor model `tb/dc_motor_model.sv` is an ideal integrator of its drive.
It has no inertia, friction or back-EMF. The closed-loop tests therefore show
that the loop is wired with the right signs and settles at the predicted point.
They say nothing about how the real arm would respond to a given set of gains.
