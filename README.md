# FPGA input and readout layers for an online-trained opto-electronic reservoir computer

## What the design does

A reservoir computer is a recurrent network. The network itself is fixed
and random, and only a linear readout is trained. In this system the
network is analogue and optical:
- a light source;
- a Mach-Zehnder modulator, whose sine response is the nonlinearity;
- a fibre spool of about 7.9 µs;
- a photodiode.

A signal runs round this loop. It is cut in time into N = 50 slots, and
each slot acts as one neuron. The FPGA design here surrounds that loop:

* **Input side.** It generates the task: random 4-level symbols d(n) sent
  through a nonlinear, dispersive, noisy wireless-channel model. It then
  turns each channel output u(n) into the DAC waveform that drives the
  loop. This waveform is u(n) multiplied by a per-slot input mask M_i and
  a gain β.
* **Readout side.** It samples the loop with the ADC and averages each
  slot into one state x_i(n). It forms the output y(n) = Σ w_i x_i(n) and
  trains the weights w_i *online*, one gradient step per symbol. It also
  counts symbol errors.

Online training means the equaliser needs no stored training set and no
offline matrix inversion. It can also keep adapting to a channel that
drifts or switches. The design therefore has three mechanisms for that:
- a learning rate that decays;
- a floor λ_min that keeps learning alive;
- a re-arm of the learning rate when the error count jumps.

A host PC sets every parameter over a serial line. The design reports the
error count back the same way.

## Block map

```
                  +--------+   p1,p2,p3,m   +------+  u(n)  +----------+ dac_data
  uart_rxd ---->  | params |--------------->| chan |------->| fpga2exp |---------> DAC
     |            +--------+                +------+        +----------+
     |                                         | d(n)            ^ mask, beta
  +------+  cfg (all host registers)           v                 |
  | uart |---------------------------------> train <------------ + ----- exp2fpga <--- ADC
  +------+  <--- window error count --- check <- y, d'            x_i(n)   (sync, average)
     |                                    ^
  uart_txd                               step (lambda schedule, re-arm on errors)
```

| Block      | File              | Role |
|------------|-------------------|------|
| `rc_pkg`   | `rtl/rc_pkg.sv`   | Fixed-point types, host opcodes, configuration struct, reset defaults |
| `glfsr`    | `rtl/glfsr.sv`    | Galois LFSR (symbol and noise sources) |
| `chan`     | `rtl/chan.sv`     | Random symbols and the channel model |
| `params`   | `rtl/params.sv`   | Constant, ramped, oscillating or switching channel parameters |
| `fpga2exp` | `rtl/fpga2exp.sv` | Input mask × gain × u(n) to the DAC; sync pulse; symbol pacing |
| `exp2fpga` | `rtl/exp2fpga.sv` | Sync detection, per-slot averaging, parallel state vector |
| `train`    | `rtl/train.sv`    | y(n), error, parallel weight update, target delay line |
| `step`     | `rtl/step.sv`     | Learning-rate schedule and re-arm |
| `check`    | `rtl/check.sv`    | Symbol decision and error counting per window |
| `uart`     | `rtl/uart.sv`, with `uart_rx.sv` and `uart_tx.sv` | Command decoder, register file, report sender |
| top        | `rtl/rc_fpga_top.sv` | Wiring; ports for clock, reset, serial lines, ADC and DAC |

The module split and names follow the block diagram of the original set-up.

## Numbers and formats

| Quantity | Value |
|---|---|
| States per symbol, N | 50 |
| Samples per state, SPS | 20 (one clock per sample) |
| Samples averaged | 8 (6 dropped at each end) |
| Loop length | (N+1)·SPS = 1020 samples |
| Clock | 128.4635 MHz, so one symbol period is 1000 clocks |
| Error window | 10,000 symbols |
| Learning defaults | λ0 = 0.4, λ_min = 0, γ = 0.999, k = 10 |
| Serial line | 8N1, 1115 clocks per bit (115200 baud at the clock above) |

The analogue loop is one state longer than the input period. Each slot's
response therefore leaks into the next slot on the following round trip.
That is what couples the neurons into a ring. The original description
counts this "51st neuron" as part of the reservoir size. Here N means the
50 slots that carry input and have a readout weight.

Fixed-point formats:
* **Q0.17 (18 bits):** λ, λ0, λ_min, γ, β, the mask M_i and the states x_i.
* **Q4.20 (25 bits):** u(n), y(n), the error and the weights w_i. They
  cover [-16, 16[.

These two formats match a 25 × 18 hardware multiplier. The channel
parameters p1, p2, p3, m and the noise amplitude A use a third format of
this design's own: Q3.20 in 24 bits, so that one host command carries one
value.

## The channel model (`chan`, `params`)

Symbols d(n) ∈ {−3, −1, +1, +3} come from two bits per symbol. The two
bits are taken from two maximal-length Galois LFSRs:
- degree 13, with feedback mask 0x100D;
- degree 17, with feedback mask 0x12000.

Their periods are coprime, so the pair repeats only after about 1.07·10⁹
symbols. The channel's linear part is a 10-tap filter with the target at
tap 2, so the channel sees two symbols ahead:

    q(n) = (0.08+m) d(n+2) − (0.12+m) d(n+1) + d(n) + (0.18+m) d(n−1)
         − (0.1+m) d(n−2) + (0.091+m) d(n−3) − (0.05+m) d(n−4)
         + (0.04+m) d(n−5) + (0.03+m) d(n−6) + (0.01+m) d(n−7)

The memory parameter m is added to every tap except the one on d(n),
which stays 1. With m = 0 this is the standard equalisation benchmark.

The nonlinearity and noise are:

    u(n) = p1·q + p2·q² + p3·q³ + A·r(n)

The defaults are p1 = 1, p2 = 0.036, p3 = −0.011 and A = 0. The term r(n)
is uniform in [−1, 1]. It is the state of a degree-18 LFSR (mask 0x20400)
read as a signed Q0.17 word. The host computes A for a wanted
signal-to-noise ratio.

`chan` answers a request in 4 clocks. It outputs u(n) together with the
d(n) that belongs to it.

`params` feeds p1, p2, p3 and m to `chan`. One of the four can be moved
per symbol; the others stay at the host values. The modes are:
- **Ramp:** move from V0 to V1 by Δ per symbol.
- **Oscillate:** move linearly back and forth between V0 and V1.
- **Switch:** cycle V0 → V1 → V2 every `period` symbols (default 266,000).

## Talking to the loop (`fpga2exp`, `exp2fpga`)

Timing is the hardest part of the design. The FPGA cannot see where the
slots of the analogue loop begin, so it marks them itself.

1. When the host starts a run, `fpga2exp` sends one state-long pulse at
   DAC code 0x4000.
2. It waits one symbol period of zeros.
3. It then streams the symbols. During slot i of each period it outputs
   β·M_i·u(n), scaled so that 2¹⁴ DAC codes equal 1.0 and saturated to
   16 bits.
4. It asks `chan` for the next symbol at the start of each period. It
   latches the answer on the first sample of the next period, so u(n)
   holds for all N slots.

`exp2fpga` watches the ADC for the first sample at or above a threshold
(4096). From there it counts `sync_ofs` clocks, a host register. It then
starts cutting the stream into slots of SPS samples:
- It adds samples 6 to 13 of each slot.
- It converts the sum to Q0.17: the mean is divided by 8192, so full
  scale maps to ±1.
- It stores the result for slot i.

When slot N−1 ends, all N states are copied at once into the output
register. `x_valid` pulses one clock after the last sample. The states
then hold for a whole symbol period.

The default `sync_ofs` is N·SPS clocks. That fits the default lead-in of
one period between pulse and first symbol. The host can shift it to
absorb the converters' latency.

## Training (`train`, `step`, `check`)

Each symbol period, `train` takes the N states and does the following:

| Stage | Work |
|---|---|
| 1 | Forms all N products w_i·x_i in parallel |
| 2 | Sums the products into y(n) |
| 3 | Computes the error d'(n) − y(n) and scales it: g = λ·(d'(n) − y(n)) |
| 4 | Updates all weights together: w_i ← w_i + g·x_i |

- y(n) and d'(n) are valid 2 clocks after `x_valid`.
- The weights change 4 clocks after `x_valid`.
- Products are truncated, and every sum is saturated to Q4.20.

The target d'(n) is d(n) from `chan`, delayed by `tgt_delay` symbols in a
shift register of up to 16 entries. This delay lines the target up with
the states. The states lag the channel output by the input layer, the
loop and the readout. With the default lead-in and offset, the correct
delay is 2.

`step` holds λ. Every k training steps it computes:

    λ ← λ_min + γ·(λ − λ_min)

With λ_min = 0 and γ = 0.999, λ reaches exactly zero after about 4,500
decays because of truncation. Training then stops.

If a window's error count is above `ser_th`, λ jumps back to λ0 and the
k-count restarts. The window count comes from `check`, and `ser_th` is a
host register that defaults to off. This lets the readout re-learn after
the channel switches. The test is made at every window end, so a
re-armed λ is re-armed again as long as windows stay above the threshold.

Two host settings give the other modes:
* **λ_min > 0:** training never stops, which lets the weights follow a
  slowly drifting channel.
* **γ = 0 with λ_min = λ0:** λ stays constant. This is the simplified
  algorithm.

`check` decides each y(n) as the nearest symbol, using thresholds at −2,
0 and +2 with ties going up. It compares the decision with d'(n) and
counts errors per 10,000-symbol window. At each window end it outputs
the count with `ser_valid`. It also keeps 32-bit totals of symbols and
errors. The symbol error rate is the count divided by 10,000; this
division is left to the host.

## Host protocol (`uart`)

A command is 4 bytes: an opcode, then a 24-bit value with the most
significant byte first. The opcodes are:

| Opcode | Meaning |
|---|---|
| 0x01 | bit 0: 1 = run, 0 = reset |
| 0x10 | Noise amplitude A (Q3.20) |
| 0x11 | β |
| 0x12 | λ0 |
| 0x13 | λ_min |
| 0x14 | γ (Q0.17) |
| 0x15 | k |
| 0x16 | Error threshold per window |
| 0x17 | Sync offset (clocks) |
| 0x18 | Target delay (symbols) |
| 0x20 – 0x23 | p1, p2, p3, m |
| 0x24 | Drift: bits 1:0 set the mode, bits 3:2 select the parameter |
| 0x25 – 0x27 | V0, V1, V2 |
| 0x28 | Δ |
| 0x29 | Switch period |
| 0x80 + i | Mask element M_i (low 18 bits) |

Unknown opcodes are ignored. While the run bit is 0, the datapath
(`params`, `chan`, `fpga2exp`, `exp2fpga`, `train`, `step`, `check`) is
held in reset. This clears the weights and restarts the sync. The
registers and the mask keep their values. While running, each window
count is sent as 4 bytes: 0x53 ("S"), then the 24-bit count.

The original host only sends commands while the board is in reset, to
avoid collisions. This receiver accepts them at any time.

## Where this departs from, or adds to, the original description

* **Own choices where the description gives no detail:**
  - LFSR polynomials and seeds;
  - the Q3.20 parameter format;
  - the opcode map, baud rate and report format;
  - the sync pulse shape and detector threshold;
  - the lead-in, the sync-offset and target-delay registers;
  - the drift law (linear, Δ per symbol) and the drift/switch register set;
  - truncation and saturation;
  - the decision thresholds' tie rule.
* **Command port.** The description says in one place that commands go
  through the JTAG port, and in others that they go through the UART. The
  UART is used here.
* **Multiplier count.** The original reports about 3N DSP multipliers.
  This design needs N for the outputs, N for the updates and one for
  λ·error; the mask product is time-shared in `fpga2exp`. Synthesis may
  map these differently.
* **Error threshold units.** The threshold is compared with the error
  *count* per window, not with a rate.
* **Not in the RTL:**
  - the analogue loop, converters, clock generator and board configuration
    port, which appear only as ports;
  - the on-chip logic analyser;
  - the host software.

## Simulation

The testbenches are in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops.

| Testbench | What it checks |
|---|---|
| `tb_glfsr` | LFSR sequence against a reference model, and the periods |
| `tb_chan` | Outputs against a real-number model of the channel for the standard, a generalised and a noisy setting; latency; symbol balance |
| `tb_params` | The ramp, oscillation and switch timings |
| `tb_fpga2exp` | Sync pulse, DAC codes and symbol pacing |
| `tb_exp2fpga` | Sync offset, discard/average and output timing |
| `tb_train` | Output, error and weight update against a bit-exact model |
| `tb_step` | Decay schedule, re-arm and decay to zero |
| `tb_check` | Decisions at the boundaries and window counts |
| `tb_uart` | Every register, mask writes and the report frame |
| `tb_rc_fpga_top` | The whole design at reduced size, in three phases (below) |
| `tb_rc_fpga_full` | The top at its default parameters (below) |
| `tb_rc_workloads` | Reduced-size runs of a noisy channel (A = 0.25), constant-λ training, and m oscillating between 0 and 0.05 |

`tb_rc_fpga_top` uses N = 20, SPS = 4 and windows of 500 symbols. The
host is modelled through the serial line. The three phases are:
1. A stationary channel, where the error rate must fall from about 20% to
   about 1%.
2. A channel that switches every 6,000 symbols, where each switch must
   re-arm λ and the error rate must recover.
3. A ramp of p1 with λ_min = 0.01.

It counts locks, decays, re-arms, switches, drift steps, mask writes and
reports.

`tb_rc_fpga_full` runs the top at its defaults. It loads 50 random mask
values over the 115200-baud line and trains for 30,000 symbols. Typical
window counts are about 6,000, then about 900, then about 300 errors per
10,000 symbols. It takes about 20 s with Verilator.

Both top-level tests drive the loop with `tb/reservoir_model.sv`. This is
a sample-level model of the optical loop:

    v(t) = sin(0.6·v(t − 1020) + dac(t − 5)/2¹⁴ + 0.3)
    adc  = 6000·v

It is only a stand-in; it models no noise or bandwidth. The error rates
it gives are not those of the real experiment.

A typical build with Verilator 5:

    verilator --binary --timing -Irtl -Itb rtl/rc_pkg.sv rtl/*.sv \
        tb/reservoir_model.sv tb/tb_rc_fpga_full.sv --top-module tb_rc_fpga_full
    ./obj_dir/Vtb_rc_fpga_full
