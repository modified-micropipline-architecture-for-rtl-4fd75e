# A sample-driven asynchronous FIR filter on a modified micropipeline

Signals such as ECG, temperature or speech often change slowly or only now and
then. A filter for them needs to work only when a new sample arrives. This
design is a 33-tap (order 32) low-pass FIR filter with no clock. Each input
sample comes with a request. The request runs through a chain of handshake
stages, and each stage's output is the clock edge of one register of the
filter's delay line. So the whole delay line shifts exactly once per sample,
then the circuit goes quiet until the next one. Everything is ordinary
synthesizable SystemVerilog: C-elements written as latches, edge-triggered
flip-flops, multipliers and adders. No special asynchronous tool flow is needed.

The control is a *modified micropipeline*. A classic micropipeline is a FIFO:
a data item entering it runs down to the first occupied place. That is the
wrong behaviour for a filter, where every stage must keep its own past sample
and pass it on only when a new sample enters. The modification adds a second
C-element to each stage. It gates the stage with the filter's input request,
called the *global request*. The register of each stage is an edge-triggered
flip-flop rather than a latch.

## Filter

| quantity | value | origin |
|---|---|---|
| sampling rate of the target signal | 125 Hz | specification |
| pass band / stop band | 0-35 Hz / 45-62.5 Hz | specification |
| pass-band ripple / stop-band attenuation | 1 dB / 80 dB | specification |
| order / taps | 32 / 33 | specification |
| input samples | 12-bit signed two's complement | 12-bit ADC of the test signal; signedness chosen here |
| coefficients | 16-bit signed, Q1.15 | chosen here |
| output | 34-bit signed, full precision (12 + 16 + ceil(log2 33)) | chosen here |

The specification does not come with coefficients, so this design supplies
them in `rtl/fir_pkg.sv`. They come from an equiripple (Parks-McClellan)
design for the band edges above. The stop-band error is weighted by
δp/δs, with δp = (10^(1/20)-1)/(10^(1/20)+1) and δs = 10^(-80/20). Each
coefficient is then rounded to `round(h * 2^15)`. After rounding, the response
has about ±0.45 dB ripple up to 35 Hz, at least 79 dB attenuation above
45 Hz, and 82 dB at 50 Hz, the mains-hum frequency. The set is symmetric, so
the phase is linear. The DC gain is 34479/32768 ≈ 1.052, which lies inside
the pass-band ripple. No rounding or saturation happens anywhere in the
datapath, so the output is the exact sum `y[n] = Σ h[k]·x[n-k]`, k = 0..32.

The datapath (`fir_mac`) is the direct form: one product per tap, summed
along a chain of adders. It is purely combinational.

## The stage controller

Every stage `s` (`stage_ctrl`) holds two C-elements. A C-element's output
copies its inputs when they agree and holds its value while they differ.

```
token[s] = C( req[s-1] delayed , NOT fire[s+1] )     -- classic micropipeline stage
fire[s]  = C( token[s] , Req_in )                     -- added C-element
```

`fire[s]` does three jobs:
- it is the clock of register `s`;
- it is the acknowledge returned to stage `s-1`;
- through a delay element, it is the request for stage `s+1`.

The last stage reads `Ack_in` in place of `fire[s+1]` and drives `Req_out`.
The first stage has only one C-element, `fire[0] = C(Req_in, NOT fire[1])`,
and drives `Ack_out`.

In a classic micropipeline the token would pass down the chain on its own.
With the added C-element, a stage's output can:
- rise only while the global request is high;
- fall only while the global request is low.

The four phases of each stage's handshake are therefore tied to the global
request:

1. the stage raises its request when its token is there *and* `Req_in` is high;
2. the next stage acknowledges while `Req_in` is still high;
3. the stage lowers its request only after `Req_in` has gone low;
4. the next stage withdraws its acknowledge while `Req_in` is low.

A token that reaches the first C-element while `Req_in` is low waits there
("locked"). A stage whose token has gone keeps its output high until `Req_in`
falls ("held"). The `stage_ctrl` test bench exercises both cases and counts them.

The registers are edge-triggered because the stage output stays high for as
long as the global request does. A transparent latch would stay open all
that time and let the newest sample flood every stage. A flip-flop instead
loads once, at the rising edge of its stage output.

## One sample, end to end

```
sender:    data_i valid ──► req_i ↑
pipeline:  fire[0] ↑ (reg 0 loads x[n], ack_o ↑) ─► fire[1] ↑ (reg 1 loads old reg 0) ─► … ─► fire[32] ↑ = req_o ↑
                                                    data_o = y[n] from here until the next req_i
receiver:  reads data_o, raises ack_i            (may come before or after req_i falls)
sender:    sees ack_o, lowers req_i
pipeline:  fire[0..31] fall; fire[32] = req_o falls once both req_i and ack_i allow it
receiver:  lowers ack_i
```

Both channels are four-phase bundled data, active high:
- `data_i` must be stable before `req_i` rises, and held until `ack_o` is high.
- `data_o` is valid while `req_o` is high. It stays valid until the next
  `req_i`, because it depends only on the registers.

**Sender rule.** `req_i` may rise again only after the previous sample's
output handshake has finished, with `req_o` and `ack_i` both low. If the
sender breaks this rule, the request wave of the new sample stalls behind the
unfinished stage. A token is then left locked in some stage, and that stage
fires with the *next* sample. From then on the stages shift out of step and
the delay line is corrupted. For a filter sampled at 125 Hz, this rule holds
by a margin of many orders of magnitude. The top level asserts what it can
check without racing the control chain:
- `ack_i` is low when `req_i` rises;
- `ack_i` is low when `req_o` rises;
- `ack_i` is high when `req_o` falls.

## What correct shifting rests on

Register `s` loads the *old* content of register `s-1`. Yet in this
structure `fire[s-1]` rises before `fire[s]`. The shift is therefore correct
only if the request wave reaches stage `s`, through the delay element and two
C-elements, before register `s-1`'s output has changed. This is a hold
condition: the stage-to-stage delay of the request wave must be shorter than
a register's clock-to-output time. It is the same condition as clock skew in
a shift register. This is why the delay element (`matched_delay`) defaults
to zero.

It is also why, in simulation at zero delay, the whole wave settles in one
time step, like a zero-skew clock. With `DELAY = 1` (1 ns per stage), the
wave takes 32 ns, and every register ends up holding the newest sample. That
is exactly the failure the flip-flops were meant to prevent. An implementation
must therefore:
- keep the control path between neighbouring stages short;
- or add hold-time padding in the data path;
- or replace the register chain by a scheme that does not depend on this ordering.

These points are not addressed by the structure as drawn. Two more
consequences, worth knowing before changing anything:

* With zero delay and a sender that obeys the rule above, the added
  C-element never changes the outcome. The same end-to-end test also passes
  with plain micropipeline stages. The added element's locking and holding
  only take effect when the global request changes while a wave is still
  travelling. `async_fir_lock_tb` sets up that case: a 3 ns stage delay and
  short request pulses. It shows the gating at work: no stage fires while
  `req_i` is low, and every locked token fires at the next rising `req_i`.
  In that regime the register chain no longer shifts by one place per sample,
  so that test checks only the control.
* `req_o` is the last stage's output with no delay after it. In hardware,
  `data_o` settles one multiplier and 32 adders later. A receiver needs a
  delay matched to that logic on `req_o`, or it must wait that long before
  reading.
* The rate figures of the original evaluation disagree with each other. The
  test signal is described as sampled at 125 Hz, but a later comparison lists
  125 kHz and 2 Mbit/s, which is 125 k samples × 16 bits. Neither rate can
  be checked at RTL. Both are far slower than one pass of the request wave,
  as long as the hold condition above is met.

## Departures and own choices

* **Tap of the first coefficient.** The original structure takes h1 from the
  input wire ahead of the first register, and has one register fewer than
  coefficients. Once the request has passed the first stage, h1 and h2 would
  then both multiply x[n]. Here h1 reads the first register, and there are 33
  registers, one per coefficient. `data_o` is then a complete y[n] while
  `req_o` is high.
* **Coefficients, number formats and output width** are this design's own
  (see *Filter*).
* **C-element circuit**: a latch with enable `a == b` and data `a`, with an
  active-low reset. Lint reports the latch, and synthesis may report it as a
  logic loop. Both are the C-element's memory and are intended. The chain of
  stages is also a combinational loop through the acknowledges, which is the
  asynchronous control itself.
* **Reset**: all C-elements and registers clear to zero. The filter starts
  with an empty history.
* **Delay element**: a behavioural model. It is a plain wire at the default
  `DELAY = 0` and a delayed assignment otherwise. Synthesis drops the delay.
  A real delay line has to be built and constrained in the implementation
  flow.

## Files

| file | contents |
|---|---|
| `rtl/fir_pkg.sv` | sizes, types, coefficients |
| `rtl/c_element.sv` | Muller C-element with reset |
| `rtl/matched_delay.sv` | behavioural request delay (`DELAY`, ns) |
| `rtl/stage_ctrl.sv` | one modified micropipeline stage (`FIRST` selects the one-C-element first stage) |
| `rtl/tap_register.sv` | edge-triggered register of one stage |
| `rtl/fir_mac.sv` | multipliers and adder chain |
| `rtl/async_fir.sv` | top level: 33 stages, 33 registers, datapath, handshake assertions |
| `tb/*_tb.sv` | one self-checking test bench per module |
| `tb/async_fir_lock_tb.sv` | global-request gating of the whole filter with a positive stage delay |

## Simulating

All test benches are self-checking. Each ends by printing
`TB_RESULT checks=N failures=M`. Verilator 5 with timing support is enough,
for example:

```
verilator --binary --timing --assert -Irtl rtl/fir_pkg.sv tb/async_fir_tb.sv --top-module async_fir_tb
./obj_dir/Vasync_fir_tb
```

`async_fir_tb` runs the filter at its full size. Its input sequence is:
- eight full-scale extremes;
- 10,000 samples of a synthetic ECG-like signal at 125 Hz: a slow baseline,
  QRS-shaped spikes, a T-wave bump, 50 Hz hum and random noise;
- 200 samples of a pure 50 Hz tone;
- 200 samples of a pure 10 Hz tone.

Every output word is compared with a reference sum computed in the test
bench. After each sample, all 33 registers are checked against the expected
history. The receiver's acknowledge is randomly early or late relative to the
sender's request pulse, and both cases are counted. The test also checks that
the 50 Hz tone comes out at least 60 dB down (about 74 dB is measured), and
that the 10 Hz tone keeps its amplitude within the 1 dB ripple (+0.1 dB).
The whole run takes well under a second. The module tests cover:
- the C-element against its truth rule;
- the stage controller through the four protocol steps and random input orders;
- the register against transparent-latch behaviour;
- the datapath with impulses, extremes and random vectors;
- the delay model.

**Not covered:**
- Timing: the hold condition above, the matched delay on `req_o`.
- Gate-level or FPGA behaviour.
- The original recorded ECG signal, which is not included; a synthetic one
  stands in for it.
