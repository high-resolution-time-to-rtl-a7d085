# Four-edge wave-union TDC with sub-TDLs and a bidirectional encoder

A time-to-digital converter (TDC) measures the time between two events. This
one works like an FPGA carry-chain TDC, with two additions that give it a
resolution well below one carry-element delay:

* **A wave-union launcher.** A hit does not send one edge down the delay line.
  It releases a stored pulse train `0-1-0-1-0` with four transitions. Each
  transition is a separate measurement of the same instant, and the four are
  added together.
* **Dual sampling.** Both outputs (O and CO) of every carry element are
  sampled. This doubles the number of taps per element.

The delay line is very fine: about 1.8 ps per tap, and 1920 taps per channel.
At that scale the sampled code is full of bubbles. These are spurious 0s and 1s
caused by clock skew and uneven tap delays. So the taps are split into 64
interleaved *sub-TDLs*, each of which is bubble free. In each sub-TDL a
*bidirectional encoder* finds the four transitions. Adding all 4 x 64 positions
gives the fine code. Over one 2.22 ns clock period (450 MHz), the fine code
spans about 4900 codes, or roughly 0.45 ps per code.

This RTL follows the architecture of Wang, Xie, Chen and Li, *High-resolution
time-to-digital converters (TDCs) with a bidirectional encoder*. That design
was built on a 16 nm UltraScale+ FPGA. The departures and own choices are
listed in the section "What comes from the original design, and what does not"
below.

## Measuring a time interval

There are two identical channels, start and stop, on one clock. Each channel
turns the rising edge of its hit input into:

* a **coarse code**: the value of a free-running clock counter, latched at the
  clock edge that samples the hit;
* a **fine code**: how far the launched pulse train has travelled into the
  chain when that edge arrives. This grows with `tau`, the time from the hit to
  the edge.

A hit in coarse period `m` has the timestamp `m*T - tau_start`. A stop hit in
period `n` has `n*T - tau_stop`. The interval is

    TI = (n - m) * T + (tau_start - tau_stop)

`tau` comes from the fine code through a calibration table. The code-density
method gives that table: feed many random hits and count how often each code
appears. Bin k is then `W[k] = T * n_k / N` wide, and the code maps to the
centre of its bin, `t_k = W[k]/2 + sum_{j<k} W[j]`. Neither the calibration nor
the subtraction is part of the RTL. They belong to whatever collects the codes.
With the identical elements of the chain model used here, the calibration
reduces to `tau = (fine - idle) / (4/RISE_PS + 4/FALL_PS)`. The testbenches use
that formula.

**The fine code is never zero.** With no hit, the launcher still holds its
stored pattern in the first 368 taps. The encoder sees those four transitions
and produces a constant *idle code*: 664 at the default size. A hit adds
about `4*tau/RISE_PS + 4*tau/FALL_PS` to the idle code. `fine_now` outputs the fine code of
every cycle, so the idle code can be read at any time.

## The carry chain (behavioural model)

`carry8` models one CARRY8 cell. It has eight MUX elements in a row. Element i
passes its carry on when `s[i] = 1`, and outputs `di[i]` when `s[i] = 0`. Its
second output is `o[i] = s[i] xor carry_in`. In the delay line `s = 1`, so O is
the inverted carry input.

The model uses transport delays. A carry that rises takes `RISE_PS` (3.50 ps)
per element, and one that falls takes `FALL_PS` (3.62 ps). O switches after
half the delay of its carry transition. The taps therefore appear in delay
order `O0, CO0, O1, CO1, ...`, 16 taps per cell. That spacing is why dual
sampling halves the bin width.

The rise/fall difference matters more than it looks. In a perfectly symmetric
chain of identical elements, all four edges of the wave would cross tap
boundaries at the same instants. The four measurements would then be
identical, and the wave union would gain nothing: the fine code would only move
in steps of 4. Silicon breaks this symmetry through uneven bins, and also
because rising edges travel faster than falling edges, as observed on the
original device. The model keeps only the second effect. The two rising and
the two falling edges of the wave drift apart by about 20 elements over one
clock period, so their tap crossings interleave.

The chain of one channel has 120 CARRY8s and 1920 taps:

| taps        | part                         | module        |
|-------------|------------------------------|---------------|
| 0 .. 367    | wave-union launcher (23 CARRY8) | `wu_launcher` |
| 368 .. 1919 | tapped delay line (97 CARRY8)  | `tdl_chain`   |

1552 delay-line taps at 1.78 ps cover 2.76 ns. That is more than one clock
period plus the length of the pulse train.

`carry8`, `wu_launcher` and `tdl_chain` are timing models with `#` delays. They
are not synthesizable logic. On an FPGA they become hand-placed carry
primitives.

### The launcher

Most launcher elements are plain delay elements. Four *configuring elements*
have the hit as their select and a constant as their data input. From the chain
input, the constants are 1, 0, 1, 0:

    element:   0 ....... 46 | 47 ..... 86 | 87 ..... 142 | 143 .... 182 | 183 ->
    standby:   0 (chain in) | 1 (40 el.)  | 0 (56 el.)   | 1 (40 el.)   | 0 ...
                              ^cfg "1"      ^cfg "0"       ^cfg "1"       ^cfg "0"

* **Standby (`hit = 0`).** Each configuring element drives its constant, so the
  chain holds two 1-blocks of 80 taps, separated by a 112-tap gap.
* **Launch (`hit = 1`).** Every element propagates, and a 0 enters at the chain
  input. The whole pattern moves up the chain by about one element per 3.56 ps.
* **Back to standby.** When the hit falls, the constants rebuild the pattern
  within a few hundred picoseconds.

The pulse widths are chosen with the sub-TDLs in mind. Each 1-block must span
more than one sub-TDL bin (64 taps), or some sub-TDL would miss it. The gap
must stay under 5 sub-TDL taps (320 taps) for the encoder. At 112 taps the gap
is 1 or 2 taps in every sub-TDL. In real silicon rising edges travel faster
than falling edges, so the gap shrinks along the line. That is why it is made
wider than the 1-blocks. The model reproduces this: the gap loses about 30
taps over the full chain.

## Sampling and sub-TDLs

`tdl_sampler` holds the 1920 sampling flip-flops. They take a snapshot of the
raw taps on every rising clock edge. The same flip-flops re-invert the O taps,
so the stored code is a *pseudo thermometer code*: bit 0 is nearest the chain
input, and 1 means high. In the code the wave looks like

    MSB ...000 111..111 000..000 111..111 000... LSB
               block 2    gap     block 1

In real hardware, bubbles up to about 60 taps deep would make this code
unusable directly. Splitting it into 64 sub-TDLs fixes that:

    sub_code[k][j] = therm[k + 64*j]      k = 0..63, j = 0..29

Each sub-TDL has 30 taps spaced 64 taps apart, so bins about 115 ps wide. At
that spacing skew cannot reorder neighbouring taps. The split is pure wiring of
the flip-flop outputs.

## The bidirectional encoder

This is the part that needs the most care. A sub-TDL code holds **two** `10`
patterns (a 1 above a 0) and **two** `01` patterns. A plain edge detector gives
a *dual-hot* code, and a one-hot-to-binary converter cannot decode that. The
encoder (`bidir_encoder`, one per sub-TDL) splits each pair into two one-hot
codes. For each bit position `n` it uses one 6-input and one 3-input function:

| generator | detector | inputs                         | output 1 only for        |
|-----------|----------|--------------------------------|--------------------------|
| rising    | pattern  | `c[n+1] c[n] c[n-1] .. c[n-4]` | `1 0 0 0 0 0`            |
| rising    | edge     | `c[n+1] c[n] rp[n]`            | `1 0 0`                  |
| falling   | pattern  | `c[n+5] .. c[n+1] c[n]`        | `0 0 0 0 0 1`            |
| falling   | edge     | `c[n+1] c[n] fp[n]`            | `0 1 0`                  |

Here `rp` and `fp` are the outputs of the pattern detectors. The rising pattern
detector fires only on a `10` followed by at least five 0s towards the LSB.
That is the lower end of block 1, because below it there is only idle zeros.
The other `10`, the lower end of block 2, has the narrow gap below it, so the
pattern detector does not fire there. The edge detector finds both `10`
positions and removes the one the pattern detector found. In effect it XORs the
dual-hot code with the pattern detector's one-hot code, and what is left is the
other transition. The falling side does the same for `01`, looking towards the
MSB: its pattern detector finds the upper end of block 2, and its edge detector
finds the upper end of block 1.

Example, MSB left, sub-TDL bits 12..0:

    bit             12 11 10  9  8  7  6  5  4  3  2  1  0
    code             0  0  0  1  1  0  0  1  1  0  0  0  0

The `10` patterns are at n = 7 and n = 3, the `01` patterns at n = 9 and n = 5.
The rising pattern detector gives n = 3 (five 0s below) and the rising edge
detector n = 7. The falling pattern detector gives n = 9 (five 0s above) and
the falling edge detector n = 5.

**The encoder fails if the gap is 5 or more sub-TDL taps wide.** Both `10`
positions then pass the pattern detector, and the edge detector outputs
nothing. `tb_bidir_encoder` checks this failure case as well. Bits beyond
either end of a sub-TDL read as 0.

**Encoder pipeline.**

* Cycle 1: the four one-hot codes are registered.
* Cycle 2: `onehot2bin` turns each one into a 5-bit position, which is
  registered. The converter ORs together the indices of the set bits, so an
  empty code gives 0 and `found` goes low.

## Summation

`fine_sum` adds the 256 positions (4 edges x 64 sub-TDLs) in a binary adder
tree with a register after each level. That is 8 levels and 8 cycles, giving a
13-bit result.

Adding the positions of one edge over all sub-TDLs rebuilds full tap
resolution. Sub-TDL k sees the edge `floor((x - k)/64)` taps up, and the sum of
that over k moves by one for every tap the edge moves. Adding the four edges
averages four looks at the same instant. So the fine code moves about 4 codes
per tap, or 8 codes per element delay.

## A channel: interface and timing

`tdc_channel` connects launcher, delay line, sampler, 64 encoders, the adder
tree and a `coarse_counter`.

| port         | dir | width | meaning |
|--------------|-----|-------|---------|
| `clk`        | in  | 1     | sampling clock (450 MHz) |
| `rst`        | in  | 1     | synchronous, active high; clears the counter and the valid pipeline |
| `hit`        | in  | 1     | asynchronous hit; its rising edge is measured |
| `meas_valid` | out | 1     | one-cycle pulse per hit |
| `coarse`     | out | 16    | counter value for the period that the sampling edge closes |
| `fine`       | out | 13    | fine code of that sample |
| `complete`   | out | 1     | all 256 edges were found (a sanity flag) |
| `fine_now`   | out | 13    | fine code of every cycle (the idle code when no hit is in flight) |

**Which sample is the measurement.** A flip-flop samples `hit` on the same
clock as the taps. The first edge at which it reads 1, after having read 0, is
the edge whose snapshot holds the launched train. The coarse value is latched
at that same edge.

**Latency.** `meas_valid`, `fine`, `coarse` and `complete` appear 10 clock
edges after the sampling edge: 2 for the encoder and 8 for the adder tree. The
path is fully pipelined.

**Hit rules.**

* Keep `hit` high until the next clock edge has passed.
* Bring it low again before the next hit, early enough for the launcher to
  rebuild its pattern and for the old train to leave the chain. In the model
  the old train leaves within 960 x 3.56 ps, about 3.4 ns.
* A hit held high produces exactly one result. Once its train has left the
  chain, `fine_now` drops below the idle code.

`tdc_top` has two such channels, start and stop. Each has its own coarse
counter, and both counters are reset together. Its outputs are the per-channel
ports above, prefixed `start_` and `stop_`.

## Parameters

Defaults live in `tdc_pkg`.

| parameter     | default | origin |
|---------------|---------|--------|
| `N_TAPS`      | 1920    | taps per channel, launcher included (original design) |
| `N_SUB`       | 64      | number of sub-TDLs (original; chosen above the ~60-tap bubble depth observed on the device) |
| `LAUNCH_TAPS` | 368     | launcher length (original) |
| `POS_TAPS`    | 80      | width of each 1-block (original) |
| `NEG_TAPS`    | 112     | width of the gap (original) |
| `PAT_WIN`     | 5       | zeros the pattern detectors need (original, from the 6-input detector) |
| `COARSE_W`    | 16      | own choice: a 145 us range at 450 MHz |
| `RISE_PS`, `FALL_PS` | 3.50, 3.62 ps | own choice for the model: mean 3.56 ps gives 1250 taps per 2.22 ns period, as in the original; rising faster than falling, also as in the original |

**Constraints when changing the size.**

* `N_TAPS` and `LAUNCH_TAPS` must be multiples of 16.
* `N_TAPS` must be a multiple of `N_SUB`.
* `POS_TAPS` must exceed `N_SUB`.
* `NEG_TAPS` must stay below `(PAT_WIN - 1) * N_SUB`, so the gap is always
  narrower than `PAT_WIN` sub-TDL taps.
* The delay line must cover one clock period plus the pattern length.

`tb_tdc_channel` shows a consistent reduced set: 480 taps, 16 sub-TDLs,
a 96-tap launcher with 20/28-tap pulses, and a 640 ps clock.

## What comes from the original design, and what does not

**Taken from the original design:**

* the block chain: launcher, delay line, dual-sampling flip-flops, sub-TDLs,
  bidirectional encoders, summation, and a coarse counter per channel;
* the CARRY8-based launcher, with the hit as MUX select and the constants
  1 0 1 0;
* all the sizes marked "original" in the table above;
* the four detector functions, with their input wiring and truth tables;
* summing all sub-TDL results into the fine code.

**Own choices:**

* the carry-chain timing model: identical elements, O half an element after
  CI, and the rise and fall delay values;
* where the 96 spare launcher taps go (before the first configuring element);
* the O-before-CO tap order, and re-inverting the O taps in the sampling
  flip-flops;
* the sub-TDL stride of 64 taps. The original text asks for 64 sub-TDLs over
  16-tap cells, and that was followed. One of its drawings suggests a different
  spacing;
* zero padding at the ends of a sub-TDL;
* the OR-based one-hot-to-binary converter;
* the number and placement of pipeline registers;
* the adder tree (the original only says the results are summed);
* the hit flip-flop that marks the measurement cycle, the `complete` and
  `fine_now` outputs, and the coarse counter width and reset.

**Not in the RTL:**

* the code-density calibration and the TI arithmetic. They are equations for
  analysing the collected codes;
* the board clock source.

**Idle code.** The original reports its first valid bin near code 1250.
Here the idle code is 664 and the first code after a hit is about 724. The idle
code depends on where the stored pattern sits inside the launcher, and the
original does not give that placement.

**Where this model is kinder than silicon.** The carry-chain model has no
bubbles and no uneven bins. The sub-TDL split and the
encoder's tolerance of a narrow gap therefore go unstressed at the system
level. Only the encoder testbench drives them with random gaps. Resource
counts for an FPGA build (about 11.8 k LUTs and 13.5 k flip-flops per channel
in the original) cannot be reproduced here.

## Files

| file | content |
|------|---------|
| `rtl/tdc_pkg.sv` | sizes, the element delay of the model, the edge enum |
| `rtl/carry8.sv` | CARRY8 timing model |
| `rtl/wu_launcher.sv`, `rtl/tdl_chain.sv` | launcher and delay line built from `carry8` |
| `rtl/tdl_sampler.sv` | sampling flip-flops, O re-inversion, sub-TDL split |
| `rtl/bidir_encoder.sv`, `rtl/onehot2bin.sv` | bidirectional encoder of one sub-TDL |
| `rtl/fine_sum.sv` | pipelined adder tree |
| `rtl/coarse_counter.sv` | clock-period counter |
| `rtl/tdc_channel.sv`, `rtl/tdc_top.sv` | one channel; the two-channel system |
| `tb/tb_<module>.sv` | self-checking testbench of each module |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. The
models use `timeunit 1ps; timeprecision 1fs`. For example, to run the
full-size system test:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
        rtl/tdc_pkg.sv tb/tb_tdc_top.sv --top-module tb_tdc_top -j 8
    ./obj_dir/Vtb_tdc_top

`tb_tdc_top` runs the whole design at its default size. Building takes about
a minute, and the run takes well under a minute. It checks against a
reference model of where the pulse train sits:

* the idle code (664, matched exactly);
* a sweep of `tau` over one clock period, with `fine` monotonic and within
  6 codes of the model;
* the coarse codes and the 10-cycle latency;
* time intervals from 0 to 100 ns in 5 ns steps at random clock phases. The
  recovered intervals are within 6 ps, and typically within 1.5 ps, of the
  true value;
* the case where a TI = 0 measurement with a 206.73 ps channel offset
  straddles a clock edge, so `n = m + 1`;
* a hit held high.

It also counts each of these events and fails if one never happened.

The unit testbenches check the following:

* `carry8`: the delays and the MUX/XOR function;
* `wu_launcher`: the stored pattern and the widths of the launched pulses;
* `tdl_chain`: the tap switching times;
* `tdl_sampler`: the re-inversion, the one-cycle delay and the sub-TDL mapping;
* `bidir_encoder`: random two-block codes, with narrow and wide gaps, against
  positions derived from how each code was built;
* `fine_sum`: sums and latency;
* `coarse_counter`: counting and wrap-around;
* `tdc_channel`: the channel at the reduced size.
