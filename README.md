# Coherent noise subtraction with a radiation-tolerant median finder

Gaseous tracking detectors read out by the SALSA ASIC produce 64 channels of
12-bit samples every 20 ns (50 MS/s). Pick-up and ground noise often move all
64 channels of a chip up and down together. In any single sampling period only
a handful of channels carry a particle signal, so the **median** of the 64
samples is a good estimate of that shared (coherent, or common mode) noise.
Subtracting it from every channel removes the noise while leaving real signals
in place.

This RTL implements that common mode noise (CMN) subtraction stage:

```
ch_out[j] = adc_samples[j] - median(adc_samples) + cmn_offset      (every clock)
```

The median is found in one clock by a fully combinational **Combinatorial Sum
Median Finder (CSMF)**. A block that large and that combinational is exposed to
single-event transients: a particle strike produces a glitch a few nanoseconds
long that a flip-flop may capture. The median is therefore protected by
**temporal triple modular redundancy (TTMR)**: it is sampled three times, at
three instants of the clock period, by flip-flops running at f, 2f and 3f, and
the three copies are voted.

The architecture follows the published description of the SALSA CMN stage and
its median-finder study. The study compared several options and chose the CSMF
with TTMR; only that option is built here. The word "paper" below refers to
that publication. The code is not by its authors.

## Block diagram

```
                         +-------------------------- central_cmn ------------------------------+
 adc_samples[0..63] ---->| sample reg --> csmf_median --> ttmr_capture --> median ---+         |
        |                |  (clk_f)       (2016 cmp,      (f, 2f, 3f copies,       |         |
        |                |                 64 popcounts)   majority_voter)       (+)--> adjust |
        |                | cmn_offset --> two's complement ------------------------+  14 bit  |
        |                +----------------------------------------------------------|----------+
        |                                                                            |
        |      +---------------- cmn_channel j (x64) ----------------+               |
        +----->| DEPTH-stage delay line --> 14-bit subtract --> reg  |<--------------+
               +-----------------------------------------------------+--> ch_out[j]
```

| File | Role |
|---|---|
| `rtl/cmn_pkg.sv` | sizes (64 channels, 12-bit samples, 14-bit adders, rank 31) and word types |
| `rtl/hamming_weight.sv` | population count (one per channel in the CSMF) |
| `rtl/csmf_median.sv` | combinational median finder |
| `rtl/majority_voter.sv` | bitwise 2-of-3 vote |
| `rtl/ttmr_capture.sv` | temporal TMR: three copies at f, 2f, 3f, then the voter |
| `rtl/central_cmn.sv` | sample register, CSMF, TTMR, offset adder |
| `rtl/cmn_channel.sv` | per-channel delay line and subtraction |
| `rtl/salsa_cmn.sv` | top: one central block, 64 channels, reset synchroniser |

## The median finder (CSMF)

For every unordered pair of channels (x, y) with x < y there is one 12-bit
comparator: 64·63/2 = 2016 comparators. Each channel owns a 63-input
population count (a "1's counter"). The comparator's `X >= Y` output goes to
channel x's counter and its complement, `X < Y`, to channel y's counter. A
channel's count is therefore the number of other channels ranked below it.

Because every pair gives its point to exactly one of its two channels, equal
samples are ordered by channel index: the lower index wins a tie. The 64 counts
are thus always a permutation of 0…63, and exactly one channel has count 31.
Its sample is the output, the 32nd smallest of the 64, i.e. the lower of the
two middle values. The true median of an even number of samples would be the
mean of the two middle values; as a noise estimate one of them is enough, and
it avoids an adder and a divider. The selection uses an AND-OR multiplexer on
the one-hot match vector, where the paper draws tri-state buffers on a shared
net.

The rank is the parameter `RANK` (default 31). The paper's text says 31, but
its drawing compares the counters with 32, which would select the upper middle
value. `RANK = 32` gives that variant.

After coarse synthesis the CSMF is about 14,400 word-level cells, nearly all of
them the 2016 comparators and their wiring. It holds no flip-flops.

## Temporal TMR: what is sampled, when

This is the least obvious part of the design. The paper gives the structure (one
logic block, three flip-flops clocked at f, 2f and 3f, a majority voter) but not
which clock edges sample. The choice made here:

```
 t         0           T/4         T/2     2T/3            T
 clk_f     ‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾________________________‾‾‾‾
 clk_2f    ‾‾‾‾‾‾‾‾‾‾‾‾____________‾‾‾‾‾‾‾‾‾‾‾‾____________‾‾‾‾
 clk_3f    ‾‾‾‾‾‾‾‾________‾‾‾‾‾‾‾‾________‾‾‾‾‾‾‾‾________‾‾‾‾
 copy f                            ^   falling clk_f, T/2
 copy 3f                                   ^   rising clk_3f, 2T/3
 copy 2f                                       ^   falling clk_2f, 3T/4
 voted q                                       [===============...  valid until 3T/2
 samples   |                                               |   set n registered at 0, set n+1 at T
```

* The CSMF's inputs are registered on the rising edge of `clk_f` and are
  stable for the whole period.
* The three copies are taken at T/2, 2T/3 and 3T/4. A glitch shorter than the
  smallest gap (T/12, about 1.7 ns at 50 MHz) can reach at most one copy, and
  the voter outvotes that copy.
* The voted value is stable from 3T/4 until the f copy is refreshed at 3T/2.
  The next rising edge of `clk_f` falls inside that window. Downstream logic
  therefore sees the median one clock after the samples were registered, the
  same single-cycle latency as an unprotected CSMF.
* Cost: the CSMF must settle within T/2 (10 ns at 50 MS/s) instead of T.
  Moving the 3f copy to its first rising edge (T/3) would widen the smallest
  gap to T/6 and so cover longer glitches. The CSMF would then have to settle
  within T/3. That is a one-line change of the enable in `ttmr_capture`.
* Small counters (mod 2 on `clk_2f`, mod 3 on `clk_3f`) enable the 2f and 3f
  copies on the right edge. They start from reset, so reset must be released
  on a rising edge of `clk_f`, or at least before the first `clk_3f` edge
  after it. `salsa_cmn` has a two-flop reset synchroniser on `clk_f` for this.
  A concurrent assertion in `ttmr_capture` checks, at every rising edge of
  `clk_f`, that both counters are in their last state. The counters
  themselves are not triplicated.
* All three clocks must have 50 % duty cycle and rising edges aligned at the
  `clk_f` edge. Their source (a PLL or clock multiplier) is outside this RTL.

What is protected: transients on the median finder's output, i.e. anywhere in
its combinational cone. What is not: upsets in the 64×12-bit sample register,
the phase counters, the offset path and the channel pipelines. The paper
applies TTMR to the median finder only.

## Offset and subtraction

`central_cmn` adds the two's complement of `cmn_offset` to the voted median in
a 14-bit adder and broadcasts the result, `adjust = median - offset`, to all
channels. Each `cmn_channel` subtracts `adjust` from its own delayed sample, so

```
ch_out = sample - median + offset
```

The offset thus sets the baseline at which a channel carrying only noise
settles, which keeps most outputs positive. The offset is 12 bits unsigned.
Both differences fit in a 14-bit signed word: adjust is in [-4095, 4095] and
ch_out in [-4095, 8190]. The offset is treated as a static setting: it reaches
`adjust` combinationally, so changing it takes effect on the next clock edge
for whatever sample is then in flight.

The paper calls both arithmetic blocks "14-bit adders" and says the median is
*subtracted* from the channels. Here the channel adder adds the two's complement
of `adjust`.

## Latency and the channel delay line

| Edge of `clk_f` | What happens to sample set n |
|---|---|
| k   | set n is registered in `central_cmn` and in each channel's delay line |
| k..k+1 | CSMF evaluates; TTMR copies at T/2, 2T/3, 3T/4 |
| k+1 | each channel registers `sample - adjust` for set n |

So `ch_out` for a set presented before edge k is valid after edge k+1. That is
two clocks from port to port, and a new set is accepted every clock. The
paper's channel delay line is "N deep" so that the central median can catch up.
With the one-cycle CSMF, N is 1 (`cmn_pkg::CSMF_CYCLES`, `cmn_channel.DEPTH`).
A slower median finder would only need a larger `DEPTH`.

## Parameters

| Where | Parameter | Default | Origin |
|---|---|---|---|
| `cmn_pkg` | `N_CH` | 64 | paper |
| `cmn_pkg` | `SAMPLE_W` | 12 | paper |
| `cmn_pkg` | `CMN_W` | 14 | paper (adder width) |
| `cmn_pkg` | `MEDIAN_RANK` | 31 | paper text (drawing: 32) |
| `cmn_pkg` | `CSMF_CYCLES` | 1 | paper (latency of the CSMF) |
| `cmn_channel` | `DEPTH` | `CSMF_CYCLES` | chosen to match the central latency |
| `salsa_cmn` | `N_CHANNELS`, `RANK` | 64, 31 | paper |

`N_CHANNELS` may be reduced. The CSMF then builds N(N-1)/2 comparators and
`RANK` should become N/2 - 1.

## Departures from the paper and choices it leaves open

* Only the chosen configuration is built: the CSMF with temporal TMR. The
  bit-wise median finder (a 12-stage pipeline, one median bit per stage) and
  the "simple" and "full" TMR variants were alternatives in the study and are
  not here.
* Sampling edges of the three TTMR copies, the phase counters and the T/2
  settling requirement are this design's (see above).
* The median rank follows the text (31), not the drawing (32).
* Ties are broken by channel index through the comparator wiring. The paper
  does not discuss ties.
* The sample register in front of the CSMF, the channel output register, the
  reset synchroniser, the 12-bit offset and all reset values are choices.
  Resets are asynchronous and active low.
* The ADC front end, the clock multiplier that makes 2f and 3f, the FIR/IIR
  filters that follow the stage and the serial output links lie outside this
  RTL. Samples and clocks enter as ports.
* The reported area and power (65 nm) cannot be reproduced from RTL. Nor can
  the placement rule that keeps redundant flip-flops apart. A layout flow must
  also be told not to merge the three TTMR copies.

## Verification

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_hamming_weight` | 63-bit counts for edge cases, single ones and random vectors of varying density |
| `tb_majority_voter` | all 3-bit patterns per lane; any single corrupted copy outvoted |
| `tb_csmf_median` | 64×12-bit sets (random, many ties, all equal, pedestal with hits, sorted) against a sorting reference |
| `tb_ttmr_capture` | one-cycle latency; glitches around each sampling instant (masked), around T/3 (never sampled) and across two instants (must win the vote, which shows where the instants are) |
| `tb_cmn_channel` | subtraction and latency for the default delay and a 10-stage delay |
| `tb_central_cmn` | full-size median and adjustment, with offset changes |
| `tb_salsa_cmn` | the whole stage at default parameters (see below) |

`tb_salsa_cmn` runs 1200 clocks at the default size. The stimulus mimics a
detector: per-channel pedestals, a shared random-walk noise term, small
independent noise and occasional pulses on four neighbouring channels. Flat
sets with many ties and uniform random sets are mixed in. It checks every
output of every clock against `sample - median + offset`, where the median is
element 31 of the sorted set. It also forces glitches onto the CSMF output
inside the design and applies a reset mid-run. It counts and requires at least
one occurrence each of: ties at the median, negative outputs, a nonzero
offset, coherent noise removed from a quiet channel, a single glitch masked by
TTMR, a double glitch that gets through, and a reset.

Run any testbench with Verilator 5, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    --top-module tb_salsa_cmn -y rtl -y tb +libext+.sv -Irtl \
    rtl/cmn_pkg.sv tb/tb_salsa_cmn.sv
./obj_dir/Vtb_salsa_cmn +verilator+rand+reset+2
```

The full-size end-to-end run takes a few seconds. The testbenches drive no x
or z and reset or initialise everything they read, so they behave the same on
two-state simulators.
