# A pipelined CIC decimator with carry look-ahead integrators

A sigma-delta modulator samples far faster than the signal needs (here at
6.144 MHz for an audio-band signal) and delivers few bits per sample. To get
a high-resolution stream at the Nyquist rate, the samples must be low-pass
filtered and the rate reduced, here by 128 down to 48 kHz. The bulk of that
work, the first reduction by 16, is done by a cascaded integrator-comb (CIC)
filter: a filter with no multipliers and no coefficient storage, just
adders and registers, whose only weakness is that its first integrator
runs at the full input rate on the widest word. This design attacks that
weakness in three ways:

* **truncation**: each integrator keeps only as many bits as it needs, so
  the register widths shrink from 25 bits in the first integrator to 16 in
  the last;
* **pipelining**: the integrator outputs are taken after their registers,
  so the critical path is one adder instead of five chained ones, with no
  extra flip-flops;
* **carry look-ahead adders**: every integrator adds with a modified carry
  look-ahead adder (MCLA) built from 4-bit look-ahead groups.

After the CIC, three decimate-by-2 filters finish the job: a half-band
filter, a droop-correction filter that undoes the CIC's pass-band
attenuation, and a second half-band filter.

```
 sd_in      +------------+ 384 kHz +-----------+ 192 kHz +---------+ 96 kHz +-----------+ 48 kHz
 5 bit ---->| CIC, R=16  |-------->| half band |-------->|  droop  |------->| half band |-------> pcm_out
 6.144 MHz  | N=5, M=1   | 16 bit  |   /2      | 16 bit  |   /2    | 16 bit |    /2     | 16 bit
            +------------+         +-----------+         +---------+        +-----------+
```

The CIC filter, its integrators, down-sampler, combs and adders follow the
published design closely. The three filters after it are short stand-ins:
their role and position in the chain are published, their coefficients are
not (see "The filters after the CIC").

## The CIC filter

The CIC filter of order N, differential delay M and decimation R has the
transfer function

    H(z) = ((1 - z^-RM) / (1 - z^-1))^N = (1 + z^-1 + ... + z^-(RM-1))^N

i.e. N running sums (integrators, `1/(1 - z^-1)`) at the input rate, a
down-sampler that keeps one sample in R, and N differences (combs,
`1 - z^-M`) at the output rate. Here N = 5, M = 1, R = 16. The DC gain is
(RM)^N = 2^20, so a B_in-bit input needs a B_in + 20 bit word to hold every
possible output. The first integrator is 25 bits wide, which fixes the
input at 5 bits (two's complement, -16..15).

Integrators overflow all the time: a running sum of a non-zero-mean input
grows without bound. That is harmless. Everything is two's complement
arithmetic modulo 2^W, and since the final comb output is known to fit the
word, the wrap-arounds of the integrators cancel in the combs. The only
rule is that every stage must stay aligned to the same MSB.

### Truncation

Integrator k keeps W_k bits, all aligned to bit 24 of the 25-bit
full-precision word:

| stage        | integrator 1 | 2  | 3  | 4  | 5  | combs 1-5 |
|--------------|--------------|----|----|----|----|-----------|
| width (bits) | 25           | 22 | 20 | 18 | 16 | 16        |
| LSBs dropped | 0            | 3  | 5  | 7  | 9  | 9         |

Between integrators the low bits of the previous stage are simply cut off
(no rounding), see `cic_integrator.sv`. The output `s_out` is therefore the
top 16 bits of the ideal 25-bit result, a gain of 2^20 / 2^9 = 2^11 from the
5-bit input. Truncation is not free: each cut injects noise that the later
integrators amplify. Treating the cuts as independent uniform errors, the
output noise is

    sigma^2 = sum_j (2^(2 B_j) / 12) * F_j^2   (in units of the 25-bit LSB)

where B_j = 3, 5, 7, 9 are the bits dropped in front of integrators 2..5 and
F_j^2 is the sum of the squared impulse response from that point to the
output. This gives about 59 LSB rms of the 16-bit output (the early cut in
front of integrator 2 dominates); the testbench measures 55. These widths
are the published ones and are kept as they are.

### Pipelining

In the plain structure each integrator's output is the adder output, so a
sample ripples through all five adders (and their carry chains) in one
clock. In the pipelined structure used here the output of each integrator
is its accumulator register: `y[n+1] = y[n] + x[n]`. The next stage adds
that register value, so the longest path is one adder. The accumulators
themselves act as the pipeline registers; the only cost is a latency of one
cycle per stage (five cycles in all), which changes nothing in the
magnitude response. The combs run 16 times slower and are left as one
combinational chain of five 16-bit subtractors, as in the published design.

### The modified carry look-ahead adder

A W-bit adder (`mcla.sv`) is split into 4-bit groups. In each group four
partial full adders (`pfa.sv`) form the bit propagate `p = a ^ b` and
generate `g = a & b`; a look-ahead block (`mcla_cll4.sv`) forms all four
carries of the group at once from p, g and the group's carry in c0:

    c1 = g0 + p0 c0
    c2 = g1 + p1 g0 + p1 p0 c0
    c3 = g2 + p2 g1 + p2 p1 g0 + p2 p1 p0 c0
    c4 = g3 + p3 g2 + p3 p2 g1 + p3 p2 p1 g0 + p3 p2 p1 p0 c0

and the group propagate `P_G = p3 p2 p1 p0` and generate
`G_G = g3 + p3 g2 + p3 p2 g1 + p3 p2 p1 g0`. The sum bit is `s = p ^ c`.
The carry out c4 of one group is the carry in of the next, so a carry
crosses the word in W/4 group steps rather than W bit steps, while each
group's logic stays at the size of a 4-bit look-ahead adder. Widths that
are not multiples of 4 (25, 22, 18) pad the top group with zeros. The
group P_G/G_G signals are computed as in the published equations but not
used by the chained structure; they are what a second look-ahead level
would consume.

### Down-sampler and strobes

The design runs from one clock at the modulator rate. A modulo-16 counter
in `cic_downsampler.sv` raises `tick` in every 16th cycle; at the end of
that cycle the last integrator's value is captured and every comb delay
register takes its current input. From the next cycle on, `s_out` shows
the new output (for 16 cycles) and `s_valid` is high for one cycle. The
combs are clock-enabled by `tick`, not clocked by a divided clock.

Timing from reset release (cycle 0 = first cycle with a valid input):
the sample entered in cycle n reaches integrator 5 at the end of cycle
n + 4; captures happen at the ends of cycles 15, 31, 47, ...; so the
output visible after the capture at the end of cycle n is
`sum_k h[k] x[n-5-k]` (h = the 76 coefficients of
`(1 + ... + z^-15)^5`), scaled by 2^-9 and truncated as above.

## The filters after the CIC

Each of the three is a decimate-by-2 FIR that takes 16-bit samples with an
`in_valid` strobe, computes an output for every second input only, rounds
half up, saturates to 16 bits, and registers the result with a one-cycle
`out_valid` and a `clip` flag.

* `halfband_decim2.sv`: a half-band filter, symmetric, centre tap 1/2,
  every other tap zero; only the distinct non-zero side taps are
  multiplied, after adding each symmetric pair. First filter: 11 taps
  `[3 0 -25 0 150 256 150 0 -25 0 3]/512`. Second filter: 15 taps
  `[-5 0 49 0 -245 0 1225 2048 1225 0 -245 0 49 0 -5]/4096`. Both are
  maximally flat half-band filters.
* `droop_decim2.sv`: a 3-tap compensator `[-1 6 -1]/4`, whose response
  `1 + (1 - cos w)/2` rises with frequency (+0.23 dB at 20 kHz of its
  192 kHz input rate, against -0.19 dB of CIC droop there).

These are the simplest filters that do each job and are this design's
choice. The published system uses much longer filters, with stop bands
near -120 to -130 dB and, for the second half-band filter, a transition
from about 23 kHz to 26.5 kHz; those responses are not reproduced. To use
real filters, replace the coefficient parameters (the half-band module takes
up to 8 distinct side taps) or the modules.

## Interfaces

`cic_decimation_system` (top):

| port        | dir | width | meaning                                  |
|-------------|-----|-------|------------------------------------------|
| `clk`       | in  | 1     | modulator sample clock (6.144 MHz)       |
| `rst_n`     | in  | 1     | asynchronous reset, active low           |
| `sd_in`     | in  | 5     | modulator output, one sample per clock   |
| `cic_out`   | out | 16    | CIC output, 384 kHz                      |
| `cic_valid` | out | 1     | one cycle in 16                          |
| `pcm_out`   | out | 16    | decimated output, 48 kHz                 |
| `pcm_valid` | out | 1     | one cycle in 128                         |
| `pcm_clip`  | out | 1     | this `pcm_out` was saturated             |
| `stage_clip`| out | 3     | {half band 2, droop, half band 1}: that filter's latest output was saturated |

All data are two's complement. Shared constants are in `cic_pkg.sv`.

## How far it has been checked

Every module has a self-checking testbench in `tb/` that compares against
integer models written independently of the RTL:

| testbench                  | what it checks                                                              |
|----------------------------|-----------------------------------------------------------------------------|
| `tb_pfa`                   | all 8 input combinations                                                    |
| `tb_mcla_cll4`             | all 512 combinations of p, g, c0 against a bit-serial ripple                |
| `tb_mcla`                  | 8-bit adder exhaustively, 25-bit adder on random and carry-through values   |
| `tb_cic_integrator`        | 25-bit and truncating 25->22-bit stages, latency, wrap-around               |
| `tb_cic_downsampler`       | capture phase, strobes, 1-in-16 rate                                        |
| `tb_cic_comb`              | M = 1 and M = 2 with random enable patterns                                 |
| `tb_cic_filter`            | bit-exact every cycle; error against the ideal filter (mean, rms)           |
| `tb_cic_response`          | gain at DC, 20, 100, 200, 300, 550 kHz against the sinc^5 formula           |
| `tb_halfband_decim2`       | both half-band filters bit-exact, rate, saturation                          |
| `tb_droop_decim2`          | bit-exact, rate, saturation, unity gain on a ramp                           |
| `tb_cic_decimation_system` | whole chain bit-exact at full size, strobes every 16 and 128 cycles, and that wrap-around, inter-group carries, truncation and saturation all occur |
| `tb_decimator_snr`         | whole chain: gain and signal-to-noise ratio for a 3 kHz tone at 48 kHz      |

Measured CIC response (relative to DC): -0.18, -4.93, -21.4, -56.8 dB at
20, 100, 200, 300 kHz, and -64.5 dB at 550 kHz, in line with the sinc^5
theory (-0.19, -4.94, -21.4, -58.6, -65.7 dB); the 300 and 550 kHz values
sit close to the truncation noise floor. The CIC output error against the
ideal filter has a mean of about 0 and an rms value of 55 LSB. At the
48 kHz output a 3 kHz tone at 14/16 of full scale comes out with the
expected amplitude (within 0.2 %) and a signal-to-noise ratio of 56 dB,
set by the CIC truncation noise that falls into the audio band.

No timing or area analysis has been done; the adder's speed advantage is
a property of the gate structure and has not been measured here.

## Where this departs from the published design

* The filters after the CIC are short stand-ins (above). Consequently the
  overall response and the very high signal-to-noise ratios reported for
  the full chain (above 140 dB) are not reached. A 16-bit output alone
  limits a full-scale sine to 98 dB, and with the published truncation
  widths the chain measures 56 dB for an in-band tone.
* The 5-bit input width is derived from the 25-bit first integrator; the
  word-length formula it comes from can also be read to give 6 bits, which
  would not fit a 25-bit integrator.
* One clock with enable strobes replaces the separate, 16 times slower
  clock of the comb section; the sample timing is the same.
* Bit 0 of the adder is a partial full adder with a carry-in port (tied to
  0), where the 8-bit drawing has a half adder; the result is identical.
* The comb subtractors are written as plain subtraction; only the
  integrators use the look-ahead adder, as published.
* The final rate is 48 kHz (128:1), as in the block diagram; one sentence
  of the text mentions 47 kHz.
* Reset (asynchronous, active low, clears all state), the strobe protocol,
  rounding and saturation of the post-CIC filters and their 16-bit words
  are this design's choices.
* The sigma-delta modulator is not part of the RTL; the end-to-end
  testbench models it with a first-order error-feedback quantiser.

## Simulating

Each testbench is a top module with no ports. With Verilator 5:

```
verilator --binary --timing -Irtl -y rtl +libext+.sv rtl/cic_pkg.sv \
    tb/tb_cic_decimation_system.sv --top-module tb_cic_decimation_system
./obj_dir/Vtb_cic_decimation_system
```

Every testbench ends with a line `TB_RESULT checks=N failures=M` and
has a watchdog that counts a failure if the run does not finish. All run in
seconds. To change the CIC (order, decimation, stage widths), override
`N`, `R`, `M`, `B_IN`, `B_MAX` and `INT_W` on `cic_filter`; `INT_W` must be
non-increasing and `B_MAX` must be at least `N*log2(RM) + B_IN`.
