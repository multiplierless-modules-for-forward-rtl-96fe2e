# Multiplierless 5/3 integer wavelet transform: forward and backward modules

This is a pair of streaming hardware modules for the one-level integer
discrete wavelet transform (DWT) with the 5/3 filter bank, computed by the
lifting scheme. Lifting replaces the two filter convolutions with two cheap
in-place steps, a *predict* and an *update*. Both steps need only additions,
subtractions and shifts by one or two bits, so there is no multiplier anywhere.
Integer rounding (floor) inside the steps keeps every coefficient an integer.
The inverse can still undo each step exactly, so the round trip is lossless:
the rebuilt signal equals the input bit for bit.

Both modules are built from one small, reusable **processing element**: a short
register chain with a single adder.

## The transform

For a signal `x[i]` of unsigned 8-bit samples:

```
predict   d[n] = x[2n+1] - floor((x[2n] + x[2n+2]) / 2)      detail (high-pass)
update    s[n] = x[2n]   + floor((d[n] + d[n-1]) / 4)         scaling (low-pass)
```

and backwards:

```
undo update    even[n] = s[n] - floor((d[n] + d[n-1]) / 4)
undo predict   odd[n]  = d[n] + floor((even[n] + even[n+1]) / 2)
merge          x[2n] = even[n],  x[2n+1] = odd[n]
```

The inverse computes the same floor terms from the same integers that the
forward transform used, so it removes exactly what was added. This holds
whatever the rounding does.

**Frame edges.** The modules treat the signal as zero before its first sample
and after its last one, and set `d[-1] = 0`. A frame of N samples (N even)
therefore gives N/2 pairs, plus one more pair that describes the zero tail.
The inverse needs that extra pair to rebuild the last odd sample, because
`odd[N/2-1]` depends on `even[N/2] = x[N] = 0`.

**Word widths.** With 8-bit input, `d` ranges over -255..255 (9 bits signed)
and `s` over -128..382 (10 bits signed). The RTL uses exactly these widths,
derived from `SAMPLE_W` in `dwt53_pkg` (`SAMPLE_W+1` and `SAMPLE_W+2`). The
transform is therefore exact for every input, not only for the low-amplitude
test signals.

## The processing element (`lift_pe`)

```
 din -> [R1] -> [D^n] -> [R2] -> [D^m] -> [R3] -> out2
          |                |
          +------(+)-------+
                  |
                 out1 = R1 + R2
```

`D^n` and `D^m` are delay lines of `N_DLY` and `M_DLY` registers. Every
register shifts when `en` is high. After k shifts:

- R1 holds `x[k-1]`
- R2 holds `x[k-2-n]`
- R3 holds `x[k-3-n-m]`

So `out1` adds two values that are n+1 positions apart in the stream. `out2`
is a delayed copy of the stream, used to line one operand up with a result
that is computed later. Two taps are added for the analysis module:

- `mid` is the output of `D^n`, the value about to enter R2.
- `q1` is R1 itself.

The delay lengths are fixed when the design is elaborated. The element is
always shifted by the valid strobe of its stream, never by a free-running
clock. This is what lets both modules tolerate gaps in their input.

## Analysis module (`dwt53_fwd`)

Input: one sample per accepted cycle (`in_valid`). The module never stalls.
Output: one pair `(out_s, out_d)` for every two samples, each marked by a
one-cycle `out_valid` pulse.

All registers move only when a sample is accepted, so the module is a shift
pipeline counted in samples rather than in cycles. The datapath:

1. **Window and predict.** Element `u_pe_predict` has `D^n = 1` and `D^m = 0`.
   It holds the three newest samples `x[t], x[t-1], x[t-2]`. When t is an even
   index 2n+2:
   - its adder gives `x[2n] + x[2n+2]`;
   - an arithmetic shift by one halves that sum;
   - `mid` supplies the odd sample `x[2n+1]`;
   - the subtractor produces `d[n]`.

   A phase bit `t_odd` does the even/odd split. A fill counter forces the
   detail value to 0 until the window is full, which gives `d[-1] = 0`.
2. **Update.** The detail values go into a second element, `u_pe_update`. It
   also has `D^n = 1`, because a valid detail value appears only every second
   sample. One sample later:
   - R1 (`q1`) holds `d[n]` and R2 holds `d[n-1]`;
   - the adder gives `d[n] + d[n-1]`;
   - `corr_shift2` divides that sum by four.
3. **Scaling output.** R3 of the predict element holds `x[2n]` at exactly this
   moment (four samples later). The final adder adds it to the update term to
   form `s[n]`.
4. The pair is registered on the next accepted sample, so pair n appears one
   cycle after sample `2n+4` has been accepted.

**Divide-by-four with correction (`corr_shift2`).** The sum is shifted right by
two with zeros entering at the top. When the sum is negative, the two vacated
top bits are then set to one. The result is `floor(sum/4)`, the same as an
arithmetic shift. The block is kept as a "shift, then correct negative sums"
pair because that is how the datapath is described. The reconstruction module
uses the identical block, which keeps the two sides consistent.

The forward datapath has 4 adders/subtractors and 2 shifters, and no
multiplier.

## Reconstruction module (`dwt53_inv`)

Input: coefficient pairs under a valid/ready handshake. Output: the rebuilt
samples in order, one per cycle. `out_odd` marks the odd-index samples.

- **Detail stream.** Element `u_pe_detail` has `D^n = D^m = 0`. It holds
  `d[K], d[K-1], d[K-2]`, where K is the newest pair. Its adder and
  `corr_shift2` give `floor((d[K] + d[K-1]) / 4)`. Its R3 gives `d[K-2]`.
- **Undo update.** A subtractor takes that term from the registered `s[K]`,
  which gives `even[K]`.
- **Undo predict.** Two registers, `even_a` and `even_b`, hold the last two
  even values. Their sum, halved by a shift, plus `d[K-2]` gives the odd
  sample between them.
- **Merge.** A three-state machine (IDLE → EVEN → ODD) drives the output
  multiplexer:
  - In the cycle after a pair is accepted, it shows the even sample and
    captures the odd one.
  - In the next cycle, it shows the odd sample.

  `in_ready` is low only in the EVEN cycle. So the module takes at most one
  pair every two cycles and delivers one sample per cycle. Pair n (`even[n]`,
  then `odd[n]`) leaves just after pair n+2 has been accepted.

This datapath also uses 4 adders/subtractors and 2 shifters.

## Chained top (`dwt53_top`)

`dwt53_top` feeds the analysis module straight into the reconstruction module
and brings out both the coefficients and the rebuilt stream.

The two rates match exactly. The analysis module cannot produce pairs more
often than every second cycle, and the reconstruction module is always ready
again by then. An assertion checks that no pair is ever refused.

**Latency.** The sample with index i reappears on `rec_sample` just after
input sample `i+8` (even i) or `i+7` (odd i) has been accepted. With
continuous input, a 256-sample line takes 266 cycles from its first input
sample to its last rebuilt sample, which is 2.66 µs at 100 MHz.

**Using it with frames.** To push a whole frame through:

1. Assert `rst` for one cycle to start the frame. Reset is synchronous and
   clears all history.
2. Send the samples.
3. Send 7 zero samples, or 8 if the frame length is odd.

## Where this RTL departs from the original description, or fills gaps

- **Coefficient widths.** The original FPGA implementation reports 8-bit
  registers for the analysis module and 9-bit registers for the
  reconstruction module. Here the coefficients are 9 bits (`d`) and 10 bits
  (`s`), so that full-range 8-bit input transforms exactly.
- **Delay line lengths.** The original figure of the reconstruction module
  shows longer coefficient windows: seven detail and four scaling entries.
  Their timing is not specified. This design keeps only the three detail
  values and one scaling value it needs.
- **Registered sums.** The original text keeps the sum of the two even samples
  in a register before the one-bit shift. Here that sum is the combinational
  output of the processing element's adder. The result is the same; only the
  pipeline timing differs.
- **Meaning of "correction".** The correction of negative sums is only named
  in the original. Here it is the sign fill that makes the shift a floor
  division, as the update equation requires.
- **Choices of this design.** The following are not specified in the
  original:
  - frame-edge handling (zero extension, `d[-1] = 0`);
  - the handshakes (valid only on the forward side, valid/ready on the
    inverse side);
  - the merge state machine;
  - synchronous reset.
- **Delays fixed at build time.** The delays of the processing element are
  set by parameters. The original calls them "programmable" but does not say
  how they are programmed.
- **Resource counts.** The original reports 30 registers and 5 adders for the
  analysis module, and 21 registers and 6 adders for the reconstruction
  module. These figures are not reproduced here: this RTL needs fewer
  registers. Per datapath it has the 4 adders and 2 shifters quoted for the
  lifting structure.
- **Timing not verified.** The 100 MHz clock is the original's FPGA figure.
  No timing analysis has been done on this RTL.
- **Not included.** A multi-level transform (cascading the analysis module on
  its own `s` output) is not part of this design.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. `dwt53_ref_pkg` is a
software model written directly from the equations above, with its own floor
division.

- `tb_lift_pe`: three delay settings, random data and random shift enables,
  checked against a history of shifted values.
- `tb_corr_shift2`: exhaustive check against `floor(v/4)` for every 10-bit
  and 6-bit value.
- `tb_dwt53_fwd`: frames of 2 to 256 samples, including odd lengths, with
  narrow and full-range data, extreme alternation 0/255, and gaps. Every pair
  is checked against the model, and so are the pair count, the
  one-cycle-after-sample-`2n+4` latency and the rate.
- `tb_dwt53_inv`: pairs from the model, with gaps and back to back. Checks the
  rebuilt samples, the parity flag, the latency, and one sample per cycle.
- `tb_dwt53_top`: end to end at the default parameters. It runs:
  - a 64-sample Gaussian-like frame around 36;
  - a 30-sample frame (not a power of two) of growing oscillation;
  - a timed 256-sample full-range line;
  - random frames with input gaps.

  It checks coefficients and lossless reconstruction. It also counts that
  each mechanism occurs: input stalls, negative update sums (the correction
  path), even and odd merge selections, zero-tail flush pairs and frame
  resets.

## Simulating

The package files must come first. For example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/dwt53_pkg.sv tb/dwt53_ref_pkg.sv rtl/lift_pe.sv rtl/corr_shift2.sv \
    rtl/dwt53_fwd.sv rtl/dwt53_inv.sv rtl/dwt53_top.sv tb/tb_dwt53_top.sv \
    --top-module tb_dwt53_top
./obj_dir/Vtb_dwt53_top
```

Swap the testbench file and the top module name to run another testbench. For
lint only: `verilator --lint-only -Wall -Irtl rtl/dwt53_pkg.sv rtl/<module>.sv`.
`SAMPLE_W` is the only parameter of the three main modules. The coefficient
widths follow from it.
