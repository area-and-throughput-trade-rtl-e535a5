# Pipelined 9/7 lifting wavelet transform

This is a hardware discrete wavelet transform (DWT) for lossy image
compression in the style of JPEG2000. It implements the irreversible
Daubechies 9/7 wavelet, factorised into lifting steps. Each lifting constant
is rounded to an integer over 256, and each multiplication by a constant is
built from shifted additions. The additions are pipelined so that every
pipeline stage holds exactly one adder. That is the point of the architecture:
the shift-add multipliers remove the generic multipliers, and one addition per
stage gives a short critical path. In exchange the pipeline gets deeper and
uses more registers.

The RTL has two levels:

* `dwt1d_lifting`: the one-dimensional transform. It takes one pair of
  samples per clock and returns one low-pass and one high-pass coefficient
  per clock.
* `dwt2d_top`: a two-dimensional, multi-octave transform of an image tile.
  It is built from that 1D core, a memory the size of the tile, and a memory
  controller.

## 1. The lifting data-path

The 9/7 filter pair is computed by four lifting steps on the even samples
`e[n] = x[2n]` and the odd samples `o[n] = x[2n+1]`, followed by a scaling
step:

```
d[n]   = o[n]  + ( ALPHA*(e[n]   + e[n+1]) >>> 8 )     ALPHA = -406   (-1.586)
s[n]   = e[n]  + ( BETA *(d[n-1] + d[n])   >>> 8 )     BETA  =  -14   (-0.0530)
d2[n]  = d[n]  + ( GAMMA*(s[n]   + s[n+1]) >>> 8 )     GAMMA =  226   ( 0.8829)
s2[n]  = s[n]  + ( DELTA*(d2[n-1]+ d2[n])  >>> 8 )     DELTA =  113   ( 0.4435)
low[n]  = (INV_K * s2[n]) >>> 8                        INV_K =  208   ( 1/K = 0.8129)
high[n] = (NEG_K * d2[n]) >>> 8                        NEG_K = -315   (-K  = -1.2302)
```

`>>>` is an arithmetic right shift, so results are rounded towards minus
infinity. The odd flow and the even flow update each other in turn, and each
step uses the two nearest samples of the other flow. In the data-path this
becomes two register chains. `r0`/`r1` capture a new pair, and `r2`/`r3` hold
the previous pair. Each step adds its two neighbours (`r0 + r2` for alpha),
multiplies the sum by the constant, and adds the result to the sample of its
own flow (`r3` for alpha). The low-pass output is scaled by 1/K and the
high-pass output by -K.

The constants are 10-bit two's-complement words with 8 fraction bits. For
delta and -K, the integer value commonly quoted (114 and -314) differs from
the binary word that the shift-add hardware is built from (`0001110001` = 113
and `1011000101` = -315). This design uses the binary words. All six constants
are parameters of `dwt1d_lifting`. Rounding the constants costs about 0.1 dB
of PSNR, compared with a floating-point lifting transform.

### Register widths

The defaults are the widths derived for 8-bit samples:

| value                | width |
|----------------------|-------|
| input samples        | 8     |
| after alpha (d)      | 11    |
| after beta (s)       | 9     |
| after gamma (d2)     | 9     |
| after delta (s2)     | 10    |
| low-pass output      | 10    |
| high-pass output     | 9     |

These widths cover the ranges seen on natural images, not the arithmetic
worst case. For example, d2 can exceed 9 bits on adversarial input. Every
register wraps modulo its width. The 2D transform does not use these narrow
widths: from the second pass on, its input is already a coefficient, so it
sets every width to its 16-bit memory word.

## 2. Shift-add multipliers, one addition per stage (`shift_add_mult`)

Every step above has the same form, `acc + (C*(a+b) >>> 8)`. The scalings
have no pre-add and no accumulator. `shift_add_mult` computes it as

```
( sum over set bits k of C :  ±(a+b) << k   +   acc << 8 ) >>> 8
```

Bit 9 of C is the sign bit and weighs -512. Its partial product is subtracted
by the first adder of the tree. The accumulator is one more term, placed at
bit 8 so that it lines up with the integer part of the product.

The terms are summed by a balanced binary tree with a register after every
level. The pre-add `a+b` is a stage of its own. The adder counts are:

| constant | set bits | terms | adders | stages |
|----------|----------|-------|--------|--------|
| alpha  `1001101010` | 5 | 5 + acc | 6 (incl. pre-add) | 4 |
| beta   `1111110010` | 7 | 7 + acc | 8 (7 shared) | 4 |
| gamma  `0011100010` | 4 | 4 + acc | 5 | 4 |
| delta  `0001110001` | 4 | 4 + acc | 5 | 4 |
| -K     `1011000101` | 5 | 5 | 4 | 3 |
| 1/K    `0011010000` | 3 | 3 | 2 | 2 (padded to 3) |

Beta has a run of four set bits (bits 4 to 7), so one adder result can be
re-used. `t = (x<<4) + (x<<5)` is computed once, and `t + (t<<2)` then covers
all four bits. The tree becomes:

```
level 1:  t  = x<<4 + x<<5      o0 = x<<1 - x<<9      o1 = x<<8 + (acc<<8)
level 2:  u  = t + (t<<2)       o  = o0 + o1
level 3:  u + o
```

That is 7 adders instead of 8, with the same four stages. `SHARE_BETA = 1`
(the default) selects this form, and `SHARE_BETA = 0` gives the plain tree.
Which adder result is shared is this design's own choice. The default
`dwt1d_lifting` therefore has 29 adders.

All adders are instances of `sa_adder`. With `STRUCTURAL = 0` (the default)
the adder is a behavioural `+`/`-`, so the tool can map it onto a fast carry
chain. With `STRUCTURAL = 1` it is a ripple chain of `full_adder` cells,
which keeps the netlist free of vendor macros. The two builds compute the
same function, and the tests run both.

### Variants

Two more parameters select how the multipliers are built. They exist so that
the same RTL covers the whole area/speed trade-off:

* **`PIPELINED = 0`** keeps the same adders but makes them combinational,
  with one register per step. Each step and each scaling then takes one
  cycle.
* **`GENERIC = 1`** replaces the shift-add tree with a plain integer
  multiplication, also with one register per step.

All variants give bit-identical results. They differ in timing and hardware:

| `PIPELINED` | `GENERIC` | `STRUCTURAL` | multipliers | 1D latency | ranks sample→coef |
|---|---|---|---|---|---|
| 1 | 0 | 0 | pipelined shift-add, behavioural adders (default) | 20 | 22 |
| 1 | 0 | 1 | pipelined shift-add, full adders | 20 | 22 |
| 0 | 0 | 0 | shift-add in one stage, behavioural adders | 6 | 8 |
| 0 | 0 | 1 | shift-add in one stage, full adders | 6 | 8 |
| 0 | 1 | – | integer multipliers | 6 | 8 |

The unpipelined forms have the 8-stage depth published for them.

## 3. Pipeline timing of the 1D core

The default constants give a 20-cycle latency: one input stage, four stages
for each of the four lifting steps, and three for the scaling. The pair with
index `j` presented in cycle `t` produces `out_low`/`out_high` with index
`j-2` in cycle `t+20`. The index lags by two because the later steps need
neighbours that arrive one and two pairs later.

Delay lines (`delay_line`) keep the same-flow operand of each step aligned
with the deeper multipliers. They stand in for the single registers
`r4, r7..r10, r13` of an unpipelined lifting data-path. Counted along the
data-flow, a sample passes through 22 register ranks before it reaches its
own coefficient. The published figure for this pipeline is 21 stages. This
design does not resolve the one-rank difference.

`in_tag` is delayed along with the data and can carry a valid bit and an
index. It is the only state that is reset.

## 4. The 2D transform: memory and memory control

```
              +-----------------+
              |  dwt_mem_ctrl   |---- addresses, write enables
              +-----------------+            |
                 | tag   ^ tag                v
              +-----------------+     +---------------+
              | dwt1d_lifting   |<--->|  dwt_memory   |<--- input samples
              +-----------------+     |  IMG_W*IMG_H  |---> coefficients
                                      +---------------+
```

`dwt_memory` is an array of `IMG_W*IMG_H` words (default 128 x 128 x 16 bits).
It has two synchronous read ports and two write ports, so the 1D core can
receive a sample pair and return a coefficient pair every cycle. The input
image is written through an extra port that takes priority over write port 0.

`dwt_mem_ctrl` works in four phases:

1. **Load.** It accepts `IMG_W*IMG_H` samples in raster order through
   `in_valid`/`in_ready`.
2. **Octaves.** For octave o = 0 … OCTAVES-1 it runs a row pass and then a
   column pass over the current low-low band.
3. **Drain.** At the end of each pass it waits 22 cycles for the pipeline to
   empty, because the next pass reads across the lines just written.
4. **Unload.** It streams the tile out on `out_valid`/`out_coef`, one
   coefficient per cycle. `done` pulses with the last coefficient.

**In-place layout.** The transform is kept in memory in the interleaved
order that lifting uses. A pass over a line writes low coefficient k over
sample 2k and high coefficient k over sample 2k+1. Octave o therefore works
on every 2^o-th row and column. Every write lands on a pair that has already
been read. So a line is transformed while it is being read, and lines follow
each other with no gap.

An earlier layout wrote the high half to the right half of the line. That
layout overwrote samples not yet read whenever a line was longer than about
twice the pipeline latency, which is why it was replaced.

At unload, the controller maps addresses so that the coefficients come out in
the usual sub-band layout. The final LL band is in the top-left corner. For
each octave, HL is at the top right, LH at the bottom left and HH at the
bottom right.

**Boundaries.** A line of N samples is fed as the N/2+4 pairs
`j = -2 … N/2+1` of its symmetrically extended version, where
`x[-i] = x[i]` and `x[N-1+i] = x[N-1-i]`. That is four mirrored samples at
each end, the reach of the 9-tap filter. The results for `j >= 2` are written
back. This gives exactly the classic lifting transform with symmetric
boundaries. The last octave needs lines of at least 6 samples, and an
elaboration-time assertion checks this.

**Cycle count** for a tile, after loading:

```
sum over octaves o:  H_o*(W_o/2 + 4) + 22  +  W_o*(H_o/2 + 4) + 22     (W_o = IMG_W>>o)
+ IMG_W*IMG_H                                                           (unload)
```

For the default 128 x 128 tile with 5 octaves this is 40,412 cycles, and
loading takes another 16,384 cycles.

## 5. Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `dwt2d_top` | `IMG_W`, `IMG_H` | 128 | tile size (multiple of 2^OCTAVES) |
| | `OCTAVES` | 5 | decomposition levels |
| | `PIX_W` / `MEM_W` | 8 / 16 | input sample and memory word width |
| | `STRUCTURAL` | 0 | 1: adders built from full adders |
| | `PIPELINED`, `GENERIC` | 1, 0 | 1D variant, see §2 |
| `dwt1d_lifting` | `W_*` | 8,11,9,9,10,10,9 | register widths, see above |
| | `ALPHA` … `INV_K` | see §1 | lifting constants ×256 |
| | `PIPELINED`, `GENERIC` | 1, 0 | multiplier variant, see §2 |
| | `SHARE_BETA` | 1 | beta with 7 adders (one result re-used) |
| | `TAG_W` | 1 | side-band width |

The tile size and the octave count are not taken from a published
configuration. 128 x 128 with five levels is the default of this design. The
16-bit memory word is enough for the worst-case growth of a random 8-bit tile
over five octaves, and the end-to-end test checks this.

## 6. Where this departs from, or adds to, the original description

* The constants for delta and -K follow the binary words (113 and -315), not
  the rounded integers (114 and -314).
* The sample-to-coefficient depth is 22 register ranks, not 21.
* The beta multiplier shares one adder result (7 adders). Which result is
  shared is this design's choice.
* The unpipelined variants are included as parameter settings (see §2), but
  the default is the pipelined shift-add build. Their power, area and
  frequency figures come from FPGA synthesis, which this RTL does not
  reproduce.
* These are this design's own choices:
  - the memory port structure;
  - the in-place interleaved layout and the unload reordering;
  - the tag side-band;
  - the drain at the end of each pass;
  - the load/unload handshakes;
  - the 16-bit word and the widened registers of the 1D core inside the 2D
    transform;
  - the tile size and octave count.
* No inverse transform is included.

## 7. Verification

Each module has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_full_adder` | all 8 input combinations |
| `tb_sa_adder` | add/subtract, behavioural and ripple builds, random and corner operands |
| `tb_shift_add_mult` | all six constants against `acc + floor(C*(a+b)/256)`, and beta in its shared form too; per-constant latency, partial-product counts |
| `tb_dwt1d_lifting` | all five variants against an integer model of the lifting equations with the same wrap-around; 20-cycle latency (pipelined) and 6-cycle latency (unpipelined); one output per clock; a flat input gives low ≈ input and high ≈ 0 |
| `tb_dwt_memory` | dual writes and reads, read latency, external-port priority |
| `tb_dwt_mem_ctrl` | controller with a stand-in transform whose output reaches 4 samples to each side; the mirrored boundaries, the in-place addressing, the unload order and the cycle count |
| `tb_dwt2d_top` | default 128 x 128, 5 octaves; a random tile and a smooth tile against an independent model of the separable transform (classic per-step symmetric boundaries); exact cycle count; no value beyond 16 bits; every pass, both boundary mirrors, input stalls and `done` seen |
| `tb_dwt2d_small` | 32 x 48 tile, 2 octaves, unpipelined full-adder build, same checks |

To run one with Verilator:

```
verilator --binary --timing --assert -Wno-fatal rtl/dwt_pkg.sv \
          rtl/full_adder.sv rtl/sa_adder.sv rtl/shift_add_mult.sv rtl/delay_line.sv \
          rtl/dwt1d_lifting.sv rtl/dwt_memory.sv rtl/dwt_mem_ctrl.sv rtl/dwt2d_top.sv \
          tb/tb_dwt2d_top.sv --top-module tb_dwt2d_top -Mdir obj && ./obj/Vtb_dwt2d_top
```

`dwt_pkg.sv` must come first, because the other files import it. Lint
warnings about unused parameters and function bits are expected. The full-size
test finishes in well under a second.

## 8. Files

* `rtl/dwt_pkg.sv`: constants and helper functions (partial-product count, tree depth, latency)
* `rtl/full_adder.sv`, `rtl/sa_adder.sv`: adder cell and adder/subtractor
* `rtl/shift_add_mult.sv`: pipelined shift-add constant multiplier / lifting step
* `rtl/delay_line.sv`: alignment delays
* `rtl/dwt1d_lifting.sv`: 1D lifting transform
* `rtl/dwt_memory.sv`, `rtl/dwt_mem_ctrl.sv`, `rtl/dwt2d_top.sv`: 2D transform
