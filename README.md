# MiniFloat-NN SDOTP unit: a fused expanding dot-product FPU group

Training a neural network in 8- and 16-bit floating point is fast and cheap.
The trouble is the accumulation. A dot product of FP8 numbers, summed in FP8,
loses almost all of its precision after a few terms. This design avoids that
by computing, in one fused step with a single rounding,

    ExSdotp:  r(2w) = a(w)*b(w) + c(w)*d(w) + e(2w)

Two narrow products are added to an accumulator of twice their width: FP8 into
FP16, or FP16 into FP32. The same datapath also computes two three-term
additions:

    ExVsum:   r(2w) = a(w)  + c(w)  + e(2w)    (b and d set to 1.0)
    Vsum:     r(2w) = a(2w) + c(2w) + e(2w)    (multipliers bypassed)

Vsum is used to reduce the partial sums that a SIMD ExSdotp leaves side by side
in one register.

The RTL contains these parts:

- the ExSdotp unit (`exsdotp`);
- a SIMD operation group that runs four of these units on 64-bit registers
  (`sdotp_simd`);
- the decoder that turns an instruction's width and two control-register bits
  into formats (`mfnn_fmt_decode`);
- an FPU top that puts the SDOTP group beside the usual FPU operation groups,
  behind one 64-bit port with round-robin output arbitration (`mfnn_fpu`).

## Formats

| name    | exponent | mantissa | note                                   |
|---------|----------|----------|----------------------------------------|
| FP32    | 8        | 23       | IEEE binary32                          |
| FP16    | 5        | 10       | IEEE binary16                          |
| FP16alt | 8        | 7        | bfloat16 widths, full IEEE behaviour   |
| FP8     | 5        | 2        |                                        |
| FP8alt  | 4        | 3        |                                        |

All five formats have subnormals, infinities, NaNs and the five RISC-V
rounding modes (RNE, RTZ, RDN, RUP, RMM). The supported source-to-destination
pairs are:

| operation      | sources            | destination          |
|----------------|--------------------|----------------------|
| ExSdotp/ExVsum | FP16, FP16alt      | FP32                 |
| ExSdotp/ExVsum | FP8, FP8alt        | FP16, FP16alt        |
| Vsum           | FP32               | FP32                 |
| Vsum           | FP16, FP16alt      | FP16, FP16alt        |
| Vsum           | FP8, FP8alt        | FP8, FP8alt          |

An instruction names only a width. Two bits of the FP control register pick
the format of that width: `src_is_alt` for the sources and `dst_is_alt` for the
destination. Switching a kernel from FP16 to FP16alt therefore costs one
register write. `mfnn_fmt_decode` implements this mapping. It raises
`illegal_o` for an expanding operation with an 8-bit destination and for
unused codes.

## The ExSdotp datapath (`exsdotp.sv`)

The unit is parameterised by its source width `SRC_WIDTH` (w). The value is 16
for the 16-to-32 unit and 8 for the 8-to-16 unit. From the widest formats it
must support, it derives two precisions, counting the hidden bit:

- `P_SRC`, the source precision: 11 for the 16-to-32 unit, 4 for the 8-to-16 unit.
- `P_DST`, the destination precision: 24 for the 16-to-32 unit, 11 for the 8-to-16 unit.

A narrower format uses the top bits of the mantissa field and the low bits of
the exponent. In this RTL, every operand is unpacked into a sign, an unbounded
integer exponent and a mantissa aligned to the top of the field.

The hard part is adding three terms with one rounding and without a
full-width adder. The sum can cancel: a*b and c*d can be almost equal and
opposite, leaving only the low bits, or the accumulator itself. The unit
therefore adds in two steps of growing width:

1. **Products.** Two `P_SRC x P_SRC` multipliers give a*b and c*d exactly, in
   2*P_SRC bits, padded to P_DST bits. For Vsum, a multiplexer (`is_vsum`)
   passes the full-width operands a and c instead of the products.
2. **Sort.** The three addends are ordered into max, int and min. `max` has the
   largest exponent. `int` and `min` are ordered by their normalized
   magnitude. A product with a subnormal factor can have a large exponent and
   still be small, and the directed rounding modes need the true order.
3. **First sum.** max and int are placed in a field of 2*P_DST+3 bits. int is
   shifted right by the exponent difference. Their signed sum is 2*P_DST+4
   bits wide.
4. **Second sum.** The first sum is padded with P_SRC more zero bits. The
   padding guards against cancellation when max is itself the product of a
   normal and a subnormal number. min, in a field of 2*P_DST+P_SRC+4 bits, is
   shifted and added. The final sum is 2*P_DST+P_SRC+5 bits wide.
5. **Exact-zero path.** If the first sum is exactly zero (max and int cancel),
   the second sum is replaced by the unshifted min. None of min's bits are
   then lost to the shift.
6. **Normalize and round** once, to the destination format. This step handles
   subnormal results, overflow to infinity or to the largest finite number
   (depending on the rounding mode), and the IEEE flags NV, OF, UF and NX.

Bits shifted out of int and min are ORed into the lowest bit of their field as
a sticky bit. If int and min cancel exactly while both are in the sticky range,
that case is detected and the result is max alone, exact.

**Accuracy limit.** At these stage widths, a sum whose exact value lies
extremely close to a rounding boundary can differ from exact rounding. The
result can be one unit in the last place off, or carry a wrong NX flag. In
random tests whose operands are chosen to cancel, this happens about once in
10^4 to 10^5 operations. The testbenches allow it at a bounded rate and
report how often they saw it. Wider internal fields would remove it, at the
cost of not matching the widths this datapath is built around.

Special values follow IEEE-754:

- A NaN input gives the canonical quiet NaN.
- inf*0, inf-inf and signalling NaNs also give the canonical quiet NaN, with NV
  set.
- An exact zero result is +0, or -0 in round-down mode, unless all three terms
  are zeros of the same sign.
- Underflow is flagged when the result is tiny before rounding and inexact.

**Pipeline and interface.** After the combinational datapath there are
`NUM_PIPE_REGS` (default 3) register stages with a valid/ready handshake. The
unit takes one operation per cycle and returns its result NUM_PIPE_REGS cycles
later, together with a tag that travels through the pipeline. A result that is
not taken stalls the stages behind it. Operands are right-aligned: the w-bit
sources sit in `a[w-1:0]` and `c[w-1:0]`, and the upper halves of a and c are
used only by Vsum.

## SIMD operation group (`sdotp_simd.sv`)

The FP register file has 64-bit entries. A register holds two FP32, four
16-bit or eight 8-bit values. The group has four ExSdotp units:

- lanes 0 and 1 are 16-to-32 units;
- lanes 2 and 3 are 8-to-16 units.

So one operation computes two FP16-to-FP32 or four FP8-to-FP16 dot products.
rd is both the accumulator and the destination. For lane i, with element k of
register x written x.e[k]:

| operation | lanes used            | a        | c          | b, d                 | e       |
|-----------|-----------------------|----------|------------|----------------------|---------|
| ExSdotp   | 64/dw (2 or 4)        | rs1.e[2i] | rs1.e[2i+1] | rs2.e[2i], rs2.e[2i+1] | rd.e[i] |
| ExVsum    | 64/dw                 | rs1.e[2i] | rs1.e[2i+1] | 1.0                  | rd.e[i] |
| Vsum      | 32/dw (1, 2 or 4)     | rs1.e[2i] | rs1.e[2i+1] | -                    | rd.e[i] |

Lane i's result replaces rd.e[i]. Any bits of rd not written by a lane keep
their value; after a Vsum, that is the upper half. The status flags are the
OR of the used lanes' flags. All four units share one handshake and have the
same depth, so they stay in step. A small side pipeline of the same depth
carries rd and the format to the packing logic.

A typical FP8 GEMM inner loop uses this as follows. A sequence of ExSdotp
operations accumulates four FP16 partial sums in one register. A Vsum at the
end folds neighbouring partial sums together.

## FPU top (`mfnn_fpu.sv`)

The FPU takes up to three 64-bit operands per cycle and gives out one 64-bit
result per cycle. It is made of four operation groups:

- ADDMUL (fused multiply-add), pipeline depth 3
- COMP (comparisons), depth 1
- CAST (conversions), depth 2
- SDOTP (this design), depth 3

Those are the depths of the reference configuration. ADDMUL, COMP and CAST are
standard FPU groups and are not part of this RTL. Each connects through its own
`ext_*` valid/ready ports: index 0 is ADDMUL, 1 is COMP and 2 is CAST.
The operand, operation, rounding-mode and tag outputs to these groups are
plain wires from the instruction inputs. A synthesis report therefore counts
them as outputs driven straight from inputs.

The front end sends an instruction to the group `opgrp_i` names. The FPU is
ready exactly when that group is ready. Because the groups have different
depths, several can finish in the same cycle. `mfnn_rr_arbiter` grants one
of them per cycle. Its search starts after the group it last served. The
pointer moves only when the output is actually taken, so a group that keeps
asking waits at most three results. A group whose result is waiting stalls
its own pipeline. Results of one group leave in order. `opgrp_o` and `tag_o`
tell the core where each result belongs.

## Where this RTL departs from or goes beyond the source description

- The sticky-bit handling is not specified. Jamming into the LSB, with the
  widths above, gives the rare 1-ulp deviation described earlier.
- Choosing max by exponent and ordering int and min by magnitude is this
  design's own choice. So is detecting an exact int/min cancellation.
- Tininess before rounding, the canonical NaN and the zero-sign rules are this
  design's choices, following IEEE-754 practice.
- The valid/ready handshakes, the 5-bit tag, the lane order, the Vsum register
  layout and rd-preserving packing are this design's own.
- The port list of the top and the `illegal_o` output are also its own.
- The instruction encodings and the bit positions of `src_is_alt` and
  `dst_is_alt` in the control register are not defined. They are plain inputs
  here.
- The integer core, the cluster memory, the interconnect and the caches around
  this FPU are not part of this RTL. Neither are the ADDMUL, COMP and CAST
  groups.

## Verification

Each block has a self-checking testbench in `tb/`. The arithmetic is checked
against `fp_ref_pkg`, a reference that works in a different way. It converts
every operand and product to a 720-bit fixed-point number, adds the three
terms exactly, and rounds once.

| testbench            | what it does |
|----------------------|--------------|
| `tb_exsdotp`         | 16-to-32 and 8-to-16 units; all operations, formats and rounding modes; ~90k vectors biased towards cancellation, subnormals, overflow, infinities and NaNs; exact half-ulp ties checked with no tolerance; 3-cycle latency; random stalls |
| `tb_sdotp_simd`      | 6000 packed operations against a lane-by-lane reference; latency, tag, stalls |
| `tb_mfnn_fmt_decode` | every input combination against the format table |
| `tb_mfnn_rr_arbiter` | 20000 cycles against a model of the pointer; one-hot grant, fairness bound |
| `tb_mfnn_fpu`        | full-size end-to-end test; details below |

`tb_mfnn_fpu` runs 9500 instructions over all four groups. The three outside
groups are behavioural pipelines with random latency and random ready. The
SDOTP results are compared bit-exactly. The test counts input back-pressure,
output stalls, arbitration conflicts, CSR alt-bit switches, each SDOTP
operation, overflow, exact product cancellation, NaN results and illegal
decodes. It fails if any of these counts is zero.

To run one, for example the top:

    verilator --binary --timing --assert -Irtl -Itb \
      rtl/mfnn_pkg.sv tb/fp_ref_pkg.sv rtl/exsdotp.sv rtl/sdotp_simd.sv \
      rtl/mfnn_fmt_decode.sv rtl/mfnn_rr_arbiter.sv rtl/mfnn_fpu.sv \
      tb/tb_mfnn_fpu.sv --top-module tb_mfnn_fpu
    ./obj_dir/Vtb_mfnn_fpu

Each testbench ends with a line `TB_RESULT checks=N failures=M`. Every
testbench finishes in well under a minute.

## Size and synthesis

In a generic yosys coarse synthesis, one 16-to-32 ExSdotp unit with its
three pipeline stages is about 900 word-level cells and 126 flip-flops. The
whole SDOTP group is about 3300 cells and 580 flip-flops. Synthesizing the
group or the FPU top takes several minutes in yosys. Most of that time goes
into the four mantissa datapaths.

## Throughput

At one SDOTP instruction per cycle, the group delivers the following peak
rates, counting one ExSdotp as 4 FLOP:

- FP16-to-FP32: 2 x 4 = 8 FLOP/cycle
- FP8-to-FP16: 4 x 4 = 16 FLOP/cycle

That is twice what an expanding SIMD FMA reaches with the same register
width.
