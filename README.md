# Two's complement multipliers through an explicit sign-magnitude stage

Small signed multipliers in neural-network accelerators spend most of their
time multiplying values close to zero. In two's complement, a value that
crosses zero flips almost every bit (−1 is `1111`, +1 is `0001`), and those
flips ripple through the partial-product logic. In sign-magnitude the same
step flips one bit (`1001` → `0001`). A multiplier whose inputs and outputs
stay in two's complement can still use that property if it is split in two:

```
 two's complement ──► encoder (TC → SM) ──► SM multiplier ──► two's complement
```

Each operand passes through its own small encoder; the multiplier core works
on sign and magnitude and converts its product back to two's complement. The
encoder and the multiplier are separate modules, and they must stay separate
through synthesis: a tool that flattens them is free to remove the
sign-magnitude signals in between, and with them the reduced toggling. Kept
apart and each optimised on its own, the decomposed 4-bit multiplier was
measured at gate level to switch about 13 % less than a plain 4-bit
two's complement multiplier on normally distributed operands
(σ = 3), with exactly the same function. Giving up the value −8 saves more.

This repository holds synthesizable SystemVerilog for the encoders, the
sign-magnitude multipliers and a top level that puts the four evaluated
configurations side by side. The RTL describes the *function* of each block
in its simplest form. The gate-level circuits behind the published
transistor and switching figures came from a random-search logic optimiser.
Those netlists are not reproduced here. A synthesis flow that keeps the
module boundaries will produce its own circuits from this RTL.

## Number formats

All operands are `W` bits wide (`W = 4` by default); products are `2W` bits.
For `W = 3` the codes are:

| value                         | −4  | −3  | −2  | −1  | 0   | 1   | 2   | 3   | unused |
|-------------------------------|-----|-----|-----|-----|-----|-----|-----|-----|--------|
| TC, two's complement          | 100 | 101 | 110 | 111 | 000 | 001 | 010 | 011 | –      |
| TCS, symmetric two's compl.   | –   | 101 | 110 | 111 | 000 | 001 | 010 | 011 | 100    |
| SM, sign-magnitude            | –   | 111 | 110 | 101 | 000 | 001 | 010 | 011 | 100    |
| SME, sign-magnitude extended  | 100 | 111 | 110 | 101 | 000 | 001 | 010 | 011 | –      |

No format has a negative zero. Plain SM therefore has one code left over,
`1 0…0`, and loses the most negative value. SME gives that spare code the
value −2^(W−1), so it covers the full two's complement range.

## Encoders

`enc_tc2sme` turns a TC operand into SME. The sign bit passes straight
through; the magnitude is the low `W−1` bits of `−x` for negative `x` (invert
the low bits and add one). For the most negative input the negation wraps and
leaves the magnitude all zero, which is exactly the SME code for that value.
No special case is needed.

The same circuit is the TCS → SM encoder. On the symmetric range the SME and
SM codes coincide. The one illegal TCS input `1 0…0` comes out as the illegal
SM code `1 0…0`. The multiplier that follows reads that code as zero.

`enc_tc2sm_clip` is the TC → SM encoder for inputs that may hold −2^(W−1)
but feed a plain SM multiplier. It clips that value to −(2^(W−1)−1): −8
becomes −7 for `W = 4`. In the circuit, the magnitude bits are forced to one
whenever the sign is set and the magnitude came out zero. Its output never
carries the illegal code.

## Multipliers

`mul_sm2tc` is the sign-magnitude core. It has three parts:

1. a `(W−1) × (W−1)` unsigned multiplier on the magnitudes (3 × 3 bits for
   `W = 4`, against 4 × 4 for a two's complement multiplier);
2. an XOR of the two sign bits;
3. a conversion that, for a negative result, inverts all `2W` bits and adds
   one.

A zero magnitude stays zero through the conversion, so a "−0" product
cannot appear.

`mul_sme2tc` adds the one value plain SM cannot hold, and this is the least
obvious part of the design. The SME code `1 0…0` stands for −2^(W−1), whose
magnitude 2^(W−1) needs `W` bits. Widening the core to `W × W` bits would work
but cost more. Instead the module checks each operand for that code. A
detected operand's magnitude is replaced by 2^(W−2) (half of the true value),
and the core's product is shifted left one place for each replaced operand:

| operands (W = 4) | core computes | shift | magnitude | result |
|------------------|---------------|-------|-----------|--------|
| −8 × 3           | 4 × 3 = 12    | 1     | 24        | −24    |
| −8 × −8          | 4 × 4 = 16    | 2     | 64        | +64    |
| 5 × −6           | 5 × 6 = 30    | 0     | 30        | −30    |

The shift count is 0, 1 or 2, so the shift amount needs two bits. With two
−8 operands the product is +64, which still fits in the 8-bit two's
complement output. The module matches a `W`-bit signed multiplier for every
input pair.

`mul_sm2sm` is the core without the final conversion. It outputs a `2W`-bit
sign-magnitude product: bit `2W−1` is the sign, the rest the magnitude. The
sign is forced to 0 when the magnitude is zero.

## Configurations and the top level

`smm_top` contains the four configurations, each an independent circuit with
its own encoders:

| output | encoders (one per operand)   | multiplier   | input range | output | equals `a*b`? |
|--------|------------------------------|--------------|-------------|--------|---------------|
| `p_b`  | `enc_tc2sme` (TC → SME)      | `mul_sme2tc` | −8 … 7      | TC     | yes, always |
| `p_c`  | `enc_tc2sm_clip` (TC → SM)   | `mul_sm2tc`  | −8 … 7      | TC     | except when an operand is −8 (treated as −7) |
| `p_d`  | `enc_tc2sme` (TCS → SM)      | `mul_sm2tc`  | −7 … 7      | TC     | yes on its range; −8 reads as 0 |
| `p_e`  | none                         | `mul_sm2sm`  | −7 … 7      | SM     | yes, in SM |

B, C and D share the TC operand inputs `a_tc`, `b_tc`. E takes operands that
are already stored in sign-magnitude, on `a_sm`, `b_sm`. In a real design you
keep the one output you need and synthesis removes the rest. Configuration B
is the drop-in replacement for a signed multiplier. D suits networks whose
weights are quantised to −7 … 7 and whose activations are clipped at −7.

| parameter  | default | meaning |
|------------|---------|---------|
| `W`        | 4       | operand width; every block takes it, and products are `2W` bits |
| `ENC_PIPE` | 0       | 1 adds a register on the encoder outputs |

**Timing.** With `ENC_PIPE = 0` the top level is purely combinational and
`clk`/`rst_n` are unused (lint reports them; they are kept so both builds
have the same ports). With `ENC_PIPE = 1` the encoded operands of B, C and D
are registered, and so are E's inputs, so all four products appear exactly
one clock after their operands. The register resets asynchronously
(`rst_n` low) to zero, so all products read 0 in reset.

A register at this point costs only `2W` bits per configuration, because the
encoder outputs are the narrowest cut through the multiplier. The evaluated
circuits had no such register. It is offered because splitting off the
encoders makes the logic deeper: in the measured circuits, encoder plus
multiplier was 14–17 gate levels against 12 for the plain multiplier.

## Expected gate-level effect

These are the reference figures from the gate-level evaluation of the
optimised netlists. Switching activity weights each wire toggle by the
transistor count of the cells the wire drives, averaged over 10,000 random
operand pairs (arbitrary units). The totals count two encoders and one
multiplier.

| configuration          | transistors | depth | switching σ=2 | σ=3 | σ=4 |
|------------------------|-------------|-------|---------------|-----|-----|
| plain TC multiplier    | 420         | 12    | 323           | 336 | 341 |
| B                      | 462         | 17    | 244           | 293 | 327 |
| C                      | 374         | 15    | 204           | 247 | 274 |
| D                      | 338         | 14    | 187           | 224 | 250 |
| E                      | 204         | 7     | 79            | 106 | 128 |

This RTL has not been taken through that measurement. The workload
testbench reports only a bus-level proxy, the toggles on the operand buses
before and after the SME encoders. On the same streams it counts about 19 %
fewer toggles after the encoders at σ = 2 and about 7 % fewer at σ = 3.

## Verification

Each block has a self-checking testbench in `tb/` that ends with a
`TB_RESULT checks=… failures=…` line. The expected values come from
`tb/smm_ref_pkg.sv`, which decodes every format with integer arithmetic
rather than reusing the circuits. Two immediate assertions in the RTL
guard the no-negative-zero rule during simulation: one on the output of
`enc_tc2sm_clip`, one on the output of `mul_sm2sm`.

| testbench            | what it covers |
|----------------------|----------------|
| `tb_enc_tc2sme`      | all inputs at W = 4 and W = 8, read back as SME and, on the symmetric range, as SM |
| `tb_enc_tc2sm_clip`  | all inputs at W = 4 and W = 8, including the clip |
| `tb_mul_sm2tc`, `tb_mul_sme2tc`, `tb_mul_sm2sm` | every legal operand pair at W = 4 and W = 8 |
| `tb_smm_top`         | every operand pair on both input sets. It runs the combinational top and an `ENC_PIPE = 1` top side by side, checking one-cycle latency and reset, and sweeps a `W = 8` top over all 65,536 operand pairs. It counts that each mechanism occurred: one and two most-negative operands in B, clipping in C, negative-product conversion, zero-sign gating in E, pipelined results, reset |
| `tb_smm_workload`    | the default top. It applies every pair once, then 10,000 normally distributed pairs each at σ = 2, 3 and 4, rounded and clipped to the format's range, one pair per cycle. It also compares operand-bus toggles in TC and SME |

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/smm_pkg.sv tb/smm_ref_pkg.sv tb/tb_smm_top.sv --top-module tb_smm_top
./obj_dir/Vtb_smm_top
```

Replace `tb_smm_top` with any testbench name. Every run finishes in well
under a second.

## Departures and own choices

- The top level bundling B–E, the register option's reset, and the port
  names belong to this design. The original work evaluated each
  configuration as a separate circuit.
- The insides of the encoders and of `mul_sm2sm` are the simplest circuits
  with the required function. For `mul_sm2tc` and `mul_sme2tc` the structure
  (3 × 3 core, XOR sign, invert-and-add-one, replace-and-shift) follows the
  described design. The two-place shift for −8 × −8 follows from that
  scheme; the source does not spell it out.
- Illegal codes are not flagged. In D and E an operand code `1 0…0` is read
  as zero.
- The plain two's complement multiplier, which was only the reference for
  comparison, is not included. The testbenches compute reference products
  with integer arithmetic.
- The switching-activity model and the optimisation flow that produced the
  measured netlists are tools, not hardware, and have no RTL here.
