# Sparse-DNN custom instructions for a RISC-V core

Pruned neural networks are full of zero weights, but a plain CPU multiplies
them anyway. This RTL is a small custom functional unit (CFU) that sits next
to a RISC-V core and lets the inner loop of a convolution skip zero weights in
two ways:

* **Lookahead skipping of zero blocks (semi-structured sparsity).** Weights
  are processed in blocks of four INT8 values. Before deployment, every block
  is told, inside its own bits, how many all-zero blocks follow it. One
  instruction reads that count and advances the loop index past those blocks,
  so they are never loaded or multiplied.
* **A variable-cycle MAC (unstructured sparsity).** The multiply-accumulate of
  a block uses one multiplier and spends one cycle per *non-zero* weight
  (one cycle if all four are zero), instead of always four.

The default build, the *combined* unit, does both. The semi-structured-only
and unstructured-only units are also provided, selected by a parameter.

The design follows the FPT 2024 paper "Hardware/Software Co-Design of RISC-V
Extensions for Accelerating Sparse DNNs on FPGAs" (Sabih et al.). The
datapaths of the lookahead increment and of the variable-cycle MAC follow the
paper's block diagrams. The handshake, the exact control logic of the
variable-cycle MAC and the instruction encoding are this implementation's own
choices, described below.

## Lookahead weight encoding

The trick is to find room for the skip count without extra memory. The
weights are limited to [-64, 63], so bit 6 of each byte is always a copy of
the sign bit and carries nothing. The encoder drops it and uses the freed
least significant bit:

```
original weight   s s b5 b4 b3 b2 b1 b0      (bit 6 == bit 7 == sign)
stored byte       s b5 b4 b3 b2 b1 b0 k      (k = one bit of the skip count)
```

Bits [7:1] of the stored byte are the weight as an exact 7-bit
two's-complement number, so the hardware never has to undo the shift. A block
of four weights in one 32-bit register holds weight *j* in byte *j*. Its four
spare bits, at positions 24, 16, 8 and 0, form a 4-bit count: bit *j* of the
count is bit 0 of byte *j*. The count is the number of all-zero blocks that
directly follow this block in the input-channel direction, capped at 15.

Example: the weights 4, 7, 3, 1 (bytes 3..0) followed by two zero blocks have
the count 2 = 0b0010. Only byte 1 (weight 3) gets a 1, and the register reads
`0x080E0702`.

The encoding is done offline, once, since the weights are constant. The
reference encoder in `tb/tb_ref_pkg.sv` (`encode_last_bits`) is what the
testbenches use.

## Instructions and the software loop

The core passes a custom-0 R-type instruction to the CFU with a 10-bit
function id `{funct7, funct3}` and the values of `rs1` and `rs2`. Only
`funct7[0]` is decoded (bit 3 of the function id):

| unit     | funct7[0] | instruction       | rd                                                      | cycles     |
|----------|-----------|-------------------|---------------------------------------------------------|------------|
| combined | 0         | `csa_vcmac`       | Σ w_k·x_k, w_k = 7-bit weights of rs1, x_k = bytes of rs2 | max(n, 1)  |
| combined | 1         | `csa_inc_indvar`  | rs2 + 4·(count(rs1) + 1)                                | 1          |
| semi     | 0         | `sssa_mac`        | Σ w_k·x_k, four multipliers in parallel                 | 1          |
| semi     | 1         | `sssa_inc_indvar` | rs2 + 4·(count(rs1) + 1)                                | 1          |
| unstr.   | any       | `usss_vcmac`      | Σ w_k·x_k, w_k = INT8 bytes of rs1                      | max(n, 1)  |

Here *n* is the number of non-zero weights in the block. Inputs x_k are signed
bytes. The result is the sum of this block's four products; the program keeps
the running sum. The inner loop of a convolution becomes:

```c
int i = 0;
while (i < in_channels) {
    acc += csa_vcmac(filter[i], input[i]);   // only the non-zero weights cost cycles
    i    = csa_inc_indvar(filter[i], i);     // jumps over the zero blocks that follow
}
```

The loop starts at block 0 whether or not that block is zero. A zero first
block is therefore still issued, and this is where the one-cycle cost of an
all-zero block can occur in the combined unit. A zero run longer than 15
blocks costs one extra visit per 15 blocks.

## Variable-cycle MAC

This is the part with the most going on (`vcmac.sv`). In one cycle, when the
command is accepted:

1. **Zero test** (`case_ctrl`). The four weights are compared with zero,
   giving the case signal `c[3:0]` (1 = zero). In the combined unit the test
   looks at bits [7:1] of each byte, so a set lookahead bit cannot make a
   zero weight look non-zero.
2. **Packing** (`case_ctrl` + two `align_mux`). The control logic produces
   four 2-bit selects `cl[0..3]`. Select `cl[j]` names the lane of the
   *j*-th non-zero weight, in ascending lane order. The same selects steer one
   set of four 4:1 multiplexers for the weights and one for the inputs, so
   every weight stays paired with its input. For `[w3, 0, w1, 0]` the packed
   weights are `[0, 0, w3, w1]`. Positions after the last non-zero weight
   select a zero-weight lane, so their weight reads 0.
3. **First product** (`seq_mac`). The single multiplier multiplies packed
   lane 0 straight from the multiplexers.

If n ≤ 1 the result is ready in that same cycle. Otherwise the packed lanes
are registered and lanes 1..n-1 go through the same multiplier, one per
cycle. The result leaves the MAC in the cycle of the last product.

`cfu_port` registers the result, so the response appears one cycle later:

```
cycle        t (accept)   t+1      ...   t+n-1          t+n
multiplier   lane 0       lane 1         lane n-1
rsp_valid                                               1   (n >= 1)
             n = 0 or 1:  rsp_valid at t+1
```

A dense sequential MAC with one multiplier would always need four cycles. With
independent zeros at rate x, the mean cost per block is

  c_o = Σ_{k=0..3} C(4,k) x^k (1−x)^(4−k) (4−k) + x^4,

and the speedup is 4 / c_o. At x = 0.5 that is 1.94, at 0.8 it is 3.31, and
at 0.9 it is 3.79. The `+ x^4` term is the single cycle spent on an all-zero
block.

## CPU–CFU handshake

`cfu_port` implements both channels as valid/ready pairs:

* command: `cmd_valid`, `cmd_ready`, `cmd_function_id[9:0]`, `cmd_rs1`,
  `cmd_rs2`;
* response: `rsp_valid`, `rsp_ready`, `rsp_rd`.

A command is taken when `cmd_valid && cmd_ready`. `cmd_ready` is low while a
variable-cycle MAC is running, and while a response waits for the core.
`rsp_rd` stays stable until `rsp_ready` takes it. A new command may be
accepted in the same cycle that the previous response is taken, so one-cycle
instructions run at one per clock. Reset (`rst_n`) is synchronous and active
low. Two assertions in `cfu_port` check the handshake rules, and two in
`seq_mac` check the MAC's.

## Module hierarchy

```
sparse_cfu            top; VARIANT = VAR_CSA (default) | VAR_SSSA | VAR_USSA
├─ csa_cfu            combined unit
│  ├─ vcmac (ENCODED=1)
│  │  ├─ case_ctrl    zero comparators + select logic
│  │  ├─ align_mux ×2 weight and input packing
│  │  └─ seq_mac      one multiplier, n cycles
│  ├─ lookahead_inc   count gather, +1, ×4, 32-bit add
│  └─ cfu_port        valid/ready, result register
├─ sssa_cfu           semi-structured unit: simd_mac4 + lookahead_inc + cfu_port
└─ ussa_cfu           unstructured unit: vcmac (ENCODED=0) + cfu_port
cfu_pkg               widths, function-id decode, encoded-weight helpers
```

Widths follow the paper's figures: 7-bit weights and 8-bit inputs, 15-bit
products in the four-lane MAC, a 7-bit increment added to a 32-bit index, and
32-bit operands and result. At its default the top synthesises to one
multiplier, about 190 word-level cells and 137 flip-flop bits.

## Verification

Each module has a self-checking testbench in `tb/`, named `tb_<module>.sv`.
The reference values come from `tb/tb_ref_pkg.sv`: the encoder written step by
step from the encoding algorithm, and plain dot products of the *original*
weights. The testbenches check values and cycle counts:

* `tb_case_ctrl` covers all 16 zero patterns; `tb_seq_mac`, `tb_vcmac` and
  `tb_ussa_cfu` check that the latency is max(n, 1).
* `tb_cfu_port` checks back-pressure and back-to-back issue.
* `tb_sssa_cfu` also runs whole rows with the lookahead loop.
* `tb_sparse_cfu` runs the top end to end at its default parameters. It plays
  the core executing a pointwise convolution (2×2 outputs, 6 filters,
  128 input channels) with both kinds of sparsity, and checks every output.
  It counts each mechanism and requires each one to occur: zero-block skips,
  skips capped at 15 blocks, partly zero blocks, full blocks, one-cycle
  all-zero blocks and held responses.
* `tb_speedup_workloads` repeats the evaluation's sweeps:
  * the unstructured unit at x = 0 to 0.9, where the measured cycles per block
    are within 5 % of c_o (for example, 3.34× measured against 3.31× at
    x = 0.8);
  * the semi-structured unit at 25, 50 and 75 % zero blocks, where the visited
    blocks equal the non-zero blocks;
  * the combined unit at (x_ss, x_us) = (25,25), (25,50) and (50,25) %.

To run one with Verilator, list the package first:

```sh
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/cfu_pkg.sv tb/tb_ref_pkg.sv tb/tb_sparse_cfu.sv --top-module tb_sparse_cfu -Mdir obj
./obj/Vtb_sparse_cfu
```

Every testbench ends with a line `TB_RESULT checks=N failures=M`.

## Where this departs from, or goes beyond, the paper

* **Skip limit.** The paper's encoding pseudo-code stops counting at
  `skip_blocks < 4`. Its text says the count ranges from 0 to 15. The 4-bit
  field and the hardware support 15, and the testbench encoder uses 15. The
  hardware is the same either way.
* **No accumulator register.** Each MAC instruction returns the sum of one
  block's four products, and the software adds the results up. The paper's
  datapath figure shows no accumulator register.
* **Packed inputs at unused positions.** In the paper's example the packed
  inputs after the last non-zero weight are zero. Here they hold the input of
  a zero-weight lane, because the selects are only 2 bits wide. The MAC never
  reads those positions.
* **Handshake and instruction encoding are this design's own.** This covers
  the valid/ready protocol, the registered one-cycle response, the polarity of
  `funct7[0]` (1 = increment) and ignoring the other funct bits.
* **Timing is measured at the CFU only.** The speedups quoted above count MAC
  cycles or MAC instructions. The paper's measured speedups (up to about 5×
  for the combined unit on whole networks) also include the core's loop and
  load overhead, which this RTL does not model.
* **FPGA resource figures are not reproduced.** The paper reports +1 DSP for
  each single unit and +2 DSPs for the combined one on an Artix-7. This
  combined unit has one multiplier, the one in the sequential MAC. The paper
  does not say what the second DSP of its combined unit is used for.
* **Not included.** The RISC-V core, its register file and decoder, the SoC
  and the software encoder are not part of the RTL.
