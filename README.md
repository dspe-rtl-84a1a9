# DSPE — DeepSeek Processing Element in SystemVerilog

Inference of a mixture-of-experts language model on an edge device spends most of its energy
on multiplications and memory traffic that repeat work already done: neighbouring tokens produce
near-identical query/key vectors, a fixed weight meets slowly changing activations, and many
operands carry low-order bits that do not change the result. DSPE (DeepSeek Processing Element)
is an accelerator that removes these three kinds of redundancy in hardware. This document describes
a synthesizable SystemVerilog implementation of the architecture published as "DSPE: An
Energy-Efficient Edge Processor for DeepSeek Inference with MerkleTree-based Incremental Pruning,
Multi-Stage Boothing Lookup and Dynamic Adaptive Posit Processing". Its three mechanisms are:

* **MIPS** (MerkleTree-based Incremental Pruning Scheme) hashes query/key vectors into a small
  Merkle tree. It compares the tree level by level with the last fully computed vector of the
  same expert. It then decides whether the vector can reuse an earlier result (Early-Skip or
  Diff-Reuse) or must be computed in full.
* **MBLM** (Multi-Stage Boothing Lookup Method) multiplies 8 activations by one shared weight.
  It drops near-zero pairs and picks radix-4 or radix-8 Booth encoding with a small Bayesian
  classifier. It reorders the operands so that adjacent ones differ in few Booth bits, and it
  reuses a product when an operand repeats the previous one.
* **DAPPM** (Dynamic Adaptive Posit Processing Mechanism) multiplies 8-bit DA-Posit numbers
  (posit n=8, es=2). Each number carries a compression mode, and the mode decides how many of
  the 16 one-bit array-multiplier PEs are active (16, 9 or 4).

The top level `dspe_top` holds 4 Attention Cores. Each core has an iRouter, a MIPS unit, an
MBLM unit, 64 DAPPM lanes and an oRouter. The top also holds the Top Controller and the
on-chip memories.

## Files

| File | Contents |
|---|---|
| `rtl/dspe_pkg.sv` | Widths, enums, the configuration, request and command structs, default thresholds |
| `rtl/sram_sp.sv` | Single-port synchronous SRAM (all buffers and the Cos-SRAM) |
| `rtl/da_posit_decoder.sv`, `mode_path.sv`, `pp_accumulation.sv`, `scale_path.sv`, `da_posit_encoder.sv`, `dappm_mult.sv` | DAPPM lane |
| `rtl/invalid_detector.sv`, `booth_bn.sv`, `bvm_reorder.sv`, `booth_multiplier.sv`, `mblm_unit.sv` | MBLM |
| `rtl/lite_mac.sv`, `merkle_tree_pe.sv`, `history_lut.sv`, `mips_unit.sv` | MIPS |
| `rtl/irouter.sv`, `orouter.sv`, `attention_core.sv` | Attention Core |
| `rtl/top_controller.sv`, `dspe_top.sv` | Top Controller and processor top |
| `tb/tb_<module>.sv` | One self-checking testbench per module |
| `tb/tb_posit_pkg.sv`, `tb_mblm_ref_pkg.sv`, `tb_core_stub.sv` | Reference models and a core stub for the controller test |

## Memory map and sizes

All memories use 512-bit words, so one word holds one 64-element INT8 vector or 64 POSIT8 values.

| Memory | Words | Capacity | Source |
|---|---|---|---|
| Query SRAM, Key SRAM | 768 each | 2 × 48 KB | paper |
| Value SRAM | 768 | 48 KB | paper |
| Param Buffer | 384 | 24 KB | paper |
| Weight Buffer | 768 | 48 KB | paper |
| Input Buffer, Output Buffer | 256 each | 16 KB each | assumed (the paper gives no size) |
| Cos-SRAM (per core) | 256 × 16 bit | 512 B | assumed |

The host reaches every buffer through `host_sel`, `host_addr`, `host_wdata` and `host_rdata`,
but only while the controller is idle (`cmd_ready` high). Read data arrives one cycle after the
read.

## Top Controller commands

A command (`dspe_cmd_t`) carries an opcode, a core mask and up to three word addresses. The
controller first issues a request to every selected core, so the cores run in parallel. Then it
collects the results in core order. Here `c` is the core number.

* `CMD_POSIT`: the controller reads Weight[src_b] once and broadcasts it. Core `c` multiplies
  Input[src_a+c] by it in its 64 DAPPM lanes. The 64 products go to Output[dst+c].
* `CMD_MBLM`: core `c` multiplies bytes 0..7 of Input[src_a+c] by byte 0 of Weight[src_b]. The
  result goes to Output[dst+c].
* `CMD_MIPS`: core `c` gets Query- or Key[src_a+c] (chosen by `qk_sel`), the expert, and the
  index `index+c`. It then receives the 8 projection rows Param[src_b..src_b+7]. Its decision
  word goes to Output[dst+2c]. Output[dst+2c+1] gets the Value SRAM word at the result index
  the unit returns: the reused entry, or the vector's own entry after a Full-Compute.
* `CMD_COS_WR`: writes a cosine score into the Cos-SRAM of every selected core. The
  Sequential Incremental Sorter produces these scores in host software.

Result word layouts:

* MIPS: [1:0] decision (1 Early-Skip, 2 Diff-Reuse, 3 Full-Compute), [3:2] decision level,
  [13:4] result index, [32:14] ΔH, [48:33] root hash, [49] root valid.
* MBLM: 8 × 16-bit products in input order, then [128] radix-8, [129] reordered,
  [133:130] invalid pairs, [137:134] reused products, [141:138] Booth multiplications.
* DAPPM: 64 × 8-bit DA-Posit products.

The run-time thresholds are in `cfg` (`dspe_cfg_t`). `dspe_pkg::CFG_DEFAULT` gives R_zero_act=2,
R_zero_wgt=1, t_match=0, BS threshold 40, repeat-length threshold 3, P(High) table
{250,200,180,30}/256, r_L=64/256, r_H=255/256, T_zero=4 and S_th=64.

## How each mechanism is built

### DA-Posit and the DAPPM lane

* **Decoder.** It splits an 8-bit posit (es=2) into sign, regime k, exponent e and composite
  exponent E = 4k + e (the paper's Eq. 6). The significand is 1.fff: the hidden bit plus up to
  three fraction bits, which is the paper's "fraction bit = 4".
* **Mode.** The paper says DA-Posit reuses regime codes to encode the mode, but not how.
  Here the mode comes from the significand's trailing zeros: mode 2 if the last two bits are
  zero, mode 1 if the last one is, mode 0 otherwise. This costs no extra bits, and dropping
  those bits loses nothing, which is the paper's claim for its folding.
* **Mode path.** The pair mode is the smaller of the two operands' modes. It enables 16, 9 or 4
  AND-gate PEs and drops the low bits the mode says are zero.
* **Accumulation and scaling.** A tree of 3:2 carry-save adders and a final carry-propagate
  adder sum the partial products. The scale path checks the product against 2. If the product
  is 2 or more, it shifts right and adds dE=1, giving E_out = E_a + E_w + dE.
* **Encoder.** It rounds to nearest, ties to even, and saturates at maxpos and minpos.
* **Timing.** The lane is combinational. The Attention Core registers its 64 lanes once, so a
  POSIT request takes one cycle inside the core.

### MBLM

1. **Invalid detector.** It takes |x| by a sign test and negation. A pair is invalid if
   |a| < R_zero_act or |w| < R_zero_wgt, and its product is forced to 0.
2. **Booth BN.** BV is the number of differing bits between adjacent operands, so BS = 1 − BV/8.
   The feature sum Σ(8−BV) and the longest run of equal operands each become one bit against a
   threshold. The two bits select P(R=High) from a 4-entry table, and P(Low) = 1 − P(High).
   The score is r_L·P(Low) + r_H·P(High) (the paper's Eq. 5). The radix-8 path is taken when the
   score is above 0.8 (205/256).
3. **BVM, VST and reorder.** The BV of two operands is the Hamming distance between their Booth
   windows. Windows are 3 bits wide, with stride 2 for radix-4 and stride 3 for radix-8. Only
   pairs with i<j are kept: this is the VST, which drops A–A and repeated B–A pairs. Ranking2 is
   a greedy nearest-neighbour order starting from operand 0. A comparator keeps it only if its
   total adjacent BV is lower than that of the input order (Ranking1).
4. **Execution.** One operand runs per cycle in the chosen order. If its BV to the previously
   executed operand is at most t_match, Booth encoding is skipped and the previous product is
   reused. A Booth-LUT keeps the last flip pattern and sequence index and counts hits.
5. **Booth multiplier.** Signed INT8 × INT8, radix-4 or radix-8. Radix-8 uses the usual 4-bit
   overlapping digit windows and a precomputed 3w.
6. **Timing.** `done` comes 2·8+3 = 19 cycles after `start`: 11 cycles for sorting and 8 for
   execution.

### MIPS

1. **Lite-MAC.** It projects the 64-element vector to 8 components, y[l] = Σ M[l][i]·x[i] >>> 8,
   taking one Param Buffer row per cycle.
2. **Leaves.** Each leaf hash is (y[l] >>> 8) + (cos >> 8). This is a quantising
   locality-sensitive hash plus the vector's cosine score from the Cos-SRAM.
3. **Upper nodes.** Each node is the modular sum of its two children, in an 8-4-2-1 tree. The
   hash has to preserve locality, because the paper thresholds the numeric distance
   |H_cur − H_ref|.
4. **Decision.** Checks run one level per cycle from the leaves up. ΔH is the sum of
   |H_cur − H_ref,j| over the level's nodes, where H_ref,j is the reference tree of the vector's
   expert j (8 experts).
   * ΔH ≤ T_zero → Early-Skip: the reference's result index is reused.
   * ΔH ≤ S_th and a hit in that level's History-LUT → Diff-Reuse: the LUT's index is reused.
   * Otherwise the next level is built. At the root the decision is Full-Compute: the tree
     becomes the expert's reference, and each level's (expert, ΔH, index) goes into its
     History-LUT.
5. **History-LUTs.** 8 entries per level, with round-robin replacement.
6. **Statistics.** The unit counts its decisions and outputs the root hash. This is the hook
   the paper reserves for offline checks by system software.
7. **Timing.** `done` comes 4 + level cycles after the last projection row is accepted.

## Differences from the paper

* **Built from the text only.** The paper gives the structure, the equations and the decision
  rules, but not the circuits. The BN structure and table values, the hash functions, the
  reorder algorithm, the DA-Posit mode encoding, the History-LUT size and key, and the router
  and controller protocols are all this design's own choices (listed above).
* **Posit size.** Fig. 7 is labelled "DA-posit(6,2)", but the text and the results use 8-bit
  posits. The text is followed (n=8, es=2).
* **Radix-8 windows.** Fig. 6 prints "window size 3, stride 3" for radix-8. That window is used
  for the BV statistics. The multiplier itself uses the standard 4-bit overlapping radix-8
  digits, because a 3-bit window cannot encode the digits ±3 and ±4.
* **Booth-LUT index.** The LUT stores the sequence index, but nothing downstream uses it.
  Reuse works against the previous executed operand only, not against older entries.
* **Not built.**
  * The Sequential Incremental Sorter and the offline root-hash verification are software in
    the paper. The host supplies their outputs: reordered vectors and Cos-SRAM scores.
  * There is no clock or voltage scaling (the paper's 200–710 MHz, 0.6–1.1 V) and no DRAM
    interface. The top exposes plain host memory and command ports.
  * The INT4 mode listed in the paper's comparison table is not built; MBLM works on INT8.
  * Softmax, the MoE gating and the rest of the DeepSeek layer are not described as hardware
    and are not built.
* **Sizes.** The paper's core count (4), PE count (64 per core) and memory capacities are kept
  at full size. Vector length 64, 8 leaves, 8 experts and 8 LUT entries are assumed. The paper
  gives no numbers for them.

## Workloads

The paper evaluates DeepSeek-V3 on the MMLU benchmark. It gives no layer sizes. From general
knowledge of the public model, DeepSeek-V3 has hidden size 7168, 61 layers, and 256 routed
experts plus 1 shared expert.

* **Vector width.** The design works on 64-element words, so a 7168-wide row is 112 words
  processed under host control.
* **Experts.** The 8 reference trees cover 8 experts, not 256. The full DeepSeek-V3 expert set
  does not fit the MIPS reference table as built.
* **Savings.** The paper's savings figures depend on real model data and are not reproduced
  here: 33.5 % less DRAM access, 39.1 % fewer multiplications, and a 1.47× DAPPM speed-up.
* **Peak throughput.** The paper quotes 22.8 TFLOPS at POSIT8 and 710 MHz. At one product per
  lane per cycle, 4 cores × 64 lanes × 2 operations × 710 MHz gives 0.36 TFLOPS. The paper does
  not say how it counts operations, so the two figures cannot be compared. Clock rate and power
  belong to the 28 nm layout and are not modelled.

## Verification

Every module has a self-checking testbench. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

* **Exhaustive tests.** `tb_dappm_mult` checks all 65 536 operand pairs against a real-number
  reference with posit rounding. `tb_booth_multiplier` checks every INT8 pair on both radices.
* **Reference-model tests.** The MBLM testbenches compare BS, Re-length, the score, the
  ordering and the products with behavioural models.
* **Scripted tests.** The MIPS testbenches use vector streams that must produce every decision
  at known levels.
* **End to end.** `tb_dspe_top` runs the full-size processor with all parameters at their
  defaults. It loads the memories through the host port and runs POSIT, MBLM, COS_WR and MIPS
  commands on one and on all four cores. It checks every result word against reference models.
  It counts each mechanism and fails if any never happened: Early-Skip, Diff-Reuse,
  Full-Compute, all three DA-Posit modes, radix-4 and radix-8 paths, invalid pairs, reordering
  and product reuse.
* **Measured latencies (default configuration).**
  * POSIT command on all four cores (256 products): 20 cycles.
  * MBLM command on all four cores (32 products): 36 cycles.
  * MIPS command: 36–39 cycles on one core, 123 cycles on four.

To simulate with Verilator, for example the top:

```
verilator --binary --timing -y rtl -y tb rtl/dspe_pkg.sv tb/tb_posit_pkg.sv tb/tb_mblm_ref_pkg.sv \
          tb/tb_dspe_top.sv --top-module tb_dspe_top
./obj_dir/Vtb_dspe_top
```

Other testbenches use the same command with their own file and top name.
