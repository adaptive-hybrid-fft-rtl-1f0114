# Adaptive hybrid radix-2^k FFT processor: RTL

This is a reconfigurable FFT processor for transform sizes from 2 to
512K (2^19) complex points. Its arithmetic is four identical radix-2^5
MDC units ("multipath delay commutator": two lanes wide, one pair of
samples per cycle). Its storage is eight memory banks of 256K words.
The banks and units can be connected in different ways:

* **Four independent one-stage pipelines** for N ≤ 32. Four FFTs run
  side by side.
* **Two two-stage pipelines** for 64 ≤ N ≤ 1024.
* **One pipeline of up to four stages** for N up to 512K.

Between any two stages sits a pair of memory banks. Each pair does two
jobs. It reorders one batch (one N-point FFT) into the order the next
MDC needs. At the same time it absorbs the next batch into the same
addresses, so each bank holds only N/2 words. No extra buffer is needed.

The reordering has no reorder tables. It is done by **bit-dimension
permutations**: every needed order is described as a permutation of the
bits of a sample's index. This has three parts:

* the address generator reads a circular counter with permuted address
  bits;
* a branch switch can exchange the parallel branches;
* a chain of small two-FIFO cells, each swapping the "which lane" bit
  with one time bit.

The published design also has a second, **memory-based mode**: one batch
iterates through all four MDCs and is written back to the banks it was
read from. That mode is **not** implemented here. See "Departures and
limits".

## Number format

* Samples are complex, with 32-bit two's-complement real and imaginary
  parts (`cpx_t`).
* Arithmetic is unscaled: an N-point transform grows by log2(N) bits.
  Inputs must therefore fit in 31 − log2(N) bits. For example, that is
  12 bits at 512K points.
* Twiddle factors are Q2.30 (1.0 = 2^30). Each complex product is
  rounded half-up back to an integer.

With that headroom the error against an exact DFT is a few LSB per
rotator. At 4096 points the end-to-end tests see errors of a few tens of LSB.

## The tagged stream

Every sample moving between blocks is an `elem_t`: a valid bit, the
complex value, and an 18-bit **tag**. The tag holds the sample's
position (cycle count) in its batch.

A bit-swapping element moves a sample from lane x to lane y. It
overwrites the exchanged tag bit with x. So after any number of swaps,
the pair (lane, tag) still tells exactly which index bits the sample
occupies. Two things steer from the tag instead of from counters:

* the MDC rotators pick their twiddle factors from it;
* the swap cells pick their multiplexer setting from it.

As a result, gaps in a stream (valid low) are harmless, and no block
needs a global schedule.

## MDC unit (`mdc_unit`)

A radix-2^5 MDC computes 32-point DFTs on two lanes, 16 cycles per
block, blocks back to back. It is built from the 32-point DIF
factorisation split into five radix-2 columns:

| column | butterfly | rotator after it | commutator after it |
|---|---|---|---|
| 1 | BU | constant W32^(k1·(8n2+4n3+2n4+n5)) on lane 1 | length 8 |
| 2 | BU | trivial −j on lane 1 when time bit 2 is set | length 4 |
| 3 | BU | constant W32^(2(k2+2k3)(2n4+n5)) on both lanes | length 2 |
| 4 | BU | trivial −j on lane 1 when time bit 0 is set | length 1 |
| 5 | BU | non-trivial W_Ns^(j·k′) from the twiddle ROM | — |

In the table:

* k1…k5 are the output-bin bits produced so far. The n are the
  remaining input-index bits.
* j is the index of the butterfly block within the stage. It is read
  from the tag.
* k′ is the bin of the block.
* Ns = 2^(log_eps + k) is the size of the sub-transform that this stage
  belongs to.

**Lower radices.** A radix-2^k stage (k = 1…4) enters at column 6 − k
through a bypass multiplexer and skips the columns before it. The same
rotator constants then give exactly the W16, W8 and W4 factors of the
lower radix. This is the property that lets one unit serve all radices.

**Commutators.** Each commutator is a `dc_swap` cell with a fixed
length. It swaps the lane with one time bit so that the next
butterfly's operand pairs arrive together.

**Output order.** Lane 0 at local time t carries bin bitrev(t) of the
block. Lane 1 carries that bin + 2^(k−1).

**Latency.** From the first input to the first output:

| radix | 2^5 | 2^4 | 2^3 | 2^2 | 2 |
|---|---|---|---|---|---|
| cycles | 26 | 16 | 10 | 6 | 3 |

Each column has a butterfly register and a rotator register. Column 5
adds one ROM cycle.

## Twiddle ROM (`twiddle_rom`)

The twiddle ROM is shared by all four units and has two read ports per
unit. It stores a quarter wave: 2^17 entries of exp(−j2πr/2^19),
computed at elaboration. Each port restores the quadrant by swapping
and negating the parts, which gives W_512K^e for any 19-bit exponent.
An Ns-point stage addresses it with e = (j·k′) << (19 − log2 Ns).
The read latency is one cycle.

## Data reordering (`data_reorder`, `agu`, `mem_bank`, `pbc`, `reshuffle`)

Bank pair q (banks 2q and 2q+1) always feeds MDC q. The pair's writer is
set by configuration: either the processor input or the output of any
MDC. That choice is what forms the chains.

A batch is N/2 cycles of two words. The path through a pair is:

1. **Write.** Words are written at `wr_addr = p_wr(count)`. Here
   `p_wr` is a permutation of the counter bits, and `count` runs over
   0…N/2−1.
2. **Read.** The cycle after a batch's last word is written
   (`batch_done`), the address generator starts reading it at
   `rd_addr = p_rd(count)`, with `p_rd = p_wr ∘ σ`. The word read at
   count c is therefore the word written at count σ(c), whatever the
   current write pattern. Reading takes N/2 cycles, so it finishes
   exactly when the next batch has been written.
3. **In-place update.** After each batch, `p_wr ← p_rd`. The next batch
   is written into the addresses just being freed, in the same cycle
   each is read, and a read-first memory makes that safe. When σ is an
   involution, such as a bit reversal, the write pattern simply
   alternates between two patterns. If a batch completes before the
   previous one has been read, `conflict` is raised and an assertion
   fires.
4. **Branch switch (`pbc`).** This is the second permutation: branch b
   goes to the branch whose low p = log2(2P) bits are reversed.
5. **Reshuffle (`reshuffle`).** This is the third permutation: up to
   six `dc_swap` cells in series, each enabled or bypassed, with FIFO
   length 2^lg (1…16).

**The `dc_swap` cell.** Lane 1 passes through a FIFO of length L = 2^lg.
Two multiplexers then cross or straighten the lanes, and the new lane 0
passes through a second FIFO of length L. A sample on lane x whose tag
bit lg is y leaves on lane y with tag bit lg = x. The latency is L. The
lane-1 output is combinational from the lane-0 input, so a monitor
must sample it before the clock edge.

### How a chain is configured

The host computes all of the following with the functions in `fft_pkg`
(`chain_stage_cfg`, `out_label`). They are not synthesised.

* **Radix split.** The first stage takes radix 2^(n−5(S−1)) and the
  others 2^5, where n = log2 N and S = ⌈n/5⌉.
* **First stage.** The first stage uses the published recipe unchanged.
  * The counter is read with its low w serial bits reversed. Here
    w = n − 1, or the whole serial width when that is smaller.
  * The stream then passes a fixed cell series that depends only on
    n mod 5:

    | n mod 5 | FIFO lengths |
    |---|---|
    | 0 | 8, 1, 8, 4, 2, 4 |
    | 3 | 2, 1, 2 |
    | 4 | 4, 1, 4 |
    | 1, 2 | none |

  * Afterwards, the top bit of the radix group is on the lane and the
    rest of the group sits in the low time bits, as the MDC needs. The
    block index arrives bit-reversed. So the first MDC runs with
    `j_rev`, which bit-reverses the block index before the twiddle
    address is formed. This holds for every n from 1 to 19.
* **Later stages.** No recipe is published for the later stages. For
  stage s, the host works out two orders: the order the previous MDC
  delivers (`mdc_out_order`) and the order this MDC needs
  (`mdc_in_order`). The needed order is:
  * the lane carries the top bit of the current group;
  * the low time bits carry the rest of the group;
  * the next time bit carries the previous stage's lane bit;
  * the stride bits follow in natural order.

  The previous output lane always carries a bit this stage wants in
  time, so one reshuffle cell exchanges them. The read permutation σ
  maps every other time bit into place.
* **Output.** At the last stage, the result on lane l with tag t is
  X[bitreverse_n(out_label(n, l, t))].

Configuration registers (`access_ctrl`) hold one `stage_cfg_t` per pair:

| field | meaning |
|---|---|
| `k` | radix |
| `log_eps` | stride |
| `j_shift` | where the block index starts in the tag |
| `j_rev` | the block index is bit-reversed (first stage) |
| `nt_en` | apply the non-trivial twiddle |
| `n_ser` | log2(N/2) |
| `sigma` | read permutation |
| `cells` | reshuffle cells |
| `src` | writer of the pair |
| `last` | this MDC drives the outputs |

There is also one `lgp` register for the branch switch. Pulsing `start`
restarts every address generator.

## Top level and interface (`hybrid_fft_top`)

The top contains `access_ctrl`, `data_reorder` and `fft_core`. The FFT
core is the four MDCs plus the ROM.

**Configuration.** Write the configuration registers (`cfg_we`,
`cfg_idx`, `cfg_wdata`, plus `lgp_we`, `lgp_wdata`), then pulse
`start`.

**Input.** Stream each batch into the first pair of its chain. Drive
`in_v[q]`. Lane 0 carries x[t] and lane 1 carries x[t+N/2], for
t = 0…N/2−1. Gaps are allowed.

**Output.** Results appear on `out_v/out_d0/out_d1/out_tag[q]` of the
chain's last MDC, two per cycle.

**Timing.**

* A chain takes a new batch every N/2 cycles, with no pauses between
  batches.
* The latency of each stage is N/2 + 1 cycles of fill and read start,
  then 1 cycle of memory, 2^lg of reshuffle, and the MDC latency.

## Verification

Each block has a self-checking testbench in `tb/`. Every testbench ends
with a line `TB_RESULT checks=… failures=…`. Reference values are
computed independently in the bench, mostly double-precision DFTs.

| bench | what it shows |
|---|---|
| `tb_mdc_unit` | all five radices with and without the stage twiddle against DFTs, natural and bit-reversed block order; exact latency |
| `tb_fft_core` | four units with different radices at once on the shared ROM; latencies |
| `tb_twiddle_rom` | all eight ports, random exponents and the quadrant boundaries |
| `tb_mem_bank` | random read/write, read-first behaviour |
| `tb_agu` | published bit-reversal widths, in-place update over four batches against a reference memory, read start timing |
| `tb_pbc` | branch reversal for every p |
| `tb_reshuffle` | the six-cell first-stage series of the published 1-parallel radix-2^5 configuration (FIFO lengths 8,1,8,4,2,4), and shorter series; latency = sum of FIFO lengths |
| `tb_data_reorder` | two pairs, one fed from the input and one from an MDC port, random σ plus a swap, two back-to-back batches, exact first-output timing |
| `tb_access_ctrl` | registers, restart pulse, output selection |
| `tb_hybrid_fft_top` | end to end: four parallel 1-stage FFTs (N = 32, 16, 8, 2), two 2-stage chains (N = 1024, 128) running together, one 3-stage chain (N = 4096, three batches back to back); counts bypass, non-trivial twiddle, lane swap, in-place overwrite, concurrent chains and back-to-back batches, and fails if any never happens |
| `tb_hybrid_fft_sizes` | every size from 2 to 256K points in the configuration used for it (four 1-stage, two 2-stage or one chain of up to four stages); each result appears exactly once, N/2 consecutive output cycles, DFT comparison (all bins up to 1024 points, about 64 above) |
| `tb_hybrid_fft_full` | one 512K-point FFT through all four MDCs at the default sizes: every result appears exactly once, N/2 consecutive output cycles, 200 random bins against a DFT |

To simulate one bench with verilator, list the package first. For example:

```
verilator --binary --timing --assert -Irtl rtl/fft_pkg.sv \
    $(ls rtl/*.sv | grep -v fft_pkg) tb/tb_hybrid_fft_top.sv \
    --top-module tb_hybrid_fft_top -o sim && ./obj_dir/sim
```

The 512K bench takes about 20 s to compile and 20 s to run.

## Departures and limits

* **No memory-based mode.** The iterative mode is missing: one batch
  with P = 4, N from 32 to 32K, written back in place across
  iterations. So are its address permutations. Only the pipeline modes
  are built.
* **Reshuffle cells only within a pair.** Every reshuffle cell works on
  the two branches of one pair. Cells that span pairs (distance 2 or
  4), which the 4-parallel first-stage series uses, are not built.
* **Later-stage reordering is this design's own.** The read order and
  the cells of the later stages come from this design's order
  calculation, not from a published table. The address generator takes
  any bit permutation, so both the published first stage and these
  later stages run on the same hardware.
* **Reversed block order in the first stage.** The published recipe
  delivers the blocks in bit-reversed order. Here the twiddle
  addressing undoes that through `j_rev`. How the original handles it
  is not described.
* **MDC internals.** The internal buffer lengths, the register placement
  and the rounding are this design's own choices. Only the column
  structure follows the published radix-2^5 factorisation.
* **Access control.** The published text only names an access control
  block. The register file, the host-computed configuration and the
  writer selection are this design's own choices.
* **No scaling.** Nothing guards against overflow; the input headroom
  rule above is the user's responsibility.
* **Memory widths.** One bank word holds both 32-bit parts, so eight
  banks of 256K × 64 bits give the same 128 Mbit as the published
  implementation.
* **Unrealistic read ports.** The twiddle ROM is one table with eight
  read ports, and a real device would replicate it. A synthesis flow
  will also want the 256K-deep banks mapped onto RAM macros.
