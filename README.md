# SparseTrain accelerator RTL

Training a CNN produces many zeros. ReLU zeroes activations in the forward pass, and the same
zeros mask the activation gradients in the backward pass. Weight-gradient computation consumes
both kinds of data. Many small gradients can also be set to zero at random without biasing
training. This design is a row-based convolution engine that stores every operand row in a
compressed form, so each zero costs no multiply-accumulate and no buffer storage. A
post-processing unit next to each group of processing elements (PEs) creates extra zeros by
stochastic pruning of the gradients.

## Data format

All values are 16-bit signed Q8.8. A compressed row is a stream of 32-bit words
`{index[31:16], value[15:0]}` that holds only the non-zero elements. The index is the column
of the element. A stream ends with its `last` flag. A word whose value is zero is only an end
marker: a row that is entirely zero is sent as one such word. Kernel rows can be given in dense
form, one value per word. The *format converter* at every PE port then numbers them
0, 1, 2, ... and drops the zeros. This is how one datapath handles both dense and sparse
operands (`format_converter.sv`). Partial sums are 32-bit, and the post-processing unit
scales them back to Q8.8 (`>>> 8` with saturation).

## The three row operations

A PE computes one output row from one input row and one kernel row of width K (up to 11). It
holds K multipliers and a sliding window of K partial sums (Reg-2). Every input non-zero updates
all outputs it touches in one cycle. Once the input index has passed an output position, that
output is final and is sent down the partial-sum chain.

| op   | use in training | Port-1            | Port-2           | Port-3           | result |
|------|-----------------|-------------------|------------------|------------------|--------|
| SRC  | forward         | input row         | kernel row       | —                | output row of length `out_len` |
| MSRC | activation gradient | output-gradient row | kernel row, applied reversed (180° rotation) | mask row (forward activation) | gradient row, zero where the mask is zero |
| OSRC | weight gradient | input row         | output-gradient row | —             | K weight-gradient values |

In MSRC, a position whose forward activation was zero is skipped: its gradient is zero
regardless, because ReLU's derivative is zero there. The skip costs one cycle on the mask port
(`skip_fire`). It avoids all multiplications for that position and leaves the position out of
the result stream. OSRC is output-stationary: the K results stay in Reg-2 while both operand
rows stream through, and are emitted at the end.

`pad` gives the zero-padding on the left of the row. The right padding follows from
`out_len`. Only stride 1 is built.

## PE group and partial-sum chain

A group is three PEs in a chain followed by one post-processing unit (PPU) (`pe_group.sv`).
PE0 starts its row with a zero partial sum. PE1 and PE2 add their own contribution to the
partial sum arriving from the previous PE. Together the three PEs sum three kernel rows, which
gives a full 3×K convolution for one output row. In OSRC, the PE at chain position n first
forwards the n·K results of the PEs above it and then appends its own K, so the PPU receives 3·K
values. Every stage has a 2-entry output FIFO, so a stalled PPU only back-pressures the chain.

The PPU (`ppu.sv`) does the following, in order:

1. optional ReLU;
2. rescaling to Q8.8;
3. two accumulators for the controller: the signed sum, used for bias gradients, and the sum of
   absolute values, used for the pruning threshold;
4. the optional stochastic pruner;
5. re-compression into the word format, where zeros are dropped and the end marker is
   guaranteed.

## Stochastic pruning

A gradient g with |g| < τ is replaced by +τ with probability |g|/τ and by 0 otherwise, with the
sign of g kept (`stochastic_pruner.sv`). The expected value is g, so pruning is unbiased.
Values with |g| ≥ τ pass unchanged. Random numbers come from a 32-bit Galois LFSR
(polynomial 0x80200003) that advances once per element. The comparison uses its low 16 bits
scaled by τ. All groups share one seed, so that the 56 groups are identical hardware. Their
streams are still independent in effect because each group prunes different data.

The threshold assumes the gradients are normally distributed around zero. For a target pruning
rate p over n values whose absolute sum is A:

    τ = Φ⁻¹((1 − p)/2) · sqrt(2/π) · A / n

The host folds Φ⁻¹((1−p)/2)·sqrt(2/π)/n into one unsigned coefficient (24 bits, all
fractional). The hardware multiplies it by A (`threshold_predictor.sv`). A is only known after
a whole batch has been processed. The pruning of a batch therefore uses a prediction: the mean
of the last N_F = 4 thresholds of the same layer, kept in a per-layer FIFO (up to 256 layers).
Pruning is enabled only when the host asks for it and the FIFO of that layer is full.

## Controller and memory system

`controller.sv` is a small register file that replaces an instruction stream:

| write addr | meaning |
|---|---|
| 0 CMD   | bit0 run job; bit1 end of batch (push τ for the layer, clear A); bit2 clear A |
| 1 CFG   | [15:0] out_len, [17:16] op, [21:18] K, [25:22] pad, [26] [27] [28] dense flags for ports 1-3, [29] ReLU, [30] prune request |
| 2 JOB   | [15:0] descriptor address, [31:16] number of active groups |
| 3 LAYER | [7:0] layer, [31:8] threshold coefficient |

| read addr | value |
|---|---|
| 0 | {FIFO full, busy} |
| 1, 2 | A, low and high word |
| 3 | bias-gradient sum |
| 4 | {τ determined, τ predicted} |
| 5 | cycle count of the last job |

A job starts every active group at once. When all groups are done, the controller adds the
accumulators of all groups into A and the bias sum, and raises `done_irq`.

The global buffer (`global_buffer.sv`, `buffer_bank.sv`) has one 1765 × 32-bit bank per group,
which totals 386 KiB. Each bank is a plain array with one read and one write port. The host can
reach every bank through a mux while the array is idle.

Every group has a DMA engine (`group_dma.sv`). It reads a descriptor of 10 words from its bank
at the descriptor address:

- words 0-8 are `{length, address}` for each of the 9 operand streams (3 PEs × 3 ports);
- word 9 is the output base address.

The DMA feeds the streams round-robin through small FIFOs and writes the compressed result
rows to the output area. When it finishes, it writes `{count, base}` back into word 9.

## Interface and timing of the top level

`sparsetrain_top` has one clock and an active-low asynchronous reset. Its ports are:

- the host register port: `host_reg_wr/addr/wdata/rdata`, where reads are combinational;
- the host buffer port: `host_buf_en/we/bank/addr/wdata/rdata`, where read data is valid on the
  cycle after the request;
- the status outputs `busy` and `done_irq`.

Typical use:

1. Load the operand rows and descriptors into the banks.
2. Write LAYER, CFG and JOB.
3. Write CMD=1 to start the job.
4. Wait for `busy` to fall, then read the results.

A PE takes about one cycle per non-zero of its Port-1 row, plus K cycles to load the kernel and
a few cycles of drain. At default size, a 56-row 3×3 SRC job on rows of 56 with 35% density
finishes in about 140 cycles.

## Departures from the published design

- The paper drives the array with instructions from a host. Here the host writes registers, and
  all active groups run the same operation per job.
- Stride 1 only. Kernels taller than 3 rows need several passes with partial-sum
  re-accumulation, which is not built. Kernels up to 11 wide are supported.
- Data widths (Q8.8 data, 32-bit partial sums, 40-bit accumulators), the word format, the
  LFSR, the FIFO depths and the DMA descriptor are choices of this design. The paper does not
  specify them.
- In MSRC, a skipped position still costs one cycle on the mask port.
- The port-1 dense flag is global to a job.
- The host CPU and DRAM are outside this design. The host is replaced by the testbenches.

## Simulation

Every module has a self-checking testbench in `tb/` that prints `TB_RESULT checks=N failures=M`.
For example:

    verilator --binary --timing --assert -y rtl -y tb rtl/st_pkg.sv tb/tb_pe.sv --top-module tb_pe
    obj_dir/Vtb_pe

The testbenches are:

- `tb_sparsetrain_top` runs a reduced top (2 groups). It covers SRC, six MSRC batches with
  threshold prediction and pruning, and OSRC. It checks each against a reference model and fails
  if ReLU, skipping, pruning, output jumps, chain forwarding or zero-dropping never occurs.
- `tb_sparsetrain_full` runs the top at its default size of 56 groups and 168 PEs.
