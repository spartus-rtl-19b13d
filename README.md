# Spartus: a DeltaLSTM accelerator exploiting spatio-temporal sparsity

An LSTM layer spends almost all of its time on one matrix-vector product per time step.
It multiplies the stacked gate weights (4H rows) by the state vector s_t = [x_t; h_{t-1}].
This design saves work on that product in two ways.

- **Temporal sparsity (delta network).** Between time steps, most elements of s_t barely change.
  The layer keeps, for every element, the value it last propagated (ŝ). An element whose
  change |s − ŝ| exceeds a threshold Θ sends the delta s − ŝ, and ŝ becomes s. Every
  other element sends nothing. Weight columns of silent elements are never read. The
  products of the deltas are added to running sums, the *delta memories* D = W·(Σ deltas).
  Without thresholding, D would equal W·s_t exactly.
- **Spatial sparsity (column-balanced pruning).** The weight matrix is pruned so that, in
  every column, each of the M row groups (a *subcolumn*: rows r with r mod M = m) keeps
  exactly BLEN nonzeros. A fetched column then gives every one of the M multipliers of an
  array exactly BLEN products. There is no load imbalance and no index search at run time.

The RTL here implements the programmable-logic side of such an accelerator for one
DeltaLSTM layer:
- 8 multiply-accumulate arrays of 64 processing elements each (512 MACs);
- the delta encoder, the weight memories, the controller, the pointwise LSTM stage, and the
  input and output buffers.

A host (CPU plus DMA engine) streams x_t in, reads h_t out and writes the weights once.
The host side is not part of the RTL. Its signals are ports of `spartus_top`.

## Number formats

| quantity | format | where |
|---|---|---|
| x, h, c, deltas, Θ, pre-activations | 16-bit signed, 8 fraction bits (Q8.8) | `act_t` |
| weights | 8-bit signed, 6 fraction bits | `wgt_t` |
| local row index (LIDX) | 8-bit unsigned | `lidx_t` |
| partial sums / delta memories | 48-bit signed, 14 fraction bits | `acc_t` |

- **Pre-activation.** A delta-memory sum becomes a pre-activation as
  `sat16(sum >>> 6)`.
- **Pointwise stage.** It computes `c_t = sat16((σ(D_f)·c_{t-1} + σ(D_i)·tanh(D_g)) >>> 8)`
  and `h_t = sat16((σ(D_o)·tanh(c_t)) >>> 8)`.
- **Activation tables.** Sigmoid and tanh are 256-entry tables over [−8, 8) with step 1/16.
  The index is `(clip(x, −2048, 2047) >>> 4) + 128`. The entries are computed during
  elaboration from the exact functions with `$exp` and rounded to Q8.8. Changing `LUT_N` and
  the index function in `spartus_pkg.sv` changes the resolution.
- **Sizes versus binary points.** The 16/8/8/48-bit sizes come from the source design. The
  placement of the binary points is this design's own choice.
- **No bias.** The delta memories start at zero at the start of a sequence, so there is no
  separate bias.

## Weight layout (CBCSC) and the bank interleave

The stacked matrix has 4H rows in the gate order i, g, f, o. It has X+H columns: the
input columns, padded to a multiple of M, then the hidden columns.

- **Row placement.** Row r belongs to PE m = r mod M and sits in that PE's partial-sum
  memory at address LIDX = r div M. With `H_WORDS = H/M`, gate block b of neuron
  j = q·M + m is at address `b·H_WORDS + q`.
- **Column placement.** Column c is stored in weight bank n = c mod N, at words
  `(c div N)·BLEN + k` for k = 0..BLEN−1.
- **Word contents.** A word holds M lanes of (weight, LIDX). Lane m holds the k-th nonzero
  of subcolumn m.
- **Padding.** A subcolumn with fewer real nonzeros is padded with zero weights.

At the default sizes (H = X = 1024, M = 64, N = 8, BLEN = 4 for 93.75 % sparsity):
- each bank holds 2048/8 × 4 = 1024 words of 64 × 16 bits;
- a PE's partial-sum memory holds 4·1024/64 = 64 entries.

The host loads a bank word by word through `wm_we/wm_bank/wm_addr/wm_wdata`.

## State memory and the state stream (`smem`)

- **x_t input.** x_t arrives in E = 4-element beats (`x_valid/x_ready`). Beats are packed
  into M-element words in one of two x buffers, so x_{t+1} can arrive while step t runs.
  Elements beyond the input length are zero.
- **h buffer.** The h buffer holds h_{t-1}. It is written one word per neuron slot by the
  pointwise stage.
- **Streaming.** When a step starts, the memory streams cfg_x_words input words and then
  cfg_h_words hidden words to the IPU, one word per cycle while the IPU accepts. This is
  s_t, already concatenated.

## Delta encoding (`ipu`, `dpe`)

- **Splitting words.** The IPU buffers state words in a small S-FIFO. It hands element
  i·N + n of each word to delta processing element (DPE) n. Each DPE therefore sees I = M/N
  elements per word, and every element it sees belongs to a column of bank n.
- **Comparison.** A DPE keeps ŝ in a memory addressed by a word counter CNT. For every
  word it compares the I elements against Θ in parallel and forms a bit vector `comp`.
- **Sending deltas.** The deltas are sent one per cycle. A `mask` register starts at all
  ones; `code = comp & mask` goes through a lowest-bit priority encoder. Each sent element
  clears its mask bit.
- **Outputs and memory update.** Each sent delta leaves as (NZV, NZI) into the DPE's
  D-FIFO, where NZV is the value and `NZI = CNT·I + i` is the column's index within bank n.
  ŝ is written only for elements that crossed the threshold.
- **Word handshake.** A word leaves the S-FIFO when all N DPEs have sent their deltas. A
  full D-FIFO stalls its DPE, and therefore the stream.

An element i of a DPE word is column `CNT·M + i·N + n`. Its bank-local index is exactly
`CNT·I + i`, so the NZI doubles as the column number in the bank.

## MAC arrays and partial-sum memories (`mac_array`, `pe`, `hpe`, `ctrl`)

- **Address sequencing.** For array n, the controller pops a delta from D-FIFO n and, in
  the same cycle, reads weight word `NZI·BLEN`. It then reads the next BLEN−1 words on the
  following cycles. The pop of the next delta overlaps the last read, so a busy array takes
  one weight word every cycle.
- **Multiply-accumulate.** The popped NZV is held in the array. Each of the M PEs
  multiplies it by its lane's weight and adds the product into its partial-sum memory at
  LIDX. The PE pipeline is read and operand registers, then the multiply-add, then the
  write. A sum written in the previous cycle is forwarded when the next product targets the
  same LIDX.
- **Persistence.** The partial sums are never reset between time steps. Together over the
  N arrays they *are* the delta memories.
- **Last array.** Array N−1 is built from heterogeneous PEs (HPEs), which also do the
  pointwise LSTM stage.

## From delta memories to h_t: adder trees and the HPE schedule

This is the most intricate part of the design.

When the MAC phase is over, the controller walks the neuron slots q = 0..H/M−1. For each
slot it does the following:

1. It waits until the output buffer has room for one word.
2. On four consecutive cycles it presents address `b·H_WORDS + q` for b = i, g, f, o to all
   arrays. For each lane m, an adder tree sums the N partial sums, then scales and
   saturates the result to Q8.8. The HPE of lane m receives D_i, D_g, D_f, D_o in that order.
3. Each HPE runs a fixed schedule on its single 16×16 multiplier and 48-bit adder. The
   operand multiplexers choose NZV/c_{t−1}/tanh for port A, weight/sigmoid for port B, and
   partial sum/0/P for the adder. Cycle 0 is the cycle D_i is on the tree output:

   | cycle | action |
   |---|---|
   | 0 | sigmoid input ← D_i |
   | 1 | tanh input ← D_g |
   | 2 | sigmoid input ← D_f; A ← tanh(D_g), B ← σ(D_i) |
   | 3 | sigmoid input ← D_o; P ← A·B; A ← c_{t−1}, B ← σ(D_f) |
   | 4 | P ← A·B + P |
   | 5 | c_t = sat(P>>>8) written to the cell memory; tanh input ← c_t |
   | 6 | A ← tanh(c_t), B ← σ(D_o) |
   | 7 | P ← A·B |
   | 8 | h_t = sat(P>>>8), `h_valid` |

4. The controller writes the M values of h_t into the h buffer of the state memory (for
   the next step) and into the output buffer.

A slot takes 11 cycles in total.

The cell state c_{t−1} of each neuron lives in a small per-HPE memory addressed by the slot
number. The HPEs may not run MAC updates while the schedule runs; an assertion checks this.

## Controller sequence and clearing (`ctrl`)

The controller moves through these states:

`CLEAR → IDLE → MAC → (ACT_ISSUE ↔ ACT_WAIT)×H/M → DONE → IDLE`

- **CLEAR.** It runs after reset and after every `seq_start`. It sweeps max(S_WORDS, 4·H/M)
  addresses and zeroes the DPE ŝ memories, the partial sums, the cell states and h_{t−1}.
- **IDLE → MAC.** A step starts when a complete x_t is buffered.
- **MAC → activation.** MAC ends in the first cycle in which the stream is over, the IPU
  is empty, every sequencer is idle and no weight word or product is in flight.
- **DONE.** It pulses `step_done`. `step_cycles` reports the number of cycles of the step.

## Top level (`spartus_top`)

| port group | signals |
|---|---|
| configuration | `cfg_x_len` (multiple of E), `cfg_x_words` = ⌈x_len/M⌉, `cfg_h_words` = H/M, `cfg_blen`, `cfg_theta` (Q8.8), `seq_start` |
| input stream | `x_valid`, `x_data[E]`, `x_ready` |
| output stream | `h_valid`, `h_data[E]`, `h_last` (last beat of a step), `h_ready` |
| weight load | `wm_we`, `wm_bank`, `wm_addr`, `wm_wdata[M]` (struct of weight and LIDX) |
| status | `busy`, `step_done`, `step_cycles` |

- **Parameters.** `M`=64, `N`=8, `H_MAX`=1024, `X_MAX`=1024, `E`=4, `WMEM_DEPTH`=1024, and the
  FIFO depths `SF_DEPTH`=4, `DF_DEPTH`=16, `OB_DEPTH`=16. Any layer with H ≤ H_MAX,
  X ≤ X_MAX and (X+H)/N·BLEN ≤ WMEM_DEPTH runs without rebuilding.
- **Reset.** Reset is synchronous and active low.
- **Multi-layer networks.** These are run layer by layer by the host, which reloads the
  weights for each layer.

## Timing

- **Per delta.** One weight word per array per cycle: a nonzero delta costs BLEN cycles of
  its array.
- **MAC phase.** It lasts about max(busiest array's deltas × BLEN, encoding time) cycles.
  Encoding takes one cycle per state word plus one cycle per delta of the busiest DPE.
- **Pointwise stage.** It adds 11 cycles per neuron slot (176 cycles for H = 1024).
- **Measured.** The simulated 1024×1024 layer (random weights, BLEN 4, Θ = 0.3) takes
  350–590 cycles per step with the output always accepted. That is 1.8–3 µs at 200 MHz.

## Where this RTL departs from the source design

- **Latency.** The source design reports about 1 µs (200 cycles) per step for a 1024-unit
  layer. Here the pointwise stage is a separate phase after the MAC phase and is not
  overlapped with the next step's products, which costs about 2–3× that latency.
- **Naming of M and N.** One passage of the source names M the number of arrays and N the
  number of PEs. Another names N arrays of M PEs. The product is 512 either way; this RTL
  has N = 8 arrays of M = 64 PEs, which matches the subcolumn height of the weight format.
- **Mask polarity.** The source's text and its figure disagree on the DPE mask polarity.
  This RTL uses `code = comp & mask` with the mask starting at all ones.
- **Where s_t is concatenated.** Concatenation of x_t and h_{t−1} happens in the state
  memory's read sequence, not in the input processing unit.
- **Unspecified details.** The following are this design's own choices: the fixed-point
  binary points, the activation table resolution, the HPE schedule and its cell-state
  memory, the forwarding in the PE pipeline, the FIFO depths, the stream width E and the
  clearing sweep.
- **Not built.**
  - The host side: processor, DMA, interconnect, DRAM.
  - The small edge configuration that fetches weights from DRAM.
  - Bidirectional sequencing.
  - Bias loading: delta memories start at zero.

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>`. For example, with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_dpe \
  -y rtl rtl/spartus_pkg.sv tb/tb_dpe.sv -Mdir obj_dpe
./obj_dpe/Vtb_dpe
```

Run the same command with `tb_pe`, `tb_hpe`, `tb_mac_array`, `tb_hpe_array`,
`tb_wmem_bank`, `tb_adder_tree`, `tb_ipu`, `tb_smem`, `tb_ctrl` and `tb_obuf`.

The whole accelerator has two end-to-end tests. Each builds random CBCSC weights, runs two
sequences and compares every h_t element with a bit-exact behavioural DeltaLSTM model in
the testbench. Each also checks `step_cycles` against bounds derived from the delta counts.

- **`tb_spartus_small`.** M = 8, N = 2, H = 64, 20 inputs; it runs in seconds.
- **`tb_spartus_top`.** It runs the default parameters: a 1024×1024 layer, BLEN 4. The
  build takes about 5 minutes.

Both count the mechanisms of the design and fail if one never occurred:
- skipped deltas;
- hidden-state deltas;
- several deltas from one DPE word;
- a D-FIFO stall;
- S-FIFO backpressure;
- a full output buffer;
- input arriving during a step;
- partial-sum forwarding;
- the clearing sweep.
