# RCW-CIM: a digital compute-in-memory LLM accelerator with read-compute/write

Inference of large transformer models (LLMs) is dominated by matrix–vector and matrix–matrix
products whose weights do not fit on chip. A compute-in-memory (CIM) macro multiplies
inputs with the weights where they are stored, but it stalls whenever new weights are
written. This design hides that cost with **read-compute/write (RCW)**. In one access a
word line's old weights are read into a latch, the MAC runs on the latched copy, and the
same word line is overwritten with the next weight block. It also uses a
**weight-stationary, output-column-stationary (WS-OCS)** dataflow: a weight block stays
in the macros until every token has used it, and partial sums stay on chip until every
input block has been added. A **nonlinear operator fusion controller** reuses the CIM
macro as a 64-segment lookup table for group softmax, and computes group RMSNorm with a
single reciprocal.

The SystemVerilog in `rtl/` implements the accelerator core: CIM banks and macros,
clusters, buffers, the WS-OCS scheduler, the fusion controller and the on-chip network.
The DRAM, the memory controller, the AXI bus and the host lie outside. The top exposes a
simple DRAM request/response port for them.

## 1. Organisation

```
rcw_cim_top
 ├─ ws_ocs_scheduler          GEMM sequencing, DRAM requests, buffer writes, counters
 ├─ cim_cluster  x 8          (lock-step, same step stream)
 │   ├─ input_reuse_buffer    64 KB: 256 lines x 2048 bit, 512-bit write port
 │   ├─ psum_buffer           64 KB: 1024 entries x 512 bit (16 lanes x 32 bit)
 │   └─ cim_core  x 4
 │       ├─ weight_buffer     next weight block: 16 rows x 4096 bit
 │       ├─ cim_macro         8 KB of weights, 256-lane input line buffer
 │       │   └─ cim_bank x 8  32 sub-arrays x 16 word lines x 16-bit cells
 │       └─ word-line accumulator
 └─ nl_fusion_ctrl            group softmax / group RMSNorm (uses cluster 0, core 0)
     ├─ seq_div               48/32-bit restoring divider
     └─ seq_isqrt             32-bit integer square root
```

There are 32 CIM cores with 8 KB each, which gives 256 KB of CIM weight storage.
At one word line per cycle each macro does 512 8-bit MACs per cycle. That is
32 × 512 × 2 operations × 100 MHz ≈ 3.3 TOPS.

All shared types and constants are in `rcw_pkg`:
- the mode enum `cim_mode_e`;
- the step record `step_t`;
- the DRAM request `dram_req_t`;
- the block-float type `bfp_t`.

## 2. The CIM macro

### Geometry and weight mapping

A bank holds 32 sub-arrays. Each sub-array has 16 word lines of 16-bit cells. A macro
holds 8 banks, and all banks and sub-arrays share one word-line address. Weight row `n`
of a 4096-row block lives at bank `n / 512`, word line `(n / 32) % 16` and sub-array
`n % 32`. One word-line access therefore touches 256 weight rows at once. It multiplies
each one with its input lane from the line buffer: bank `b` sub-array `s` uses lane
`32b + s`. Sixteen accesses cover the whole 4096-row block.

### Number formats

| mode      | word content                       | columns | lanes per access |
|-----------|------------------------------------|---------|------------------|
| INT8      | `[15:8]` column 0, `[7:0]` column 1 | 2       | 256 × INT8        |
| INT4      | four nibbles, `[15:12]` = column 0  | 4       | 256 × INT8        |
| BF16      | one BF16 weight                     | 1       | 256 × BF16 (line loaded in two halves) |
| SOFTMAX   | LUT coefficients (below)            | –       | 32 scores         |

INT products are summed exactly, in signed 32-bit column sums.

In BF16 each bank multiplies significands and adds exponents. It then aligns all
products to the largest exponent in the group and sums them as integers (a block-float
adder tree). The macro repeats this alignment across the 8 banks, and the core repeats
it across the 16 word lines. A value is `mant · 2^(exp − 268)`. At the end of a token
pass it is rounded to BF16. Bits shifted out during alignment are lost, and subnormals
are flushed to zero.

### Read-compute/write timing

A bank access has two register stages:

1. **Read and write (cycle t).** Each sub-array selects its word line and copies the
   row into the weight latch. If `wr_en` is set, the same row takes `wr_data` at the
   same clock edge. The RAM is read-first, so the latch receives the *old* contents.
2. **Compute (cycle t+1).** The adder tree works on the latch. The result is registered
   and valid at t+2.

The macro adds a combine register, for a latency of 3. A compute access and a weight
update on the same word line cost one cycle together. This is the hidden update.

### Softmax lookup in the macro

In SOFTMAX mode the macro evaluates 32 exponentials per access, 4 per bank. Input lane
`4b + j` of bank `b` holds a score `x` (signed Q8.8). The bank subtracts the group
maximum, `d = x − max`, and uses `|d|`. Segment `k = |d| / 0.25` (64 segments, so
`|d| < 16`) selects the linear piece:

```
exp(d) ≈ b_k − a_k · |d|,   a_k = (e^(−0.25k) − e^(−0.25(k+1))) / 0.25,
                            b_k = e^(−0.25k) + a_k · 0.25k
```

Coefficients are unsigned Q1.15. Lane `j` owns sub-arrays `8j … 8j+7`. `a_k` is at
sub-array `8j + 2·(k/16)` and `b_k` is at the next sub-array, both on word line
`k % 16`. Each sub-array therefore drives its own word line in this mode, chosen by the
segment. A bank outputs the 4 exponentials (the partial accumulation) and their sum (the
full accumulation). The macro concatenates 32 exponentials and adds the 8 sums. For
`|d| ≥ 16`, or when the line goes negative, the result is 0.

To program the table, write one 4096 × 16-bit weight block that has these coefficients
at those positions. Use the scheduler's `OP_LOAD` command. The table replicates the same
64 pairs for every lane.

## 3. Dataflow: the WS-OCS scheduler

The scheduler computes `O[M×K] = I[M×N] · W[N×K]`. A weight block is 4096 rows of `N`
by the columns held by all 32 macros:
- 64 columns in INT8;
- 128 columns in INT4;
- 32 columns in BF16.

The command gives `m_tokens` (`M`, up to 1024), `nb_blocks` (NB, up to 8),
`kb_blocks` (KB) and `wbase`, the number of the first weight block in DRAM.

Loop order:

```
for kb in 0..KB-1:                       # output column block (stays in psum buffers)
  for nb in 0..NB-1:                     # input block along N (weights stationary)
    for m in 0..M-1:                     # tokens
      fetch input line block of token m unless resident
      16 word-line steps (32 in BF16)    # RCW write of next block on the last m
  drain psums of column block kb         # one 512-bit beat per cluster per token
```

- **Weights.** A block stays in the macros for all `M` tokens. Before the last token's
  pass, the next block is fetched into the 32 weight buffers. During that pass each
  step writes its word line with the buffered row, so the update is free. Only the
  first block of a command pays an exposed write-only pass of 16 cycles. The counters
  `cnt_rcw_rows` and `cnt_exposed_rows` record both kinds.
- **Outputs.** Every token pass writes 16 lanes (4 cores × 4 columns) into psum entry
  `m` of each cluster. The first nb overwrites the entry and the later ones add. After
  the last nb the entries are drained.
- **Input reuse.** The input-reuse buffer has 16 token slots. Slots `0 … 7` keep a
  resident tile of `MT = 8 / NB` tokens (halved in BF16). These tokens are fetched only
  for the first kb. All other tokens pass through a streaming slot and are fetched
  again for each kb. Input traffic is therefore `KB · (M − MT) · N` plus one first
  fetch, instead of `KB · M · N`.

### Step pipeline

The scheduler sends one `step_t` record per cycle to all clusters at once:
- a line-buffer load, with its input line;
- a macro request, with its word line, compute/write flags and mode;
- the token, first/last row flags and accumulate flag.

| cycle | action |
|-------|--------|
| t     | cluster reads the input line from the input-reuse buffer |
| t+1   | core loads the macro line buffer; reads the weight-buffer row for the RCW write |
| t+2   | macro request (read/compute + write) |
| t+5   | macro result; the core accumulates across word lines |
| t+6   | on the token's last row, one psum-buffer write (overwrite or add) |

After a column block's last step, the scheduler waits 13 cycles for the pipeline to
empty, then drains.

### DRAM port

`dram_req_t` names the kind of data and a beat. For an input beat it gives the token, nb
and beat. For a weight beat it gives the block, cluster, core, row and beat. The data
arrives on `dram_rsp_data` one cycle after the request, with no back-pressure.
- The input layout is one 512-bit beat = 64 INT8 values or 32 BF16 values, 64 beats
  per 4096-value token block.
- The weight layout is 8 beats per 4096-bit macro row, 16 rows per macro.

Fetches and compute are *not* overlapped. The cycle counts of this design are therefore
dominated by DRAM beats and are not the chip's latency.

## 4. Nonlinear operator fusion

`nl_fusion_ctrl` accepts a group of 32 signed Q8.8 values and an op (`nl_op_e`).
It can run only while no GEMM is running, because it borrows the macro of
cluster 0, core 0 through that core's `ext_*` port.

**Softmax.** The controller finds the group maximum and sends the 32 scores and the
maximum to the macro in SOFTMAX mode. It receives the 32 exponentials and their sum. It
forms one reciprocal, `2^32 / sum`, with a sequential divider. Each output is
`y_i = (e_i · recip) >> 16`, a probability in Q0.16. The macro must hold the LUT.

**Group RMSNorm** (`NL_RMS_NEW` for the first group of a vector, `NL_RMS` for the
others). The controller sums the squares and forms `mean = sumsq / 32 + EPS` in
Q16.16. It takes the integer square root, giving rms in Q8.8, and one reciprocal,
`2^24 / rms`. Each output is `y_i = (x_i · γ_i · recip) >>> 24`, saturated to Q8.8.
Normalisation and the gamma multiply are one fused multiply per element. Each group
also adds its sum of squares and a group count to running statistics for its vector.

**Global synchronisation** (`NL_RMS_SYNC`). A group that is sent again with this op is
rescaled by the RMS of the whole vector instead of its own:
- the mean is `Σ sumsq / (32 · groups) + EPS`, using the same divider;
- then one square root and one reciprocal;
- then the same fused multiply with gamma.

The global reciprocal is computed on the first SYNC after the statistics change. It is
reused for the rest of the vector, so later SYNC commands take 3 cycles. The group
results are available as soon as their group is in, and the global result needs no
extra pass over gamma.

## 5. Top level and counters

`rcw_cim_top` wires the scheduler, 8 clusters and the fusion controller:
- Input beats are broadcast to all clusters.
- Each weight beat goes to the one core it names.
- Drain beats come out on `out_*`, tagged with column block, cluster and token.

The `cnt_*` outputs count:
- input, weight and output beats;
- RCW and exposed weight rows;
- input reuse;
- cycles;
- psum accumulations;
- softmax, group RMSNorm and global-sync groups;
- switches between MAC and LUT use of the shared macro.

## 6. Departures from the source description and open points

- **Core count.** The source is inconsistent: 8 clusters × 4 cores (32) in the text,
  "64" in a figure caption. This design has 32 cores, which matches 256 KB of CIM.
- **Buffer placement and widths.** One 64 KB input-reuse buffer and one 64 KB psum
  buffer sit per cluster, with 512-bit ports and a 2048-bit line into the cores. The
  source also shows 16 KB per-core buffers with 128-bit ports. The weight buffer size is
  this design's choice.
- **Nonlinear precision.** The source computes the nonlinear functions in FP16. Here
  they are fixed point: Q8.8 scores, Q1.15 exponentials, Q0.16 probabilities. The MAC
  path uses BF16 and INT8/INT4 as specified.
- **RMSNorm synchronisation.** Global synchronisation needs each group sent a second
  time. The statistics are gathered in the controller. The source does not say how its
  synchronisation is triggered.
- **BF16.** The exact alignment and rounding of the BF16 adder tree are this design's
  own. BF16 GEMMs are limited to NB = 1.
- **INT4 packing** (four nibble columns per word) is this design's choice.
- **Scheduling.** Fetches and compute are not overlapped, and the DRAM is an idealised
  one-cycle port. The published end-to-end latency and throughput figures are not
  reproduced.

## 7. Verification and simulation

Every block has a self-checking testbench in `tb/`:

| testbench | what it checks |
|-----------|----------------|
| `tb_cim_bank` | INT8/INT4/BF16 MACs, softmax LUT, RCW read-old/write-new, latency 2 |
| `tb_cim_macro` | lane mapping, all modes, line-buffer halves, latency 3 |
| `tb_weight_buffer`, `tb_input_reuse_buffer` | beat/quarter placement, read latency |
| `tb_psum_buffer` | overwrite and accumulate on random traffic |
| `tb_cim_cluster` | full token passes on four cores, NB accumulation, RCW updates |
| `tb_ws_ocs_scheduler` | request sequence, reuse, RCW vs exposed rows, traffic counters |
| `tb_nl_fusion_ctrl` | softmax, group RMSNorm and global-RMS rescale against a real-number model; latencies |
| `tb_rcw_cim_top` | full design at default size: INT8, INT4, BF16 and decode GEMMs against a reference product, softmax, group and global RMSNorm, mode switches; every mechanism is counted |

| `tb_llama_workload` | INT4 tiles shaped like 7B-model layers (prefill: 24 tokens, NB = 3, KB = 2; decode: one token) at default size; outputs, and DRAM traffic and weight-row writes against the WS-OCS closed forms |

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog. The
top-level testbench generates all its weights, LUT coefficients and inputs itself, and
models the DRAM behind the request port.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_rcw_cim_top \
    -y rtl +libext+.sv -Irtl rtl/rcw_pkg.sv tb/tb_rcw_cim_top.sv
./obj_dir/Vtb_rcw_cim_top
```

Any other testbench works the same way: replace the top module and the tb file. The
full top-level build takes about a minute, and the simulation takes a few seconds.
