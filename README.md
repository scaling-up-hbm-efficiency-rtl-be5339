# Approximate Top-K SpMV on HBM: RTL

This accelerator finds the rows of a large sparse matrix `A` that have the largest dot products with a dense vector `x`. This is the Top-K of `y = A·x`. The typical use is embedding similarity search: each row of `A` is a sparse embedding, `x` is the query, and the answer is the `K` most similar embeddings.

The design has three main ideas:

1. **Bandwidth first.** The matrix streams from high-bandwidth memory (HBM) in a compact block format called BS-CSR. Every 512-bit memory beat holds 15 non-zeros and all the row structure needed to use them. A core therefore consumes one full beat per clock cycle.
2. **Many independent cores.** The rows are split into `C = 32` partitions, one per HBM pseudo-channel. One core processes each partition.
3. **Approximate Top-K.** A core does not compute the exact Top-K of its partition against a global ranking. It keeps only its own best `k = 8` rows, and the host merges the `32 × 8 = 256` candidates. The answer is exact for any `K ≤ 256` unless more than 8 of the true Top-K fall into one partition. For evenly shuffled rows this is rare.

Arithmetic is unsigned fixed point, Q1.19 (20 bits). The rows and `x` are assumed L2-normalised, so every value is below 1.

## BS-CSR packets

A packet is one 512-bit beat. With `B = 15` non-zeros per packet, `V = 20` value bits and `M = 1024` columns (10 index bits), it is laid out from bit 0 upward:

| bits      | field        | meaning |
|-----------|--------------|---------|
| 0         | `new_row`    | 1: the packet's first row is a new row. 0: it continues the last row of the previous packet |
| 1–60      | `ptr[0..14]` | 4 bits each: cumulative count of non-zeros at the end of each row in this packet; unused entries are 0 |
| 61–210    | `idx[0..14]` | 10 bits each: column index of each non-zero |
| 211–510   | `val[0..14]` | 20 bits each: value of each non-zero (Q1.19) |
| 511       | unused       | |

The field order follows the usual drawing of the format. The exact bit positions are this design's choice. The package `topk_spmv_pkg` provides `idx_off()` and `val_off()` for them.

Row `j` of a packet owns the products `ptr[j-1] .. ptr[j]-1`, with `ptr[-1] = 0`. The first zero in `ptr` ends the list. Packets carry no row numbers. Rows are numbered by counting them, so a row that is split across two packets must be counted only once. `new_row` exists for that.

A partition is a run of packets at a contiguous address in one HBM channel. Its packet count is given at start.

## The core pipeline

Each `topk_spmv_core` is a pipeline. It accepts one packet per cycle and has no stall path after the FIFO.

```
 HBM ──AXI4 R──► hbm_reader ──► scatter_stage ──► aggregation_stage ──► summary_stage ──► topk_update ──► topk_merge ──► result_writer ──AXI4 W──► HBM
                 (FIFO, bursts)   (x lookup, ×)     (per-row sums)       (split rows, r)    (r buffers of k)  (r·k → k)      (1 beat)
```

- **hbm_reader** issues 256-beat AXI4 INCR read bursts, starting at the partition base address. It asks for a new burst only when its 512-entry FIFO has room for the whole burst, counting beats still in flight. `rready` can therefore stay high, and the memory side never waits on the compute side. The reader marks the partition's last packet.
- **scatter_stage** looks up `x[idx[b]]` for all 15 non-zeros at once and multiplies each by `val[b]`. It takes 2 cycles. Products are truncated to Q1.19 and saturate.
- **x_vector_store** serves those 15 random reads per cycle. It is built from `ceil(B/2) = 8` identical copies of `x` in `uram_bank`s, and each bank has two read ports. Lookup `j` uses port `j mod 2` of copy `j/2`. A write goes to all copies.
- **aggregation_stage** forms the sum of each row's products using `ptr`, in one cycle. All 15 segment sums are computed in parallel. Sums saturate at the largest code.
- **summary_stage** (one cycle) turns the packet's partial row sums into finished, numbered rows. This is the subtle part of the design, so it has its own section below.
- **topk_update** holds `r = 4` Top-k buffers (`topk_buffer`), one per lane of the summary stage. Each cycle, every lane's finished row is compared with its buffer's current minimum. The row replaces the minimum if the buffer still has an empty entry or if the row's value is ≥ the minimum. The lanes are independent, so all four can update in the same cycle.
- **topk_merge** starts once the last row has passed. It feeds the `r·k = 32` candidates, one per cycle, into a single Top-k buffer. `done` rises `r·k + 1` cycles after `start`. The k results are not sorted.
- **result_writer** writes the k results as one 512-bit AXI4 beat at the core's result address. Each result is 64 bits: bits 31:0 hold the row index within the partition, and bits 63:32 hold the value, zero-extended. An empty entry has row `0xFFFFFFFF`. This happens when the partition has fewer than k rows.

The core's controller runs `IDLE → RUN → DRAIN → MERGE → WRITE → IDLE`:
- In RUN, packets flow.
- DRAIN waits for the last packet to leave the pipeline.
- MERGE and WRITE are described above.
- `done` pulses at the end.

A run takes about one cycle per packet, plus the HBM latency, a few pipeline cycles, 33 merge cycles and the write. Between runs, `clear` empties the buffers and the held row.

## Rows split across packets (summary_stage)

Between packets the stage keeps the last row of the previous packet. It stores that row's partial sum and its row number. For each packet it builds `B + 1 = 16` slots:

- **Slot 0** is the held row from the previous packet.
  - If `new_row = 1`, the held row is complete and is finished in this slot.
  - If `new_row = 0`, the packet's first row continues it. Its value is added to row 0 of this packet, and slot 0 stays empty.
- **Slot j+1** is the packet's row `j`. It is finished if another row follows it in the packet. The packet's last row is not finished, because the next packet may continue it. It becomes the new held row.
- **Partition end.** In the partition's final packet, the last row is finished too. Without that, the last row of every partition would be lost.

At most `r = 4` finished rows leave the stage per packet. These are the first four in slot order. Any further finished rows of that packet are dropped, and their number is reported on `out_dropped`. With 15 non-zeros per packet and embedding rows of a few tens of non-zeros, more than four rows rarely finish in one packet. The limit saves the area of 12 comparators and buffers per core. A dropped row can only matter if it belonged in the Top-K. The testbenches' reference model applies the same rule, so the results are checked exactly, drops included.

A worked example, with values shown as decimals. The held row has 0.3. The packet has `new_row = 1` and rows with sums 0.4, 0.5, 0.1 and 0.7. The finished rows are 0.3, 0.4, 0.5 and 0.1. The 0.7 row is held for the next packet.

## Multi-core top (topk_spmv_top)

`topk_spmv_top` instantiates 32 cores. Each core has its own complete AXI4 master port (AR, R, AW, W, B), given as arrays indexed by core, and is meant for one HBM pseudo-channel. `x` is written once through a single port (`x_we`, `x_waddr`, `x_wdata`) and is broadcast to every core's store. A single `start` launches all cores with per-core inputs:
- `mat_addr`: the matrix address.
- `num_pkts`: the packet count.
- `out_addr`: the result address.

`busy` stays high until every core has written its results. `done` then pulses, and `core_done` shows each core's state.

Some output bits are constant:
- `r_ready` is held high.
- Write strobes are all ones.
- Size and burst type are fixed.

The host must add each partition's first row number to the row indices it reads back, then merge the 256 candidates.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `C` | 32 | cores, one per HBM pseudo-channel |
| `B` | 15 | non-zeros per packet |
| `V` | 20 | value width (Q1.19) |
| `IW` | 10 | column index bits; `M ≤ 2^IW` |
| `PW` | 4 | `ptr` entry bits, `ceil(log2(B+1))` |
| `M` | 1024 | length of `x` held on chip |
| `K` | 8 | results per core (`k`) |
| `R` | 4 | finished rows tracked per packet (`r`) |
| `BURST` | 256 | beats per read burst |
| `FIFO_DEPTH` | 512 | packets buffered between memory and compute |

Any combination with `B·(PW + IW + V) + 1 ≤ 512` gives a valid packet. For example, a 25-bit datapath works with `V = 25, B = 13`, and a 32-bit one with `V = 32, B = 11`. Both have been simulated on a single core (`tb_value_widths`). The 32-core top has been simulated only at the defaults.

What the defaults hold:
- Matrices of up to about 6·10^8 non-zeros over 32 channels. That is about 80 MB per 256 MB channel.
- Up to 2^32 packets and 2^32 rows per partition.
- Any `K ≤ 256` at the host.

## Where this RTL departs from, or goes beyond, the published description

- **Finished rows.** Read literally, the algorithm's pseudo-code would also finish the packet's last row. The worked example holds that row back, and the RTL follows the example. The partition-end flush of the last row is added here.
- **`ptr` width.** One sentence sizes `ptr` entries as `floor(log2 B)` bits, and another formula uses `ceil(log2 B)`. Both give 3 bits for `B = 15`, yet cumulative counts up to 15 need 4 bits. The stated 4-bit example is used, and the 511-bit total fits.
- **`ptr` meaning.** `ptr` is taken as cumulative non-zero counts. A simplified drawing elsewhere shows row numbers instead.
- **`r = 4`.** The guidance is `B/4 < r < B/2` and "between 4 and 8". This design uses 4. When more than r rows finish, which ones are kept is this design's choice: the first r.
- **Replacement rule.** A row enters a buffer when its value is ≥ the buffer's minimum, as in the algorithm's pseudo-code. One drawing says "<"; that is not followed.
- **Merge.** The merge of the r buffers is drawn as a tree but not described. It is built as a sequential 32-cycle merge. This adds nothing measurable to runs of thousands of cycles.
- **Bursts.** 256-beat bursts of 64 bytes cover 16 KB. That crosses the general AXI4 4 KB boundary rule, so partition bases must be 16 KB aligned. HBM controllers that enforce the rule would need 64-beat bursts.
- **Number format.** Products are truncated and all sums saturate. Rounding and accumulator width are not specified.
- **Floating point.** A floating-point variant is not built. Only the fixed-point datapath exists.
- **Host and memory.** The host side (loading the matrix, merging the 256 candidates) and the HBM itself are outside the RTL. A behavioural AXI4 memory model in `tb/hbm_model.sv` stands in for HBM.

## Verification

Every block has a self-checking testbench in `tb/`. Each testbench compares the block's outputs with an independent model and prints `TB_RESULT checks=N failures=M`. A watchdog ends any run that hangs. `tb_bscsr_pkg.sv` holds the reference:
- a random BS-CSR matrix generator and packer;
- the full algorithm, including the r limit and the split-row rule;
- a Top-k model.

| testbench | what it checks |
|-----------|----------------|
| `tb_uram_bank`, `tb_x_vector_store` | two-port reads, write broadcast, 1-cycle latency |
| `tb_scatter_stage`, `tb_aggregation_stage` | products and per-row sums of random packets, saturation, latency |
| `tb_summary_stage` | split rows, `new_row`, the r limit, drops, partition-end flush, row numbering |
| `tb_topk_update`, `tb_topk_merge` | buffer contents against a model; merge result and its `r·k + 1` cycle latency |
| `tb_hbm_reader`, `tb_result_writer` | streams of 1 to 1000 packets against a stalling memory: order, last flag, burst addresses and lengths, no FIFO overflow; result beat format |
| `tb_topk_spmv_core` | whole partitions through one core: short rows (drops by the r limit), long rows (split across packets), a partition of more than one burst, and one whose best rows are in its final packet; run time against one packet per cycle |
| `tb_topk_spmv_top` | all 32 cores at default sizes for two complete runs, with stalling memories and an empty partition. Counts rows continued across packets, dropped rows, replacements in full buffers, multi-burst partitions and stalls; any of these that never occurs counts as a failure |
| `tb_value_widths` | one core at 25-bit values with B = 13 and at 32-bit values with B = 11, with short and long rows, against the same reference model |
| `tb_workloads` | uniform, gamma-distributed and GloVe-like row lengths on all 32 cores; precision of the 256 candidates against the exact Top-K at K = 8, 32, 100; throughput |

On these scaled-down matrices the cores sustain about 410–440 non-zeros per cycle in total, against a peak of 32 × 15 = 480. The gap is the fixed start-up and merge overhead of short partitions.

To simulate one testbench with Verilator 5, for example the top:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/topk_spmv_pkg.sv tb/tb_bscsr_pkg.sv tb/tb_topk_spmv_top.sv --top-module tb_topk_spmv_top
./obj_dir/Vtb_topk_spmv_top
```

Testbenches that do not import `tb_bscsr_pkg` do not need that file on the command line. The full-size top testbench takes a few minutes.

## Files

- `rtl/topk_spmv_pkg.sv`: shared sizes, AXI structs and packet field offsets.
- `rtl/`: one module per stage as named above. It also holds the helpers `sync_fifo` and `topk_buffer`, plus `topk_spmv_core` and `topk_spmv_top`.
- `tb/`: the testbenches, the reference package `tb_bscsr_pkg` and the memory model `hbm_model`.
