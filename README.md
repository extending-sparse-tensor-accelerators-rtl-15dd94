# A sparse tensor accelerator that accepts many compression formats

Sparse matrices and tensors are stored in whatever format is most compact for their density and shape, such as RLC, CSR, COO or dense. They are multiplied most efficiently in a format matched to the compute array, which is often a different one. This design keeps both choices open. A weight-stationary PE array is extended so that it computes directly on several *accelerator formats*: dense, CSR or COO for the streamed operand A, and dense or CSC for the stationary operand B. A hardware converter, MINT, translates the *memory format* into the accelerator format inside the on-chip scratchpad. MINT shares one parallel prefix-sum unit and one bank of parallel dividers among all its conversions.

All RTL is SystemVerilog-2017 in `rtl/`, one module or package per file. Each block has a self-checking testbench in `tb/`.

## The datapath at a glance

```
 memory stream ──► MINT ──┐                    ┌──► PE 0 ──┐
 (RLC / dense)    (shared │   scratchpad       │    PE 1   │
                  prefix  ├──► 8 field banks ──► streamer ─► ...  ├─► output buffer
 host port ───────sum,    │   (vector ports)   │  (tagged  │  PE N-1 │   (one bank/PE,
                  divmod) ┘                    │  bus)     └────────┘   accumulating)
```

`sta_top` wires together the following blocks:

- **scratchpad**: 8 banks with one vector read and one masked vector write per bank per cycle.
- **mint**: the converter.
- **acc_streamer**: reads A in its accelerator format and packs bus beats.
- **pe_array**: the PEs on a registered broadcast bus.
- **output_buffer**.

The scratchpad has three users:

- MINT has first claim on every bank.
- The streamer reads when MINT does not.
- The host port is used for bypass (data already in an accelerator format), for loading, and for reading results.

## The tagged broadcast bus

Each beat is `LANES` lanes of a 2-bit tag plus a 32-bit value. The tags are *none*, *data*, *col_id* and *row_id*. The tag is the data/metadata flag that lets one bus carry every format. The streamer uses three lane layouts:

| A format | lanes of one beat | beats for a row with n nonzeros (K columns) |
|---|---|---|
| Dense | D = min(VEC, LANES-1) data values, then one row_id | ceil(K / D) |
| CSR | P = min(VEC, (LANES-1)/2) (data, col_id) pairs, then one row_id | ceil(n / P); empty rows send nothing |
| COO | T = min(VEC, LANES/3) (data, col_id, row_id) triples | ceil(n / T); a change of row ends the beat |

The example used throughout the testbenches is a 4×8 matrix A with nonzeros at (0,0), (0,2), (0,4) and (3,5). It uses 4 PEs, 5 lanes, 4 multipliers and 8-word buffers. Streaming A takes 8 beats dense, 3 beats in CSR and 4 beats in COO. `tb_acc_streamer` checks exactly those counts.

At the default size, `LANES = 16` (a 512-bit bus) and `VEC = 8`.

## Inside a PE (`pe.sv`)

Each PE holds one column of B, whose column number is in **Creg**. B sits in a `BUF`-word buffer. Every entry can hold either data or metadata:

- **Dense B**: entry k holds B[k][c], and the streamed column index k addresses it directly.
- **CSC B**: the first `meta_cnt` entries hold the row indices of the column's nonzeros. The nonzeros themselves sit at `meta_cnt + e`.

`meta_cnt` is a run-time input, so the split between metadata and data is free. The tests use half of the buffer for metadata.

For each multiplier m, the PE takes the m-th data lane of the beat and its k. For dense A, k is a running column count within the row; otherwise k is the value of the col_id lane that follows.

With CSC B, a bank of equality comparators (one per buffer entry) matches k against the metadata entries. A one-hot-to-binary encoder turns the match into the address of the data word. A miss means B[k][c] = 0, and that product is dropped.

The products are summed by an adder tree into a partial sum. The partial sum accumulates in **Oreg** while the beat's row_id equals **Rreg**. When the row changes, or when the streamer sends its final *flush*, the PE emits (Rreg, Creg, Oreg) and starts again. The output buffer adds the value into bank Creg mod NUM_PE at row Rreg. Passes over the same output therefore accumulate.

Timing:
- The bus is registered once in `pe_array`.
- A PE emits on the cycle after the beat that changes the row.
- Everything else is single-cycle.

The buffer is a register file, not a RAM, because every entry feeds a comparator.

## MINT: format conversion from shared parallel units

Two units are shared:

- **prefix_sum**: 32 inputs. It is a Kogge-Stone scan with one register per level, followed by an offset stage that carries the total of earlier chunks. Latency is 6 cycles, and it accepts one chunk per cycle.
- **par_divmod**: 8 lanes of restoring dividers that return both quotient and remainder. Latency is 32 cycles, and it accepts one set of 8 per cycle.

`mint.sv` routes these units, and the scratchpad, to the converter selected by `conv`. `conv` must stay stable while a conversion is busy; an assertion checks this.

| conversion | how it works |
|---|---|
| RLC → COO (`rlc_to_coo`) | Each run is the number of zeros before a nonzero. Adding 1 to every run except the first and prefix-summing gives each nonzero's linear position. Dividing that position by K gives the row (quotient) and column (remainder). Eight pairs enter per beat, fully pipelined; `done` comes 38 cycles after the last beat. |
| CSR → CSC (`csr_to_csc`) | Chunks of 8 col_ids are sorted by a bitonic network (`sort_network`). Equal ids are then grouped by `cluster_counter`, and each group's count is added into col_ptr. A prefix sum over col_ptr (`ptr_scan`) turns the counts into pointers. The elements are then placed row by row. |
| CSR → BSR (`csr_to_bsr`) | Works one row block at a time. Each col_id is divided by the block size. The first element touching a block column allocates a zero-filled block. Block counts per row block are scanned into row_ptr at the end. |
| Dense → CSF (`dense_to_csf`) | A prefix sum of keep bits gives each nonzero its packed position. Its linear index is divided by y_dim·z_dim and by z_dim to give x, y and z. The nonzeros are staged as COO, then a tree pass writes x_idx, x_ptr, y_idx and y_ptr. |

Outputs go to fixed banks:

| bank | contents |
|---|---|
| 0, 1, 2 | values, indices and pointers of the input format |
| 3 | output values |
| 4, 5 | output indices |
| 6, 7 | output pointers |

Dense → CSF uses some banks differently; see `dense_to_csf.sv`.

## Where the design goes beyond, or departs from, its source

- **Buffer size.** The buffer is 512 bytes (128 words). A 128-byte figure for the PE area also appears in the literature on this design, but the evaluation configuration is 512 bytes.
- **y index formula.** The Dense → CSF y index uses the row-major formula (remainder of x divided by z_dim). A published version of the formula divides by y_dim; the two agree only for equal dimensions.
- **BSR block order.** BSR blocks inside a row block are numbered in the order they are first touched, not sorted by block column.
- **Accelerator-unit reuse not built.** The variant of MINT that borrows the accelerator's adder tree and activation-unit dividers is not built. MINT has its own units.
- **No tiling controller.** Nothing tiles large workloads: one pass holds A in one 4096-word bank, a column of B in 128 words, and up to 256 output rows. Larger matrices must be split by the host. Only the four conversions above exist.
- **Sizes chosen here.** The following are this design's choices:
  - scratchpad size (8 × 4096 words, 8-word vectors);
  - output buffer depth (256 rows);
  - bus tag encoding;
  - load port;
  - scratchpad arbitration.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `NUM_PE` | 2048 | PEs (16384 multipliers in total) |
| `LANES` | 16 | bus lanes of 32 bits (512-bit bus) |
| `VEC` | 8 | multipliers per PE |
| `BUF` | 128 | words per PE buffer (512 B) |
| `SP_DEPTH` | 4096 | words per scratchpad bank |
| `OB_ROWS` | 256 | rows per output-buffer bank |
| `PS_N`, `DM_N` (package) | 32, 8 | prefix-sum inputs and divider lanes |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog. For example:

```
verilator --binary --timing --assert -Irtl rtl/sta_pkg.sv -y rtl tb/tb_sta_top.sv --top-module tb_sta_top
./obj_dir/Vtb_sta_top
```

Which testbench to run:

- **`tb_sta_top`**: the end-to-end test at the small example size. It runs every conversion, every A and B format, bypass, row-change and flush emissions, and accumulation. It fails if any of these never happens.
- **`tb_sta_full`**: runs the full-size design with default parameters. It takes minutes to build.
- **One testbench per block**: each compares the block against a reference computed in the testbench. The converter tests also reproduce the small examples that explain each conversion.
