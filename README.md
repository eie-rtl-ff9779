# EIE: a sparse matrix-vector engine for compressed neural-network layers

This is synthesizable SystemVerilog (IEEE 1800-2017) for the Efficient Inference Engine (EIE), an
accelerator for the fully-connected layers of deep neural networks. It computes one layer

    b = ReLU_next( W * a )        b_i = sum over j of W_ij * a_j

when the weight matrix W has been *pruned* and *weight-shared*:

- **Pruned:** most weights are zero and are not stored.
- **Weight-shared:** each stored weight is a 4-bit code into a table of 16 shared 16-bit values.

The engine saves work twice:

- It skips every **zero weight**, because only non-zero entries are stored.
- It skips every **zero input activation**. Only non-zero a_j are broadcast, so a whole column of W
  is never touched when its activation is zero.

A layer that fits stays entirely in on-chip SRAM, so no weight is fetched from DRAM during inference.

At its default size, the engine has **64 processing elements (PEs)**. Each PE has:

- 64 KB of compressed-matrix SRAM;
- 16K column pointers;
- two 64-entry activation register files;
- a 2 KB activation SRAM.

The PEs sit under one **central control unit (CCU)**, which talks to a host processor.

## How a layer is laid out

**Interleaving.** Row i of W, and output activation b_i, belong to PE `i mod 64`. Input activation
a_j is held by PE `j mod 64`, in its source register `j / 64`. One pass therefore covers up to
64 × 64 = 4096 inputs and 4096 outputs. Larger layers run as several passes (see *Batches* below).

**Compressed sparse column (CSC) slices.** Each PE stores its slice of W column by column. Each
non-zero becomes one 8-bit entry:

- `v` (upper nibble): the 4-bit weight code;
- `x` (lower nibble): how many of this PE's rows were skipped since the previous entry in the
  column, or since the column's top for its first entry.

Some examples:

- Codes 0, 1, 0 give local rows 0, 2, 3.
- A gap longer than 15 rows is bridged with a *padding entry* `v=0, x=15`. It adds zero and moves
  16 rows on.
- Code 0 is reserved for padding: the codebook always returns 0 for it.

**Pointers.** Entries of consecutive columns are packed one after another into the sparse-matrix
SRAM:

- The SRAM is 64 bits wide, so 8 entries per row; entry k of a row is in bits `[8k+7:8k]`.
- Column j's entries sit between pointers `p[base+j]` and `p[base+j+1]`. `base` is the start of
  this pass's pointer array, given in the run command.
- Pointers are 16-bit entry addresses. The top 13 bits select the SRAM row and the low 3 bits the
  entry.
- Pointers live in two single-ported banks, even and odd addresses, so both ends of a column are
  read in one cycle.

**Arithmetic.** Activations and shared weights are 16-bit signed fixed point, Q7.8 (8 fraction
bits). Each entry does `b = sat16(b + ((S[v] * a_j) >>> 8))`.

## Block map

| File | Block | What it does |
|---|---|---|
| `rtl/eie_pkg.sv` | package | Widths, command and data structures |
| `rtl/eie_top.sv` | top | 64 PEs, the tree of 16+4 selection nodes, the CCU, the broadcast bus |
| `rtl/ccu.sv` | central control unit | Host interface, I/O and computing modes, root tree node, broadcast and stall, end of pass |
| `rtl/lnzd_node.sv` | leading non-zero detect node | Merges the offers of 4 children, smallest column index first |
| `rtl/eie_pe.sv` | processing element | Wires the units below |
| `rtl/act_queue.sv` | activation queue | 8-deep FIFO of broadcast (a_j, j) pairs |
| `rtl/ptr_read_unit.sv` | pointer read unit | Reads p[j] and p[j+1] from the even and odd banks |
| `rtl/spmat_read_unit.sv` | sparse-matrix read unit | Issues one (v, x) entry per cycle, reading a 64-bit row once per 8 entries |
| `rtl/arith_unit.sv` | arithmetic unit | 4-stage multiply-accumulate with bypass |
| `rtl/weight_decoder.sv` | codebook | 16 × 16-bit shared weights |
| `rtl/addr_accum.sv` | address accumulator | Relative counts to absolute local row |
| `rtl/act_rw.sv` | activation read/write | Source and destination register files with role swap; 1024-word activation SRAM; batch copies |
| `rtl/pe_nzdetect.sv` | PE non-zero detector | Offers the PE's non-zero (after ReLU) source activations in index order |
| `rtl/relu.sv` | ReLU | max(x, 0) |
| `rtl/sram_sp.sv` | SRAM | Single-port, registered read, used for every PE memory |

## Data flow of one pass

1. **Offer.** Every PE's detector scans its source registers, through ReLU, and offers its
   non-zero activations as (value, global index j) in increasing j.
2. **Select.** The quadtree picks the smallest j at each level; its root sits inside the CCU.
   A node chooses only once each child has either made an offer or reported *done*. This is what
   keeps the broadcasts in increasing column order.
3. **Broadcast.** The CCU puts the selected pair into every PE's activation queue in the same
   cycle. It holds the broadcast, raising `stall`, while any queue is full. The queues let a busy
   PE fall up to 8 columns behind while the others run on.
4. **Multiply-accumulate.** Each PE turns a queue entry into a column descriptor:
   - the pointer read unit reads the two pointers;
   - the sparse-matrix read unit issues the column's entries, one per cycle;
   - the arithmetic unit decodes the weight, adds up the row, multiplies, and accumulates into the
     destination register of that row.

   An entry that hits the same accumulator as the one just before it takes the adder output
   directly (bypass). One two entries back reads the value being written (forwarding). The
   pipeline never stalls.
5. **End of pass.** The pass ends when the tree is empty and no PE is busy for two cycles. If the
   run command asked for it, the source and destination files then swap roles, so the outputs
   become the next layer's inputs. ReLU is applied as they are read.

## Host interface (ports of `eie_top`)

| Port | Dir | Meaning |
|---|---|---|
| `clk`, `rst_n` | in | Clock; asynchronous active-low reset |
| `host_req` (`host_req_t`) | in | `{op[2:0], pe[7:0], target[2:0], addr[15:0], wdata[63:0]}` |
| `host_req_valid` / `host_req_ready` | in / out | Handshake. Ready is high only in I/O mode, when no pass or copy is running |
| `host_rsp[63:0]`, `host_rsp_valid` | out | Read data, two cycles after an `OP_READ` is accepted |
| `mode` | out | 1 while a pass is computing |
| `stall` | out | 1 in a cycle where the broadcast is held by a full queue |

Commands (`op`):

- `OP_WRITE` and `OP_READ` access PE `pe`, one access per cycle. `target` selects what:

  | `target` | Memory | Access | `addr` |
  |---|---|---|---|
  | `T_SPMAT` | sparse-matrix SRAM | write only | row (64-bit data) |
  | `T_PTR` | pointer banks | write only | pointer index; the low bit picks the bank |
  | `T_CODEBOOK` | codebook | write only | code |
  | `T_SRC` | source register | read and write | register |
  | `T_DST` | destination register | read and write | register |
  | `T_SRAM` | activation SRAM | read and write | word |

- `OP_RUN` runs one pass. `wdata` holds a `run_cmd_t`, the fields from the LSB up:
  - `len[15:0]`: input length; columns 0..len-1.
  - `ptr_base[15:0]`: start of the pass's pointer array.
  - `clear_dst`: zero the accumulators first.
  - `swap`: swap the register files at the end.
- `OP_LOAD_SRC`: in every PE, copy activation SRAM words `addr .. addr+63` into the source
  registers.
- `OP_STORE_DST`: in every PE, copy the destination registers to activation SRAM words
  `addr .. addr+63`.
- Each copy takes 65 cycles.

**Batches.** A layer with more than 4096 inputs or outputs is split:

- **Output batches:** each has its own pointer array (its own `ptr_base`) and its own run.
- **Input batches:** each is loaded from the activation SRAM with `OP_LOAD_SRC` and run with
  `clear_dst=0` after the first. Column j of batch k is global column `k*4096 + j`.
- **Results:** finished outputs go back to the SRAM with `OP_STORE_DST`.
- **Capacity:** the 64 × 1024-word activation SRAM holds 65,536 activations.

## Timing

- **Pointer read unit:** one column every 2 cycles at most, one cycle after the queue entry is
  popped.
- **Sparse-matrix read unit:** one entry per cycle, with no bubbles between rows or columns.
- **Arithmetic unit:** an entry is written to its accumulator 3 cycles after it is issued.
- **Tree:** each level adds one register stage.
- **Broadcast:** the bus is a single combinational fan-out, not pipelined.

A pass therefore takes roughly the entry count of the busiest PE (padding included), plus the
pipeline fill. The measured example is one AlexNet FC7-shaped layer (4096×4096, 9% weights, 35%
non-zero inputs) on the default 64-PE engine:

- the pass took 9,868 cycles;
- the busiest PE had 8,259 non-padding entries.

## Sizes and choices

**Taken from the published design:**

- 64 PEs;
- 8-deep activation queues;
- 64 + 64 activation registers per PE;
- 2 KB activation SRAM;
- 16-bit pointers in even and odd banks (32 KB);
- 64-bit sparse-matrix rows of 8 entries;
- 4-bit codes and relative indices;
- 16 shared weights;
- 16-bit fixed point;
- the 4-stage arithmetic pipeline with bypass;
- a quadtree of 4-input leading-non-zero nodes (16 + 4 + the root);
- the broadcast stall on a full queue;
- the CCU's I/O and computing modes.

**Different from the published design:**

- **Sparse-matrix SRAM size.** It is 64 KB per PE (8,192 rows × 64 bits), the most a 16-bit
  pointer with a 13-bit row field can address. The published design states 128 KB per PE in one
  place, which its own pointer width cannot reach.
- **Broadcast bus.** It is a plain fan-out. The published design routes it as an H-tree and notes
  it may be pipelined.

**This design's own choices** (the published design does not specify them):

- the Q7.8 format and saturating accumulation;
- code 0 reserved as the zero weight;
- ordering by smallest index, and the *done* wires in the tree;
- valid/ready handshakes;
- the command encoding and batch-copy commands;
- the end-of-pass test;
- the one-cycle registered SRAM read;
- a pointer read rate of one column per 2 cycles.

## Which published benchmarks fit

Each layer's sizes and densities are as published. Entry counts are estimates: non-zeros / 64, plus
padding estimated from a geometric row-gap model.

| Layer | Inputs × outputs, weights kept | Entries per PE (of 65,536) | Pointers (of 16,384) | Fits |
|---|---|---|---|---|
| AlexNet FC6 | 9216 × 4096, 9% | ~68K | 9,219 | no: matrix too large (would fit in 128 KB) |
| AlexNet FC7 | 4096 × 4096, 9% | ~30K | 4,097 | yes, simulated at full size |
| AlexNet FC8 | 4096 × 1000, 25% | ~16K | 4,097 | yes |
| VGG-16 FC6 | 25088 × 4096, 4% | ~134K | 25,095 | no: matrix and pointers too large |
| VGG-16 FC7 | 4096 × 4096, 4% | ~22K | 4,097 | yes |
| VGG-16 FC8 | 4096 × 1000, 23% | ~15K | 4,097 | yes |
| NeuralTalk We | 4096 × 600, 10% | ~5K | 4,097 | yes |
| NeuralTalk Wd | 600 × 8791, 11% | ~11K | 1,803 | yes, 3 output passes |
| NeuralTalk LSTM | 1201 × 2400, 10% | ~6K | 1,202 | yes (M×V only) |

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| Testbench | Checks |
|---|---|
| `tb_sram_sp` | Random reads and writes against a model; read latency; output hold |
| `tb_act_queue` | Random push/pop against a queue model; full and empty flags |
| `tb_ptr_read_unit` | Both pointers for even and odd addresses with a pointer base; order; latency; back-pressure |
| `tb_spmat_read_unit` | Exact entry stream; one entry per cycle with no gaps; one SRAM read per row change |
| `tb_weight_decoder` | Every code, including the forced zero |
| `tb_addr_accum` | The published CSC example and random streams |
| `tb_arith_unit` | Final accumulators against a reference, with same-row hazards one and two entries apart; 3-cycle write latency |
| `tb_relu` | All 65,536 inputs |
| `tb_act_rw` | Swap, clear, host access, and SRAM load/store copies with their 65-cycle duration |
| `tb_pe_nzdetect` | Offers against the reference list for random lengths; done |
| `tb_lnzd_node` | Merged output order and completeness; done |
| `tb_ccu` | Host access and read latency; run start fields; ordered broadcast under random stalls; end of pass; swap; copies |
| `tb_eie_pe` | One PE end to end: matrix loading, broadcasts with back-pressure, accumulators, PE addressing, clear |
| `tb_eie_top` | 16-PE engine, three layers chained (see below) |
| `tb_eie_full` | Default 64-PE engine, one full AlexNet FC7-shaped layer |

`tb_eie_top` chains three layers:

- 300 → 1000;
- 1000 → 200, using ReLU and the swap;
- 1500 → 600, in two input batches through the activation SRAM.

It checks every output against a reference. It counts each mechanism and fails if one never
happens: stalls, bypasses, forwarding, padding entries, empty columns, broadcasts in order.

`tb_eie_full` checks all 4,096 outputs. It simulates in about 20 s of CPU time, after about 2 minutes of compiling.

Each testbench was also run against a deliberately broken copy of its module, with one line changed (for example a missing +1 in the row sum, or the two nibbles of an entry swapped). Every broken copy made its testbench fail.

Simulate with Verilator 5 (two-state), for example:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/eie_pkg.sv tb/tb_eie_top.sv --top-module tb_eie_top
    obj_dir/Vtb_eie_top

Verilator finds the other modules by file name in `rtl/` and `tb/`.

## Not built

- **The host processor and its DMA engine.** Their side of the interface is the top's
  `host_req` / `host_rsp` ports, driven by the testbenches.
- **Clock network and physical layout.** This includes the H-tree routing of the broadcast and
  the 800 MHz target.
- **The element-wise non-linearities of an LSTM cell** (sigmoid, tanh, gate products). Only the
  matrix-vector part runs here.
- **Power and area models.**
