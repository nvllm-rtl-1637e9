# NVLLM in-flash inference datapath: RTL

This is synthesizable SystemVerilog for the digital parts of NVLLM, a 3D-NAND
centred accelerator for running large language models on edge devices. NVLLM
splits each decoder layer along its weights:

- The feed-forward (FFN) weights are the larger, regular part. They stay in
  the NAND array and are multiplied on the CMOS wafer bonded under it, straight
  from the plane page buffers.
- Attention and its Q/K/V/O projections run on a small NPU with its weights in
  LPDDR5X DRAM.

The in-flash side has one hard problem. Raw NAND reads contain bit errors, and
the arithmetic happens before any conventional ECC. NVLLM solves it with an
*out-of-order error-corrected dot product*:

- every weight segment is checked inline as it streams past the multipliers;
- a clean segment is multiplied at once;
- a faulty segment is set aside, corrected by a shared pool of slow correctors,
  and its product added late to the right partial sum.

The multipliers never wait for the corrector. A second mechanism, the
KV-cache-aware scheduler, moves Q/K/V/O columns from the NPU to the NAND side
as the NPU falls behind with a growing KV cache.

The RTL covers the NAND-side dataflow from plane to result buffer, the NPU's
dot-product unit, and the scheduler and dispatcher. A behavioural model
stands in for the NAND plane itself.

## 1. The weight segment and its check word

Everything on the NAND side moves in *segments*: 16 INT8 weights, 128 bits, the
width one lane multiplies per cycle. A plane cluster is 2 × 2 planes read in
lock step. Each plane contributes one 32-bit page-buffer row per step, so one
step of a cluster yields one segment:

| bits of the segment | plane |
|---|---|
| `data[31:0]`   | plane 0 |
| `data[63:32]`  | plane 1 |
| `data[95:64]`  | plane 2 |
| `data[127:96]` | plane 3 |

Each 32-bit row carries a 7-bit SEC-DED check word in the plane's spare area,
so a segment travels with a 28-bit parity segment. Plane p's check word sits
at `par[7p+6:7p]`. In `nv_pkg`, the struct `wseg_t` is `{data[127:0],
par[27:0]}`. The source paper does not name its error code. The extended
Hamming (39,32) code used here is this design's choice:

- data bit i sits at Hamming position `ham_pos(i)`, the (i+1)-th position
  that is not a power of two;
- check bits [5:0] are the XOR of the positions of the set data bits;
- bit 6 is the overall parity over data and check bits.

The syndrome therefore tells three cases apart:

- a single flipped data bit: the Hamming part names it and the overall parity
  is wrong;
- a single flipped check bit: the data is already right;
- two flipped bits: the Hamming part is non-zero but the overall parity is
  right, so the row is reported as uncorrectable and passed on unchanged.

The checker (`ecc_checker`) is combinational. It flags a segment if any of
the four row syndromes is non-zero. The corrector (`ecc_corrector`) works on
one row per cycle. Its result is ready 5 cycles after it accepts a segment.
It also reports whether it changed any data bit and whether a row was
uncorrectable.

## 2. From plane to lane

```
 plane x4 --rows--> plane_cluster --segments--> cluster_fifo --> crossbar --> lane l
    ^                                                                (8 x 8, static map)
    '-- cluster_prefetcher (page reads, row drains), one per cluster
```

**Plane model (`nand_plane`, behavioural).**
- A page read (`rd_cmd`) senses a page into the page buffer. This takes
  `T_READ` = 1792 cycles: 5.12 µs at the NAND-side clock of 350 MHz.
- The page then moves to a cache register, and the plane can sense the next
  page while the cached one is read out a row per cycle. This cache read is
  what lets one page read hide behind the consumption of the previous page.
- The model stores only `MODEL_PAGES` pages per plane (default 2) and folds
  every page address onto them. The full address space (`PAGES` = 262144
  pages of 16 KiB per plane, 128 GiB over 32 planes) is in the port widths,
  not in storage.
- `prog_*` writes a row directly. Program time is not modelled.

**Cluster (`plane_cluster`).**
- It reads all four planes at the same page address.
- It concatenates their rows into one segment and pushes it into the cluster
  FIFO.
- The FIFO is 4096 segments deep (the 512 KiB cache FIFO split over 8
  clusters) and works first-word-fall-through.

**Prefetcher (`cluster_prefetcher`).**
- For a job of N segments it issues page reads in address order whenever the
  cluster can sense.
- It moves cached rows into the FIFO while there is room and segments are
  still owed.
- It discards the tail of the last page.
- The layer's weights are laid out contiguously in each cluster, so no
  address prediction is involved.

**Crossbar (`crossbar`).** It connects each lane to one cluster's FIFO
through a one-to-one map, which the testbenches check with an assertion. The
map is fixed for a job.

## 3. The out-of-order error-corrected lane (`oo_ecdp`)

This is the centre of the design. A lane computes, for each of `cfg_ncols`
weight columns in turn, `s = Σ w·a + bias` over `cfg_segs` segments. The
activation segment for step `ptr` comes from the activation buffer.

```
            in_seg (from FIFO)
                |
        [ fly-weight register F ] ---checker--> f_err
           |                 |
   clean: MAC#0         faulty: masked in MAC#0, moved to
   (+ bias on last)     [ faulty buffer H ] --err_*--> lane arbiter --> scoreboard
           |                                                                |
           v                                                                v
   [ commit slots 0..3 ]  <----- MAC#1 <---- rep_* (corrected segment) <----'
     psum, pending count, done
           |
   in-order commit --> res_*
```

**Per cycle.**
- The segment in F is checked.
- If it is clean, MAC#0 adds its product to the partial sum of its column's
  commit slot.
- If it is faulty, MAC#0 adds nothing and the slot's pending count goes up.
  The segment moves, with its parity and its activation segment, into the
  one-entry faulty buffer H.
- In the same cycle F takes the next segment from the FIFO. An error
  therefore costs no cycle.
- A corrected segment coming back (`rep_*`) is multiplied by MAC#1 and added
  to the slot named in the return. The slot's pending count then drops.

**When it stalls.** F can give up a faulty segment only when H is empty or is
being emptied in the same cycle. A second error, arriving while H still holds
the first (the arbiter has not yet taken it), holds F, and `stat_stall`
counts that cycle. With isolated errors the lane runs at one segment per
cycle. The lane and engine testbenches check this by cycle count.

**Columns and commit.**
- Column c uses commit slot `c mod 4`.
- A new column may start only when its slot is free, so up to four columns
  can be open while corrections are outstanding.
- The head slot commits, and offers its value on `res_*`, once its last
  segment has passed F and its pending count is zero.
- Results therefore leave strictly in column order even though segment
  products arrive out of order.
- The bias enters through MAC#0 with the last segment of a column.

**A corrected segment is always replayed.** The source paper says the
scoreboard drops an entry outright when the corrector finds nothing to
change. Here the faulty segment was masked out of MAC#0, so its product is
still missing and it is replayed even when it comes back unchanged (a
check-bit-only error). The scoreboard counts such cases in `stat_same`.

With `ECC_EN = 0` the checker is removed. This is the lane the NPU uses.

## 4. Scoreboard, correctors, arbitration (`erdpe`)

The engine has 8 lanes, one per cluster, and shares the slow parts among them:

- **Lane arbiter** (`rr_arbiter`): round robin. It moves one lane's faulty
  buffer per cycle into the scoreboard, if it has a free entry.
- **Scoreboard** (`erdpe_scoreboard`), 8 entries.
  - Each entry holds a valid flag (1 = waiting for correction, 0 = corrected)
    with the weight and parity segments, the lane, the commit slot and the
    activation segment.
  - The dispatcher sends waiting entries to the corrector hub.
  - The router returns one corrected entry per cycle to its lane as a one-hot
    `rep_valid`, then frees the entry.
  - Allocation, dispatch and return all take the lowest-numbered candidate.
- **Corrector hub** (`corrector_hub`): 8 correctors. A request goes to the
  lowest idle one. A round-robin router picks one finished result per cycle.
  With a 5-cycle corrector the pool takes more than one new segment per
  cycle.
- **Controller** (`erdpe_ctrl`).
  - It starts all lanes together.
  - It collects committed results round robin, one per cycle, and writes each
    into the global buffer at `res_base + col·8 + lane`.
  - It pulses `done` when every lane is idle, the scoreboard is empty and no
    result waits. `stat_cycles` is the job's length.

Biases are read combinationally from the global buffer at
`bias_base + col·8 + lane`. Lane l thus computes output columns l, l+8,
l+16, … of a layer. Both the interleaving and the address map are this
design's choice.

## 5. Buffers and the wafer top (`nand_cmos`)

| buffer | size | organisation |
|---|---|---|
| activation buffer | 16 KiB | 1024 × 128 bits; 8 combinational read ports; one write port |
| global buffer | 72 KiB | 18432 × 32 bits; 8 combinational bias read ports; one ERDPE write port; a host port with one-cycle read latency |

On the global buffer, the ERDPE write wins a conflict with the host port.

`nand_cmos` wires 8 clusters with their prefetchers, the crossbar, the
engine and both buffers.

**One job (`start`).**
- Every cluster streams `cfg_segs·cfg_ncols` segments from `start_page` on.
- `done` pulses when all results are in the global buffer.
- The host side loads pages (`prog_*`), activations (`act_*`) and biases
  (`gb_h_*`), and reads results back through `gb_h_*`.

## 6. NPU dot products and the KV-cache-aware split

**NPU (`npu`).** The NPU's dot-product unit is 4 lanes of the same
`oo_ecdp`, without the checker. It has an input buffer for the activation
vector and a round-robin result port. Weights arrive per lane on `dram_*`
streams, which stand for the LPDDR controller. `busy` is high while any lane
works.

**Scheduler (`kv_scheduler`).** It holds a bitmap B of H = 4096 Q/K/V/O
columns, with 1 meaning "computed on the NPU". B resets to all ones.

At every `fwd_end` (the end of a forward pass) it does the following:

1. It takes ΔC, the NPU busy cycles of this pass minus those of a reference
   pass. The reference is the first pass, and it is re-taken on the pass
   after each change of B.
2. It computes C_th = ⌊P/u⌋ · C_NPU, where:
   - P is the page-buffer bytes per cluster;
   - u is the bytes of one column;
   - C_NPU is the NPU cycles per column.
3. If ΔC ≤ C_th, or C_th = 0, it keeps B.
4. Otherwise it computes k = ⌈ΔC / C_th⌉ and clears the k highest set bits of
   B. The scan takes one bit per cycle from H−1 down.

Both divisions take one cycle each. `upd` pulses when B has changed.

**Dispatcher (`bitmap_dispatcher`).** It walks B once per `start`, one column
per cycle. Each set bit goes to the NPU stream and each clear bit to the NAND
stream, and each stream has its own ready signal.

## 7. Chip top (`nvllm_top`)

`nvllm_top` contains `nand_cmos`, `npu`, `kv_scheduler` (fed by the NPU's
busy signal) and `bitmap_dispatcher`. Everything that is not built is a port:

| not built | ports standing for it |
|---|---|
| RISC-V controller | job registers, `start`, `fwd_end`, dispatcher sinks |
| LPDDR controller and DRAM | `dram_*`, `npu_bias_*` |
| IO/DMA | `act_*`, `npu_in_*`, `gb_h_*`, `npu_res_*` |
| flash programming | `prog_*` |

The whole design runs on one clock with synchronous active-low reset. The
source runs the NAND side at 350 MHz and the NPU at 500 MHz; this RTL does
not model the two clocks.

**Running an FFN pass:**
1. Program the weights with `prog_*`. Cluster c, plane p, page `i / 4096`,
   row `i mod 4096` holds bits `[32p+31:32p]` of segment i of the cluster's
   stream, with its check word `ham_encode()` in bits [38:32].
2. Write the activation segments 0 … `cfg_segs`−1 and the biases.
3. Set `xbar_sel`, `cfg_*` and `start_page`, then pulse `start`.
4. Wait for `done`.
5. Read the result for lane l, column c at `cfg_res_base + c·8 + l`.

## 8. Parameters

| parameter | default | source |
|---|---|---|
| clusters / lanes `NC` | 8 | main configuration, 8 clusters and 8 lanes |
| planes per cluster | 4 (2 × 2) | source |
| page | 16 KiB = 4096 rows of 32 bits | source |
| `T_READ` | 1792 cycles | 5.12 µs × 350 MHz |
| `PAGES` per plane | 262144 | 128 GiB / 32 planes / 16 KiB |
| `MODEL_PAGES` | 2 | this design, stored pages per plane in the model |
| `CF_DEPTH` | 4096 segments | 512 KiB / 8 |
| activation buffer | 1024 × 128 b | 16 KiB |
| global buffer | 18432 × 32 b | 72 KiB |
| correctors `NCORR` | 8 | source |
| scoreboard `ENTRIES` | 8 | this design |
| commit slots `SLOTS` | 4 | this design |
| accumulator | 32 bits | this design |
| NPU lanes | 4 | source |
| bitmap `H` | 4096 | this design |

## 9. Where this RTL departs from the source, and what it leaves out

- INT8 only. The source's MAC also supports BF16 and an optional widened
  accumulation. Neither is built.
- The error code, its per-row organisation and the corrector latency are
  this design's. The source names neither a code nor a latency.
- Faulty segments are replayed even when unchanged (section 3).
- The plane is a behavioural model with a fixed read latency and no analog
  effects (read retries, Vread steps). It stores 2 pages per plane.
- Not built, because the source only names them: the RISC-V controller, the
  SFU, the NPU's intermediate/output/SRAM buffers, DMA and IO, the LPDDR
  controller. The DRAM and the wafer bonding are outside the logic.
  Attention itself (softmax, KV-cache storage) is therefore not computed.
  Only the NPU's dot-product path exists.
- The prefill-time split of the Q/K/V/O columns is not built. The source
  has the global controller choose it from the two sides' compute rates.
  The bitmap here always starts all-NPU, which is the decode-time starting
  point.
- The latency estimator is a busy-cycle counter. The source calls it
  "lightweight" and gives no more.
- One clock domain.

## 10. Capacity

At the default parameters the address space is 128 GiB of NAND, with 11.2 GiB
(6 × 16 Gb) of DRAM for attention weights.

- The FFN weights of OPT-1.3B to OPT-30B, LLaMA2-7B and LLaMA3-8B in INT8
  fit. OPT-30B's FFN is about 18.4 GiB.
- Their attention weights fit the DRAM. OPT-30B's are 9.2 GiB.
- LLaMA3.3-70B's FFN (52.5 GiB) would fit the NAND, but its Q/K/V/O weights
  (11.25 GiB) slightly exceed the DRAM.

With 8 lanes × 16 bytes per cycle at 350 MHz, one token's FFN pass over
OPT-30B takes about 0.44 s.

**Long columns.** The activation buffer holds 16384 INT8 values, so a column
longer than that runs as several jobs. OPT-13B and OPT-30B down projections
(20480 and 28672 inputs) are examples. Each job's `cfg_bias_base` points at
the previous job's results, so the partial sums chain through the global
buffer.

**Wide layers.** The global buffer's 18432 words bound the biases and results
of one job. A layer with more output columns is likewise split into several
jobs. The model dimensions behind these numbers are the
published configurations of those models.

## 11. Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each compares
against values computed in the testbench and prints
`TB_RESULT checks=N failures=M`. The ones that matter most:

**`tb_oo_ecdp`**, one lane against a model back end:
- isolated errors give one segment per cycle and no stall;
- bursts of errors must stall;
- check-bit-only errors;
- results checked value by value and in column order.

**`tb_erdpe`**, 8 lanes:
- isolated errors: a job of 160 segments per lane finishes in ≤ 200 cycles;
- bursts must stall;
- streams with random gaps.

**`tb_nand_cmos`**, the wafer at small pages (256 B) and a short read (20
cycles):
- programmed pages with data-bit, check-bit and double errors;
- random crossbar maps;
- a job that wraps around the stored pages;
- the page-read count.

**`tb_nvllm_top`**, everything at the default parameters with no overrides,
in about 10 s:
- an FFN pass of 8 lanes × 40 columns × 128 segments (5120 segments, two
  pages per cluster) over programmed pages with injected errors;
- six decode passes with growing NPU jobs, checked against a model of the
  scheduler;
- a dispatcher walk.

`tb_nvllm_top` counts each mechanism and fails if one never happened:
- corrections;
- check-bit-only corrections;
- uncorrectable rows;
- stall cycles;
- page reads overlapping consumption;
- bitmap updates;
- columns sent to each side.

A typical run shows these figures:
- the 5120-segment pass takes 6942 cycles, one page read plus one segment per
  cycle;
- about 1265 corrections;
- about 150 stall cycles.

**`tb_ffn_workload`**, FFN columns of the evaluated model sizes at the
default parameters:
- an OPT-30B down-projection column of 28672 weights, run as two chained
  chunks;
- an OPT-1.3B up-projection column of 2048 weights.

Running one testbench with plain Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
    rtl/nv_pkg.sv tb/tb_nvllm_top.sv --top-module tb_nvllm_top
./obj_dir/Vtb_nvllm_top +verilator+rand+reset+2
```

Most testbenches check the design with SystemVerilog assertions as well:
- FIFO overflow and underflow;
- one-hot grants;
- a one-to-one crossbar map;
- a correction arriving only for an open column;
- a stable faulty-segment handshake.
