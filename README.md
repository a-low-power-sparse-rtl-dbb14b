# A 16×16 sparse DLA with effective index matching and shared index data reuse

Sparse neural networks skip the multiplications in which an input or a weight
is zero. That saves MAC cycles, but it breaks the data reuse that makes dense
accelerators efficient. In a dense output-stationary array, one input value
read from SRAM is broadcast along a PE row and one weight along a PE column,
so every byte read serves many MACs. In a sparse array every PE follows its own
irregular list of non-zero products. Designs that let each PE fetch its own
operands therefore read the same buffer entries many times over, and SRAM
traffic, not arithmetic, sets the power.

This RTL implements the accelerator of *A Low-Power Sparse Deep Learning
Accelerator with Optimized Data Reuse* (K.-C. Hsu, T.-S. Chang). The design
keeps the broadcast structure of a dense array and still executes only the
non-zero products. It rests on two mechanisms:

* **Effective index matching (EIM).** Each PE turns the bitmaps of its input
  and weight vector into the *effective indexes* of its non-zero products.
  These are positions in the compressed buffers, so they can be used as buffer
  addresses directly.
* **Shared index data reuse (SIDR).** Each PE row and each PE column keeps a
  small *shared register*, a window of 8 consecutive buffer entries. The
  window starts at the smallest effective index any PE of that row or column
  still needs. A PE computes when both of its operands fall inside the row and
  column windows; otherwise it waits. The PEs that lag behind decide where the
  windows sit, so the PEs advance roughly in step, and each buffer entry is
  read about once and then shared.

The default configuration is the published one: 16×16 PEs, 8-bit operands,
24-bit accumulators and 8-entry shared registers. Everything is synthesizable
SystemVerilog in `rtl/`. Self-checking testbenches are in `tb/`.

## 1. Data format: bitmaps and compressed indexes

PE(m,n) computes one output, `O[m][n] = Σ_k I[m][k]·W[n][k]`. It is the dot
product of input vector *m* (shared by PE row *m*) and weight vector *n*
(shared by PE column *n*). Each vector is stored in two memories:

* a **bitmap**, with bit *k* set when element *k* is non-zero. It is kept in
  32-bit words, and one word is called a *chunk*.
* a **data buffer** holding only the non-zero values, in order. The position
  of a value in this buffer is its *compressed index*. Element *k* sits at
  compressed index `popcount(bitmap[k-1:0])`.

Worked example (used throughout the testbenches; index 0 first):

| vector | elements (index 0..7) | bitmap   | buffer contents |
|--------|-----------------------|----------|-----------------|
| I0     | 0 1 0 0 4 5 6 7       | 11001111 | 0 1 4 5 6 7     |
| I1     | 0 0 2 3 4 0 6 7       | 10111011 | 0 2 3 4 6 7     |
| W0     | 0 0 2 3 4 5 0 7       | 10111101 | 0 2 3 4 5 7     |
| W1     | 0 1 2 0 4 5 6 0       | 01101110 | 1 2 4 5 6       |

Some bitmap bits are set for elements whose value is 0 (index 0 of I0, I1
and W0). Those zeros are stored and multiplied like any other value. The
hardware trusts the bitmap.

## 2. Effective index matching

For a given chunk, PE(m,n) must find every *k* with `BMI[k] & BMW[k]`, where
BMI is the input bitmap of row *m* and BMW is the weight bitmap of column *n*.
For each such *k* it needs two compressed indexes, EffI and EffW.
Re-sorting the AND result into compressed order for every PE would be costly.
Instead the work is split in two steps:

1. **Mask indexes, once per row and column** (`mask_index_gen`). For its
   current chunk, a row's IMId generator lists the original position of each
   compressed entry: `IMId[j]` is the position of the j-th set bit. A column's
   WMId generator does the same for weights. The list is built in one cycle by
   a compaction network: bit *i* goes to slot `popcount(bitmap[i-1:0])`. The
   list, a valid mask and the bitmap itself are broadcast along the row or
   column. A running base adds the popcounts of the earlier chunks, so that
   `base + j` is a compressed index in the whole buffer.
2. **Masked bitmaps, in every PE** (`eim`). With `BMNZ = BMI & BMW`, the PE
   gathers `IMBM[j] = BMNZ[IMId[j]]` and `WMBM[j] = BMNZ[WMId[j]]`. Both masked
   bitmaps are already in compressed order. Both contain one set bit for each
   non-zero product, and their k-th set bits belong to the same product. A
   priority encoder therefore pops the lowest set bit of each, one pair per
   cycle, and pushes `(base_i + j_i, base_w + j_w)` into the two EIM FIFOs.

For PE(0,0) of the example, BMNZ = 10001101 (indexes 0, 4, 5, 7). The masked
bitmaps are IMBM = 101101 and WMBM = 100111. That gives EffI = 0, 2, 3, 5 and
EffW = 0, 3, 4, 5.

All EIM units load a new chunk together, because the row and column
generators are shared. The controller issues the next load once every EIM
unit has emptied its masked bitmaps (or is emptying them this cycle). The
FIFOs (8 deep) separate this chunk-synchronous stage from the MAC side, which
runs on its own.

## 3. Shared index data reuse

Each PE holds one current pair (EffI, EffW) taken from its FIFOs. Every cycle
one SIDR iteration runs in all rows and columns at once:

1. **Shared index** (`shared_index_unit`). `SharedI_m` is the minimum EffI
   over the PEs of row *m* that hold a pair. `SharedW_n` is the same over
   column *n*. A PE that holds nothing, because its FIFO is empty or its work
   is done, is left out, so it cannot pin the window.
2. **Window load** (`data_buffer`). The row buffer loads
   `RegI_m = BufI_m[SharedI_m .. SharedI_m+7]`, and the column buffer loads
   RegW_n in the same way.
3. **Offsets and decision** (`pe`). The PE forms `OffsetI = EffI − SharedI_m`
   and `OffsetW = EffW − SharedW_n`. If both are below 8, the PE *fires*. In
   the next cycle its data multiplexers take `RegI_m[OffsetI]` and
   `RegW_n[OffsetW]`, and the MAC accumulates. The PE then takes its next pair
   from the FIFOs. If either offset is 8 or more, the PE *idles* and keeps
   its pair.

**Why this always makes progress.** Take the PE whose current pair belongs to
the smallest original element index *k* among all PEs that hold a pair.
Compressed indexes increase with *k*. So within its row no PE holds a smaller
EffI, and within its column no PE holds a smaller EffW. Both of its offsets
are therefore 0, and at least one PE fires in every iteration. The array
cannot deadlock.

**The published trace.** With 2-entry windows and the example above, the
design runs exactly the iterations shown for the method.
`tb/tb_sidr_trace.sv` checks every value in this table:

| iteration | SharedI0 | SharedI1 | SharedW0 | SharedW1 | waiting PEs   | RegI0 | RegI1 | RegW0 | RegW1 |
|-----------|----------|----------|----------|----------|---------------|-------|-------|-------|-------|
| 1         | 0        | 0        | 0        | 0        | —             | 0 1   | 0 2   | 0 2   | 1 2   |
| 2         | 2        | 1        | 1        | 2        | PE00, PE11    | 4 5   | 2 3   | 2 3   | 4 5   |
| 3         | 2        | 2        | 2        | 2        | —             | 4 5   | 3 4   | 3 4   | 4 5   |
| 4         | 3        | 3        | 3        | 4        | —             | 5 6   | 4 6   | 4 5   | 6 ·   |

In iteration 2, PE00 needs weight index 3 while column 0's window starts at 1
(PE10 needs index 1), so its offset is 2 and it waits. PE11 waits on its
input in the same way.

### Reading the window: banked buffers

A window can start at any index, so the data buffer is split into 8 banks
interleaved on the low index bits. Entry *e* is in bank `e mod 8`, row
`e div 8`. Any 8 consecutive entries hold exactly one entry from each bank.
The bank output registers *are* the shared register. An output rotator puts
them back in window order. When the window slides forward by *d* < 8, only
the *d* banks whose entry changed are read, and the other banks stay idle.
Sweeping a vector from front to back therefore reads each entry once, plus
up to 7 entries past the end that the last windows cover. This is what gives
the low SRAM traffic.

## 4. Microarchitecture and timing

```
            column n:  bitmap_sram ─ mask_index_gen (WMId) ─┐  data_buffer (BufW_n, RegW_n)
                                                           │        ▲ SharedW_n │ RegW_n
 row m:                                                    ▼        │           ▼
 bitmap_sram ─ mask_index_gen (IMId) ──bitmap, IMId, base──► PE(m,n): eim → eim_fifo ×2 → (EffI,EffW)
 data_buffer (BufI_m, RegI_m) ◄── shared_index_unit ◄── EffI of row m   offsets → fire → MUX → mac_unit
                              ──── RegI_m ─────────────────────────────────────────────────▲
 dla_ctrl: start / chunk loads for all EIM units / completion
```

The loop runs in a two-stage pipeline, one iteration per cycle:

| cycle | what happens |
|-------|--------------|
| t     | PE current pairs → row/column minimum → offsets → fire/idle decision; banks that must change are read; a firing PE pops its FIFOs |
| t+1   | shared registers hold the window of cycle t; the firing PEs' MUXes select operands; the MAC adds at the end of the cycle |

Chunk stage: `start` reads chunk 0 of every bitmap. Each `eim_load` latches
the masked bitmaps into all 256 EIM units and reads the next bitmap words. A
chunk with *p* products occupies its EIM unit for max(p, 1) cycles. An
operation ends when all `num_chunks` chunks are loaded and no PE is matching,
queuing or holding a pair. One drain cycle lets the last MAC finish, and then
`done` pulses.

Latency: for a dense K-element vector pair the tile takes K + 4 cycles (1028
for K = 1024, 99.6 % utilization). A tile of all-zero operands takes
`num_chunks` + 1 cycles.

## 5. Using the top level

`sparse_dla_top` ports:

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `wr_en`, `wr_sel`, `wr_lane`, `wr_addr`, `wr_data` | in | 1, 2, 4, 10, 32 | load port. `wr_sel` (`sidr_pkg::wr_sel_e`): input data, input bitmap, weight data, weight bitmap. `wr_lane` is the row or column. `wr_addr` is the compressed index for data and the chunk number for a bitmap word. Data uses the low 8 bits of `wr_data`. |
| `start`, `num_chunks` | in | 1, 6 | begin a tile over `num_chunks` × 32 elements (only while `busy` is low) |
| `busy`, `done` | out | 1 | operation in progress; one-cycle completion pulse |
| `acc[16][16]` | out | 24 each | the output tile, valid from `done` until the next `start` |
| `cycles`, `mac_ops`, `idle_ops`, `buf_reads` | out | 32 | per-operation counters: cycles, MACs, PE-iterations spent waiting, buffer entries read into shared registers |
| `shared_i`, `shared_w`, `*_vld` | out | 10 each | current shared indexes (observation) |

To run a tile: write each input row's non-zeros (compressed indexes
0, 1, …) and its bitmap words, do the same for each weight column, then pulse
`start` and wait for `done`. Bitmap words past `num_chunks` are ignored. All
rows and columns must use the same `num_chunks`; give shorter vectors zero
words.

## 6. Parameters: published and chosen

| parameter | default | origin |
|-----------|---------|--------|
| `ROWS` × `COLS` | 16 × 16 | published |
| `REG_SIZE` | 8 | published (entries per shared register) |
| `DATA_W` / `ACC_W` | 8 / 24 | published (8-bit multiplier, 24-bit adder) |
| `BM_LEN` | 32 | chosen: bitmap chunk width |
| `BUF_DEPTH` | 1024 | chosen: one 1024-element dense vector fits |
| `FIFO_DEPTH` | 8 | chosen |

`REG_SIZE` must be a power of two, and `BUF_DEPTH` must be a multiple of both
`REG_SIZE` and `BM_LEN`. Operands are two's-complement and the accumulator
wraps at 24 bits. A dot product of 1024 full-scale products can exceed
±2²³; the published design does not say how it handles that.

## 7. Measured behaviour

These figures come from `tb_sparse_dla_top`. They use random signed tiles,
K = 1024, 16×16 outputs, and uniform random sparsity. Speedup is relative to
a dense array of the same size, which needs K cycles. MAPM is bytes of SRAM
traffic per MAC, counting buffer entries read plus 3 bytes written back per
output.

| input / weight sparsity | cycles | PE utilization | speedup | MAPM (byte/MAC) |
|-------------------------|--------|----------------|---------|-----------------|
| 0 % / 0 %               | 1028   | 99.6 %         | 1.00    | 0.13            |
| 50 % / 60 %             | 411    | 49 %           | 2.5     | 0.30            |
| 70 % / 60 %             | 321    | 39 %           | 3.2     | 0.39            |
| 50 % / 75 %, K = 960 (MobileNetV2-like pointwise tile) | 294 | 42 % | 3.3 | 0.40 |
| 90 % / 90 %             | 89     | 11 %           | 11.5    | 1.65            |

The published results are an average MAPM of 0.29 byte/MAC on pruned
MobileNetV2 pointwise layers, 66 % overall PE utilization, and above 50 %
utilization for 50–70 % sparsity. The MAPM here is close to that figure.
Utilization is somewhat lower: about 39–49 % in the same sparsity range.
Making the EIM FIFOs 32 deep instead of 8 leaves every cycle count unchanged,
so the FIFOs are not the limit. The more likely limit is the chunk-synchronous
EIM load, a choice of this RTL. A PE with few products in a chunk waits for
the PE with the most products before it gets the next chunk. The
`load_wait` count of the full-size test shows how often that happens.
Another possible reason for the gap is that the published figures were
measured on real layer data rather than on uniform random matrices.

## 8. Where this RTL departs from, or adds to, the published design

* **Unstated sizes.** The published design does not give the bitmap chunk
  width, buffer depth, FIFO depth or signedness. The values in section 6 are
  this RTL's choices.
* **Mask-index generator insides.** Only the function is published. The
  compaction network, the running chunk base and the chunk-by-chunk walk are
  this RTL's.
* **Buffer organisation.** Reading 8 consecutive entries per cycle is
  published. The 8-bank interleave and the partial refill are this RTL's.
  They are the simplest structure that reads each entry once.
* **PE pair handling.** A PE that holds no pair also takes one from its FIFO
  at the start and after a FIFO ran dry, not only after firing. Such PEs are
  excluded from the minimum.
* **Pipelining.** The two-stage iteration and the one-cycle drain are
  implementation choices.
* **Not built.**
  * The chip-level *global buffer* appears in the published power and area
    breakdowns, but its organisation is not described. The top exposes the
    SRAM load port where it would connect.
  * Output write-back to memory is not described. The 256 accumulators are
    output ports.
  * Tiling of whole layers and matrices over many 16×16 tiles is left to the
    host.
* **Memories.** These are plain arrays, not foundry SRAM macros.

## 9. Files

| file | contents |
|------|----------|
| `rtl/sidr_pkg.sv` | shared constants, load-port selector and controller state enums |
| `rtl/sparse_dla_top.sv` | the array: row and column units, 256 PEs, controller, counters |
| `rtl/pe.sv` | one PE: EIM, FIFOs, current pair, offsets, fire decision, data MUX, MAC |
| `rtl/eim.sv` | effective index matching unit |
| `rtl/eim_fifo.sv` | EIM_FIFO_I / EIM_FIFO_W |
| `rtl/mask_index_gen.sv` | IMId / WMId generator with chunk walk and base |
| `rtl/shared_index_unit.sv` | row/column minimum and window request |
| `rtl/data_buffer.sv` | banked compressed buffer whose bank registers form the shared register |
| `rtl/bitmap_sram.sv` | bitmap memory |
| `rtl/mac_unit.sv` | 8×8 → 24-bit multiply-accumulate |
| `rtl/dla_ctrl.sv` | start/chunk/completion sequencer |
| `tb/tb_<module>.sv` | self-checking testbench of each module |
| `tb/tb_sidr_trace.sv` | the 2×2 example, iteration by iteration |
| `tb/tb_sparse_dla_top.sv` | full-size end-to-end test, with default parameters |

## 10. Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and ends with
`$finish`. Each one has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
    rtl/sidr_pkg.sv $(ls rtl/*.sv | grep -v sidr_pkg) \
    tb/tb_sparse_dla_top.sv --top-module tb_sparse_dla_top
./obj_dir/Vtb_sparse_dla_top
```

Replace the testbench name to run any other. The full-size test builds in
about 40 s and runs in under a minute. It checks all 256 outputs of every
tile against a dot product computed in the testbench. It also checks that the
MAC count equals the number of non-zero products, and that a dense tile reads
each buffer entry once. It counts PE waits, shared-register reuse, EIM FIFO
back pressure, held chunk loads and empty chunks, and fails if any of them
never happened. The module testbenches check their block against independent
models, including the published EIM example (EffI 0,2,3,5 / EffW 0,3,4,5).

**How far to trust it.** The behaviour of every block is checked against
models written separately from the RTL. The end-to-end results match exact
dot products over nearly a million MACs, and the published iteration trace is
reproduced exactly. The design has not been through timing closure. The
16-input minimum, offset compare and FIFO pop form the longest combinational
path, which the published 800 MHz implementation may have pipelined
differently.
