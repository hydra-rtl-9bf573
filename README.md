# HyDra: a hyperdimensional-computing macro built around content-addressable memory

Hyperdimensional computing (HDC) represents every symbol, feature value and
class as a very long vector of ±1 elements, a *hypervector* (HV). Three
element-wise operations build representations: **binding** (multiply two
HVs), **bundling** (add HVs) and **permutation** (rotate or shift an HV to mark
position in a sequence). A query is then classified by a **similarity search**
that finds the stored class HV at the smallest Hamming distance.

In most HDC hardware the HVs sit in a memory and are carried to separate
compute units. Every bind, shift and search then pays for that data movement.
HyDra keeps the HVs in a content-addressable memory (CAM) array whose cells
compute as well as store. The array does three of the four operations in
place:

* Binding is an XOR between a stored row and the search lines, written back
  into another row.
* Permutation is a batch-wise copy of a row into another row, shifted by
  whole batches.
* Search is the match-line current of every row, which measures the row's
  mismatch count against the query.

Only bundling leaves the array. It needs integer accumulators, and it uses a
cheap increment-only adder.

This directory holds synthesizable SystemVerilog for the digital behaviour of
that macro. The array cells are spin-orbit-torque MRAM devices, and the
match-line currents are analog. Both are modelled at the level of bits and
integer counts.

## Organisation of the macro

```
            +-----------+-----------+-- ... --+-----------+   +---------+   +------------+
 search     | bank 0    | bank 1    |         | bank 15   |-->| current |-->| serializer |
 lines ---> | 128 x 128 | 128 x 128 |         | 128 x 128 |   |   sum   |   +-----+------+
            +-----+-----+-----+-----+-- ... --+-----+-----+   +---------+         | 8 rows
                  |           |                     |                       +-----v-----+
   ===============+===========+==== binary data bus=+=====+==========       |    LTA    |<--+
                  |                                       ^                 +-----+-----+   |
                  v                                       |                       v         |
          +-------+-------+      +-----------+      +-----+----+            +-----------+   |
          | mux (A / A+1) |----->|  HV cache |----->|  sign()  |            |  buffer   |---+
          +-------+-------+      | int16 HVs |      +----------+            +-----------+
                  ^              +-----+-----+
                  +--- +1 <------------+   (A = cache entry fed back)
                       control unit: one command at a time
```

* **16 CAM banks of 128 rows x 128 columns** (`sot_cam_bank`). A hypervector
  lives in one row and spans all banks, so the full dimension is 16 x 128 =
  2048. Element `k` of an HV is column `k % 128` of bank `k / 128`. Bipolar +1
  is stored as bit 0 and −1 as bit 1, so bipolar multiplication is XOR.
* **Current sum** (`current_sum`): for every row, it adds the mismatch counts
  of the active banks.
* **Serializer, LTA and buffer** (`serializer`, `lta`, `lta_buffer`): they
  find the row with the smallest sum using a single 8-input
  loser-takes-all comparator.
* **HV cache, adder, sign unit** (`hv_cache`, `hdc_adder`,
  `inc_half_adder`, `sign_unit`): 32 accumulators of 2048 int16 elements, for
  bundling and binarization.
* **Binary data bus** (`binary_data_bus`): moves binary HVs between the banks,
  the adder, the sign unit and the host. It also does the batch routing of a
  permutation.
* **Control unit** (`control_unit`): sequences the commands.
* `hydra_pkg` holds the sizes, the opcodes and the command/response structs.
  `hydra_top` connects everything.

## Inside a bank: one XOR, three uses

Each cell holds a bit and compares it with the bit on its search line. A
per-row enable decides where that comparison result goes:

| Use | Search lines | Result goes to | Effect |
|---|---|---|---|
| binding (`OP_BIND`) | operand HV | WRX column lines, then the write drivers of a target row | `row[dst] = row[src] xor SL` in one cycle |
| plain read | all 0 | WRX | `row xor 0 = row`, so a read needs no sense amplifier |
| search (`OP_SEARCH`) | query HV | the row's match line | current proportional to the number of mismatches |

In the RTL, `wrx = mem[rd_row] ^ sl` is combinational. A write on the clock
edge takes either `wrx` (an XOR-write) or bus data, and only in the 8-bit
batches set in `wr_bmask`. `ml_count[r]` is the number of mismatching cells of
row `r` while `search_en` is high. It stands for the match-line current in
units of one cell's current.

In silicon the current is only roughly linear in the mismatch count. IR drop
along the match line weakens the cells far from the sense amplifier. The
macro counters this with four levels of search-line voltage, higher for the
far cells. The RTL assumes that this correction works: the "current" is
exactly the mismatch count. The voltage scheme itself is analog and is not
modelled.

## Permutation by batch shifting

A true one-element rotation of a 2048-bit HV would need a barrel shifter
outside the memory. HyDra instead shifts by whole 8-bit batches. Each bank
already reads its columns through a 16-to-1 multiplexer, 8 bits at a time. So
a permutation reads batch `j` of every bank in cycle `j` and writes it to
batch `j − s` of the destination row, for 16 cycles in all. The `s` batches
that fall off the front are dropped. The `s` batches left empty at the end
are filled with random bits.

This is not a rotation: `s x 8` elements are lost. HDC tolerates the loss
because information is spread over all elements of an HV (it is
holographic). The published macro uses shifts of 8 and 16 bits (`s` = 1 or
2) and reports a negligible effect on accuracy.

Chunk `g` of the HV (8 bits) is batch `g % 16` of bank `g / 16`. Moving chunk
`g + s` to chunk `g` therefore has two cases:

* When `j ≥ s`, batch `j` of bank `b` goes to batch `j − s` of the same bank.
* When `j < s`, it goes to batch `j − s + 16` of bank `b − 1`.

`binary_data_bus` does this routing. The last *active* bank takes the
random fill from a 32-bit LFSR in the control unit. When fewer banks are
active, the shift wraps at the configured dimension. Source and destination
rows must differ: an assertion in `control_unit` checks this, because an
in-place shift would overwrite batches that are not yet read.

## Search: current sum, serializer and the 8-input LTA

One search cycle puts the query on the search lines. Every row of every bank
produces its mismatch count at once, and `current_sum` latches the per-row
totals over the active banks. These totals are the Hamming distances over the
configured dimension.

The loser-takes-all block has only 8 inputs. The serializer therefore presents
the candidate rows `[base, base+count)` in batches:

* batch 0: the first 8 candidates;
* batch k ≥ 1: the current winner (from `lta_buffer`) in slot 0, plus the
  next 7 candidates.

After each batch, the buffer keeps the winner's row and distance. After the
last batch, the buffer holds the answer. A search over `C` candidates takes
`1 + ceil((C − 8) / 7)` LTA batches (1 when `C ≤ 8`). That is 1 batch for 5
classes, 3 for 21 and 19 for all 128 rows.

Ties go to the lower slot. So among equal distances the earlier row wins,
and a carried winner keeps its place. Because `rsp.hd` returns the winning
distance, a search over one row measures a Hamming distance directly. A
clustering loop can use this to test whether a centre has stopped moving.

## Bundling: the increment-only adder and the int16 cache

The value added to an accumulator is always a binary HV, 0 or 1 per element.
With the +1 → 0, −1 → 1 mapping, each accumulator element just counts the −1
votes. The adder is therefore an incrementer plus a 2:1 mux per element:

```
s[k] = b[k] ? a[k] + 1 : a[k]      for all 2048 elements in parallel
```

The incrementer (`inc_half_adder`) is a ripple chain of half adders, with
no full adders. The published design reports that this saves about a third
of the area and energy of a conventional adder. The count wraps at 16 bits,
which takes 65 535 bundled HVs to reach.

To binarize, `sign_unit` outputs `a[k] > thr`. Pass `thr = floor(N/2)` for
`N` bundled HVs to get the majority bit, i.e. the sign of the bipolar sum. A
tie gives 0 (+1).

The cache has 32 entries. That holds the largest class count used below (26
for ISOLET).

## Command interface and timing

`hydra_top` has one valid/ready command port (`cmd_t`) and one response
port (`rsp_t`), both defined in `hydra_pkg`. A command is accepted when
`cmd_valid && cmd_ready`. It then executes in the following cycles. In the
cycle after its last execution cycle, `rsp_valid` is high for one cycle. So
the latency from the accepting edge to `rsp_valid` is the number of execution
cycles + 1.

| Opcode | Effect | Execution cycles |
|---|---|---|
| `OP_CONFIG` | active banks = `count` (1..16; 0 or >16 means 16), HV dimension = 128 x `count` | 1 |
| `OP_WRITE` | row `dst` ← `hv` (active banks only) | 1 |
| `OP_READ` | `rsp.hv` ← row `src` (inactive banks read 0) | 1 |
| `OP_SL_HOST` / `OP_SL_ROW` | search-line register ← `hv` / row `src` | 1 |
| `OP_BIND` | row `dst` ← row `src` xor search lines | 1 |
| `OP_PERMUTE` | row `dst` ← row `src` shifted by `count` batches, random fill; `src ≠ dst`, `count` < 16 | 16 |
| `OP_SEARCH` | `rsp.row`, `rsp.hd` ← nearest of rows `[src, src+count)` to the search lines | 1 + LTA batches |
| `OP_CLEAR` | cache entry `entry` ← 0 | 1 |
| `OP_ADD` | cache entry `entry` += row `src` | 1 |
| `OP_BINARIZE` | row `dst` ← (cache entry `entry` > `thr`) | 1 |

For reference, the published circuit simulations give these latencies:
1.55 ns for a binding (XOR phase plus write phase), 15.4 ns for a
permutation (16 batch transfers), 0.99 ns for a search and 0.46 ns for an
addition. The RTL maps each bind, each batch transfer and each add to one
clock cycle. The clock period is left to the implementation.

Typical flows:

* **Encode a feature:**
  1. `OP_SL_ROW` with the level HV.
  2. `OP_BIND` with the item HV into a scratch row.
  3. `OP_PERMUTE` once per sequence position.
  4. `OP_ADD` into the class's cache entry.
* **Finish training:** `OP_BINARIZE` each class entry into a class row.
* **Infer:** encode the query, put it on the search lines (`OP_SL_ROW` or
  `OP_SL_HOST`), then `OP_SEARCH` over the class rows.
* **Cluster:**
  1. Search each point against the centre rows.
  2. `OP_ADD` the point into its centre's cache entry.
  3. `OP_BINARIZE` the new centres.
  4. Repeat until a one-row search of old against new centre returns a
     small enough distance.

## Where this RTL departs from the published design, and what it leaves out

The following follow the published macro: the block structure, all sizes
except the cache capacity, the bipolar-to-bit mapping, the XOR-based
binding and read, the batch-shift permutation with random fill and
16-to-1 batch muxes, the 8-input LTA with the winner carried into the next
batch, and the half-adder-and-mux bundling adder.

The following are this design's own choices:

* **Numbers instead of currents.** Match-line currents are integer mismatch
  counts. The current sum adds integers. The LTA compares integers and never
  confuses close values (the analog one needs about 0.2 µA between them).
  The buffer stores the winning distance as a number.
* **Command set, handshake and clocking.** The published macro only names an
  "SRAM and control unit". Its contents, its instruction format and its SRAM
  are not described. The control unit here is a simple one-command
  sequencer, and no SRAM is included.
* **Cache capacity.** The capacity (32 entries) and the clear operation are
  assumptions.
* **Sign unit threshold.** The threshold port of the sign unit is an
  assumption; the published macro only shows a block labelled sign().
* **Element and bank order.** Element order across banks, batch grouping
  within a bank, and enabling banks from bank 0 upward are assumptions.
* **Candidate range.** Search candidates form one contiguous range of rows.
* **No retraining.** The HDC flow the macro targets subtracts a mispredicted
  sample from the wrong class. The published adder only increments, and no
  decrement path is built here.
* **Not modelled:** the device-level behaviour of the 5-transistor,
  2-MTJ cell (write currents, switching, non-volatility), the four-level
  search-voltage scaling and the IR drop it corrects.

### Capacity against the evaluated workloads

One HV takes one row in every bank, so the macro holds 128 HVs of up to 2048
bits. The class counts below are dataset facts, not given in the published
work:

* **Fit:** Language recognition (27 letter HVs + 21 classes) and EMG
  gestures (a few channel and level HVs + 5 classes).
* **Unknown:** MNIST and ISOLET. Their class HVs fit (10 and 26 rows and
  cache entries). But one ID HV per input feature (784 pixels or 617
  features) would not fit in 128 rows, and the published work does not give
  its encoder.
* **Do not fit:** The clustering sets Iris (150 points), Hepta (212) and
  Wingnut (1016), if all points are stored in the array as described. Their
  cluster centres fit easily.
* **Dimension sweep:** Dimensions 1024 to 2048 in steps of 256 are 8 to 16
  active banks.

## Files

| File | Contents |
|---|---|
| `rtl/hydra_pkg.sv` | sizes, opcodes, `cmd_t`, `rsp_t`, bus-source enum |
| `rtl/hydra_top.sv` | the macro |
| `rtl/sot_cam_bank.sv` | 128 x 128 bank: XOR read, batch mux, masked write, mismatch counts |
| `rtl/current_sum.sv` | per-row sum over active banks, latched |
| `rtl/serializer.sv` | 8-wide batching with the carried winner |
| `rtl/lta.sv`, `rtl/lta_buffer.sv` | minimum of 8, winner register |
| `rtl/hdc_adder.sv`, `rtl/inc_half_adder.sv` | increment-or-pass adder, half-adder incrementer |
| `rtl/hv_cache.sv` | 32 x 2048 x int16 accumulators |
| `rtl/sign_unit.sv` | binarization by threshold |
| `rtl/binary_data_bus.sv` | HV routing and permutation batch routing |
| `rtl/control_unit.sv` | command sequencer, search-line register, LFSR |
| `tb/tb_<block>.sv` | self-checking testbench of each block |
| `tb/tb_hydra_top.sv` | end-to-end test at full size |
| `tb/tb_hydra_language.sv` | n-gram language-recognition flow, 21 classes |
| `tb/tb_hydra_clustering.sv` | K-means clustering flow in hyperspace |

## Simulating

Every testbench checks the outputs against a model written independently in
the testbench. It ends by printing `TB_RESULT checks=N failures=M` and has a
watchdog. With Verilator 5, from this directory:

```
verilator --binary --timing --assert -Irtl -Itb rtl/hydra_pkg.sv tb/tb_hydra_top.sv \
          --top-module tb_hydra_top -o sim
./obj_dir/sim
```

Replace `tb_hydra_top` with any other `tb_<block>` to test one block. The
simulator is two-state and the CAM array and cache have no reset, so every
testbench writes what it reads.

The end-to-end test runs the macro at its full size (2048-bit HVs, 128 rows,
32 cache entries). It builds and runs in about a minute and a half. It does
the following:

* fills the array;
* binds and permutes by 8 and 16 bits;
* trains four class HVs through encode, add and binarize;
* classifies noisy queries over the class rows and over all 128 rows;
* switches to 8 banks and repeats;
* checks the latency of every command;
* counts each mechanism, and counts a failure for any mechanism that never
  occurred.

Two workload testbenches drive the full-size macro through the application
flows it is meant for. Both use synthetic data and check every step against a
software model of the same algorithm:

* `tb_hydra_language` does trigram encoding
  `rho^2(I_a) xor rho(I_b) xor I_c` with in-bank permutations and bindings.
  It uses 27 letters, 21 languages and texts of 100 letters, with one training
  text per language. It then searches over the 21 class rows. On its
  synthetic texts it recognises all 42 test texts. One query (encode 98
  trigrams, binarize, search) takes about 1 500 cycles.
* `tb_hydra_clustering` runs K-means with K = 3 over 96 stored points.
  The centres start random. Assignment is by in-array search and updates are
  by add and binarize. It stops when every old-versus-new centre distance is
  0. This takes 3 epochs of about 1 000 cycles.

The sizes are package constants (`hydra_pkg`). The block modules take them as
parameters, so a block can be tested alone at other sizes. `hydra_top` uses
the package values, because the command struct carries a full-width HV.
