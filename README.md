# Bit-level similarity compression for an RRAM crossbar accelerator — RTL

An RRAM crossbar computes a matrix-vector product in place: every cell holds a
weight bit, the inputs drive the wordlines and each bitline current is a
partial sum. Weight sparsity is hard to exploit in such an array, because a
zero can only be skipped when its whole row or column is zero. This design
works at the level of single bits, inside small *operation units* (OUs), the
7 x 8 sub-arrays that are read in one cycle:

* Weights are stored in **two's complement**, one bit per cell, not split into
  positive and negative arrays. Only the sign terms need a subtraction.
* The eight bit positions of a weight go to **eight different computation
  units** (CUs). CU k holds bit k of every weight, so all partial sums of a CU
  share one shift value and no per-column shift has to be stored.
* Offline, the rows of each bit plane are **reordered** so that, inside an
  OU, many pairs of columns carry identical bits. Such a pair is stored once
  and its partial sum is sent to **both** output columns. All-zero columns are
  a special case of this and are not stored at all; all-zero rows are dropped
  too. Fewer OUs, and so fewer crossbars and cycles, are needed.
* Small tables undo the reordering at run time. The **row indexes** tell which
  input drives each physical row of each CU. The **column indexes** tell,
  for each OU, which logical output columns its physical columns stand for.
  The column indexes are delta encoded and kept in a separate indexing crossbar.

This repository gives synthesizable SystemVerilog for the digital part of the
design: control, input and output routing, shift-and-add, buffers and
post-processing. It gives behavioural models for the analog parts (the RRAM
arrays with their DACs, ADCs and sense amplifiers). It also gives
self-checking testbenches, including an end-to-end test of the full-size
accelerator.

## Organisation

```
rram_accelerator
 ├─ global_buffer          64 KiB activations, host port + controller port
 ├─ global_controller      moves inputs/outputs, starts PEs, pooling windows
 └─ pe  x16
     ├─ input_register     PE buffer: 128 input bytes, original order
     ├─ pe_controller
     │   ├─ input_decoder  8 row-index tables -> fills the 8 IR-CUs
     │   ├─ ou_sequencer   input bit x OU row x OU column, horizontal/vertical
     │   └─ output_decoder x8   column-index list -> logical output columns
     ├─ computation_unit x8   CU k = weight bit k (CU 7 = sign)
     │   ├─ ir_cu          128 B input register, gives one bit plane per cycle
     │   ├─ compute_crossbar   128x128 1-bit cells + 1-bit DACs   (model)
     │   └─ adc x8         3-bit, one per OU column                (model)
     ├─ indexing_crossbar  column-index lists, one row per OU      (model)
     ├─ shift_add          weight 2^(k+b), subtract for sign terms
     ├─ output_register    128 signed 24-bit accumulators
     └─ scaling_unit / nonlinear_unit / pooling_unit  x128
```

Main numbers (package `rram_pkg`):

| constant | value | meaning |
|---|---|---|
| `XBAR_ROWS` x `XBAR_COLS` | 128 x 128 | crossbar, 1 bit per cell |
| `OU_H` x `OU_W` | 7 x 8 | operation unit |
| `OU_ROWS` x `OU_COLS` | 18 x 16 | OU grid (128 div 7 = 18; the last two rows are unused) |
| `ADC_BITS` | 3 | ADC resolution. 7 rows give a column sum of at most 7, so 3 bits are exact. |
| `W_BITS`, `A_BITS` | 8, 8 | signed weights and activations |
| `N_CU` | 8 | CUs per PE, one per weight bit |
| `N_IN` x `N_OUT` | 128 x 128 | logical weight slice per PE |
| `DELTA_W`, `LEN_W` | 8, 5 | column-index delta and list-length widths |
| `ACC_W` | 24 | accumulator width |
| `N_PE` | 16 | PEs (top-level parameter) |

## Arithmetic: two's complement, bit-serial, bit-split

A B-bit two's-complement number is `x = -x[B-1]·2^(B-1) + Σ x[i]·2^i`.
Inputs enter the crossbar one bit per cycle, LSB first. CU k returns, per OU
column, the number of rows where both the input bit b and the weight bit k
are 1 (0..7). That partial sum is worth `2^(k+b)`, and it is negative when
exactly one of the two bits is a sign bit:

```
contribution = ps · 2^(k+b) · (-1)^[(k==7) xor (b==7)]
```

So CU 7 is subtracted for input bits 0..6, CUs 0..6 are subtracted for input
bit 7, and the sign×sign term (k = b = 7) is added. `shift_add` forms this sum
for all eight CUs and all 128 output columns in one cycle.
`output_register` accumulates it. The result is the exact signed dot product.
This is checked bit for bit against `Σ x·W` in the testbenches.

## One PE operation

`pe_controller` runs one input vector through the PE's weight slice:

1. **Load** (129 cycles). `input_decoder` walks the physical crossbar rows
   r = 0..127. For every CU k it writes `x[map[k][r].idx]` into row r of that
   CU's IR-CU, or 0 if the row is unused. Each CU has its own row order,
   because each bit plane is reordered and row-compressed on its own. The
   accumulators are cleared at the start.
2. **Compute** (`8 · n_rows · n_cols` cycles). `ou_sequencer` issues one OU
   per cycle to all eight CUs at once. The same cycle reads that OU's row of
   the indexing crossbar. Only the `n_rows x n_cols` OUs at the top left are
   visited: that is the region the compressed mapping occupies. The full
   crossbar takes 8 · 18 · 16 = 2304 cycles, the worst case.
3. **Route and accumulate** (same cycles, one cycle later). The ADC codes and
   index entries arrive. Each CU's `output_decoder` sends its 8 codes to
   logical output columns. `shift_add` weights them and the output register
   adds them.
4. **Post** (3 cycles). Each accumulator is requantised to int8
   (`scaling_unit`), passed through ReLU if enabled (`nonlinear_unit`) and
   taken into the running maximum (`pooling_unit`). Then `done` pulses.

From `start` to `done` an operation takes `XBAR_ROWS + 1 + 8·n_rows·n_cols + 3`
cycles. The PE testbench checks this count.

### OU order: horizontal or vertical

The `direction` field of `pe_cfg_t` selects the visiting order. In each
order the input bit is the outermost loop.

* **horizontal**: OU row by OU row. Within one OU row the wordline vector is
  the same for every OU column and can be reused (the `wl_reuse` counter
  counts such cycles). The ADCs are switched to a new bitline group every cycle.
* **vertical**: OU column by OU column. The ADCs stay on the same bitlines.
  The wordline vector changes every cycle.

Both orders give the same result. They differ only in which analog resource
toggles.

## Output indexing (the core of the scheme)

After reordering, the 8 physical columns of an OU no longer line up with
output columns. A physical column is either:

* **repetitive**: it stands for two logical columns whose 7 bits in this OU
  are identical. Its ADC code is the partial sum of both, and the code is
  written to two accumulators. At most two logical columns share one
  physical column.
* **single**: it stands for one logical column.

Columns that are all zero in the OU are simply not stored.

For each OU and each CU, the indexing crossbar stores an `idx_entry_t`:

```
len      : 5 bits, L = number of logical indices (0..16)
delta[s] : 16 x 8-bit signed; index_0 = delta[0], index_s = index_(s-1) + delta[s]  (mod 128)
```

The mapping always puts repetitive columns first. So the length alone
defines the layout, and no per-column flag is needed:

```
r = L - 8 if L > 8, else 0                 (number of repetitive columns)
slots 0,1 -> physical column 0, 2,3 -> column 1, ..., 2r-2,2r-1 -> column r-1
slot s >= 2r -> physical column s - r
L < 8: only the first L physical columns are in use, all single
```

One case is ambiguous: an OU with repetitive columns but fewer than 8 used
columns. In that case the mapping pads the OU with all-zero columns that carry
a dummy index (the previous index again). `L = 8 + r` then holds, and a pad's
code is 0, so it adds nothing. This convention is specific to this RTL.

The list uses deltas, not absolute indices. The deltas are signed: the
reordering does not produce indices in increasing order (a pair such as
(9, 2) is common). With 8-bit deltas nothing is saved over absolute 7-bit
indices. `DELTA_W` is the knob to narrow them if the offline mapper bounds the
steps.

## Input indexing

`input_decoder` holds one `row_map_t` (valid bit + 7-bit logical row) per
physical row of each CU: 8 tables of 128 entries. Physical row r of CU k is
driven by input `x[map[k][r].idx]`. All OUs of one OU row share these 7
inputs, because the 128-byte IR-CU holds one byte per physical row.
Consequences:

* row compression works at the granularity of a bit-plane row: a logical row
  is dropped from CU k only when its bit k is zero in all 128 output columns;
* a band of 7 rows is the same for all OU columns of that band.

## Offline mapping (not hardware)

The row reordering that creates identical column pairs is offline
software, run once per layer before the crossbars are programmed. Its
outputs are what the hardware consumes:

* the crossbar contents of each CU;
* the row-index tables;
* the index entries;
* the used region `n_rows x n_cols`.

The testbenches contain a simple greedy stand-in (`tb/tb_map_pkg.sv`). Per CU
it drops all-zero bit-plane rows and packs the rest into bands of 7. Per band
it drops zero columns, pairs each column with the next identical one, and packs
pairs first, then singles, into OUs of 8. This mapper does not search for
the best pairing. It yields valid mappings with all the structures above.

## Global level

The host writes input vectors into the global buffer (port A). It programs the
PEs through the shared programming ports, selected with `prog_pe`, sets
`pe_cfg[p]`, and starts a job:

* `active`: which PEs run;
* `in_base[p]`, `out_base[p]`: byte addresses in the global buffer;
* `pool_len`: number of input windows max-pooled into one output (1 = none).

For each window t the global controller copies the 128 bytes at
`in_base[p] + 128·t` into each active PE, byte by byte. It then starts the
PEs together and waits for all of them. After the last window it writes the
128 int8 outputs of each PE to `out_base[p]`.

The requantisation is `y = sat8((acc·scale + 2^(shift-1)) >> shift)`, with an
8-bit `scale` and a 5-bit `shift` per PE.

## What is modelled, and what was chosen here

Behavioural models (they simulate, but are not meant for synthesis):

* `compute_crossbar`: ideal cell currents (`real`), with an `I_OFF` knob;
* `adc`: round and clip;
* `indexing_crossbar`: RRAM with ideal one-bit readout, written as an array.

The 1-bit DACs and the one-bit sense amplifiers have no logic of their own.
They are folded into these models.

Taken from the original proposal:

* 1 bit per cell, 128x128 crossbars, 7x8 OUs and 3-bit ADCs;
* 8-bit int weights and activations in two's complement;
* the add/subtract rule;
* eight CUs per PE, one per bit position;
* the 128 B CU input buffer;
* horizontal and vertical OU orders selected by a `direction` signal;
* at most two columns per shared pattern, listed first;
* length-only decoding and delta-coded column lists in an RRAM indexing
  crossbar;
* input reordering from 8 sets of row indexes;
* the worst-case cycle count;
* the block list of the PE and the accelerator.

Chosen in this RTL, where the proposal does not say:

* index-entry layout and widths; padding of partial OUs; signed deltas;
* the loop nesting, with input bits outermost, LSB first;
* lock-step CUs sharing one sequence over the largest region. The load
  imbalance between bit planes is not balanced; the proposal points to
  external techniques for that.
* one-cycle ADC and index reads; the load/compute/post phase order;
* ReLU as the non-linear function;
* requantisation by multiply-and-shift;
* max pooling over successive operations;
* the global buffer size, the job format and byte-serial transfers;
* 16 PEs, as in the 4x4 array drawn for the design (no number is given);
* asynchronous active-low reset of control state; memories are not reset.

Departures and gaps:

* The figure that describes output indexing states length conditions in
  units of `OU_W/2 .. OU_W`. The text states `OU_W .. 2·OU_W`. This RTL
  follows the text.
* OU-level row compression with a different row set per OU column is not
  supported. The 128 B IR-CU holds one input per physical row, so rows are
  compressed per whole bit-plane row.
* Input sparsity is not exploited.
* Layers larger than one PE slice (128 x 128) must be split by the host, and
  the partial sums across PEs must be combined outside.

## Capacity

At the default size the accelerator holds 16 slices of up to 126 x 128
int8 weights at once (258,048 weights; more rows fit when bit-plane rows are
zero). A LeNet-5 sized network (about 62 k weights, 9 slices) fits entirely.
AlexNet, VGG16, GoogleNet and ResNet18 need millions of weights and would
require reprogramming between layers. Nothing in this RTL provides for that
beyond the programming ports.

## Simulating

Each block has a self-checking testbench `tb/<module>_tb.sv`. It prints
`TB_RESULT checks=N failures=M` and stops itself by a watchdog if it hangs.
With Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/rram_pkg.sv tb/tb_map_pkg.sv tb/pe_tb.sv --top-module pe_tb
./obj_dir/Vpe_tb
```

`rram_accelerator_tb` runs the whole accelerator at its default size. It has
16 PEs with weight sparsities from 0 to 95 %. It runs a two-window pooled job
on all PEs and a plain job on half of them, and checks every output byte and
accumulator. It also fails if any mechanism never occurred: either OU order,
wordline reuse, repetitive columns, padded OUs, dropped zero rows and
columns, subtraction, pooling, ReLU clipping, an idle PE. It runs in a few
seconds. `pe_tb` checks a single PE at 0/50/85 % sparsity, including its
latency and event counters.

`lenet5_tb` runs a whole LeNet-5 inference (32x32 image, two 5x5
convolutions with 2x2 max pooling, fully connected 400-120-84-10) at 10, 50
and 90 % weight sparsity, using random weights and a random image. All nine
weight slices stay resident in PEs 0 to 8 at the same time. The testbench
acts as the host. It writes im2col windows into the global buffer. For
layers split over several PEs, it adds up the accumulators and requantises
the sums itself. Every intermediate value and the ten logits are checked
against a plain integer reference. The testbench also prints how many OUs
the compressed mappings visit compared with a dense bit-split mapping. At
10 / 50 / 90 % sparsity this is 7440 / 6368 / 2544 against 9766. It takes
about two minutes to simulate.
