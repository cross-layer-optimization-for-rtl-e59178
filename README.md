# FlexHyCA — a DNN accelerator that protects only what matters

A soft error in a deep-learning accelerator rarely matters. Most neurons are
unimportant to the final answer, and in those that are, most bits are
unimportant too: after 8-bit requantisation only the top one or two bits of
each output window can move the result much. Triplicating the whole datapath
(classic TMR) wastes area on bits and neurons that never needed it.

This design spends redundancy along both axes:

* **Across neurons.** A tile of 32 x 32 output neurons is computed on an
  ordinary 2D PE array. A short, compile-time list of *important* neurons in
  the tile is computed a second time on a separate dot-product unit (the
  DPPU). The DPPU's result replaces the array's result for those neurons.
* **Across bits.** In both the PEs and the DPPU, only the columns of the
  multiplier and the adder that produce the top `S` bits of the kept 8-bit
  window are triplicated and voted. The array uses `S = NB_TH` (1 by default).
  The DPPU uses the stronger `S = IB_TH` (2 by default).
* **Bounded by quantisation.** Requantisation keeps `acc[n+7:n]` of the 24-bit
  accumulator. If the compiler guarantees `n >= Q_SCALE` (7 by default), the
  protected columns can only lie between bit `Q_SCALE+8-S` and bit 15 of the
  product. That bound keeps the shared redundant hardware and its steering
  multiplexers small.

The rest of this document follows the datapath from the smallest part
upwards. It ends with the tile protocol, the parameters, and how to simulate
the design.

## 1. The bit-protected multiplier (`bp_mult`, `col_unit`)

The hardest part to follow is how a product can be triplicated on only a few
of its bits.

The 8 x 8 signed product is built as a column array in Baugh-Wooley form:

* partial product bits whose sign term is complemented;
* constant ones in columns 8 and 15;
* no sign extension.

Column `c` is a `col_unit`. It adds the partial-product bits of that column to
the carry *value* arriving from column `c-1`. It emits one sum bit, and
passes the rest of the count upward as the next carry value. Any reduction
tree gives the same count, so this is a behavioural stand-in for the Wallace
tree of a real multiplier. Sixteen column units in a chain form the primary
product.

The redundant array has `2 x S` column units: two extra copies of `S`
columns. `trunc_lsb` is the runtime window position `n`. From it, input
multiplexers steer these copies onto product columns `n+8-S ... n+7`, the
columns that give the window's top `S` bits.

* Each redundant copy takes the partial-product bits of its target column.
* Its lowest column takes the carry value of the primary chain at that point.
* The copies then ripple among themselves.
* Each target column's output bit is the majority of the primary bit and the
  two redundant bits.
* Voted carries are not fed back into the primary chain. Carries only flow
  upward, so nothing above the window can change the bits that are kept.
  Leaving out the feedback also avoids combinational loops through the
  steering multiplexers.

`Q_SCALE` limits how far the multiplexers must reach: `n` is clamped to at
least `Q_SCALE`. With the defaults (`Q_SCALE = 7`, `S = 1`), the one protected
column is one of columns 14...15 of the product. Columns 16 and up are sign
bits, so they are unprotected and ignored.

The `fi_mask` input XORs the primary column outputs. It is the fault-injection
hook used by every level of the design.

## 2. The protected accumulator (`bp_acc`)

The 24-bit accumulator is split at bit `PLO = Q_SCALE + 8 - S`:

* The lower slice is a single adder.
* The upper slice is computed three times from the same operands and the
  lower slice's carry. The three results are voted bitwise.

The protected span is fixed at elaboration, so the accumulator needs no
steering. It covers every window position allowed by the quantisation bound.

## 3. The PE array and its timing (`pe`, `pe_array`)

Each PE holds:

* one `bp_mult`;
* one `bp_acc`;
* a 24-bit accumulator register.

The dataflow is output-stationary:

* Weights enter from the left, one row per PE row.
* Activations enter from the top, one column per PE column.
* Both move one PE per cycle.
* A `first` flag travels with the weights and restarts the accumulator.

`pe_array` contains the input skew. The caller presents element `k` of all
rows and columns together, on `w_vec`/`x_vec` with `in_vld`. The array then
delays row `r` by `r` cycles and column `c` by `c` cycles. PE `(r,c)` sees
element `k` in cycle `t0 + k + 1 + r + c`, where `t0` is the cycle element 0
was presented. So every accumulator holds its final value in cycle
`t0 + K + ROWS + COLS - 1`.

The `fi_*` ports pick one PE and apply a multiplier mask and an accumulator
mask to it.

## 4. Important neurons and the DPPU (`dppu`, `pos_table`)

The position table lists the `(row, col)` array coordinates of the important
neurons in each tile. The compiler chooses them by sensitivity analysis,
which is not part of the hardware. A tile uses `cfg_pos_count` entries,
starting at `cfg_pos_base`.

The DPPU is `Dot_size = 52` bit-protected multipliers (`S = IB_TH`) feeding an
adder tree and a protected 24-bit accumulator. To recompute neuron `(r,c)`,
it needs row `r` of the weights and column `c` of the activations. These are
consumed in chunks of 52 elements, one chunk per cycle. There are two ways
to get the operands.

* **Reuse.** While the tile streams into the array, the DPPU keeps its own
  copy of the stream. The copy is banked by `k mod 52`, so one read gives a
  whole chunk. A reuse job waits only until the chunk it needs has been
  captured. Reuse therefore overlaps with the array and costs no DRAM
  traffic.
* **DRAM.** The DPPU fetches each chunk from DRAM itself.
  * One request returns 52 weight bytes and 52 activation bytes.
  * Weights are addressed row-major: `w_base + row*K + q*52`.
  * Activations are addressed column-major: `x_base + col*K + q*52`.
  * The DPPU waits for each response before sending the next request.

Each job takes `2*ceil(K/52) + 2` cycles from acceptance to result when its
data are ready.

The data load controller uses reuse only if `cfg_data_reuse` is set and the
whole list fits in the time the array is busy anyway:

    pos_count * (2*ceil(K/52) + 2)  <=  K + ROWS + COLS

Otherwise the tile uses DRAM mode, which `mode_dram` reports. The paper states
the idea: switch to DRAM once the important neurons exceed what the DPPU can
do within the tile. This inequality is this design's own form of it.

Results go through a small FIFO in the DPPU. They are written into the output
buffer only after the array's results have been captured, so a DPPU value
always overrides the array value for its neuron.

## 5. Buffers and the tile protocol (`weight_buffer`, `input_buffer`, `output_buffer`, `data_load_ctrl`, `flexhyca_top`)

The buffers:

* `weight_buffer`: 512 KB, organised as one 32-byte word per `k`, which is
  one weight per array row.
* `input_buffer`: 256 KB, organised the same way per array column.
* `output_buffer`: holds the 8-bit window `acc[n+7:n]` of every neuron.
  * It captures all 1024 neurons at once when the array is finished.
  * It accepts single-neuron overrides from the DPPU.
  * It is read one byte at a time through `ob_rd_row`/`ob_rd_col`. Read
    data appear one cycle after the address.

The buffers and the position table are filled through plain synchronous
write ports. The DMA engine that would fill them from DRAM is outside this
design.

One tile, as seen from `flexhyca_top`:

1. Write the weights, activations and position entries.
2. Set `cfg_*`: `k_len` (1...KMAX), `trunc_lsb` (`Q_SCALE`...16), the buffer
   bases, the position-table base and count, `data_reuse`, and the DRAM base
   addresses. Hold them stable.
3. Pulse `start`. `busy` rises.
4. The controller streams `k = 0..K-1` from both buffers into the array, and
   into the DPPU's copy, at one element per cycle. It issues the DPPU jobs
   from the position table in parallel.
5. `ROWS + COLS - 1` cycles after the last element, the output buffer
   captures the array. Then the queued DPPU results are written over their
   neurons.
6. `done` pulses once the stream has been captured, all jobs are issued, and
   the DPPU is idle.

A reuse tile finishes in about `K + ROWS + COLS + 2*ceil(K/52) + small`
cycles. The end-to-end test measures, for example:

* 128 cycles for K = 60;
* 271 cycles for K = 200 with 5 important neurons.

One tile is in flight at a time.

DRAM port (`dram_req_*`, `dram_rsp_*`):

* A request is a valid/ready handshake carrying two byte addresses.
* The response is a single `dram_rsp_valid` cycle carrying both 52-byte
  vectors.

## 6. Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `ROWS`, `COLS` | 32, 32 | PE array size |
| `DOT` | 52 | DPPU multipliers (Dot_size) |
| `Q_SCALE` | 7 | lowest window LSB the compiler may use |
| `NB_TH` | 1 | protected top bits in array PEs |
| `IB_TH` | 2 | protected top bits in the DPPU |
| `WBUF_BYTES` | 512 KB | weight buffer |
| `IBUF_BYTES` | 256 KB | input buffer |
| `KMAX` | 4608 | longest reduction the DPPU copy can hold (3·3·512) |
| `POS_DEPTH` | 1024 | position-table entries |
| `RES_DEPTH` | 16 | DPPU result FIFO |

The defaults are the best configuration found for the lower of the two fault
rates studied. For the higher fault rate, that configuration uses
`IB_TH = 3` and `Q_SCALE = 8`. Both are parameter changes.

Data are 8-bit signed, products 16-bit, and accumulators 24-bit (`ft_pkg`).

## 7. Fault injection

These ports emulate soft errors. They are test hooks, not part of the
protection.

* `fi_arr_en`, `fi_row`, `fi_col`, `fi_arr_mul`, `fi_arr_acc` flip chosen
  primary-copy bits of one PE's multiplier columns or accumulator sum, in
  every cycle the mask is set.
* `fi_dppu_en`, `fi_lane`, `fi_dppu_mul`, `fi_dppu_acc` do the same for one
  DPPU multiplier lane and the DPPU accumulator.

A flip in a protected column is outvoted. A flip below it shows in the output
exactly as an unprotected soft error would.

## 8. Verification and simulation

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`, and each has a watchdog.

* **`bp_mult_tb`** covers all 65536 operand pairs, at several window positions,
  with one and with two protected bits. It checks that a flipped protected
  column is masked and that an unprotected flip shows.
* **`pe_array_tb`** uses an 8 x 8 array. It checks the cycle at which
  results become final, and the exact output of a faulted PE.
* **`dppu_tb`** runs at full size with a DRAM model. It checks the results in
  both reuse and DRAM mode, and the job latency `2*ceil(K/52)+2`.
* **`flexhyca_top_tb`** runs the whole design with no parameter overrides. It
  runs six tiles that make each mechanism happen, and counts each one:
  * reuse;
  * DRAM mode;
  * DPPU override of a faulty important PE;
  * a fault masked by PE TMR;
  * a fault visible in an ordinary neuron;
  * a fault masked inside the DPPU.

  It checks all 1024 outputs of every tile against a reference computed in
  the testbench.

`tb/dram_model.sv` is a behavioural DRAM. It is used only by testbenches.

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal -y rtl rtl/ft_pkg.sv \
        tb/dram_model.sv tb/flexhyca_top_tb.sv --top-module flexhyca_top_tb
    ./obj_dir/Vflexhyca_top_tb

The other testbenches build the same way. Leave out `dram_model.sv` where it
is not used. The full-size top is slow to compile. The C++ build of 1024
bit-level PEs takes about 15 minutes on one core; pass `-j` to use more. It
then simulates in about ten seconds.

Known tool messages:

* Verilator warns SYNCASYNCNET on `rst_n`. The assertions use it in
  `disable iff`, while the flops use it as an asynchronous reset.
* Some package constants are unused by some modules.

## 9. Where this design departs from the source architecture

* **Multiplier redundancy.** The redundant array copies whole columns. The
  proposed refinement that merges the narrow left-hand columns to share
  redundant units is not built.
* **Own choices where the source gives only the function:**
  * the Baugh-Wooley form;
  * the column-count formulation;
  * the output-stationary dataflow and skew;
  * the banked reuse copy in the DPPU;
  * the exact reuse-versus-DRAM inequality;
  * the DRAM request format and data layout;
  * all handshakes and reset behaviour.
* **One tile at a time.** The controller does not overlap the capture of one
  tile with the stream of the next.
* **Requantisation** is plain truncation to `acc[n+7:n]`, with no rounding or
  saturation.
* **Reduction length.**
  * Length is limited to `KMAX = 4608`, and there is no partial-sum
    accumulation across tiles.
  * Every ResNet-50 layer fits.
  * VGG16's first fully connected layer (K = 25088) does not.
* **Outside the hardware:**
  * the software side (layer sensitivity analysis, choice of important
    neurons, and the search over `Q_SCALE`, thresholds and `Dot_size`);
  * the fault simulator;
  * the DMA that fills the buffers.
