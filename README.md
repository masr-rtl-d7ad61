# MASR: a sparse bidirectional-RNN accelerator in SystemVerilog

Speech recognisers such as Deep Speech 2 spend nearly all their time in recurrent
layers of the form `h[t] = ReLU(W_x x[t] + W_h h[t-1] + b)`. Trained with ReLU and
pruned, these layers are sparse in two ways: about two thirds of the weights are
zero (fixed at training time), and most hidden-state values are zero (a different
set every time step). This accelerator skips both kinds of zero at once. It stores
only the non-zeros of weights and activations, plus one bit mask per weight column
and per activation vector. The address of a compact value is computed from the
masks with a leading-one detector and a population count, so no index or pointer
arrays are stored.

The RTL implements the main configuration, "LANESx32":

- 800 hidden units.
- 32 lanes in a 2 × 16 array.
- 10-bit weights and activations.
- About 1.25 MB of weight SRAM and 450 KB of activation SRAM.

It runs whole bidirectional layers: all time steps forward, then all time steps
backward. Each direction uses its own bank of weights.

## The bit-mask encoding

Take one output column `c` of a matrix-vector product `y = W a`:

- `wmask[r]` is set where `W[r][c] != 0`.
- `amask[r]` is set where `a[r] != 0`.
- `work = wmask & amask` marks exactly the products that must be computed.

The lane repeatedly takes the lowest set bit `r` of `work` and clears it (`lnzd.sv`). It then forms two addresses:

- weight address = column base + `popcount(wmask[r-1:0])`
- activation address = `popcount(amask[r-1:0])` (`prefix_popcount.sv`)

The weight address reads the compact weight SRAM, which holds the non-zeros of the lane's columns in column order. The activation address reads the compact activation register file, which holds the non-zeros of the input slice in row order.

Example: work mask `0010` (element 0 first) gives r = 2. A weight mask of `0011` then gives weight address 0, and an activation mask of `1110` gives activation address 2.

Only the masks are visited; no work is spent on zero products. Because the lane walks its columns in order, the column base is a running sum of the weight-mask popcounts. No per-column pointer is stored.

## Array organisation

```
                 horizontal position h = p*LPE + l   (H = HPE*LPE = 16)
             +-------------------------+-------------------------+
 rows        |  PE(v=0,p=0): 8 lanes   |  PE(v=0,p=1): 8 lanes   |  rows 0..399
 0..399      |  one shared act. RF     |  one shared act. RF     |
             +-------------------------+-------------------------+
 rows        |  PE(v=1,p=0)            |  PE(v=1,p=1)            |  rows 400..799
 400..799    |                         |                         |
             +-------------------------+-------------------------+
                 |  back end queues, one per lane
                 v
     16 partial-sum accumulators (one per h) -> 800-entry output register file
                 -> VVAdd (bias, ReLU, pack) -> compact activation SRAM
                 -> activation loader -> PE register files (next step)
```

**Splitting the matrix.** A weight matrix is split into 2 vertical slices of 400 input rows and 16 horizontal lane positions.

- Lane `(v, h)` owns rows `v*400 .. v*400+399`.
- Output column `c` goes to position `c mod 16`, as local column `c / 16`.

Each lane therefore owns 400 × 50 weights per matrix.

**Sharing activations.** The 8 lanes of a PE use the same input slice, so they share one register file. The file has one read port per lane.

**Summing partial sums.** The two lanes of a horizontal position each produce a partial sum for every one of their 50 columns. Accumulator `h` waits until both queue heads are present, pops them together, and adds them into the output register file at entry `k*16 + h`.

**Lanes are decoupled.** Each lane runs at its own pace over its own sparse work. A lane that is ahead fills its queue, which is one entry deep, and then stalls. This back-pressure stall is the main loss of the design at scale.

## The lane pipeline (`masr_lane.sv`)

**Front end.** It reads the R-bit weight mask of the next column from the mask SRAM and ANDs it with the activation mask. It also adds the mask's popcount to the running weight base. Decoded columns go into a two-entry buffer, so the back end never waits between columns.

**Back end.** It has four stages and issues one MAC per cycle:

1. S1: LNZD on the remaining work bits.
2. S2: the two popcount addresses.
3. S3: read the weight SRAM and the register file.
4. S4: multiply-accumulate into a positive-weight or a negative-weight accumulator.

The two accumulators exist because positive and negative weights were quantised with separate scale factors. When the last work item of a column reaches S4, `{pos, neg}` is pushed to the queue.

Three cases need explaining:

- **Column with no work.** It still sends one token with a zero result, so every accumulator receives exactly C partial sums per pass.
- **Skipped column** (output predication). It sends the same zero token. Its mask is still read, because the read advances the base.
- **Full queue.** The whole back end holds while the queue is full.

**Pass length.** With a free queue, a pass takes one cycle per work item, plus one per empty or skipped column, plus about seven cycles of fill and drain (see `tb_masr_lane`).

**Memory layout.** Each lane keeps two banks of weights and masks: bank 0 for the forward direction, bank 1 for the backward direction.

- Within a bank, mask words `0..C-1` are the W_h columns and `C..2C-1` are the W_x columns.
- The compact weights are the W_h non-zeros in column order, followed directly by the W_x non-zeros.
- The lane remembers where the W_h block of each bank ended, so a W_x pass can start there.

The host can write either bank at any time. It is expected to write the idle one, which is the double buffering the design relies on. The end-to-end test writes a backward mask bank while the forward pass is running.

## One time step (`layer_ctrl.sv`)

For direction `d` and step `t` (t counts down in the backward direction), the controller does the following:

1. **Load h.** The activation loader reads the previous hidden state from the activation SRAM into the PE register files. This is `t-1` forward and `t+1` backward. At the first step of a direction it loads all zeros.
2. **W_h pass.** The lanes and accumulators compute `W_h h`, overwriting the output register file.
3. **Predication flags.** The controller captures, for every output, whether `W_h h` is below a programmable threshold. This is output predication: a strongly negative hidden intermediate will almost certainly be zeroed by ReLU. With `cfg_op_en`, the following W_x pass skips these columns, and their input products are never computed. It is never applied at the first step, where h is zero.
4. **W_x passes.** Load `x[t]` and run a W_x pass, which adds to the output register file. If `cfg_two_in` is set, a second input vector is loaded and added with the same weights. A layer above a bidirectional layer can then take `y = h + g` without forming the sum: `W_x y = W_x h + W_x g`.
5. **VVAdd.** The VVAdd unit reads the output register file six entries per cycle (per activation bank) and, for each entry:
   - adds the bias of the direction;
   - applies ReLU;
   - shifts right by `cfg_out_shift`;
   - saturates to 511.

   It then packs the non-zeros six to a 60-bit row and writes them, followed by the vector's descriptor (mask and first row).

**Number formats.** The accumulators combine their two sums as `(pos*scale_pos + neg*scale_neg) >>> 8`, with 10-bit unsigned Q2.8 scale factors per direction. This rescaling and the output shift are this design's own choices; the paper only says the two signs are quantised separately.

**Activation memory.** The activation SRAM is divided into host-placed regions. Vector `t` of region `r` has descriptor number `r*TMAX + t`, and its rows follow directly after those of vector `t-1`, so a sparse region takes little space. A typical bidirectional layer reads region 0 (`x`) and writes regions 1 (`h`) and 2 (`g`). The next layer reads regions 1 and 2 as its two inputs.

## Blocks

| file | what it is |
|---|---|
| `masr_pkg.sv` | widths (10-bit values, 32-bit accumulators, 16-bit biases), `psum_t`, modes, controller states, the scale function |
| `lnzd.sv` | lowest-set-bit detector |
| `prefix_popcount.sv` | ones below an index |
| `sram_1r1w.sv` | synchronous 1R1W memory model (stands for compiled SRAM macros) |
| `psum_fifo.sv` | back end queue (depth `QDEPTH`, default 1) |
| `masr_lane.sv` | the lane: mask and weight SRAMs in two banks, front end, 4-stage back end |
| `act_regfile.sv` | per-PE compact activation register file with the slice mask |
| `masr_pe.sv` | LPE lanes around one register file |
| `psum_accum.sv` | sums the V lanes of one horizontal position and scales the result |
| `output_rf.sv` | 800-entry output register file, one write bank per position, predication compare |
| `vvadd_unit.sv` | bias, ReLU, requantise, pack, write descriptor |
| `act_store.sv` | packed activation rows (B banks × 60 bits) and vector descriptors |
| `act_loader.sv` | descriptor → per-slice offsets → row broadcast into the register files |
| `layer_ctrl.sv` | the step sequencer above |
| `masr_top.sv` | everything wired, with host load ports |

## Parameters of `masr_top`

| parameter | default | meaning |
|---|---|---|
| `N` | 800 | hidden units (output register file size) |
| `VPE`, `HPE`, `LPE` | 2, 2, 8 | vertical PEs, horizontal PEs, lanes per PE (LANESx32) |
| `QDEPTH` | 1 | back end queue depth |
| `BANKS` | 1 | activation SRAM banks; VVAdd and the loader handle 6×BANKS values per cycle |
| `WDEPTH` | 16384 | compact weights per lane and bank (1280 KB total over 32 lanes) |
| `MDEPTH` | 100 | weight-mask words per bank (2 matrices × 50 columns) |
| `RFD` | 256 | register file depth, 0.64 of the 400-row slice |
| `TMAX` | 333 | time steps per region (the average utterance length) |
| `ACT_ROWS` | 61440 | 60-bit activation rows per bank (450 KB) |
| `NREG` | 4 | activation regions |

Other configurations from the same family can be built by changing these parameters:

- LANESx256: `VPE=8, HPE=2, LPE=16`, `RFD=64`.
- LANESx1024: `VPE=32, HPE=1, LPE=32`, `RFD=16`, with 8 activation banks.

Requirements and checks:

- `N` must divide by `VPE` and by `HPE*LPE`.
- `WDEPTH` must hold the non-zeros of a lane's W_h and W_x blocks for one direction.
- A slice with more than `RFD` non-zeros raises `rf_overflow`. Its extra values are dropped, so the host must keep activations sparse enough, or raise `RFD`.

## Host interface

`masr_top` has no DRAM interface. The off-chip memory side is represented by plain write ports:

- **Weights.** `w_*` writes one compact weight per cycle into a lane (`lane = v*H + h`), a bank and an address.
- **Masks.** `m_*` writes one R-bit column mask.
- **Biases.** `b_*` writes a bias.
- **Activations.** `a_rw_*` / `a_dw_*` write activation rows and descriptors. `a_rr_*` / `a_dr_*` read results back.

To run a layer:

1. Set the `cfg_*` inputs: step count, bidirectional, two inputs, region numbers, region base rows, predication enable and threshold, output shift, and scale factors.
2. Pulse `start`.
3. Wait for `done`.

Status outputs give the controller state and per-lane busy, stall and MAC signals.

## What was not built, and where this departs from the paper

- **Load balancing is not built.** The paper moves work from busy lanes to idle ones, within a PE or across vertical PEs, using duplicated weights and activations. It gives no mechanism for this.
- **No DRAM controller.** The paper uses LPDDR4. Activations beyond 333 steps would be double buffered from there. Here the host writes through plain ports, and longer sequences do not fit.
- **The steps are not overlapped.** Loads, passes and VVAdd run one after another. The paper's cycle counts may overlap them; it does not say.
- **The number formats are this design's own.** The Q2.8 scales, the output shift, 32-bit accumulators and 16-bit biases are not from the paper. The batch-norm refactoring of the paper is left to the host, which folds it into weights and biases.
- **The weight capacity follows one of two conflicting numbers.** The paper's table gives both 32 KB of weights per lane and 1280 KB in total, which is 40 KB per lane. The 1280 KB total was followed.
- **The register file depth follows the paper's proportion.** The paper gives 64 words for 100-row slices and 16 for 25-row slices. The same 0.64 ratio gives 256 words for 400 rows.
- **The memories are behavioural.** They are arrays with a one-cycle read. A real implementation would use compiled SRAM macros.

## Verification

Every testbench is self-checking. Each prints `TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| testbench | covers |
|---|---|
| `tb_lnzd`, `tb_prefix_popcount` | the worked example above, exhaustive one-hot masks, random masks |
| `tb_sram_1r1w`, `tb_psum_fifo` | memory timing; queue order, flags, push-while-full-and-popped |
| `tb_masr_lane` | every partial sum of both banks and both matrices, MAC count = work bits, pass length, stalls under random pops, skipped columns |
| `tb_out_path` | accumulators and output register file: overwrite and add passes, scaling, read window, predication flags |
| `tb_act_path` | VVAdd → activation store → loader → register files, host-written vectors, the all-zero load |
| `tb_masr_top` | end to end at 24 units (2×2 PEs of 2 lanes), two layers, against an integer reference |
| `tb_masr_top_full` | the same test at the default parameters (800 units, 32 lanes), two time steps per layer |

The end-to-end tests share `tb/masr_top_body.svh`. They generate random 33%-dense weights, biases and sparse inputs, and run two layers:

1. A bidirectional layer, whose last lane's backward masks are written while the forward pass runs.
2. A unidirectional layer with two input vectors and output predication.

Every stored hidden state is compared with a reference model. The tests also count each mechanism and fail if any of them never occurred:

- MACs, back end stalls and empty columns;
- skipped (predicated) columns;
- weight writes during a run and the direction switch;
- VVAdd partial-row flushes and two-input layers.

The full-size run takes about 0.9 million cycles, most of them loading weights one word per cycle. It needs a few minutes of Verilator build and simulation time.

To simulate with Verilator (from the directory that holds `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
    -y rtl -Irtl -Itb rtl/masr_pkg.sv tb/tb_masr_top.sv \
    --top-module tb_masr_top -o sim --Mdir obj_top
./obj_top/sim
```

`-y rtl` lets Verilator find each module in the file of the same name. Replace the testbench file and top module name to run any other test. `-Wno-fatal` keeps the testbenches' width warnings (integer reference arithmetic) from stopping the build. The RTL itself lints cleanly under `-Wall` except for two intended cases, which are explained in the opening comments of `masr_lane.sv` and `masr_top.sv`.
