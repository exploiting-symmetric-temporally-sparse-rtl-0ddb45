# A Delta RNN training accelerator in SystemVerilog

A delta network does not send a neuron's full activation at every timestep.
It sends only the change, and only when the change since the last value it
sent is larger than a threshold Θ. Most neurons of a speech RNN change slowly,
so most of these changes are zero. During inference this lets the hardware
skip the weight columns that belong to quiet neurons.

The paper *Exploiting Symmetric Temporally Sparse BPTT for Efficient RNN
Training* (Chen, Gao, Wang, Cheng, Zhou, Liu, Delbruck) shows that training
can skip the same columns. The set of neurons that was active at timestep t in
the forward pass is exactly the set whose gradients are non-zero in the
backward pass. All three matrix-vector products (MxV) of training therefore
share one sparsity pattern:

| product | equation | what one active neuron j costs |
|---|---|---|
| forward | M_t = W·Δx_t + M_{t-1}, with M_0 = bias | fetch column j of W, add W[:,j]·Δx_j to M |
| input gradient | ∂C/∂Δx_t = (Wᵀ·∂C/∂M_t) ⊙ m_t | fetch column j of W, dot product with ∂C/∂M_t gives element j |
| weight gradient | ∂C/∂W += ∂C/∂M_t · Δx_tᵀ | update column j of ∂C/∂W by ∂C/∂M_t·Δx_j |

Here m_t is the binary mask of active neurons. A column is never touched for
an inactive neuron: not in DRAM, not in the multipliers. With batch size 1,
the work and the DRAM traffic of each product scale with the occupancy o_c,
the fraction of active neurons. The ideal speed-up over a dense accelerator is
1/o_c.

The RTL in `rtl/` implements the accelerator that the paper sketches and
evaluates: 16 multiply-accumulate processing elements (PEs), an SRAM that holds
the sparse delta vectors as non-zero index and value lists, and a DRAM
controller that fetches whole weight columns as bursts. It computes the three
products above for one layer of up to 256 inputs × 256 outputs and up to 256
timesteps. The paper gives the block diagram, the flow of the three products,
the PE count and the sizes it evaluated. It gives no microarchitecture. The
lists, protocols, pipelines and number formats below are this design's own
choices, and each source file says which parts of it follow the paper.

## Blocks

```
                 x_t / h_t elements        dC/dM_t rows (from host)
                        |                         |
                 +--------------+                 |
                 | delta_encoder|  NZIL/NZVL      v
                 +--------------+ ----------> +---------+
                                              |sram_ctrl|  lists, per-step table,
                                              +---------+  dC/dM_t rows
                            NZI (index, value)  |     ^ row (t, beat)
                                                v     |
   DRAM <--- bursts ---  +---------+  <-- cmd --+----------+
   (external)            |dram_ctrl|            |train_ctrl|  sequencer
   DRAM --- beats -----> +---------+            +----------+
        <-- grad writes      | beats + tag           | dump (M_t read-out)
                             v                       v
                         +--------------------------------+
                         | pe_array: 16 x mac_pe + adder  | --> M_t rows, dC/dΔx elements
                         +--------------------------------+     (output ports, and back
                                                                into sram_ctrl)
```

* **delta_encoder** applies the delta rule to each incoming vector element.
  It keeps x̂, the last value propagated for each neuron. When |x − x̂| > Θ it
  updates x̂ and emits the pair (index, x − x̂). These pairs are the non-zero
  index list (NZIL) and non-zero value list (NZVL) of the timestep. Elements
  below the threshold produce nothing, so they cost nothing later.
* **sram_ctrl** stores the NZIL/NZVL entries of all timesteps back to back,
  plus a table of {first entry, count} per timestep. It also stores ∂C/∂M_t
  in rows of 16 words. A row lines up with one beat of a weight column, so
  the PE array reads the matching ∂C/∂M row in the same cycle that a weight
  beat arrives.
* The results come back into **sram_ctrl** as well:
  * every M_t row
  * every ∂C/∂Δx_t element, at {t, neuron}

  The host can read them later, as well as taking them from the streaming
  outputs. Only the active neurons' ∂C/∂Δx words are written. The gradient
  of an inactive neuron is zero by definition, and its word keeps its old
  contents, so the host should read only at indices in the mask.
* **train_ctrl** is the sequencer. For each timestep it reads the list and
  asks for one weight column per entry, tagged with the timestep and the
  delta value.
* **dram_ctrl** turns a column request into one DRAM burst and keeps up to
  four bursts in flight, so the slow opening of one burst hides behind the
  data of the previous one. It labels each returning beat with its row, its
  column and the request's tag. It also builds the write-back addresses for
  weight-gradient columns.
* **pe_array** holds 16 **mac_pe** lanes working in lock step on one beat, plus
  an adder tree. Lane p handles neurons p, 16+p, 32+p, and so on. Each lane
  keeps its slice of the pre-activation memory M (16 entries).

## Memory layout

DRAM is addressed in beats. A beat is 16 words of 16 bits. Matrices are stored
column by column. With `beats = n_out/16`:

* weight column j of W is at `cfg_w_base + j·beats … + beats−1`
* the bias vector is stored as the extra column j = n_in of the weight region
* weight-gradient column j is at `cfg_g_base + j·beats …`

This column-major order matters for the whole design. Skipping a neuron skips
exactly one burst, and a burst is DRAM's cheap case: the address is slow to
open, but the data then streams quickly.

## Pipeline and PE commands

A beat moves through three stages:

1. **A**: the beat arrives from DRAM. At the same time the ∂C/∂M_t row for
   (its timestep, its row) is read from SRAM.
2. **B**: the 16 PEs execute one command.
3. **C**: the results leave. An M_t row goes to `m_*` and into the SRAM
   result memory, or a gradient beat is written back to DRAM. For the
   input-gradient product, the adder tree needs one more cycle before
   `dx_*`.

| command | per lane | used by |
|---|---|---|
| `PE_BIAS` | acc[row] = w·2⁸ | forward, first column (M_0 = bias) |
| `PE_FMAC` | acc[row] += w·Δx_j | forward |
| `PE_DMAC` | psum += w·g; on the column's last beat output psum + w·g and clear it | input gradient |
| `PE_WUPD` | y = sat16(w + (g·Δx_j ≫ 8)), where w is the stored gradient | weight gradient |
| `PE_READ` | y = acc[row] | forward M_t read-out |

## Sequencing the three products

A run is started by pulsing `start` with `cfg_op` set. The run ends with a
`done` pulse once nothing is left in the pipeline.

**Forward (`OP_FP`)**, timesteps in ascending order:

1. Load the bias column.
2. For each timestep, fetch one column per list entry and accumulate it into
   M.
3. After a timestep's last fetch, wait until the pipeline is empty. Then
   stream M_t out: `beats` rows of 16 Q16.16 values.

M is kept from one timestep to the next, which is the recursion
M_t = W·Δx_t + M_{t−1}. The drain and read-out cost a fixed number of cycles
per timestep. This fixed cost is why short columns (small layers) and very
sparse timesteps lose some speed-up.

**Input gradient (`OP_BP_DX`)**, timesteps in descending order as in
back-propagation through time. For each entry j, column j is fetched and
multiplied lane by lane with ∂C/∂M_t. The adder tree sums the 16 lanes, and
element j of ∂C/∂Δx_t leaves on `dx_*` tagged with t and j. Only active
indices produce an output, which is the masking by m_t in the equation.
Like the forward pass, this pass drains the pipeline after each timestep.
For the recurrent weights the drain is a real dependency:
∂C/∂M_{t−1} needs the ∂C/∂Δh_{t−1} that step t produces.

**Weight gradient (`OP_BP_DW`)**, timesteps in descending order. For each
entry j, gradient column j is read from DRAM. The term ∂C/∂M_t·Δx_j is added,
and the column is written back beat by beat. The sum over all timesteps
therefore builds up in DRAM, one read-modify-write per active (t, j).

**The read-after-write hazard.** Within one timestep each column appears only
once. Across a timestep boundary the same column can appear twice in quick
succession. Up to four fetches are in flight, so the second read of column j
could return the old value before the first update has been written back.
Before the sequencer issues a gradient fetch it checks three places for a
pending update of the same column:

* the outstanding-request queue in `dram_ctrl`
* pipeline stage B
* the PE stage

If any of them holds column j, the fetch waits. `stat_haz_stalls` counts these
waiting cycles. The stall is rare, because the next timestep's list usually
offers a different column first. The measured weight-gradient speed-up stays
at the ideal value.

**The order of rounding.** Weight gradients are stored in Q8.8 and updated
with saturation, one timestep at a time. The result therefore depends on the
order of timesteps, which is descending. The reference models in the
testbenches use the same order.

## Number formats

* Data is 16-bit Q8.8: inputs, deltas, weights, bias, ∂C/∂M and stored
  weight gradients.
* Products and the M and ∂C/∂Δx accumulators are 32-bit Q16.16. They wrap on
  overflow.
* A delta is saturated to 16 bits. A weight-gradient word saturates at every
  update.
* Θ is a run-time input in Q8.8. The test value 26 is about 0.1, the
  threshold of most of the paper's speech experiments.

The paper does not specify any number format.

## Measured performance

`tb/tb_speedup_sweep.sv` repeats the paper's accelerator experiment with the
default parameters: layer sizes 64, 128 and 256 (inputs = hidden units =
timesteps), random inputs at 50, 80 and 90 % sparsity, and a DRAM burst
latency of 8 cycles. It reports T_dense / T_measured, where
T_dense = n_in·n_out·T/16 cycles is a fully used dense array. The sweep
checks every result against the reference model, with no failures. It also
checks three bounds:

* each product reaches at least 85 % of ideal at 256I-256H
* the weight gradient reaches at least 90 % of ideal at every size
* at 64I-64H and 90 % sparsity, the two per-timestep products stay below
  80 % of ideal

The measured speed-ups:

| network | sparsity | ideal 1/o_c | forward | input gradient | weight gradient |
|---|---|---|---|---|---|
| 64I-64H | 50 % | 2.02 | 1.74 | 1.79 | 2.01 |
| 64I-64H | 80 % | 5.15 | 3.67 | 3.90 | 5.13 |
| 64I-64H | 90 % | 10.0 | 5.61 | 6.15 | 9.86 |
| 128I-128H | 50 % | 2.01 | 1.92 | 1.95 | 2.01 |
| 128I-128H | 80 % | 4.98 | 4.46 | 4.62 | 4.98 |
| 128I-128H | 90 % | 10.1 | 8.15 | 8.70 | 10.1 |
| 256I-256H | 50 % | 2.00 | 1.97 | 1.98 | 2.00 |
| 256I-256H | 80 % | 5.01 | 4.82 | 4.91 | 5.01 |
| 256I-256H | 90 % | 10.1 | 9.38 | 9.74 | 10.1 |

How these numbers compare with the paper:

* **The trend matches the paper.** All three products come close to the
  ideal 2×, 5× and 10× at 256I-256H. For the small, very sparse layer, the
  forward and input-gradient speed-ups fall short. These two products work
  timestep by timestep: each timestep has only a few columns, and the fixed
  drain between timesteps is no longer hidden. The weight-gradient product
  streams over all timesteps and stays near ideal everywhere.
* **The exact values differ.** The paper's plot shows no values as numbers,
  so only the trend is compared. In the paper the input-gradient product
  loses more than the forward one at 64I-64H. Here it loses slightly less,
  because it has no M_t read-out. The paper gives neither its DRAM latency
  nor its pipeline depth, so its per-timestep overhead cannot be matched.
  This design uses an 8-cycle DRAM latency and a three-stage pipeline.
* **Speech-command layers.** The sweep also runs the 16-input, 128-unit
  Delta LSTM and Delta GRU layers from the paper's keyword experiment, on
  random data at the activation sparsity reported for them: 83.4 % for the
  LSTM and 76.3 % for the GRU. It uses 100 timesteps. Their gate matrices
  have 512 and 384 rows, so each is run in two row passes. For the
  recurrent weights of the LSTM, each 128×256 pass reaches 5.3–5.5× on the
  forward product. The weight gradient reaches 5.8–6.0×, which equals the
  ideal for the drawn data. The 16-column input weights gain less, because each
  timestep has only two or three columns to fetch.
* **Very short columns.** With 32 outputs, a column is only 2 beats. Four
  outstanding bursts then no longer cover the 8-cycle DRAM latency, and each
  column costs about 3 cycles instead of 2. The end-to-end test allows for
  this.

## How far to trust it

* Every block has a self-checking testbench with a reference model written
  independently of the RTL.
* Each testbench has been shown to fail on a deliberately broken copy of its
  block.
* `tb_delta_train_accel` runs the whole accelerator at its default parameters
  on four cases, from 32×32×8 up to the paper's largest case, 256×256×256. It
  checks every M_t value, every ∂C/∂Δx element and every weight-gradient
  word, and bounds the cycle count of each run. It also requires that each
  mechanism happens at least once:
  * skipped elements
  * a timestep with no active element
  * the bias load
  * the M_t read-out
  * a hazard stall
  * results read back from the SRAM result memory
* The DRAM in all tests is a behavioural model with a fixed latency. A real
  DRAM with refresh and page misses would make the timing worse, but not the
  results.
* The design has been linted and elaborated, but not synthesised to a
  technology, and no timing closure was attempted. The 16 × 32-bit adder
  tree and the row-address multiply in `dram_ctrl` are single-cycle
  combinational logic.

## What is not here

* **Everything outside the three MxVs.** This matches the paper's
  accelerator, which computes only the three MxVs. The following stay with
  the host:
  * tanh/σ and the LSTM/GRU gate arithmetic
  * the loss and ∂C/∂M_t
  * the optimizer step
* **The DRAM device.** It is external. `tb/dram_model.sv` is a behavioural
  model for simulation only.
* **One matrix per run.** For the recurrent part the host runs the same
  products with Δh_{t−1} lists and the W_h base addresses.
* **At most 256 output rows per pass.** LSTM (4 gates) and GRU (3 gates)
  layers of 128 units have 512 and 384 pre-activation rows. They need two
  passes over row halves, and the host must add the two halves of ∂C/∂Δx.

## Files

| file | contents |
|---|---|
| `rtl/drnn_pkg.sv` | number formats, `op_e` and `pe_cmd_e` encodings, saturation helpers |
| `rtl/delta_encoder.sv` | delta rule, NZIL/NZVL generation |
| `rtl/sram_ctrl.sv` | list memory, per-timestep table, ∂C/∂M_t rows, M_t and ∂C/∂Δx_t result memories |
| `rtl/dram_ctrl.sv` | column bursts, in-flight queue, hazard query, write-back addresses |
| `rtl/mac_pe.sv`, `rtl/pe_array.sv` | PE lane and 16-lane array with adder tree |
| `rtl/train_ctrl.sv` | sequencer of the three products |
| `rtl/delta_train_accel.sv` | top level |
| `tb/dram_model.sv` | behavioural DRAM: burst latency, pipelined requests |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_delta_train_accel.sv` | end-to-end test at default parameters |
| `tb/tb_speedup_sweep.sv` | speed-up sweep (table above) |

Each testbench prints one line `TB_RESULT checks=N failures=M` and stops. The
testbenches use only `$urandom`, so no constraint solver is needed. To run one
with Verilator from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    -Irtl -Itb -y rtl -y tb \
    rtl/drnn_pkg.sv tb/tb_delta_train_accel.sv --top-module tb_delta_train_accel
./obj_dir/Vtb_delta_train_accel
```

Replace the testbench name to run any other. `-Wno-fatal` keeps width
warnings in the testbench arithmetic from stopping the build. The RTL itself
gives no warnings at Verilator's default settings. The end-to-end test and the
sweep finish in a few seconds each.

## Using the top level

1. Pulse `seq_clear`. This empties the lists and forgets x̂. Set `cfg_theta`.
2. Stream the `n_t` vectors through `x_valid/x_idx/x_val`, one element per
   cycle, with `x_last` on the last element of each vector. `n_steps` counts
   the stored timesteps.
3. For the backward products, write ∂C/∂M_t with
   `g_wr_valid/g_wr_t/g_wr_row/g_wr_data`, one row of 16 values per cycle.
4. Set the configuration:
   * `cfg_n_t`, `cfg_n_in`
   * `cfg_beats = n_out/16`
   * the two DRAM bases
5. Pulse `start` with `cfg_op` = `OP_FP`, `OP_BP_DX` or `OP_BP_DW`, and wait
   for `done`.
6. Collect the results:
   * forward: M_t rows on `m_*`, or later from SRAM through `m_rd_*`
   * input gradient: ∂C/∂Δx_t elements on `dx_*`, or later through
     `dx_rd_*`
   * weight gradient: the updated gradient columns in DRAM

   Both SRAM read ports return the data one cycle after the request.

Constraints: n_out must be a multiple of 16, and `N_MAX/16` and `Q_DEPTH` must
be powers of two.
