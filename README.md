# Neuron-level fuzzy memoization for an LSTM accelerator

A recurrent layer runs once for every element of its input sequence. Speech
frames, video frames and similar inputs change little from one element to the
next, and so do most neuron outputs. This design uses that. It keeps the last
full-precision output of every neuron in a small table, and reuses it for as
long as the neuron is predicted to have changed little. A reused neuron skips
its dot product: no weight is fetched and no multiply is done. Weight fetches
are where most of the energy of such an accelerator goes.

The prediction comes from a *binarized* copy of each neuron. Each weight and
each input is reduced to its sign, so the neuron becomes an XNOR of two bit
vectors followed by a population count. The output of this binary neuron
tracks the output of the real neuron closely, and costs almost nothing to
compute. When the binary output has moved little since the last real
evaluation, the cached real output is used again.

This repository gives synthesizable SystemVerilog for the scheme, built into an
accelerator with four computation units (CUs), one per LSTM gate, and an
on-chip memory. The structure, the decision rule and the main sizes (16-lane
dot product unit, 2048-bit binary dot product, 5-cycle decision latency,
2 MiB weights, 8 KiB input buffer and 8 KiB memoization table per CU, 6 MiB
on-chip memory) follow the published design, the E-PUR accelerator extended
with the memoization scheme. The number format, the activation functions, the
sequencing between the units and all interfaces are this implementation's own
choices. They are listed under "Departures" below.

## The reuse decision

For neuron *n* at time-step *t*, with the input vector v = [x_t, h_{t-1}]:

    y_b   = sum_i  sign(w_i) * sign(v_i)          (each term is +1 or -1)
    eps   = |y_b - y_b_m| / |y_b|                 relative change of the binary output
    delta = delta_m + eps                         accumulated since the last evaluation
    reuse = delta <= theta   (and not the first element of the sequence)

The table entry of the neuron holds `y_m` (the last full-precision
pre-activation value), `y_b_m` (the binary output computed with it) and
`delta_m`. The entry is updated as follows:

* **Reuse:** `y_m` goes on as the neuron's value. Only `delta_m` is updated, to `delta`.
* **No reuse:** the neuron is evaluated in full precision, giving `y`. The
  entry becomes `{y, y_b, 0}`.

The accumulation acts as a throttle. A neuron whose binary output drifts
slowly, a little at every step, is still re-evaluated once the drift adds up
to `theta`. A test of the single-step `eps` alone would reuse such a neuron
forever. The first element of a sequence evaluates every neuron and fills the
table (`first_step`).

`theta` is a per-network constant, chosen offline as the largest value that
keeps the accuracy loss acceptable. It is an input of the design, as unsigned
fixed point with 8 fractional bits (`80` = 0.3125).

Arithmetic details (`cmp_unit`):

* `y_b`, `delta` and `theta` are 16-bit values.
* `eps` is computed as `(|y_b - y_b_m| << 8) / |y_b|`. Both `eps` and
  `delta` saturate at 0xFFFF.
* If `|y_b| = 0`, then `eps` is 0 when `y_b_m` is also 0. Otherwise `eps` is
  the maximum, which forces an evaluation.

## Inside a computation unit (`cu`)

```
            sign row n (2048 b)         binarized [x,h] (2048 b)
 sign_buffer ------------------> fmu: bdpu (XNOR, popcount) --y_b--> cmp_unit --reuse-->
     |                               memo_buffer <---------------- y_m, y_b_m, delta
     | (sign bits of lanes)                                          |
     v                                                               | y_m (bypass)
 weight_buffer --15-bit rests--> dpu (16 mult, adder tree, acc) --y--+--> mu (bias, act) --> register file
 input_buffer ---16 words/cycle--^
```

The weight store is split in two parts:

* `sign_buffer` holds the signs: one 2048-bit row per neuron, 512 rows.
* `weight_buffer` holds the other 15 bits of every weight: 16 weights per
  row, 65536 rows.

The binary neuron reads only the sign row. The dot product unit rebuilds each
full weight as `{~sign, rest}` from the same sign row, which is still held in
the sign buffer's read register, and from the weight row. Together the two
parts make the 2 MiB of 16-bit weights.

Neurons are processed one at a time. The cost of each neuron:

| case | cycles | what happens |
|---|---|---|
| reused | 5 | sign row and table entry read (1), BDPU (3), comparison (1); `y_m` goes to the MU |
| evaluated | 5 + K + 4 | as above, then the DPU walks K = ceil(len/16) sub-vectors: read, multiply, reduce, accumulate |

The next neuron enters the FMU in the same cycle as the current one leaves
it. The FMU forwards a table entry that is written in that same cycle. The MU
works in parallel with the next neuron: it adds the bias, applies the
activation and writes the result to its register file, with 3 cycles of
latency. A pass over `n` neurons ends 4 cycles after the last neuron leaves,
so its length is exactly `4 + sum(cost)`. The testbenches check this.

A reused neuron saves K + 4 cycles and pays the 5-cycle decision. A reused
neuron therefore gains only when K > 1. A layer with 256 inputs (K = 16) saves
20 cycles per reused neuron and pays 5 cycles on every neuron.

## One time-step through the accelerator (`epur_bm_top`)

The four CUs are the input gate (sigmoid), forget gate (sigmoid), cell
updater (tanh) and output gate (sigmoid). They share one input vector.

1. **Load (host, while idle).** Select a gate with `cu_sel`. Write its sign
   rows (`sign_*`), weight rows (`w_*`; neuron n's sub-vector k goes in row
   n*K + k) and biases (`b_*`). Write x_t into input words 0..nx-1 with
   `in_*`. The input words go to all four CUs. Before the first step, also
   write h_{-1} at words nx..nx+nh-1 and write c_{-1} into the on-chip memory
   at `c_base`.
2. **Gates (`start`).** The four CUs run their gates in parallel. Each pass
   takes as long as its own mix of reused and evaluated neurons needs.
3. **Cell update.** When all four CUs are done, one neuron is handled every
   two cycles. i, f, g, o are read from the four register files and c_{t-1}
   from the on-chip memory. The unit computes `c = f*c_prev + i*g` and
   `h = o*tanh(c)`. c_t is written back at `c_base+j` and h_t at `h_base+j`.
   h_t is also written into input word nx+j of every CU, so it becomes the
   recurrent input of the next step.
4. **Done.** `done` pulses. `step_cycles` reads `max_gate_pass + 2*nh + 4`.
   The per-gate counters `reuse_cnt` and `eval_cnt` have advanced.

Read the outputs through the `om_re`/`om_raddr` port. Change `h_base` from
step to step to keep the whole output sequence. A deep or bidirectional
network runs one layer (one direction) at a time, with its weights loaded
before the sequence. The weights are fetched once per sequence, not once per
step.

Rules for the host:

* Hold the configuration stable while `busy` is high.
* Write the input words only while idle.
* Set `first_step` on the first element of every sequence.

## Number formats

* **Full-precision values** (weights, inputs, gate outputs, c, h): 16-bit
  two's complement, 8 fractional bits (Q8.8).
* **DPU:** full 32-bit products and a 48-bit accumulator. The result is
  shifted back to Q8.8 with saturation.
* **Activations:** piecewise linear. The sigmoid has slopes 1/4, 1/8 and 1/32
  with breakpoints at |x| = 1, 2.375 and 5, and is symmetric about (0, 1/2).
  The error against the true sigmoid is below 0.02. tanh is computed as
  `2*sigmoid(2x) - 1`.
* **Binarized values:** 1 for x >= 0, 0 otherwise. For Q8.8 words this is
  the inverted sign bit.

## Sizes and what fits

| parameter | value | origin |
|---|---|---|
| DPU lanes | 16 | published |
| BDPU width, inputs per neuron | 2048 | published |
| FMU latency | 5 cycles | published |
| integer width in the FMU | 16 bits | published |
| weight store per CU | 2 MiB = 512 sign rows x 2048 b + 65536 rows x 240 b | size published, split derived |
| neurons per gate | 512 | derived: one sign row per neuron |
| input buffer per CU | 8 KiB = 4096 words | published |
| memoization table per CU | 8 KiB = 1365 entries of 48 bits | published size |
| on-chip memory | 6 MiB = 3 Mi words | published |

All defaults are the full sizes. Per layer and gate, the sizes of the
evaluated networks give the following:

* **One-layer sentiment LSTM (128 neurons):** fits. It uses 64 KiB of the
  weights and K = 16, assuming 128 inputs.
* **Bidirectional speech LSTM (320 neurons per direction):** fits. With up to
  960 inputs, a gate uses 614 KiB of weights.
* **Translation LSTM (1024 neurons, 2048 inputs):** does not fit. The 2048
  inputs fill the BDPU width exactly. But a gate needs 4 MiB of weights and
  1024 sign rows, against 2 MiB and 512.
* **GRU speech network:** does not run. No GRU cell is built.

## Departures from the published design

* **Number format.** The published accelerator computes in FP16/FP32. This
  RTL uses Q8.8 fixed point in the DPU, the MU and the cell update. The DPU
  keeps the published structure: N multipliers, an adder reduction tree and
  an accumulator. The memoization unit was already integer and fixed point
  in the original.
* **Activations.** The MU builds the bias add and the register file. The
  exp/reciprocal units are replaced by the piecewise-linear functions
  described above.
* **No peephole connections.** The text has the MU apply peepholes, but the
  gate equations have none. The equations are followed.
* **Element-wise LSTM work.** In the original, the MUs of the cell-updater CU
  and the output-gate CU share this work and pass i_t, f_t and c_t between
  them. Here it is gathered in one `cell_update` unit, which runs after all
  four gates have finished.
* **On-chip memory contents.** In the original, the MU writes every gate
  output to the on-chip memory. Here the gate outputs stay in each MU's
  register file until the cell update reads them. The memory stores c and h. x_t is written by
  the host straight into the input buffers, not staged through this memory.
* **Reuse comparison.** The comparison is `delta <= theta`, as in the
  equations and the flow diagram. One sentence of the text says "smaller
  than".
* **Not modelled.** The weight load path from DRAM is not modelled: the top
  exposes plain write ports for the weights. eDRAM refresh of the table is
  not modelled, and no clock or power gating is built. The 500 MHz target is
  not checked.

## Files

`rtl/` holds the design, one module or package per file:

| file | contents |
|---|---|
| `fm_pkg.sv` | sizes, types (`memo_entry_t`, `gate_e`, `act_e`), saturation, fixed-point multiply, activations |
| `sign_buffer.sv`, `weight_buffer.sv`, `input_buffer.sv`, `memo_buffer.sv`, `om_memory.sv` | memories (arrays with synchronous reads) |
| `bdpu.sv` | XNOR and popcount binary dot product, 3-stage pipeline |
| `cmp_unit.sv` | eps, delta, reuse decision |
| `fmu.sv` | memoization unit: binarized input register, BDPU, comparison, table |
| `dpu.sv` | full-precision dot product over K sub-vectors |
| `mu.sv` | bias, activation, register file |
| `cell_update.sv` | c_t and h_t |
| `cu.sv` | one gate's computation unit and its per-neuron sequencer |
| `epur_bm_top.sv` | four CUs, on-chip memory, cell-update sequencing |

`tb/` holds one self-checking testbench per module (`<module>_tb.sv`),
`epur_bm_capacity_tb.sv` and `lstm_workloads_tb.sv`. Each testbench prints
`TB_RESULT checks=N failures=M`.

* The memory and unit testbenches compare with reference values that the
  testbench computes itself. Where a latency is defined, they check it.
* `cu_tb` and `epur_bm_top_tb` contain a complete model of the memoization
  scheme. For every step they check each neuron's decision, the counters, the
  exact cycle counts, and c_t and h_t. `epur_bm_top_tb` runs at the default
  sizes. It also counts forced evaluations, reuses (DPU bypass), refused
  reuses, throttle refusals and h write-backs, and fails if any of them never
  happens.
* `epur_bm_capacity_tb` runs the largest layer one gate can hold: 1536
  inputs and 512 neurons, for 3 steps. The input vector then fills the 2048-bit
  binary dot product, and every sign row and weight row of all four gates is
  in use. It takes about half a minute.
* `lstm_workloads_tb` runs layers shaped like the sentiment LSTM and the
  bidirectional speech LSTM. The weights are random, so its reuse rates say
  nothing about trained networks.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/fm_pkg.sv tb/epur_bm_top_tb.sv --top-module epur_bm_top_tb -o sim
./obj_dir/sim
```

Replace `epur_bm_top_tb` with any other testbench name. The unit testbenches
take well under a second to run. The full-size end-to-end test builds in
about ten seconds and simulates a 48-input, 24-neuron layer for 12 steps. To
try another layer shape, change `NX`, `NH`, `STEPS` and `THETA` at the top of
`epur_bm_top_tb.sv`. To lint the design:
`verilator --lint-only -Wall -Irtl rtl/fm_pkg.sv rtl/epur_bm_top.sv`.
