# E-Batch on E-PUR: RTL of a batching LSTM accelerator

Serving recurrent networks means serving sequences of different lengths.
The usual way to batch them pads every sequence to the longest one in the
batch. The hardware then spends cycles, and reads weights, for time-steps
that do not exist. E-Batch takes a different approach.

- Each hardware *lane* evaluates one sequence at a time.
- When a lane runs out of work, it asks the host for another request, so
  several requests can run one after another in the same lane.
- A lane that gets nothing is power gated instead of computing padding.
- The first layer runs for at most `N` time-steps. Deeper layers then
  replay exactly what the first layer did. The weights of each layer are
  fetched once and shared by every lane for all those time-steps.

Requests longer than `N` are split across batches. New requests may join
only during the first layer. After that the batch is *locked*.

This repository holds synthesizable SystemVerilog for the accelerator side:

- an E-PUR-style LSTM engine of four compute units, with 64 lanes;
- the hardware E-Batch adds to it: a request buffer, an `N` register, a
  lane-idle interrupt, lock and replay, and a report of the time-steps
  evaluated per request.

It also holds self-checking testbenches, including a model of the host
runtime and of main memory.

## 1. Datapath: four gates, 64 lanes, one shared weight stream

```
                 weight load (per layer)            input / c load (per time-step)
                        |                                     |
   +--------------------v-----------------+                   |
   | compute_unit  (x4: gates i, f, g, o) |                   |
   |  weight_buffer 2 MiB --broadcast--+  |                   |
   |  bias table                       |  |                   |
   |  lane 0: input_buffer 2 KiB -> dpu -> mu --+ gate_y[0]   |
   |  lane 1: ...                              |              |
   |  lane 63                                  |              |
   +-------------------------------------------+              |
        i, f, g, o of neuron k, per lane                      |
                        v                                     v
   cell_update (one per lane, holds c_{t-1}) -> h_t[k], c_t[k] -> out to memory
```

`compute_unit` evaluates one LSTM gate for all lanes. It has:

- **A shared weight buffer.** It holds one layer's weights for the gate:
  2 MiB, 32768 words of 64 bytes. Word `k*K + j` is the `j`-th 64-element
  slice of neuron `k`'s row `[W_x W_h]`.
- **A per-lane input buffer.** The 128 KiB per compute unit is split into
  64 private 2 KiB buffers. Each holds the lane's `[x_t ; h_{t-1}]` as `K`
  words.
- **A per-lane `dpu`.** It does 64 multiplies and an adder tree, and
  accumulates over the `K` slices of a neuron.
- **A per-lane `mu`.** It adds the bias and applies the sigmoid (gates i,
  f, o) or tanh (gate g).

Every issue beat reads one weight word and broadcasts it to all 64 lanes.
So one weight fetch serves the whole batch; that sharing is where batching
saves energy.

`cell_update` takes the four gate outputs of neuron `k` for one lane and forms:

```
c_t[k] = f*c_{t-1}[k] + i*g      h_t[k] = o*tanh(c_t[k])
```

It keeps `c_{t-1}` in a small per-lane store (1024 × 16 bit) that is
loaded with the inputs of each time-step and updated in place. Results do
not stay on chip. A batch of long sequences produces far more intermediate
data than any on-chip memory holds. So every `h_t` and `c_t` goes back to
main memory, and it is loaded again for the next time-step or layer.

### Number formats

| quantity                           | format                        |
|------------------------------------|-------------------------------|
| x, h, weights, gate outputs        | signed 8 bit, Q1.6 (value = code/64) |
| dot-product accumulator, pre-activation | signed 32 bit, 12 fraction bits |
| bias, cell state c                 | signed 16 bit, Q4.12, saturating |

Products are truncated with an arithmetic shift. Conversion from Q.12 to
Q1.6 rounds (`(x+32)>>>6`) and saturates.

The sigmoid is a four-segment piecewise-linear approximation that uses
only shifts and adds. For `|x| ≥ 5` it is 1. Below that:

- `|x| ≥ 2.375`: `x/32 + 0.84375`
- `|x| ≥ 1`: `x/8 + 0.625`
- otherwise: `x/4 + 0.5`

Negative inputs use symmetry. tanh is `2·σ(2x) − 1`. Both stay within
3 LSB of Q1.6 of the exact functions. All of this lives in `ebatch_pkg`.

### Timing of one time-step

For a layer with `H` neurons and `K` slices per neuron, the steps are:

1. **Lookup:** `LANES` cycles. Each lane's active request is found, one
   lane per cycle.
2. **Load:** main memory fills the input buffers and cell stores
   (`ld_req` … `ld_done`).
3. **Issue:** `H·K` cycles, one weight word per cycle.
4. **Drain:** 5 cycles. That is 3 for the compute unit (buffer read, DPU,
   MU) and 2 for `cell_update`.
5. **Count:** `LANES` cycles, counting the time-step in each active
   request.

The last `h_t` beat appears exactly `H·K + 5` cycles after the cycle
`ld_done` is sampled.

For the 1024-cell, 8-layer translation model:

- `K = 2048/64 = 32`, so one layer-step is 32768 issue cycles, about
  65.5 µs at 500 MHz, for 64 sequences at once.
- The 128 bookkeeping cycles add 0.4 %.

## 2. How a batch runs (`batch_controller` + `request_buffer`)

### Request buffer

The host sends the requests of a batch as `{req_id, lane, steps}`
descriptors through a valid/ready port. `steps` is the number of
time-steps still to do. The buffer keeps one entry per request, in arrival
order. Each entry holds the request id, the lane, and three counts:

- `steps_req`: the time-steps asked for;
- `steps_l0`: the time-steps done in the first layer;
- `steps_cur`: the time-steps done in the current layer.

A lane's **active request** is its first entry whose `steps_cur` is below
a *limit*:

- in the first layer, the limit is `steps_req`;
- in deeper layers, it is `steps_l0`.

This one rule gives both behaviours:

- **First layer:** a lane works through its requests in order. When one
  finishes, the next starts at the next time-step with no gap.
- **Deeper layers:** `steps_cur` is cleared and the same lookup runs
  again against the first layer's counts. So every request is evaluated
  for exactly as many time-steps, in the same lanes and order, as in
  layer one. The `h` a deeper layer needs therefore always exists in
  memory.

### Controller

The states are idle, weight load, lookup, join wait, load, compute, drain,
count, layer end, report and done.

**Starting a layer.** At the start of every layer the controller raises
`wl_req`. Memory writes the layer's weights and biases into all four
compute units and answers with `wl_done`. That is one weight load per
layer per batch.

**Each time-step, lane by lane:**

- If the lane has an active request, the lane is enabled. Its request id
  and step index are published on `sched_req` and `sched_ts`, so memory
  knows which `x_t`, `h_{t-1}` and `c_{t-1}` to load.
- If the lane has none, and it is the first layer, and the batch is
  unlocked, the controller sets `idle_pend[lane]` (an interrupt) and waits
  for the host's `idle_ack`.
  - If the host appended a request for that lane before acking, the
    lookup is repeated and the new request *joins*. It starts in this same
    time-step.
  - Otherwise the lane stays disabled. Its DPU, MU and cell store do
    nothing, which stands for power gating, and its `out_mask` bit stays
    low.
  - Each lane interrupts at most once per period of idleness. A request
    the host appends later for a gated lane is picked up at the next
    lookup, still only during the first layer.

**Ending the first layer.** The first layer ends after `N` time-steps, or
earlier if every lane is idle. `N` comes from the `N` register. `N = 0`
means "the longest request present at batch start", which gives the
padding-like, no-split setting. At the end of the first layer:

- `steps_cur` is copied to `steps_l0`;
- the batch is **locked**: the append port refuses everything (`req_ready`
  low) until the batch ends.

**Deeper layers** replay the first layer as described above, with no
interrupts.

**Ending the batch.** After the last layer, the controller streams one
report `{req_id, lane, steps_done}` per entry through `rep_*`. Then it
raises `done_pend` and waits for `done_ack`. The host adds `steps_done` to
each request. Requests with time-steps left go into a later batch.

## 3. Ports of `ebatch_epur`

The accelerator talks to two things outside the chip: the host runtime
(software) and main memory. Both are plain ports.

### Host runtime

**Configuration registers** (`cfg_we`, `cfg_addr`, `cfg_wdata`). Write
these before `batch_start`.

| addr | register |
|------|----------|
| 0 | `N`, the maximum time-steps per lane in a batch; 0 = longest request |
| 1 | number of layers |
| 2 | neurons per gate `H` (cell size) |
| 3 | 64-element input slices of layer 1, `KX` |
| 4 | 64-element hidden slices, `KH` (also the input of deeper layers) |

**Batch control:**

- `req_valid`/`req_ready`/`req_desc` append a request. This is accepted
  before `batch_start` and during the first layer, but not once the batch
  is locked.
- `batch_start` starts the batch.
- `busy`, `locked`, `layer` and `ts_cnt` report progress.

**Interrupts:**

- `irq` is the OR of the pending bits.
- `idle_pend[l]` is answered by a one-cycle `idle_ack[l]` pulse. To fill
  the lane, append a request before the ack.
- `done_pend` is answered by `done_ack`.

**Report:** `rep_valid`, `rep_ready` and `rep_data`.

### Main memory

- **Weights:** while `wl_req` is high, write words with `wl_we`,
  `wl_cu` (gate: 0 i, 1 f, 2 g, 3 o), `wl_addr` and `wl_data` (word
  `k*K + j`). Write biases with `bias_we`, `bias_cu`, `bias_addr` and
  `bias_data`. Then pulse `wl_done`.
- **Inputs:** while `ld_req` is high, do this for each lane with
  `lane_active[l]`:
  - Write its input words with `ld_sel = 0`, `ld_lane = l` and
    `ld_addr = j`. The same word goes to all four compute units.
    - Words `0 … KX−1` (or `0 … KH−1` in deeper layers) hold `x_t`, or
      the previous layer's `h_t` for the same time-step.
    - Then `KH` words of `h_{t−1}`.
  - Write its `c_{t−1}` with `ld_sel = 1`: 32 values of 16 bits per
    512-bit word.
  - Zeros start a new sequence.
  - Then pulse `ld_done`.
- **Results:** one beat per neuron: `out_valid`, `out_neuron`,
  `out_mask` (lanes with a real result), `out_h[l]` and `out_c[l]`. Store
  them under the request and time-step that `sched_req`/`sched_ts` show
  for the lane. Those stay stable until the next lookup.

## 4. Parameters and what fits

Defaults are the evaluated configuration. Every module has the parameters
it needs. The top passes them down.

| parameter | default | meaning |
|-----------|---------|---------|
| `LANES` | 64 | lanes = maximum batch size |
| `WIDTH` | 64 | DPU width (multiplies per cycle per lane) |
| `WB_BYTES` | 2 MiB | weight buffer per compute unit |
| `IB_BYTES` | 128 KiB | input buffer per compute unit, split evenly over the lanes |
| `NEURONS` | 1024 | largest cell size (bias table, cell store, neuron index width) |
| `ENTRIES` | 256 | request-buffer entries |

The 8-layer, 1024-cell LSTM translation model fits exactly:

- one gate of one layer is 1024 × 2048 bytes = 2 MiB;
- `[x ; h]` is 2048 bytes = one lane's 2 KiB.

A 5-layer, 800-cell GRU would fit in storage, but only the LSTM cell is
built (see §6). Time-step counts are 16 bits, so the thresholds
`N = 128…512` are within range.

## 5. Verification

Each module has a self-checking testbench in `tb/`. Each ends with a
`TB_RESULT checks=… failures=…` line and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_dpu` | random dot products of 1–5 slices; latency of one cycle; gated lane silent |
| `tb_mu` | sigmoid and tanh against `$exp` within 3 LSB; exact points; latency |
| `tb_cell_update` | c and h against a floating-point reference; update in place; gating; 2-cycle latency |
| `tb_input_buffer`, `tb_weight_buffer` | every address at full size; read latency |
| `tb_request_buffer` | random appends, counts, latch and clear against a model; lookup rule; full/lock refusal |
| `tb_compute_unit` | sigmoid(dot + bias) per lane; results 3 cycles after the last beat, one neuron every `K` cycles; gating |
| `tb_batch_controller` | the scheduling examples below; report; beats per step; one weight load per layer |
| `tb_ebatch_epur` | end to end at 4 lanes (see below) |
| `tb_ebatch_epur_full` | the same at every default parameter (64 lanes, 2 MiB/128 KiB buffers) |
| `tb_ebatch_epur_mnmt` | the 8-layer, 1024-cell translation LSTM at default parameters, bit-exact |

`tb_batch_controller` replays these scheduling examples on 4 lanes:

- **One layer, `N = 3`.** Requests of 1, 2, 3 and 4 steps are on lanes
  0–3. Requests of 3 and 2 steps join lanes 0 and 1 as those run dry.
  Then comes a second batch with the leftovers.
- **Two layers.** Joins happen in layer one, with replay in layer two and
  refusal while locked.
- **`N = 0`**, and a layer that ends early because every lane is idle.

The end-to-end testbenches play host and memory:

- **Batch creation.** Batches are built by greedy multi-way partitioning:
  the longest remaining request goes to the lane with the fewest
  time-steps. There is a timeout wait when fewer requests than lanes are
  waiting.
- **Interrupts.** Lane-idle interrupts are answered with the oldest
  waiting request.
- **Late arrivals.** These are placed into gated lanes. After the lock,
  the testbench checks that the accelerator refuses them.
- **Reference.** Every request's two-layer LSTM output is compared bit for
  bit with a sequential fixed-point model in the testbench, collected over
  all the batches the request was split into.
- **Other checks:**
  - each (request, layer, step) is produced exactly once;
  - the `H·K + 5` latency holds;
  - there is one weight load per layer.
- **Mechanism counters.** The testbench counts interrupts, joins, late
  joins, gated lane-steps, splits, refusals and multi-request lanes. Each
  must be non-zero.

The full-size run serves 140 requests on the default 64-lane machine in
under a second of simulation. It uses a small LSTM so that it finishes
quickly.

`tb_ebatch_epur_mnmt` runs a model at the real size instead:

- 8 layers of 1024 cells, with 1024 inputs per layer;
- so each layer's weights fill the 2 MiB buffers exactly, and each
  lane's input fills its 2 KiB buffer.

Three requests run with `N = 2`. One of them is split across two batches,
and the other 61 lanes are gated. Every `h` and `c` value of every layer
is checked bit for bit, and so is the `1024·32 + 5`-cycle step latency.
It takes about three million cycles, a few minutes of Verilator time.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Irtl rtl/ebatch_pkg.sv \
  rtl/dpu.sv rtl/mu.sv rtl/input_buffer.sv rtl/weight_buffer.sv \
  rtl/compute_unit.sv rtl/cell_update.sv rtl/request_buffer.sv \
  rtl/batch_controller.sv rtl/ebatch_epur.sv \
  tb/tb_ebatch_epur.sv --top-module tb_ebatch_epur -o sim
./obj_dir/sim
```

For the other testbenches, list only the files they use and change
`--top-module`.

## 6. Where this RTL departs from, or goes beyond, the description it follows

**Taken from the architecture description:**

- four compute units, one per LSTM gate;
- per lane, a DPU and an MU, with private input buffers and a weight
  buffer shared by broadcast;
- 64-wide DPUs, 2 MiB and 128 KiB buffers, 64 lanes;
- intermediate results kept in main memory;
- the E-Batch hardware: lane-idle interrupt, request buffer with lane and
  time-step counts, `N` register, joins only in the first layer, lock
  afterwards, report of time-steps per request.

**This design's own choices:**

- number formats and the activation approximation;
- the bias table and the separate `cell_update` stage with its `c` store;
- the split of the 128 KiB into per-lane 2 KiB buffers, with a copy in
  each compute unit;
- the register map, all handshakes and the interrupt pending/ack bits;
- one-lane-per-cycle lookup and counting;
- ending a layer early when every lane is idle;
- `N = 0` taken as the longest request at batch start;
- the 256-entry request buffer;
- the replay scheme with a second count per entry.

**Not included:**

- **The GRU cell.** Only LSTM is built, because no GRU equations were
  available to follow.
- **The host runtime** (queue, greedy partitioning, timeout). It is
  software; a model is in the end-to-end testbenches.
- **The DRAM.** The testbenches act as memory.
- **The on-chip intermediate-result memory of the unbatched engine.**
  Batching makes it impractical.
- **The systolic-array variant.**

Power gating is modelled as a lane enable. There is no power-switch
circuitry.

**Things to keep in mind when changing the design:**

- `NEURONS` bounds `H`.
- `IB_BYTES/LANES` bounds `K`.
- `WB_BYTES` bounds `H·K`.
- The hardware does not enforce these bounds; the host must keep within
  them. In simulation, an assertion in the controller flags a
  configuration that breaks the weight or input buffer bound.
- Other assertions flag:
  - an append into a full request buffer;
  - issue beats outside the compute phase;
  - compute units falling out of lock-step;
  - lanes disagreeing on the neuron of an output beat.
