# A layer-parallel LSTM autoencoder accelerator in SystemVerilog

An LSTM autoencoder (LSTM-AE) is a stack of small LSTM layers: an encoder
whose hidden size halves from layer to layer and a decoder that doubles it
back, trained to reproduce its input so that a large reconstruction error
flags an anomaly. Run one layer at a time, hardware sized for the widest
layer sits mostly idle during the narrow ones, and the recurrence
(h_t needs h_{t-1}) stops a single layer from being spread over time.

This design uses the other axis of parallelism. Every layer of the network
gets its own hardware module, and the modules are chained by FIFOs. Layer
0 works on timestep t while layer 1 works on t-1, layer 2 on t-2, and so
on: *temporal parallelism* across layers. The recurrence inside each layer
is left untouched, yet all layers are busy at once once the pipeline has
filled. The second idea is *dataflow balancing*: each layer's degree of
parallelism (its reuse factor, cycles spent per input element) is chosen so
that every layer needs the same number of cycles per timestep, so no layer
waits on another and narrow layers get few multipliers.

The RTL follows the architecture of Leftheriotis, Masouros, Soudris and
Theodoridis, "Exploiting temporal parallelism for LSTM Autoencoder
acceleration on FPGA" (an HLS design on a Zynq UltraScale+ ZCU104). It is an
independent RTL rendering of that architecture, not the authors' code.
Where the publication leaves a detail open, the choice made here is named
below and in the opening comment of each file.

## The dataflow

```
 memory ─► data_reader ─► FIFO ─► LSTM_0 ─► FIFO ─► LSTM_1 ─► ... ─► LSTM_{D-1} ─► FIFO ─► data_writer ─► memory
```

Each `lstm_layer` (LSTM_i) is itself a small dataflow:

```
 x_t elements ─► MVM_X ─► FIFO ─┐
                                ├─► activations & element-wise ─► h_t to next layer
          ┌─► MVM_H ─► FIFO ────┘             │
          └────────── FIFO (h_{t-1}) ◄─────────┘
```

* **MVM_X** computes `W_x·x_t + b_x` for all four gates (4·LH rows).
* **MVM_H** computes `W_h·h_{t-1} + b_h`, where h_{t-1} comes back from
  the layer's own activation unit.
* **Activations and element-wise unit** (`lstm_act`) adds the two results,
  applies sigmoid/tanh and updates
  `c_t = f⊙c_{t-1} + i⊙g` and `h_t = o⊙tanh(c_t)`.

Every arrow is a valid/ready stream of one 32-bit element (or, between an
MVM and the activation unit, one 128-bit tuple {i,f,g,o} for one hidden
element k). Nothing is shared between modules except these streams. The
units therefore run independently. The only things that stall them are an
empty input FIFO or a full output FIFO.

## How an MVM spends its cycles — the reuse factor

This is the heart of the design and of its timing model. An MVM unit with
an input vector of L elements and hidden size LH has 4·LH accumulators. It
takes the input **one element at a time** and keeps it for R cycles (the
*reuse factor*). In cycle c of those R cycles, its M parallel multipliers
update accumulator rows c·M … c·M+M−1. So

    M = ceil(4·LH / R)          multipliers
    L·R                         cycles of multiply-accumulate per timestep
    + LH                        cycles to drain LH gate tuples, one per cycle

giving the per-timestep latencies

    X_t = LX·RX + LH            (MVM_X)
    H_t = LH·RH + LH            (MVM_H)
    Lat_t = max(X_t, H_t)       (the layer)

The weight memory of an MVM is laid out to match: L·R words of M weights,
word `j·R + c` holding exactly the weights that cycle c of element j
needs, so one wide word is read per cycle. R = 1 is fully parallel (one
element per cycle, 4·LH multipliers). A large R uses few multipliers and
many cycles.

Accumulation and drain of a timestep do not overlap. That is what makes
the `+ LH` term exact. An MVM unit takes exactly L·R + LH cycles per
timestep when it is not stalled, and the unit testbenches check this cycle
count exactly.

## Balancing the layers

Let m be the layer with the widest hidden state (in these autoencoders,
the last decoder layer, LH_m = F). Its reuse factor RH_m is the single knob.
Every other layer gets

    RH_i = (LH_m − LH_i)/LH_i + (LH_m/LH_i)·RH_m     ⇔   LH_i·(RH_i+1) = LH_m·(RH_m+1)
    RX_i = (LH_i/LX_i)·RH_i

so that all H_t, and with it all Lat_t, equal Lat_t_m = LH_m·(RH_m+1). A
sequence of T timesteps through D layers then takes about

    Acc_Lat = T·Lat_t_m + (D−1)·Lat_t_m   cycles.

All of this is computed at elaboration by functions in `lstm_ae_pkg`, from
three parameters of `lstm_ae_top`: F (input features), D (layers) and RH_M.
Two roundings are this design's own:

* The RX formula can give a fraction (1.5 for layer 0 of F32-D2). RX is
  rounded **down** (minimum 1), which makes MVM_X slightly faster than
  MVM_H, so the layer latency stays Lat_t_m.
* R need not divide 4·LH. M is rounded up, and the last of the R cycles then
  uses only some of the multipliers.

Sizes this produces for the four evaluated models:

| model (RH_m) | layer | LX→LH | RX | RH | MX | MH | Lat_t |
|---|---|---|---|---|---|---|---|
| F32-D2 (1) | 0 / 1 | 32→16 / 16→32 | 1 / 2 | 3 / 1 | 64 / 64 | 22 / 128 | 64 |
| F64-D2 (4) | 0 / 1 | 64→32 / 32→64 | 4 / 8 | 9 / 4 | 32 / 32 | 15 / 64 | 320 |
| F32-D6 (1) | 0…5 | 32→16→8→4→8→16→32 | 1,3,7,14,6,2 | 3,7,15,7,3,1 | 64,11,3,3,11,64 | 22,5,2,5,22,128 | 64 |
| F64-D6 (8) | 0…5 | 64→32→16→8→16→32→64 | 8,17,35,70,34,16 | 17,35,71,35,17,8 | 16,4,1,1,4,16 | 8,2,1,2,8,32 | 576 |

## The recurrence and sequence boundaries

Every module counts timesteps modulo `seq_len`, so a layer knows where a
sequence begins without any marker in the data:

* At the first timestep, h_{-1} = 0 and c_{-1} = 0. MVM_H then has nothing to
  multiply. It skips accumulation and drains its bias b_h as the result
  (LH cycles). To keep it from doing so before the weights are loaded or
  before the sequence exists, MVM_X sends MVM_H a `zero_go` pulse when it
  takes the first element of a sequence. MVM_H counts up to three such
  pulses ahead.
* The activation unit clears c on the first timestep. It does not feed
  h back on the last timestep, because no later timestep of that sequence
  uses it.
* The feedback FIFO holds a whole hidden vector (LH words), so feeding h
  back never stalls the activation unit. MVM_H starts consuming h_{t-1}
  the cycle after its drain of timestep t−1 ends. By then the first element
  has gone through the gate FIFO, the two-stage activation pipeline and the
  feedback FIFO. The layer therefore stays at Lat_t per timestep: the
  layer testbench measures the steady-state interval and finds it equal to
  Lat_t.

## Number format and activations

All values are Q8.24 (32-bit two's complement, 24 fractional bits), as in
the original design. Products are formed at 64 bits and shifted right
arithmetically by 24 (rounding toward −∞). Products and sums wrap on
overflow, with no saturation. Sigmoid and tanh are piecewise linear, as in
the original, but the segments are chosen here because the original's are
not given: the shift-and-add sigmoid with breakpoints 1, 2.375 and 5
(slopes 1/4, 1/8, 1/32; offsets 0.5, 0.625, 0.84375; 1 beyond 5; mirrored
for negative inputs), and `tanh(x) = 2·sigmoid(2x) − 1`, clamped to ±1 for
|x| ≥ 4. Swap `pwl_sigmoid`/`pwl_tanh` in `lstm_ae_pkg` for other segments.

## Interfaces of the top (`lstm_ae_top`)

| group | signals | use |
|---|---|---|
| control | `start`, `seq_len`, `in_base`, `out_base`, `busy`, `done` | pulse `start` while `busy` is low, with the others held until `done`; `done` pulses when the last output word is accepted |
| weights | `wl_valid`, `wl_layer`, `wl_mat`, `wl_row`, `wl_col`, `wl_data` | one weight per cycle, before a run; `wl_mat` 0 = W_x, 1 = W_h; row = gate·LH + k with gates in order i, f, g, o; column LX (W_x) or LH (W_h) is the bias |
| memory read | `rd_req_valid/ready/addr`, `rd_resp_valid/ready/data` | in-order read responses, any number outstanding |
| memory write | `wr_valid/ready/addr/data` | posted 32-bit writes |

Sequences are stored timestep-major (word t·F + f is feature f of timestep
t) at byte addresses base, base+4, …; the output uses the same layout. Each
layer passes all T hidden vectors to the next, so the output has T·F words.
No repeat-vector bottleneck and no output dense layer are included, because
the architecture has none.

In the original system, a host processor loads the weights, starts the
kernel and owns the DRAM and its controller. Those parts are outside this
RTL. The control, weight and memory channels are therefore plain ports,
shaped so that an AXI master or a register block can be put in front of
them.

## Files

| file | block |
|---|---|
| `rtl/lstm_ae_pkg.sv` | Q8.24 type, gate tuple, multiply, PWL activations, balancing functions |
| `rtl/stream_fifo.sv` | the FIFO used on every arrow (first-word fall-through, full throughput) |
| `rtl/mvm.sv` | MVM_X (`RECURRENT=0`) and MVM_H (`RECURRENT=1`) with weight and bias memory |
| `rtl/lstm_act.sv` | activations and element-wise unit with the cell-state memory |
| `rtl/lstm_layer.sv` | one LSTM layer: two MVMs, activation unit, three FIFOs |
| `rtl/data_reader.sv`, `rtl/data_writer.sv` | memory-side streaming |
| `rtl/lstm_ae_top.sv` | the chain, sized from F, D and RH_M |
| `tb/tb_*.sv` | self-checking testbenches; `tb_ref_pkg` is an independent bit-exact reference (including a whole-sequence LSTM layer), `tb_dram` a behavioural memory, `tb_ae_driver` the end-to-end stimulus |

The default build is the F32-D2 model with RH_m = 1. The other models
are parameter changes:
`lstm_ae_top #(.F(64), .D(6), .RH_M(8))`.

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and checks its
results against values computed independently in `tb_ref_pkg`, bit-exactly.

* `tb_lstm_ae_pkg`: activations and multiply against the reference,
  including segment edges and extreme values. Also the balancing rule for all
  four models.
* `tb_stream_fifo`, `tb_data_reader`, `tb_data_writer`: ordering,
  back-pressure, addressing, and no words taken or written beyond the
  sequence.
* `tb_mvm_x`, `tb_mvm_h`: every gate tuple; exactly L·R + LH cycles per
  timestep; MVM_H's bias-only first timestep and restart after `seq_len`.
* `tb_lstm_act`: every h and feedback value; latency 2; skipped final
  feedback.
* `tb_lstm_layer`: one layer against a reference LSTM over two sequences.
  Steady-state timestep interval equals Lat_t. Random stalls.
* `tb_lstm_ae_top` (default size, no parameter overrides): random weights.
  It runs a 64-timestep sequence, then 1 and 3 timesteps with a randomly
  stalling memory, and checks every output word. It counts how often all
  layers were accumulating at once on different timesteps, FIFO
  back-pressure, bias-only first timesteps, skipped feedback and memory
  stalls, and fails if any never happened.
* `tb_workloads`: the F64-D2, F32-D6 and F64-D6 models at their own
  sizes, 64 timesteps and then 1 and 6, checked the same way.

Measured start-to-done cycles at T = 64, with the model
T·Lat_t_m + (D−1)·Lat_t_m in brackets: F32-D2 4142 (4160), F64-D2 20750
(20800), F32-D6 4366 (4416), F64-D6 39614 (39744). The measurement comes in
slightly under the model: a layer starts a timestep as soon as the first
element of its input arrives, not when the whole vector is ready. At 300 MHz
F32-D2 needs about 14 µs for 64 timesteps. The published end-to-end
latencies (0.086 ms for that case) are measured at the host and include
transfers and software overhead, which this RTL does not model.

To simulate with Verilator, for example the end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/lstm_ae_pkg.sv tb/tb_ref_pkg.sv tb/tb_lstm_ae_top.sv --top-module tb_lstm_ae_top
./obj_dir/Vtb_lstm_ae_top
```

The same pattern works for any `tb/tb_<name>.sv`. The simulator used
has two-state logic, so the testbenches reset or initialise everything they
read.

## Where this RTL departs from, or adds to, the original

* Reuse-factor rounding (RX down, M up), as described above.
* MVM_H produces the first timestep of a sequence from its bias in LH
  cycles instead of running L·R cycles on zeros. It waits for `zero_go`.
* PWL segments, rounding and overflow behaviour (see above).
* FIFO depths: inter-layer FIFOs hold one vector. Gate FIFOs hold two
  tuples. The feedback FIFO holds LH words. The original does not give
  depths.
* Weight memories have a registered (block-RAM style) read port. `mvm`
  fetches the word for the next cycle one cycle ahead, so there is no
  bubble and the timing model above still holds. Weights must be loaded
  at least one cycle before the first input element of a run.
* The weight-load port, control handshake and memory channel protocol are
  this design's own. The original uses HLS-generated AXI interfaces.
* The synthesis results of the original (Table 1 of the publication: LUT,
  FF, BRAM and DSP shares on an XCZU7EV at 300 MHz) were not reproduced.
  Nothing here has been run through FPGA place and route.
