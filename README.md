# FENIX in RTL: a switch pipeline that feeds a DNN on an FPGA

A programmable switch can touch every packet at line rate, but it can only
run tiny models: a few table lookups and compare-and-branch steps. An FPGA
next to the switch can run a real neural network, but only at a small
fraction of the switch's packet rate. FENIX splits the work along that line.
The switch, called here the **data engine**, tracks every flow and collects
per-packet features. It decides which flows' features are worth sending and
how often, and forwards every packet with the best class it knows. The
FPGA, called the **model engine**, runs a CNN or an RNN on the feature
vectors it receives and sends each class back to the switch. From then on
the switch uses that class for the flow's later packets.

The piece that makes the split work is a **probabilistic token bucket**. It
sits between the two engines. It holds the stream of feature vectors to a
rate the model engine can absorb. It also spends that budget on the flows
for which one more inference is most useful.

This RTL models both engines cycle by cycle, together with the path between
them. Everything is in SystemVerilog and can be simulated with Verilator.
The top module is `fenix_top`.

```
            regular packets                                    forwarding verdict
 pkt_* ──►┌──────────────┐  T_i,C_i  ┌──────────────┐  send    (class, by tree?)
          │ flow_tracker ├──────────►│ rate_limiter │───┐        ▲
          │ (Flow Info   │  buff_idx │ prob_table + │   │        │
          │  Table)      ├──────┐    │ token bucket │   ▼        │
          └─────▲────────┘      │    └──────────────┘ ┌────────────────┐
                │ results       └────────────────────►│ buffer_manager │
                │ (priority)    decision_tree ────────┤ per-flow rings │
                │                                     └───────┬────────┘
                │                        feature header: flow id + F1..F9
          ┌─────┴────────────────────────────────────────────▼──────────┐
          │ vector_io_processor: Slice → flow-id queue │ Join ← classes │
          └──────────────┬─────────────────────────────▲───────────────┘
                 async Input Queue            async Output Queue
                         ▼                             │
                 ┌────────────────── dnn_core (clk_dnn) ─────────────┐
                 │ embedding → layers on systolic_array → argmax     │
                 └───────────────────────────────────────────────────┘
```

## 1. What a packet sees in the data engine

The data engine accepts one packet per `clk` cycle. The whole per-flow
read-modify-write finishes in that cycle: lookup, rate decision, ring update
and verdict. Back-to-back packets of one flow therefore need no forwarding
logic. The verdict leaves on `fwd_*` one cycle after its packet.

### 1.1 Flow Info Table (`flow_tracker`)

The table is indexed by the low bits of a CRC-32 of the five-tuple. The
polynomial is 0x04C11DB7, computed MSB first. The full 32-bit hash is stored
in the row, so a different flow that lands on the same row is recognised.
Each row holds:

| field | meaning |
|---|---|
| `hash` | owner of the row |
| `bklog_n`, `bklog_t` | packets since the flow's last export, and the time of that export |
| `class`, `cls_valid` | the last class the model engine returned |
| `buff_idx` | the ring slot (1..8) that the next feature goes into |
| `last_t` | arrival time of the flow's previous packet, for the inter-packet delay (IPD) |
| `epoch` | the counting window in which the flow was last seen |

A packet whose hash does not match the row is treated as a new flow. If the
row had a different owner, that owner is evicted and a collision event is
raised. The packet re-initialises the row.

`Flow_cnt` counts flows seen for the first time in the current window.
`Pkt_cnt` counts every packet. The `window_reset` input ends a window: it
clears both counters and advances the epoch. This stands in for clearing
every row.

The tracker gives the rate limiter two values:
- the time since the flow's last export, `T_i = now - bklog_t`;
- the packet backlog, `C_i = bklog_n + 1`.

When the rate limiter decides to send, both backlog fields restart from the
current packet.

### 1.2 Probabilistic token bucket (`rate_limiter`, `prob_table`)

The bucket is shared by all flows and counts time units, here `clk` cycles.
For each regular packet, in one cycle:

```
gap    = (T_last == 0) ? 0 : now - T_last;   T_last = now
bucket = min(bucket + gap, cfg_bucket_max)
send   = rand < P(T_i, C_i)  &&  bucket >= cfg_cost
if (send) bucket -= cfg_cost
```

The export rate is one vector per `cfg_cost` cycles. Set `cfg_cost` to the
model engine's time per inference, converted into `clk` cycles. Set
`cfg_bucket_max` to what the model engine's queue can absorb in one burst.

`P` is a table that the control plane fills in. Its index is
`(T_i >> T_SHIFT, C_i >> C_SHIFT)`, each clamped to 16 bins. Each entry is a
9-bit probability from 0 to 256, where 256 means always send.

The random number is the low 8 bits of a 16-bit Galois LFSR with taps
0xB400, stepped once per packet. For every packet that is not sent, an event
says why:
- `ev_not_sampled`: the coin said no;
- `ev_no_token`: the bucket was short;
- `ev_capped`: the refill hit the cap.

### 1.3 Per-flow feature ring (`buffer_manager`)

Each flow keeps its last 8 features in a ring, stored as one wide memory row
so that it can be read in one access. A feature is 32 bits: the 16-bit
packet length and the 16-bit IPD.

The slot `buff_idx` always holds the flow's oldest feature. When the rate
limiter sends, the exported vector is built as follows:
- F1..F8 are the ring read in age order, starting at `buff_idx`;
- F9 is the current packet's feature, appended last;
- the flow's five-tuple is put in front.

Whether or not it sends, the current feature then overwrites slot
`buff_idx`. `buff_idx` steps 1, 2, … 8, 1, … so the ring always holds the
latest eight features. A window of nine features is therefore the eight
stored ones plus the packet in hand.

A new flow starts from a zeroed ring. Its first vectors carry zero features
for the packets it has not yet had. The header leaves one cycle after its
packet, 104 + 9×32 = 392 bits wide.

### 1.4 Packet-level tree and the verdict (`decision_tree`)

Until a flow has a class from the model engine, each of its packets is
classified by a small decision tree. The tree is complete, of depth 4, and
stored in heap order. Each internal node compares one field with a 16-bit
threshold; the field is the packet length, the IPD, either port, or the
protocol. The 16 leaves hold classes. The control plane writes nodes and
leaves.

The verdict is `fwd_cls = has_class ? stored class : tree class`. The flag
`fwd_by_dt` says which of the two was used.

## 2. The model engine

### 2.1 Slice and Join (`vector_io_processor`)

An incoming feature header is **sliced** in two:
- the flow identifier goes into a 32-entry Flow Identifier Queue (`sync_fifo`);
- F1..F9 go into the DNN module's Input Queue.

Both pushes happen or neither does. If either queue is full the header is
dropped and `ev_drop` pulses. The link from the switch cannot be
back-pressured, so this keeps identifiers and vectors paired.

On the way back, the head of the identifier queue and the head of the DNN
Output Queue are **joined** into one result packet: five-tuple plus class.
This is correct because the DNN finishes vectors strictly in arrival order.

### 2.2 Clock crossing (`dnn_inference_module`, `async_fifo`)

The DNN runs on its own clock, `clk_dnn`. Its Input Queue (8 vectors of 288
bits) and Output Queue (8 classes) are dual-clock FIFOs. Their pointers are
Gray-coded and pass through two-flop synchronisers. A push becomes visible
on the other side 2–3 edges of that side's clock later.

### 2.3 One datapath for every layer (`dnn_core`, `systolic_array`)

Every layer of both models is reduced to matrix-vector products on one
16-lane INT8 systolic array. The array is a chain of processing elements
(PEs), and each PE's result stays where it is computed. An input element
enters PE 0 and moves one PE to the right per cycle. PE *i* multiplies it by
the weight of row *i* for that element's index, read from weight bank *i*.
After the last element has crossed the chain, each PE holds one dot product.

- **Embedding.** Each of the 9 features becomes an 8-value INT8 token.
  - Four values come from the packet-length bin, `len >> 5`, clamped to 63.
  - Four come from the log2 bin of the IPD, clamped to 15.
- **CNN** (the default), 5 layers:
  - three convolution layers: kernel 3, 16 channels, zero "same" padding, one
    product per position over the 3-token window;
  - FC 144→32;
  - FC 32→classes.
- **RNN**, 2 layers:
  - one recurrent cell, `h_t = ReLU(W·[x_t ; h_{t-1}] + b)`, with 16 hidden
    units, run for 9 steps;
  - a dense layer from 16 to the number of classes.
- **Requantisation.** Each output becomes `sat8(ReLU?((acc + bias) >>> shift[layer]))`.
  The per-layer shift is the fixed-point position of the layer's INT8 scale.
  The last layer has no ReLU.
- **Argmax.** The class is the argmax of the last layer. Ties go to the lowest
  index.

A layer table in `fenix_pkg` (`layer_desc`) drives the controller. Each
entry gives the layer kind, input and output lengths, the number of
positions or time steps, the scratchpad source and destination, and the
weight and bias offsets. Activations live in a 512-byte scratchpad with two
regions, which alternate from layer to layer. A layer with more outputs than
lanes runs as several tiles.

**Parameter port.** Weights, biases, embeddings and shifts load through
`prm_we/prm_addr/prm_data` on `clk_dnn`. Address bits [15:14] select the
memory:

| [15:14] | memory | rest of the address | data used |
|---|---|---|---|
| 0 | weights | [13:10] bank = output row mod 16, [9:0] word | [7:0] |
| 1 | biases | [9:0] index, layers in order | [15:0] |
| 2 | embeddings | [9:0] = bin×4 + e; 64 length bins, then 16 IPD bins | [7:0] |
| 3 | shifts | [3:0] layer | [4:0] |

Within a bank, a layer's weights start at its `w_off`. They are stored tile
by tile: word = `w_off + (row/16)·n_in + j`. A convolution's input index
*j* runs over (kernel tap, channel), tap-major.

**Latency.** One inference takes `1 + Σ_layers [1 + npos·(tiles·(n_in + 16 + 2) + 1)] + 1`
`clk_dnn` cycles, from taking the vector to pushing the class. That is
**1976 cycles for the CNN** and **426 for the RNN**. The testbenches check
both numbers exactly.

The core handles one vector at a time. It takes the next vector in the cycle
after it pushes a class.

## 3. Closing the loop

A result packet enters the flow table through the same port as regular
packets, and it has priority. In the cycle a result enters, `pkt_ready` is
low and the ingress stalls for one cycle (`ev_stall`).

If the result's flow still owns its row, the class is stored and used for
all of the flow's later verdicts (`ev_infer_update`). If a collision evicted
the flow while the inference was in flight, the result is discarded. This
way a class never reaches the wrong flow.

## 4. Where this RTL differs from the paper

- **DNN throughput.** The paper's model engine batches vectors and
  pipelines layers through FIFOs between layers. It reports 1.2 µs per
  inference and a capacity of about 75 M vectors/s. This core runs one
  vector at a time. Each inference takes 1976 `clk_dnn` cycles, or 7.9 µs if
  `clk_dnn` is 250 MHz; that clock is an assumption. Correctness and
  ordering match the paper, but throughput is about 600× lower.
  The paper maps every layer onto one shared systolic array, but it also
  describes FIFOs between layers that let layers overlap. With a single
  array, layers of different vectors cannot run at the same time. This
  design keeps the shared array and leaves out the inter-layer FIFOs. The rate
  limiter's `cfg_cost` must be set to match.
- **Layer sizes.**
  - The paper gives the model shapes: 3 convolution layers + 2 FC for the
    CNN, and recurrent units + FC for the RNN.
  - It does not give widths, embedding sizes or bins. All of those here are
    this design's own.
  - The RNN cell is a plain ReLU cell.
  - The paper's normalisation layers are folded into the shifts and biases.
- **Counting window.** The paper resets the hash registers at the end of
  each window T_w. Here an epoch number stands in for that reset.
- **Inter-packet delay.** The paper's table does not list where the IPD
  comes from. This design adds the `last_t` field for it.
- **Stale results and full queues.**
  - The paper has the tracker check a returning result for a new flow or a
    collision, then initialise or update the entry. Here a result whose
    flow no longer owns its row is discarded instead of re-creating the
    entry. The class belongs to an evicted flow and would only mislabel
    the new owner.
  - A feature header that meets a full queue is dropped. The paper relies
    on the bucket cap to prevent this and does not say what happens if it
    still occurs.
- **Ring buffer.** The paper's figure shows the ring at `buff_idx = 2`
  without numbering its slots. Here the oldest feature sits in slot
  `buff_idx`, and the ring is read from there.
- **Packet-level tree.** The paper names this fallback but not its shape.
  The depth, the selectable fields and the threshold width are this
  design's own.
- **Shared clock.** The switch pipeline and the vector I/O processor share
  `clk`. The high-speed port channels between the switch ASIC and the FPGA
  are not modelled; they are vendor SerDes. Neither are the front-panel
  ports, the board management controller or the control-plane CPU. Their
  signals appear as top-level ports: the probability table and tree writes,
  `cfg_*`, `window_reset`, the counters and the parameter port.

## 5. Sizes and what they carry

| parameter | default | note |
|---|---|---|
| `FLOWS` | 4096 | table rows; a 134-bit row plus a 256-bit ring per flow |
| window | 9 | 8 ring slots + current packet (paper) |
| `MODEL`, `NUM_CLASSES` | CNN, 12 | RNN and 7 classes are the other configurations evaluated |
| `LANES` | 16 | systolic array width; weight banks 16 × 512 bytes |
| `T_BINS`, `C_BINS`, `T_SHIFT`, `C_SHIFT` | 16, 16, 11, 1 | probability-table grid |
| `DT_DEPTH` | 4 | tree depth |
| `FID_DEPTH`, `IN_AW`, `OUT_AW` | 32, 3, 3 | queue depths: 32, 8, 8 |

Both models, with 7 or 12 classes, fit the memories with room to spare.
The CNN uses 440 of 512 weight words per bank and 92 of 128 biases. The
model engine's memories total about 80 kbit.

The paper's line rates are out of reach of a one-packet-per-cycle pipeline
at any plausible clock. Its flow arrival rates are also above this DNN's
one-vector-at-a-time rate. Both limits follow from the first item in
section 4.

## 6. Simulating

Every testbench is self-checking. Each one ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing -Wno-fatal -Wno-lint -Wno-style \
  rtl/fenix_pkg.sv rtl/sync_fifo.sv rtl/async_fifo.sv rtl/prob_table.sv \
  rtl/rate_limiter.sv rtl/flow_tracker.sv rtl/buffer_manager.sv \
  rtl/decision_tree.sv rtl/systolic_array.sv rtl/dnn_core.sv \
  rtl/dnn_inference_module.sv rtl/vector_io_processor.sv rtl/fenix_top.sv \
  tb/fenix_ref_pkg.sv tb/tb_fenix_top.sv --top-module tb_fenix_top -o sim
./obj_dir/sim
```

To run another testbench, swap the last file and `--top-module`. The
packages must come first. `tb/fenix_ref_pkg.sv` is needed only by the
DNN-related testbenches and the top-level one.

| testbench | what it checks |
|---|---|
| `tb_sync_fifo`, `tb_async_fifo` | ordering against a queue model, full/empty, first-word latency across clocks |
| `tb_prob_table` | bin computation and clamping |
| `tb_rate_limiter` | Algorithm 1 against a model with its own LFSR, bucket level every packet, and export rate (100 ± 1 sends in 2500 cycles at cost 25) |
| `tb_flow_tracker` | ownership, collisions, counters, backlog fields, ring index, window reset, result updates |
| `tb_buffer_manager` | header contents (oldest first, F9 last) for random flows |
| `tb_decision_tree` | random trees against a software walk |
| `tb_systolic_array` | dot products and the cycle the results are final |
| `tb_dnn_core` | CNN (12 classes) and RNN (7 classes) against a layer-by-layer reference; exact latency; holding when the output queue is full |
| `tb_dnn_inference_module` | 20 vectors across two clocks; classes in order; 1976-cycle inference |
| `tb_vector_io_processor` | slice/join pairing, drops when either queue is full, back-pressure on results |
| `tb_fenix_top` | whole design at default sizes (next paragraph) |
| `tb_fenix_top_rnn` | the same end-to-end test with the RNN model and 7 classes |

`tb_fenix_top` runs the whole design at default sizes. It sends 68 flows,
including colliding pairs, and checks three things:
- every verdict;
- every result's class against the reference computed on the exact header
  the switch built;
- that each mechanism happened at least once: new flow, collision, ring
  wrap, window reset, send, not sampled, no token, capped, drop, result,
  stored class, stall, and verdicts by both the tree and a stored class.

It takes about half a minute.

The reference model in `tb/fenix_ref_pkg.sv` computes inference directly
from the layer equations. It shares only the address map and the dimensions
with the RTL. Change a dimension in `fenix_pkg` and the reference follows.
