# FPDeep node and chain: RTL for training one CONV layer on a chain of FPGAs

FPDeep trains a CNN on a cluster of FPGAs that forms one long pipeline. It does
not give each device a slice of the mini-batch. Every layer is split over a few
devices, and each device computes its share of all three phases of training:

- the forward pass (FP);
- error back-propagation (EB);
- the parameter-gradient calculation (PG).

Data moves only between neighbours on a one-dimensional chain. Each device
keeps and updates its own weights, so there is no parameter server and no
all-reduce step. The mini-batch can stay small, because the parallelism comes
from the pipeline rather than from the batch.

This repository gives synthesizable SystemVerilog for the core of that idea:
one CONV layer split by **input-channel partitioning (ICP)** over a chain of
`N_NODES` nodes. Each node stands for one FPGA. It trains whole mini-batches
end to end, forward and backward, and applies the weight updates itself.
Parameter balancing is included: one node stores and updates weights that
another node uses.

The default configuration is:

| parameter | value | meaning |
|---|---|---|
| `N_NODES` | 4 | nodes in the chain |
| `S_IC` | 4 | input channels per node, so 16 input channels in all |
| `OC` | 8 | output channels |
| `K` | 3 | kernel size, 3 × 3 |
| `W` | 7 | input map size, 7 × 7, giving a 5 × 5 output map |
| `P` | 4 | output channels computed per cycle |
| `LOG2_BATCH` | 10 | mini-batch of 1024 samples |

## 1. The computation being distributed

For one CONV layer with input activations `A[i]`, weights `W[o][i]` (K × K) and
output errors `E[o]`, training needs three computations:

- **FP:** `Y[o] = f( Σ_i A[i] ⊛ W[o][i] )`. This is a valid convolution, and
  `f` is ReLU.
- **EB:** `E_in[i] = Σ_o E[o] ⊛full rot180(W[o][i])`. This is a full
  convolution: the error map is zero-padded by K-1 on every side, and the
  kernel is turned by 180°.
- **PG:** `dW[o][i](kh,kw) = Σ_(r,c) E[o](r,c) · A[i](r+kh, c+kw)`.

Under ICP, node *n* owns input channels `n·S_IC … n·S_IC+S_IC-1`. The three
computations then split as follows:

- **FP:** each node forms the part of every output that comes from its own
  channels. The parts are summed along the chain. Node 0 starts each sum. Each
  later node adds its part to the sum from its predecessor and passes the
  result on. The last node holds complete sums, applies the activation and
  sends the outputs on.
- **EB:** every node needs the errors of all output channels. The errors enter
  at the last node and are passed from node to node towards node 0. Each node
  computes the input errors for its own channels only, and sends them towards
  node 0 as well.
- **PG:** a node needs only its own activations and the output errors. The
  gradients of its weights are therefore computed where the weights are
  stored, and never travel. The exception is balanced weights (section 5).

## 2. The chain and its packets

```
 fwd_in ──► node 0 ──► node 1 ──► node 2 ──► node 3 ──► fwd_out   (activations, partial sums, parameters)
 bwd_out ◄── node 0 ◄── node 1 ◄── node 2 ◄── node 3 ◄── bwd_in    (errors, gradients)
```

Each node has two link pairs. The forward pair runs towards higher node
numbers and the backward pair towards lower ones. A link moves one packet per
cycle with valid/ready flow control. A packet (`pkt_t` in `fpdeep_pkg`) has
these fields:

| field | bits | use |
|---|---|---|
| `typ` | 3 | `ACT`, `PSUM`, `PARAM`, `GRAD` or `ERR` |
| `layer` | 4 | layer whose output the value belongs to |
| `dst` | 4 | destination node, for `PARAM` and `GRAD` |
| `ch` | 12 | channel |
| `addr` | 16 | pixel index in raster order, or word address |
| `data` | 32 | the value |

**Forward pair (`fwd_link`).** Each arriving packet is handled by its kind:

- A local activation of layer `LAYER-1` is kept. The `S_IC` channels of one
  pixel are gathered into one Activation-RAM entry.
- Any other activation is bypassed to the next node. The last node drops it,
  because no node after it needs it.
- A partial sum of this layer goes to the Partial Activation Buffer.
- A `PARAM` word for this node is written into the LPRAM or the BPRAM. The
  address decides which: addresses below `LP_WORDS` go to the LPRAM.
- Everything else is passed on.

The outgoing side merges three streams round robin into one registered output:
the bypass queue, the FP results, and the BPRAM push.

**Backward pair (`bwd_link`).** Errors of this layer's outputs are gathered
into one vector per pixel, holding all `OC` channels, for EB and PG. Unless
the node is the first of the layer, the errors are also passed on, because
every node upstream needs them. `GRAD` words for this node go to its Balanced
Gradient Buffer. Everything else is bypassed.

The outgoing side gives this node's own EB errors strict priority, then
bypassed traffic, then outgoing gradient words. As a result, the input errors
of the layer leave node 0 grouped by node: each node's errors travel behind
the node's own output.

Because every stream runs in raster order, one pixel after another and
channels in order, the partial sums from the predecessor and the locally
computed parts arrive in the same order. They can be paired without addresses.
Assertions in `pab` and `pg_module` check this pairing.

## 3. Inside a node

```
            ┌──────────── fwd_link ─────────────┐
 ACT ──►  Act-RAM ──► LB ──► P CEs (S_IC tiles) ──► PAB ──► SFU ──► PSUM/ACT out
   (FIFO, 2 read ptrs)            ▲ LPRAM row g         ▲ PSUM in
              │                   │
              └─(BP read)─► LB ──► PG products ──► LGB ──► LPRAM update / GRAD out
 ERR in ──► err vector ──┬──────────────────────────┘
                         └─► pad ─► LB ─► S_IC CEs (P tiles, rotated kernels) ─► Error Buffer ─► ERR out
 GRAD in ──► BGB ──► BPRAM ──► PARAM push (balanced weights for another node)
```

**LPRAM row layout.** All three engines read their weights from the LPRAM. The
LPRAM has `G = OC/P` rows of `P·S_IC·K·K` words. Row `g` holds the kernels of
output channels `g·P … g·P+P-1`. Word `(j·S_IC + i)·K·K + kh·K + kw` of row
`g` is `W[g·P+j][i][kh][kw]`. One row therefore gives, in one cycle, every
weight that P output channels need for one window. PG produces its gradients
in the same layout, so the update can add gradients row by row.

**FP (`fp_module`).** The line buffer forms K × K × S_IC windows. For each
window the controller steps through the G rows, one per cycle. In each cycle,
P Convolution Engines of S_IC tiles compute the partial results of P output
channels.

The PAB then adds each result to the matching partial sum from the
predecessor, at one word per cycle. The first node of the layer adds zero
instead. On the last node the SFU applies ReLU and an optional right shift,
and the word leaves as an `ACT` packet; elsewhere it leaves as a `PSUM`
packet.

Issue stalls while the PAB has no free entry. With the defaults (OC = 8, G = 2),
the output link runs at one word per cycle and so sets the rate: 8 cycles per
window.

**EB (`eb_module`).** A padding generator surrounds the incoming 5 × 5 error
map with two rows and columns of zeros. A line buffer forms `OC`-channel
windows over the padded map, giving exactly one window per input pixel, 7 × 7
in all.

For each window, G steps follow. In step `g` the errors of channels
`g·P … g·P+P-1` are broadcast to `S_IC` engines of P tiles. Tile `j` of engine
`i` uses the rotated kernel of `W[g·P+j][i]`. The engine results are summed
over the G steps and placed in the Error Buffer. From there they leave as
`ERR` packets of layer `LAYER-1`, one per local channel.

**PG (`pg_module`).** The activations are read a second time from the
Activation RAM and re-windowed by a second line buffer. This is the "BP read",
described with the Activation RAM below. The errors of the same output pixel
arrive from the error gatherer.

In step `g`, the module forms `P·S_IC·K·K` products (error times window
element) and adds the row to the Local Gradient Buffer. A pixel's
contribution to the large "error map ⊛ activation map" convolution is
therefore computed as one small K × K piece per pixel. After `2^LOG2_BATCH`
complete maps, PG requests an update.

**Activation RAM (`act_ram`).** One circular buffer with three pointers:

- the write pointer;
- the FP read pointer;
- the BP read pointer.

An entry is freed only after PG has read it, so FP can run ahead of the
backward pass by up to `ACT_DEPTH` pixels. The default depth of 196 is four
7 × 7 frames.

## 4. The mini-batch update

The LGB holds one accumulator row per LPRAM row. Once the mini-batch is
complete, the node waits until the EB module has finished its current error
map and the error queue is empty. This ensures that the errors of one sample
are never computed with a mix of old and new weights.

The LGB then walks its rows, one row per cycle:

- **Local rows:** the averaged gradient, `sum >>> LOG2_BATCH`, is added to the
  LPRAM row and written back.
- **Balanced rows** (the last `REMOTE_ROWS` rows, whose weights are held by
  another node): the raw sums are sent to the holder as `GRAD` packets.

While the update runs, PG is held off. The forward pass is not held off: the
next mini-batch's samples continue on the old weights until the new row is
written. This is the "slightly unaligned" update that FPDeep accepts.

The update adds the averaged gradient. The sign and the learning rate are left
to whatever produces the errors, which is the test bench here.

## 5. Parameter balancing

Weight memory is uneven along a network: late layers have many weights and
small maps. So FPDeep lets a node with spare on-chip memory hold weights for a
node that has too little. The default chain shows the mechanism with one row.
Node 3 has two LPRAM rows, and the weights of its last row are held by node 0:

1. At start-up, node 0 receives the row into its BPRAM. Node 0 is the holder.
2. A pulse on `bal_push` streams the BPRAM down the chain as `PARAM` packets.
   They land in the balanced row of node 3's LPRAM, at address `HOLD_BASE`.
3. At the end of a mini-batch, node 3 sends the gradient sums of that row back
   up the backward chain as `GRAD` packets.
4. Node 0's Balanced Gradient Buffer collects all the words, averages them and
   updates the BPRAM.
5. The BGB then starts a new push, so node 3 gets the new weights.

In this implementation the consumer keeps a full copy of the balanced row
between pushes. The traffic pattern is therefore FPDeep's, but the memory
saving on the consumer is not reproduced. A version that streams the balanced
weights for every use would also need its own timing against FP and EB.

## 6. Number format and departures from the described design

**Number format.** All arithmetic is 32-bit two's-complement integer.
Products are truncated to 32 bits and sums wrap around. The architecture as
published uses single-precision floating point. Integers were chosen so that
every result can be checked exactly against a reference model. Replacing
`fpdeep_pkg::mul` and the adders with FP32 units is the natural next step.
That would add pipeline latency that the controllers do not yet allow for.

**Departures from the published design:**

- **One layer, ICP only.** Several layers on one device, output-channel
  partitioning, and chains that span several layers are not built.
- **SFU has no pooling.** The SFU has ReLU and a shift normalisation only. It
  is applied on the last node, after the complete sum, because an activation
  function cannot be applied to a partial sum.
- **EB stops at the gradient of the previous layer's output.** The derivative
  of that layer's activation is not applied.
- **Balanced weights are copied, not streamed** (section 5).
- **No physical layer.** The links are plain valid/ready packet ports. The
  transceivers, connectors and the off-chip path for FC layers are not part of
  the RTL.
- **Sizes.** The default layer is the small example of a 3 × 3 kernel on a
  7 × 7 map. The evaluated networks (AlexNet, VGG-16 and VGG-19 on 15 FPGAs)
  are far larger and have many layers, so they do not fit this
  configuration. The parameters `S_IC`, `OC`, `P` and `W` scale a single layer.

## 7. Files

| file | block |
|---|---|
| `rtl/fpdeep_pkg.sv` | word and packet types, per-node counters, truncating multiply |
| `rtl/sync_fifo.sv` | helper FIFO |
| `rtl/conv_tile.sv` | K × K dot product |
| `rtl/conv_engine.sv` | NT tiles summed, one register stage |
| `rtl/line_buffer.sv` | raster stream to K × K windows |
| `rtl/act_ram.sv` | Activation RAM, one write pointer and two read pointers |
| `rtl/lpram.sv` | Local Parameter RAM |
| `rtl/bpram.sv` | Balanced Parameter RAM and its push |
| `rtl/lgb.sv` | Local Gradient Buffer and update sequencer |
| `rtl/bgb.sv` | Balanced Gradient Buffer |
| `rtl/sfu.sv` | ReLU and shift |
| `rtl/pab.sv` | Partial Activation Buffer |
| `rtl/fp_module.sv`, `rtl/eb_module.sv`, `rtl/pg_module.sv` | the three engines |
| `rtl/fwd_link.sv`, `rtl/bwd_link.sv` | the two link pairs |
| `rtl/fpdeep_node.sv` | one FPGA node |
| `rtl/fpdeep_cluster.sv` | top: the chain of `N_NODES` nodes |

The top's ports are:

- the forward and backward packet ports at the two ends of the chain;
- `bal_push`;
- an array of `node_stats_t` event counters, one per node. They count
  bypasses, partial-sum additions, ReLU clamps, stalls, error bypasses,
  own-errors-first events, parameter pushes, returned gradients and updates.

## 8. Simulating

Each block has a self-checking test bench, `tb/tb_<module>.sv`. Each one prints
`TB_RESULT checks=… failures=…` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/fpdeep_pkg.sv tb/tb_fpdeep_cluster.sv \
          --top-module tb_fpdeep_cluster -Mdir obj_cluster
./obj_cluster/Vtb_fpdeep_cluster
```

Replace `fpdeep_cluster` with any other block name to run its test bench.

**End-to-end test.** `tb_fpdeep_cluster` runs the top at its default
parameters. It loads the weights as `PARAM` packets, including node 3's
balanced row into node 0's BPRAM, and then pushes them. It then trains 1025
random samples: a full mini-batch of 1024 and one more. It checks:

- every one of the 200 outputs per sample against a direct convolution with
  ReLU;
- every one of the 784 input errors per sample against a direct full
  convolution;
- sample 1025 against the updated weights `W + (Σ dW >>> 10)`.

Output ports are randomly back-pressured. The test requires every mechanism
counter to be non-zero and checks each counter's exact value where one is
known. It takes about 1.06 million cycles and about 20 s, and makes about one
million checks.

**Node test.** `tb_fpdeep_node` does the same for a single node that is both
first and last of its layer, with a 2-sample mini-batch.
