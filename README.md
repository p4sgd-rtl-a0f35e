# Model-parallel GLM training on FPGAs with an aggregating switch

Generalised linear models (linear regression, logistic regression, SVM)
with very many features are trained here by **model parallelism**. Each
FPGA worker owns a vertical slice of the features and the matching slice of
the weights. For every sample, a worker computes only a *partial activation*
(the dot product over its own features). A network switch adds the workers'
partial activations into the *full activation* and multicasts the result
back. Each worker then finishes the gradient and the weight update for its
own slice.

The only values on the network are 8 numbers per 8 samples. The latency of
that all-reduce is therefore what matters, so the all-reduce runs inside the
switch's pipeline, not on a host. Computation of later samples overlaps the
round trip of earlier ones.

This repository holds synthesizable SystemVerilog for:

- the worker (engines, HBM readers, scale calculation, transport);
- the switch's aggregation logic;
- a system top that connects M workers to one switch.

## The arithmetic

Samples are stored at low precision (`prec` bits per feature, 4 by default
in use). They are stored **bit-serially**: a 512-bit memory word holds one
bit plane of 64 features for 8 samples. Lane k (bits 64k..64k+63) belongs to
sample k, and bit j of a lane is one bit of feature j.

An engine therefore consumes 64 features × 8 samples × 1 bit per cycle. A
64-feature *chunk* takes `prec` cycles, most significant plane first.

Let q be a sample's quantised features, x the weights and b the label. All
values are 32-bit two's complement with 16 fractional bits. For a
*micro-batch* of 8 samples:

```
PA_m[k]  = sum over worker m's features of q_k[j] * x[j]        (integer q)
FA[k]    = sum over workers of PA_m[k]                           (in the switch)
a[k]     = FA[k] >>> prec                                        (undo the q scale)
scale[k] = gamma * df(a[k], b[k]) >>> (16 + log2 B)              (1/B folded in)
g[j]     = sum_k scale[k] * q_k[j]
u[j]    -= g[j] >>> prec                                         (updated model)
```

The derivative df depends on the loss:

- linear regression: `a - b`;
- logistic regression: `clamp(0.5 + a/4, 0, 1) - b`, a hard sigmoid;
- SVM: `-b` if `b*a < 1`, else 0.

A *mini-batch* holds B samples, so B/8 micro-batches. Within a mini-batch
every forward pass reads the model x as it was at the start of the
mini-batch, while the updates go into a second copy u, the *updated model*.
When the last micro-batch of the mini-batch writes u, the same row is also
written into x. This is plain synchronous mini-batch SGD with the gradient
summed over micro-batches.

## Engine (`sgd_engine`, `sgd_bank`, `adder_tree`)

An engine has 8 banks, one per sample of the micro-batch.

**Forward.** Each word fetches the 64-weight model row of its chunk. In
each bank, 64 one-bit × 32-bit multipliers (an AND) feed a binary adder
tree. The tree's sum is shifted by the plane's weight and accumulated over
all planes and chunks into the bank's PA. The bank also pushes its 64 bits
into a FIFO.

**Backward.** When the scale vector of the oldest outstanding micro-batch
arrives, every bank replays its FIFO. Each replay produces 64 products
`scale[k]` (or 0), shifted by the plane weight. 64 adder trees of fan-in 8
add three numbers per level to sum the 8 banks. An accumulator collects the
planes of a chunk. A read-modify-write then subtracts `g >>> prec` from row
c of u, and also writes x for the last micro-batch. A write that hits the
row being read next is forwarded.

**Stalls.** The engine accepts one word per cycle unless one of these
holds:

- the bank FIFOs are full;
- a new micro-batch has no free place in the 2-entry PA buffer;
- *mini-batch barrier*: the first word of a new mini-batch waits until the
  previous mini-batch's last update has been written into x.

Forward work of later micro-batches overlaps the network round trip and
the backward pass of earlier ones, up to what the FIFO holds.

## Worker (`p4sgd_worker`, `hbm_reader`, `scale_calc`)

N = 8 engines each stream their own slice of the data through an
`hbm_reader`. The reader merges two 256-bit AXI read ports into the 512-bit
stream, issuing bursts only when the output buffer has room for them.

The engines run in lock step. Their PA vectors are added and handed to the
transport. The returned FA passes the scale calculator together with the
labels (one 256-bit beat, 8 labels, per micro-batch, read by a one-port
reader). The scale vector goes to all engines at once.

The host port (a PCIe DMA engine in a real system) is reduced to:

- a run-time configuration struct;
- a start pulse with data and label regions;
- model-row load and readback.

## The aggregation protocol (`worker_transport`, `switch_agg`)

Packets carry a 9-byte header and 8 × 32-bit activations:

- `bm`, 32 bits: the sender as a one-hot bitmap;
- `seq`, 32 bits: the aggregation slot;
- `is_agg`, 1 bit;
- `acked`, 1 bit;
- 6 reserved bits.

The switch keeps, per slot:

- the running sum;
- a contributor count and bitmap (`agg_cnt`, `agg_bm`);
- an acknowledger count and bitmap (`ack_cnt`, `ack_bm`).

**Aggregation packet from a new contributor.** The switch adds the payload
to the sum. When the count reaches M, it clears the ack state. From then
on, every aggregation packet for the slot, including retransmissions, is
answered with a multicast of the sum.

**Acknowledgement from a new worker.** The switch counts it. When all M
have acknowledged, it clears the aggregation state, and every
acknowledgement is answered with a multicast carrying `acked = 1`.

Duplicates, detected through the bitmaps, never change a sum or a count.
The switch is a two-stage pipeline (read the slot, then update and write)
taking one packet per cycle. The last write is forwarded to a following
packet for the same slot.

**Worker side.**

1. The worker takes slot `seq`, keeps its PA and sends it.
2. On FA it acknowledges, and releases the FA to the scale calculator.
3. The slot is freed only by the `acked` confirmation.

Every packet in flight has a timer, and on timeout the packet is sent
again. The switch's bitmaps make those retransmissions harmless. Up to
WINDOW = 16 slots are in flight, each kept in table entry `seq mod WINDOW`.

Because losses can reorder answers and duplicate multicasts, this design
adds two rules to the worker:

- FAs are released strictly in slot order;
- an FA for an entry that is not waiting for one is dropped.

## System top (`p4sgd_system`)

The top connects M = 8 workers to the switch. A round-robin arbiter
forwards one uplink packet per cycle into the switch. The switch output is
copied to every worker, standing in for the switch's replication engine.

For testing, `up_drop[m]` and `down_drop[m]` discard the packet on a link
in that cycle. In use they are tied low.

Default sizes, all parameters:

| parameter | default | meaning |
|---|---|---|
| M | 8 | workers |
| N | 8 | engines per worker |
| MAX_CHUNKS | 4096 | 64-weight rows per engine (256K weights; 2M per worker) |
| FIFO_DEPTH | 16384 | 64-bit words per bank FIFO |
| NUM_SLOTS | 65536 | switch aggregation slots |
| WINDOW | 16 | slots in flight per worker |

## Where this departs from, or adds to, the published design

- **Number format.** The fixed-point format (16 fractional bits), the hard
  sigmoid and folding 1/B into the scale are this design's choices. The
  published design only says the elements are 32 bits wide.
- **Bank FIFO size.** The FIFO holds one micro-batch of the largest slice
  (4096 chunks × 4 bits). At full size this is 8 Mb per engine of FIFO plus
  two 8 Mb model memories, 24 Mb in all. That is more than the roughly
  19 Mb of on-chip RAM reported per engine. A smaller FIFO only limits how
  much forward work overlaps communication.
- **Switch implementation.** The switch is written as ordinary RTL, with
  all slot fields in one memory word and a valid bit per slot cleared at
  reset. The real implementation is a P4 program spread over register
  arrays in several pipeline stages.
- **Transport additions.** In-order FA delivery, duplicate-FA dropping,
  the window table, the uplink arbiter and the zero-delay links are this
  design's own.
- **Not modelled.** Ethernet/IP framing, the PCIe host interface, the HBM
  and its controllers are not modelled; their signals are ports.
- **Data capacity.** Each engine's data must fit its memory region. For the
  largest public dataset mentioned for this system (40 M samples × 1 M
  features), the model fits, but the samples do not fit one engine's 1 GB
  of HBM.

## Testbenches

Every testbench is in `tb/`. Each checks against values it computes
itself, prints `TB_RESULT checks=N failures=M` and has a watchdog.

- `tb_adder_tree`, `tb_sgd_bank`, `tb_sgd_engine`, `tb_scale_calc`,
  `tb_worker_transport`, `tb_switch_agg` and `tb_hbm_reader` test the
  blocks.
  - `tb_sgd_engine` requires FIFO-full and barrier stalls, forward/backward
    overlap and full-rate input to occur.
  - `tb_worker_transport` requires retransmissions and out-of-order
    replies.
- `tb_p4sgd_system` trains a reduced system end to end, with random packet
  loss, and compares every weight with a reference.
  - Size: 2 workers × 2 engines, 2 chunks, 8 micro-batches in 2
    mini-batches.
  - It fails if any of these never happens: drops, retransmissions, a
    duplicate at the switch, barrier stalls, FIFO stalls, forward/backward
    overlap.
- `tb_p4sgd_full` runs the top at its default size: 8 workers × 8 engines,
  256K-weight memories and 64K slots. It runs one mini-batch of logistic
  regression over 4096 features and compares all trained weights.
- `hbm_axi_model` is a behavioural AXI read memory with random handshake
  delays.

To simulate, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/p4sgd_pkg.sv tb/tb_p4sgd_system.sv --top-module tb_p4sgd_system
./obj_dir/Vtb_p4sgd_system
```

The full-size testbench builds and runs the same way. Building it takes a
few minutes because of the 64 engines.
