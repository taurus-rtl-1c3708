# Taurus MapReduce data plane in SystemVerilog

A switch pipeline can make a per-packet machine-learning decision at line rate
if the inference engine is built like the rest of the pipeline: a fixed-latency,
fully pipelined, statically configured dataflow fabric that takes one packet
header per clock and never stalls. This design implements that idea as
described for Taurus. A grid of SIMD compute units (CUs) and banked memory
units (MUs) sits between the preprocessing and postprocessing match-action
stages of a PISA switch. The grid is joined by a static, pipelined interconnect.
Only the dense feature field of the packet header vector (PHV) enters the grid.
All other headers, and every packet that needs no inference, go around it, and a
round-robin selector merges the two paths again.

## Blocks

| File | Block | What it does |
|---|---|---|
| `rtl/taurus_pkg.sv` | shared types | widths, opcodes, configuration structs, PHV layout, saturation |
| `rtl/taurus_fu.sv` | functional unit | one 8-bit fixed-point operation, saturating |
| `rtl/taurus_cu_stage.sv` | CU stage | 16 lanes of FUs: map (1 cycle) or 16-lane reduce tree (4 cycles) or bypass |
| `rtl/taurus_cu.sv` | compute unit | 4 pipelined stages of 16 lanes |
| `rtl/taurus_mu.sv` | memory unit | 16 banks x 1024 entries x 8 bits; vector read or per-lane table lookup |
| `rtl/taurus_xbar_port.sv` | interconnect port | per-lane static source select, pipeline register, 0-7 cycle delay |
| `rtl/taurus_mapreduce.sv` | MapReduce block | 10 x 12 grid: 90 CUs and 30 MUs, configuration and weight registers |
| `rtl/taurus_fifo.sv` | FIFO | header, result and bypass FIFOs |
| `rtl/taurus_pkt_buffer.sv` | packet queue | one memory split into three circular sub-queues |
| `rtl/taurus_rr_arbiter.sv` | RR selector | round-robin choice between the ML path and the bypass path |
| `rtl/taurus_pipeline.sv` | top | parser to scheduler section: ML split, MapReduce, bypass, merge, queues |

### Compute unit

A CU has 16 lanes and 4 stages, with a register after each stage. In a *map*
stage all 16 FUs apply the same operation to lane `l` of operand A and lane
`l` of operand B. Operand B comes from the CU's second input vector, a per-stage
immediate, or the stage's own input. A *reduce* stage folds the 16 lanes
with a binary tree built from the same operation. The tree has one register per
level, so it takes 4 cycles, and its result is broadcast to all lanes. A map followed by a
reduce therefore costs 1 + 4 cycles, which is the figure the paper quotes for
an inner product. The operand B vector travels through the stages beside the
data. FU operations are pass, add, sub, mul (the product is shifted right
arithmetically by a per-stage amount, which sets the fixed-point position),
max, min, ReLU, leaky ReLU (slope 2^-shift), arithmetic shift right, and "pass
B". Every result saturates to int8.

### Memory unit

An MU has 16 banks of 1024 8-bit entries with a one-cycle registered read. In
VEC mode every bank reads entry `base`: the MU then supplies one 16-wide weight
vector per cycle, always valid. In LUT mode bank `l` reads entry
`base + unsigned(A[l])`. This gives 16 parallel lookups for activation functions such as sigmoid,
tanh or exp. Weights and tables are written one byte per cycle through the
weight port (`wt_*`).

### Interconnect and configuration

Every CU has two input ports, A and B. Every MU has one port, A. One more port forms the
output field. A port chooses, for each of its 16 lanes, any lane of any tile's output
or of the PHV feature field. Its valid bit follows one chosen source. Its
output is registered and can be delayed by 0 to 7 more cycles to line up paths
of different depth. The choice is static while traffic flows.

A tile's configuration is a packed `tile_cfg_t` (ports A and B, four stage
words, MU mode). It is written 32 bits at a time with `cfg_we`/`cfg_tile`/
`cfg_word`/`cfg_wdata`. Tile number `ROWS*COLS` addresses the output port.
Tile `t = r*COLS + c` is an MU when `r` and `c` are both even, which gives the
3:1 CU:MU checkerboard. Reset sets every port to "zero, never valid" and every
MU to off.

### Pipeline (top)

1. The parser offers a PHV and a body descriptor (`par_*`). The PHV goes to the
   preprocessing MATs. The body waits in packet sub-queue 0.
2. The PHV returns (`pre_in_*`) with its `ml` bit set by the MAT.
   - An ML packet's feature field enters the MapReduce block. Its other headers
     enter the header FIFO and its body moves to sub-queue 1.
   - A non-ML packet's PHV and body enter the bypass FIFO.
3. The MapReduce block has a fixed latency. Its results enter a result FIFO
   in order, so the heads of the result FIFO, the header FIFO and sub-queue 1
   always belong to one packet.
4. The RR selector grants the ML path or the bypass path into the
   postprocessing MATs (`post_out_*`). The result replaces the feature field,
   and the body moves to sub-queue 2.
5. The PHV returns from postprocessing (`post_in_*`). It is paired with the
   head of sub-queue 2 and handed to the scheduler (`sch_*`).

The block cannot stall, so ML packets are admitted against `ML_INFLIGHT`
credits, the depth of the header and result FIFOs. `pre_in_ready` depends on
the path of the packet at the head of the preprocessing output. An ML packet
needs a credit, and a non-ML packet needs space in the bypass FIFO. `par_ready`
drops when sub-queue 0 is full. A non-ML packet waits for credits only when an
ML packet without a credit is ahead of it, which is head-of-line blocking at the
MAT output. Bypass packets do overtake ML packets that are already inside the
block.

## Example mapping: the anomaly-detection DNN

The testbenches compile the paper's running example onto the grid: 6 features,
hidden layers of 12, 6 and 3 ReLU neurons, and one output neuron with a sigmoid.

- **One neuron per CU.** The four stages are `MUL(A,B)>>>4`, `REDUCE ADD`,
  `ADD bias`, and `RELU` (or `PASS` for the output neuron).
- **Inputs.** Port A gathers the previous layer's outputs, or the feature lanes
  for the first layer.
- **Weights.** Port B takes the neuron's weights from an MU in VEC mode, and
  several neurons share one MU.
- **Sigmoid.** One MU in LUT mode applies it.
- **Resources.** 22 CUs and 16 MUs.
- **Latency.** Each layer costs 8 cycles: 1 interconnect, 1 map, 4 reduce,
  1 bias and 1 activation. The whole block takes 4 x 8 + 3 = 35 cycles.
- **Throughput.** One packet per cycle.

The paper reports 221 ns at 1 GHz for this model because its data movements
between units take about 5 cycles each. Here the crossbar port takes 1 cycle.

## Parameters (defaults follow the paper where it gives a number)

| Parameter | Default | Source |
|---|---|---|
| `LANES`, `STAGES`, `DW` | 16, 4, 8 | paper (final CU) |
| `MU_BANKS`, `MU_DEPTH` | 16, 1024 | paper (final MU) |
| `ROWS` x `COLS` | 10 x 12 (90 CU, 30 MU) | paper's 12x10 grid; orientation assumed |
| `ML_INFLIGHT`, `BYP_DEPTH` | 256, 16 | assumed |
| `Q_TOTAL` / `Q_PRE` / `Q_MR` / `Q_POST` | 512 / 128 / 256 / 128 | assumed split by depth |
| `HDR_W`, `BODY_W` | 128, 16 | assumed |

## Where this design departs from, or goes beyond, the paper

- **Interconnect.** The paper draws switch boxes but does not describe them. This design uses the simplest
  thing that provides a static, pipelined connection: a lane-granular crossbar
  port per unit input. It costs more wiring than a mesh, and it has less latency than
  the paper's about 5 cycles per movement. Latencies here are therefore shorter than the paper's
  (35 vs 221 cycles for the DNN).
- **Reduce within a stage.** This is a 4-level register tree. The paper says a map plus a
  16-lane reduce takes 5 cycles but not how a stage is built inside.
- **Arithmetic.** Saturation, the shift after a multiply, the opcode list and the
  leaky-ReLU slope are choices of this design.
- **MU addressing.** The VEC and LUT modes are choices of this design. A LUT index is 8 bits, so one
  lookup reaches 256 of the 1024 entries from a configurable base.
- **Configuration.** The configuration format and write ports are this design's own. The paper's
  compiler, P4 front end and control plane are not part of it.
- **KMeans argmin.** There is no dedicated argmin or index operation. KMeans needs a MIN
  reduce and a compare stage (two CUs) to recover the cluster index.
- **Time-multiplexing.** The Indigo LSTM (not at line rate in the paper) would need time-multiplexed
  CUs. This static design does not support that.
- **Flow control.** The credit-based admission, the FIFO depths, the PHV layout and the
  ready/valid handshakes are this design's own.
- **Parts outside this design.** The parser, the preprocessing and postprocessing MATs, the PIFO scheduler, the
  1 GHz clocking and the FPGA testbed are not built. They are existing switch
  hardware or evaluation setup. The end-to-end testbench models the MATs,
  parser and scheduler behaviourally.

## Testbenches

Each `tb/tb_<module>.sv` is self-checking and prints
`TB_RESULT checks=N failures=M`.

- **Unit testbenches.** `tb_taurus_fu`, `tb_taurus_cu`, `tb_taurus_mu`, `tb_taurus_xbar_port`,
  `tb_taurus_fifo`, `tb_taurus_pkt_buffer` and `tb_taurus_rr_arbiter` check their
  blocks against independent reference models with random stimulus.
- **`tb_taurus_mapreduce`** places the DNN on the full 10 x 12 grid. It checks
  every output against an integer reference model and runs back-to-back
  packets.
- **`tb_taurus_pipeline`** (8 x 8 grid, small FIFOs) and **`tb_taurus_pipeline_full`**
  (the top at its default parameters) run mixed ML and non-ML traffic end to end.
  `taurus_pipeline_env.sv` provides the parser, MAT and scheduler models. The
  testbenches check the DNN result, the body pairing and loss or duplication. They count each mechanism: ML path,
  bypass, overtaking, RR contention, credit stalls and parser back-pressure.
- **Shared code.** `taurus_tb_dnn_pkg.sv` holds the DNN placer and its reference model.

Simulate with Verilator 5, for example:

    verilator --binary --timing --assert rtl/taurus_pkg.sv rtl/*.sv \
      tb/taurus_tb_dnn_pkg.sv tb/taurus_pipeline_env.sv tb/tb_taurus_pipeline.sv \
      --top-module tb_taurus_pipeline
    ./obj_dir/Vtb_taurus_pipeline

The grid testbenches take several minutes to compile because every
configuration field of every tile becomes separate logic.
