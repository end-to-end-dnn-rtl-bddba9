# A many-core analog in-memory computing accelerator in SystemVerilog

Convolutional networks spend almost all of their time multiplying activation vectors by fixed
weight matrices. An analog in-memory computing (AIMC) array does that multiplication where the
weights are stored: the weights sit as conductances of phase-change memory cells at the crossings
of word lines and bit lines, the input vector is applied as voltages on the word lines, and every
bit line sums its currents, so a whole 256x256 matrix-vector multiply (MVM) completes in a fixed
~130 ns. One array holds only 64 K weights, however, so a full network needs hundreds of them.
This design spreads a network across many small clusters, each with one array, and streams
feature maps from the clusters computing one layer to the clusters computing the next.

The RTL here describes that machine:

* **512 clusters.** Each has 16 RISC-V core ports, a 1 MB banked L1 scratchpad, an event unit
  for barriers, dispatch and sleeping, a two-channel DMA, an AXI slave port, and one in-memory
  accelerator (IMA). The IMA is a 256x256 array with double-buffered input and output
  streamers.
* **A hierarchical AXI4 network.** L1 nodes join 4 clusters, L2 and L3 nodes join 4 quadrants
  of the level below, and a wrapper joins 8 L3 quadrants. An HBM link node then leads to the
  off-chip memory. Every link carries 64 bytes per beat and every node adds 4 cycles.

The processor cores themselves are not included: their data ports, register-bus accesses and
sleep/wake handshake are ports of each cluster, so a core model (or a testbench) drives them.

## Dataflow a layer goes through

A layer's weights are loaded once into the arrays of the clusters that compute it. After that,
each cluster repeats the same steps:

1. Core 0 starts the DMA input channel. It reads a tile of the input feature map from the HBM
   or from the producer cluster's L1, with AXI read bursts, into local L1. The core then sleeps
   in the event unit until the DMA-in event.
2. Core 0 programs the IMA registers and starts it. It describes the input addresses as a
   2-D pattern: chunk width, number of chunks, chunk stride and job stride. It also gives the
   output base, output length and output stride, and the number of jobs (vectors). The core
   sleeps until the IMA event.
3. Core 0 starts the DMA output channel. This channel writes the results with AXI write
   bursts, either into the consumer cluster's L1 through that cluster's slave port, or to the
   HBM.

The input and output channels use separate AXI channels (read and write), so a cluster can
fetch its next tile while it sends the previous one. The other 15 cores share the same L1 for
digital work: pooling, residual additions and so on.

## Inside the IMA: three overlapped phases

The IMA (`ima.sv`) is the most intricate part of the design. Each job goes through three
phases:

* **Stream-in** (`ima_streamer.sv`) reads one input vector of up to 256 bytes from L1, one
  64-byte beat per cycle over 16 TCDM ports, into one half of the input buffer
  (`ima_in_buffer.sv`).
* **Compute** (`aimc_core.sv`) takes that buffer half and holds it for 130 cycles, the analog
  latency. It then writes 256 8-bit results into one half of the output buffer
  (`ima_out_buffer.sv`).
* **Stream-out** writes an output-buffer half back to L1.

Job *j* uses buffer half *j mod 2* in both buffers. The controller (`ima_ctrl.sv`) runs the
phases as three small engines with a full flag per buffer half:

* Stream-in of job *j* starts as soon as input half *j mod 2* is empty.
* Compute starts when that half is full and output half *j mod 2* is free.
* Stream-out starts when the output half is full.

Stream-in of job *j+1* and stream-out of job *j-1* therefore happen while job *j* is in the
array. Both stream engines share the 16 ports and alternate beat by beat. A 256-byte vector
needs only 4 beats each way, so the transfers hide completely behind the 130-cycle compute. In
the IMA test, 8 jobs take 1083 cycles; the compute time alone is 8 x 130 = 1040 cycles.

The analog array is a **behavioural model**: an ideal integer MVM with these conventions:

* Inputs are unsigned 8-bit and weights are signed 8-bit.
* The sum is shifted right arithmetically by a programmable ADC shift, then saturated to
  signed 8 bits.
* Results appear exactly `LATENCY` cycles after the start.

Weights are loaded one row per cycle through a programming port. The top has one shared
programming bus with a cluster select. A physical array would be a mixed-signal macro; noise,
drift and the real converter resolution are not modelled.

## The cluster's L1 and who shares it

The L1 is 32 word-interleaved banks (`l1_bank.sv`, 8192 x 32 bits each, byte enables,
registered read). Word *i* lives in bank *i mod 32*. One single-cycle crossbar
(`tcdm_xbar.sv`) connects 80 master ports:

| masters | ports |
|---|---|
| cores | 0–15 |
| DMA input channel | 16–31 |
| DMA output channel | 32–47 |
| AXI slave port | 48–63 |
| IMA streamers | 64–79 |

The crossbar protocol works as follows:

* A master raises `req`. In the same cycle it sees `gnt` or not, because each bank has its own
  round-robin arbiter.
* Read data (and a write acknowledge) arrives with `rvalid` one cycle after the grant.
* A master that is not granted keeps its request. This is a bank-conflict stall.
* The 64-byte engines (DMA, slave port, IMA) move a beat over 16 ports at once
  (`tcdm_beat_port.sv`). They keep granted words and retry only the words that lost
  arbitration.

The peripheral registers sit on a separate, always-ready register bus (`cfg_req_t`), decoded by
address bits 11:8:

| address bits 11:8 | peripheral |
|---|---|
| 0 | event unit |
| 1 | DMA |
| 2 | IMA |

The register offsets are in `aimc_pkg.sv`.

## Event unit

Each core has a pending-event register. Events 0–2 are DMA-in done, DMA-out done and IMA done;
event 3 is dispatch, and events 4–7 are software events. The event unit supports three
operations:

* **Waiting on events.** A core pulses `wait_i` with a mask. Its `clk_en_o` drops until a
  masked event is pending. Then `wake_o` pulses for one cycle and the masked pending bits are
  cleared. An event that arrived before the wait wakes the core at once.
* **Barriers.** A core pulses `barrier_i` and sleeps. When every core in the barrier mask has
  arrived, all of them wake in the same cycle.
* **Dispatch.** A register write to the dispatch register stores a value (for example a
  function pointer) and raises the dispatch event in every core.

## DMA and the slave port

The DMA (`cluster_dma.sv`) splits each transfer into INCR bursts. A burst is at most 16
beats of 64 bytes and never crosses a 4 KB boundary. Each channel keeps one burst in flight.
The slave port (`axi_tcdm_slave.sv`) serves one burst at a time, with writes first. It turns
each beat into 16 word accesses with the AXI write strobes as byte enables. Addresses and
lengths are multiples of 64 bytes.

## The network

Every level of the tree is the same `axi_node.sv`, configured by its number of children and
the cluster range below it. A node with *N* children has *N*+1 bidirectional ports; the last
port faces up.

* **Address map.** Cluster *c*'s L1 is at `0x8000_0000 + c * 1 MB`. Everything below
  `0x8000_0000` is HBM.
* **Routing.** A request whose cluster lies under child *k* goes down port *k*. Anything else
  goes up.
* **Arbitration.** Each output port takes one write burst and one read burst at a time,
  chosen round-robin among the inputs that want it.
* **Latency.** The node holds the address `LATENCY` (4) cycles before passing it on. Data
  beats and responses then flow straight through between the two ports.

The top (`aimc_system.sv`) builds the tree from the four quadrant factors. The HBM link node
has one child, and its master port is the top's `hbm_req_o`/`hbm_rsp_i`. An HBM controller and
DRAM model go there; the testbenches use `tb/axi_mem_model.sv` with 100 cycles of latency.

A transfer between clusters in different L3 quadrants crosses 7 nodes: L1, L2 and L3 going up,
then the wrapper, then L3, L2 and L1 coming down. That is 28 cycles of address latency.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `QF_WRAP`, `QF_L3`, `QF_L2`, `QF_L1` | 8, 4, 4, 4 | quadrant factors; clusters = product = 512 |
| `N_CORES` | 16 | core ports per cluster |
| `L1_BYTES` | 1 MB | L1 per cluster |
| `N_BANKS` | 32 | L1 banks (own choice) |
| `IMA_R`, `IMA_C` | 256, 256 | array rows (inputs) and columns (outputs) |
| `IMA_LAT` | 130 | analog MVM latency in cycles (130 ns at 1 GHz) |
| `NODE_LAT` | 4 | cycles per network node |

## Where this RTL departs from, or adds to, the described system

* **Not included.**
  * RISC-V cores, their instruction caches, the HBM controller and the HBM itself. The
    cluster exposes the core ports instead.
  * The network node internals are not specified in the source description. This node is a
    simple crossbar with one burst per output and direction, and it has no outstanding
    transactions or ID-based reordering. Bandwidth under heavy contention is therefore lower
    than in a fully pipelined AXI crossbar.
* **The design's own choices.**
  * The register maps, event numbering and wait protocol.
  * The 2-D stream-in address pattern.
  * The 8-bit precision and shift-and-saturate ADC model.
  * The DMA burst policy, the 32-bank L1 and the memory map.
* **Latency values.** The source lists six latency entries (HBM, link, wrapper, L3, L2, L1)
  but only five numbers (100, 4, 4, 4, 4). Here the HBM has 100 cycles and every network node
  has 4.
* **Analog behaviour.** The array is ideal: no noise, no conductance drift, no limited ADC
  resolution beyond the 8-bit output.

## Verification

Every block has a self-checking testbench in `tb/`. Each testbench computes expected values
independently and prints `TB_RESULT checks=<n> failures=<m>`. The models used by the
testbenches are:

* `tcdm_mem_model.sv`: a random-grant L1.
* `axi_mem_model.sv`: a latency-configurable AXI memory.

The end-to-end test, `tb_aimc_system.sv`, runs a reduced network: 4 clusters (wrapper 2, L3 1,
L2 1, L1 2) with 64 KB of L1 each. The cores, IMA size, analog latency and node latency keep
their defaults. The test covers:

* **A two-layer pipeline.** HBM to cluster 0's IMA, then straight into cluster 3's L1, then
  cluster 3's IMA, then back to HBM. Results are compared with a reference computation.
* **Concurrent copies** by clusters 1 and 2.
* **Random core traffic** on every cluster.
* **A 16-core barrier.**
* **Mechanism counters.** The test counts bank-conflict stalls, stream/compute overlap, network
  contention, HBM traffic, cluster-to-cluster bursts and event wake-ups. It fails if any of
  them never happens.

This 4-cluster configuration is the largest that was simulated. The default 512-cluster top
passes lint and elaboration, but it is too large to simulate in practice: it has 512 MB of L1
arrays and 33 M weight registers.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -y rtl -y tb rtl/aimc_pkg.sv tb/tb_aimc_system.sv \
          --top-module tb_aimc_system -Wno-fatal
./obj_dir/Vtb_aimc_system
```
