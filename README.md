# A tile-based SoC for chains of machine-learning accelerators, with point-to-point transfers

This RTL models an ESP-style system-on-chip: a grid of tiles joined by a
packet-switched 2D-mesh network-on-chip (NoC). The design follows the ESP4ML
work (Giri et al., "ESP4ML: Platform-Based Design of Systems-on-Chip for
Embedded Machine Learning"). Most tiles hold a neural-network accelerator, and
one tile connects to off-chip memory. The accelerators are dense-layer networks
of the kind hls4ml produces. Each one sits in a wrapper that gives it a DMA
engine, a page table, configuration registers and an interrupt.

The main idea is the point-to-point (p2p) service. A chain of accelerators can
hand intermediate results straight from one tile to the next over the NoC,
instead of writing them to DRAM and reading them back. Each accelerator still
believes it is doing ordinary DMA loads and stores, so the accelerator itself
does not change. Only the tile wrapper decides where the data really goes.

The default configuration is the "multi-tile classifier" SoC. It is a 4x4 grid
that holds two copies of a five-stage pipeline computing the MLP
1024x256x128x64x32x10. It also has one memory tile, plus a processor tile and an
auxiliary tile, which are left as ports.

```
          x=0        x=1        x=2        x=3
  y=0     C2         C3         C4         aux (ports)
  y=1     C1         MEM        C5         empty
  y=2     C5         CPU(ports) C1         empty
  y=3     C4         C3         C2         empty
```

- Pipeline A: tiles (0,1) (0,0) (1,0) (2,0) (2,1).
- Pipeline B: tiles (2,2) (2,3) (1,3) (0,3) (0,2).
- Tile number t = y*4 + x.

## The NoC: two planes, one packet format

Only the two planes that carry accelerator data are built:

- the **DMA request plane**;
- the **DMA response plane**.

Keeping requests and responses on separate planes means a response can never
be stuck behind a request. That is what makes the DMA protocol free of
deadlock, and the p2p service relies on it too.

Each plane is a `noc_mesh` of `noc_router`s.

- **Router.** It has five ports: N, S, E, W and local. Each input has a
  4-flit FIFO. Packets are routed X first, then Y. Switching is wormhole: an
  output stays locked to one input from the head flit to the tail flit. A
  free output picks among waiting inputs round-robin.
- **Latency.** A flit crosses one router per cycle when nothing blocks it.
- **Flit.** A flit is `{head, tail, data[31:0]}`.
- **Head flit.** Its data holds `{dst_y, dst_x, src_y, src_x}` (3 bits
  each), a 4-bit message type and a 16-bit length in data beats.

| message | plane | flits |
|---|---|---|
| `MSG_DMA_READ` | request | head, physical address (tail) |
| `MSG_DMA_WRITE` | request | head, physical address, `len` data beats (last is tail) |
| `MSG_DMA_RSP` | response | head, `len` data beats; used for memory read data **and** p2p data |
| `MSG_P2P_REQ` | request | a single head+tail flit; `len` is the number of beats wanted |

The routing scheme, the buffer depth and the packet layout are this design's
choices. The source describes the NoC planes but not their internals.

## Point-to-point transfers (dma_engine)

This is the least obvious part of the design.

In plain DMA operation a tile only *sends* on the request plane and only
*receives* on the response plane. The other two directions of its network
interface sit unused. The p2p service uses exactly those two directions, so
it needs no extra plane and no extra queue:

- **Consumer (p2p load enabled).** When the accelerator issues a load of
  `len` beats, the DMA engine sends one `MSG_P2P_REQ` flit to a source tile
  instead of reading memory. It then accepts `MSG_DMA_RSP` packets from
  that tile, exactly as if they came from memory. With several sources (1
  to 4, set in `P2P_REG`), consecutive loads rotate over them: source 0,
  source 1, and so on.
- **Producer (p2p store enabled).** A store from the accelerator does not
  go to memory. Its data waits in the wrapper until a `MSG_P2P_REQ` arrives
  on the request-plane input. Then it leaves as `MSG_DMA_RSP` packets on the
  response-plane output, addressed to the tile that asked.
- **Segmentation.** A request may ask for more beats than the current store
  holds. For example, a consumer loads a whole frame that a producer writes
  in two stores. The producer then answers in several packets, each no
  longer than what is left of its current store.

Transfers are always started by the receiver. A producer never pushes data
into the network on its own. A consumer asks only for what its own load
requested, and it has room for exactly that. So a p2p packet never waits in
the NoC for a tile that cannot take it, and the planes cannot block each
other.

Producer and consumer must agree on sizes: the total beats stored must equal
the total beats requested. In a pipeline of accelerators built with the same
LOAD/COMPUTE/STORE loop this holds by construction. One accelerator's output
chunk is the next one's input chunk.

A stage can fan in from several producers. It then receives its frames from
them in turn. The end-to-end test uses this to merge two producers into one
consumer.

## The accelerator tile (acc_tile)

```
 register bus -> cfg_regs -> (start, conf_size, n_chunks, P2P_REG, page table, weights)
                    |
           irq_ctrl <- done (after the last store has left the tile)
                    |
 hls_acc_top <-ap_fifo-> hls_adapter <-valid/ready-> dma_engine <-> tlb
  (LOAD/COMPUTE/STORE)   (4 shallow FIFOs)            |      |
                                              request plane  response plane
```

- **hls_acc_top.** The accelerator loops over `n_chunks`. For chunk i it:
  1. LOADs `IN_W/2` beats from index `i*IN_W/2` into the input buffer;
  2. runs the network;
  3. STOREs `OUT_W/2` beats to index `conf_size + i*OUT_W/2`.

  Words are 16-bit fixed point, two per 32-bit beat, low half first. The
  ports follow the HLS `ap_fifo` style (`*_din/_write/_full_n`,
  `*_dout/_read/_empty_n`) plus `ap_start`/`ap_done`.
- **hls_adapter.** Four depth-2 FIFOs turn the `ap_fifo` ports into the
  valid/ready channels of the DMA engine: load control, load data, store
  control, store data. It also latches the configuration at start and raises
  `ap_start` one cycle later.
- **tlb.** 16 pages of 1024 beats each. Software writes the physical page
  number of each virtual page. The DMA engine splits every burst at page
  boundaries. A burst to an unmapped page sets a sticky fault bit in STATUS.
  p2p transfers bypass the table.
- **irq_ctrl / done.** The tile counts the run as done only when the
  accelerator has finished *and* its last store beat has left the tile.
  Software that reads outputs right after the interrupt therefore does not
  race the store queue.

### Register map (word addresses on the tile's register bus)

| addr | name | contents |
|---|---|---|
| 0 | CMD | bit 0 start, bit 1 invalidate the page table |
| 1 | STATUS | `{n_done[15:0], 13'b0, tlb_fault, irq, running}` |
| 2 | IRQ_ACK | any write clears the interrupt |
| 3 | LOCATION_REG | read-only `{y[15:0], x[15:0]}` of the tile |
| 4 | P2P_REG | [0] p2p store enable, [1] p2p load enable, [3:2] sources-1, source k at [4+6k +: 6] = `{y[2:0], x[2:0]}` |
| 8 | N_CHUNKS | number of chunks (frames) per run, reset value 1 |
| 9 | CONF_SIZE | store offset in beats (`conf_size` of the loop) |
| 10 | WT_ADDR | `{layer[2:0] @22:20, address[19:0]}` for weight loading |
| 11 | WT_DATA | writes one 16-bit weight and advances the address |
| 16..31 | page table | physical page number of virtual page (addr-16) |

Weight address `j*N_IN + i` holds the weight from input i to neuron j, and
`N_IN*N_OUT + j` holds the bias of neuron j.

On the SoC top the register bus is `cfg_valid/cfg_we/cfg_tile/cfg_addr/cfg_wdata`,
with read data one cycle later on `cfg_rvalid/cfg_rdata`. Each tile's
interrupt is a separate bit of `irq`.

## The accelerators: dense layers and the reuse factor

`dense_layer` computes `act(W x + b)` for `N_IN` inputs and `N_OUT` neurons
with `N_IN*N_OUT/REUSE` multipliers. Each multiplier is used `REUSE` times, so
a layer takes exactly `REUSE` cycles per frame.

- **Arithmetic.** Weights, biases and activations are Q6.10. Sums are
  accumulated in 48 bits, shifted right by 10 with truncation, and wrapped
  to 16 bits.
- **Activation.** Hidden layers use ReLU; output layers have no activation.
- **mlp_kernel.** It chains layers. Layer l+1 starts the cycle after layer l
  finishes, so a frame takes `sum(REUSE) + NL - 1` cycles.

The default pipeline splits the classifier one layer per tile:

| tile | layer | weights + biases | reuse | multipliers | cycles / frame |
|---|---|---|---|---|---|
| C1 | 1024x256 | 262,400 | 4096 | 64 | 4096 |
| C2 | 256x128 | 32,896 | 4096 | 8 | 4096 |
| C3 | 128x64 | 8,256 | 4096 | 2 | 4096 |
| C4 | 64x32 | 2,080 | 2048 | 1 | 2048 |
| C5 | 32x10 | 330 | 320 | 1 | 320 |

Two things here are this design's own choices:

- The source gives only the network size and says the classifier was split
  over five accelerators. The split above, the reuse factors, the Q6.10
  format and the activations are chosen here.
- Weights are loaded at run time through registers, where an hls4ml design
  would build them in.

The weight memory is written as register arrays; a real chip would use SRAM.

## Memory tile

`mem_tile` takes DMA packets from the request plane.

- **Writes.** It stores the data beats at consecutive physical addresses.
- **Reads.** It issues up to four memory reads ahead of the data it has
  returned. It answers with a `MSG_DMA_RSP` packet to the requesting tile.
- **Memory port.** The port is `mem_req_valid/ready/we/addr/wdata` with
  in-order `mem_rvalid/mem_rdata`. The DRAM behind it is outside the chip;
  `tb/dram_model.sv` is a behavioural model with latency and random stalls.

## What is not built

- **Processor and auxiliary tiles.** The processor is a third-party core.
  Its role, configuring the tiles and taking interrupts, is played by the
  testbench through the register bus. These tiles' NoC local ports are
  brought out as `ext_*` ports.
- **Cache, coherence planes and IO/IRQ plane.** The accelerator's private
  cache, the three coherence planes and the IO/IRQ plane are unmodified ESP
  components that the source does not describe. Accelerators here use DMA
  only, and registers and interrupts are direct wires.
- **Night-Vision accelerator.** Only the names of its three kernels are
  known (noise filtering, histogram, histogram equalization). The SoC that
  pairs it with the classifier cannot be built.
- **Denoiser SoC.** The denoiser network (1024x256x128x1024) is available
  as `esp_pkg::DEN_*` dimensions. Any tile can be set to it through
  `TILE_DIMS`, and `tb_soc_den_cls` does so. The default floorplan does not
  include it.

## How far it can be trusted

Each block has a self-checking testbench in `tb/` with a reference model
written independently of the RTL. Each testbench was also run against a
deliberately broken copy of its block and caught the fault.

- **End-to-end test, `tb_esp_soc`.** Reduced sizes: 16-beat pages and small
  layers. It loads weights and page tables through the
  register bus and then:
  1. runs pipeline A serially through DRAM;
  2. runs pipeline B concurrently with p2p between all five stages;
  3. runs a two-producer fan-in (tiles 4 and 10 feeding tile 14).

  Every output frame is checked against a fixed-point model of the network.
  The test also counts:
  - DMA reads and writes;
  - page-split bursts;
  - p2p requests sent and served;
  - rotation between two sources;
  - interrupts.

  Each mechanism must occur at least once.
- **Full-size test, `tb_esp_soc_full`.** The top with all default parameters
  (full-size layers, 1024-beat pages), two frames per pipeline. With p2p the
  pipeline made 1034 DRAM accesses, against 1994 for the same work through
  DRAM, i.e. 52%. The source reports about the same ratio for this
  configuration. Weight loading through the register bus dominates its run
  time (about 0.6 M cycles).
- **Denoiser to classifier, `tb_soc_den_cls`.** The same top with another
  floorplan: one full-size denoiser (1024x256x128x1024) hands each cleaned
  frame by p2p to one full-size classifier. Two frames take 43,384 cycles.
  The ten scores of each frame match a fixed-point model of both networks.
- **Frame rate.** At full size a pipeline is limited by its slowest stage.
  C1 takes about 4,100 compute cycles plus its loads and stores. That gives
  roughly 16,000 frames/s per pipeline at 78 MHz, or about 32,000 frames/s
  for the two. This is an estimate, not a measurement.

## Simulating

Everything simulates with plain Verilator 5. The package must come first, and
the DRAM model is needed by the tile and SoC tests:

```
verilator --binary --timing --assert -y rtl rtl/esp_pkg.sv tb/dram_model.sv \
          tb/tb_esp_soc.sv --top-module tb_esp_soc -Mdir obj -o sim
./obj/sim
```

Every testbench ends by printing `TB_RESULT checks=<n> failures=<n>` and has a
watchdog. Block tests run in well under a second. `tb_esp_soc_full` needs
about a minute to build and a few seconds to run.

To build a different SoC, override the top's per-tile arrays:

- `TILE_TYPE`: accelerator, memory, external or empty;
- `TILE_NL`, `TILE_DIMS`, `TILE_REUSE`, `TILE_RELU`: the network of each
  accelerator tile;
- `MX`, `MY`: the grid size;
- `MEM_X`, `MEM_Y`: the memory tile position.

`tb_esp_soc` shows such an override.

## Files

| file | block |
|---|---|
| `rtl/esp_pkg.sv` | flit and header types, message codes, register map, network sizes |
| `rtl/sync_fifo.sv` | FIFO used by routers and the wrapper |
| `rtl/noc_router.sv`, `rtl/noc_mesh.sv` | one NoC plane |
| `rtl/tlb.sv`, `rtl/dma_engine.sv`, `rtl/cfg_regs.sv`, `rtl/irq_ctrl.sv` | tile wrapper services |
| `rtl/dense_layer.sv`, `rtl/mlp_kernel.sv`, `rtl/hls_acc_top.sv`, `rtl/hls_adapter.sv` | accelerator and its adapter |
| `rtl/acc_tile.sv`, `rtl/mem_tile.sv`, `rtl/esp_soc.sv` | tiles and the top |
| `tb/tb_<block>.sv` | one self-checking test per block |
| `tb/tb_esp_soc.sv`, `tb/tb_esp_soc_full.sv` | end-to-end tests, reduced and full size |
| `tb/tb_soc_den_cls.sv` | denoiser feeding the classifier, full size, other floorplan |
| `tb/dram_model.sv` | behavioural off-chip memory |
