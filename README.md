# A tile-based heterogeneous SoC with a multi-plane mesh NoC

This RTL builds a heterogeneous system-on-chip as a grid of tiles. Each tile is
one of four kinds: processor, accelerator, memory or auxiliary. The tiles talk
only by packets on a network-on-chip (NoC). The NoC is a 2D mesh, copied six
times as independent physical planes, so each message class has its own plane.
Each tile has a *socket*. The socket turns the tile's local activity (a
processor's register access, an accelerator's DMA, a memory read) into packets
and back. Because of this, a tile's contents can be swapped without touching
the rest of the chip.

The default instance is a 3x3 grid (tile number t = y*3 + x):

```
          x=0    x=1    x=2
   y=0    MEM    CPU    CPU
   y=1    ACC    ACC    ACC
   y=2    AUX    ACC    MEM
```

That gives two processor tiles, four accelerator tiles, two memory tiles and
one auxiliary tile. Processors configure accelerators through memory-mapped
registers. Accelerators fetch their input from memory and write their output
back by DMA. An accelerator can also take its input straight from another
accelerator (point-to-point, "P2P"). Each accelerator interrupts when it is done.

The processor cores, the DRAM and the interrupt controller are not part of
this RTL. They appear as ports on the top module, `esp_soc`.

## The network-on-chip

### Planes

| plane | carries in this design |
|-------|------------------------|
| 1-3   | coherence request/forward/response. The planes exist, but no tile here uses them. |
| 4     | data towards a device: DMA read data, and P2P data from a producer accelerator |
| 5     | register reads/writes, their responses, and interrupts |
| 6     | requests from a device: DMA read and write requests, and P2P requests |

Different message classes travel on separate planes. A response therefore can
never be stuck behind the request that waits for it, which rules out protocol
deadlock without virtual channels.

### Flits and packets

A flit is 34 bits: `{head, tail, data[31:0]}`. A packet is one head flit and
zero or more body flits. The last flit has `tail` set, and a one-flit packet
has both bits set. The header's 32 bits are, from MSB down:

```
 src_y[3] src_x[3] dst_y[3] dst_x[3] msg[5] reserved[15]
```

The message codes are defined in `esp_pkg` (`msg_t`):

| message | flits | plane |
|---------|-------|-------|
| DMA_RD_REQ | head, word address, length | 6 |
| DMA_WR_REQ | head, address, length, `length` data words | 6 |
| DMA_RD_RSP | head, data... | 4 |
| P2P_REQ | head, length | 6 |
| REG_WR | head, register, data | 5 |
| REG_RD | head, register | 5 |
| REG_RSP | head, data | 5 |
| IRQ | head only | 5 |

### Router (`noc_router`)

Each router has five ports: N, S, W, E and the local tile. Each input has a
4-flit queue. Switching is wormhole: a head flit claims an output, and the
output stays with that input until the tail flit has gone. Competing head
flits are served round robin. Links use valid/ready.

Routing is X-then-Y, computed one hop ahead. A flit arrives with a one-hot
vector that names the output it must take *here*. This vector was computed by
the previous router. While a head flit competes for its output, the router
also works out which port the packet will need at the *next* router, and sends
that along on `out_route`. Route computation therefore never sits in series
with arbitration, and one hop costs one clock cycle. The multiplane testbench
measures this: on an idle plane, ejection time grows by exactly one cycle per
extra hop. Counting the injection and ejection queues, a neighbour is 2 cycles
away.

Two details are easy to get wrong:

- The local input has no upstream router. Its route is computed from the
  header when a flit enters. Body flits carry no header, so the route stored
  with them is meaningless. Once an output is locked, the router forwards the
  owner's body flits without looking at their route.
- The look-ahead route of a body flit is the one stored when its head passed
  (`held_route`). It is not recomputed.

`noc_mesh` wires ROWS x COLS routers together and ties off the edge ports.
`noc_multiplane` stacks six meshes. Every tile has one injection port and one
ejection port per plane.

### Sockets: queues and the mux

Every proxy in a tile has its own queue (`noc_queue`) between it and the
router's local port. In the accelerator tile, two proxies send on plane 6:
DMA loads and DMA stores. `noc_pkt_mux` merges them and never interleaves two
packets. On the receive side no steering logic is needed, because each plane a
tile listens to feeds exactly one proxy. Each socket asserts that nothing
arrives on a plane it does not use.

## Tiles

**Processor tile (`cpu_tile`, `mmio_proxy`).** The core's I/O bus appears as a
simple request port: `cpu_req_valid/ready`, `cpu_we`, `cpu_addr`, `cpu_wdata`,
then `cpu_rsp_valid` and `cpu_rdata`. Address bits [11:8] pick the target
tile t, and bits [7:2] pick the register. Writes are posted: the response
pulses once the packet has been sent. A read waits for the REG_RSP packet.
Only one access is outstanding at a time.

**Accelerator tile (`acc_tile`).** It holds three parts:
- the accelerator (`esp_acc`);
- its DMA controller (`esp_dmac`);
- the register/interrupt proxy (`acc_regs`).

**Memory tile (`mem_tile`, `mem_dma_proxy`).** It runs DMA packets against a
DRAM port: `mem_req_valid/ready`, `mem_we`, `mem_addr`, `mem_wdata`, and read
data on `mem_rvalid`/`mem_rdata`, which must come back in order. Reads are
pipelined. A credit counter lets reads run ahead only as far as the response
queue has room for, so DRAM latency is hidden and no data is ever dropped.

**Auxiliary tile (`aux_tile`, `irq_rcv`).** It turns each IRQ packet into a
pending line, `irq[t]`, for the source tile t. The line stays set until
`irq_ack[t]`. If an interrupt and its acknowledge arrive in the same cycle,
the line stays set.

## The accelerator and its DMA

### Accelerator (`esp_acc`)

The interface is the standard one for loosely-coupled accelerators:
- `conf_info` (here `conf_valid` + `conf`) starts a run;
- `load_ctrl`/`load_chnl` request and receive input words;
- `store_ctrl`/`store_chnl` request and send output words;
- `acc_done` pulses at the end.

The private local memory is ping-pong: two input banks and two output banks
(`plm_bank`, 64 words each). The run is split into `nchunk` chunks of `len`
words. Three processes run concurrently:

- **load** fills the free input bank with chunk k+1;
- **compute** turns the full input bank of chunk k into the output bank;
- **store** drains the full output bank of chunk k-1.

Each bank has a full flag, and these flags are the only coupling between the
processes. Loading the next chunk therefore overlaps computing the current
one, and loads overlap stores. The kernel is `out[i] = in[i] + addend`. It is
a placeholder where a real accelerator's computation goes. The output of chunk
k goes to word `out_offset + k*len` of the buffer.

### DMA controller (`esp_dmac`) and memory partitioning

The accelerator sends `{index, length}` control words. The DMAC adds the
tile's BASE register to `index`, giving a physical word address, and builds
one packet per control word. The two memory tiles split the address space
into slices of 2^PART_BITS words (2^20 by default). Slice
`addr >> PART_BITS` belongs to memory tile `slice % NUM_MEM`. A burst must stay
inside one slice, and an assertion checks this. Load data streams from plane 4
to `load_chnl`, and store data streams from `store_chnl` into the write
packet, one word per cycle each way. Writes are posted.

### Point-to-point transfers

The P2P register of a tile can redirect its loads, its stores, or both:
- **P2P load** (consumer): a load sends `P2P_REQ{length}` to the producer
  tile named in the register, instead of a read to memory.
- **P2P store** (producer): a store does not go to memory. The DMAC waits for a
  consumer's P2P_REQ, then answers it with the store data as one DMA_RD_RSP
  packet to that consumer.

The consumer cannot tell a P2P answer from a memory answer. A consumer load
has the same length as the producer's store, so one producer store feeds one
consumer load, and chunks pass in order. The producer's output never touches
memory. Both ends must be configured with the same chunk length, and the
producer must be started before or with the consumer. The hardware checks
neither.

## Register map (per accelerator tile)

The register address is `0x000 + t*0x100 + 4*index`, on the processor's
I/O port.

| index | name | meaning |
|-------|------|---------|
| 0 | CMD | write 1: start. Ignored while running. |
| 1 | STATUS | [0] running, [1] done. Any write clears done. |
| 2 | BASE | physical word address of the tile's buffer |
| 3 | P2P | [0] store by P2P, [1] load by P2P, [4:2] producer x, [7:5] producer y |
| 16 | LEN | words per chunk (at most 64) |
| 17 | NCHUNK | chunks per run |
| 18 | ADDEND | kernel operand |
| 19 | OUT_OFFSET | output offset in words from BASE |

A run proceeds as follows:
1. Write the configuration registers.
2. Write CMD = 1.
3. Wait for the interrupt line of the tile.
4. Read STATUS.
5. Acknowledge the interrupt.

## Where this departs from the original architecture

- **No cache hierarchy.**
  - The architecture this follows has private L2 caches with a MESI
    directory protocol in the processor tiles.
  - It also has last-level-cache partitions with directories in the memory
    tiles, and coherent and LLC-coherent DMA.
  - None of this is built. Only the non-coherent DMA path exists, and planes
    1-3 carry nothing.
- **No TLB.** Accelerators address memory through a physical BASE register,
  not through page tables.
- **No processor core, no DRAM controller, no peripherals, no DVFS.**
  - The cores (RISC-V or SPARC in the original) are not built. Their I/O bus is
    reduced to the plain request port described above, with no APB adapter.
  - Ethernet, UART, boot ROM, frame buffer, JTAG, the interrupt controller,
    per-tile clock generation and performance counters are outside the design.
- **Invented details.** The paper does not give the following, so everything
  in this list is this design's choice:
  - the flit width;
  - the packet layouts and message codes;
  - the register map;
  - the P2P planes (request on 6, data on 4);
  - the slice-interleaved partitioning;
  - X-before-Y routing order, the queue depths, round-robin arbitration;
  - the accelerator's kernel.
- **Not checked in hardware.** Unknown message types, bursts that cross a slice,
  and misconfigured P2P pairs are caught only by assertions in simulation.

## Verification

Each module has a self-checking testbench in `tb/`. Each one ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it establishes |
|-----------|---------------------|
| `tb_noc_queue` | order, full/empty flags, under random push/pop |
| `tb_noc_router` | one-cycle hop, X-Y port choice, look-ahead route, no interleaving, per-flow order, contention |
| `tb_noc_multiplane` | all 9 tiles x 6 planes sending at once: delivery, order, plane separation, one cycle per hop |
| `tb_noc_mux_demux` | whole packets, per-source order, arbitration between sources |
| `tb_plm_bank` | one-cycle read, read-before-write |
| `tb_esp_acc` | results, control words, load/store overlap, ping-pong speed-up, with and without back-pressure |
| `tb_esp_dmac` | owning memory tile, address/length, data in order, P2P request and P2P answer |
| `tb_acc_regs` | register writes and reads, start ignored while busy, done bit, exactly one interrupt |
| `tb_mem_dma_proxy` | writes land, reads return DRAM contents, reads pipelined under DRAM stalls |
| `tb_mmio_proxy` | address decoding into packets, posted writes, read data |
| `tb_irq_rcv` | set, acknowledge, and set-with-acknowledge in the same cycle |
| `tb_esp_soc` | the whole SoC at its default parameters |

`tb_esp_soc` surrounds the SoC with processor, DRAM and interrupt-controller
models, and runs three scenarios:
1. one accelerator through memory;
2. two accelerators at once, with buffers in the two memory tiles;
3. a producer/consumer pair over P2P.

Every output word is compared with a value computed in the testbench. The
testbench also counts the mechanisms the design relies on, and fails if any
never happened:
- DRAM stalls;
- NoC back-pressure;
- load/store overlap;
- P2P requests;
- interrupts;
- register reads.

To simulate with plain Verilator (5.x), from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/esp_pkg.sv tb/tb_esp_soc.sv \
          --top-module tb_esp_soc -o sim && ./obj_dir/sim
```

To run another testbench, substitute its name. All testbenches are 2-state
and use `$urandom`.

## Changing the design

- **Grid size and tile placement.** `esp_soc` takes `ROWS`, `COLS` and
  `TILE_MAP`, a packed array of `tile_t` per tile. Memory tiles are found and
  numbered automatically. Interrupts go to the last auxiliary tile. Tile
  coordinates are 3 bits, so the grid can grow to 8x8. The processor address
  map uses 4 bits of tile number, so it covers up to 16 tiles.
- **Memory slicing.** `PART_BITS` sets the slice size; `QDEPTH` sets every
  socket queue.
- **PLM size.** `PLM_WORDS` sets the size of each bank. LEN must not exceed it.
- **A different accelerator.** Replace the `out_wdata` expression in `esp_acc`
  with the new kernel, or replace `esp_acc` itself and keep its
  load/store/conf/done ports. The socket does not depend on what the
  accelerator computes.
