# Shaheen-style secure heterogeneous SoC: synthesizable memory system and mixed-precision datapath

A nano-drone needs two kinds of processor. It needs an application-class host that can run an
operating system, with its isolation features. It also needs a parallel number-crunching cluster
that runs quantised neural networks within a power budget of a few hundred milliwatts. This design
shows how such a SoC ties the two together:

- **Memory.** The host has 1 MiB of on-chip L2 scratchpad and reaches off-chip HyperRAM through a
  small, fully digital controller. There is no LPDDR PHY. The HyperRAM is spread over two
  HyperBUS interfaces with two chip selects each.
- **Cluster.** It has eight cores, a 256 KiB banked L1 scratchpad, a DMA and a crossbar. Each core
  has a *mixed-precision* dot-product unit that multiplies 8-, 4- or 2-bit activations by
  narrower weights without any software unpacking.
- **Protection.** Every cluster access to host memory passes through an **IOTLB**. The host fills
  its 32 range entries. The IOTLB translates allowed accesses and answers refused ones itself, so
  the bus never hangs. A refused access also raises an interrupt to the host.

This RTL covers the memory system, the interconnect, the IOTLB, the HyperRAM controller, the
cluster DMA and the dot-product unit with its format controller. The processor pipelines are not
included: the host CPU, the cluster cores' pipelines, FPUs and instruction caches. Nor are the
peripheral subsystem, clock generation and pads. Each missing part's bus port is a port of the
top-level module, `shaheen_top`.

## Top-level structure

```
 host_req_i ──► ┌──────────────┐ s0 ─► l2_spm (4 × 256 KiB banks) ◄── udma_req_i
                │ host mem_xbar│ s1 ─► hyperram_ctrl (memory window) ─► 2 × HyperBUS, 2 CS each
 cluster ─► iotlb ─►  (2 × 4)  │ s2 ─► iotlb configuration registers
                └──────────────┘ s3 ─► hyperram_ctrl configuration registers
 pulp_cluster:
   core ports ×8 ─┐
   cluster_dma ×4 ┴► tcdm_interconnect (16 × 16 KiB banks, 12 masters)
   cluster_dma host port ┐
   core_ext_req_i        ┴► cluster mem_xbar (2 × 1) ─► iotlb ─► host mem_xbar
   per core: flexv_mpc_ctrl ─► flexv_dotp_unit
```

Address map (set in `shaheen_pkg`):

| Region                        | Base          | Size    |
|-------------------------------|---------------|---------|
| L2 scratchpad                 | `0x1C00_0000` | 1 MiB   |
| IOTLB registers               | `0x1A10_0000` | 4 KiB   |
| HyperRAM controller registers | `0x1A10_1000` | 4 KiB   |
| HyperRAM                      | `0x8000_0000` | 512 MiB |
| L1, cluster-local (core ports)| offset 0      | 256 KiB |

Anything else gets an error response from the crossbar.

Everything runs on one clock. The chip has four clock domains with clock-domain crossings between
them; here those crossings are plain wires.

## The bus

One request/response protocol is used everywhere on the 64-bit side (`hreq_t` / `hrsp_t` in
`shaheen_pkg.sv`). The chip itself uses AXI4; this single-channel form is a simplification.

- The master raises `req` with `we`, `be`, `addr` and `wdata`. It holds them until `gnt` is high
  in the same cycle.
- One or more cycles later, the slave returns `rvalid`, with `rdata` on reads and `err` on
  errors.
- A master has at most one transaction outstanding. A waiting master must not change its request
  (an assertion checks this).

`mem_xbar` is the crossbar:

- Each slave port has a round-robin arbiter.
- Once granted, a slave port is locked to its master until the response comes back. Responses
  therefore need no ID.
- A master that won arbitration but is not yet granted keeps the port, so the request that the
  slave sees never changes while it waits.
- Accesses outside the memory map are granted at once and answered with `err` in the next cycle.

The 32-bit cluster side uses the TCDM form:

- `req/we/be/addr/wdata` in;
- `gnt` combinational in the same cycle;
- `rvalid/rdata` exactly one cycle after the grant.

## Banked scratchpads (`tcdm_interconnect`, `l2_spm`, `sram_bank`)

Both scratchpads interleave consecutive words over their banks:

- **L1:** 32-bit words over 16 banks.
- **L2:** 64-bit words over 4 banks.

Each bank has its own round-robin arbiter. Masters that address different banks are all served in
the same cycle. When several masters address the same bank, one is granted and the others retry in
the next cycle; `conflict_o` reports this.

A read returns one cycle after its grant. This is the "single-cycle latency logarithmic
interconnect" of the cluster. The L2 uses the same block, with host-bus ports adapted in `l2_spm`.

Implementation notes:

- The interconnect is written as one arbiter and mux per bank, not as a multi-stage butterfly.
  The function and latency are the same.
- `sram_bank` is a plain array with byte enables and a one-cycle read. In silicon it would be an
  SRAM macro.

Capacities follow the text: 4 × 256 KiB of L2 and 16 × 16 KiB = 256 KiB of L1. The block diagram
of the original chip prints "128 KB" for the L1; the textual figure of 256 KiB is used.

## IOTLB (`iotlb`)

The cores have no MMU, but they must share pointers with the host and must not reach memory that
the host has not given them. Each of the 32 entries holds four fields:

- the first and last virtual address (inclusive);
- a physical base;
- flags V (the cluster may use the entry), R and W.

A cluster request that lies in a valid entry with the right permission is passed on in the same
cycle with `phys = addr − first + base`. When entries overlap, the lowest index wins.

Any other request is answered by the IOTLB itself, one cycle after it grants it:

- a refused write is acknowledged and dropped;
- a refused read returns the design-time constant `DENY_RDATA` (`0xDEAD_BEEF_DEAD_BEEF`).

In both cases `irq_o` rises and stays high until the host writes the status register.

Registers are 64 bits each, on the IOTLB's configuration port:

| Offset          | Content                                                  |
|-----------------|----------------------------------------------------------|
| `32·i + 0`      | first                                                    |
| `32·i + 8`      | last                                                     |
| `32·i + 16`     | base                                                     |
| `32·i + 24`     | flags `{W,R,V}` in bits `[2:0]`                          |
| `0x400`         | status: `[0]` irq pending, `[63:32]` last refused address; any write clears it |

## HyperRAM controller (`hyperram_ctrl` = `hyper_frontend` + `hyperbus_phy`)

HyperBUS is a DDR bus with 11+n pins. Each access starts with a 48-bit command-address word. After
a latency, 16-bit words follow, two bytes per clock. The controller drives two buses in lockstep:

- bus 0 carries the low 16 bits of every 32-bit word;
- bus 1 carries the high 16 bits.

Bandwidth and capacity therefore double. Each bus has two chip selects. Every device is seen as `N`
rows of 16 bits, and `N` is a runtime register.

**Front-end (`hyper_frontend`).** It takes one access at a time, as the chip's front-end does.
For an offset into the HyperRAM window:

- chip select = `offset ≥ 4·N`;
- row = `(offset − cs·4·N) / 4`;
- a 64-bit access is two rows (two 32-bit words).

Offsets beyond the two chip selects get `err`. Writes pass the byte enables to the PHY as RWDS
masks.

**Back-end (`hyperbus_phy`).** It is a four-state machine:

- **CA:** 3 clocks of command-address.
- **LAT:** `t_lat` clocks of latency.
- **DATA:** for writes, it drives DQ and RWDS masks. For reads, it captures a word only in a
  cycle where *both* buses strobe RWDS, so two devices with different access times still give
  aligned words.
- **CSH:** one clock of chip-select hold.

The command-address word follows the public HyperBUS layout:

- bit 47 = read;
- bit 45 = linear burst;
- row address in bits 44:16 and 2:0.

**Configuration registers (`hyperram_ctrl`).**

| Offset | Register | Reset value |
|--------|----------|-------------|
| `0x0`  | `n_rows` | 4194304 (8 MiB devices) |
| `0x8`  | `t_lat`  | 6 clocks |

The uDMA channel inside the chip's front-end is not included. Nor is the front-end/back-end
clock-domain crossing.

Timing seen from the bus: a 64-bit read takes 3 + `t_lat` + 2 + 1 clocks at the pins, plus
two cycles of handshake. The testbenches check these counts.

## Mixed-precision dot product (`flexv_dotp_unit`, `flexv_mpc_ctrl`)

The instruction does not encode the operand widths. A per-core `SIMD_FMT` CSR holds the formats of
A and B: 16, 8, 4 or 2 bits. Take `wa > wb`, for example 8-bit activations and 4-bit weights. One
32-bit B register then holds `wa/wb` times more elements than one instruction can consume.

The mixed-precision controller (`flexv_mpc_ctrl`) counts issued dot products modulo `wa/wb`. It
outputs the count as `MPC_CNT` and pulses `slice_wrap_o` on the last slice. Software then loads the
next B word at that point.

The dot-product unit works in two steps:

1. Its *slicer* takes the `32·wb/wa`-bit slice of B selected by `MPC_CNT`. Its *router* widens
   each element, with or without sign extension, to `wa` bits in the lanes of the `wa`-bit
   datapath.
2. One of the DOTP-16/8/4/2 units multiplies the lanes with A and adds the accumulator C. The
   output mux picks that unit's result.

Operands are registered on entry, and the result is valid one cycle later.

A write of the CSR restarts the count. Formats with `wb > wa` are not supported.

## Cluster DMA (`cluster_dma`)

The DMA has one 64-bit host-side port and four 32-bit L1 ports. Each 64-bit beat is split into
two L1 words: even beats use ports 0 and 1, odd beats use ports 2 and 3. Beats are moved one at a
time.

Its registers are 32 bits each:

| Offset | Register | Content |
|--------|----------|---------|
| `0x00` | `EXT`    | host address, virtual: it goes through the IOTLB |
| `0x04` | `L1`     | L1 address |
| `0x08` | `LEN`    | length in bytes |
| `0x0C` | `CMD`    | writing starts a transfer; bit 0 = 1 for L1 → host |
| `0x10` | `STAT`   | `[0]` busy, `[31:16]` completed transfers |

`done_o` pulses for one cycle at the end of a transfer. Addresses and lengths are multiples of 8
bytes. Only 1D transfers are supported.

## Simulating

Every testbench is self-checking and prints one `TB_RESULT checks=N failures=M` line. For
example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/shaheen_pkg.sv tb/tb_shaheen_top.sv --top-module tb_shaheen_top -Mdir obj -o sim
./obj/sim
```

Replace `shaheen_top` with any block name to run that block's testbench:

| Testbench              | What it checks |
|------------------------|----------------|
| `tb_shaheen_top`       | The whole SoC at its default parameters. Details below. |
| `tb_tcdm_interconnect` | Random traffic against a shadow memory, with round-robin fairness and latency. |
| `tb_l2_spm`            | Two masters with random byte-enabled traffic, and bank conflicts. |
| `tb_sram_bank`         | Byte enables and one-cycle read latency. |
| `tb_mem_xbar`          | Routing, locking, decode errors and stalls, with random-wait slaves. |
| `tb_iotlb`             | Translation, permissions, priority, refusal responses and the interrupt. |
| `tb_hyperram_ctrl`, `tb_hyper_frontend`, `tb_hyperbus_phy` | Command-address bits, latency, chip-select selection, byte masks and cycle counts, against HyperRAM device models. |
| `tb_cluster_dma`       | Both directions, register interface, port use and minimum cycle counts. |
| `tb_flexv_dotp_unit`, `tb_flexv_mpc_ctrl` | All format pairs and signedness against a reference model; the MPC_CNT sequence. |

`tb_shaheen_top` runs one complete secure offload on the whole SoC at its default parameters (full
1 MiB L2, 256 KiB L1, 32 IOTLB entries) against four HyperRAM models:

1. The host fills L2 and both HyperRAM chip selects and reads them back.
2. The host programs an IOTLB window onto L2 (read/write) and one onto HyperRAM (read-only).
3. The DMA pulls data into L1 while the host and the cores compete for the crossbar.
4. The eight cores read L1 with bank conflicts and run 8×4 and 8×2-bit dot products.
5. The results go back to L2 by DMA.
6. A DMA write into the read-only window is refused; the test checks the interrupt and status,
   and that HyperRAM was not written.
7. The uDMA port competes with the host in L2, and an unmapped access gets an error.

The testbench counts every mechanism and fails if one never occurs: L1 and L2 bank conflicts,
host and cluster crossbar stalls, IOTLB hits and refusals, the interrupt, chip select 1, HyperRAM
read latency, slice wraps, DMA in both directions, and decode errors. It finishes in well under a
second of simulation time.

The HyperRAM device model (`tb/hyperram_model.sv`) is behavioural and used only by testbenches. It
models a fixed latency, with optional extra read wait cycles signalled through RWDS.

## What is not included, and trust

Not included:

- the host core with its hypervisor extension and `fence.t`;
- the cluster cores' pipelines, NN register file, FPUs and instruction caches;
- the event unit, mailbox, interrupt controllers and peripheral crossbar;
- the uDMA peripherals and the HyperRAM uDMA channel;
- Ethernet, the clock-domain crossings, FLLs and pads.

Where those blocks would connect, `shaheen_top` has plain ports: host bus, uDMA L2 port, core
data ports, core dot-product operands and DMA registers.

Register maps, arbitration policies, reset values, the HyperBUS command layout and the bus
protocol are this design's own choices; the header comment of each file says which parts follow
the original chip and which do not. The RTL passes lint under two front ends. Each block has
randomised self-checking tests, and for each block a deliberately broken copy was shown to fail
its test. No timing, area or power figures come with it, and it has not been checked against
real HyperRAM parts.
