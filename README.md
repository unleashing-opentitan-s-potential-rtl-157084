# OpenTitan as an embedded secure element: the integration RTL

OpenTitan's Earl Grey is a complete root of trust, with a RISC-V
microcontroller (Ibex), crypto engines (AES, HMAC/SHA-256, KMAC, OTBN), key
manager and lifecycle control. As shipped, though, it is a chip of its own. It
has no way to sit inside a larger SoC, take work from an application processor,
or move bulk data to its accelerators fast enough. It also expects an eFuse OTP,
embedded flash and analog sensors, which a research tape-out usually lacks.

This RTL is the layer that closes those gaps. It leaves the OpenTitan IPs
unchanged and adds blocks around the points where they connect:

* **Offload channel.** The host posts jobs through a shared mailbox laid out as
  in ARM SCMI (System Control and Management Interface). The mailbox has
  doorbell interrupts in both directions. OpenTitan reaches the mailbox, and the
  rest of the host memory map, through its own AXI4 master.
* **Fast data path to the accelerators.** The TL-UL crossbar is switched to
  pass-through FIFOs. A 32 KiB multi-bank scratchpad (the TCDM, or tightly
  coupled data memory) holds payloads. A DMA engine copies them between host
  memory and the TCDM with AXI4 bursts.
* **Silicon-ready changes.** The embedded flash is emulated with SRAM that the
  microcontroller can fill directly. A boot manager selects secure or debug boot
  from a pad and records whether the flash image is already loaded. An LFSR
  supplies entropy in place of the analog noise source.

Everything runs in two clock domains: OpenTitan's and the host SoC's. The two
are independent, and every signal that crosses between them goes through a
synchroniser or an asynchronous FIFO.

## Block map

```
                      OpenTitan clock domain                        |  host SoC clock domain
                                                                    |
 microcontroller --TL-UL--> tlul_xbar (pass-through FIFOs)          |
                              |-- 0x4300_0000  dma (frontend regs)  |
                              |      backend -- ext AXI4 -- axi_cdc ----> axi_dma_o  (SoC interconnect)
                              |      backend -- AXI4 -- axi_to_mem -+|
                              |-- 0x4400_0000  tlul_to_mem ---------+-> tcdm (8 banks x 4 KiB,
                              |                                      |         2 masters, round robin)
                              |-- 0x4310_0000  boot_manager <- bootmode pad
                              |-- 0x4320_0000  flash_dw --mux--> flash_emu_sram (2 x 8192 x 76 bit)
                              |                 regular flash datapath --^ (flash_ot_* ports)
                              |-- 0x8000_0000+ tlul2axi -- axi_cdc ----> axi_demux2 --> axi_ext_o
                              |                                     |          \--> scmi_mailbox <-- host AXI4
                              `-- others       tl_periph_* (unchanged Earl Grey peripherals)   |
 irq_mbox_ot_o (to PLIC) <-- irq_sync <---------------------------------------- doorbell  |
 irq_dma_o (to PLIC)                                                 irq_host_o <-- completion
 lfsr_rng --> rng_o (to the entropy source)
```

`ot_se_top` wires these parts together. The parts that stay OpenTitan's
appear as ports of the top:

* the microcontroller's data port (`tl_host_*`);
* the TL-UL port of the other Earl Grey peripherals, crypto engines, SRAM and
  ROM (`tl_periph_*`);
* the memory port of the regular flash controller (`flash_ot_*`);
* the two PLIC interrupt lines;
* the entropy input.

There is no slave path from the SoC into OpenTitan: the host cannot read or
write anything inside the secure element. It only reaches the mailbox,
which lives on the SoC side.

On the SoC side the top has three AXI4 ports:

* the DMA master, `axi_dma_*`;
* the bridge master for everything except the mailbox, `axi_ext_*`;
* the mailbox slave for the host, `axi_host_mbox_*`.

### Address map (microcontroller side)

| Base          | Size     | Target                                           |
|---------------|----------|--------------------------------------------------|
| `0x4300_0000` | 4 KiB    | DMA registers                                    |
| `0x4310_0000` | 4 KiB    | boot manager registers                           |
| `0x4320_0000` | 4 KiB    | flash direct-write registers                     |
| `0x4400_0000` | 32 KiB   | TCDM                                             |
| `0x8000_0000` | 2 GiB    | host SoC through the bridge; the mailbox is at `0x9000_0000` |
| anything else | -        | `tl_periph_*` (the stock Earl Grey map)          |

The bases are this design's choice. They sit in unused gaps of the Earl Grey
map and are collected in `ot_pkg`.

## The offload protocol and the SCMI mailbox

The mailbox cannot live inside OpenTitan, because the host must reach it too.
It therefore sits in the SoC domain as an AXI4 slave with two ports:

* port 0 for the host;
* port 1 for OpenTitan, arriving through its bridge.

Both ports share one register file and issue one access per cycle. When both
ports access it in the same cycle, the host goes first.

| Offset | Register        | Use                                                          |
|--------|-----------------|--------------------------------------------------------------|
| 0x00   | reserved        | reads 0                                                      |
| 0x04   | channel status  | bit 0 channel free (1 after reset), bit 1 channel error     |
| 0x08   | reserved, 8 B   | reads 0                                                      |
| 0x10   | channel flags   | bit 0 enables the completion interrupt to the host           |
| 0x14   | length          | message length in bytes                                      |
| 0x18   | message header  | command identifier                                           |
| 0x1C   | payload         | 32 words (`PayloadWords`)                                    |
| 0x100  | doorbell to OT  | bit 0 drives `irq_ot_o`                                      |
| 0x104  | doorbell to host| bit 0 drives `irq_host_o`, gated by flags bit 0              |

A job runs like this:

1. The host marks the channel busy. It writes the header, the length and a
   payload that points to the input buffer, the output buffer and the size.
   It then writes 1 to the doorbell at 0x100.
2. The doorbell level crosses into OpenTitan through a two-flop synchroniser
   and reaches the PLIC.
3. OpenTitan reads the command through the bridge and clears the doorbell by
   writing 0.
4. OpenTitan moves the input into the TCDM with the DMA, processes it, and
   moves the result back.
5. OpenTitan writes a status word, frees the channel and writes 1 to 0x104.
6. The host sees `irq_host_o` and clears the doorbell.

Both doorbells are levels. The side that receives the interrupt clears it, so
no edge can be lost across the clock crossing.

## Data path to the accelerators

### Pass-through crossbar

The stock TL-UL crossbar places a two-entry registered FIFO on the host side
and on each device side. Each FIFO costs a cycle in each direction, so a load
takes 6 cycles. `tlul_fifo` can run either FIFO in pass-through mode. When a
FIFO is empty, the beat goes straight through in the same cycle. The FIFO only
registers data while its consumer is stalled.

With `XbarPass = 1` (the default) a load to the TCDM or a register takes
2 cycles: the request cycle and the response cycle. With `XbarPass = 0` it
takes 6. These match the 2.0 and 6.0 cycles that the design targets for L1
access. The crossbar keeps responses in order in a simple way: a request to a
different device waits until every outstanding response has returned. The last
device port is the default route for unmatched addresses.

### TCDM

`tcdm` is 8 banks of 1024 × 32 bits (32 KiB). Word address bits [4:2] pick the
bank, so consecutive words go to consecutive banks. The bank interconnect is
logarithmic, with two master ports:

* master 0: the microcontroller, through `tlul_to_mem`;
* master 1: the DMA, through `axi_to_mem`.

Each bank has its own round-robin arbiter. Requests to different banks are
granted in the same cycle. When both masters hit the same bank, one waits a
cycle; `conflict_o` flags that case for observation. Read data come one cycle
after the grant. The TCDM has no scrambling.

### DMA

The DMA frontend is a TL-UL register file:

| Offset | Register | Use |
|--------|----------|-----|
| 0x0 | SRC | source address |
| 0x4 | DST | destination address |
| 0x8 | LEN | length in bytes, a multiple of 4 |
| 0xC | CTRL | write 1 to start |
| 0x10 | STATUS | bit 0 busy, bit 1 done, bit 2 error |

The done bit is also the level interrupt `irq_dma_o`. It clears at the next
start.

The backend has two 32-bit AXI4 master ports. An address inside the TCDM
window uses the TCDM port; any other address uses the external port. So a job
can move data L3→TCDM, TCDM→L3, or in either direction within one side.

The backend works through the job in INCR bursts:

* A burst has at most 16 beats and never crosses a 4 KiB boundary.
* Data pass through a 32-word FIFO.
* A read burst is issued only when the FIFO has room for all of its beats.
* Up to two read bursts may be outstanding.

In the worst case this streams about one word per cycle. The measurements are:

* **Zero-wait memories on both sides:** 4 KiB takes 1172 cycles, 0.286 cycles/B
  against the nominal 0.25.
* **Through the top** (CDC, SoC clock 1.4× slower, host memory with 20 SoC
  cycles of latency): 4 KiB takes about 3600 OpenTitan cycles, 0.88 cycles/B.
  That is below the 1.4 cycles/B that the full system, with its LLC and
  HyperRAM, was reported to reach.

The microcontroller moves data between the TCDM and the crypto engines. The DMA
does not feed the engines directly.

## Crossing into the SoC

`tlul2axi` converts one TL-UL access into one single-beat AXI4 transaction:

* Reads: AR, then R.
* Writes: AW and W together, then B.

It handles one transaction at a time. The TL-UL `size` and `mask` become
`AxSIZE` and `WSTRB`, and an error response becomes `d_error`. It adds 4 cycles
to a read before the clock crossing.

`axi_cdc` places a gray-coded asynchronous FIFO, depth 4, on each of the five
AXI channels. A round trip through it costs a few cycles of each clock. On the
SoC side, `axi_demux2` sends bridge traffic to the mailbox or to the external
port, with one read and one write in flight. It stands in for the SoC
crossbar's routing.

## Emulated flash and direct write

The flash controller stores each 32-bit word with 6 ECC/integrity bits. It
packs two such 38-bit words into one 76-bit line. `flash_emu_sram` provides
that memory from SRAM: 2 banks × 8192 lines of 76 bits, with 64 KiB of data per
bank. Requests are always granted and read data come one cycle later. The
content is lost at power-off, so an image has to be written in before every
boot.

The regular controller cannot write arbitrary lines, so `flash_dw` adds a
second datapath with a multiplexer in front of the SRAM.

| Offset | Register | Use |
|--------|----------|-----|
| 0x00 | ENABLE | mux select: 1 = direct write, 0 = regular datapath |
| 0x04 | PAYLOAD1 | line bits [31:0] |
| 0x08 | PAYLOAD2 | line bits [63:32] |
| 0x0C | PAYLOAD3 | bits [11:0] give line bits [75:64]; bits [31:12] are ignored |
| 0x10 | ADDRESS | line index |
| 0x14 | TRIGGER | write 1 to start; reads as busy |

The size adapter forms `{PAYLOAD3[11:0], PAYLOAD2, PAYLOAD1}`. After the
trigger, the FSM issues exactly one 76-bit write and returns to idle once the
SRAM grants it, two cycles after the trigger. While ENABLE is 1 the regular
datapath gets no grant.

To load an image, software does the following:

1. Set ENABLE to 1.
2. For each line, write the three payload registers, the address and the
   trigger.
3. Clear ENABLE when done.

## Boot manager

`boot_manager` synchronises the `bootmode` pad. It captures the pad once,
`SettleCycles` cycles after reset, and then holds the value, so later changes
on the pad have no effect. It has two registers:

| Offset | Register | Use |
|--------|----------|-----|
| 0x0 | BOOT_MODE | 0 secure boot (fetch the image over SPI), 1 debug boot (image preloaded over JTAG); read-only |
| 0x4 | FLASH_PRELOADED | read/write flag |

Boot software sets FLASH_PRELOADED after it has copied an image into the
emulated flash. This allows a hybrid mode: secure boot from an image that was
preloaded through JTAG. The boot ROM reads both registers first.

## Entropy stand-in

`lfsr_rng` is a 32-bit Galois LFSR with polynomial `0x80200003` (x^32 + x^22 +
x^2 + x + 1, maximal length) and seed `0xACE12468`. It gives 4 fresh bits per
cycle. It keeps the entropy-source IP running on a chip without an analog noise
source. It has no cryptographic strength, which is the price of going without
that analog part.

## Timing at a glance

| Path                                              | Cycles                         |
|---------------------------------------------------|--------------------------------|
| microcontroller load from TCDM or a register      | 2 (6 with registered FIFOs)    |
| TCDM bank access                                  | read data 1 cycle after grant  |
| DMA, zero-wait memories                           | 0.286 cycles/B                 |
| DMA from host memory (20-cycle latency, via CDC)  | about 0.88 cycles/B            |
| bridge, read before the CDC                       | 4                              |
| microcontroller load from host memory (20-cycle memory, both crossings) | 39 |
| flash direct write, trigger to SRAM write         | 2                              |
| doorbell into OpenTitan                           | 2 OpenTitan cycles after the SoC register |

## What follows the source design and what does not

Taken from the source design:

* the crossbar's pass-through FIFOs;
* a TCDM of 8 banks with two masters;
* a DMA with a register frontend and two AXI4 masters;
* the TL-UL-to-AXI4 bridge with CDCs;
* the SCMI register layout with two doorbell registers and two interrupt
  lines;
* the 76-bit flash line and the register set and mux of the direct-write path;
* 64 KiB flash data banks;
* a boot manager with a mode register and a software-writable preload
  register;
* an LFSR entropy source.

This design's own choices:

* all register offsets other than the SCMI layout;
* the address map;
* the memory-port handshake (req/gnt, data one cycle later);
* the LFSR polynomial and seed;
* the mailbox payload size (32 words) and doorbell offsets;
* the burst rules, FIFO depth and outstanding limit of the DMA;
* single-beat bridge transactions;
* CDC FIFO depths;
* the settle delay of the boot manager.

Two further points:

* **TCDM size.** The description is inconsistent: one sentence gives 2 KB,
  while the bank count (8 × 4 KB) and a later sentence give 32 KB. This design
  uses 32 KiB. A figure draws four banks; eight are built.
* **SoC interconnect.** The host SoC's AXI interconnect is not part of this
  design. On the bridge path a two-way demultiplexer takes its place. The DMA
  port leaves the top as it is.

Not contained here, because these are OpenTitan or host-SoC IPs that this
layer only connects to:

* Ibex, the crypto engines and the PLIC;
* the entropy source, CSRNG and key manager;
* the regular flash controller;
* the mask-ROM that replaces OTP;
* the remaining Earl Grey peripherals;
* the host SoC itself.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Stimulus is random
(`$urandom`), and expected values come from models in the testbench:

| Testbench | What it checks |
|-----------|----------------|
| `tb_tlul_fifo` | ordering and no loss under random back-pressure, both modes |
| `tb_tlul_xbar` | routing, default route, latency 2 vs 6 |
| `tb_tlul_to_mem` | byte masks, opcodes, 2-cycle load, a stalled `d_ready` |
| `tb_tcdm` | a reference memory under random two-master traffic; conflicts and round-robin fairness |
| `tb_axi_to_mem` | INCR bursts with random strobes and back-pressure; one beat per cycle once streaming |
| `tb_dma` | data integrity in both directions; no burst over 16 beats or across 4 KiB; STATUS; throughput at most 0.3 cycles/B |
| `tb_tlul2axi` | full and partial writes, reads, single-beat transactions, strobes, read latency 4 |
| `tb_axi_cdc` | traffic between unrelated clocks |
| `tb_irq_sync` | output follows the input exactly two cycles later |
| `tb_lfsr_rng` | step-by-step against the feedback equations; the period (255) of an 8-bit instance |
| `tb_boot_manager` | capture once; read-only mode; preload flag |
| `tb_flash_dw` | line assembly; one write per trigger; mux ownership |
| `tb_flash_emu_sram` | both banks |
| `tb_scmi_mailbox` | register map; doorbells and flag gating; simultaneous access from both ports |

`tb_ot_se_top` runs the whole offload at default sizes, with both clocks
running:

* a host job through the mailbox;
* the doorbell;
* the command read through the bridge;
* 4 KiB moved L3→TCDM by DMA;
* processing in the TCDM;
* DMA back to L3 while the microcontroller keeps loading from the TCDM, which
  forces bank conflicts;
* completion to the host.

It also does flash direct writes with read-back through the regular datapath,
LFSR output checks, and accesses to the peripheral and external windows. It
counts how often each of these mechanisms occurred, and any that never did
counts as a failure.

`tb_ot_se_workloads` runs the data movement of the evaluated crypto jobs
(payloads of 64, 256, 1024 and 4096 bytes) through the full-size top. The
payload is placed either in the TCDM or in host memory, and the engines'
work is replaced by a fixed transform. Measured with a host memory of 20 SoC
cycles:

| Payload | DMA host→TCDM          | TCDM load            |
|---------|------------------------|----------------------|
| 64 B    | 85 cycles (1.33 c/B)   | 2 cycles per word    |
| 256 B   | 253 cycles (0.99 c/B)  | 2 cycles per word    |
| 1 KiB   | 925 cycles (0.90 c/B)  | 2 cycles per word    |
| 4 KiB   | 3612 cycles (0.88 c/B) | 2 cycles per word    |

Loads from the TCDM supply 0.5 cycles/B. That is faster than the HMAC engine
consumes data (1.25 c/B) and than AES (4.5 c/B). For small payloads the
fixed cost of programming the DMA dominates. The largest payload, together
with its result, fills a quarter of the TCDM.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_ot_se_top \
  -Irtl -Itb -y rtl -y tb +libext+.sv rtl/ot_pkg.sv tb/tb_ot_se_top.sv -o sim
./obj_dir/sim
```

Replace the two `tb_ot_se_top` names to run another testbench. The full-size
top simulates in about ten seconds.
