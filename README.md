# A real-time RISC-V microcontroller for mixed-criticality automotive ECUs

An electronic control unit that consolidates several vehicle functions runs two
very different kinds of software side by side. Comfort and high-level functions
run under Linux on a multi-core application processor. Safety-critical functions
run under a small AUTOSAR Classic RTOS on a separate microcontroller, where what
matters is how fast and how predictably the hardware gets to an interrupt
handler. This RTL is that microcontroller: a real-time RISC-V MCU that sits next to
the application processor, shares memory with it over AXI4, and has an interrupt
system built for low latency rather than the plain RISC-V one.

The starting point is the standard RISC-V interrupt architecture of a 64-bit
application core (CVA6). It has a CLINT (timer and software interrupt) and a
PLIC (shared external interrupts) driving three level-sensitive pins. That
system has no interrupt levels, no pre-emption of one handler by a more urgent
one, no vectoring and no hardware help for back-to-back interrupts, and it loses
against commercial real-time cores on interrupt entry time. The design here puts
a RISC-V CLIC (core-local interrupt controller) between all interrupt sources
and the core. It also changes the core's interrupt interface, turning the
level-sensitive pins into a request/acknowledge handshake that carries an
interrupt id and level.

The RTL follows the architecture of "Towards a RISC-V Open Platform for
Next-generation Automotive ECUs" (Cuomo et al.). That paper fixes the block
structure, the 256 CLIC lines, the 128 KiB scratchpad and the interrupt routing.
It gives little else: widths, register maps, protocols and timing are choices
made here, and each file's opening comment says which is which. The CVA6 core
itself, its caches and MMU, the SPI/I2C/UART peripherals and the Arm host are not
part of this RTL. Their connections are ports of the top module.

## Block structure

```
        host (multi-core, Linux)                    I/O peripherals
          | AXI4, virtual addresses                    ^ periph_req_o
          v                                            |
       +-------+   IOTLB                               |
       | iommu |----------+                            |
       +-------+          | master 2                   |
 core_req_i (CVA6) --> +--------------------------------------+ --> host_mem_req_o
       master 0        |            axi_xbar (AXI4)            |     (shared memory)
 dma ----------------> +--------------------------------------+
       master 1          |      |       |       |       |      |
                        spm   CLINT   PLIC    CLIC     DMA   IOMMU   (register blocks
                      128KiB    |       |      |  ^    regs   regs    behind axi_to_reg)
                                |mtip   |meip  |  |
                                |msip   |seip  |  | local_irq_i[16..255]
                                +-------+----->+  |
                                               | valid/ready, id, level, shv
                                               v
                                      cva6_clic_irq_ctrl --> trap_o, trap_pc_o (to the core)
```

| Module | Role |
|---|---|
| `rt_mcu_top` | Wires everything together; its ports are the core, host, peripheral and interrupt connections |
| `clic` | 256-line interrupt controller: per-line level/priority, enable, pending, trigger, vectoring; arbitration; handshake to the core |
| `cva6_clic_irq_ctrl` | Core side of the handshake: interrupt CSRs, take decision, vector-table address, `mnxti` |
| `plic` | Prioritises shared external interrupts into `meip`/`seip`, claim/complete |
| `clint` | 64-bit `mtime`/`mtimecmp` timer and `msip` |
| `axi_xbar` | AXI4 interconnect, 3 masters to 8 slaves plus an error slave |
| `spm` | 128 KiB scratchpad SRAM with an AXI4 slave port |
| `dma` | Burst memory-to-memory copy engine |
| `iommu` | Software-filled IOTLB translating the host's virtual addresses |
| `axi_to_reg` | AXI4 to 32-bit register bus bridge for the control blocks |
| `mcu_pkg` | AXI4 channel structs, register-bus structs, memory map, interrupt numbers |

## The interrupt path

This is the part of the design that the rest exists to serve, and the part where
the timing matters.

### Sources and lines

Every interrupt reaches the core through exactly one CLIC line:

| CLIC line | Source |
|---|---|
| 3 | `msip` of the CLINT; with the line set to edge-triggered, software can also raise the inter-processor interrupt by writing the line's pending bit in the CLIC |
| 7 | `mtip` of the CLINT (`mtime >= mtimecmp`) |
| 9 | `seip` of the PLIC (target 1) |
| 11 | `meip` of the PLIC (target 0) |
| 16 .. 255 | `local_irq_i[0 .. 239]`, one line per device that wants its own vector |

The PLIC stays in front of the CLIC for shared, system-level sources: PLIC
source 1 is the DMA completion, source 2 an IOMMU fault, sources 3..31
`ext_irq_i`. Software claims a PLIC source by reading the claim register and
completes it by writing the id back. Lines 0..15 other than the four above are
tied low.

### What a CLIC line holds

Each line `i` has one 32-bit word at CLIC offset `0x1000 + 4*i`, one byte per
field:

| Byte | Field | Meaning |
|---|---|---|
| 0 | `clicintip` | pending |
| 1 | `clicintie` | enable |
| 2 | `clicintattr` | bit 0 `shv` (vector this line), bit 1 edge (1) / level (0), bit 2 active low / falling edge, bits 7:6 mode (fixed to machine) |
| 3 | `clicintctl` | level and priority |

`mcliccfg.nlbits` (offset 0, bits 3:0) splits `clicintctl`: the top `nlbits`
bits are the **level**, the rest the **priority**. The level the core sees is
those bits with the unused low bits filled with ones. With `nlbits = 4`,
`clicintctl = 0xA5` gives level `0xAF`. With `nlbits = 8` the level is the
whole byte.

A level-triggered line's pending bit follows its input (with the polarity
applied). An edge-triggered line's pending bit is set by the active edge and
cleared when the core acknowledges that line. Software may also write it, which
is how a software interrupt is raised.

### Arbitration and the handshake

Every cycle the CLIC compares `clicintctl` of all pending and enabled lines. The
largest value wins, so level decides first and priority second. On a tie the
higher id wins. The winner is registered and offered to the core as
`irq_valid`, with `irq_id`, `irq_level` and `irq_shv`. The core answers with
`irq_ready` in the cycle it takes the interrupt, or when `mnxti` claims it (see
below). After an acknowledge `irq_valid` is held low for one cycle, so the
arbitration can see the cleared pending bit. A stale winner is therefore never
offered twice. The payload may change while `irq_valid` is high, for example
when a level line is withdrawn. The core takes whatever is on the bus in the
handshake cycle.

Latency: an input edge in cycle *t* is sampled at the end of *t*. The line is
pending in *t+1* and `irq_valid` is high in *t+2*. The core can take it in that
same cycle (`trap_o` is combinational on the handshake).

### Taking an interrupt

`cva6_clic_irq_ctrl` holds the interrupt state of the hart:

| CSR | Number | Content used here |
|---|---|---|
| `mstatus` | 0x300 | `MIE` (bit 3), `MPIE` (bit 7) |
| `mtvec` | 0x305 | common handler base (bits 63:6); mode bits forced to `11` (CLIC mode) |
| `mtvt` | 0x307 | vector table base (64-byte aligned) |
| `mepc` | 0x341 | return address |
| `mcause` | 0x342 | bit 63 interrupt, bit 30 `minhv`, 29:28 `mpp`, 27 `mpie`, 23:16 `mpil`, 11:0 id |
| `mnxti` | 0x345 | tail-chaining access (below) |
| `mintthresh` | 0x347 | level threshold |
| `mintstatus` | 0xFB1 | current level `mil` in bits 31:24 |

An interrupt is taken when `MIE = 1` and `irq_level > max(mil, mintthresh)`.
Taking it saves `pc_i` in `mepc`, saves `MIE` and `mil` in `mcause.mpie` and
`mcause.mpil`, and writes the id into `mcause`. It then raises `mil` to the new
level and clears `MIE`. The jump target depends on the line:

* **vectored** (`shv = 1`): `trap_pc_o = mtvt + 8*id` with `trap_table_o = 1`. This
  is the address of the 8-byte table entry. The fetch unit loads the handler
  address from it, so each interrupt starts directly in its own handler.
* **direct** (`shv = 0`): `trap_pc_o = mtvec & ~63`, the common handler, which
  keeps the code small.

`mret_i` sets `MIE` back from `mcause.mpie` and `mil` from `mcause.mpil`.

**Nesting.** A handler that sets `MIE` again can be pre-empted, but only by a
strictly higher level. A line of lower or equal level stays pending until the
handler returns. Because `mcause` holds the pre-empted level, a handler that
re-enables interrupts must save `mcause` first and restore it before `mret`,
like any RISC-V nesting handler.

**Tail-chaining with `mnxti`.** Without it, a handler that finishes while another
interrupt is pending returns and traps again, restoring and then saving the
same context. A CSR set/clear on `mnxti` (typically `csrrsi a0, mnxti, MIE`) does
two things at once. It applies the write to `mstatus`, and it reads back
`mtvt + 8*id` if a non-vectored interrupt is pending with a level above
`mcause.mpil` and `mintthresh`. In that case the interrupt is acknowledged, and
`mil` and `mcause.id` are updated. Otherwise it reads 0. The handler loops:
service, `mnxti`, load the entry, service, and so on, until `mnxti` returns 0,
and only then restores context and returns. Vectored lines are not claimed this
way; they trap as usual. While a CSR access is in the same cycle, the
interrupt is not taken (the instruction completes first).

## Memory system

### Memory map

| Slave | Base | Size |
|---|---|---|
| SPM (128 KiB) | `0x7000_0000` | 128 KiB |
| CLINT | `0x0204_0000` | 64 KiB |
| PLIC | `0x0400_0000` | 64 MiB |
| CLIC | `0x0800_0000` | 64 KiB |
| DMA registers | `0x0100_0000` | 4 KiB |
| IOMMU registers | `0x0300_0000` | 4 KiB |
| peripherals (`periph_req_o`) | `0x1000_0000` | 256 MiB |
| host shared memory (`host_mem_req_o`) | `0x8000_0000` | 2 GiB |

Anything else is answered with DECERR.

### Interconnect

`axi_xbar` locks a slave's write path to one master from AW to B. It locks the
read path separately from AR to the last R beat. A master holds at most one
write and one read at a time. Locks are given round-robin, and W beats only
flow after their AW. Once locked, the channels pass straight through, so they
add no cycle per beat. This keeps the interconnect small and its behaviour easy
to bound, which suits a real-time MCU. It does not overlap transactions to one
slave, which a high-throughput interconnect would.

### Scratchpad

`spm` is 16384 words of 64 bits with one write and one read port. Reads return
the first beat one cycle after AR and then one beat per cycle. Writes take one W
beat per cycle and return B one cycle after the last beat. One read and one
write burst can run at the same time.

### DMA engine

Registers: `0x00/0x04` source, `0x08/0x0C` destination, `0x10` length in bytes
(multiple of 8), `0x14` start (write 1), `0x18` status (bit 0 busy, bit 1 done
W1C, bit 2 error). The copy runs in chunks of up to 16 words. Each chunk is a
read burst into an internal buffer, then a write burst out of it, and never
crosses a 4 KiB page of source or destination. At the end, or at the first
error response, `done` is set and PLIC source 1 is raised.

### IOMMU

The host addresses the MCU with the virtual addresses of its user-space
processes. `iommu` holds 16 fully associative entries. Each maps one 4 KiB
virtual page to a physical page, with valid, read and write bits. Entry `i` is
at `0x20*i`: `+0/+4` VPN, `+8/+C` PPN, `+10` flags. `0x800` bit 0 enables
translation; when it is 0, addresses pass through. A hit replaces the page
number combinationally, with no extra cycle. A miss or a permission fault is
not forwarded. The IOMMU answers it with SLVERR (reads with the full number of
beats), records the address at `0x808/0x80C`, sets a bit in `0x804` (bit 0 read,
bit 1 write, write 1 to clear) and raises PLIC source 2. Software refills the
IOTLB; there is no page-table walker. Error responses wait until forwarded
transactions in the same direction have completed, so responses stay in order.

### Register blocks

CLINT: `msip` at `0x0`, `mtimecmp` at `0x4000/0x4004`, `mtime` at
`0xBFF8/0xBFFC`. `mtime` counts the cycles in which `rtc_tick_i` is high.

PLIC: priority of source `i` at `4*i` (3 bits, 0 = never), pending at `0x1000`,
enables at `0x2000 + 0x80*t`, threshold at `0x200000 + 0x1000*t`, claim/complete
at `0x200004 + 0x1000*t`, for target `t` = 0 (M, `meip`) and 1 (S, `seip`). Ties
go to the lower id.

All control blocks hang off `axi_to_reg`. It turns each 64-bit beat into at most
two 32-bit accesses, only for the halves whose strobes are set. A 4-byte read
reads only its own word, so a 32-bit load next to the PLIC claim register does
not claim anything.

## Where this RTL departs from the paper or fills a gap

* **The PLIC's priorities and threshold.** The paper says the PLIC provides
  prioritisation, but also that it lacks runtime-configurable priorities and
  threshold control. The RTL follows the standard PLIC: both exist as registers.
  What the PLIC really lacks, pre-emption, is left to the CLIC.
* **Where `mtime`/`mtimecmp`/`msip` live.** The paper's interrupt figure draws these
  registers inside the CLIC. Its text says the legacy CLINT still generates the
  timer interrupt. The RTL keeps a separate CLINT whose outputs enter the CLIC
  on lines 7 and 3. The software interrupt can be raised in either block.
* **`irq_shv`.** The paper's handshake names only request, acknowledge, id and
  level. The core also needs to know whether to vector, so the CLIC sends the
  line's `shv` bit along.
* **Numbers the paper does not give:** bus widths (64-bit data and address, 4-bit
  IDs), 8 `clicintctl` bits, 32 PLIC sources with 3-bit priorities, 16 IOTLB
  entries of 4 KiB, 16-beat DMA chunks, the memory map and every register
  layout. Register layouts follow the RISC-V CLIC draft, the PLIC specification
  and the common CLINT layout where one exists.
* **Not modelled:** the CVA6 pipeline, its 32 KiB write-through data cache, 16 KiB
  instruction cache, MMU and branch prediction. Also the SPI/I2C/UART
  peripherals and the Arm processing system. The two interrupt-related features
  the paper defers to future work (banked stack pointers, automatic register
  saving) are not here either.
* Only machine mode is supported in the CLIC; all lines are M-mode lines.

## Parameters

| Module | Parameter | Default | Note |
|---|---|---|---|
| `rt_mcu_top`, `clic` | `NUM_INTR` | 256 | from the paper; ids are `$clog2(NUM_INTR)` bits |
| `rt_mcu_top`, `spm` | `SPM_BYTES` / `SIZE_BYTES` | 131072 | from the paper |
| `rt_mcu_top`, `plic` | `PLIC_SRC` / `NUM_SRC` | 32 | source 0 does not exist |
| `plic` | `PRIO_W` | 3 | |
| `rt_mcu_top`, `iommu` | `IOTLB_SIZE` / `NUM_ENTRIES` | 16 | |
| `rt_mcu_top`, `dma` | `DMA_BEATS` / `MAX_BEATS` | 16 | |
| `clic` | `CTL_W` | 8 | `clicintctl` bits |
| `axi_xbar` | `NM`, `NS`, `BASE`, `SIZE` | 3, 8, map above | |

## Simulation

Each module has a self-checking testbench in `tb/` named `tb_<module>`. It
prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog if it
hangs. With Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb rtl/mcu_pkg.sv tb/tb_rt_mcu_top.sv \
          --top-module tb_rt_mcu_top -o sim -Mdir obj && ./obj/sim
```

Replace the testbench name to run another one. `mcu_pkg.sv` must come first on
the command line, and the other files are found through `-y`.

`tb_rt_mcu_top` runs the whole MCU at its default parameters. The testbench plays
the core (AXI loads/stores plus the CSR, trap and `mret` signals), the host, and
two small scratchpads that stand in for host memory and the peripherals. In
about 700 cycles it goes through these steps:

* scratchpad bursts;
* a CLINT timer interrupt;
* a DMA copy whose completion arrives through PLIC -> `meip` -> CLIC -> trap and is
  claimed and completed;
* host reads and writes through the IOMMU, with core and host competing for the
  scratchpad;
* an IOMMU miss and its fault interrupt;
* a vectored local interrupt, pre-empted by a higher level, with a lower level
  held back;
* two interrupts taken by `mnxti` tail-chaining;
* the outbound host-memory and peripheral ports, and an unmapped access.

It counts each of these mechanisms and fails if one never happened. The block
testbenches check the details: latencies, tie rules, strobes, burst splitting,
fault paths.

The simulations use two-state logic. Everything that is read is reset, except
the scratchpad contents, which behave like an SRAM's.
