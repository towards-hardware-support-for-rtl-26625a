# An elastic FPGA shell: PR regions joined by a WISHBONE crossbar

Partial reconfiguration lets several tenants share one FPGA, but a
reconfigurable (PR) region has a fixed size once the floorplan is made. An
accelerator that is too big for a region cannot be hosted. One that is too
small wastes the rest of the region. This design takes another route. An
application's accelerator is cut into small computation modules, and each
module goes into its own small region. The regions are joined by a crossbar,
so an application grows or shrinks by whole regions. The host software decides
which regions belong to which application, and so which region may talk to
which. It also decides how much of each region's input bandwidth every sender
gets.

The RTL here is a SystemVerilog implementation of the shell described in
*Towards Hardware Support for FPGA Resource Elasticity*. The paper's prototype
runs on a KCU1500 board behind a PCIe DMA core. Some parts are not included:

- the DMA core;
- the ICAP primitive;
- the host driver;
- the resource manager.

Where those parts would connect, their signals are ports of the top module,
`elastic_shell_top`.

## Parts of the shell

| crossbar port | master side | slave side |
|---|---|---|
| 0 (host) | `axi_to_wb`: packets from the 3 host-to-card streams | `wb_to_axi`: packets to the 3 card-to-host streams |
| 1 | PR region 1: constant multiplier | PR region 1 |
| 2 | PR region 2: Hamming(31,26) encoder | PR region 2 |
| 3 | PR region 3: Hamming(31,26) decoder | PR region 3 |

Every crossbar port has two halves:

- a **master port**, where a WISHBONE master (a region's sender or the host bridge) enters;
- a **slave port**, which owns one WISHBONE slave and arbitrates between the masters that want it.

Around the crossbar sit these blocks:

- the register file, on AXI-Lite;
- first-word-fall-through FIFOs of 512 words for the three host-to-card and the three card-to-host streams;
- a dual-clock FIFO that carries a fourth host-to-card stream, the partial bitstream, from the 250 MHz shell clock to the 125 MHz ICAP clock;
- the reset logic.

The regions are numbered 1..3 because port 0 belongs to the host. This
follows the register table. The paper's block diagram numbers the regions
0..2.

## Packets and the life of a request

Everything on the crossbar moves in packets of 8 32-bit words:

- Word 0 is the application ID. In packets from the host, bits [1:0] of word 0 select one of four applications.
- Words 1..7 are data.

A computation module takes in a packet and computes all seven data words at
once with seven copies of its unit. It forwards word 0 unchanged, so the ID
travels with the data. It then sends the result packet to the destination
that the register file gives for its region.

One transfer runs as follows, counting cycles from the module's request:

1. The module pulses its request. The **WB master interface** (`wb_master_if`) registers the request and raises CYC with a one-hot address (ADR[3:0] = destination port). This takes 2 cycles.
2. The master port checks the address against the master's isolation mask. It raises a request line to the addressed slave port. The slave port's arbiter grants it at the next edge, and the grant is back at the master on the cycle after. This takes 2 cycles. So **time-to-grant is 4 cycles** when the slave is free.
3. The master sends one word per cycle with SEL = word index (0..7). It sends without waiting for ACKs, as long as STALL is low.
4. The **WB slave interface** (`wb_slave_if`) stores word *i* in register *i*. It answers ACK one cycle later. CYC drops after the eighth ACK. The transfer status is registered one cycle later, which completes the request at **cycle 13**.

The slave interface gives each of its eight registers an *unread* flag. STALL
is raised when a word is addressed to a register whose previous content has
not been consumed yet. That is the only back-pressure in the system. The
consumer (the computation module or the WB-to-AXI bridge) reads all eight
registers when every flag is set, and then clears them together.

## Arbitration by packages

Each slave port has its own arbiter (`wrr_arbiter`). There is no central one.
Bandwidth is counted in *packages*, meaning data words accepted by the slave,
not in cycles.

- The host writes, for every slave port, an 8-bit limit per master.
- A master keeps the grant until it has sent that many words or drops its request.
- Then the grant moves to the next requester in round-robin order.

The next requester is found with a leading-zero counter on the bit-reversed
request vector. The arbiter searches first among the indices above the last
grant, and then among all indices.

The timing details are:

- The grant is a register. After a release the arbiter leaves one idle cycle before the next grant.
- When the count reaches the limit, the *usable* grant falls at once, so a word offered after that is stalled.
- The grant register is held until the ACKs still outstanding have returned, and then for one cycle more.
- A limit of 0 takes the master out of arbitration altogether.

With 8-word transfers this gives a 12-cycle slot per master. When the three
regions all send to one port at the same moment, the grants come at cycles 4,
16 and 28, and the transfers complete at cycles 13, 25 and 37. These are the
paper's worst-case figures, and the crossbar testbench checks them.

**What a small limit does.** Every request carries 8 words, so only a limit
below 8 changes anything. With such a limit, a master's packet is split over
two or more grants, and another master's words can come in between. The slave
interface keeps one word per register index. If two masters each leave half a
packet in the same slave, its eight registers never fill with one consistent
packet, and both masters stall until their watchdog fires. The design keeps
this behaviour: it follows from packing whole packets into per-index
registers, and the paper does not discuss it. Two settings are safe:

- a limit below 8 when only one master uses that slave (the end-to-end test does this to force quota splits and stalls);
- a limit of 8 or more.

## Isolation and errors

Each master port ANDs the destination address with the master's
*allowed-slaves* register.

- If the result is zero, the master port answers ERR at once and no slave sees a request.
- If the result has more than one bit set, it is also an error. Multicast is not built.
- A port held in reset by the register file behaves as if it were absent: it answers nothing.

The master interface has a watchdog of 64 cycles (`TIMEOUT`). It runs while
the interface waits for a grant and while it waits for ACKs. Every transfer
ends with a 2-bit status:

| code | meaning |
|---|---|
| 0 | OK |
| 1 | destination not allowed (ERR from the master port) |
| 2 | no grant before the watchdog fired |
| 3 | slave stopped acknowledging before the watchdog fired |

The region's status is written into register 0x44. For host packets, the
status is written into register 0x48 under the packet's application ID.

## Host side

**AXI-to-WB** (`axi_to_wb`) serves the three host-to-card FIFOs in turn.

- It loads a packet from one FIFO, one word per cycle.
- It looks up the destination of the packet's application ID in the register file.
- It raises its request when half the packet (4 words, `REQ_AT`) is in. The grant latency then overlaps the loading of the second half, and the packet reaches the region **15 cycles** after its first word leaves the FIFO.
- With `REQ_AT = 8` (request only when full) the same delivery takes **19 cycles**.

The application table doubles as an isolation check. An ID whose destination
register is 0 is refused with status 1. An application therefore cannot reach
a region it was not given, even though port 0 itself may address every
region.

**WB-to-AXI** (`wb_to_axi`) is the slave on port 0. Finished packets land in
it, and it writes each one to a card-to-host FIFO. A 3-bit one-hot shift
register selects the FIFO, and it moves on after every packet. TLAST marks the
eighth word.

## Register file

Twenty 32-bit registers sit on a separate AXI-Lite slave with 7-bit byte
addresses. A write needs AW and W together. The rules are:

- Configuration registers reset to 0, which means nothing is allowed anywhere.
- Status registers are read only.
- An address past 0x4C answers SLVERR.

| address | contents |
|---|---|
| 0x00 | device ID, `32'hFE1A_0001` (read only) |
| 0x04, 0x08, 0x0C | destination of PR region 1, 2, 3 (one-hot port, bits [3:0]) |
| 0x10 | resets [3:0]: bit p holds crossbar port p and whatever is attached to it in reset |
| 0x14 .. 0x20 | allowed slaves [3:0] of master port 0..3 |
| 0x24 .. 0x30 | package limits of slave port 0..3: the limit for master m in bits [8m+7:8m] |
| 0x34 .. 0x40 | destination of application ID 0..3 (one-hot port) |
| 0x44 | last status of PR region r in bits [8r+1:8r] |
| 0x48 | last status of application a in bits [8a+1:8a] |
| 0x4C | ICAP status: bit 0 done, bit 1 error (synchronised from the ICAP clock) |

The meaning of each register comes from the paper. The placement of fields
inside the registers is this design's own.

### Example: the three configurations

- **Multiplier alone.** Set application 0 → port 1, region 1 → port 0, and allow 0→1 and 1→0.
- **Multiplier then encoder.** Set region 1 → port 2, region 2 → port 0, and allow 0→1, 1→2 and 2→0.
- **Full chain (multiply, encode, decode).** Add region 2 → port 3, region 3 → port 0, and allow 2→3 and 3→0.

Moving between configurations takes only register writes. The end-to-end
testbench switches between them this way.

## Computation modules

| region | function |
|---|---|
| 1 | `const_mult`: multiply by a constant, keeping the low 32 bits. The constant is `MULT_CONST`, 3 by default. |
| 2 | `hamming_enc`: data in bits [25:0] becomes a 31-bit codeword, with parity at positions 1, 2, 4, 8 and 16 and data in the other positions in order. Bit 31 is 0. |
| 3 | `hamming_dec`: recomputes the syndrome and corrects a single-bit error. Output bits [25:0] are the data, [30:26] the syndrome, and bit 31 flags a correction. |

`comp_module` wraps seven copies of the unit with an input and an output
register. `pr_region` joins `wb_slave_if`, `comp_module` and `wb_master_if`
into a region.

## Resets and the bitstream path

The DMA core's asynchronous reset is asserted at once and released through two
flops (`rst_sync`). There is one synchroniser for each clock domain. A port's
bit in register 0x10 is ORed into the reset of that crossbar port and of the
region behind it. This is how a region is isolated while it is reconfigured.

The bitstream arrives on the fourth host-to-card stream. It goes through a
16-entry Gray-pointer dual-clock FIFO (`async_fifo`) to the ICAP-side
valid/ready port. The ICAP's done and error signals come back through a
two-flop synchroniser into register 0x4C.

## Verification

Every module in `rtl/` except the small `lzc` helper has a self-checking
testbench in `tb/`. Each testbench prints
`TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog. The
testbenches check the cycle counts the paper gives:

- time-to-grant 4 and completion 13;
- worst case 4/16/28 and 13/25/37;
- AXI-to-WB delivery 15 versus 19 cycles.

`tb_elastic_shell_top` runs the whole shell at its default parameters. It:

1. sends 24 packets through each of the three configurations and checks every returned word against a model;
2. sets a package limit of 1 to force quota splits and slave stalls;
3. sends a packet with an application ID that has no region;
4. holds a region in reset to provoke a grant timeout, then recovers;
5. pushes a bitstream through the ICAP FIFO.

It counts each of these mechanisms and fails if one never happened.

`tb_workload_16kb` runs the use case at full size. It pushes 16 KB (4096
words, or 586 packets) through each of the three configurations, with package
limits of 16 and of 128 words per grant, and checks every result word. Each
run takes about 11,200 cycles, or about 19 cycles per packet. The host bridge
sets that rate: it loads, sends and finishes one packet before it starts the
next. The two limits give the same time, because no 8-word request is ever
split by a limit of 8 or more.

To simulate with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/wb_pkg.sv tb/tb_elastic_shell_top.sv --top-module tb_elastic_shell_top
./obj_dir/Vtb_elastic_shell_top
```

Replace the testbench name to run any other block's test. The package has to
come first on the command line. The simulator is two-state, so every register
that is read has a reset.

## Where this departs from the paper, and what is assumed

- **Region numbering.** Regions are 1..3 on ports 1..3, as in the register table. The block diagram numbers them 0..2.
- **STALL width.** The interface figure draws STALL 3 bits wide. Here STALL is one bit, as in WISHBONE, and nothing in the text uses more.
- **Sizes the paper does not give.** The paper gives no FIFO depths, no watchdog period and no multiplier constant. These are parameters: 512, 16, 64 and 3.
- **Packet format.** The fixed 8-word packet, word 0 as the application ID, SEL as the word index and the one-hot ADR are taken from the paper's description. Multicast is mentioned in the paper but not described, and is not built.
- **Small package limits.** The deadlock described above, when a limit below 8 interleaves two masters into one slave, is a property of this design. The paper does not address the case.
- **Bit layouts.** Bit layouts inside the registers, the status codes, the Hamming bit ordering and the decoder's output word are this design's choices.
- **Regions are static.** The prototype in the paper also uses statically placed modules and leaves the ICAP path untested. Here the bitstream path ends at the ICAP-side port.
- **Number of ports.** The crossbar, ports and arbiter take the port count as a parameter. The register file and top are written for four ports, so the paper's sweep of worst-case latency against the number of regions is run only at four ports.
- **Area and power.** The paper's area and power numbers are for its own synthesis on the KCU1500 and are not reproduced here.
