# QCDOC node: the custom logic in SystemVerilog

QCDOC is a massively parallel computer for lattice QCD. Every node is a
single ASIC that holds a PowerPC 440 core with a 1 GFlops double-precision
FPU, 4 MBytes of embedded DRAM, a DDR SDRAM controller, Ethernet, and a
serial communications unit (SCU). The SCU joins the node to its 12 nearest
neighbours in a six-dimensional torus. The machine's main idea is that
the nearest-neighbour exchange of a lattice QCD kernel should cost almost
nothing in latency. So the node moves boundary data straight between its
memory and the neighbours' memories over dedicated serial links. Those
links check every transfer for bit errors and resend on their own, and
they can forward data through a node for global sums. This lets a problem
be spread over tens of thousands of nodes with very small local volumes.

Most of the ASIC was assembled from the vendor's library. Only three parts
were designed for QCDOC: the SCU, the EDRAM controller and the DMA
controller that copies between EDRAM and DDR memory. This RTL implements
those three parts, plus a behavioural model of the EDRAM. It wires them
together as `qcdoc_node`. The published description of QCDOC (Boyle et al.,
"Hardware and software status of QCDOC", Lattice 2003) gives what these
blocks do and how fast they are. It does not give how they work inside. So
the frame format, the acknowledgement protocol, the register maps and the
arbitration below are this design's own choices. Each is marked as such
where it appears.

## Block map

```
                 core_* (440 core / PLB side)
                         |
        +----------------v-----------------+        +-------------+
        | edram_ctrl  port0 core           |<------>| edram_macro |
        |  round-robin port1 dma_ctrl -----+--+     | 4 MB, 128-b |
        |  1 line/cycle port2 scu ---------+--|--+  +-------------+
        +----------------------------------+  |  |
                                              |  |
   ddr_* (DDR SDRAM controller) <--- dma_ctrl-+  |
                                                 |
   dcr_* (register ring) --+--> dma_ctrl regs    |
                           +--> scu regs         |
                                                 v
                          +------------------------------------------+
                          | scu: 12 send DMA + 12 receive DMA engines |
                          |      pass-through routing, link counters |
                          |  scu_link x12 (one per neighbour)        |
                          +------------------------------------------+
                                   | ser_out[11:0]   ^ ser_in[11:0]
                                   v                 |   (to the HSSL macros)
```

Link `l = 2*dim + dir` connects the forward (`dir = 0`) or backward
(`dir = 1`) neighbour in dimension `dim = 0..5`. Each link has one wire out
and one wire in, which makes the 24 off-node links of the chip. At
500 Mbit/s each, they give 12 Gbit/s per node.

## The serial links (`scu_link`)

This is the least obvious part of the design.

**Line rate.** A wire carries one bit per core clock. At the 500 MHz design
frequency that is the 500 Mbit/s per link of the published design. The
high-speed serializer macro that drives the physical pins is outside this
RTL, and `ser_out`/`ser_in` are its bit streams.

**Frames** (this design's choice). The line idles at 0. Every frame begins
with a 1 (start bit) and a 3-bit class code:

| frame   | bits | layout after the start bit                         |
|---------|------|----------------------------------------------------|
| data    | 71   | `111`, seq[1:0], payload[63:0], parity             |
| control | 8    | `000`, kind (0 ACK, 1 NACK), seq[1:0], parity      |

The receiver decides the frame length by the majority of the three class
bits. So one flipped bit can never change how many bits it collects, and
the frame boundaries stay aligned after an error. The parity bit makes the
XOR of every bit after the start bit zero. A single flipped bit anywhere
after the start bit is therefore detected.

**Acknowledgement and resend** (this design's choice). The node's send
half and receive half for one neighbour share the wire pair. Acknowledgements
for the words that arrive on `ser_in` are sent out on `ser_out`, slotted in
between this node's own data frames and taking priority over them.

* The sender keeps up to 3 unacknowledged words in a 4-entry buffer and
  numbers them with 2-bit sequence numbers (go-back-N).
* The receiver accepts only the sequence number it expects. It answers
  `ACK(seq)` when the word is good and `NACK(expected)` when the parity is
  bad, and it drops words that arrive out of order after a NACK. It
  re-acknowledges duplicates.
* An ACK frees the word it names and every older word. A NACK rewinds the
  sender to the named word, and everything from there on is sent again.
* If nothing is acknowledged for `TIMEOUT` cycles (default 1024), the
  sender rewinds to its oldest unacknowledged word. This covers a corrupted
  ACK and a receiver that had to drop a word because its output was still
  full.

Words therefore leave `rx_*` exactly once, in order, whatever single-bit
errors occur inside frames. A bit flipped on an idle line, or in a start
bit, is outside this scheme. It would misalign the framing.

**Throughput.** With traffic in one direction, a word occupies 71 bit
times, and the 3-word window hides the round trip of the acknowledgement:
N words take 71·N cycles. With both directions busy, each wire also
carries an 8-bit ACK per word in the other direction, so the cost is 79
cycles per word. That is 81 % of the raw line rate as payload.

**Counters.** `perr_count` counts received frames with bad parity.
`resend_count` counts the sender's rewinds. Both are readable as SCU
registers, for the operating system's link monitoring.

## The SCU (`scu`)

The SCU wraps the 12 links with 24 DMA engines, a send engine and a receive
engine per link. A **send engine** is given a start word address and a word
count. It reads one 64-bit word at a time from EDRAM (half of a 128-bit
line) and hands it to its link. A **receive engine** writes each word that
arrives into consecutive words from its start address, using byte enables
on half a line. The 24 engines share one EDRAM port round-robin. Even with
all 24 busy they need only about a third of an access per cycle
(24 engines, one word per 71 cycles each), so the memory never limits the
links.

**Pass-through** serves global sums. When it is enabled for receive link
`i`, every word arriving on `i` is forwarded straight into send link
`PT_TARGET(i)`. If `PT_LOCAL(i)` is set, the word is also written to memory
by receive engine `i`. A word leaves link `i` only in a cycle in which all
its destinations can take it, and forwarded words go ahead of the target
link's own DMA. Words are forwarded whole: a hop costs one frame time (71
cycles) plus a few cycles. Forwarding bits before the frame's parity has been
checked would be faster, but then the parity check could no longer protect
the forwarded copy. The software that sums the values works on the local
copies.

A pass-through can be limited to a number of words, set in CTRL bits 31:16.
After that many words it switches itself off, and later words only go to
memory. A global sum along a ring of N nodes then works like this:

1. Every node sends its own value on its forward link.
2. Every node receives N-1 words on its backward link. It keeps all of them
   and passes the first N-2 on.
3. Each value has now visited every other node once, and every node adds
   up the same N numbers.

With 8 nodes the whole exchange takes 516 cycles (1.0 us at 500 MHz). That
is about 74 cycles per hop.

**A motherboard.** 64 nodes form a 2^6 torus. On a real board three of the
six dimensions leave the board through cables. Here they are closed on the
board itself, as in a machine of one motherboard. In each dimension a node's
forward and backward neighbour are the same node, so each pair of nodes is
joined by two bidirectional links per dimension. With every node sending
8 words on all 12 links at once (1536 DMA engines running), the exchange
ends after 642 cycles. That is 80 cycles per word, the same as for a single
link busy in both directions, so the links do not slow each other down.

**Registers**, 32-bit, address `8*l + r` for link `l`:

| r | name   | meaning                                                        |
|---|--------|----------------------------------------------------------------|
| 0 | SADDR  | send start, 64-bit word address in EDRAM                       |
| 1 | SCOUNT | words to send (counts down)                                    |
| 2 | RADDR  | receive start, word address                                    |
| 3 | RCOUNT | words to receive (counts down)                                 |
| 4 | CTRL   | bit0 start send, bit1 start receive, bits 7:4 pass-through target, bit8 pass-through on, bit9 keep local copy, bits 31:16 pass-through word limit (0 = none) |
| 5 | STATUS | bit0 send busy, bit1 receive busy, bit2 send done, bit3 receive done |
| 6 | PERR   | parity errors seen on this link's input                        |
| 7 | RESEND | rewinds of this link's sender                                  |

Address, count and pass-through fields can be written while the engine
they belong to is idle. `irq` pulses when any engine finishes. A receive
transfer should be started before the neighbour sends. If it is not, the
first word waits in the link, and later words are refused and resent after
the timeout.

## Memory: EDRAM, its controller and the EDRAM/SDRAM DMA

`edram_macro` is a behavioural model of the 4 MByte embedded DRAM, laid out
as 2^18 lines of 128 bits with per-byte write enables. A read returns the
line one clock after the request. Refresh and bank timing are not modelled.

`edram_ctrl` grants one of its three masters per cycle, round-robin: the
core side, the DMA controller and the SCU. One 16-byte line per 500 MHz
cycle is the 8 GByte/s memory-to-processor bandwidth of the design. All
masters use the `mem_req_t` request struct (`qcdoc_pkg`): the request is
held until `gnt`, and read data comes with `rvalid` one cycle after the
grant. `stall_count` adds up the request-cycles lost to arbitration.

`dma_ctrl` copies a block of lines between EDRAM and the DDR SDRAM
controller port, in either direction. Its registers sit at 0x100 + r: EADDR,
DADDR, LEN in lines, CTRL (bit0 go, bit1 direction, 1 = DDR to EDRAM), and
STATUS (bit0 busy, bit1 done). Reads run ahead of writes through a 4-line
FIFO, so the copy runs at the slower side's rate. That side is the DDR
interface, 2.6 GByte/s in the published design, or about one line every
3.1 cycles. The test measures 391 cycles for 128 lines against a DDR model
that takes one line every 3 cycles: 2.62 GByte/s.

## What the node module leaves outside

These vendor library blocks are not part of this RTL. `qcdoc_node` brings
their connections out as ports:

* the PowerPC 440 core with its FPU, and the PLB that joins them to memory,
  appear as `core_*`, a plain EDRAM master port;
* the DDR SDRAM controller appears as `ddr_*`;
* the DCR register ring appears as `dcr_*` (SCU at 0x000-0x05F, DMA
  controller at 0x100-0x104);
* the serial link macros appear as `ser_out`/`ser_in`;
* the PLL appears as `clk`;
* the interrupt controller receives `scu_irq` and `dma_irq`.

The OPB, the bridge to it, the Ethernet MAC with its FIFOs, the MDMAL
Ethernet DMA, the Ethernet-JTAG boot interface, I2C, GPIO and boot/clock
support do not touch the custom blocks and are left out entirely. So is the
machine-wide tree network for three global interrupts. Its structure is
not published.

## Numbers

| quantity                       | published       | this RTL                                  |
|--------------------------------|-----------------|-------------------------------------------|
| embedded memory                | 4 MBytes        | 2^18 x 128 bit (`EDRAM_LINES`)            |
| memory/processor bandwidth     | 8 GByte/s       | 16 B/cycle, 8 GByte/s at 500 MHz          |
| EDRAM/SDRAM DMA                | 2.6 GByte/s     | limited by the DDR port; 2.62 GByte/s measured |
| links                          | 24 at 500 Mbit/s| 12 send + 12 receive wires, 1 bit/cycle   |
| payload per link               | -               | 64 bits / 71 cycles; 64 / 79 both ways busy |
| error handling                 | single-bit detection, automatic resend | parity per frame, ACK/NACK, go-back-N, timeout |

Halo exchanges of the kernels in the published performance table, all 8
physics links of one node running at once in loop-back. The face sizes
follow the usual lattice bookkeeping: a half spinor is 12 doubles, a colour
vector 6, and asqtad needs 4 layers.

| kernel, local volume  | words per link | cycles  | at 500 MHz |
|-----------------------|----------------|---------|------------|
| Wilson / clover 2^4   | 96             | 7 600   | 15 us      |
| Wilson / clover 4^4   | 768            | 60 688  | 121 us     |
| staggered 2^4         | 48             | 3 808   | 8 us       |
| staggered 4^4         | 384            | 30 352  | 61 us      |
| asqtad (and force) 4^4| 1536           | 121 360 | 243 us     |

The fields of every listed kernel fit the EDRAM many times over: asqtad at
4^4 needs about 0.3 MBytes. The floating-point work itself runs on the 440
core and FPU, which are not included.

## How far to trust it

* **From the published design:** which blocks are custom and how they
  connect; the 4 MByte EDRAM; the 8 and 2.6 GByte/s rates; 12 neighbours in
  6 dimensions with a send and a receive wire each at 500 Mbit/s; DMA on
  every link; single-bit error detection with automatic resend;
  pass-through for global sums; link status registers.
* **This design's own:** the frame layout, window, sequence numbers and
  timeout of the links; ACKs sharing the wire with data; word-level (not
  bit-level) pass-through; all register maps and addresses; round-robin
  arbitration; the request/grant memory protocol; the DMA FIFO; asynchronous
  active-low reset.
* **Not modelled:** EDRAM refresh and timing, the EDRAM controller's
  internals beyond arbitration, strided or chained DMA descriptors, global
  summation arithmetic in hardware, partitioning of the torus, link
  training, and all vendor blocks.

## Files

`rtl/` holds the design, one unit per file:

| file               | content                                               |
|--------------------|-------------------------------------------------------|
| `qcdoc_pkg.sv`     | widths, `mem_req_t`, frame constants, register offsets|
| `scu_link.sv`      | one neighbour link                                    |
| `scu.sv`           | 24 DMA engines, pass-through, registers, 12 links     |
| `edram_macro.sv`   | behavioural 4 MByte EDRAM                             |
| `edram_ctrl.sv`    | EDRAM arbitration                                     |
| `dma_ctrl.sv`      | EDRAM/SDRAM block copies                              |
| `qcdoc_node.sv`    | top: the blocks wired as on the chip                  |

`tb/` holds self-checking testbenches. Each prints
`TB_RESULT checks=N failures=M` and stops on a watchdog if it hangs.

| testbench          | what it shows                                                          |
|--------------------|------------------------------------------------------------------------|
| `tb_scu_link`      | two links back to back: line rate, every injected bit flip detected once, resend, timeout after dropped words, order and values |
| `tb_scu`           | all 12 links in loop-back at once, rate, pass-through chain with and without a word limit, a bit error seen in PERR/RESEND |
| `tb_edram_macro`   | full-size EDRAM, byte enables, one-cycle read                         |
| `tb_edram_ctrl`    | three random masters against a reference image, one grant per cycle, round-robin order, stall count |
| `tb_dma_ctrl`      | copies both ways, 2.6 GByte/s sustained                               |
| `tb_qcdoc_node`    | two nodes at full size as on a daughterboard: DDR to EDRAM to link to EDRAM to DDR, with a bit error, pass-through, EDRAM stalls, interrupts |
| `tb_halo_exchange` | the halo exchanges in the table above on one full-size node           |
| `tb_global_sum`    | ring of 8 full-size nodes summing one value each through pass-through  |
| `tb_motherboard`   | 64 full-size nodes wired as a 2^6 torus, all 12 links of every node exchanging at once |
| `ddr_model.sv`     | DDR controller stand-in used by the node-level tests (one line per 3 cycles) |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/qcdoc_pkg.sv tb/tb_qcdoc_node.sv --top-module tb_qcdoc_node
./obj_dir/Vtb_qcdoc_node +verilator+rand+reset+2
```

Every testbench runs in under one second, including the full-size two-node
test. Most build in seconds; the 64-node motherboard takes about three
minutes to build. `+verilator+rand+reset+2` starts every
unreset variable at a random value. The design resets or initialises
everything it reads.

To change the design, note that `qcdoc_node` takes `LINES`, the EDRAM size
in 128-bit lines, and `TIMEOUT`. `scu` also takes `NL`, the number of
links. The frame layout is defined once in `qcdoc_pkg` and in the two
frame functions of `scu_link`.
