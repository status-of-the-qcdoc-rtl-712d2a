# QCDOC node logic in SystemVerilog

QCDOC ("QCD on a chip") is a massively parallel machine for lattice QCD in
which every node is one ASIC: a PowerPC 440 core with a 1 GFlops FPU, 4 MB of
embedded DRAM, and a communications unit that talks to twelve nearest
neighbours in a six-dimensional torus.  Small local lattices (as small as 2^4
sites per node) only pay off if a word can cross to a neighbour in a few
hundred nanoseconds and if the processor can stream data from on-chip memory
at full rate.  Two custom blocks make that possible, and they are what this
RTL implements:

* the **prefetching eDRAM controller (PEC)**, which feeds the processor
  from eDRAM through wide prefetch and write-combining registers, shares the
  eDRAM with the bus and a DMA engine, keeps all three coherent, adds ECC and
  refreshes the array;
* the **serial communications unit (SCU)**, which moves 64-bit words
  between memory and twelve serial links under DMA control, with a three-word
  window, parity checking and automatic resend, and a store-and-forward path
  for global sums.

The vendor-library parts of the chip (the 440 core, FPU, DDR controller,
Ethernet MAC and its DMA layer, interrupt controller, OPB peripherals, the
serial link macros and PLL, the Ethernet-to-JTAG boot logic) are not part of
this RTL; the top module brings out the ports where they would attach.

## Node structure

```
            440 data busses (PDB)                  other PLB masters
                    |                                     |
  +-----------------v-----------------+                   |
  | pec                                |                   |
  |  PDB port   PLB-slave port  DMA port|  PDB data master  |
  |   (pec_port x3: 2x2 prefetch lines,|------------+      |
  |    2 write buffers each)           |  DMA master|      |
  |        \        |        /         |-------+    |      |
  |        pec_edram_ctrl  <- pec_refresh       |    |      |
  |   (arbitration, ECC, RMW, coherency)|       |    |      |
  |             edram 32768 x 1152      |       |    |      |
  +-----------------^------------------+       |    |      |
                    | slave                     v    v      v
  ==================+========= plb_bus (arbiter + decode) ========
                    | slave (SCU regs)   ^ send master  ^ receive master   | ext slave
  +-----------------v--------------------+--------------+---------+        v
  | scu: 12 links x (send DMA -> send register -> send unit -> tx bytes)   DDR ctrl,
  |                 (rx bytes -> receive unit -> passthru -> receive       OPB bridge
  |                  register -> receive DMA), control registers           (outside)
  +------------------------------------------------------------------------+
```

All of it runs on one clock.  In the original the PDB and eDRAM run at the
CPU clock (500 MHz) and the PLB at a third of it; here the PLB is simply as
fast as the rest.

### Bus convention

Every bus in the design (PDB, PLB master and slave ports, the internal DMA
port of the PEC) uses one pair of structs from `qcdoc_pkg`:
`bus_req_t {req, rnw, addr, be[15:0], wdata[127:0]}` and
`bus_rsp_t {gnt, rvalid, rdata[127:0]}`.  A master holds its request
unchanged until `gnt`; a write is done at `gnt`; read data come with `rvalid`
one or more cycles later, in order.  Memory uses `addr[31:4]`; 64-bit
registers use `addr[3]` to pick the half of the 128-bit beat.  The bus is
128 bits wide like the PLB, but single-beat: no bursts, no split
transactions, no pipelining.

Address map (a choice of this design):

| range | target |
|---|---|
| `0x0000_0000`-`0x003F_FFFF` | eDRAM (4 MB) |
| `0x4000_0000` + 64 KB | SCU registers |
| `0x4001_0000` + 64 KB | PEC DMA / status registers |
| everything else (DDR from `0x8000_0000`) | external PLB slave port |

## The prefetching eDRAM controller

### eDRAM word and ECC

The eDRAM is 1152 bits wide: one 1024-bit line (128 bytes) plus 128 check
bits.  The check bits are 16 independent (72,64) extended-Hamming lanes
(`secded_72_64`), so any single bit error per 64-bit lane is corrected and
any double error is reported.  Lines are written whole; a write buffer that
does not cover its whole line is merged into the stored line by
read-modify-write so the check bits stay right.  The array (`edram`) takes
one command every `CYCLE` = 8 clocks, which is 16 bytes per clock, the
8 GB/s eDRAM rate at 500 MHz.

### Ports, prefetch and write buffers

Each of the three ports (`pec_port`) owns

* four 1024-bit read registers in two sets of two.  A read miss loads the
  least recently used set with the demanded line and the line after it.
  A hit in one register of a set loads the other register of the set with
  the line after the hit, so a sequential reader always has the next line
  on its way, and two independent streams (one per set) can alternate
  without evicting each other;
* two 1024-bit write buffers with byte masks.  Writes to the same line
  combine; a write to a third line writes the older buffer back first.

A read that hits is granted in the cycle it is presented and its data
appear on the next clock.  This is the one-to-two-cycle PDB latency; at one
16-byte beat per clock the PDB carries 8 GB/s.

A long sequential stream does not keep that rate.  A set can have only one
line in flight ahead of the reader, and a line fill takes about 14 clocks
(8 array clocks plus arbitration, ECC and register stages) while the reader
drains a line in 8.  A 4 KB stream with one request per clock therefore
runs at about 9 bytes per clock (4.5 GB/s at 500 MHz): full speed within
each line, a stall of about 6 clocks between lines.  Fetching further ahead
would need more registers per set, or an array whose read latency is
shorter than its cycle time.

### Coherency

The three ports see one memory:

1. Every write accepted by any port invalidates that line in the read
   registers of all ports, including a fill still on its way (its data are
   dropped when they arrive).
2. The controller (`pec_edram_ctrl`) does not start a line read while any
   port's write buffer holds that line; it asks that port to write the
   buffer back (`flush_req`) and reads afterwards.

Together these mean no port can return data older than a write that another
port has already accepted.

### Arbitration and refresh

`pec_refresh` asks for one row every 976 clocks (all 32768 rows in 64 ms at
500 MHz; the interval is an assumption).  The controller serves a refresh
first, then the six port channels (three line-read, three write-back)
round-robin.

### PDB forwarding and DMA

PDB accesses outside the eDRAM leave the PEC on its "PDB data master" to the
PLB; this is how the processor reaches the SCU and PEC registers and the DDR
memory.  `pec_dma` copies LEN bytes from SRC to DST in 16-byte beats; an
eDRAM address goes through the DMA port, any other address through the DMA
engine's PLB master.  Registers (offsets from `0x4001_0000`): `0x00` SRC,
`0x08` DST, `0x10` LEN, `0x18` GO, `0x20` status (bit 0 busy, bit 1 done),
`0x28` corrected ECC errors, `0x30` uncorrectable ECC errors, `0x38`
refreshes done.

## The serial communications unit

### Link protocol

Each link direction carries packets one byte per clock on the byte side of
the serial macro.  A data packet is a header byte and eight data bytes
(least significant first); ACK and NACK packets are a single header byte.

```
header  [7:6] type: 01 DATA, 10 ACK, 11 NACK
        [5:4] sequence number (mod 4)
        [3:0] parity: p[k] = XOR of data bits j with j%4 == k,
              p[0] also covers header bits [7:4]
```

Every single flipped bit of a packet therefore fails the parity check.

The receive unit keeps a three-word buffer, so the sending neighbour may
have three unacknowledged words in flight; the send unit keeps those three
words in its own 192-bit buffer until they are acknowledged.  The rules:

* A good DATA packet with the expected sequence number enters the receive
  buffer.  When a word leaves the buffer, the receiver sends an ACK carrying
  that word's sequence number; ACKs are cumulative.
* A DATA packet with bad parity is dropped and answered with a NACK.  The
  sender then resends all unacknowledged words, oldest first (go-back-N).
* A good packet with an unexpected sequence number (a resend of a word
  already taken, or a word after a dropped one) is dropped and answered
  with the last ACK again.
* ACK/NACK packets with bad parity are dropped; the next ACK, or the
  sender's timeout (256 clocks without progress, then resend), recovers.

ACKs and NACKs for words received on link *l* leave on link *l*'s transmit
side, so link *l* of one node must face link *l'* of the neighbour in the
opposite direction, both ways.  Without errors a data packet takes exactly
9 byte times; control packets take one byte between data packets.

Known weakness: if an error hits a header byte, the receiver can lose packet
framing until the stream has passed.  It recovers through NACKs and
timeouts, but a misframed packet passes the 4-bit parity with probability
1/16.  The original says only "single-bit error detection with automatic
resend"; a stronger framing code would be needed for real use.

### DMA and registers

Every link has a send and a receive DMA engine (`scu_dma`), 24 channels in
all, each with a 16-entry instruction SRAM of block-strided moves
(`scu_instr_t`): *nblk* blocks of *blen* 64-bit words, block *b* starting at
`addr + 8*b*stride`.  Send engines read memory and fill the send register;
receive engines empty the receive register into memory.  Send and receive
engines each share one PLB master through a round-robin arbiter.

SCU registers (offsets from `0x4000_0000`): `0x0000` START (bit *c* starts
channel *c*: 0-11 send, 12-23 receive; one write starts any subset), `0x0008`
BUSY, `0x0010` DONE (write 1 to clear; `irq_scu` is their OR), `0x0018`
error counters (parity errors, resends), `0x0100 + 8c` CHCFG (first
instruction `[3:0]`, count `[8:4]`, reset value: one instruction at 0),
`0x0200 + 8l` passthru route of receive link *l* (`[0]` on, `[1]` keep a
copy, `[7:4]` destination send link), `0x1000 + 0x80c + 8i` instruction *i*
of channel *c*.

### Passthru for global sums

Global sums are done by shift-and-add around a ring.  With a route set, a
word arriving on receive link *l* goes straight into the send unit of link
*dst* (ahead of that link's own DMA traffic) and, with *keep*, also into
link *l*'s receive register for the local add.  Words are forwarded only
after their parity has been checked (store-and-forward, whole 64-bit words).

## Where this departs from the original

* The eDRAM peak rate (16 bytes per clock) is reached within a prefetched
  line only; a sequential stream runs at about 9 bytes per clock (see the
  prefetch section).
* Many concurrent SCU channels are slow.  All SCU DMA traffic crosses one
  single-beat PLB and reaches the eDRAM through the PEC's PLB-slave port,
  whose two write buffers are shared by all receive streams.  With eight
  links receiving at once nearly every 8-byte store becomes a line
  read-modify-write: a 4-D exchange of 8 x 48 words takes about 16,300
  clocks, some 42 clocks per word, far below the links' byte rate.  Per-
  channel write combining in the SCU, or more write buffers in that port,
  would be the fix.
* One clock everywhere; the PLB's 1/3 clock ratio, bursts, split
  transactions and pipelining are not modelled.
* The link header layout, sequence numbers, go-back-N, timeout, the
  acknowledgement timing and the routing of ACKs over the same link are this
  design's choices; the original fixes only the packet size (8-bit header +
  64-bit word), the three-word window and resend on error.
* The block diagram draws byte-wide passthru connections; here the passthru
  moves whole checked words.
* Prefetch policy, write-back policy, coherency mechanism, ECC code, refresh
  interval, DMA register maps, SCU instruction format and SRAM depth,
  register depths and the address map are this design's choices.
* The serial link macros themselves (serializer, clock recovery, PLL) are
  outside; the RTL stops at their byte interface.

## Files

| file | contents |
|---|---|
| `rtl/qcdoc_pkg.sv` | bus structs, address map, packet header and parity, SCU instruction |
| `rtl/qcdoc_asic.sv` | top: PEC, SCU, PLB |
| `rtl/plb_bus.sv`, `rtl/bus_arbiter.sv`, `rtl/rr_arbiter.sv` | bus arbitration and decode |
| `rtl/pec.sv`, `rtl/pec_port.sv`, `rtl/pec_edram_ctrl.sv`, `rtl/pec_refresh.sv`, `rtl/pec_dma.sv` | eDRAM controller |
| `rtl/edram.sv`, `rtl/secded_72_64.sv` | eDRAM array, ECC lane |
| `rtl/scu.sv`, `rtl/scu_send_unit.sv`, `rtl/scu_recv_unit.sv`, `rtl/scu_word_fifo.sv`, `rtl/scu_dma.sv`, `rtl/scu_passthru.sv`, `rtl/scu_regs.sv` | communications unit |
| `tb/tb_qcdoc_asic.sv` | end-to-end test of the node at full size |
| `tb/tb_scu_link.sv` | two link ends back to back, with bit errors and stalls |
| `tb/tb_secded_72_64.sv`, `tb/tb_scu_word_fifo.sv` | unit tests |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself.
With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl rtl/qcdoc_pkg.sv \
    tb/tb_qcdoc_asic.sv --top-module tb_qcdoc_asic -Mdir obj
./obj/Vtb_qcdoc_asic
```

(the same with `tb_scu_link`, `tb_secded_72_64`, `tb_scu_word_fifo`).
Verilator finds the other modules through `-Irtl`.

`tb_qcdoc_asic` runs the whole node at its default size (4 MB eDRAM, 12
links) in a few seconds.  It loops the links back as a torus one node wide
(link 2k transmits into link 2k+1 and back), puts a small memory model on the
external PLB slave port, and drives everything through the PDB as the
processor would: eDRAM writes and reads, a 64-word strided transfer over a
link with one bit flipped on the wire, a passthru forward with a kept copy,
DMA from eDRAM to DDR and back from a line still sitting in a write buffer,
single- and double-bit errors written into the eDRAM array, and a 4 KB
sequential read stream whose peak and sustained rates it measures, and a
4-D nearest-neighbour exchange (eight links at once, 48 words each,
started by one register write).  It counts
each mechanism (parity error, resend, out-of-sequence drop, passthru forward,
prefetch, refresh, coherency write-back, read-modify-write, ECC correction)
and fails if one never happened.  The eDRAM array is cleared through a
hierarchical reference before reset, because an all-zero line is a valid ECC
code word and a real part would be initialised by software.
