# QCDOC node chip: the communication and memory logic in SystemVerilog

QCDOC is a massively parallel computer for lattice QCD. Its nodes are placed on
a six-dimensional torus, and each node is one chip plus a DDR memory module.
Lattice QCD needs two things from each node: fast access to a few megabytes of
field data, and many short, low-latency transfers to the nearest neighbours. So
the node chip pairs a PowerPC 440 core and its floating-point unit with two
blocks designed for the machine:

- the **Serial Communications Unit (SCU)**. It runs twelve serial links, one
  per torus direction. Each link has a send side and a receive side, so there
  are 24 channels, each driven by its own DMA engine.
- the **Prefetching EDRAM Controller (PEC)**. It gives the processor, the bus
  and a DMA engine coherent, ECC-protected access to 4 MByte of on-chip DRAM.
  Reads stream from 1024-bit line registers.

This RTL covers those two blocks, the serial macros they use (as a behavioural
model), the embedded DRAM (as a behavioural model), and a top level,
`qcdoc_asic`, that wires them together. The processor, its buses and the other
standard library cores are not here. Their connections are ports of the top
level.

```
            ser_out[11:0] / ser_in[11:0]
                     |
        3 x hssl (4 send + 4 receive ports each)
                     | bytes, one per 8 clocks per link
                    scu ---- scu_s_* (control registers)
                     |  \--- scu_m_* (DMA master, 64-bit words on a 128-bit bus)
                     |        irq
   pdb_* ----\
   pec_s_* ---+---- pec ---- edram (4 MByte, 72-bit ECC words)
   pec_dma_* -/      \------ pec_m_* (DMA master toward DDR)
```

The whole design runs on one clock, the 500 MHz core clock. The serial links
move one bit per clock, which is 500 Mbit/s per direction. The bus clock ratios
of the real chip (local bus at 1/3 of the core clock) are not modelled.

## Link packets and flow control

Every link carries a stream of bytes in each direction. A transfer is a
**packet**: one header byte, then the eight bytes of a 64-bit word, most
significant byte first. The header layout is this design's own:

| bits  | meaning |
|-------|---------|
| [7:5] | type: 000 idle, 001 data, 010 supervisor, 011 ACK, 100 SACK, 111 alignment |
| [4]   | even parity over [7:5] |
| [3:0] | even parity of each 16-bit quarter of the data word (0 if there is no data) |

ACK and SACK are one-byte packets with no data. Idle bytes fill the line when
nothing is due.

**Credits.** The receive buffer at the far end holds three words. The send unit
therefore starts with three credits and spends one per data packet. When a word
leaves the far receive buffer, the far receive unit asks its own send unit to
return one ACK byte. When that ACK arrives here, the receive unit of this
direction gives the credit back to its partner send unit. A sender with no
credit stops, and the stall is reported on `ev_link_stall`. Because of this a
word can never be lost to a full buffer. The receive unit still checks for
overflow and reports it.

**Priority on the line.** ACK, then SACK, then a supervisor word, then data.
Forwarded (passthru) words go ahead of words from the send register.
Acknowledgements are never held behind data, so two nodes sending to each
other cannot deadlock.

**Supervisor words.** A 64-bit word meant to interrupt the receiver. It skips
the data buffers, uses a single credit of its own, and lands in a per-link
supervisor register at the far end. There it raises the interrupt until the
processor reads it. That read sends a SACK back, which frees the sender for
the next supervisor word.

**Parity errors.** A parity error in a header or in the data sets a sticky
status bit. The word is still delivered. There is no retransmission, because
the published description gives no recovery protocol.

**Serial macro model (`hssl`).** After reset each send port sends one
alignment byte with its top bit set. After that it sends a byte every 8 clocks
without a break. The receiver takes the first 1 bit it sees as the start of
that byte. A byte taken from the send unit is delivered by a directly
connected receiver 9 clocks later. A data packet therefore takes 72 clocks
(144 ns) on the line.

## SCU datapath

For each link:

```
send DMA -> send register -> send unit (buffer, encode, mux) -> hssl port
hssl port -> receive unit (decode, 3-word buffer) -> receive register -> receive DMA
                          \-> passthru crossbar -> any send unit
```

**DMA engines (`scu_dma`).** Each of the 24 engines has eight instructions in
its own SRAM. An instruction is a block-strided move. Its 128 bits are:

| bits     | field |
|----------|-------|
| [127:96] | byte address of the first block |
| [95:80]  | words per block |
| [79:48]  | stride between block starts, in bytes |
| [47:32]  | number of blocks |
| [31]     | last: stop after this instruction |

The engine starts at the instruction index given with the start command. It
runs instructions one after another until one has the last bit set. An
instruction with no words is skipped. Each word is one bus transfer.

**Bus arbiter (`scu_arbiter`).** The 24 engines share one bus master. The
arbiter grants them round robin, one transfer per grant. It places each 64-bit
word on the half of the 128-bit bus chosen by address bit 3. `ev_scu_contention`
marks clocks in which more than one engine is waiting.

**Passthru (`scu_passthru`).** This is store-and-forward for global sums. A
receive unit with forwarding enabled offers its words to the crossbar. A send
unit with forwarding enabled takes words from the one receive link it selects.
The receive unit can keep a local copy too, so a node on the path both sees
the value and passes it on. A word leaves the receive buffer only when every
selected target has taken it.

**Registers (`scu`).** The control registers are behind the `scu_s_*` slave.
Offsets are within the SCU's window, with 128-bit accesses. The slave
acknowledges one clock after it sees a request.

| offset | register |
|--------|----------|
| 0x0000 + ch*0x100 + i*0x10 | instruction i of channel ch (ch 0-11 send on link ch, 12-23 receive on link ch-12) |
| 0x2000 | START: [23:0] channels to start, [34:32] first instruction |
| 0x2010 | STATUS: [23:0] busy, [87:64] done (sticky; write 1 to clear) |
| 0x2020 | PASS: [11:0] send unit takes passthru, [16+4j +: 4] source link of send unit j, [75:64] keep local copy, [91:80] receive unit offers to passthru |
| 0x2030 | ERR: [11:0] supervisor word waiting, [27:16] parity error, [43:32] overflow (write 1 to clear) |
| 0x2040 | IRQEN: [23:0] interrupt on channel done, [32] interrupt on supervisor word |
| 0x3000 + l*0x10 | supervisor send on link l. The ack is held while the previous word is still unsent. |
| 0x3800 + l*0x10 | supervisor receive on link l. The read frees the register and returns a SACK. |

One write to START can launch any subset of the 24 channels at once.

## PEC: prefetching EDRAM controller

The PEC has three ports, each 128 bits wide:

- **PDB.** The processor's fast direct bus.
- **Bus slave.** For any other bus master, such as the SCU's DMA.
- **Internal DMA engine (`pec_dma`).** Copies quadwords between EDRAM and DDR
  through its own bus master.

Every port has a read side and a write side. A single arbiter sends at most
one command per clock to the EDRAM.

**Read side (`pec_read_port`).** The read side has four 1024-bit line
registers in two sets:

- A read that hits any valid register is acknowledged, with its data, in the
  same clock. A master that presents a new address every clock therefore
  reads one quadword per clock: 8 GByte/s at 500 MHz, the peak rate of the
  original processor bus.
- A miss takes the least recently used set and fetches the line into it.
- On every hit, the line after the one being read is fetched into the other
  register of the same set, unless it is already there.

So a sequential stream runs entirely from registers after its first miss. Two
streams can alternate, one per set. A miss takes three clocks when the EDRAM
is free.

**Write side (`pec_write_buf`).** The write side has two 1024-bit buffers,
each with a mask of the 64-bit words it holds.

- A write to a line already in a buffer is merged into it.
- Otherwise the write takes a free buffer.
- A buffer is flushed to EDRAM as a masked line write: the older buffer when
  the arbiter allows, the last one once the port stops writing.

A write that finds its place is acknowledged in the same clock, so writes
also stream at one quadword per clock. Writes are whole 64-bit words, because
that is the ECC word.

**Coherency.** Data for one address can sit in three places: EDRAM, any
port's write buffer, and any port's line registers. Two rules keep every port
seeing the latest write:

1. Every accepted write is snooped by all three read sides. A register holding
   that line is patched, and so is a line arriving in the same clock.
2. Every line fetched from EDRAM is merged with the newer words still waiting
   in any of the six write buffers before a read side stores it.

**EDRAM arbitration.** One command per clock, in this order: refresh (one row
every 128 clocks), a fetch that a read is waiting for, a buffer flush, then a
prefetch. Among ports the order is PDB, then bus slave, then DMA.

**ECC (`pec_ecc_enc`, `pec_ecc_dec`).** Each 64-bit word is stored as a
72-bit extended Hamming code. Hamming positions are numbered 1 to 71, and
position p is stored in bit p-1:

- the 64 data bits fill, in order, the positions that are not powers of two;
- seven check bits sit at positions 1, 2, 4, ..., 64;
- stored bit 71 is the overall parity bit, which makes the whole word even.

A single flipped bit anywhere is corrected. A double error is detected,
counted in `ecc_uncorrectable`, and the data passes through uncorrected.
Corrections are counted in `ecc_corrected`. A word replaced by newer buffered
data is not counted. Stored errors are not written back (no scrubbing).

**EDRAM model (`edram`).** The model has 32768 lines of sixteen 72-bit words.
It takes one command per clock: read (data one clock later), masked write, or
refresh. It asserts that refresh commands keep coming. Like real DRAM, it
starts with unknown contents, so boot software (or a testbench) must clear
memory before reading ECC-protected data it never wrote.

Addressing is flat. Byte address bits [21:7] select the line, [6:4] the
quadword within it, and higher bits are ignored.

## The simplified bus

The CoreConnect buses are library parts and are replaced everywhere by one
simple request/acknowledge bus (`qcdoc_pkg::bus_req_t` and `bus_rsp_t`):

- The master holds `valid`, `we`, `addr`, `wdata` (128 bits) and `be` (16
  bits) steady until the slave pulses `ack`.
- Read data comes with the `ack`.

There are no bursts, no split transactions and no pipelining. To put the SCU
on the bus, connect its master `scu_m_*` to the PEC's slave `pec_s_*`, either
directly (as the end-to-end testbench does) or through an arbiter of your own.

## Where this design departs from the original chip

- **Library cores are missing.** The 440 core, FPU, PLB arbiter, PLB-OPB
  bridge, DCR bus, interrupt controller, DDR controller, Ethernet MAC and its
  DMA layer, I2C, GPIO, PLL and the Ethernet-to-JTAG boot logic are not
  included.
- **SCU control is on the simplified bus**, not on a separate control
  register bus.
- **Serial links.** The byte framing, the header layout and the whole link
  protocol beyond "64-bit word, 8-bit header, three-word receive buffer" are
  this design's own. The same goes for the supervisor SACK scheme and for
  parity handling without retransmission.
- **PEC policies are this design's own:** the DMA instruction format, the
  register map, the prefetch and write-buffer policies, the EDRAM command
  priorities, the refresh interval and the ECC code.
- **Clocks.** There is one clock, with no separate bus clocks.
- **Passthru width.** The original forwards bytes on 8-bit paths between the
  receive and send buffers, so a word can be passed on while it is still
  arriving. Here the passthru forwards a word once all of it has arrived.
  That costs about 64 clocks per hop in a global sum.
- **EDRAM-DDR DMA rate.** The DMA engine reads a quadword, then writes it,
  one at a time. That is slower than the 2.6 GByte/s of the original DDR
  interface.
- **Latency not calibrated.** The original's end-to-end link latencies
  (about 350 ns for supervisor words, 550 ns for normal words) include the
  real serial macros and software. They were not used to tune this model.
  Here a word needs 72 clocks on the line, plus 9 clocks through the macro
  model, plus a few clocks in each unit. The end-to-end testbench measures
  90 clocks (180 ns) from the start command to the word being written at the
  neighbour, and 78 clocks (156 ns) from a supervisor write to the far
  interrupt. Both are inside the original's estimates, but the real serial
  macros add latency that the model does not have.

## Sizes and what they hold

At the default parameters the design has 12 links, 24 DMA channels with 8
instructions each, and 4 MByte of EDRAM (32768 lines of 1024 data bits). The
per-node data of the published Dirac-operator benchmarks fits easily:

- Double precision, 256 sites (local volume 4^4), gauge links plus three
  spinor fields: about 166 KByte.
- One Wilson D_eo application on a 2^4 local volume sends 48 words per
  direction. At 72 clocks per word that is about 6.9 us per link, with the
  eight directions in parallel.

The arithmetic of those kernels runs on the processor, which is not part of
this RTL.

## Simulating

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/qcdoc_pkg.sv tb/tb_qcdoc_asic.sv \
          --top-module tb_qcdoc_asic -Mdir obj && obj/Vtb_qcdoc_asic
```

Replace `tb_qcdoc_asic` with any other testbench name. All testbenches run the
blocks at their default sizes.

| testbench | what it checks |
|-----------|----------------|
| `tb_hssl` | bit order, alignment, the 9-clock byte latency on every port |
| `tb_scu_snd_unit` | packet bytes and header parity, three credits then stall, ACK/SACK priority |
| `tb_scu_rec_unit` | three words buffered without overflow, one ACK per word, supervisor hold and SACK, parity flags, passthru with and without a local copy |
| `tb_scu_dma` | block-strided address sequence, instruction chaining and skipping, done |
| `tb_scu_arbiter` | round-robin order, bounded waiting, bus half selection, contention |
| `tb_scu_passthru` | every source and target combination of the crossbar |
| `tb_scu` | the 12-link SCU with a byte loop: register read-back, strided send, all 24 channels at once, passthru, supervisor word, a corrupted byte |
| `tb_pec_ecc` | every single-bit error corrected, double errors detected |
| `tb_pec_read_port` | streaming hits in one clock, prefetch, coherency under random snooped writes |
| `tb_pec_write_buf` | memory plus buffers always equal to the written data, draining, gathering |
| `tb_pec_dma` | both copy directions, bounds, busy and done |
| `tb_edram` | masked writes and read-back |
| `tb_pec` | streaming (one quadword per clock back to back), two-port coherency, parallel ports, single- and double-bit ECC, DMA both ways, refresh rate |
| `tb_qcdoc_asic` | end to end at full size (see below) |

**The end-to-end test.** `tb_qcdoc_asic` wires the chip's links back to
itself in pairs (link 2k to link 2k+1) and connects the SCU master to the PEC
slave. It then:

1. gathers strided data over a link;
2. forces a credit stall;
3. runs a store-and-forward chain through the passthru;
4. exchanges supervisor words with interrupt and SACK;
5. drives four links at once;
6. injects an ECC error;
7. copies to DDR;
8. measures the latency of one word and of one supervisor word.

It counts stalls, forwards, bus contention, refreshes, prefetch hits,
prefetches, flushes and ECC corrections, and fails if any of them never
happened. It runs in well under a minute.
