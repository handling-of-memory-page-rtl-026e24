# A receiver-side page-fault log for virtual-address RDMA

A DMA engine that writes to remote memory by *virtual* address avoids
pinning its buffers. The catch is that the destination page may not be
resident when a packet arrives. On the receiving node the SMMU (the I/O MMU of
an Arm SoC) then fails the translation, and the memory write ends with an AXI
slave error. Nothing is lost, because the packet can be sent again. But the
node that received the packet must remember *which* transfer failed and at
*which* page. Only then can software bring the page in and tell the sender
exactly what to send again, rather than waiting for the sender's time-out.

This repository holds the hardware for that. It is a small log next to the
receive path of the RDMA engine:

* It records, for every write that failed with a slave error, who sent the
  packet, which transaction and attempt it belonged to, the protection
  domain, and the faulting page.
* It drops repeats of the fault it logged last, since every 256-byte packet
  of a 16 KB transaction that lands on a missing page produces the same
  fault.
* It lets the kernel driver read and remove entries over AXI-lite, two
  64-bit reads per entry, and removes an entry only after both halves were
  read in order.

The design follows the destination-side page-fault mechanism of a hardware
and software co-design for an FPGA-based RDMA engine on Zynq UltraScale+
MPSoCs. The RTL reproduces the log's sizes, entry layout, filter rule and
read protocol as published. Where the description stops, the choices are
this design's own, and each is named below.

## How a destination fault is handled

The flow of one remote write whose destination page is missing is as
follows. "Initiator" is the node that sends, "target" is the node that
receives.

1. The initiator sends the packets of a 16 KB transaction, 256 bytes each.
   At most two transactions are in flight, and their packets interleave.
2. On the target, the receive path writes each packet through the SMMU. The
   page is absent, so the write returns `SLVERR`. The receive path sends a
   negative acknowledgement to the initiator, and the initiator *pauses* that
   transaction instead of resending it at once. The receive path also
   reports the packet to **this log**.
3. The SMMU raises its context-fault interrupt. The driver reads entries from
   the log. For each entry it pages the faulting page in: it touches one
   page, or with "touch-ahead" up to four pages of the buffer. It then sends
   a "ready to retransmit" message to the initiator. The message carries the
   transaction id and the sequence number taken from the entry.
4. The initiator resends the transaction if that sequence number is still
   the current one for the transaction. A message about an older attempt is
   ignored. If no message comes, the initiator's time-out resends the
   transaction anyway. That is also the only recovery for a fault on the
   *source* side, which this log does not see.

The log is the only piece of this chain that is hardware of the mechanism
itself. The DMA engine, the SMMU, the real-time core that runs the
retransmission logic, and the mailboxes are existing parts. They are modelled
only in the end-to-end testbench.

## The log entry

An entry is 128 bits, made of four 32-bit words. Bit 0 of every word is a
Valid flag, so each word read on its own, even through a 32-bit port, tells
whether it holds an entry. The widths and the order of the fields inside each
word are as published. The entry is stored as `{word3, word2, word1, word0}`.

| word | bits 31 … 0 |
|---|---|
| 0 | `00` · `src_id[21:0]` · `00` · `tr_id[13:12]` · `000` · `V` |
| 1 | `tr_id[11:0]` · `00` · `seq_num[13:0]` · `000` · `V` |
| 2 | `pdid[15:0]` · `iova[31:20]` · `0` · `exa_ack[1:0]` · `V` |
| 3 | `iova[19:0]` · `000_0000_0000` · `V` |

* `src_id` (22 bits): the initiator node's coordinates.
* `tr_id` (14 bits) and `seq_num` (14 bits): the transaction and its
  attempt. The initiator compares `seq_num` with the current attempt.
* `pdid` (16 bits): the protection domain, which selects the process that
  owns the buffer.
* `iova` (32 bits): `{process index[3:0], 0, VA[38:12]}`. This is the page
  number of a 39-bit virtual address, 4 KB pages. The page offset is not
  kept, because faults are handled per page. Which of the 28 address bits is
  the one tied to zero is not stated in the source; here it is the bit next
  to the process index.
* `exa_ack` (2 bits): the acknowledgement code the receive path returned. It
  is stored as reported.

With 64-bit reads, the first read (offset `0x0`) returns `{word1, word0}` and
the second (offset `0x8`) returns `{word3, word2}`. The word order inside a
64-bit read is this design's choice.

## The repeat filter, and where it falls short

`nack_dedup` holds the key of the last entry it pushed: source node,
transaction id, sequence number, process index and page number. A slave error
with the same key is dropped. Any other slave error is formatted and pushed.
The key is not cleared when the entry is read out, because the rule compares
with the last entry *pushed*, not with what the log still holds.

A single last-entry register is the published design, and its weakness is
worth knowing. Two transactions in flight interleave their packets, as in
`A B A B …`. Every packet then differs from the one before, so a 16 KB pair
can put up to 128 entries in the log for two or three distinct faults. The
driver reads them one by one, and most name pages that are already
resident. Across the end-to-end test, 1095 of 1146 logged entries named
pages that were already in memory. The published driver works around this:
it remembers the last two entries it handled and skips an entry that repeats
one of them. Only two transactions can be in flight, so two entries are
enough. The test's driver model does the same, and it skipped 1017 entries.
Even so, every repeat still costs two bus reads. Filtering against the last
two keys in hardware is the obvious improvement. It is *not* done here, so
that the RTL stays the published design.

When the log is full, a new fault is dropped and `full_drop` pulses. The
filter's key stays unchanged, so the same fault is logged again once there is
room. The source does not say what happens on overflow. Dropping is safe,
because the initiator's time-out resends a transaction whose fault was never
logged.

Only `SLVERR` (`2'b10`) is logged. `OKAY` and `DECERR` responses are
ignored.

## Reading the log: why two reads, and when an entry goes

The driver cannot read 128 bits in one access, so an entry has to survive
its first read. `fifo_read_fsm` keeps a small counter of the part it expects
next:

* a read of the expected part advances the counter;
* a read of the last part, when it is expected, **pops** the entry;
* a read of part 0 at any time restarts the sequence;
* any other out-of-order read returns the data and changes nothing.

So reading `0x8` before `0x0` never removes an entry, and re-reading `0x0` is
harmless. When the log is empty every read returns zero, so Valid reads as 0.
Addresses above `0xF` read zero and have no effect.

`DATA_W = 32` builds the same port with four 32-bit reads per entry, at
offsets `0x0`, `0x4`, `0x8` and `0xC`. The source mentions this width as the
one used by an earlier prototype. `DATA_W = 128` returns the whole entry in
one read at `0x0` and pops it at once. The source says its bus could do
that, but its driver uses two 64-bit reads, so 64 is the default.

The port is AXI-lite, read channels only, with one read in flight:

* `s_arready` is high whenever no read data is waiting.
* Data is captured, and the pop made, at the address handshake.
* `s_rvalid` rises on the next cycle and holds until `s_rready`.
* `s_rresp` is always OKAY.

Assertions check that the master holds `araddr` until it is accepted, and
that the port holds `rdata` until it is taken.

## Blocks and interfaces

| file | what it is |
|---|---|
| `rtl/pf_log_pkg.sv` | field widths, the report struct `pf_nack_t`, the key struct, and the functions that build the IOVA field, the key and the 128-bit entry |
| `rtl/nack_dedup.sv` | the filter and entry formatter described above |
| `rtl/fault_fifo.sv` | 512 × 128-bit first-in first-out queue. Memory array and pointers; the head is read combinationally (fall-through) |
| `rtl/fifo_read_fsm.sv` | the AXI-lite read port and pop state machine |
| `rtl/pf_rx_fault_log.sv` | top: filter → queue → read port |

Ports of the top, `pf_rx_fault_log`:

* `nack_valid`, `nack` (`pf_nack_t`): one write-response report per cycle
  from the receive path. The fields are `src_id`, `tr_id`, `seq_num`, `pdid`,
  `iova` (43 bits: `{process index, VA[38:0]}`), `exa_ack` and `bresp`.
  There is no back-pressure, because the log is a side tap.
* `s_ar*`, `s_r*`: the AXI-lite read port.
* `log_empty`, `log_count`, `dup_drop`, `full_drop`: status outputs. They
  are this design's addition, for a poller, an interrupt or counters.

Parameters: `DEPTH = 512` and `DATA_W = 64` come from the source. `ADDR_W =
12` is this design's choice. All state uses one synchronous active-low reset,
`rst_n`.

Timing:

* A fault reported in cycle *t* is logged at the edge that ends cycle *t*. It
  can be read from cycle *t + 1*.
* A repeat in cycle *t + 1* is already caught.
* Read data comes one cycle after the read address is accepted.

After synthesis with yosys, the top has about 64 word-level cells, 176
flip-flop bits and one 512 × 99-bit memory. The constant zero and Valid bits
of the entry are optimised away from the 128-bit width.

## What is the source's and what is not

Taken from the published description:

* the 512 × 128 log;
* logging on slave errors;
* the repeat rule, comparing node, transaction, sequence number and page
  with the last pushed entry;
* the entry layout, with field widths and word contents;
* two 64-bit reads per entry, with a pop only after a safe, in-order read;
* 32-bit and 128-bit reads as options.

Chosen here, where the source is silent:

* the report interface into the log;
* dropping faults when the log is full;
* logging `SLVERR` only, not `DECERR`;
* which address bit is tied to zero;
* the bit placement of the words within the entry and within a 64-bit read;
* the address map and the value read from an empty log;
* the AXI-lite handshake details;
* the status outputs and the reset.

Not built, because they are existing parts and not designed in the source:

* the RDMA engine's send and receive paths;
* the Arm SMMU;
* the real-time core's firmware;
* the mailboxes and the packetizer;
* the Linux driver and the user library.

Their behaviour around the log exists only as models in the end-to-end
testbench.

## Simulation

Each testbench checks its block against a reference written independently
of the RTL, and prints `TB_RESULT checks=N failures=M`. Each also has a
watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/pf_log_pkg.sv tb/tb_pf_rx_fault_log.sv --top-module tb_pf_rx_fault_log
./obj_dir/Vtb_pf_rx_fault_log
```

Replace the testbench name to run another one.

* `tb_fault_fifo` tests the queue at 512 × 128 against a reference queue. It
  fills the queue to full, drains it, then runs 20 000 random push and pop
  cycles. It also checks the one-cycle fall-through.
* `tb_nack_dedup` tests the filter with directed cases: OKAY and DECERR,
  repeats with another page offset or PDID, a change of page, sequence
  number, transaction, node or process, the A-B-A interleave, and a fault
  while the log is full. Random reports follow. Every entry is compared bit
  for bit with one assembled field by field from the table above.
* `tb_fifo_read_fsm` tests the read port with random `rready` back-pressure.
  It checks data, latency, data held under back-pressure, the in-order pop,
  the second half read first, a repeated first half, empty reads and
  out-of-range reads. It runs at 64 bits, and at 32 and 128 bits on two
  further instances.
* `tb_pf_rx_fault_log` is the end-to-end test, run on the top at its default
  parameters. Models of the initiator, the receiver and SMMU, and the driver
  run remote writes of 16 B, 64 B, 256 B, 1 KB, 4 KB, 16 KB, 32 KB and 64 KB
  into buffers whose pages are all absent. It runs them in touch-one-page and
  touch-ahead modes, and once with a buffer already resident (nothing may be
  logged). Then it runs an overload: the driver stalls while time-outs resend
  interleaved transactions, so the log fills and drops faults, and then the
  driver drains it and the transfer completes. Every entry read is compared
  with the report that caused it, and every packet must end up written. The
  test counts each mechanism and fails if any did not happen: logging,
  repeat drops, full drops, pops, a second half read first, an empty read,
  retransmits on request, stale requests ignored, time-out retransmits, and
  entries the driver skipped as repeats.

The cycle counts this test prints come from the testbench's own delays and
time-out. Those are invented model values, not measurements, and say nothing
about the real system's latency. Transfers up to one page finish in about
180 cycles (touch one page) or 280 cycles (touch ahead). From 16 KB up, the
backlog of repeat entries described under the filter dominates. A 64 KB
transfer takes about 5000 cycles with touch-one-page and 4300 with
touch-ahead.
