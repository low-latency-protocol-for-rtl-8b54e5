# FADE-10G: reliable FPGA-to-computer data transport over raw Ethernet

A front-end board in a data acquisition system has to push a continuous stream
of 64-bit measurement words to a Linux computer over a 10 Gbps (or 1 Gbps)
Ethernet link. It must lose nothing, keep latency low and use very little FPGA
logic. A full TCP/IP stack is too large. UDP is unreliable and carries routing
overhead that a point-to-point or single-switch network never needs.

FADE-10G skips IP altogether. It sends raw Ethernet frames with EtherType
`0xFADE`, and the protocol on top of them is as small as it can be. The stream
is cut into packets of exactly 1024 words (8 KiB, sent as jumbo frames). Each
packet gets a 32-bit packet number. The FPGA keeps every packet it has sent in
a small ring buffer until the computer acknowledges it, and sends it again if
it was not. The ring has a power-of-two number of slots, so the low bits of the
packet number are the slot index and no lookup table is needed. The same link
carries short control commands from the computer. They are executed exactly
once, and their results come back inside the data frames.

This repository holds synthesizable SystemVerilog for the FPGA core, a
self-checking testbench per block, and an end-to-end testbench in which the
testbench plays the computer.

## Block map

```
              rx_clk                 sys_clk                          tx_clk
 XGMII rx --> packet_receiver --> ack_cmd_fifo --> descriptor_manager --> cmd_status_sync --> packet_sender --> XGMII tx
                 | START/STOP (run)  ------------>   |   ^    |  write                           ^ read
                 | RESET ---> fade_reset_ctrl        |   |    +--------> packet_buffer_mem ------+
                                                     v   |
                                                cdc_handshake x2 (sys <-> user_clk)
                                                     v   |
  data source: dta / dta_we / dta_ready          command_processor <--> user_req/user_ack (user logic)
                                                   user_clk
```

| Module | Clock | Role |
|---|---|---|
| `packet_receiver` | rx_clk | Receive state machine in place of a MAC. Checks the FCS and filters on MAC address, EtherType and version. Executes START, STOP and RESET itself. Queues ACK, NACK and commands. |
| `ack_cmd_fifo` | rx → sys | Dual-clock FIFO (Gray-code pointers) for those entries. |
| `descriptor_manager` | sys_clk | Packet descriptors, head and tail pointers, the data-source port, ACK/NACK handling, transmit scheduling, early retransmission, response piggy-backing, delay adaptation. |
| `cdc_handshake` | sys ↔ user | Two instances. Carry one command to the command processor and one response back, with a toggle handshake. |
| `command_processor` | user_clk | Exactly-once execution of commands by command sequence number (CSN). Hands user commands to user logic. |
| `packet_buffer_mem` | sys → tx | 2^PKT_LOG slots × 1024 words × 64 bits, with one write port and one read port. |
| `cmd_status_sync` | sys ↔ tx | Toggle handshake that carries one transmit request across and its completion back. |
| `packet_sender` | tx_clk | Builds data, last-data and response frames, appends the FCS and drives XGMII. |
| `fade_reset_ctrl` | all | External reset or RESET command, synchronised into each domain. |
| `fade10g_core` | – | Top level. Wires all of the above. |

The Ethernet PHY (an external chip, or the FPGA vendor's 10G PCS/PMA core) is
not part of the core. The core's link side is a 64-bit XGMII bus, lane 0 in
bits 7:0. The command processor runs on its own clock, `user_clk`, so that
user commands can be executed by logic in another clock domain. Tie
`user_clk` to `sys_clk` to keep everything in the system domain; the two
crossings then only add a few cycles of latency.

## Frames on the wire

All frames carry a standard Ethernet header, then the EtherType `0xFADE`, then
the protocol version `0x0100`. Multi-byte header fields are big-endian. Short
frames are padded with `0xA5` bytes to the 60-byte minimum, and the FCS
follows.

| Frame | Direction | Payload after the version word |
|---|---|---|
| ACK / NACK | host → FPGA | `0x0003`/`0x0004`, frame sequence number (2 B), packet number (4 B), transmission delay (4 B) |
| Command | host → FPGA | command code (2 B), CSN (2 B), argument (4 B) |
| Data | FPGA → host | `0xA5A5`, frame seq (2), packet number (4), transmission delay (4), command response (12), 1024 data words (8192 B) |
| Last data | FPGA → host | `0xA5A6`, same header. Words 0..1022 are data; word 1023 holds the number of valid words (0..1023). |
| Response | FPGA → host | filler word `0x0000`, command response (12) |

A command response is the command code (2 B), the CSN (2 B) and a 64-bit
return value. Data words go out little-endian (lane 0 = bits 7:0 of the
word). A data frame takes 1031 XGMII words from the start character to the
terminate character, followed by two idle words. That gives 8192 payload
bytes per 8264 bytes of line time, about 99.1 % of the line rate.

## Packet ring and descriptors

Each slot of the buffer has a descriptor:

* **V** (valid): the slot holds a complete packet.
* **S** (sent): the packet has been sent at least once.
* **C** (confirmed): the packet has been acknowledged.
* **F** (flushed): the packet is a partly filled last packet.
* **Pkt**: the 32-bit packet number.
* **Seq**: the 16-bit frame sequence number the packet was last sent with.
* **R**: marks the packet for immediate retransmission. This flag is this
  implementation's own addition (see below).

The **head pointer** is the slot being filled from the data source. Each
accepted word (`dta_we && dta_ready`) is written at `{head, word}`. The
1024th word sets V. In the next cycle the head moves on, unless the next
slot is the **tail** slot. In that case the ring is full and `dta_ready`
stays low until the tail moves. The head slot is not freed by
acknowledgements while it is being filled.

The **tail pointer** is the oldest packet that is not yet confirmed. A
confirmed slot under the tail is freed (all flags cleared), and the tail
advances by one slot per cycle.

STOP ends the stream. On the falling edge of the synchronised `run` state,
the packet under the head is closed. Its word count (0 to 1023) is written
into word 1023 and V and F are set, so it goes out as a last-data frame. This
happens even when the packet is empty, so the host always learns where the
stream ended.

## Acknowledgement, retransmission and early retransmission

This is the part of the design that needs the most care.

**Normal retransmission.** The scheduler has no timer. Whenever the sender
is free and the inter-frame delay has expired, it picks a packet with V set
and C clear. A round-robin pointer browses the ring for this, starting after
the last packet it picked. An unconfirmed packet is therefore sent again once
the pointer comes round to it. With a fast data source, the newest packets
come first and retransmissions are rare. With a slow source, packets waiting
for an ACK are resent at once. The delay adaptation (below) then slows the
link down.

**ACK handling.** Each ACK carries a packet number and the frame sequence
number of the frame being acknowledged. If the packet's slot still holds that
packet number, C is set. A late duplicate ACK for a slot already reused
changes nothing. An ACK for a packet beyond the last one sent sets the sticky
`proto_error` output. All packet-number comparisons are modulo 2^32:
`a > b` iff `(a - b) mod 2^32` is non-zero and at most 2^31. Sequence numbers
are compared the same way modulo 2^16.

**Early retransmission.** If the packet under the tail, or its ACK, is lost,
the ring fills up and stalls until the round-robin pointer reaches that
packet again. The ACK of a *later* frame shows such a loss early. The simple
rule, "resend every unconfirmed packet with a smaller packet number", resends
a packet twice if it was already resent early and a second loss is seen
before its own ACK arrives. So the rule compares frame sequence numbers
instead. Every data frame gets the next sequence number, and that number is
stored in the descriptor. When an ACK with sequence number *s* arrives, every
packet that is sent (S), unconfirmed (not C) and was last sent with a
sequence number older than *s* is marked R. R packets go out before the
round-robin choice, oldest first, each with a fresh sequence number.

Example (4 slots, the first scenario of `tb_descriptor_manager`):

| event | effect |
|---|---|
| packets 0,1,2,3 sent with seq 0,1,2,3; packet 1 lost | – |
| ACK(pkt 0, seq 0) | C on 0, tail moves; nothing older than seq 0, so no R |
| ACK(pkt 2, seq 2) | C on 2; packet 1 (seq 1 < 2) gets R, packet 3 (seq 3) does not |
| sender free | packet 1 goes out next, with seq 4 |
| ACK(pkt 3, seq 3) | seq 3 is newer than nothing still pending: packet 1 (now seq 4) is **not** marked again |

A NACK marks its packet R.

## Commands, exactly once

The host sends each new command with a new CSN. It resends with the same CSN
if no response arrives within its timeout. The command processor stores the
CSN and the response of the last command it serviced. When a command arrives
with the stored CSN, the stored response is sent again and the command is not
executed.

START and STOP are executed at once by the receiver, which sets or clears
`run`. They still pass through the command processor to be confirmed, with
return value 0. RESET is executed by the receiver and resets the whole core,
so it is never confirmed. Every other code goes to user logic:

* the core raises `user_req` with `user_code`/`user_arg`;
* user logic answers with `user_ack` and `user_ret`.

The response is held by the descriptor manager. It rides in the next data
frame that goes out. If no packet is waiting, it goes out in a response-only
frame.

## Transmission delay adaptation

The descriptor manager counts data frames and retransmissions over windows of
2^WIN_LOG frames. When a window ends:

* with at least RETR_HIGH retransmissions, the gap inserted after every frame
  grows by DELAY_STEP sys_clk cycles, up to DELAY_MAX;
* with at most RETR_LOW retransmissions, the gap shrinks by DELAY_STEP, down
  to 0.

The current gap goes out in every data frame's "transmission delay" field.

## Top-level interface (`fade10g_core`)

| Port | Dir | Meaning |
|---|---|---|
| `sys_clk`, `rx_clk`, `tx_clk`, `user_clk`, `rst` | in | four clocks, asynchronous active-high reset |
| `dta[63:0]`, `dta_we`, `dta_ready` | in/in/out | data source; a word is taken on `sys_clk` when `dta_we && dta_ready` |
| `xgmii_rxd/rxc`, `xgmii_txd/txc` | in/out | PHY side (64-bit XGMII, rx_clk / tx_clk) |
| `user_req`, `user_code`, `user_arg`, `user_ack`, `user_ret` | out/out/out/in/in | user command interface (user_clk) |
| `running`, `proto_error`, `tx_delay`, `n_frames`, `n_retrans`, `n_early`, `n_resp_frames`, `n_full`, `n_cmd_executed`, `n_cmd_duplicates`, `bad_frames` | out | status and counters |

| Parameter | Default | Meaning |
|---|---|---|
| `PKT_LOG` | 4 | log2 of the packet slots (16 slots = 128 KiB of buffer) |
| `WORDS_LOG` | 10 | log2 of the words per packet (fixed at 10 by the frame format) |
| `MY_MAC` | 02:00:00:00:00:01 | the core's MAC address |
| `FIFO_LOG` | 4 | log2 of the Ack & Cmd FIFO depth |
| `WIN_LOG`, `RETR_HIGH`, `RETR_LOW`, `DELAY_STEP`, `DELAY_MAX` | 6, 8, 1, 16, 4096 | delay adaptation |

The frame format fixes `WORDS_LOG`: a data frame always carries 1024 words.
Smaller values are for unit tests only. The published synthesis results use
16 and 32 slots; `PKT_LOG = 5` gives the larger buffer.

## Choices where the protocol leaves the detail open

The protocol fixes the frame layouts, the descriptor flags, the head/tail
discipline, the ACK rule, the early-retransmission rule, the CSN rule and
the existence of a parametrised delay adaptation. The following are this
implementation's own choices:

* Command codes START = 0x0001, STOP = 0x0002, RESET = 0x0005. ACK and NACK
  are fixed at 3 and 4.
* The filler word of a response-only frame is 0x0000. A data frame with no
  response pending carries an all-zero response field.
* The action for a NACK (immediate retransmission) and the R flag that
  queues early retransmissions.
* The destination MAC of outgoing frames is the source MAC of the last START
  command.
* Header fields are big-endian, data words little-endian, and the destination
  MAC comes first. A table of the original layout lists the source MAC first;
  the standard Ethernet order is used here.
* The thresholds, window and step of the delay adaptation. The delay is
  counted in `sys_clk` cycles after each frame. The delay field of incoming
  ACKs is ignored.
* Only one command waits for the command processor at a time. Another one
  arriving meanwhile is dropped, and the host's resend recovers it.
* XGMII framing: start only in lane 0, two idle words between frames. Frames
  with errors are dropped silently and counted in `bad_frames`. When the FIFO
  is full, entries are dropped.
* There is no retransmission timer. Retransmission comes only from the
  round-robin browse, early retransmission and NACK.
* The 1 Gbps variant, with a byte-wide GMII interface, is not included.

## Simulating

Every testbench is self-checking. It prints `TB_RESULT checks=N failures=M`
and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_fade10g_core rtl/fade_pkg.sv tb/fade_tb_pkg.sv tb/tb_fade10g_core.sv
./obj_dir/Vtb_fade10g_core
```

Replace the top module and file for the other benches:

| Testbench | What it shows |
|---|---|
| `tb_fade10g_core` | End to end at the default size, with four unrelated clocks and a host model. It streams more than 200 packets and checks every word. It injects lost data frames, lost ACKs, a NACK, a lossy phase and a corrupted frame. It runs user commands with resends, then STOP with a partial last packet, an ACK that must raise `proto_error`, and RESET. Each of these mechanisms is counted and must occur at least once. Takes about 10 s. |
| `tb_fade10g_rate` | Loss-free streaming at the default size, with `user_clk` tied to `sys_clk`. Measures the payload rate on the wire against the 10 Gbps line rate. Runs commands back to back during streaming and measures commands per second. |
| `tb_descriptor_manager` | Scripted scenarios at 4 slots × 8 words: ring full, ordering and sequence numbers, the early-retransmission example above, NACK, response-only and piggy-backed responses, STOP flush, the delay model, protocol error. |
| `tb_packet_sender` | Frame bytes, FCS (checked with an independent bit-serial CRC), lengths, cycle counts. |
| `tb_packet_receiver` | All frame kinds, every terminate lane, bad FCS, wrong MAC, wrong EtherType, full FIFO. |
| `tb_cdc_handshake` | The command/response clock crossing, with a slower and a faster destination clock and with one shared clock. Random stalls on both sides. Checks order, content, one record in flight at a time, and at most 4 destination cycles to `d_valid`. |
| `tb_command_processor` | Exactly-once execution with resent CSNs. |
| `tb_ack_cmd_fifo`, `tb_cmd_status_sync`, `tb_packet_buffer_mem` | Clock-domain crossings and memory. |

The host side of the testbenches is in `tb/fade_tb_pkg.sv`, which builds
frames and computes the CRC, and `tb/fade_xgmii_mon.sv`, which reassembles
frames.

## How far to trust it

* All blocks pass their testbenches. The end-to-end bench runs at the
  default parameters.
* Nothing has been tried on hardware or against the real Linux driver. The
  command codes and the response filler word above must match whatever host
  software is used.
* Clock-domain crossings use standard two-flop synchronisers and Gray-coded
  pointers. Simulation with unrelated clocks exercises them, but it cannot
  prove metastability safety; constrain them in the FPGA tools.
* Resets are synchronous in every domain, and the reset synchronisers power
  up asserted.
