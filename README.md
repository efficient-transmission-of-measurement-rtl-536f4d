# Reliable data streaming from a small FPGA over raw Ethernet

A front-end board of a data acquisition system produces a continuous stream of
measurement data and has to deliver it, without loss, to a Linux computer a
switch away. TCP/IP would need a CPU and a large retransmission buffer in the
FPGA. This core avoids both. It sends the data in raw Ethernet frames of type
`0xfade`. The receiving computer acknowledges every frame at once, and
unacknowledged frames are sent again from a small on-chip buffer.

The buffer needed for retransmission is the product of transmission rate and
acknowledge latency. With the receiver on the same Ethernet segment, and its
kernel answering within microseconds, 32 KiB of block RAM is enough to keep a
1 Gb/s link busy. An adaptive gap between frames keeps the board from flooding
a switch or a slow receiver.

This RTL implements the FPGA side of the protocol described by W. M.
Zabołotny in "Efficient transmission of measurement data from FPGA to
embedded system via Ethernet link". The block structure, descriptor rules,
frame codes, buffer sizes and congestion-avoidance algorithm come from that
description. Everything the description leaves open was chosen here; those
choices are listed in the section "Choices made here".

## The protocol

There are four frame kinds. After the 14-byte Ethernet header (destination,
source, type `0xfade`), each frame carries a 16-bit operation code:

| frame | direction | opcode | rest of the frame |
|-------|-----------|--------|-------------------|
| START | computer → board | `0x0001` | padding |
| STOP  | computer → board | `0x0005` | padding |
| ACK   | computer → board | `0x0003` | 32-bit label, padding |
| DATA  | board → computer | `0xa5a5` | 32-bit label, 32-bit delay, 1024 data bytes |

The **label** identifies a packet. Bits 31:16 hold the 16-bit *set number*,
bits 15:10 the 6-bit *packet number*, and bits 9:0 a retry number, which is
always 0. A *set* is 32 consecutive packets, one per packet buffer. The
**delay** field reports the gap between frames that the board is currently
using, in system clock cycles.

A DATA frame is 1048 bytes long, before the MAC adds its preamble and FCS.
The first payload byte is bits 31:24 of the first input word.

The computer acknowledges each DATA frame with an ACK frame that carries the
same label. If a frame or its ACK is lost, the board sends the packet again.
A repeated packet is acknowledged again by the computer, which ignores its
data. START and STOP are not acknowledged: the computer sees whether data
arrive. The board sends DATA frames to the address that sent the last START.

## Structure

```
            sys_clk domain                       |        eth_clk domain
                                                 |
 dta, dta_we ──► desc_manager ──(write)──► pkt_buf_mem ──(read)──► pkt_sender ──► tx stream ──► MAC
 dta_ready  ◄──   │  ▲   ▲                       |                   ▲
                  │  │   └── tx order, toggle handshake ─────────────┘
       nca_ctrl ◄─┘  │                           |
     (delay) ────────┘◄── ack_cmd_fifo ◄─────────┼──── pkt_receiver ◄── rx stream ◄── MAC
                          (async FIFO)           |
```

| module | role |
|--------|------|
| `l3fade_top` | the core; its ports are the data input and the MAC client streams |
| `desc_manager` | packet descriptors, head/tail/retr pointers, decides what is sent and when |
| `nca_ctrl` | congestion avoidance: adapts the inter-packet delay |
| `pkt_buf_mem` | 32 × 1024-byte packet buffers, dual-clock RAM |
| `ack_cmd_fifo` | asynchronous FIFO carrying ACK/START/STOP from the receiver |
| `pkt_sender` | builds DATA frames from an order and a buffer |
| `pkt_receiver` | decodes ACK/START/STOP frames addressed to this board |
| `bit_sync` | two-flop synchronizer (helper) |
| `l3fade_pkg` | opcodes, label and FIFO entry types, event struct |

There are two clock domains. The data input, the descriptor manager and the
congestion avoidance run on `sys_clk`. The frame engines and the MAC client
streams run on `eth_clk`. The domains meet in three places:

- the dual-clock packet RAM;
- the Gray-pointer FIFO of commands;
- a two-phase toggle handshake for transmit orders. The descriptor manager
  holds the order (buffer, set number, delay) stable until the sender toggles
  back, so only the toggle needs a synchronizer.

The Ethernet MAC is not part of the core. It does the framing, padding, FCS
and the PHY interface.

## The descriptor manager

This block decides correctness, and it is the part to understand before
changing anything.

### Buffers, sets and descriptors

The packet RAM holds 32 buffers. Packet *i* of every set is stored in buffer
*i*. The buffer index therefore equals the packet number, and the RAM address
of a word is simply `{buffer, word}`. At any time the buffers hold packets from
one set, or from the end of one set and the start of the next. A packet's
global number is `g = set × 32 + buffer`.

Each buffer has a descriptor with three flags and a set number:

- **V**: the buffer is completely filled;
- **S**: the packet has been sent at least once;
- **C**: the receiver has confirmed the packet.

There are three pointers:

- **head**: the buffer being filled from the input;
- **tail**: the oldest filled buffer that is not yet confirmed, or equal to
  head when nothing is outstanding;
- **retr**: the next buffer to send or resend.

The buffers from tail up to, but not including, head are the *window* of
packets that may still have to be sent.

### Filling

While `dta_ready` is high, each `dta_we` writes one 32-bit word at
`{head, word counter}`. The 256th word sets V and drops `dta_ready`.

### The three tasks

One state machine does one task per cycle. The tasks are checked in this
order:

1. **Acknowledges and commands.**
   - **ACK:** an entry is taken from the command FIFO. If the ACK's set number
     equals the set number in the descriptor of its packet number, C is set.
     Otherwise the ACK is stale and is discarded. If the confirmed buffer is
     the tail, the tail then steps forward one buffer per cycle. It stops at
     the first unconfirmed buffer, or at head. Tail stepping counts as part of
     this task.
   - **START** resets all descriptors and pointers to set 0, buffer 0, reloads
     the start delay, and enables input and transmission.
   - **STOP** disables input and transmission.
2. **Head.** When the head buffer is full and the next buffer is not the
   tail, head advances. The new head descriptor is cleared and stamped with
   the current set number; the set number increments when head wraps to
   buffer 0. Then `dta_ready` rises. If the next buffer is the tail, the input
   stays stalled. The cycle then goes to task 3, because only transmission
   can lead to the tail moving.
3. **Transmission.** If retr points to a buffer with V=1 and C=0, the sender
   is idle and the delay has run out, then:
   - the buffer is ordered for transmission;
   - S is set;
   - the congestion avoidance is told "sent", and also "resent" if S was
     already set;
   - retr moves on.

   Buffers that are confirmed are stepped over, one per cycle. When retr
   reaches head it wraps to tail. If the tail has moved past retr, retr is
   put back to tail.

### Retransmission without timers

No timeout is involved. retr keeps cycling through the window, so every
unconfirmed packet is sent again once per round. One round takes at least
(window size × inter-packet delay). A packet is resent only if its ACK has not
arrived within that time. The acknowledge latency must therefore stay well
below the delay times the number of outstanding packets, or the congestion
avoidance sees every packet as resent and increases the delay. This is how
the mechanism adapts to a slow receiver.

### Example

The input fills buffers 0–4 of set 0. Frames for all five are sent, and the
frame of packet 2 is lost.

1. ACKs for 0, 1, 3 and 4 arrive. The ACK for 0 moves the tail to 1. The ACK
   for 1 moves it to 2, where it stops because C=0.
2. retr, now wrapped to the tail, finds packet 2 still unconfirmed and sends
   it again. The resent counter counts it.
3. Its ACK moves the tail over 2, 3 and 4 to head.
4. If the source kept writing meanwhile, head runs at most to the buffer just
   before the tail (31 outstanding packets), and then `dta_ready` stays low.

### Buffer reuse while a frame is being sent

The sender reads a buffer while it transmits the frame. During a
retransmission, an ACK from the earlier copy can confirm the packet, and head
may reach that buffer and start overwriting it before the frame ends. The
frame then carries mixed data under the old label. The computer has already
stored that packet, so it acknowledges the frame and drops its contents.
Nothing is lost. A receiver that checks data without checking the label first
must take this into account.

## Congestion avoidance (`nca_ctrl`)

Every ordered transmission increments the sent counter. A retransmission
(S already set) also increments the resent counter.

When the sent counter reaches `N_UPDATE`, the ratio resent/sent is compared
with two thresholds:

- ratio above `T_high`: the delay is multiplied by `α_incr > 1`;
- ratio below `T_low`: the delay is multiplied by `α_decr < 1`;
- exactly at a threshold: the delay is unchanged.

Both counters then restart from 0. START reloads the starting delay of 200 µs.

The thresholds and factors are powers of two, so the hardware needs only
shifts and one adder:

| parameter | meaning | default | value |
|-----------|---------|---------|-------|
| `N_UPDATE` | packets per decision | 3000 | |
| `T_HIGH_SH` | T_high = 2^-k | 4 | 1/16 |
| `T_LOW_SH` | T_low = 2^-k | 6 | 1/64 |
| `INCR_SH` | α_incr = 1 + 2^-k | 2 | 1.25 |
| `DECR_SH` | α_decr = 1 − 2^-k | 4 | 0.9375 |

These defaults are the setting used for the published throughput
measurements. The alternative setting that was also tested (10000, 1/8, 1/32,
1.25, 0.75) is `N_UPDATE=10000, T_HIGH_SH=3, T_LOW_SH=5, INCR_SH=2,
DECR_SH=2`.

The ratio test is done without division: it compares `resent << k` with
`sent`. The delay is counted in `sys_clk` cycles. With `CLK_HZ` = 100 MHz the
start value is 20000 cycles. Because the shifted term is truncated, the delay
stops falling once `delay >> DECR_SH` is 0, which is at 15 cycles for the
default. An increase saturates at 2^32−1.

## Interfaces and timing

**Data input** (`sys_clk`): `dta[31:0]`, `dta_we`, `dta_ready`. This is a
FIFO-style write port; write only while `dta_ready` is high. `dta_ready` is
low before START, after STOP, after each 256th word until head has advanced
(at least one cycle), and while all 31 other buffers are outstanding.

**MAC transmit stream** (`eth_clk`): `tx_data[7:0]`, `tx_valid`, `tx_last`,
`tx_ready`. A byte moves when `tx_valid && tx_ready`. A frame is 1048
consecutive bytes with no gaps while `tx_ready` stays high. The packet RAM is
read one word ahead, so the next word is ready before the fourth byte of the
current one leaves.

**MAC receive stream** (`eth_clk`): `rx_data[7:0]`, `rx_valid`, `rx_last`,
`rx_err`. `rx_err` is sampled with the last byte and marks a bad frame.

- A frame is used only if it has at least 20 bytes, is addressed to `my_mac`,
  has type `0xfade` and is not marked bad.
- Its FIFO entry is written one cycle after the last byte.
- If the FIFO is full, the entry is dropped and `rx_drop` pulses. A dropped
  ACK costs one retransmission.

**Latencies:**

- An ACK reaches the descriptor manager about 3 `sys_clk` cycles after the
  FIFO write.
- A transmit order reaches the sender 2 `eth_clk` cycles after it is issued,
  and the first byte follows one cycle later.
- The sender's completion toggle takes 2 `sys_clk` cycles to return.
- Orders are at least `delay` `sys_clk` cycles apart, counted start to start.
  They are also never closer than one frame time, since the sender must be
  idle.

**Status:**

- `running`;
- `delay`, the current inter-packet delay;
- `dm_ev`, one-cycle pulses: ACK accepted, ACK discarded, head moved, input
  stalled, sent, resent, retr wrapped;
- `nca_incr` and `nca_decr`;
- `rx_drop`.

**Reset:** `sys_rst_n` and `eth_rst_n` are asynchronous and active low. After
reset the core is stopped and waits for START.

## Parameters of `l3fade_top`

| parameter | default | origin |
|-----------|---------|--------|
| `NPKTS` | 32 | published design (power of two required) |
| `PKT_BYTES` | 1024 | published design (power of two, multiple of 4) |
| `CLK_HZ` | 100 000 000 | chosen here; only scales the 200 µs start delay |
| `INIT_DELAY_US` | 200 | published design |
| `N_UPDATE`, `*_SH` | see above | published design |
| `FIFO_DEPTH` | 16 | chosen here |

At the defaults the packet RAM is 8192 × 32 bits (32 KiB), which is 16
RAMB16-class block RAMs. The packet number field has room for 64 buffers.

## Choices made here

The published description gives the blocks, the descriptor rules, the frame
codes and the congestion algorithm. It leaves the following open, and this
design decides them as stated:

- **Header order.** The protocol table lists the source address before the
  target address. This design sends destination first, as every Ethernet
  frame must, and reads the table as a list of fields.
- **Field layout.** The bit layout of the label, the 32-bit width of the delay
  field, and its unit (system clock cycles) are chosen here.
- **Tail rule.** The description stops the tail at the first buffer that is
  "sent but not confirmed". Here it stops at the first unconfirmed buffer,
  sent or not, so that a filled but not yet sent buffer can never be passed
  over and lost.
- **Head stall.** The description lists the three tasks in strict priority.
  Here, a head that is waiting for the tail does not use up the cycle.
  Otherwise a full buffer ring would block task 3 forever, and nothing would
  ever move the tail.
- **retr correction.** The description says only that retr must be corrected
  when the packet it points to is confirmed. Here, retr outside the window is
  set to the tail.
- **START and STOP.** START restarts the stream at set 0 and discards whatever
  was buffered. No data is accepted while the core is stopped. The
  description says only that START and STOP begin and end the transmission.
- **Host address.** The destination of DATA frames is taken from the last
  START frame. Frames not addressed to `my_mac` are ignored.
- **Interfaces.** The clock split, the toggle handshake, the FIFO depth, the
  MAC stream interfaces and the byte order (most significant byte first) are
  chosen here. The original design used an existing open-source MAC whose
  interface is not described.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it establishes |
|-----------|---------------------|
| `tb_pkt_buf_mem` | full-size RAM across two clocks; one-cycle read latency |
| `tb_ack_cmd_fifo` | ordering and no loss across unrelated clocks; full at exactly 16; drain to empty |
| `tb_nca_ctrl` | delay after each window against an integer reference, including both threshold boundaries; restart; event pulses |
| `tb_pkt_sender` | every byte of DATA frames from a full-size RAM; `tx_last`; 1048-cycle gap-free frames; random MAC stalls; handshake |
| `tb_pkt_receiver` | START/STOP/ACK decoding; rejects wrong address, type, bad frames, short frames, unknown opcodes and DATA; host address learning; drop when full |
| `tb_desc_manager` | descriptor manager against a protocol model (details below) |
| `tb_l3fade_top` | whole core at reduced size with a behavioural receiving computer (details below) |
| `tb_l3fade_full` | whole core at default parameters (details below) |
| `tb_nca_setting2` | congestion avoidance with the second published setting, at full window size (details below) |
| `tb_three_boards` | three cores sharing one receiver (details below) |

`tb_desc_manager` checks:

- the address of every written word;
- that only filled, unconfirmed packets whose buffer still holds their data
  are sent;
- the resent flag;
- the minimum spacing between orders;
- the input stall under a slow host;
- quiet operation after STOP, and restart at packet 0 after START;
- complete delivery, with 10 % of ACKs lost, ACKs arriving out of order,
  repeated ACKs and stale ACKs.

`tb_l3fade_top` (64-byte packets, 1 MHz delay clock, windows of 64) checks:

- loss-free streaming, after which the delay falls;
- 30 % loss, after which the delay rises and packets are resent;
- STOP, then a fresh START;
- complete delivery checked word by word;
- that frame gaps are never shorter than the reported delay.

It also requires each mechanism to occur at least once: retransmission, delay
increase and decrease, input stall, discarded ACK, ring wrap, retr wrap and
MAC back-pressure.

`tb_l3fade_full` runs with every parameter at its default: START, 40 packets
(the ring wraps into set 1), one frame lost and resent, and STOP. It checks
that the reported delay is 20000, that frames are at least 200 µs apart, and
that all data arrive intact.

`tb_nca_setting2` uses windows of 10000, thresholds 1/8 and 1/32, and
factors 1.25 and 0.75. It checks the delay after each window against an
integer reference, including the exact boundaries 1250/10000, 312/10000 and
313/10000.

`tb_three_boards` recreates the published test setup in compressed time.
Two boards run on 1 Gb/s links and one on a 100 Mb/s link. All three send
through a switch to one computer whose processing budget is 640 Mb/s, roughly
the total measured in the original tests. An overloaded receiver drops
frames. The test runs seven phases, one for each combination of active
boards. Every board is stopped, and the boards of the next combination are
started. To reach a steady state within a phase of 16 ms, the
congestion-avoidance window is 32 packets and the start delay is 20 µs.

Each phase checks:
- every active stream arrives complete and intact;
- stopped boards stay silent;
- the budget is not exceeded, and is used to at least half of what the
  active links could carry;
- the slow board is not starved.

A typical run (Mb/s):

| active boards | 1 Gb/s #0 | 1 Gb/s #1 | 100 Mb/s | total |
|---------------|-----------|-----------|----------|-------|
| all three     | 286 | 286 | 56 | 628 |
| both 1 Gb/s   | 287 | 287 | –  | 573 |
| one 1 Gb/s and 100 Mb/s | 557 | – | 75 | 632 |
| one 1 Gb/s alone | 600 | – | – | 600 |
| 100 Mb/s alone | – | – | 98 | 98 |

In the original measurements, the 100 Mb/s board reached about 95 Mb/s in
every combination. Two fast boards together did slightly better than one
alone. Neither effect is reproduced exactly here. The limit is the receiver,
and the receiver model is a simple budget, not a real computer.

`tb/host_model.sv` is a behavioural stand-in for the receiving computer and
its protocol handler. `tb/tb_pkg.sv` holds the data pattern,
`datum(k) = k·0x9e3779b1 ⊕ 0x5a5a0000`.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/l3fade_pkg.sv tb/tb_pkg.sv tb/tb_l3fade_top.sv --top-module tb_l3fade_top
./obj_dir/Vtb_l3fade_top
```

Replace `tb_l3fade_top` with any other testbench name. Most finish in a few
seconds. `tb_l3fade_full` simulates about 8 ms of operation.
`tb_three_boards` simulates 119 ms of three cores and takes about half a
minute.

## How far to trust it

- The RTL is checked in simulation only. It has not been run against a real
  MAC, switch or Linux receiver.
- The clock-domain crossings follow standard patterns: a Gray-code FIFO, a
  toggle handshake with 2-flop synchronizers, and a held order bus. They are
  exercised with unrelated clock periods. The two-state simulator cannot show
  metastability.
- The throughput reported for the original system (about 550 Mb/s per 1 Gb/s
  board and 95 Mb/s on 100 Mb/s) depended on the receiving computer, so it is
  not a property of this RTL. A frame of 1048 bytes plus 24 bytes of preamble,
  FCS and gap carries 1024 payload bytes, which bounds the payload at about
  955 Mb/s with a 125 MHz byte-wide MAC interface.
- The mixed-data frame case described under "Buffer reuse while a frame is
  being sent" is not covered by a test.
