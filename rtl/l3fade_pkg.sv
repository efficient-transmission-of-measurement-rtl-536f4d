// l3fade_pkg: constants and types shared by the blocks of the packet
// transmitter core.
//
// Protocol constants: every frame of the protocol carries the Ethernet type
// 0xfade, followed by a 16-bit operation code: 0x0001 START, 0x0005 STOP,
// 0x0003 ACK (all sent by the receiving computer) and 0xa5a5 DATA (sent by
// the core). DATA and ACK frames carry a 32-bit packet label made of the
// 16-bit set number, a 6-bit packet number and a 10-bit retry number that is
// always zero. The codes, the 16/6/10 bit split and the 1024-byte payload
// follow the paper; the order of the three fields inside the 32-bit label,
// and the 32-bit size of the delay field of a DATA frame, are this design's
// own choices.
//
// Frame layout used on the MAC client streams (byte offsets, the MAC adds
// preamble, padding and FCS):
//   0..5  destination MAC   6..11 source MAC   12..13 0xfade   14..15 opcode
//   DATA: 16..19 label, 20..23 delay, 24..1047 payload (32-bit words, MSB first)
//   ACK : 16..19 label, then padding
package l3fade_pkg;

  localparam logic [15:0] ETH_TYPE_FADE = 16'hfade;

  typedef enum logic [15:0] {
    OP_START = 16'h0001,
    OP_ACK   = 16'h0003,
    OP_STOP  = 16'h0005,
    OP_DATA  = 16'ha5a5
  } opcode_e;

  localparam int unsigned SET_W   = 16;  // set number width
  localparam int unsigned PKTNO_W = 6;   // packet number field width
  localparam int unsigned RETRY_W = 10;  // retry number field width (unused, sent as 0)
  localparam int unsigned DELAY_W = 32;  // width of the delay field of a DATA frame

  localparam int unsigned HDR_BYTES  = 24;  // DATA frame bytes before the payload
  localparam int unsigned MIN_RX_LEN = 20;  // bytes needed to decode START/STOP/ACK

  // 32-bit packet label as carried in DATA and ACK frames.
  typedef struct packed {
    logic [SET_W-1:0]   set_no;
    logic [PKTNO_W-1:0] pkt_no;
    logic [RETRY_W-1:0] retry;
  } pkt_label_t;

  // Entry of the acknowledge and commands FIFO.
  typedef enum logic [1:0] {
    CMD_ACK   = 2'd0,
    CMD_START = 2'd1,
    CMD_STOP  = 2'd2
  } cmd_kind_e;

  typedef struct packed {
    cmd_kind_e          kind;
    logic [SET_W-1:0]   set_no;
    logic [PKTNO_W-1:0] pkt_no;
  } cmd_t;

  localparam int unsigned CMD_W = $bits(cmd_t);

  // Transmission order from the descriptor manager to the packet sender.
  typedef struct packed {
    logic [PKTNO_W-1:0] buf_no;   // packet buffer (= packet number)
    logic [SET_W-1:0]   set_no;
    logic [DELAY_W-1:0] delay;    // current inter-packet delay, reported in the frame
  } tx_order_t;

  // One-cycle event pulses of the descriptor manager, for monitoring.
  typedef struct packed {
    logic ack_ok;      // ACK matched a descriptor, C flag set
    logic ack_bad;     // ACK discarded (set number or packet number mismatch)
    logic head_move;   // head pointer advanced to a free buffer
    logic head_stall;  // filled head buffer waits: next buffer still at tail
    logic sent;        // a transmission was ordered
    logic resent;      // ... and it was a retransmission (S was already 1)
    logic retr_wrap;   // retr pointer reached head and wrapped to tail
  } dm_events_t;

endpackage
