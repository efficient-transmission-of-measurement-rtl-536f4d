// desc_manager: the descriptor manager. It stores the incoming data stream
// in the packet buffers memory and decides which buffer is (re)sent when.
//
// State: for each of the NPKTS packet buffers a descriptor with the flags
// V (filled), S (sent at least once), C (confirmed by the receiver) and the
// set number of the data it holds; and three buffer pointers:
//   head - buffer currently being filled from the input,
//   tail - oldest filled buffer not yet confirmed (= head when none),
//   retr - next buffer to (re)transmit.
// The i-th packet of every set lives in buffer i; head_set is the set
// number of the buffer at head and increments when head wraps to buffer 0.
//
// Input: a FIFO-like write port. While dta_ready is high each dta_we writes
// one 32-bit word at {head, word counter}. The last word of a buffer sets
// V and drops dta_ready.
//
// A single state machine serves, one task per cycle, in decreasing
// priority:
//  1. acknowledges: pop an entry of the acknowledge/commands FIFO. An ACK
//     whose set number equals the descriptor's sets C; if it hit the tail
//     buffer, tail then advances one buffer per cycle over confirmed
//     buffers until a non-confirmed one or head. START (re)initialises all
//     descriptors and pointers to set 0 / buffer 0, reloads the
//     congestion-avoidance delay and enables input and transmission. STOP
//     disables both.
//  2. head: when the head buffer is filled and the next buffer is not the
//     tail, head advances, the new head descriptor is cleared and stamped
//     with its set number, and dta_ready rises again. While the next buffer
//     is still the tail, the input stays stalled and the cycle goes to
//     task 3 (otherwise nothing could ever free the tail).
//  3. transmission: when retr points to a buffer with V=1 and C=0, the
//     packet sender is idle and the inter-packet delay has elapsed, the
//     buffer is ordered for transmission, S is set, the congestion
//     avoidance is told (sent, and resent if S was already set) and retr
//     advances. A buffer that is not V=1/C=0 is stepped over, one per cycle.
//     retr wraps from head back to tail, so unconfirmed packets are resent
//     round-robin. If retr has fallen outside [tail, head) because tail
//     moved past it, it is reset to tail.
// The transmission order goes to the packet sender, in the Ethernet clock
// domain, over a two-phase toggle handshake: tx_req_tgl toggles with the
// order held stable in tx_order, and the sender toggles tx_done_tgl back
// (synchronized into this domain before it reaches this module) when the
// frame has been handed to the MAC. The delay counts system clock cycles
// from one order to the next.
//
// From the paper: the descriptor contents, the three pointers and their
// rules, the task priorities, the 32 buffers of 1024 bytes, the 32-bit input
// and the resend counting. Design choices: the tail stops at the first
// buffer with C=0 (the paper says "sent but not confirmed"; stopping also at
// a not-yet-sent buffer keeps it from being skipped), retr steps one buffer
// per cycle, START discards buffered data and restarts from set 0, the input
// is not ready while transmission is stopped, and the delay is counted
// start-to-start. pbm_wdata is dta itself: the input word goes straight to
// the RAM, and only the address is this module's. tx_order.buf_no is as wide
// as the packet-number field of the label, so with 32 buffers its top bit
// is always 0.
module desc_manager
  import l3fade_pkg::*;
#(
  parameter int unsigned NPKTS     = 32,
  parameter int unsigned PKT_BYTES = 1024,
  parameter int unsigned DATA_W    = 32,
  localparam int unsigned PW       = $clog2(NPKTS),
  localparam int unsigned WPP      = PKT_BYTES / (DATA_W / 8),
  localparam int unsigned WW       = $clog2(WPP),
  localparam int unsigned AW       = PW + WW
) (
  input  logic               clk,
  input  logic               rst_n,
  // data input
  input  logic [DATA_W-1:0]  dta,
  input  logic               dta_we,
  output logic               dta_ready,
  // packet buffers memory, write port
  output logic               pbm_we,
  output logic [AW-1:0]      pbm_waddr,
  output logic [DATA_W-1:0]  pbm_wdata,
  // acknowledge and commands FIFO, read side
  input  cmd_t               cmd_data,
  input  logic               cmd_empty,
  output logic               cmd_rd_en,
  // packet sender (toggle handshake)
  output logic               tx_req_tgl,
  input  logic               tx_done_tgl,
  output tx_order_t          tx_order,
  // congestion avoidance
  input  logic [DELAY_W-1:0] delay,
  output logic               nca_restart,
  output logic               nca_sent,
  output logic               nca_resent,
  // status
  output logic               running,
  output dm_events_t         ev
);
  // descriptors
  logic [NPKTS-1:0] d_v, d_s, d_c;
  logic [SET_W-1:0] d_set [NPKTS];

  logic [PW-1:0]    head, tail, retr;
  logic [SET_W-1:0] head_set;
  logic [WW-1:0]    wcnt;
  logic             tail_moving;
  logic [DELAY_W-1:0] dly_cnt;

  logic [PW-1:0] head_nxt, tail_nxt, retr_nxt;
  logic          retr_in_win, tx_idle, ack_pkt_ok;
  logic          wr_acc;

  assign head_nxt = head + PW'(1);
  assign tail_nxt = tail + PW'(1);
  assign retr_nxt = retr + PW'(1);
  // retr lies in the window of filled buffers [tail, head)
  assign retr_in_win = PW'(retr - tail) < PW'(head - tail);
  assign tx_idle     = (tx_req_tgl == tx_done_tgl);
  assign ack_pkt_ok  = (cmd_data.pkt_no < PKTNO_W'(NPKTS));

  // input write port
  assign wr_acc    = dta_we && dta_ready;
  assign pbm_we    = wr_acc;
  assign pbm_waddr = {head, wcnt};
  assign pbm_wdata = dta;

  // the FIFO is popped whenever the acknowledge task takes an entry
  assign cmd_rd_en = !tail_moving && !cmd_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_v         <= '0;
      d_s         <= '0;
      d_c         <= '0;
      for (int i = 0; i < NPKTS; i++) d_set[i] <= '0;
      head        <= '0;
      tail        <= '0;
      retr        <= '0;
      head_set    <= '0;
      wcnt        <= '0;
      tail_moving <= 1'b0;
      dly_cnt     <= '0;
      dta_ready   <= 1'b0;
      running     <= 1'b0;
      tx_req_tgl  <= 1'b0;
      tx_order    <= '0;
      nca_restart <= 1'b0;
      nca_sent    <= 1'b0;
      nca_resent  <= 1'b0;
      ev          <= '0;
    end else begin
      nca_restart <= 1'b0;
      nca_sent    <= 1'b0;
      nca_resent  <= 1'b0;
      ev          <= '0;
      if (dly_cnt != '0) dly_cnt <= dly_cnt - DELAY_W'(1);

      // ---- input: fill the head buffer
      if (wr_acc) begin
        wcnt <= wcnt + WW'(1);
        if (wcnt == WW'(WPP - 1)) begin
          d_v[head] <= 1'b1;
          dta_ready <= 1'b0;
        end
      end

      // ---- task 1: acknowledges and commands (with tail movement)
      if (tail_moving) begin
        if (tail == head || !d_c[tail]) tail_moving <= 1'b0;
        else                            tail        <= tail_nxt;
      end else if (!cmd_empty) begin
        unique case (cmd_data.kind)
          CMD_ACK: begin
            if (ack_pkt_ok && d_set[PW'(cmd_data.pkt_no)] == cmd_data.set_no) begin
              d_c[PW'(cmd_data.pkt_no)] <= 1'b1;
              ev.ack_ok <= 1'b1;
              if (PW'(cmd_data.pkt_no) == tail) tail_moving <= 1'b1;
            end else begin
              ev.ack_bad <= 1'b1;
            end
          end
          CMD_START: begin
            d_v         <= '0;
            d_s         <= '0;
            d_c         <= '0;
            d_set[0]    <= '0;
            head        <= '0;
            tail        <= '0;
            retr        <= '0;
            head_set    <= '0;
            wcnt        <= '0;
            dly_cnt     <= '0;
            dta_ready   <= 1'b1;
            running     <= 1'b1;
            nca_restart <= 1'b1;
          end
          CMD_STOP: begin
            running   <= 1'b0;
            dta_ready <= 1'b0;
          end
          default: ;
        endcase

      // ---- task 2: move head past a filled buffer
      // (a head that must wait for the tail does not take the cycle)
      end else if (running && d_v[head] && !dta_ready && head_nxt != tail) begin
        head            <= head_nxt;
        d_v[head_nxt]   <= 1'b0;
        d_s[head_nxt]   <= 1'b0;
        d_c[head_nxt]   <= 1'b0;
        d_set[head_nxt] <= (head_nxt == '0) ? head_set + SET_W'(1) : head_set;
        if (head_nxt == '0) head_set <= head_set + SET_W'(1);
        dta_ready       <= 1'b1;
        ev.head_move    <= 1'b1;

      // ---- task 3: transmission and retransmission
      end else if (running && head != tail) begin
        ev.head_stall <= d_v[head] && !dta_ready;
        if (!retr_in_win) begin
          retr <= tail;
        end else if (d_v[retr] && !d_c[retr]) begin
          if (tx_idle && dly_cnt == '0) begin
            tx_order.buf_no <= PKTNO_W'(retr);
            tx_order.set_no <= d_set[retr];
            tx_order.delay  <= delay;
            tx_req_tgl      <= ~tx_req_tgl;
            d_s[retr]       <= 1'b1;
            nca_sent        <= 1'b1;
            nca_resent      <= d_s[retr];
            ev.sent         <= 1'b1;
            ev.resent       <= d_s[retr];
            dly_cnt         <= delay;
            retr            <= (retr_nxt == head) ? tail : retr_nxt;
            ev.retr_wrap    <= (retr_nxt == head);
          end
        end else begin
          retr         <= (retr_nxt == head) ? tail : retr_nxt;
          ev.retr_wrap <= (retr_nxt == head);
        end
      end
    end
  end

  // The input must respect dta_ready; a write while not ready is lost.
  a_we_ready: assert property (@(posedge clk) disable iff (!rst_n) dta_we |-> dta_ready)
    else $error("desc_manager: dta_we while dta_ready is low");
  // head never runs onto tail from behind
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
                                 ev.head_move |-> head != tail || !d_v[tail])
    else $error("desc_manager: head overran tail");
endmodule
