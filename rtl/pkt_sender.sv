// pkt_sender: the packet sender. It turns one transmission order of the
// descriptor manager into one DATA frame on the MAC client transmit stream,
// reading the payload from the packet buffers memory.
//
// Orders arrive over a two-phase toggle handshake from the system clock
// domain: tx_req_tgl is synchronized here; when it differs from tx_done_tgl
// the sender is asked for a frame, and the order (tx_order) is stable and
// may be sampled. When the last byte of the frame has been accepted by the
// MAC, tx_done_tgl is set equal to the request toggle, which tells the
// descriptor manager that the transmitter is free again.
//
// Frame (1048 bytes): host MAC, own MAC, 0xfade, 0xa5a5, 32-bit label
// {set number, packet number, retry=0}, 32-bit delay, then the 256 words
// of the buffer, most significant byte first. Every byte is presented with
// tx_valid and moves on when tx_ready is high; tx_last marks the final
// byte. There are no gaps inside a frame: the memory (one cycle read
// latency) is addressed one word ahead of the word being shifted out, so
// the next word is ready before the fourth byte of the current one leaves.
//
// The frame content follows the paper's DATA packet; the byte order, the
// field widths of label and delay, the handshake and the stream interface
// are this design's choices (the paper uses an OpenCores MAC whose client
// interface it does not describe).
module pkt_sender
  import l3fade_pkg::*;
#(
  parameter int unsigned NPKTS     = 32,
  parameter int unsigned PKT_BYTES = 1024,
  parameter int unsigned DATA_W    = 32,
  localparam int unsigned PW       = $clog2(NPKTS),
  localparam int unsigned WPP      = PKT_BYTES / (DATA_W / 8),
  localparam int unsigned WW       = $clog2(WPP),
  localparam int unsigned AW       = PW + WW,
  localparam int unsigned FRAME    = HDR_BYTES + PKT_BYTES,
  localparam int unsigned BW       = $clog2(FRAME)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [47:0]       my_mac,
  input  logic [47:0]       host_mac,
  // order from the descriptor manager
  input  logic              tx_req_tgl,
  output logic              tx_done_tgl,
  input  tx_order_t         tx_order,
  // packet buffers memory, read port
  output logic [AW-1:0]     pbm_raddr,
  input  logic [DATA_W-1:0] pbm_rdata,
  // MAC client transmit stream
  output logic [7:0]        tx_data,
  output logic              tx_valid,
  output logic              tx_last,
  input  logic              tx_ready
);
  logic              req_s;
  logic              busy;
  logic [BW-1:0]     bcnt;
  logic [PW-1:0]     buf_no;
  logic [HDR_BYTES*8-1:0] hdr;
  logic [DATA_W-1:0] cur_word;
  logic              in_hdr, acc;
  logic [BW-1:0]     pcnt;       // payload byte index
  logic [WW-1:0]     widx;
  logic [1:0]        lane;
  pkt_label_t        label;

  bit_sync u_req_sync (.clk, .rst_n, .d(tx_req_tgl), .q(req_s));

  assign in_hdr = (bcnt < BW'(HDR_BYTES));
  assign pcnt   = bcnt - BW'(HDR_BYTES);
  assign widx   = pcnt[WW+1:2];
  assign lane   = pcnt[1:0];
  assign acc    = busy && tx_ready;

  assign tx_valid = busy;
  assign tx_last  = busy && (bcnt == BW'(FRAME - 1));
  assign tx_data  = in_hdr ? hdr[HDR_BYTES*8-1 - 8*bcnt -: 8]
                           : cur_word[DATA_W-1 - 8*lane -: 8];
  // one word ahead of the word being sent
  assign pbm_raddr = {buf_no, in_hdr ? WW'(0) : widx + WW'(1)};

  always_comb begin
    label        = '0;
    label.set_no = tx_order.set_no;
    label.pkt_no = tx_order.buf_no;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      bcnt        <= '0;
      buf_no      <= '0;
      hdr         <= '0;
      cur_word    <= '0;
      tx_done_tgl <= 1'b0;
    end else if (!busy) begin
      if (req_s != tx_done_tgl) begin
        busy   <= 1'b1;
        bcnt   <= '0;
        buf_no <= PW'(tx_order.buf_no);
        hdr    <= {host_mac, my_mac, ETH_TYPE_FADE, OP_DATA, label, tx_order.delay};
      end
    end else if (acc) begin
      if (bcnt == BW'(HDR_BYTES - 1) || (!in_hdr && lane == 2'd3)) cur_word <= pbm_rdata;
      if (tx_last) begin
        busy        <= 1'b0;
        tx_done_tgl <= req_s;
      end else begin
        bcnt <= bcnt + BW'(1);
      end
    end
  end

  // the stream must not change while the MAC stalls it
  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
                             tx_valid && !tx_ready |=> tx_valid && $stable(tx_data))
    else $error("pkt_sender: stream changed while stalled");
endmodule
