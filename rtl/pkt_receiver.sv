// pkt_receiver: the packet receiver. It watches the MAC client receive
// stream and turns every START, STOP and ACK frame addressed to this board
// into an entry of the acknowledge and commands FIFO.
//
// The first 20 bytes of each frame are shifted into a header register: the
// destination MAC, source MAC, Ethernet type, opcode and, for ACK, the
// 32-bit label {set number, packet number, retry}. At the last byte of the
// frame (rx_valid && rx_last) the frame is accepted if the MAC did not flag
// it bad (rx_err), it had at least 20 bytes, its destination is my_mac and
// its type is 0xfade. START also records the sender's MAC address as the
// destination of the DATA frames (host_mac). The entry is pushed into the
// FIFO the cycle after the last byte; if the FIFO is full the entry is
// dropped (a lost ACK only causes a retransmission) and drop pulses.
//
// The frame formats are the paper's. Filtering on the destination address,
// learning the host address from START, the drop-on-full rule and the
// stream interface are this design's choices.
module pkt_receiver
  import l3fade_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [47:0] my_mac,
  // MAC client receive stream
  input  logic [7:0]  rx_data,
  input  logic        rx_valid,
  input  logic        rx_last,
  input  logic        rx_err,
  // acknowledge and commands FIFO, write side
  output logic        fifo_wr_en,
  output cmd_t        fifo_wr_data,
  input  logic        fifo_full,
  // learned address of the receiving computer
  output logic [47:0] host_mac,
  output logic        drop
);
  localparam int unsigned HB = MIN_RX_LEN * 8;

  logic [HB-1:0] hdr, hdr_n;
  logic [4:0]    cnt, cnt_n;        // saturates at MIN_RX_LEN
  logic          pend;
  logic [47:0]   f_dst, f_src;
  logic [15:0]   f_type, f_op;
  pkt_label_t    f_label;
  logic          good;

  assign hdr_n = (cnt < 5'(MIN_RX_LEN)) ? {hdr[HB-9:0], rx_data} : hdr;
  assign cnt_n = (cnt < 5'(MIN_RX_LEN)) ? cnt + 5'd1 : cnt;

  assign f_dst   = hdr_n[HB-1   -: 48];
  assign f_src   = hdr_n[HB-49  -: 48];
  assign f_type  = hdr_n[HB-97  -: 16];
  assign f_op    = hdr_n[HB-113 -: 16];
  assign f_label = hdr_n[31:0];
  assign good    = (cnt_n == 5'(MIN_RX_LEN)) && !rx_err && f_dst == my_mac
                   && f_type == ETH_TYPE_FADE;

  assign fifo_wr_en = pend && !fifo_full;
  assign drop       = pend && fifo_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hdr          <= '0;
      cnt          <= '0;
      pend         <= 1'b0;
      fifo_wr_data <= '0;
      host_mac     <= '0;
    end else begin
      pend <= 1'b0;
      if (rx_valid) begin
        if (rx_last) begin
          cnt <= '0;
          hdr <= '0;
          if (good) begin
            unique case (f_op)
              OP_START: begin
                pend              <= 1'b1;
                fifo_wr_data      <= '0;
                fifo_wr_data.kind <= CMD_START;
                host_mac          <= f_src;
              end
              OP_STOP: begin
                pend              <= 1'b1;
                fifo_wr_data      <= '0;
                fifo_wr_data.kind <= CMD_STOP;
              end
              OP_ACK: begin
                pend                <= 1'b1;
                fifo_wr_data.kind   <= CMD_ACK;
                fifo_wr_data.set_no <= f_label.set_no;
                fifo_wr_data.pkt_no <= f_label.pkt_no;
              end
              default: ;
            endcase
          end
        end else begin
          cnt <= cnt_n;
          hdr <= hdr_n;
        end
      end
    end
  end
endmodule
