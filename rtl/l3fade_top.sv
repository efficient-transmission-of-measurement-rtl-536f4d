// l3fade_top: FPGA core that streams measurement data reliably to a
// computer over a private Ethernet segment, using raw Ethernet frames of
// type 0xfade, per-packet acknowledges and retransmission from a small
// on-chip buffer (32 packets of 1 KiB), with an adaptive inter-packet delay
// against congestion.
//
// Structure (left to right):
//   data input -> desc_manager -> pkt_buf_mem -> pkt_sender -> MAC tx stream
//   MAC rx stream -> pkt_receiver -> ack_cmd_fifo -> desc_manager
//   nca_ctrl supplies the inter-packet delay to desc_manager.
// Two clock domains: sys_clk for the data input, the descriptor manager and
// the congestion avoidance; eth_clk for the sender, receiver and the MAC
// client streams. They meet in the dual-clock packet memory, the
// asynchronous command FIFO and the toggle handshake that carries
// transmission orders (the order itself is held stable by the descriptor
// manager until the handshake completes).
//
// The Ethernet MAC (framing, padding, FCS, PHY interface) is outside this
// core: its client side appears here as byte streams with valid/ready/last
// (transmit) and valid/last/err (receive). The structure is the one of the
// paper; the clocking split, the stream interfaces and all widths that the
// paper does not give are this design's choices, listed in each block.
// The congestion-avoidance defaults are the paper's main setting; the delay
// counter assumes a 100 MHz sys_clk (CLK_HZ).
module l3fade_top
  import l3fade_pkg::*;
#(
  parameter int unsigned NPKTS         = 32,
  parameter int unsigned PKT_BYTES     = 1024,
  parameter int unsigned CLK_HZ        = 100_000_000,
  parameter int unsigned INIT_DELAY_US = 200,
  parameter int unsigned N_UPDATE      = 3000,
  parameter int unsigned T_HIGH_SH     = 4,
  parameter int unsigned T_LOW_SH      = 6,
  parameter int unsigned INCR_SH       = 2,
  parameter int unsigned DECR_SH       = 4,
  parameter int unsigned FIFO_DEPTH    = 16,
  localparam int unsigned DATA_W       = 32,
  localparam int unsigned AW           = $clog2(NPKTS * PKT_BYTES / 4)
) (
  input  logic               sys_clk,
  input  logic               sys_rst_n,
  input  logic               eth_clk,
  input  logic               eth_rst_n,
  input  logic [47:0]        my_mac,
  // data input (FIFO-like)
  input  logic [DATA_W-1:0]  dta,
  input  logic               dta_we,
  output logic               dta_ready,
  // MAC client transmit stream
  output logic [7:0]         tx_data,
  output logic               tx_valid,
  output logic               tx_last,
  input  logic               tx_ready,
  // MAC client receive stream
  input  logic [7:0]         rx_data,
  input  logic               rx_valid,
  input  logic               rx_last,
  input  logic               rx_err,
  // status
  output logic               running,
  output logic [DELAY_W-1:0] delay,
  output dm_events_t         dm_ev,
  output logic               nca_incr,
  output logic               nca_decr,
  output logic               rx_drop
);
  // packet buffers memory
  logic              pbm_we;
  logic [AW-1:0]     pbm_waddr, pbm_raddr;
  logic [DATA_W-1:0] pbm_wdata, pbm_rdata;
  // command FIFO
  logic              f_wr_en, f_full, f_rd_en, f_empty;
  cmd_t              f_wr_data, f_rd_data;
  // sender handshake
  logic              tx_req_tgl, tx_done_tgl, tx_done_s;
  tx_order_t         tx_order;
  // congestion avoidance
  logic              nca_restart, nca_sent, nca_resent;
  logic [47:0]       host_mac;

  desc_manager #(.NPKTS(NPKTS), .PKT_BYTES(PKT_BYTES), .DATA_W(DATA_W)) u_dm (
    .clk(sys_clk), .rst_n(sys_rst_n),
    .dta, .dta_we, .dta_ready,
    .pbm_we, .pbm_waddr, .pbm_wdata,
    .cmd_data(f_rd_data), .cmd_empty(f_empty), .cmd_rd_en(f_rd_en),
    .tx_req_tgl, .tx_done_tgl(tx_done_s), .tx_order,
    .delay, .nca_restart, .nca_sent, .nca_resent,
    .running, .ev(dm_ev)
  );

  nca_ctrl #(
    .CLK_HZ(CLK_HZ), .INIT_DELAY_US(INIT_DELAY_US), .N_UPDATE(N_UPDATE),
    .T_HIGH_SH(T_HIGH_SH), .T_LOW_SH(T_LOW_SH), .INCR_SH(INCR_SH), .DECR_SH(DECR_SH)
  ) u_nca (
    .clk(sys_clk), .rst_n(sys_rst_n),
    .restart(nca_restart), .sent(nca_sent), .resent(nca_resent),
    .delay, .incr_evt(nca_incr), .decr_evt(nca_decr)
  );

  pkt_buf_mem #(.NPKTS(NPKTS), .PKT_BYTES(PKT_BYTES), .DATA_W(DATA_W)) u_pbm (
    .wclk(sys_clk), .we(pbm_we), .waddr(pbm_waddr), .wdata(pbm_wdata),
    .rclk(eth_clk), .raddr(pbm_raddr), .rdata(pbm_rdata)
  );

  ack_cmd_fifo #(.WIDTH(CMD_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .wclk(eth_clk), .wrst_n(eth_rst_n), .wr_en(f_wr_en), .wr_data(f_wr_data), .full(f_full),
    .rclk(sys_clk), .rrst_n(sys_rst_n), .rd_en(f_rd_en), .rd_data(f_rd_data), .empty(f_empty)
  );

  pkt_sender #(.NPKTS(NPKTS), .PKT_BYTES(PKT_BYTES), .DATA_W(DATA_W)) u_tx (
    .clk(eth_clk), .rst_n(eth_rst_n), .my_mac, .host_mac,
    .tx_req_tgl, .tx_done_tgl, .tx_order,
    .pbm_raddr, .pbm_rdata,
    .tx_data, .tx_valid, .tx_last, .tx_ready
  );

  bit_sync u_done_sync (.clk(sys_clk), .rst_n(sys_rst_n), .d(tx_done_tgl), .q(tx_done_s));

  pkt_receiver u_rx (
    .clk(eth_clk), .rst_n(eth_rst_n), .my_mac,
    .rx_data, .rx_valid, .rx_last, .rx_err,
    .fifo_wr_en(f_wr_en), .fifo_wr_data(f_wr_data), .fifo_full(f_full),
    .host_mac, .drop(rx_drop)
  );
endmodule
