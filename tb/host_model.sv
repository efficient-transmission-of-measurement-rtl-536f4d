// host_model: behavioural model (not synthesizable) of the receiving
// computer, the Ethernet MAC/switch path and the kernel protocol handler,
// as seen from the core's MAC client streams.
//
// Receive side: every frame on the core's transmit stream is collected. A
// share DROP_PCT of DATA frames is thrown away (lost in the network). For
// the others the model checks the header (addresses, 0xfade, 0xa5a5) and
// the payload against tb_pkg::datum, then does what the protocol handler
// does: a packet already received is acknowledged again; a new packet is
// stored and acknowledged. Packets are numbered g = set*NPKTS + packet, and
// `delivered` counts the contiguous run of packets received from g = 0.
// Acknowledges leave ACK_LAT eth_clk cycles after the end of the DATA frame.
// Transmit side: ACK, START and STOP frames, 60 bytes each, are sent one
// after another on the core's receive stream; BAD_ACK_PCT of acknowledges
// are followed by a copy with a wrong set number, which the core must
// discard. A start/stop pulse queues a START/STOP frame; START also
// clears the model's record of received packets.
// tx_ready is withheld at random for STALL_PCT of cycles, and whenever
// link_ready is low (a slower link pacing the MAC).
module host_model
  import l3fade_pkg::*;
#(
  parameter int NPKTS       = 32,
  parameter int PKT_BYTES   = 1024,
  parameter int DROP_PCT    = 0,
  parameter int ACK_LAT     = 375,
  parameter int BAD_ACK_PCT = 0,
  parameter int STALL_PCT   = 0
) (
  input  logic        clk,
  input  logic [47:0] host_mac,
  input  logic [47:0] feb_mac,
  input  logic        start,
  input  logic        stop,
  input  int          drop_pct_now,   // runtime override of DROP_PCT when >= 0
  input  logic        link_ready,
  // core transmit stream
  input  logic [7:0]  tx_data,
  input  logic        tx_valid,
  input  logic        tx_last,
  output logic        tx_ready,
  // core receive stream
  output logic [7:0]  rx_data,
  output logic        rx_valid,
  output logic        rx_last,
  output logic        rx_err,
  // statistics
  output int          frames,
  output int          lost,
  output int          dups,
  output int          errors,
  output int          delivered,
  output logic [31:0] last_delay,
  output longint      last_frame_time
);
  localparam int FRAME = HDR_BYTES + PKT_BYTES;
  logic [7:0] fb [FRAME];
  int nb = 0;
  bit rcvd [int];
  typedef struct { longint due; logic [159:0] hdr; } out_t;
  out_t oq[$];
  longint cyc = 0;
  bit armed = 0;   // frames count only after the first START request

  initial begin
    stall_ok = 1; rx_valid = 0; rx_last = 0; rx_err = 0; rx_data = '0;
    frames = 0; lost = 0; dups = 0; errors = 0; delivered = 0; last_delay = '0;
    last_frame_time = 0;
  end

  function automatic logic [159:0] ctl(input logic [15:0] op, input logic [31:0] label);
    return {feb_mac, host_mac, ETH_TYPE_FADE, op, label};
  endfunction

  task automatic queue(input logic [159:0] h, input longint due);
    out_t o;
    o.due = due; o.hdr = h;
    oq.push_back(o);
  endtask

  always @(posedge clk) begin
    cyc++;
    if (start) begin queue(ctl(OP_START, 0), cyc); rcvd.delete(); delivered = 0; armed = 1; end
    if (stop)  queue(ctl(OP_STOP, 0), cyc);
  end

  logic stall_ok;
  always @(negedge clk) stall_ok <= ($urandom_range(99) >= STALL_PCT);
  assign tx_ready = stall_ok && link_ready;

  // frame collection and protocol handling
  always @(posedge clk) if (armed && tx_valid && tx_ready) begin
    if (nb < FRAME) fb[nb] = tx_data;
    nb++;
    if (tx_last) begin
      int g, dp;
      logic [191:0] h;
      pkt_label_t lab;
      bit ok;
      for (int i = 0; i < HDR_BYTES; i++) h[191 - 8*i -: 8] = fb[i];
      lab = h[63:32];
      ok = (nb == FRAME) && h[191:144] == host_mac && h[143:96] == feb_mac
           && h[95:80] == ETH_TYPE_FADE && h[79:64] == OP_DATA && lab.retry == '0;
      frames++;
      last_delay = h[31:0];
      last_frame_time = $time;
      dp = (drop_pct_now >= 0) ? drop_pct_now : DROP_PCT;
      g = int'(lab.set_no) * NPKTS + int'(lab.pkt_no);
      if (!ok) begin
        errors++;
        $display("host_model: malformed frame %0d", frames);
      end else if ($urandom_range(99) < dp) begin
        lost++;
      end else begin
        if (rcvd.exists(g)) dups++;
        else begin
          for (int w = 0; w < PKT_BYTES / 4; w++)
            if ({fb[HDR_BYTES+4*w], fb[HDR_BYTES+4*w+1], fb[HDR_BYTES+4*w+2], fb[HDR_BYTES+4*w+3]}
                != tb_pkg::datum(g * (PKT_BYTES / 4) + w)) ok = 0;
          if (!ok) begin
            errors++;
            $display("host_model: payload of packet %0d wrong", g);
          end else begin
            rcvd[g] = 1;
            while (rcvd.exists(delivered)) delivered++;
          end
        end
        if (ok) begin
          queue(ctl(OP_ACK, lab), cyc + ACK_LAT);
          if ($urandom_range(99) < BAD_ACK_PCT) begin
            pkt_label_t bad = lab;
            bad.set_no = bad.set_no + 16'd7;
            queue(ctl(OP_ACK, bad), cyc + ACK_LAT);
          end
        end
      end
      nb = 0;
    end
  end

  // frame output, 60 bytes per frame, one at a time in due order
  initial begin
    forever begin
      @(negedge clk);
      if (oq.size() > 0 && oq[0].due <= cyc) begin
        out_t o;
        o = oq.pop_front();
        for (int i = 0; i < 60; i++) begin
          rx_valid = 1;
          rx_data  = (i < 20) ? o.hdr[159 - 8*i -: 8] : 8'h00;
          rx_last  = (i == 59);
          @(negedge clk);
        end
        rx_valid = 0; rx_last = 0;
      end
    end
  end
endmodule
