// ack_cmd_fifo: the acknowledge and commands FIFO. The packet receiver, in
// the Ethernet clock domain, pushes one entry per accepted ACK, START or
// STOP frame; the descriptor manager, in the system clock domain, pops them.
// It is a classic asynchronous FIFO: binary read and write pointers with one
// extra wrap bit, exchanged between the domains in Gray code through
// two-flip-flop synchronizers. Full and empty are therefore pessimistic by
// the synchronizer delay, never optimistic.
// Interface: push when wr_en and !full; rd_data shows the oldest entry while
// !empty (first-word fall-through) and rd_en pops it.
// The paper names this FIFO and says it separates the clock domains; its
// depth (16 entries) and structure are this design's choices.
module ack_cmd_fifo #(
  parameter int unsigned WIDTH = l3fade_pkg::CMD_W,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  input  logic             rclk,
  input  logic             rrst_n,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty
);
  logic [WIDTH-1:0] mem [DEPTH];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer seen in read domain
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer seen in write domain

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write domain
  logic [AW:0] wbin_nxt;
  assign wbin_nxt = wbin + (AW+1)'(1);
  assign full = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  always_ff @(posedge wclk) begin
    if (wr_en && !full) mem[wbin[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (wr_en && !full) begin
        wbin  <= wbin_nxt;
        wgray <= bin2gray(wbin_nxt);
      end
    end
  end

  // ---------------- read domain
  logic [AW:0] rbin_nxt;
  assign rbin_nxt = rbin + (AW+1)'(1);
  assign empty    = (rgray == wgray_r2);
  assign rd_data  = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rd_en && !empty) begin
        rbin  <= rbin_nxt;
        rgray <= bin2gray(rbin_nxt);
      end
    end
  end

  // A push into a full FIFO or a pop from an empty one is a protocol error
  // of the user; the FIFO ignores it, the assertion reports it.
  a_no_overflow: assert property (@(posedge wclk) disable iff (!wrst_n) !(wr_en && full))
    else $error("ack_cmd_fifo: write while full");
  a_no_underflow: assert property (@(posedge rclk) disable iff (!rrst_n) !(rd_en && empty))
    else $error("ack_cmd_fifo: read while empty");
endmodule
