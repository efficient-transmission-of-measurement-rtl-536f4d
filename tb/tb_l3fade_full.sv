// tb_l3fade_full: one complete operation of the core at its full size and
// default settings (32 buffers of 1024 bytes, 100 MHz delay clock, start
// delay 200 us, congestion-avoidance window 3000): START, a stream of 40
// packets (more than the buffer ring, so the ring wraps into set 1), one
// DATA frame lost in the network and resent, every packet delivered intact,
// then STOP. The receiving computer acknowledges 3 us after each frame.
// Checks: the first frame reports the 200 us delay (20000 cycles), frames
// are at least 200 us apart, the lost packet is resent and all 40 packets
// arrive in full, and nothing is sent after STOP.
module tb_l3fade_full;
  import l3fade_pkg::*;
  localparam int NPK = 40, WPP = 256;

  logic sys_clk = 0, eth_clk = 0, sys_rst_n = 0, eth_rst_n = 0;
  logic [47:0] my_mac = 48'h02_00_00_00_00_02, host_mac = 48'h00_1b_21_00_00_20;
  logic [31:0] dta;
  logic dta_we = 0, dta_ready;
  logic [7:0] tx_data, rx_data;
  logic tx_valid, tx_last, tx_ready, rx_valid, rx_last, rx_err;
  logic running, nca_incr, nca_decr, rx_drop;
  logic [DELAY_W-1:0] delay;
  dm_events_t dm_ev;
  logic h_start = 0, h_stop = 0;
  int drop_now = 0;
  int frames, lost, dups, errors, delivered;
  logic [31:0] last_delay;
  longint last_frame_time;

  l3fade_top dut (.*);

  host_model #(.ACK_LAT(375)) u_host (
    .clk(eth_clk), .host_mac, .feb_mac(my_mac), .start(h_start), .stop(h_stop),
    .drop_pct_now(drop_now), .link_ready(1'b1),
    .tx_data, .tx_valid, .tx_last, .tx_ready, .rx_data, .rx_valid, .rx_last, .rx_err,
    .frames, .lost, .dups, .errors, .delivered, .last_delay, .last_frame_time);

  always #5 sys_clk = ~sys_clk;
  always #4 eth_clk = ~eth_clk;

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  int unsigned wk = 0;
  always @(negedge sys_clk) begin
    dta_we <= dta_ready && (wk < NPK * WPP);
    dta    <= tb_pkg::datum(wk);
  end
  always @(posedge sys_clk) if (dta_we && dta_ready) wk++;

  int n_resent = 0;
  always @(posedge sys_clk) if (sys_rst_n && dm_ev.resent) n_resent++;

  // spacing of frame starts
  longint t_prev = -1, min_gap = 64'h7fff_ffff_ffff;
  int byte_i = 0;
  always @(posedge eth_clk) if (tx_valid && tx_ready) begin
    if (byte_i == 0) begin
      if (t_prev >= 0 && $time - t_prev < min_gap) min_gap = $time - t_prev;
      t_prev = $time;
    end
    byte_i = tx_last ? 0 : byte_i + 1;
  end

  // lose exactly the 11th DATA frame
  always @(posedge eth_clk) drop_now = (frames == 10) ? 100 : 0;

  initial begin
    int f0;
    repeat (4) @(posedge sys_clk);
    sys_rst_n = 1; eth_rst_n = 1;
    @(negedge eth_clk) h_start = 1; @(negedge eth_clk) h_start = 0;
    wait (frames >= 1);
    check(last_delay == 20000, $sformatf("first frame reports delay %0d", last_delay));
    wait (delivered >= NPK || $time > 64'd40_000_000);
    check(delivered == NPK, $sformatf("delivered %0d of %0d", delivered, NPK));
    check(errors == 0, $sformatf("%0d bad frames", errors));
    check(lost == 1 && n_resent == 1, $sformatf("lost %0d resent %0d", lost, n_resent));
    check(min_gap >= 200_000 - 20, $sformatf("closest frames %0d ns apart", min_gap));
    check(frames == NPK + 1, $sformatf("%0d frames for %0d packets", frames, NPK));
    @(negedge eth_clk) h_stop = 1; @(negedge eth_clk) h_stop = 0;
    wait (!running);
    f0 = frames;
    repeat (50000) @(posedge sys_clk);
    check(frames == f0, "nothing sent after STOP");
    $display("frames %0d lost %0d resent %0d min gap %0d ns final delay %0d", frames, lost, n_resent, min_gap, delay);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #60_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
