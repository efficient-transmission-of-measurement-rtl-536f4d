// tb_l3fade_top: end-to-end test of the whole core against the model of the
// receiving computer, at reduced sizes: 32 buffers of 64 bytes, a delay
// clock of 1 MHz (start delay 200 cycles) and congestion-avoidance windows
// of 64 packets. The system clock runs at 100 MHz, the Ethernet clock at
// 125 MHz; the MAC stalls the transmit stream 10 % of the time.
// Phases: a loss-free stream (the delay must fall), a 30 % loss stream (the
// delay must rise, packets are resent), STOP (no more frames) and START
// (fresh stream from packet 0 with the start delay), then a drain in which
// every packet written must arrive, in full and correct. Every mechanism is
// counted and must occur: retransmission, delay increase and decrease,
// input stall on a full buffer, discarded acknowledge, set-number wrap of
// the buffer ring, retr wrap, MAC back-pressure, STOP and restart.
// The spacing of consecutive DATA frames is checked against the delay the
// frames report.
module tb_l3fade_top;
  import l3fade_pkg::*;
  localparam int NP = 32, PB = 64, WPP = PB / 4;

  logic sys_clk = 0, eth_clk = 0, sys_rst_n = 0, eth_rst_n = 0;
  logic [47:0] my_mac = 48'h02_00_00_00_00_01, host_mac = 48'h00_1b_21_00_00_10;
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

  l3fade_top #(.NPKTS(NP), .PKT_BYTES(PB), .CLK_HZ(1_000_000), .N_UPDATE(64)) dut (.*);

  host_model #(.NPKTS(NP), .PKT_BYTES(PB), .ACK_LAT(40), .BAD_ACK_PCT(5), .STALL_PCT(10)) u_host (
    .clk(eth_clk), .host_mac, .feb_mac(my_mac), .start(h_start), .stop(h_stop),
    .drop_pct_now(drop_now), .link_ready(1'b1),
    .tx_data, .tx_valid, .tx_last, .tx_ready, .rx_data, .rx_valid, .rx_last, .rx_err,
    .frames, .lost, .dups, .errors, .delivered, .last_delay, .last_frame_time);

  always #5 sys_clk = ~sys_clk;
  always #4 eth_clk = ~eth_clk;

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // data source: writes the tb_pkg pattern whenever the core is ready
  int unsigned wk = 0;
  bit src_on = 1;
  always @(negedge sys_clk) begin
    dta_we <= src_on && dta_ready && ($urandom_range(3) != 0);
    dta    <= tb_pkg::datum(wk);
  end
  always @(posedge sys_clk) if (dta_we && dta_ready) wk++;

  // mechanism counters
  int n_sent = 0, n_resent = 0, n_stall = 0, n_bad = 0, n_wrap = 0, n_incr = 0, n_decr = 0;
  int n_setwrap = 0, n_txstall = 0;
  always @(posedge sys_clk) if (sys_rst_n) begin
    if (dm_ev.sent) n_sent++;
    if (dm_ev.resent) n_resent++;
    if (dm_ev.head_stall) n_stall++;
    if (dm_ev.ack_bad) n_bad++;
    if (dm_ev.retr_wrap) n_wrap++;
    if (dm_ev.head_move && dut.u_dm.head == 5'(NP - 1)) n_setwrap++;
    if (nca_incr) n_incr++;
    if (nca_decr) n_decr++;
  end
  always @(posedge eth_clk) if (eth_rst_n && tx_valid && !tx_ready) n_txstall++;

  // frame spacing: a frame starts no earlier than the delay (10 ns system
  // cycles) reported by the previous frame, less the clock-crossing slack
  longint t_prev_start = -1;
  logic [31:0] d_prev = 0;
  int n_space = 0, bad_space = 0, byte_i = 0;
  always @(posedge eth_clk) if (tx_valid && tx_ready) begin
    if (byte_i == 0) begin
      // delay of this frame is at bytes 20..23; the spacing rule applies to the previous one
      if (t_prev_start >= 0) begin
        n_space++;
        if ($time - t_prev_start < longint'(d_prev) * 10 - 20) bad_space++;
      end
      t_prev_start = $time;
    end
    if (byte_i >= 20 && byte_i < 24) d_prev = {d_prev[23:0], tx_data};
    byte_i = tx_last ? 0 : byte_i + 1;
  end

  task automatic wait_sys(input int n);
    repeat (n) @(posedge sys_clk);
  endtask

  initial begin
    int d0, f0;
    repeat (4) @(posedge sys_clk);
    sys_rst_n = 1; eth_rst_n = 1;
    wait_sys(10);
    check(!running && !dta_ready && !tx_valid, "idle before START");
    @(negedge eth_clk) h_start = 1; @(negedge eth_clk) h_start = 0;
    wait (running);
    check(delay == 200, $sformatf("start delay %0d", delay));
    // phase 1: no loss, delay must fall
    fork wait (n_decr >= 3); wait_sys(2_000_000); join_any
    disable fork;
    check(delay < 200, $sformatf("delay fell to %0d", delay));
    // phase 2: 30 % loss, delay must rise
    d0 = delay;
    drop_now = 30;
    fork wait (n_incr >= 2); wait_sys(2_000_000); join_any
    disable fork;
    check(delay > d0, $sformatf("delay rose from %0d to %0d", d0, delay));
    drop_now = 0;
    wait_sys(20000);
    // phase 3: STOP
    @(negedge eth_clk) h_stop = 1; @(negedge eth_clk) h_stop = 0;
    wait (!running);
    wait_sys(2000);      // a frame in flight may still finish
    f0 = frames;
    wait_sys(20000);
    check(frames == f0 && !dta_ready, "no frames and no input while stopped");
    // restart: fresh stream
    wk = 0;
    @(negedge eth_clk) h_start = 1; @(negedge eth_clk) h_start = 0;
    wait (running);
    wait_sys(2);
    check(delay == 200, "start delay after restart");
    wait (wk >= 100 * WPP);
    // drain
    src_on = 0;
    wait_sys(1);
    begin
      int filled;
      filled = wk / WPP;
      fork
        wait (delivered >= filled);
        wait_sys(400000);
      join_any
      disable fork;
      check(delivered == filled, $sformatf("delivered %0d of %0d packets", delivered, filled));
    end
    check(errors == 0, $sformatf("%0d bad frames at the host", errors));
    check(n_space > 100 && bad_space == 0, $sformatf("%0d of %0d frame gaps shorter than delay", bad_space, n_space));
    // every mechanism happened
    check(n_resent > 0,  $sformatf("retransmissions %0d", n_resent));
    check(n_incr > 0,    $sformatf("delay increases %0d", n_incr));
    check(n_decr > 0,    $sformatf("delay decreases %0d", n_decr));
    check(n_stall > 0,   $sformatf("input stalls %0d", n_stall));
    check(n_bad > 0,     $sformatf("discarded acknowledges %0d", n_bad));
    check(n_wrap > 0,    $sformatf("retr wraps %0d", n_wrap));
    check(n_setwrap > 1, $sformatf("buffer ring wraps %0d", n_setwrap));
    check(n_txstall > 0, $sformatf("MAC stalls %0d", n_txstall));
    check(dups > 0 || lost > 0, "losses seen by the host");
    $display("sent %0d resent %0d lost %0d dups %0d incr %0d decr %0d stall %0d bad-ack %0d ring-wraps %0d final delay %0d",
             n_sent, n_resent, lost, dups, n_incr, n_decr, n_stall, n_bad, n_setwrap, delay);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
