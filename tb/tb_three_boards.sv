// tb_three_boards: the measurement setup the protocol was evaluated in,
// scaled in time. Three cores with full-size buffers (32 x 1024 bytes) send
// to one receiving computer through a switch: two boards on 1 Gb/s links
// (the MAC takes one byte per 8 ns cycle) and one on a 100 Mb/s link (one
// byte per 10 cycles). The computer shares one processing budget between
// the streams: each accepted frame costs HOST_COST cycles of work, and a
// frame arriving while more than HOST_BACKLOG cycles of work are queued is
// dropped, as an overloaded receiver drops packets. Acknowledges follow
// 3 us after each accepted frame.
// The test runs seven phases, one per combination of active boards: all
// three, each pair, each board alone. A phase stops every board, waits for
// the link to drain, and then starts the boards of that combination (START
// restarts a board from packet 0, so each board's data source restarts its
// word count when the board starts running). Rates are measured after a
// warm-up of T_WARM.
// To reach a steady state in a short simulation the congestion-avoidance
// window is 32 packets instead of 3000 (thresholds and factors as in the
// default setting: 1/16, 1/64, 1.25, 0.9375) and the start delay is 20 us.
// Checks per phase: every active board's stream arrives complete and
// intact; stopped boards send nothing; the receiver's budget is never
// exceeded and is used to at least 50 % of what the active links could
// carry; the 100 Mb/s board, when active, is not starved (>= 50 % of its
// link). Over the whole run the delays adapt in both directions.
// Measured rates are printed per board and phase.
module tb_three_boards;
  import l3fade_pkg::*;
  localparam int NB = 3;
  localparam int HOST_COST = 1600;      // eth cycles per frame: 1024 B at 640 Mb/s
  localparam int HOST_BACKLOG = 6400;   // about four frames of queued work
  localparam longint T_DRAIN = 64'd1_000_000;  // ns, all boards stopped
  localparam longint T_WARM  = 64'd6_000_000;  // ns, after the start
  localparam longint T_MEAS  = 64'd10_000_000; // ns, measured interval
  localparam int NPHASE = 7;
  // active boards per phase, bit b = board b
  localparam logic [NB-1:0] PHASE_MASK [NPHASE] = '{3'b111, 3'b011, 3'b101, 3'b110, 3'b001, 3'b010, 3'b100};

  logic sys_clk = 0, eth_clk = 0, sys_rst_n = 0, eth_rst_n = 0;
  logic [47:0] host_mac = 48'h00_1b_21_00_00_99;
  logic [47:0] mac [NB];
  logic [31:0] dta [NB];
  logic dta_we [NB], dta_ready [NB];
  logic [7:0] tx_data [NB], rx_data [NB];
  logic tx_valid [NB], tx_last [NB], tx_ready [NB], link_ok [NB], rx_valid [NB], rx_last [NB], rx_err [NB];
  logic running [NB], nca_incr [NB], nca_decr [NB], rx_drop [NB];
  logic [DELAY_W-1:0] delay [NB];
  dm_events_t dm_ev [NB];
  logic h_start [NB], h_stop [NB];
  bit run_seen [NB];
  int drop_now [NB];
  int frames [NB], lost [NB], dups [NB], errors [NB], delivered [NB];
  logic [31:0] last_delay [NB];
  longint last_frame_time [NB];
  int unsigned wk [NB];
  int n_incr = 0, n_decr = 0;
  longint backlog = 0;
  int deliv_warm [NB];

  always #5 sys_clk = ~sys_clk;
  always #4 eth_clk = ~eth_clk;

  for (genvar b = 0; b < NB; b++) begin : g_board
    initial mac[b] = 48'h02_00_00_00_01_00 + b;
    l3fade_top #(.CLK_HZ(10_000_000), .N_UPDATE(32)) dut (
      .sys_clk, .sys_rst_n, .eth_clk, .eth_rst_n, .my_mac(mac[b]),
      .dta(dta[b]), .dta_we(dta_we[b]), .dta_ready(dta_ready[b]),
      .tx_data(tx_data[b]), .tx_valid(tx_valid[b]), .tx_last(tx_last[b]), .tx_ready(tx_ready[b]),
      .rx_data(rx_data[b]), .rx_valid(rx_valid[b]), .rx_last(rx_last[b]), .rx_err(rx_err[b]),
      .running(running[b]), .delay(delay[b]), .dm_ev(dm_ev[b]), .nca_incr(nca_incr[b]),
      .nca_decr(nca_decr[b]), .rx_drop(rx_drop[b]));

    host_model #(.ACK_LAT(375)) u_host (
      .clk(eth_clk), .host_mac, .feb_mac(mac[b]), .start(h_start[b]), .stop(h_stop[b]),
      .drop_pct_now(drop_now[b]), .link_ready(link_ok[b]),
      .tx_data(tx_data[b]), .tx_valid(tx_valid[b]), .tx_last(tx_last[b]), .tx_ready(tx_ready[b]),
      .rx_data(rx_data[b]), .rx_valid(rx_valid[b]), .rx_last(rx_last[b]), .rx_err(rx_err[b]),
      .frames(frames[b]), .lost(lost[b]), .dups(dups[b]), .errors(errors[b]),
      .delivered(delivered[b]), .last_delay(last_delay[b]), .last_frame_time(last_frame_time[b]));

    // link speed: boards 0 and 1 at 1 Gb/s, board 2 at 100 Mb/s
    int ph = 0;
    always @(negedge eth_clk) begin
      ph = (ph == 9) ? 0 : ph + 1;
      link_ok[b] <= (b < 2) ? 1'b1 : (ph == 0);
    end

    // data source, always ready with data; restarts at word 0 whenever
    // the board starts running
    initial begin wk[b] = 0; run_seen[b] = 0; h_start[b] = 0; h_stop[b] = 0; end
    always @(negedge sys_clk) begin
      if (running[b] && !run_seen[b]) wk[b] = 0;
      run_seen[b] = running[b];
      dta_we[b] <= dta_ready[b];
      dta[b]    <= tb_pkg::datum(wk[b]);
    end
    always @(posedge sys_clk) if (dta_we[b] && dta_ready[b]) wk[b]++;

    always @(posedge sys_clk) if (sys_rst_n) begin
      if (nca_incr[b]) n_incr++;
      if (nca_decr[b]) n_decr++;
    end
  end

  // shared receiver budget. Frames ending at a rising edge are settled at
  // the next falling edge; the host model decides with the drop_now set at
  // the previous falling edge, so both agree.
  bit ended [NB];
  initial for (int b = 0; b < NB; b++) begin drop_now[b] = 0; ended[b] = 0; end
  always @(posedge eth_clk)
    for (int b = 0; b < NB; b++) ended[b] = tx_valid[b] && tx_ready[b] && tx_last[b];
  always @(negedge eth_clk) begin
    if (backlog > 0) backlog--;
    for (int b = 0; b < NB; b++)
      if (ended[b] && drop_now[b] == 0) backlog += HOST_COST;
    for (int b = 0; b < NB; b++) drop_now[b] = (backlog > HOST_BACKLOG) ? 100 : 0;
  end

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    real mbps [NB], total, cap, link_sum;
    int frames_before [NB];
    logic [NB-1:0] act;
    repeat (4) @(posedge sys_clk);
    sys_rst_n = 1; eth_rst_n = 1;
    cap = 1024.0 * 8.0 / (HOST_COST * 8.0) * 1000.0;
    for (int p = 0; p < NPHASE; p++) begin
      longint t0;
      act = PHASE_MASK[p];
      @(negedge eth_clk) for (int b = 0; b < NB; b++) h_stop[b] = 1;
      @(negedge eth_clk) for (int b = 0; b < NB; b++) h_stop[b] = 0;
      t0 = $time + T_DRAIN;
      wait ($time >= t0);
      for (int b = 0; b < NB; b++) begin
        check(!running[b], $sformatf("phase %0d: board %0d stopped", p, b));
        frames_before[b] = frames[b];
      end
      @(negedge eth_clk) for (int b = 0; b < NB; b++) h_start[b] = act[b];
      @(negedge eth_clk) for (int b = 0; b < NB; b++) h_start[b] = 0;
      t0 = $time + T_WARM;
      wait ($time >= t0);
      for (int b = 0; b < NB; b++) deliv_warm[b] = delivered[b];
      t0 = $time + T_MEAS;
      wait ($time >= t0);
      total = 0;
      link_sum = 0;
      for (int b = 0; b < NB; b++) begin
        if (!act[b]) begin
          check(frames[b] == frames_before[b], $sformatf("phase %0d: stopped board %0d sent %0d frames", p, b,
                                                          frames[b] - frames_before[b]));
          continue;
        end
        mbps[b] = real'(delivered[b] - deliv_warm[b]) * 8192.0 / real'(T_MEAS) * 1000.0;
        total += mbps[b];
        link_sum += (b < 2) ? 1000.0 * 1024.0 / 1048.0 : 100.0 * 1024.0 / 1048.0;
        $display("phase %0d board %0d (%s): %0d packets delivered, %0d lost, %0d repeated, %.1f Mb/s, delay now %0d cycles",
                 p, b, b < 2 ? "1 Gb/s" : "100 Mb/s", delivered[b], lost[b], dups[b], mbps[b], delay[b]);
        check(errors[b] == 0, $sformatf("board %0d: %0d bad frames", b, errors[b]));
        check(delivered[b] > 50, $sformatf("phase %0d: board %0d delivered %0d", p, b, delivered[b]));
        // every packet the source finished is at most 32 packets ahead of delivery
        check(wk[b] / 256 - delivered[b] <= 32, $sformatf("phase %0d: board %0d: %0d written, %0d delivered",
                                                          p, b, wk[b] / 256, delivered[b]));
        if (b == 2) check(mbps[2] >= 50.0, $sformatf("phase %0d: 100 Mb/s board not starved", p));
      end
      $display("phase %0d (boards %b): total %.1f Mb/s, receiver budget %.1f Mb/s", p, act, total, cap);
      check(total <= cap * 1.02, $sformatf("phase %0d: receiver budget not exceeded", p));
      check(total >= (link_sum < cap ? link_sum : cap) * 0.5, $sformatf("phase %0d: at least 50 %% of what can be carried", p));
    end
    $display("delay increases %0d decreases %0d", n_incr, n_decr);
    check(n_incr > 0 && n_decr > 0, "delays adapt both ways");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #150_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
