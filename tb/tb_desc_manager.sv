// tb_desc_manager: self-checking test of the descriptor manager with 32
// buffers of 64 bytes (16 words) and a fixed inter-packet delay of 40
// cycles. The testbench plays the data source, the packet sender (answers
// each order after 20..60 cycles) and the receiving computer: it acknowledges
// ordered packets after a random latency (so out of order), drops 10 % of
// them, sometimes repeats one, and sends acknowledges with wrong set numbers.
// A packet is identified by its global index g = set*32 + buffer.
// Checks, all against a model kept here:
//  - every input word lands at {g mod 32, word} of the memory;
//  - an order names a filled, not yet acknowledged packet, whose buffer
//    still holds that packet's data; `resent` is set exactly when it was
//    ordered before; orders are at least `delay` cycles apart;
//  - the input stalls (head waits for tail) while the host is slow;
//  - after STOP nothing is ordered and no data accepted; START restarts
//    at set 0, buffer 0;
//  - at the end every filled packet has been acknowledged and ordered.
module tb_desc_manager;
  import l3fade_pkg::*;
  localparam int NP = 32, PB = 64, WPP = PB / 4;
  localparam int AW = $clog2(NP * WPP);
  localparam int DLY = 40;

  logic clk = 0, rst_n = 0;
  logic [31:0] dta = '0;
  logic dta_we = 0, dta_ready;
  logic pbm_we;
  logic [AW-1:0] pbm_waddr;
  logic [31:0] pbm_wdata;
  cmd_t cmd_data;
  logic cmd_empty, cmd_rd_en;
  logic tx_req_tgl, tx_done_tgl = 0;
  tx_order_t tx_order;
  logic [DELAY_W-1:0] delay = DLY;
  logic nca_restart, nca_sent, nca_resent, running;
  dm_events_t ev;

  desc_manager #(.NPKTS(NP), .PKT_BYTES(PB)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // ---------------- model state
  int epoch = 0;
  int wk = 0;                       // words accepted in this epoch
  logic [31:0] mm [NP * WPP];       // memory model
  bit ordered [int];                // g -> ordered at least once
  bit acked [int];                  // g -> ACK popped by the DUT
  cmd_t cq[$];                      // command FIFO contents
  typedef struct { longint due; cmd_t c; } pend_t;
  pend_t pq[$];
  longint cyc = 0, last_order = -1000;
  bit writer_on = 1, stopped = 0;
  int drop_pct = 10, lat_max = 200, lat_min = 1;
  int n_orders = 0, n_resent = 0, n_stall = 0, n_bad = 0, n_ok = 0, n_wrap = 0, n_dup = 0;
  bit last_req = 0, first_after_start = 0;

  function automatic logic [31:0] datum(input int e, input int k);
    return (k * 32'h9e3779b1) ^ (e << 24) ^ 32'h5a5a0000;
  endfunction

  // FIFO outputs, refreshed between the DUT's sampling edges
  initial begin cmd_empty = 1; cmd_data = '0; end
  always @(negedge clk) begin
    cmd_empty = (cq.size() == 0);
    cmd_data  = cmd_empty ? '0 : cq[0];
  end

  function automatic cmd_t mk(input cmd_kind_e k, input int s, input int p);
    cmd_t c = '0;
    c.kind = k; c.set_no = SET_W'(s); c.pkt_no = PKTNO_W'(p);
    return c;
  endfunction

  // data source
  always @(negedge clk) dta_we <= rst_n && writer_on && dta_ready && ($urandom_range(4) != 0);
  always @(negedge clk) dta <= datum(epoch, wk);

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (ev.head_stall) n_stall++;
    if (ev.ack_bad)    n_bad++;
    if (ev.ack_ok)     n_ok++;
    if (ev.retr_wrap)  n_wrap++;
    // input writes
    if (dta_we && dta_ready) begin
      check(pbm_we && pbm_waddr == AW'(((wk / WPP) % NP) * WPP + wk % WPP) && pbm_wdata == dta,
            $sformatf("write of word %0d addr %0d data %h exp %h", wk, pbm_waddr, pbm_wdata, dta));
      wk++;
    end
    if (pbm_we) mm[pbm_waddr] = pbm_wdata;
    // commands consumed
    if (cmd_rd_en) begin
      cmd_t c;
      c = cq.pop_front();
      // an ACK for a packet never ordered is one of the garbled ones: the DUT
      // must discard it, so it does not count as acknowledged
      if (c.kind == CMD_ACK && ordered.exists(int'(c.set_no) * NP + int'(c.pkt_no)))
        acked[int'(c.set_no) * NP + int'(c.pkt_no)] = 1;
      if (c.kind == CMD_START) begin
        epoch++; wk = 0; ordered.delete(); acked.delete(); pq.delete(); stopped = 0;
        first_after_start = 1;
      end
      if (c.kind == CMD_STOP) stopped = 1;
    end
    // orders
    if (tx_req_tgl != last_req) begin
      int g;
      bit data_ok;
      g = int'(tx_order.set_no) * NP + int'(tx_order.buf_no);
      data_ok = 1;
      last_req = tx_req_tgl;
      n_orders++;
      check(!stopped, "order while stopped");
      check(g < wk / WPP, $sformatf("order of unfilled packet %0d (filled %0d)", g, wk / WPP));
      check(!acked.exists(g), $sformatf("order of acknowledged packet %0d", g));
      check(nca_sent && nca_resent == ordered.exists(g), $sformatf("sent/resent flags for %0d", g));
      check(cyc - last_order >= DLY, $sformatf("orders %0d cycles apart", cyc - last_order));
      for (int w = 0; w < WPP; w++)
        if (mm[int'(tx_order.buf_no) * WPP + w] != datum(epoch, g * WPP + w)) data_ok = 0;
      check(data_ok, $sformatf("buffer of packet %0d holds other data", g));
      if (first_after_start) check(g == 0, $sformatf("first order after START is packet %0d", g));
      first_after_start = 0;
      if (ordered.exists(g)) n_resent++;
      ordered[g] = 1;
      last_order = cyc;
      // sender answers later
      fork begin
        repeat ($urandom_range(60, 20)) @(posedge clk);
        tx_done_tgl <= tx_req_tgl;
      end join_none
      // host acknowledges, drops, repeats or garbles
      if ($urandom_range(99) >= drop_pct) begin
        pend_t p;
        p.due = cyc + $urandom_range(lat_max, lat_min);
        p.c = mk(CMD_ACK, tx_order.set_no, tx_order.buf_no);
        pq.push_back(p);
        if ($urandom_range(9) == 0) begin p.due += 7; pq.push_back(p); n_dup++; end
      end
      if ($urandom_range(19) == 0) begin
        pend_t p;
        p.due = cyc + 5;
        p.c = mk(CMD_ACK, tx_order.set_no + 1, tx_order.buf_no);
        pq.push_back(p);
      end
    end else begin
      check(!nca_sent, "sent pulse without order");
    end
    // deliver due acknowledges
    for (int i = 0; i < pq.size(); i++)
      if (pq[i].due <= cyc) begin cq.push_back(pq[i].c); pq.delete(i); i--; end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    check(!dta_ready && !running, "not ready before START");
    cq.push_back(mk(CMD_START, 0, 0));
    repeat (3) @(negedge clk);
    check(nca_restart == 0 && running && dta_ready, "running after START");
    // phase 1: normal streaming
    wait (wk >= 120 * WPP);
    // phase 2: slow host -> buffer full, input stalls
    lat_min = 3000; lat_max = 4000;
    repeat (6000) @(negedge clk);
    check(n_stall > 0 && !dta_ready, "input stalled while host is slow");
    lat_min = 1; lat_max = 200;
    wait (wk >= 260 * WPP);
    // phase 3: STOP, then restart
    cq.push_back(mk(CMD_STOP, 0, 0));
    wait (stopped);
    repeat (3) @(negedge clk);
    begin
      int wk0, n0;
      wk0 = wk; n0 = n_orders;
      repeat (2000) @(negedge clk);
      check(wk == wk0 && n_orders == n0 && !dta_ready && !running, "quiet while stopped");
    end
    cq.push_back(mk(CMD_START, 0, 0));
    wait (wk >= 200 * WPP);
    // phase 4: drain with a reliable host
    writer_on = 0;
    drop_pct = 0;
    repeat (30000) @(negedge clk);
    begin
      int filled, missing;
      filled = wk / WPP; missing = 0;
      for (int g = 0; g < filled; g++) if (!acked.exists(g) || !ordered.exists(g)) missing++;
      check(missing == 0, $sformatf("%0d of %0d packets not delivered", missing, filled));
    end
    check(n_resent > 0 && n_bad > 0 && n_dup > 0 && n_wrap > 0, $sformatf(
          "mechanisms: resent %0d bad-ack %0d dup-ack %0d wrap %0d", n_resent, n_bad, n_dup, n_wrap));
    $display("orders %0d resent %0d stalls %0d", n_orders, n_resent, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
