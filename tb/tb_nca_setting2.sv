// tb_nca_setting2: the congestion-avoidance block with the second parameter
// set that was evaluated for this protocol: N_pkt_update = 10000,
// T_high = 1/8, T_low = 1/32, alpha_incr = 1.25, alpha_decr = 0.75, full
// window size, 100 MHz clock (start delay 20000 cycles). Windows carry a
// chosen number of resent packets; the delay after each window is compared
// with an integer reference: ratio > 1/8 -> floor(1.25*d), ratio < 1/32 ->
// ceil(0.75*d), else unchanged, including both exact boundaries
// (1250/10000 and 312/10000 vs 313/10000).
module tb_nca_setting2;
  import l3fade_pkg::*;
  localparam int N = 10000;
  logic clk = 0, rst_n = 0, restart = 0, sent = 0, resent = 0;
  logic [DELAY_W-1:0] delay;
  logic incr_evt, decr_evt;
  int checks = 0, failures = 0;
  longint ref_d;
  int n_incr = 0, n_decr = 0;

  nca_ctrl #(.N_UPDATE(N), .T_HIGH_SH(3), .T_LOW_SH(5), .INCR_SH(2), .DECR_SH(2)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (incr_evt) n_incr++;
    if (decr_evt) n_decr++;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // one window of N transmissions, k of them resent
  task automatic window(input int k);
    int pos[$];
    int ni, nd;
    bit mark[N];
    for (int i = 0; i < N; i++) mark[i] = 0;
    while (pos.size() < k) begin
      int p = $urandom_range(N-1);
      if (!mark[p]) begin mark[p] = 1; pos.push_back(p); end
    end
    ni = n_incr; nd = n_decr;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      sent = 1; resent = mark[i];
      @(negedge clk);
      sent = 0; resent = 0;
      if (i < N-1) check(delay == DELAY_W'(ref_d), $sformatf("delay changed mid-window %0d", delay));
      if ($urandom_range(7) == 0) @(negedge clk);
    end
    // reference model
    if (k * 8 > N) begin ref_d = ref_d * 5 / 4; ni++; end
    else if (k * 32 < N) begin ref_d = (ref_d * 3 + 3) / 4; nd++; end
    check(delay == DELAY_W'(ref_d), $sformatf("k=%0d delay %0d expected %0d", k, delay, ref_d));
    @(negedge clk);
    check(n_incr == ni && n_decr == nd, $sformatf("k=%0d event pulses", k));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    ref_d = 20000;
    @(negedge clk);
    check(delay == 20000, "initial delay 200 us at 100 MHz");
    window(0);      // decrease
    window(312);    // below 1/32: decrease
    window(313);    // 313*32 > 10000: unchanged
    window(1250);   // exactly 1/8: unchanged
    window(1251);   // increase
    window(3000);   // increase
    window(0);
    // restart reloads the start value and clears the counters
    for (int i = 0; i < 10; i++) begin
      @(negedge clk); sent = 1; resent = 1; @(negedge clk); sent = 0; resent = 0;
    end
    @(negedge clk); restart = 1; @(negedge clk); restart = 0;
    ref_d = 20000;
    check(delay == 20000, "restart reloads 20000");
    window(0);   // a full fresh window is needed: the 10 resent before restart are forgotten
    check(n_incr >= 2 && n_decr >= 4, "both directions exercised");
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
