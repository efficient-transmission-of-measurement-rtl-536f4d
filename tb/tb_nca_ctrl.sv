// tb_nca_ctrl: self-checking test of the congestion-avoidance block.
// Uses windows of N_UPDATE=64 transmissions and a 1 MHz clock setting so the
// start delay is 200 cycles. Each window carries a chosen number of resent
// packets (at random positions) and the delay after the window is compared
// with a reference computed here in integer arithmetic: ratio > 1/16 ->
// floor(1.25*d), ratio < 1/64 -> ceil(15/16*d), else unchanged. The exact
// threshold boundaries (4/64 and 1/64), restart, the event pulses and the
// one-cycle update latency are checked.
module tb_nca_ctrl;
  import l3fade_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0, restart = 0, sent = 0, resent = 0;
  logic [DELAY_W-1:0] delay;
  logic incr_evt, decr_evt;
  int checks = 0, failures = 0;
  longint ref_d;
  int n_incr = 0, n_decr = 0;

  nca_ctrl #(.CLK_HZ(1_000_000), .N_UPDATE(N)) dut (.*);

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
      repeat ($urandom_range(2)) @(negedge clk);
    end
    // reference model
    if (k * 16 > N) begin ref_d = ref_d * 5 / 4; ni++; end
    else if (k * 64 < N) begin ref_d = (ref_d * 15 + 15) / 16; nd++; end
    check(delay == DELAY_W'(ref_d), $sformatf("k=%0d delay %0d expected %0d", k, delay, ref_d));
    @(negedge clk);
    check(n_incr == ni && n_decr == nd, $sformatf("k=%0d event pulses", k));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    ref_d = 200;
    @(negedge clk);
    check(delay == 200, "initial delay 200 us at 1 MHz");
    window(0);   // decrease
    window(1);   // 1/64: not below T_low, unchanged
    window(4);   // 4/64 = 1/16: not above T_high, unchanged
    window(5);   // increase
    window(20);  // increase
    for (int i = 0; i < 6; i++) window(0);
    window(3);
    // restart reloads the start value and clears the counters
    for (int i = 0; i < 10; i++) begin
      @(negedge clk); sent = 1; resent = 1; @(negedge clk); sent = 0; resent = 0;
    end
    @(negedge clk); restart = 1; @(negedge clk); restart = 0;
    ref_d = 200;
    check(delay == 200, "restart reloads 200");
    window(0);   // a full fresh window is needed: the 10 resent before restart are forgotten
    check(n_incr >= 2 && n_decr >= 7, "both directions exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
