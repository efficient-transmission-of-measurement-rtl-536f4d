// tb_pkt_buf_mem: self-checking test of the packet buffers memory at its
// full size (32 buffers x 1024 bytes). The write clock (10 ns) and read
// clock (8 ns) differ. Every word is written with a pseudo-random value kept
// in a reference array; reads at random and at buffer-boundary addresses are
// compared one read-clock edge after the address (the specified latency),
// and a word rewritten later must read back its new value.
module tb_pkt_buf_mem;
  localparam int NPKTS = 32, PKT_BYTES = 1024;
  localparam int WORDS = NPKTS * PKT_BYTES / 4;
  localparam int AW = $clog2(WORDS);
  logic wclk = 0, rclk = 0, we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [31:0] ref_mem [WORDS];
  int checks = 0, failures = 0;

  pkt_buf_mem dut (.*);
  always #5 wclk = ~wclk;
  always #4 rclk = ~rclk;

  task automatic rd(input int a);
    @(negedge rclk); raddr = AW'(a);
    @(posedge rclk); #1;
    checks++;
    if (rdata !== ref_mem[a]) begin
      failures++;
      $display("FAIL: addr %0d read %h expected %h", a, rdata, ref_mem[a]);
    end
  endtask

  initial begin
    for (int a = 0; a < WORDS; a++) begin
      @(negedge wclk); we = 1; waddr = AW'(a); wdata = $urandom; ref_mem[a] = wdata;
    end
    @(negedge wclk); we = 0;
    for (int b = 0; b < NPKTS; b++) begin
      rd(b * 256); rd(b * 256 + 255);
    end
    for (int i = 0; i < 2000; i++) rd($urandom_range(WORDS-1));
    // rewrite buffer 7 and read it back
    for (int a = 7*256; a < 8*256; a++) begin
      @(negedge wclk); we = 1; waddr = AW'(a); wdata = ~ref_mem[a] ^ a; ref_mem[a] = wdata;
    end
    @(negedge wclk); we = 0;
    for (int a = 7*256; a < 8*256; a++) rd(a);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
