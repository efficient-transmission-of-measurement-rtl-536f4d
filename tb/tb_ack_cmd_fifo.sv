// tb_ack_cmd_fifo: self-checking test of the asynchronous acknowledge and
// commands FIFO. The write side (Ethernet clock, 8 ns) and read side (system
// clock, 10 ns, then 3 ns) push and pop at random; a queue is the reference.
// Checks: every popped entry equals the oldest pushed one, nothing is lost
// or duplicated, the FIFO does report full when the reader stalls (and then
// holds exactly DEPTH entries), and empty is reported when drained.
module tb_ack_cmd_fifo;
  import l3fade_pkg::*;
  localparam int DEPTH = 16;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic wr_en = 0, rd_en = 0, full, empty;
  logic [CMD_W-1:0] wr_data = '0, rd_data;
  logic [CMD_W-1:0] q[$];
  int checks = 0, failures = 0, pushed = 0, popped = 0, saw_full = 0;
  int rper = 5;
  bit stall_rd = 0;

  ack_cmd_fifo #(.DEPTH(DEPTH)) dut (.*);
  always #4 wclk = ~wclk;
  always begin #rper; rclk = ~rclk; end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // writer
  always @(negedge wclk) begin
    wr_en <= 0;
    if (wrst_n && pushed < 3000 && $urandom_range(3) != 0 && !full) begin
      wr_en <= 1; wr_data <= CMD_W'($urandom);
    end
  end
  always @(posedge wclk) if (wr_en && !full) begin q.push_back(wr_data); pushed++; end
  always @(posedge wclk) if (full) saw_full++;

  // reader
  always @(negedge rclk) begin
    rd_en <= rrst_n && !stall_rd && !empty && $urandom_range(2) != 0;
  end
  always @(posedge rclk) if (rd_en && !empty) begin
    logic [CMD_W-1:0] e;
    e = q.pop_front();
    popped++;
    check(rd_data == e, $sformatf("pop %0d: %h expected %h", popped, rd_data, e));
  end

  initial begin
    repeat (3) @(posedge wclk);
    wrst_n = 1; rrst_n = 1;
    // phase 1: reader stalled until full
    stall_rd = 1;
    wait (full);
    repeat (10) @(posedge wclk);
    check(q.size() == DEPTH, $sformatf("full at %0d entries", q.size()));
    stall_rd = 0;
    wait (pushed >= 1500);
    rper = 2;   // fast reader
    wait (pushed >= 3000);
    repeat (40) @(posedge rclk);
    check(empty, "empty after drain");
    check(q.size() == 0 && popped == pushed, $sformatf("pushed %0d popped %0d", pushed, popped));
    check(saw_full > 0, "full seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
