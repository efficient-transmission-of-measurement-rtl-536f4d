// tb_pkt_receiver: self-checking test of the packet receiver. Frames are
// driven on the receive stream with random idle cycles between bytes: START,
// STOP and ACK frames for this board (padded to 60 bytes), and frames that
// must be ignored (other destination, other Ethernet type, flagged bad,
// shorter than 20 bytes, unknown opcode, DATA). Each expected FIFO entry is
// queued here and compared with what the receiver pushes; the learned host
// address, and the drop of an entry while the FIFO is full, are checked.
module tb_pkt_receiver;
  import l3fade_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [47:0] my_mac = 48'h02_00_00_00_00_07;
  logic [7:0] rx_data = '0;
  logic rx_valid = 0, rx_last = 0, rx_err = 0;
  logic fifo_wr_en, fifo_full = 0, drop;
  cmd_t fifo_wr_data;
  logic [47:0] host_mac;
  cmd_t expq[$];
  int checks = 0, failures = 0, drops = 0;

  pkt_receiver dut (.*);
  always #4 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) begin
    if (rst_n && drop) drops++;
    if (rst_n && fifo_wr_en) begin
      cmd_t e;
      if (expq.size() == 0) check(0, $sformatf("unexpected FIFO push %h at %0t", fifo_wr_data, $time));
      else begin
        e = expq.pop_front();
        check(fifo_wr_data == e, $sformatf("entry %h expected %h", fifo_wr_data, e));
      end
    end
  end

  task automatic frame(input logic [47:0] dst, src, input logic [15:0] typ, op,
                       input logic [31:0] label, input int len, input bit err);
    logic [159:0] h;
    h = {dst, src, typ, op, label};
    for (int i = 0; i < len; i++) begin
      @(negedge clk);
      rx_valid = 1;
      rx_data  = (i < 20) ? h[159 - 8*i -: 8] : 8'($urandom);
      rx_last  = (i == len - 1);
      rx_err   = err && (i == len - 1);
      if ($urandom_range(3) == 0) begin
        @(negedge clk); rx_valid = 0;
        @(negedge clk);
      end
    end
    @(negedge clk); rx_valid = 0; rx_last = 0; rx_err = 0;
    repeat (3) @(negedge clk);
  endtask

  function automatic cmd_t mk(input cmd_kind_e k, input int s, input int p);
    cmd_t c = '0;
    c.kind = k; c.set_no = SET_W'(s); c.pkt_no = PKTNO_W'(p);
    return c;
  endfunction

  localparam logic [47:0] HOST = 48'h00_1b_21_aa_bb_cc;

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    expq.push_back(mk(CMD_START, 0, 0));
    frame(my_mac, HOST, 16'hfade, 16'h0001, 32'h0, 60, 0);
    check(host_mac == HOST, "host address learned from START");
    for (int k = 0; k < 20; k++) begin
      int s, p;
      s = $urandom_range(65535); p = $urandom_range(63);
      expq.push_back(mk(CMD_ACK, s, p));
      frame(my_mac, HOST, 16'hfade, 16'h0003, {16'(s), 6'(p), 10'($urandom)}, 60, 0);
    end
    // ignored frames
    frame(48'h02_00_00_00_00_08, HOST, 16'hfade, 16'h0003, 32'h0001_0400, 60, 0);  // other board
    frame(my_mac, HOST, 16'h0800, 16'h0003, 32'h0001_0400, 60, 0);               // IPv4
    frame(my_mac, HOST, 16'hfade, 16'h0003, 32'h0001_0400, 60, 1);               // bad FCS
    frame(my_mac, HOST, 16'hfade, 16'h0003, 32'h0001_0400, 19, 0);               // too short
    frame(my_mac, HOST, 16'hfade, 16'h0007, 32'h0001_0400, 60, 0);               // unknown op
    frame(my_mac, HOST, 16'hfade, 16'ha5a5, 32'h0001_0400, 1048, 0);             // DATA
    expq.push_back(mk(CMD_ACK, 3, 2));
    frame(my_mac, HOST, 16'hfade, 16'h0003, {16'd3, 6'd2, 10'd0}, 20, 0);        // exactly 20 bytes
    expq.push_back(mk(CMD_STOP, 0, 0));
    frame(my_mac, 48'h11_22_33_44_55_66, 16'hfade, 16'h0005, 32'h0, 60, 0);
    check(host_mac == HOST, "STOP does not change the host address");
    // FIFO full: entry dropped
    fifo_full = 1;
    frame(my_mac, HOST, 16'hfade, 16'h0003, 32'h0002_0800, 60, 0);
    fifo_full = 0;
    check(drops == 1, $sformatf("drop count %0d", drops));
    expq.push_back(mk(CMD_START, 0, 0));
    frame(my_mac, 48'h11_22_33_44_55_66, 16'hfade, 16'h0001, 32'h0, 60, 0);
    check(host_mac == 48'h11_22_33_44_55_66, "new host address from second START");
    check(expq.size() == 0, $sformatf("%0d expected entries missing", expq.size()));
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
