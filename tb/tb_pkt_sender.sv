// tb_pkt_sender: self-checking test of the packet sender with a full-size
// packet buffers memory filled with random words. Orders are given over the
// toggle handshake from a separate, slower clock; the frames on the transmit
// stream are compared byte by byte with frames built here from the order,
// the MAC addresses and the memory contents. Checks: every byte, tx_last only
// on byte 1047, the done toggle after the frame, no gap inside a frame (1048
// cycles from first to last byte when the MAC never stalls), and correct
// data when the MAC stalls at random.
module tb_pkt_sender;
  import l3fade_pkg::*;
  localparam int WORDS = 8192;
  localparam int FRAME = 1048;
  logic clk = 0, sclk = 0, rst_n = 0;
  logic [47:0] my_mac = 48'h02_12_34_56_78_9a, host_mac = 48'hde_ad_be_ef_00_01;
  logic tx_req_tgl = 0, tx_done_tgl;
  tx_order_t tx_order = '0;
  logic [12:0] pbm_raddr, waddr = '0;
  logic [31:0] pbm_rdata, wdata = '0;
  logic we = 0;
  logic [7:0] tx_data;
  logic tx_valid, tx_last, tx_ready = 1;
  logic [31:0] ref_mem [WORDS];
  int checks = 0, failures = 0;
  bit random_stall = 0;

  pkt_sender dut (.*);
  pkt_buf_mem u_mem (.wclk(sclk), .we, .waddr, .wdata, .rclk(clk), .raddr(pbm_raddr), .rdata(pbm_rdata));

  always #4 clk = ~clk;
  always #5 sclk = ~sclk;
  always @(negedge clk) tx_ready <= random_stall ? ($urandom_range(3) != 0) : 1'b1;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  function automatic logic [7:0] exp_byte(input tx_order_t o, input int i);
    logic [191:0] h;
    h = {host_mac, my_mac, 16'hfade, 16'ha5a5, o.set_no, o.buf_no, 10'd0, o.delay};
    if (i < 24) return h[191 - 8*i -: 8];
    return ref_mem[o.buf_no * 256 + (i - 24) / 4][31 - 8*((i - 24) % 4) -: 8];
  endfunction

  task automatic send(input int b, input int s, input int d);
    int i, t0, t1, bad;
    bit old;
    @(negedge sclk);
    tx_order.buf_no = PKTNO_W'(b); tx_order.set_no = SET_W'(s); tx_order.delay = DELAY_W'(d);
    old = tx_done_tgl;
    tx_req_tgl = ~tx_req_tgl;
    i = 0; bad = 0; t0 = 0; t1 = 0;
    while (i < FRAME) begin
      @(posedge clk);
      if (tx_valid && tx_ready) begin
        if (i == 0) t0 = $time;
        if (tx_data != exp_byte(tx_order, i)) bad++;
        if (tx_last != (i == FRAME - 1)) bad++;
        if (i == FRAME - 1) t1 = $time;
        i++;
      end
    end
    check(bad == 0, $sformatf("frame buf %0d: %0d wrong bytes", b, bad));
    if (!random_stall) check((t1 - t0) / 8 == FRAME - 1, $sformatf("frame took %0d cycles", (t1 - t0) / 8 + 1));
    repeat (4) @(posedge sclk);
    check(tx_done_tgl == tx_req_tgl && tx_done_tgl != old, "done toggle");
    check(!tx_valid, "idle after frame");
  endtask

  initial begin
    for (int a = 0; a < WORDS; a++) begin
      @(negedge sclk); we = 1; waddr = 13'(a); wdata = $urandom; ref_mem[a] = wdata;
    end
    @(negedge sclk); we = 0;
    rst_n = 1;
    repeat (5) @(posedge clk);
    check(!tx_valid, "idle without order");
    send(0, 0, 20000);
    send(31, 1, 25000);
    send(5, 16'hffff, 1);
    random_stall = 1;
    for (int k = 0; k < 4; k++) send($urandom_range(31), $urandom_range(65535), $urandom);
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
