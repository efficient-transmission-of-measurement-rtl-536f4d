// pkt_buf_mem: the packet buffers memory. It holds NPKTS packet buffers of
// PKT_BYTES bytes each (32 x 1024 bytes = 32 KiB by default), organised as
// 32-bit words: the word address is {buffer number, word in buffer}, so
// the i-th packet of any set always lives in buffer i. It is a simple
// dual-port, dual-clock RAM: the write port is clocked by the system clock
// (descriptor manager side), the read port by the Ethernet clock (packet
// sender side). A read returns the addressed word one read-clock edge after
// the address is presented (registered output, as a block RAM does).
// Buffer count and size follow the paper; the word organisation and the
// one-cycle read latency are this design's choices.
module pkt_buf_mem #(
  parameter int unsigned NPKTS     = 32,
  parameter int unsigned PKT_BYTES = 1024,
  parameter int unsigned DATA_W    = 32,
  localparam int unsigned WORDS    = NPKTS * PKT_BYTES / (DATA_W / 8),
  localparam int unsigned AW       = $clog2(WORDS)
) (
  input  logic              wclk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic              rclk,
  input  logic [AW-1:0]     raddr,
  output logic [DATA_W-1:0] rdata
);
  logic [DATA_W-1:0] mem [WORDS];

  always_ff @(posedge wclk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge rclk) begin
    rdata <= mem[raddr];
  end
endmodule
