// bit_sync: two-flip-flop synchronizer for a single level signal crossing
// into the clock domain of clk. The output follows the input two clock edges
// later; the reset value is chosen by RST_VAL. Used for the toggle handshake
// between the descriptor manager and the packet sender, and for the START
// indication crossing back to the Ethernet side.
module bit_sync #(
  parameter bit RST_VAL = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic d,
  output logic q
);
  logic meta;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meta <= RST_VAL;
      q    <= RST_VAL;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end
endmodule
