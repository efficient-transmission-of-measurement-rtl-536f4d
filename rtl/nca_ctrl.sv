// nca_ctrl: network congestion avoidance. It owns the delay that the
// descriptor manager keeps between two packet transmissions, and adapts it
// to the share of packets that had to be resent.
//
// Every transmission is reported by a one-cycle `sent` pulse, with `resent`
// high when the packet had been sent before (S flag already set). Both are
// counted. On the transmission that brings the sent counter to N_UPDATE the
// ratio resent/sent is compared with two thresholds: above T_HIGH the delay
// is multiplied by alpha_incr > 1, below T_LOW by alpha_decr < 1; then both
// counters are cleared. `restart` (a START command) reloads the initial delay
// of 200 us and clears the counters.
//
// The algorithm, N_UPDATE, the thresholds, the two factors and the 200 us
// start value are the paper's. The thresholds and factors are restricted to
// the forms the paper uses, so that no divider or multiplier is needed:
//   T_high = 2^-T_HIGH_SH, T_low = 2^-T_LOW_SH
//   alpha_incr = 1 + 2^-INCR_SH, alpha_decr = 1 - 2^-DECR_SH
// (paper's main setting: 1/16, 1/64, 1.25, 0.9375 -> 4, 6, 2, 4; its second
// setting N_UPDATE=10000, 1/8, 1/32, 1.25, 0.75 -> 3, 5, 2, 2).
// Design choices: the delay is counted in system clock cycles (CLK_HZ is
// assumed to be 100 MHz); the shifted terms are truncated, so the delay
// stops falling once delay >> DECR_SH is zero; an increase saturates at
// the largest DELAY_W-bit value. The new delay is visible the cycle after
// the deciding `sent` pulse.
module nca_ctrl #(
  parameter int unsigned CLK_HZ        = 100_000_000,
  parameter int unsigned INIT_DELAY_US = 200,
  parameter int unsigned N_UPDATE      = 3000,
  parameter int unsigned T_HIGH_SH     = 4,
  parameter int unsigned T_LOW_SH      = 6,
  parameter int unsigned INCR_SH       = 2,
  parameter int unsigned DECR_SH       = 4,
  parameter int unsigned DELAY_W       = l3fade_pkg::DELAY_W,
  localparam int unsigned CNT_W        = $clog2(N_UPDATE + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               restart,
  input  logic               sent,
  input  logic               resent,
  output logic [DELAY_W-1:0] delay,
  output logic               incr_evt,   // one-cycle pulse: delay was increased
  output logic               decr_evt    // one-cycle pulse: delay was decreased
);
  localparam longint unsigned INIT_DELAY_L = longint'(CLK_HZ) / 1_000_000 * INIT_DELAY_US;
  localparam logic [DELAY_W-1:0] INIT_DELAY = DELAY_W'(INIT_DELAY_L);

  logic [CNT_W-1:0] c_sent, c_rsnt;
  logic [CNT_W-1:0] c_sent_n, c_rsnt_n;
  logic             update;
  logic             too_many, few_enough;
  logic [DELAY_W:0] delay_up;
  logic [DELAY_W-1:0] delay_dn;

  assign c_sent_n = c_sent + CNT_W'(1);
  assign c_rsnt_n = c_rsnt + CNT_W'(resent);
  assign update   = sent && (c_sent_n == CNT_W'(N_UPDATE));

  // ratio > 2^-H  <=>  resent * 2^H > sent ; ratio < 2^-L <=> resent * 2^L < sent
  assign too_many   = ({32'd0, c_rsnt_n} << T_HIGH_SH) > {32'd0, c_sent_n};
  assign few_enough = ({32'd0, c_rsnt_n} << T_LOW_SH)  < {32'd0, c_sent_n};

  assign delay_up = {1'b0, delay} + {1'b0, delay >> INCR_SH};
  assign delay_dn = delay - (delay >> DECR_SH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_sent   <= '0;
      c_rsnt   <= '0;
      delay    <= INIT_DELAY;
      incr_evt <= 1'b0;
      decr_evt <= 1'b0;
    end else begin
      incr_evt <= 1'b0;
      decr_evt <= 1'b0;
      if (restart) begin
        c_sent <= '0;
        c_rsnt <= '0;
        delay  <= INIT_DELAY;
      end else if (update) begin
        c_sent <= '0;
        c_rsnt <= '0;
        if (too_many) begin
          delay    <= delay_up[DELAY_W] ? '1 : delay_up[DELAY_W-1:0];
          incr_evt <= 1'b1;
        end else if (few_enough) begin
          delay    <= delay_dn;
          decr_evt <= 1'b1;
        end
      end else if (sent) begin
        c_sent <= c_sent_n;
        c_rsnt <= c_rsnt_n;
      end
    end
  end
endmodule
