// dvfs_lut: maps an event-rate estimate to a DVFS operating point.
//
// Seven operating points, 0.6 V to 1.2 V in 0.1 V steps. Each has a
// patch-update throughput (7 x 7 patch): 4.9, 11.1, 17.0, 28.3, 36.4, 51.0
// and 63.1 Meps. The two ends are quoted by the paper; the middle five are
// the conventional 2.55 Meps divided by the normalized delays it reports per
// voltage. With a TW_DVFS window of 10 ms a throughput of R Meps is R * 10^4
// events per window, which gives the thresholds below. The LUT returns the
// lowest point whose throughput is at or above the rate; above 63.1 Meps it
// returns 1.2 V and sets overload. f_clk is (2P+2) = 16 cycles per event
// times the throughput (1010 MHz at 1.2 V, 78 MHz at 0.6 V), matching a
// 16 ns patch update at 1.2 V and about 203 ns at 0.6 V with one cycle per
// phase. Combinational. The table contents are this design's; the paper only
// says a LUT maps the rate to VDD and f_clk.
module dvfs_lut
  import tos_pkg::*;
#(
  parameter int unsigned CNT_W     = 20,
  parameter int unsigned WINDOW_US = 10000
) (
  input  logic [CNT_W-1:0] rate,   // events per TW_DVFS
  output op_point_t        op
);

  localparam int unsigned LEVELS = 7;
  // Throughput per level in units of 0.1 Meps, lowest voltage first.
  localparam int unsigned CAP_DMEPS [LEVELS] = '{49, 111, 170, 283, 364, 510, 631};

  always_comb begin
    op.level    = 3'(LEVELS - 1);
    op.overload = 1'b1;
    for (int i = LEVELS - 1; i >= 0; i--) begin
      // events per window this level can take: cap[0.1 Meps] * window[us] / 10
      if (64'(rate) * 64'd10 <= 64'(CAP_DMEPS[i]) * 64'(WINDOW_US)) begin
        op.level    = 3'(i);
        op.overload = 1'b0;
      end
    end
    op.vdd_mv   = 11'(600 + 100 * int'(op.level));
    op.fclk_mhz = 11'((CAP_DMEPS[op.level] * (2 * PATCH + 2) + 5) / 10);
  end

endmodule
