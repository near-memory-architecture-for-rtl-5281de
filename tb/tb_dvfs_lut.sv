// tb_dvfs_lut: at a 10 ms window, a throughput of R Meps is R * 10^4 events.
// Checks every boundary of the seven operating points (at the threshold the
// lower point is chosen, one event more selects the next), VDD = 0.6 V +
// 0.1 V per level, f_clk = 16 cycles x throughput, rate 0, and overload
// above 63.1 Meps.
module tb_dvfs_lut;
  import tos_pkg::*;
  logic [19:0] rate;
  op_point_t   op;
  int checks = 0, failures = 0;
  // throughput per level in events per 10 ms, and f_clk in MHz
  int cap [7]  = '{49000, 111000, 170000, 283000, 364000, 510000, 631000};
  int fclk [7] = '{78, 178, 272, 453, 582, 816, 1010};

  dvfs_lut dut (.rate, .op);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_level(int r, int lvl, bit ovl);
    rate = 20'(r); #1;
    checks++;
    if (int'(op.level) != lvl || op.overload != ovl || int'(op.vdd_mv) != 600 + 100 * lvl ||
        int'(op.fclk_mhz) != fclk[lvl]) begin
      failures++;
      $display("rate %0d: level %0d vdd %0d fclk %0d ovl %0d", r, op.level, op.vdd_mv, op.fclk_mhz, op.overload);
    end
  endtask

  initial begin
    expect_level(0, 0, 0);
    for (int i = 0; i < 7; i++) begin
      expect_level(cap[i], i, 0);
      expect_level(cap[i] - 1, i == 0 ? 0 : ((cap[i] - 1 <= cap[i-1]) ? i - 1 : i), 0);
      if (i < 6) expect_level(cap[i] + 1, i + 1, 0);
    end
    expect_level(631001, 6, 1);
    expect_level(20'hFFFFF, 6, 1);
    // random rates against a direct search of the table
    for (int n = 0; n < 2000; n++) begin
      int r, lvl;
      r = $urandom_range(700000);
      lvl = 7;
      for (int i = 6; i >= 0; i--) if (r <= cap[i]) lvl = i;
      if (lvl == 7) expect_level(r, 6, 1); else expect_level(r, lvl, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
