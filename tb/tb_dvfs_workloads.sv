// tb_dvfs_workloads: the DVFS controller at its default parameters (20-bit
// counters, 5 ms stride, 10 ms window) driven at the peak event rates of
// five recorded event-camera workloads:
//     driving 25.9, laser 39.5, spinner 11.4 (Prophesee recordings),
//     dynamic_dof 4.5, shapes_dof 1.9 Meps (DAVIS240 recordings).
// Time: one tick (1 us) every TICK_DIV = 64 cycles, so up to 64 events per
// microsecond can be offered on ev_pulse; a rate of R x 0.1 Meps is made by
// an accumulator that fires when it passes 10 * TICK_DIV.
// Each workload runs for two strides, starting on a stride boundary, so the
// decision at the end of its second stride sees only its own events.
// Checks at that decision: the rate equals the events the testbench sent in
// the window (and fits in 20 bits); the operating point is the expected
// level (0.9, 1.1, 0.8, 0.6, 0.6 V) with its VDD and f_clk and no overload;
// op_update comes two cycles after the stride's last tick (rate register,
// then operating-point register). Between
// decisions op must not change. Every level expected is worked out from the
// capacity table, not read from the design.
module tb_dvfs_workloads;
  import tos_pkg::*;
  localparam int STRIDE = 5000, TICK_DIV = 64, NW = 5;
  localparam longint STRIDE_CYC = longint'(STRIDE) * TICK_DIV;
  localparam int CAP [7] = '{49, 111, 170, 283, 364, 510, 631};  // 0.1 Meps
  localparam int RATE [NW] = '{259, 395, 114, 45, 19};            // 0.1 Meps
  localparam string NAME [NW] = '{"driving", "laser", "spinner", "dynamic_dof", "shapes_dof"};

  logic clk = 0, rst_n = 0, tick = 0, ev_pulse = 0;
  logic [19:0] rate;
  op_point_t op;
  logic op_update;

  dvfs dut (.clk, .rst_n, .tick, .ev_pulse, .rate, .op, .op_update);

  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #(64'd2 * STRIDE_CYC * (2 * NW + 1));
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // lowest level whose capacity covers r events per 10 ms window
  function automatic int exp_level(int r);
    for (int i = 0; i < 7; i++)
      if (longint'(r) * 10 <= longint'(CAP[i]) * 10000) return i;
    return 6;
  endfunction

  // events sent per stride, as counted by the testbench
  int stride_ev [2*NW];
  int sidx = 0;
  int acc = 0;
  int wl = 0;
  longint cyc = 0;
  longint stride_end_cyc = 0;
  int decisions = 0;
  op_point_t op_prev;

  // camera and timer, driven on the falling edge
  initial begin
    rst_n = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 2 * NW; s++) begin
      wl = s / 2;
      stride_ev[s] = 0;
      for (longint c = 0; c < STRIDE_CYC; c++) begin
        acc += RATE[wl];
        ev_pulse = 0;
        if (acc >= 10 * TICK_DIV) begin
          acc -= 10 * TICK_DIV;
          ev_pulse = 1;
          stride_ev[s]++;
        end
        tick = (c % longint'(TICK_DIV) == longint'(TICK_DIV - 1));
        @(negedge clk);
      end
    end
    ev_pulse = 0; tick = 0;
    repeat (8) @(negedge clk);
    check(decisions == NW, $sformatf("%0d workload decisions checked", decisions));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor on the rising edge
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (tick) sidx_tick();
    if (op_update) begin
      int s, w, exp_rate, lv;
      s = sidx - 1;  // stride that just ended
      check(cyc == stride_end_cyc + 2, $sformatf("op_update at %0d, stride ended %0d", cyc, stride_end_cyc));
      if (s % 2 == 1) begin
        w = s / 2;
        exp_rate = stride_ev[s] + stride_ev[s-1];
        lv = exp_level(exp_rate);
        check(int'(rate) == exp_rate, $sformatf("%s rate %0d exp %0d", NAME[w], rate, exp_rate));
        check(exp_rate < (1 << 20), "window count fits 20 bits");
        check(int'(op.level) == lv, $sformatf("%s level %0d exp %0d", NAME[w], op.level, lv));
        check(!op.overload, $sformatf("%s not overloaded", NAME[w]));
        check(int'(op.vdd_mv) == 600 + 100 * lv, $sformatf("%s vdd %0d", NAME[w], op.vdd_mv));
        check(int'(op.fclk_mhz) == (CAP[lv] * 16 + 5) / 10, $sformatf("%s fclk %0d", NAME[w], op.fclk_mhz));
        $display("%-12s %0d.%0d Meps  window %7d events  -> %0d mV, %0d MHz",
                 NAME[w], RATE[w] / 10, RATE[w] % 10, rate, op.vdd_mv, op.fclk_mhz);
        decisions++;
      end
    end else if (cyc > 2) begin
      check(op == op_prev, "op steady between decisions");
    end
    op_prev <= op;
  end

  int tick_in_stride = 0;
  task automatic sidx_tick();
    tick_in_stride++;
    if (tick_in_stride == STRIDE) begin
      tick_in_stride = 0;
      stride_end_cyc = cyc;
      sidx++;
    end
  endtask
endmodule
