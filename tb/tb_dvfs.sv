// tb_dvfs: DVFS controller with a 100-tick stride (200-tick window), one
// tick every 100 cycles, so that event densities from 0 to 1 per cycle span
// all operating points. Checks the 1.2 V reset point, that op changes only
// with op_update, and that each new op is the level whose window capacity
// (throughput x window, in 0.1 Meps x us / 10) is the lowest at or above the
// event count of the last two strides, counted by the testbench. Counts how
// many different levels and whether overload was reached.
module tb_dvfs;
  import tos_pkg::*;
  localparam int STRIDE = 100, TICK_EVERY = 100, WIN = 2 * STRIDE;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tick, ev_pulse, op_update;
  logic [19:0] rate;
  op_point_t op, op_prev;
  int checks = 0, failures = 0;
  int cap [7] = '{49, 111, 170, 283, 364, 510, 631};   // 0.1 Meps
  bit seen [8];

  dvfs #(.STRIDE_TICKS(STRIDE)) dut (.clk, .rst_n, .tick, .ev_pulse, .rate, .op, .op_update);

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cur = 0, prev = 0, tc = 0, strides = 0, exp_lvl = -1, exp_ovl = 0, cyc = 0;
  int pend = 0;
  always @(posedge clk) if (rst_n) begin
    if (pend == 1) begin
      checks++;
      if (!op_update || int'(op.level) != exp_lvl || int'(op.overload) != exp_ovl) begin
        failures++;
        if (failures < 10) $display("op level %0d ovl %0d, expected %0d %0d", op.level, op.overload, exp_lvl, exp_ovl);
      end
      seen[(exp_ovl != 0) ? 7 : exp_lvl] = 1;
    end else if (!op_update && cyc > 1) begin
      checks++;
      if (op != op_prev) failures++;
    end
    op_prev = op;
    if (pend > 0) pend--;
    if (ev_pulse) cur++;
    if (tick) begin
      tc++;
      if (tc == STRIDE) begin
        int s;
        s = cur + prev;
        if (strides >= 1) begin
          exp_lvl = 6; exp_ovl = 1;
          for (int i = 6; i >= 0; i--) if (s * 10 <= cap[i] * WIN) begin exp_lvl = i; exp_ovl = 0; end
          pend = 2;
        end
        prev = cur; cur = 0; tc = 0; strides++;
      end
    end
  end

  initial begin
    static int dens [9] = '{100, 55, 45, 30, 22, 14, 8, 2, 0};
    tick = 0; ev_pulse = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (op.level != 3'd6 || op.vdd_mv != 11'd1200) failures++;
    for (int ph = 0; ph < 9; ph++) begin
      for (int i = 0; i < 3 * STRIDE * TICK_EVERY; i++) begin
        @(negedge clk);
        cyc++;
        tick = (cyc % TICK_EVERY == 0);
        ev_pulse = ($urandom_range(99) < dens[ph]);
      end
    end
    @(negedge clk);
    begin
      int nlev;
      nlev = 0;
      for (int i = 0; i < 8; i++) nlev += seen[i];
      checks++;
      if (nlev < 8 || !seen[7]) begin failures++; $display("levels seen: %0d overload %0d", nlev, seen[7]); end
      $display("operating points reached: %0d (overload %0d)", nlev, seen[7]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
