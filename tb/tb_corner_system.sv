// tb_corner_system: end-to-end test of the corner-detection front end at a
// reduced size (32 x 20 sensor in two 16-column NMC-TOS blocks, DVFS stride
// of 10 ticks with one tick every 1000 cycles, i.e. a 1 us tick at 1 GHz).
// The testbench plays the camera, the Harris engine and the application,
// and keeps its own models of every block:
//   STCF   last timestamp per pixel, pass with >= 2 neighbours within tw;
//   TOS    8-bit Algorithm-1 update (v-1, zero below TH, 255 at the event);
//   LUT    corner bit per pixel as written by the "Harris engine";
//   DVFS   events per stride from the accepted-event stream, window of two
//          strides, operating point = lowest level whose capacity covers it.
// Checks: every tagged output event (order, contents, corner bit); the TOS
// of both blocks read back through the frame port; every DVFS rate and
// operating point. Mechanisms that must each happen at least once (counted,
// a failure if never seen): noise drop, signal pass, back pressure on the
// camera, output stall, patch across the block boundary, patch clipped at
// the sensor edge, threshold zeroing, corner tag, frame read held off while
// the TOS is busy, DVFS raising and lowering the operating point.
module tb_corner_system;
  import tos_pkg::*;
  localparam int SW = 32, SH = 20, BC = 16, P = 7, H = 3;
  localparam int STRIDE = 10, TICK_DIV = 1000, WIN = 2 * STRIDE;
  localparam int TH = 250;
  localparam longint STRIDE_CYC = longint'(STRIDE) * TICK_DIV;
  localparam longint RUN_CYCLES = STRIDE_CYC * 14 + 200000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic tick, th_we, in_valid, in_ready, out_valid, out_ready;
  logic fr_req, fr_blk, fr_gnt, fr_rvalid, lut_we, lut_corner, op_update, noise_drop, tos_busy;
  logic [7:0] th;
  ts_t tw_stcf;
  event_t in_ev;
  tagged_event_t out_ev;
  logic [$clog2(SH)-1:0] fr_row;
  logic [BC-1:0][WORD_W-1:0] fr_data;
  x_t lut_x; y_t lut_y;
  op_point_t op;
  logic [19:0] rate;

  corner_system #(.SENSOR_W(SW), .SENSOR_H(SH), .BLOCK_COLS(BC), .STRIDE_TICKS(STRIDE)) dut (
    .clk, .rst_n, .tick, .tw_stcf, .th_we, .th,
    .in_valid, .in_ready, .in_ev, .out_valid, .out_ready, .out_ev,
    .fr_req, .fr_blk, .fr_row, .fr_gnt, .fr_rvalid, .fr_data,
    .lut_we, .lut_x, .lut_y, .lut_corner,
    .op, .op_update, .rate, .noise_drop, .tos_busy);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #(64'd10 * RUN_CYCLES * 3);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- models ----------------
  bit  s_valid [SW*SH];
  ts_t s_ts    [SW*SH];
  int  tos     [SH][SW];
  bit  lut     [SW*SH];
  tagged_event_t exp_q [$];
  int cap [7] = '{49, 111, 170, 283, 364, 510, 631};

  // mechanism counters
  int n_drop = 0, n_pass = 0, n_backpressure = 0, n_out_stall = 0, n_straddle = 0;
  int n_clip = 0, n_zeroed = 0, n_corner = 0, n_fr_held = 0, n_dvfs_up = 0, n_dvfs_down = 0;

  function automatic bit stcf_model(event_t e);
    int n, a;
    n = 0;
    for (int dy = -1; dy <= 1; dy++)
      for (int dx = -1; dx <= 1; dx++) begin
        int x, y;
        x = int'(e.x) + dx; y = int'(e.y) + dy;
        if ((dx != 0 || dy != 0) && x >= 0 && x < SW && y >= 0 && y < SH)
          if (s_valid[y*SW+x] && (e.t - s_ts[y*SW+x]) <= tw_stcf) n++;
      end
    a = int'(e.y) * SW + int'(e.x);
    s_valid[a] = 1; s_ts[a] = e.t;
    return n >= 2;
  endfunction

  function automatic void tos_model(int x, int y);
    if ((x - H) / BC != (x + H) / BC && x - H >= 0 && x + H < SW) n_straddle++;
    if (x - H < 0 || y - H < 0 || x + H >= SW || y + H >= SH) n_clip++;
    for (int yy = y - H; yy <= y + H; yy++)
      for (int xx = x - H; xx <= x + H; xx++)
        if (yy >= 0 && yy < SH && xx >= 0 && xx < SW) begin
          int v;
          v = tos[yy][xx] - 1;
          if (v < TH) begin
            if (tos[yy][xx] != 0) n_zeroed++;
            v = 0;
          end
          tos[yy][xx] = v;
        end
    tos[y][x] = 255;
  endfunction

  // ---------------- monitors ----------------
  longint unsigned cyc = 0;
  longint unsigned stride_end_cyc [$];
  longint unsigned accept_cyc [$];
  int obs_rate [$];
  int obs_level [$];
  int tcnt = 0, last_level = 6;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    // camera side
    if (in_valid && in_ready) begin
      if (stcf_model(in_ev)) begin
        tagged_event_t te;
        te.ev = in_ev; te.corner = 1'b0;
        exp_q.push_back(te);
        n_pass++;
      end else n_drop++;
    end
    if (in_valid && !in_ready) n_backpressure++;
    // application side: an output means the event was accepted one edge ago
    if (out_valid && out_ready) begin
      check(exp_q.size() != 0, "unexpected output");
      if (exp_q.size() != 0) begin
        tagged_event_t te;
        te = exp_q.pop_front();
        te.corner = lut[int'(te.ev.y) * SW + int'(te.ev.x)];
        check(out_ev == te, $sformatf("output event x=%0d y=%0d c=%0d", out_ev.ev.x, out_ev.ev.y, out_ev.corner));
        if (te.corner) n_corner++;
        tos_model(int'(te.ev.x), int'(te.ev.y));
      end
      accept_cyc.push_back(cyc - 1);
    end
    if (out_valid && !out_ready) n_out_stall++;
    // DVFS time base
    if (tick) begin
      tcnt++;
      if (tcnt == STRIDE) begin tcnt = 0; stride_end_cyc.push_back(cyc); end
    end
    if (op_update) begin
      obs_rate.push_back(int'(rate));
      obs_level.push_back(int'(op.level));
      check(op.vdd_mv == 11'(600 + 100 * int'(op.level)), "vdd matches level");
      if (int'(op.level) > last_level) n_dvfs_up++;
      if (int'(op.level) < last_level) n_dvfs_down++;
      last_level = int'(op.level);
    end
    if (lut_we) lut[int'(lut_y) * SW + int'(lut_x)] = lut_corner;
  end

  always @(negedge clk) tick <= rst_n && ((cyc % TICK_DIV) == TICK_DIV - 1);

  // ---------------- stimulus ----------------
  ts_t now = 100;
  int  out_stall_pct = 0;
  always @(negedge clk) out_ready <= ($urandom_range(99) >= out_stall_pct);

  // camera: one event offered per 'gap' cycles (0 = back to back)
  task automatic camera(int n, int gap, int mode);
    for (int i = 0; i < n; i++) begin
      int x, y;
      case (mode)
        0: begin x = BC - 2 + $urandom_range(3); y = 8 + $urandom_range(3); end   // block boundary
        1: begin x = ($urandom_range(1) != 0) ? $urandom_range(2) : SW - 1 - $urandom_range(2);
                 y = ($urandom_range(1) != 0) ? $urandom_range(2) : SH - 1 - $urandom_range(2); end
        2: begin x = $urandom_range(SW - 1); y = $urandom_range(SH - 1); end    // scattered
        default: begin x = 10 + $urandom_range(5); y = 6 + $urandom_range(5); end   // dense spot
      endcase
      now += ts_t'(1 + $urandom_range(3));
      @(negedge clk);
      in_valid = 1; in_ev = '{x: x_t'(x), y: y_t'(y), p: 1'($urandom), t: now};
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1 in_valid = 0;
      repeat (gap) @(negedge clk);
    end
  endtask

  // camera for a given number of cycles
  task automatic camera_for(longint unsigned ncyc, int gap, int mode);
    longint unsigned stop;
    stop = cyc + ncyc;
    while (cyc < stop) camera(1, gap, mode);
  endtask

  task automatic drain();
    repeat (60) @(negedge clk);
    while (tos_busy || out_valid || exp_q.size() != 0) @(negedge clk);
  endtask

  task automatic compare_tos();
    for (int rb = 0; rb < 2 * SH; rb++) begin
      int r, b;
      r = rb / 2; b = rb % 2;
      @(negedge clk);
      fr_req = 1; fr_row = ($clog2(SH))'(r); fr_blk = 1'(b);
      #1;
      while (!fr_gnt) begin @(negedge clk); #1; end
      @(negedge clk);
      fr_req = 0;
      check(fr_rvalid, "frame read data valid");
      for (int c = 0; c < BC; c++)
        check(int'(tos_expand(fr_data[c])) == tos[r][b * BC + c],
              $sformatf("TOS[%0d][%0d]=%0d exp %0d", r, b * BC + c, tos_expand(fr_data[c]), tos[r][b * BC + c]));
    end
  endtask

  initial begin
    in_valid = 0; in_ev = '0; th_we = 0; th = '0; tw_stcf = 40; fr_req = 0; fr_blk = 0; fr_row = '0;
    lut_we = 0; lut_corner = 0; lut_x = '0; lut_y = '0; tick = 0;
    for (int i = 0; i < SW*SH; i++) begin s_valid[i] = 0; lut[i] = 0; end
    for (int r = 0; r < SH; r++) for (int c = 0; c < SW; c++) tos[r][c] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); th_we = 1; th = 8'(TH);
    @(negedge clk); th_we = 0;
    while (!in_ready) @(negedge clk);
    // Harris engine marks a few corners
    for (int i = 0; i < 60; i++) begin
      @(negedge clk);
      lut_we = 1; lut_x = x_t'($urandom_range(SW - 1)); lut_y = y_t'($urandom_range(SH - 1));
      lut_corner = ($urandom_range(2) != 0);
    end
    @(negedge clk); lut_we = 0;
    // phase 1: boundary cluster, back to back, output stalls
    out_stall_pct = 30;
    camera(300, 0, 0);
    // a frame read while the TOS is busy must wait
    @(negedge clk);
    in_valid = 1; in_ev = '{x: x_t'(BC), y: y_t'(9), p: 1'b1, t: now};
    fr_req = 1; fr_row = '0; fr_blk = 0;
    @(posedge clk); while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
    @(negedge clk);
    begin
      int waited;
      waited = 0;
      #1;
      while (!fr_gnt) begin
        if (tos_busy) waited++;
        @(negedge clk); #1;
      end
      if (waited > 0) n_fr_held++;
      @(negedge clk); fr_req = 0;
    end
    drain();
    compare_tos();
    // phase 2: corners and scattered noise
    camera(200, 0, 1);
    camera(200, 2, 2);
    out_stall_pct = 0;
    drain();
    compare_tos();
    // phase 3: DVFS - event density changes over several strides
    tw_stcf = 200;
    camera_for(STRIDE_CYC * 3 / 2, 600, 3);   // sparse
    camera_for(STRIDE_CYC * 4, 0, 3);         // as fast as the TOS takes them
    camera_for(STRIDE_CYC * 3 / 2, 40, 3);
    camera_for(STRIDE_CYC * 3 / 2, 180, 3);
    camera_for(STRIDE_CYC * 3 / 2, 600, 3);
    drain();
    compare_tos();
    // DVFS check against the accepted-event stream
    begin
      int j0, ai, ns;
      ns = stride_end_cyc.size();
      // rate updates come from the second stride end on
      check(obs_rate.size() >= ns - 2 && obs_rate.size() <= ns - 1, $sformatf("number of DVFS updates %0d for %0d strides", obs_rate.size(), ns));
      for (int j = 1; j <= obs_rate.size() && j < ns; j++) begin
        longint unsigned lo, hi;
        int cnt, lvl;
        lo = (j >= 2) ? stride_end_cyc[j-2] : 0;
        hi = stride_end_cyc[j];
        cnt = 0;
        foreach (accept_cyc[k]) if (accept_cyc[k] > lo && accept_cyc[k] <= hi) cnt++;
        lvl = 6;
        for (int i = 6; i >= 0; i--) if (cnt * 10 <= cap[i] * WIN) lvl = i;
        check(obs_rate[j-1] == cnt, $sformatf("rate %0d exp %0d (stride %0d)", obs_rate[j-1], cnt, j));
        check(obs_level[j-1] == lvl, $sformatf("level %0d exp %0d", obs_level[j-1], lvl));
      end
    end
    $display("mechanisms: drop=%0d pass=%0d backpressure=%0d out_stall=%0d straddle=%0d clip=%0d zeroed=%0d corner=%0d fr_held=%0d dvfs_up=%0d dvfs_down=%0d",
             n_drop, n_pass, n_backpressure, n_out_stall, n_straddle, n_clip, n_zeroed, n_corner, n_fr_held, n_dvfs_up, n_dvfs_down);
    check(n_drop > 0, "noise drop seen");
    check(n_pass > 0, "signal pass seen");
    check(n_backpressure > 0, "back pressure seen");
    check(n_out_stall > 0, "output stall seen");
    check(n_straddle > 0, "block-boundary patch seen");
    check(n_clip > 0, "edge-clipped patch seen");
    check(n_zeroed > 0, "threshold zeroing seen");
    check(n_corner > 0, "corner tag seen");
    check(n_fr_held > 0, "frame read held off");
    check(n_dvfs_up > 0, "DVFS raised the operating point");
    check(n_dvfs_down > 0, "DVFS lowered the operating point");
    $display("cycles %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
