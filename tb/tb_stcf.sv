// tb_stcf: STCF filter at its default size (240 x 180), against a model
// that keeps the last timestamp of each pixel and passes an event when at
// least 2 of its 8 neighbours fired within tw. Events with rising random
// timestamps fall in small clusters (mostly signal) and scattered over the
// sensor (mostly noise), including the four corners. The sink stalls at
// random. Checks every passed event in order, the number of dropped events,
// that both outcomes occurred, and that with the sink always ready an event
// takes 10 cycles.
module tb_stcf;
  import tos_pkg::*;
  localparam int W = 240, H = 180;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ts_t    tw;
  logic   in_valid, in_ready, out_valid, out_ready, dropped;
  event_t in_ev, out_ev;
  int checks = 0, failures = 0;

  stcf dut (.clk, .rst_n, .tw, .in_valid, .in_ready, .in_ev, .out_valid, .out_ready, .out_ev, .dropped);

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model
  bit     m_valid [W*H];
  ts_t    m_ts    [W*H];
  event_t exp_q [$];
  int     exp_drops = 0, got_drops = 0, n_pass = 0;
  bit     stall_en = 1;

  function automatic bit model(event_t e);
    int n;
    n = 0;
    for (int dy = -1; dy <= 1; dy++)
      for (int dx = -1; dx <= 1; dx++) begin
        int x, y;
        x = int'(e.x) + dx; y = int'(e.y) + dy;
        if ((dx != 0 || dy != 0) && x >= 0 && x < W && y >= 0 && y < H)
          if (m_valid[y*W+x] && (e.t - m_ts[y*W+x]) <= tw) n++;
      end
    m_valid[int'(e.y)*W+int'(e.x)] = 1;
    m_ts[int'(e.y)*W+int'(e.x)]    = e.t;
    return n >= 2;
  endfunction

  // sink
  always @(posedge clk) if (rst_n) begin
    if (dropped) got_drops++;
    if (out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0 || out_ev != exp_q[0]) begin
        failures++;
        if (failures < 10) $display("unexpected output x=%0d y=%0d t=%0d", out_ev.x, out_ev.y, out_ev.t);
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
  end
  always @(negedge clk) out_ready <= stall_en ? ($urandom_range(3) != 0) : 1'b1;

  ts_t now = 1000;
  task automatic send(int x, int y);
    event_t e;
    now += ts_t'($urandom_range(4));
    e.x = x_t'(x); e.y = y_t'(y); e.p = 1'($urandom); e.t = now;
    @(negedge clk);
    in_valid = 1; in_ev = e;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    if (model(e)) begin exp_q.push_back(e); n_pass++; end else exp_drops++;
    #1 in_valid = 0;
  endtask

  initial begin
    tw = 60; in_valid = 0; in_ev = '0;
    for (int i = 0; i < W*H; i++) m_valid[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      int cx, cy;
      case (i % 5)
        0, 1, 2: begin cx = 50 + $urandom_range(4); cy = 60 + $urandom_range(4); end
        3: begin cx = $urandom_range(W - 1); cy = $urandom_range(H - 1); end
        default: begin cx = ($urandom_range(1) != 0) ? 0 : W - 1; cy = ($urandom_range(1) != 0) ? 0 + $urandom_range(1) : H - 1 - $urandom_range(1); end
      endcase
      send(cx, cy);
    end
    // throughput with an always-ready sink
    stall_en = 0;
    repeat (20) @(negedge clk);
    begin
      int t0, t1;
      t0 = 0; t1 = 0;
      for (int i = 0; i < 20; i++) begin
        @(negedge clk);
        in_valid = 1; in_ev = '{x: x_t'(200), y: y_t'(100), p: 1'b0, t: now};
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        if (i == 0) t0 = $time; if (i == 19) t1 = $time;
        if (model(in_ev)) begin exp_q.push_back(in_ev); n_pass++; end else exp_drops++;
        #1 in_valid = 0;
      end
      checks++;
      if ((t1 - t0) / 10 != 19 * 10) begin failures++; $display("20 events took %0d cycles", (t1 - t0) / 10); end
    end
    repeat (40) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || got_drops != exp_drops) begin
      failures++;
      $display("left %0d expected outputs, drops %0d vs %0d", exp_q.size(), got_drops, exp_drops);
    end
    checks++;
    if (n_pass < 100 || exp_drops < 100) begin failures++; $display("pass %0d drop %0d", n_pass, exp_drops); end
    $display("signal events %0d, noise events %0d", n_pass, exp_drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
