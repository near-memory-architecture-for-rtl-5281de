// tb_harris_lut: Harris look-up table at its default size (240 x 180). The
// testbench plays the Harris engine, writing random corner bits at random
// times, and sends events; each output must carry the event unchanged and
// the bit last written for its pixel before the event was taken. The sink
// stalls at random; the order of outputs is checked. Both tag values must
// occur, and with the sink ready one event is taken per cycle.
module tb_harris_lut;
  import tos_pkg::*;
  localparam int W = 240, H = 180;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic lut_we, lut_corner, in_valid, in_ready, out_valid, out_ready;
  x_t lut_x; y_t lut_y;
  event_t in_ev;
  tagged_event_t out_ev;
  int checks = 0, failures = 0;

  harris_lut dut (.clk, .rst_n, .lut_we, .lut_x, .lut_y, .lut_corner,
                  .in_valid, .in_ready, .in_ev, .out_valid, .out_ready, .out_ev);

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit m [W*H];
  tagged_event_t exp_q [$];
  int n_corner = 0, n_plain = 0, n_acc = 0, stall = 1;

  always @(posedge clk) if (rst_n) begin
    // lookups see the table as it was before this edge's write
    if (in_valid && in_ready) begin
      tagged_event_t te;
      te.ev = in_ev; te.corner = m[int'(in_ev.y)*W + int'(in_ev.x)];
      exp_q.push_back(te);
      if (te.corner) n_corner++; else n_plain++;
      n_acc++;
    end
    if (lut_we) m[int'(lut_y)*W + int'(lut_x)] = lut_corner;
    if (out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0 || out_ev != exp_q[0]) failures++;
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
  end

  initial begin
    lut_we = 0; lut_corner = 0; lut_x = '0; lut_y = '0; in_valid = 0; in_ev = '0; out_ready = 0;
    for (int i = 0; i < W*H; i++) m[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (!in_ready) @(negedge clk);
    for (int i = 0; i < 6000; i++) begin
      @(negedge clk);
      // engine writes in a small window so events hit written pixels
      lut_we = ($urandom_range(1) != 0);
      lut_x = x_t'(100 + $urandom_range(7)); lut_y = y_t'(80 + $urandom_range(7));
      lut_corner = 1'($urandom);
      in_valid = ($urandom_range(2) != 0);
      in_ev.x = x_t'(100 + $urandom_range(7)); in_ev.y = y_t'(80 + $urandom_range(7));
      in_ev.p = 1'($urandom); in_ev.t = $urandom;
      out_ready = (i > 5000) ? 1'b1 : ($urandom_range(3) != 0);
    end
    @(negedge clk); lut_we = 0; in_valid = 0;
    // throughput: 50 events on consecutive cycles
    begin
      int a0;
      a0 = n_acc;
      for (int i = 0; i < 50; i++) begin
        @(negedge clk); in_valid = 1; in_ev.x = x_t'(i); in_ev.y = y_t'(i); out_ready = 1;
      end
      @(negedge clk); in_valid = 0;
      checks++;
      if (n_acc - a0 != 50) failures++;
    end
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || n_corner == 0 || n_plain == 0) failures++;
    $display("corner-tagged %0d, plain %0d", n_corner, n_plain);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
