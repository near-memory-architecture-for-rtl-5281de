// tb_corner_system_workloads: the whole front end at its default size
// (240 x 180, two NMC-TOS blocks, 7 x 7 patch) fed at the peak event rates
// of five recorded workloads, each with the clock frequency that the DVFS
// table picks for that rate:
//     driving     25.9 Meps at 453 MHz (0.9 V)
//     laser       39.5 Meps at 816 MHz (1.1 V)
//     spinner     11.4 Meps at 272 MHz (0.8 V)
//     dynamic_dof  4.5 Meps at  78 MHz (0.6 V)
//     shapes_dof   1.9 Meps at  78 MHz (0.6 V)
// and one rate above the top operating point, 70 Meps at 1010 MHz.
// One simulated cycle is one clock period at that frequency; the camera
// offers events evenly spaced in time (an accumulator of rate / f_clk),
// mostly in small clusters so most of them pass the noise filter.
// Timestamps are in microseconds.
// Checks: below capacity the camera never waits (in_valid with in_ready
// low) and no event is lost (passed + dropped = sent, outputs = passed);
// above capacity the camera does wait and events are taken at most once
// per 2P+2 = 16 cycles. The TOS contents are checked by the other tests.
module tb_corner_system_workloads;
  import tos_pkg::*;
  localparam int SW = 240, SH = 180, NW = 6, NEV = 3000, PERIOD = 16;
  localparam string NAME [NW] = '{"driving", "laser", "spinner", "dynamic_dof", "shapes_dof", "overload"};
  localparam int RATE [NW] = '{259, 395, 114, 45, 19, 700};     // 0.1 Meps
  localparam int FCLK [NW] = '{453, 816, 272, 78, 78, 1010};    // MHz

  logic clk = 0, rst_n = 0, tick = 0;
  ts_t tw_stcf;
  logic th_we;
  logic [7:0] th;
  logic in_valid, in_ready, out_valid, out_ready;
  event_t in_ev;
  tagged_event_t out_ev;
  logic fr_req, fr_blk, fr_gnt, fr_rvalid, lut_we, lut_corner, op_update, noise_drop, tos_busy;
  logic [7:0] fr_row;
  logic [119:0][4:0] fr_data;
  x_t lut_x;
  y_t lut_y;
  op_point_t op;
  logic [19:0] rate;

  corner_system dut (
    .clk, .rst_n, .tick, .tw_stcf, .th_we, .th,
    .in_valid, .in_ready, .in_ev, .out_valid, .out_ready, .out_ev,
    .fr_req, .fr_blk, .fr_row, .fr_gnt, .fr_rvalid, .fr_data,
    .lut_we, .lut_x, .lut_y, .lut_corner,
    .op, .op_update, .rate, .noise_drop, .tos_busy);

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
    #(64'd2 * 3_000_000);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // counters, sampled on the rising edge
  int n_stall = 0, n_acc = 0, n_out = 0, n_drop = 0;
  longint first_acc = 0, last_acc = 0;
  bit took = 0;   // the camera's event was taken at the last rising edge
  always @(posedge clk) if (rst_n) begin
    took = in_valid && in_ready;
    if (in_valid && !in_ready) n_stall++;
    if (in_valid && in_ready) begin
      if (n_acc == 0) first_acc = cyc;
      last_acc = cyc;
      n_acc++;
    end
    if (out_valid && out_ready) n_out++;
    if (noise_drop) n_drop++;
  end

  initial begin
    int cx, cy, pending, acc, sent;
    longint start;
    in_valid = 0; in_ev = '0; out_ready = 1; tw_stcf = 32'd1000;
    th_we = 0; th = '0; fr_req = 0; fr_blk = 0; fr_row = '0;
    lut_we = 0; lut_x = '0; lut_y = '0; lut_corner = 0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk); th_we = 1; th = 8'd250;
    @(negedge clk); th_we = 0;
    while (!in_ready) @(negedge clk);
    for (int w = 0; w < NW; w++) begin
      n_stall = 0; n_acc = 0; n_out = 0; n_drop = 0;
      pending = 0; acc = 0; sent = 0;
      cx = 10; cy = 10;
      start = cyc;
      while (sent < NEV || pending > 0 || in_valid) begin
        // the camera produces events at RATE / FCLK per cycle
        if (sent + pending + int'(in_valid) < NEV) begin
          acc += RATE[w];
          if (acc >= 10 * FCLK[w]) begin
            acc -= 10 * FCLK[w];
            pending++;
          end
        end
        if (in_valid && took) begin
          in_valid = 0;
          sent++;
        end
        if (!in_valid && pending > 0) begin
          if ($urandom_range(39) == 0) begin
            cx = $urandom_range(SW - 1);
            cy = $urandom_range(SH - 1);
          end
          in_ev.x = x_t'((cx + $urandom_range(2) >= SW) ? SW - 1 : cx + $urandom_range(2));
          in_ev.y = y_t'((cy + $urandom_range(2) >= SH) ? SH - 1 : cy + $urandom_range(2));
          in_ev.p = 1'($urandom_range(1));
          in_ev.t = ts_t'((cyc - start) / longint'(FCLK[w]));
          in_valid = 1;
          pending--;
        end
        @(negedge clk);
      end
      repeat (200) @(negedge clk);
      $display("%-12s %0d.%0d Meps at %0d MHz: %0d events, %0d passed, %0d dropped, %0d cycles waited, TOS %0d%% busy",
               NAME[w], RATE[w] / 10, RATE[w] % 10, FCLK[w], sent, n_out, n_drop, n_stall,
               RATE[w] * PERIOD * 10 / FCLK[w]);
      check(sent == NEV, $sformatf("%s all events sent", NAME[w]));
      check(n_out + n_drop == NEV, $sformatf("%s passed %0d + dropped %0d = %0d", NAME[w], n_out, n_drop, NEV));
      check(n_out > NEV / 2, $sformatf("%s most events passed the filter", NAME[w]));
      if (RATE[w] * PERIOD < 10 * FCLK[w]) begin
        check(n_stall == 0, $sformatf("%s camera waited %0d cycles", NAME[w], n_stall));
      end else begin
        check(n_stall > 0, $sformatf("%s camera must wait above capacity", NAME[w]));
        check(last_acc - first_acc >= longint'(PERIOD) * longint'(n_out - 1),
              $sformatf("%s %0d events in %0d cycles: faster than one per %0d", NAME[w], n_acc, last_acc - first_acc, PERIOD));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
