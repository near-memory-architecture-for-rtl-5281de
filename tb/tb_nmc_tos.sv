// tb_nmc_tos: test of the full-sensor NMC-TOS (two 120-column blocks,
// 240 x 180 pixels, 7 x 7 patch) against a reference model of the
// TOS update written directly from its definition on 8-bit values:
//     for each patch pixel: v = v - 1; if v < TH then v = 0
//     event pixel: v = 255
// The block stores 5 bits; a stored s is compared as 0 (s = 0) or 224 + s.
// Events cluster in a few spots so pixels are decremented below TH; many
// straddle the boundary between the blocks (x = 117..122) and some sit at
// the sensor corners. Checks:
//  - the whole TOS after each burst, read row by row from both blocks;
//  - a burst of N events held valid back to back takes 16*N cycles
//    with both blocks in lockstep, and a single event keeps them busy 16
//    cycles.
module tb_nmc_tos;
  import tos_pkg::*;
  localparam int ROWS = 180, COLS = 240, BC = 120, P = 7, H = 3, NCYC = 16;
  localparam int TH = 250;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ev_valid, ev_ready, busy, th_we, fr_req, fr_gnt, fr_rvalid;
  x_t   ev_x;
  y_t   ev_y;
  logic [7:0] th;
  logic [7:0] fr_row;
  logic       fr_blk;
  logic [BC-1:0][4:0] fr_data;

  int ref_tos [ROWS][COLS];
  int checks = 0, failures = 0;
  int n_zeroed = 0;

  nmc_tos dut (.clk, .rst_n, .ev_valid, .ev_ready, .ev_x, .ev_y, .busy,
               .th_we, .th, .fr_req, .fr_blk, .fr_row, .fr_gnt, .fr_rvalid, .fr_data);

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void ref_update(int x, int y);
    for (int yy = y - H; yy <= y + H; yy++)
      for (int xx = x - H; xx <= x + H; xx++)
        if (yy >= 0 && yy < ROWS && xx >= 0 && xx < COLS) begin
          int v;
          v = ref_tos[yy][xx] - 1;
          if (v < TH) begin
            if (ref_tos[yy][xx] != 0) n_zeroed++;
            v = 0;
          end
          ref_tos[yy][xx] = v;
        end
    if (x < COLS) ref_tos[y][x] = 255;
  endfunction

  task automatic compare_all();
    for (int rb = 0; rb < 2 * ROWS; rb++) begin
      int r, b;
      r = rb / 2; b = rb % 2;
      @(negedge clk);
      fr_req = 1; fr_row = 8'(r); fr_blk = 1'(b);
      #1;
      while (!fr_gnt) begin @(negedge clk); #1; end
      @(negedge clk);
      fr_req = 0;
      checks++;
      if (!fr_rvalid) failures++;
      for (int c = 0; c < BC; c++) begin
        checks++;
        if (int'(tos_expand(fr_data[c])) != ref_tos[r][b * BC + c]) begin
          failures++;
          if (failures < 10) $display("TOS[%0d][%0d] = %0d, expected %0d", r, b * BC + c, tos_expand(fr_data[c]), ref_tos[r][b * BC + c]);
        end
      end
    end
  endtask

  // sends n events back to back; returns the cycles from first accept to idle
  task automatic burst(int n, int cx, int cy, int spread, output int cycles);
    int sent, c;
    int ex, ey;
    sent = 0; c = 0; cycles = 0;
    @(negedge clk);
    ex = cx + $urandom_range(2 * spread) - spread; ey = cy + $urandom_range(2 * spread) - spread;
    if (ex < 0) ex = 0; if (ey < 0) ey = 0; if (ex > COLS - 1) ex = COLS - 1; if (ey > ROWS - 1) ey = ROWS - 1;
    ev_valid = 1; ev_x = x_t'(ex); ev_y = y_t'(ey);
    while (sent < n) begin
      @(posedge clk);
      if (sent > 0) c++;
      if (ev_valid && ev_ready) begin
        ref_update(ex, ey);
        sent++;
        @(negedge clk);
        ex = cx + $urandom_range(2 * spread) - spread; ey = cy + $urandom_range(2 * spread) - spread;
        if (ex < 0) ex = 0; if (ey < 0) ey = 0; if (ex > COLS - 1) ex = COLS - 1; if (ey > ROWS - 1) ey = ROWS - 1;
        ev_x = x_t'(ex); ev_y = y_t'(ey);
        if (sent == n) ev_valid = 0;
      end
    end
    // wait for the last patch to finish
    while (busy) begin @(posedge clk); c++; #1; end
    cycles = c;
  endtask

  initial begin
    int cyc;
    ev_valid = 0; ev_x = '0; ev_y = '0; th_we = 0; th = '0; fr_req = 0; fr_row = '0; fr_blk = 0;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) ref_tos[r][c] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    th_we = 1; th = 8'(TH);
    @(negedge clk);
    th_we = 0;
    while (!ev_ready) @(negedge clk);
    // single event: busy for exactly NCYC cycles
    ev_valid = 1; ev_x = 8'd60; ev_y = 8'd90;
    @(posedge clk); ref_update(60, 90);
    #1 ev_valid = 0;
    cyc = 0;
    while (busy) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc != NCYC) begin failures++; $display("single event busy %0d cycles", cyc); end
    compare_all();
    // bursts: clusters, edges, outside-centre events
    burst(60, 60, 90, 2, cyc);
    checks++; if (cyc != 60 * NCYC) begin failures++; $display("burst of 60 took %0d cycles", cyc); end
    burst(80, 120, 100, 3, cyc);
    checks++; if (cyc != 80 * NCYC) begin failures++; $display("burst of 80 took %0d cycles", cyc); end
    burst(40, 2, 2, 3, cyc);
    burst(40, 237, 177, 3, cyc);
    compare_all();
    burst(200, 119, 30, 6, cyc);
    burst(200, 200, 150, 5, cyc);
    compare_all();
    checks++;
    if (n_zeroed == 0) begin failures++; $display("threshold never reached"); end
    $display("pixels zeroed by the threshold: %0d", n_zeroed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
