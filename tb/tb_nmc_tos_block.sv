// tb_nmc_tos_block: end-to-end test of one NMC-TOS block at full size
// (180 rows x 120 columns, 7 x 7 patch), against a reference model of the
// TOS update written directly from its definition on 8-bit values:
//     for each patch pixel: v = v - 1; if v < TH then v = 0
//     event pixel: v = 255
// The block stores 5 bits; a stored s is compared as 0 (s = 0) or 224 + s.
// Events cluster in a few spots so pixels are decremented below TH, and
// include events at the array edges and events whose centre lies outside
// the block's columns (x >= 120). Checks:
//  - the whole array after each burst, read through the frame-read port;
//  - a burst of N events held valid back to back takes 16*N cycles
//    (P*(t1+t2)+t3+t4 with one cycle per phase) and a single event keeps
//    the block busy 16 cycles.
module tb_nmc_tos_block;
  import tos_pkg::*;
  localparam int ROWS = 180, COLS = 120, P = 7, H = 3, NCYC = 16;
  localparam int TH = 250;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ev_valid, ev_ready, busy, th_we, fr_req, fr_gnt, fr_rvalid;
  x_t   ev_x;
  y_t   ev_y;
  logic [4:0] th5;
  logic [7:0] fr_row;
  logic [COLS-1:0][4:0] fr_data;

  int ref_tos [ROWS][COLS];
  int checks = 0, failures = 0;
  int n_zeroed = 0;

  nmc_tos_block dut (.clk, .rst_n, .ev_valid, .ev_ready, .ev_x, .ev_y, .busy,
                     .th_we, .th5, .fr_req, .fr_row, .fr_gnt, .fr_rvalid, .fr_data);

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
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      fr_req = 1; fr_row = 8'(r);
      #1;
      while (!fr_gnt) begin @(negedge clk); #1; end
      @(negedge clk);
      fr_req = 0;
      checks++;
      if (!fr_rvalid) failures++;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (int'(tos_expand(fr_data[c])) != ref_tos[r][c]) begin
          failures++;
          if (failures < 10) $display("TOS[%0d][%0d] = %0d, expected %0d", r, c, tos_expand(fr_data[c]), ref_tos[r][c]);
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
    if (ex < 0) ex = 0; if (ey < 0) ey = 0; if (ex > 127) ex = 127; if (ey > ROWS - 1) ey = ROWS - 1;
    ev_valid = 1; ev_x = x_t'(ex); ev_y = y_t'(ey);
    while (sent < n) begin
      @(posedge clk);
      if (sent > 0) c++;
      if (ev_valid && ev_ready) begin
        ref_update(ex, ey);
        sent++;
        @(negedge clk);
        ex = cx + $urandom_range(2 * spread) - spread; ey = cy + $urandom_range(2 * spread) - spread;
        if (ex < 0) ex = 0; if (ey < 0) ey = 0; if (ex > 127) ex = 127; if (ey > ROWS - 1) ey = ROWS - 1;
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
    ev_valid = 0; ev_x = '0; ev_y = '0; th_we = 0; th5 = '0; fr_req = 0; fr_row = '0;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) ref_tos[r][c] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    th_we = 1; th5 = 5'(TH - 224);
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
    burst(40, 2, 2, 3, cyc);
    checks++; if (cyc != 40 * NCYC) begin failures++; $display("burst of 40 took %0d cycles", cyc); end
    burst(40, 118, 177, 4, cyc);
    checks++; if (cyc != 40 * NCYC) begin failures++; $display("burst of 40 took %0d cycles", cyc); end
    burst(30, 123, 50, 3, cyc);
    compare_all();
    burst(200, 30, 30, 6, cyc);
    burst(200, 100, 150, 5, cyc);
    compare_all();
    checks++;
    if (n_zeroed == 0) begin failures++; $display("threshold never reached"); end
    $display("pixels zeroed by the threshold: %0d", n_zeroed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
