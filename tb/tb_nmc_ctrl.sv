// tb_nmc_ctrl: checks the row schedule of the NMC-TOS controller at its
// default size (180 rows, 7 x 7 patch).
//  - after reset it clears rows 0..179 in order, one per cycle, with
//    ev_ready low;
//  - for an accepted event, in cycle n after the accept edge: MO of patch
//    row k in cycle 2k+1, CMP in 2k+2 (centre flag for k = 3), WR in 2k+3,
//    for row y-3+k when it lies in the array; so the last write-back is in
//    cycle 15 and a patch takes 16 cycles;
//  - events held valid back to back are accepted every 16 cycles;
//  - frame reads are granted only when idle with no event waiting.
module tb_nmc_ctrl;
  import tos_pkg::*;
  localparam int ROWS = 180, P = 7, NCYC = 2 * P + 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       ev_valid, ev_ready, busy, mo_valid, cmp_valid, cmp_center, wr_valid, clr_en;
  logic       fr_req, fr_gnt;
  y_t         ev_y;
  logic [7:0] mo_row, wr_row, clr_row;
  int checks = 0, failures = 0;

  nmc_ctrl dut (.clk, .rst_n, .ev_valid, .ev_ready, .ev_y, .busy,
                .mo_valid, .mo_row, .cmp_valid, .cmp_center, .wr_valid, .wr_row,
                .clr_en, .clr_row, .fr_req, .fr_gnt);

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // expected stage outputs in cycle n of an event at row y
  task automatic check_cycle(int y, int n);
    int k_mo, k_cmp, k_wr, r;
    bit e_mo, e_cmp, e_wr;
    k_mo = (n - 1) / 2; k_cmp = (n - 2) / 2; k_wr = (n - 3) / 2;
    r = y - 3 + k_mo;
    e_mo = (n >= 1) && (n % 2 == 1) && (k_mo < P) && (r >= 0) && (r < ROWS);
    check(mo_valid == e_mo, $sformatf("mo_valid y=%0d n=%0d", y, n));
    if (e_mo) check(int'(mo_row) == r, "mo_row");
    r = y - 3 + k_cmp;
    e_cmp = (n >= 2) && (n % 2 == 0) && (k_cmp < P) && (r >= 0) && (r < ROWS);
    check(cmp_valid == e_cmp, $sformatf("cmp_valid y=%0d n=%0d", y, n));
    if (e_cmp) check(cmp_center == (k_cmp == 3), "cmp_center");
    r = y - 3 + k_wr;
    e_wr = (n >= 3) && (n % 2 == 1) && (k_wr < P) && (r >= 0) && (r < ROWS);
    check(wr_valid == e_wr, $sformatf("wr_valid y=%0d n=%0d", y, n));
    if (e_wr) check(int'(wr_row) == r, "wr_row");
    check(ev_ready == (n == NCYC - 1), $sformatf("ev_ready n=%0d", n));
  endtask

  task automatic one_event(int y);
    @(negedge clk);
    check(ev_ready, "ready when idle");
    ev_valid = 1; ev_y = y_t'(y);
    @(negedge clk);
    ev_valid = 0;
    for (int n = 0; n < NCYC; n++) begin
      check_cycle(y, n);
      @(negedge clk);
    end
    check(!mo_valid && !cmp_valid && !wr_valid && !busy, "drained");
  endtask

  initial begin
    int t0, t_acc [5], nacc;
    ev_valid = 0; ev_y = '0; fr_req = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // clear sweep
    for (int r = 0; r < ROWS; r++) begin
      check(clr_en && int'(clr_row) == r && !ev_ready, "clear sweep");
      @(negedge clk);
    end
    check(!clr_en && ev_ready, "clear done");
    // single events: middle, both edges
    one_event(50);
    one_event(1);
    one_event(0);
    one_event(179);
    one_event(177);
    // frame read arbitration
    @(negedge clk); fr_req = 1; #1;
    check(fr_gnt, "frame read granted when idle");
    ev_valid = 1; ev_y = 8'd90; #1;
    check(!fr_gnt, "frame read held off by a waiting event");
    // back-to-back: keep valid high for 5 events
    nacc = 0;
    for (int c = 0; c < 5 * NCYC + 4 && nacc < 5; c++) begin
      @(posedge clk);
      if (ev_valid && ev_ready) begin t_acc[nacc] = c; nacc++; end
      #1;
      if (busy) check(!fr_gnt, "no frame read while busy");
    end
    @(negedge clk); ev_valid = 0; fr_req = 0;
    check(nacc == 5, "five accepts");
    for (int i = 1; i < 5; i++) check(t_acc[i] - t_acc[i-1] == NCYC, $sformatf("accept period %0d", t_acc[i] - t_acc[i-1]));
    repeat (NCYC + 2) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
