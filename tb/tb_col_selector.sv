// tb_col_selector: a block holding sensor columns 120..239 with a 7-wide
// patch. For every event x from 0 to 255 the column selects must cover
// exactly the columns within 3 of x, and the centre select only x itself.
module tb_col_selector;
  import tos_pkg::*;
  localparam int COLS = 120, BASE = 120;
  x_t              ev_x;
  logic [COLS-1:0] col_sel, center_sel;
  int checks = 0, failures = 0;
  int n_edge = 0;

  col_selector #(.COLS(COLS), .P(7), .BASE(BASE)) dut (.ev_x, .col_sel, .center_sel);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 256; x++) begin
      ev_x = x_t'(x); #1;
      for (int c = 0; c < COLS; c++) begin
        int sx;
        sx = BASE + c;
        checks++;
        if (col_sel[c] !== (sx >= x - 3 && sx <= x + 3) || center_sel[c] !== (sx == x)) failures++;
      end
      if (x >= 117 && x <= 122) n_edge += $countones(col_sel);
    end
    // patches centred at x = 117..122 reach 1..6 columns of this block
    checks++;
    if (n_edge != 1 + 2 + 3 + 4 + 5 + 6) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
