// col_selector: column selects (CS<i>) of one NMC-TOS block.
//
// Column c of the block holds sensor pixel x = BASE + c. For an event at
// ev_x the selector raises col_sel[c] for every column within (P-1)/2 of the
// event, i.e. the patch columns that fall inside this block, and
// center_sel[c] for the event's own column. Patches are clipped at the
// sensor edges for free (columns outside the sensor do not exist) and a
// patch that straddles two blocks gets its columns from both. Combinational.
// The paper names the column selector and CS<i>; the range-mask function is
// this design's.
module col_selector
  import tos_pkg::*;
#(
  parameter int unsigned COLS = 120,
  parameter int unsigned P    = 7,
  parameter int unsigned BASE = 0
) (
  input  x_t              ev_x,
  output logic [COLS-1:0] col_sel,
  output logic [COLS-1:0] center_sel
);

  localparam int HALF = (P - 1) / 2;

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      int d;
      d = int'(BASE) + c - int'(ev_x);
      col_sel[c]    = (d >= -HALF) && (d <= HALF);
      center_sel[c] = (d == 0);
    end
  end

endmodule
