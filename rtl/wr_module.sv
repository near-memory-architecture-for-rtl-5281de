// wr_module: write-back logic of one NMC-TOS block.
//
// At the end of the CMP phase (wr_ck, the WR_CK edge) one DFF per column
// latches the value to write back into the TOS array and its column enable:
//   event pixel (center_sel)         -> 255, stored as all ones
//   stored word was 0 (nz = 0)        -> not written (stays 0)
//   TOS-1 >= TH (cout = 1)            -> TOS-1
//   TOS-1 <  TH (cout = 0)            -> 0
// and only patch columns (col_sel) are enabled. During the WR phase wb_data
// and wb_en drive the array's write bitlines and column selects.
// The three values and the disabled write for zero pixels are from the
// paper; writing the event pixel in the same pass is this design's choice
// (it gives the same result as setting it after the decrement).
module wr_module #(
  parameter int unsigned COLS   = 120,
  parameter int unsigned WORD_W = 5
) (
  input  logic                        clk,
  input  logic                        wr_ck,
  input  logic [COLS-1:0][WORD_W-1:0] tos1,
  input  logic [COLS-1:0]             cout,
  input  logic [COLS-1:0]             nz,
  input  logic [COLS-1:0]             col_sel,
  input  logic [COLS-1:0]             center_sel,
  output logic [COLS-1:0][WORD_W-1:0] wb_data,
  output logic [COLS-1:0]             wb_en
);

  always_ff @(posedge clk) begin
    if (wr_ck) begin
      for (int c = 0; c < COLS; c++) begin
        if (center_sel[c])  wb_data[c] <= '1;
        else if (cout[c])   wb_data[c] <= tos1[c];
        else                wb_data[c] <= '0;
        wb_en[c] <= col_sel[c] & (nz[c] | center_sel[c]);
      end
    end
  end

endmodule
