// tos_sram_a: TOS storage array of one NMC-TOS block (8T SRAM, type A).
//
// ROWS x COLS words of WORD_W bits (180 x 120 x 5 = a 180 x 600 bit-cell
// array). The 8T cell has separate read and write access devices, so the
// array has one read port and one write port that work in the same cycle:
// the pipeline reads row k+1 while it writes back row k.
//   Read : rd_row selects a wordline (RWL); rd_data is the whole row,
//          combinational, as the read bitlines settle within the MO phase.
//          The latch that captures it (the sense amplifier) is the MO-stage
//          register that follows.
//   Write: on the rising clock edge with wr_en high, every column whose
//          column select wr_col_en[i] is high takes wr_data[i] (WWL + CS<i>).
// Reading and writing the same row in one cycle returns the old word; the
// controller never does it. Sizes follow the paper; the port timing is this
// design's model of the bit-cell behaviour. Contents are undefined at power
// up and are cleared by the controller.
module tos_sram_a #(
  parameter int unsigned ROWS   = 180,
  parameter int unsigned COLS   = 120,
  parameter int unsigned WORD_W = 5,
  localparam int unsigned RW    = $clog2(ROWS)
) (
  input  logic                          clk,
  input  logic [RW-1:0]                 rd_row,
  output logic [COLS-1:0][WORD_W-1:0]   rd_data,
  input  logic                          wr_en,
  input  logic [RW-1:0]                 wr_row,
  input  logic [COLS-1:0]               wr_col_en,
  input  logic [COLS-1:0][WORD_W-1:0]   wr_data
);

  logic [COLS-1:0][WORD_W-1:0] mem [ROWS];

  assign rd_data = mem[rd_row];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int c = 0; c < COLS; c++) begin
        if (wr_col_en[c]) mem[wr_row][c] <= wr_data[c];
      end
    end
  end

endmodule
