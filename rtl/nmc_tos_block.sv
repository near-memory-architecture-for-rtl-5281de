// nmc_tos_block: one near-memory TOS block (NMC-TOS block).
//
// Holds the TOS of a ROWS x COLS pixel tile (180 x 120 by default; sensor
// columns BASE .. BASE+COLS-1) and applies the TOS update to the part of an
// event's P x P patch that lies in the tile:
//     every patch pixel: TOS <- TOS - 1, and 0 if it drops below TH
//     event pixel:       TOS <- 255
// TOS values are kept as 5 bits; a stored s != 0 means 224 + s.
//
// Datapath per patch row, all COLS columns in parallel:
//   tos_sram_a (read port) -> mo_module (MOL, A-1 and A!=0)
//   -> cmp_module (TOS-1 row, TH row, carry-chain compare)
//   -> wr_module (write-back DFFs: TOS-1 / 0 / 255, column enables)
//   -> tos_sram_a (write port, CS<i> from col_selector).
// nmc_ctrl sequences the rows two cycles apart (PCH, MO, CMP, WR) so a
// 7 x 7 patch takes 16 cycles and events are accepted every 16 cycles.
//
// Interface: ev_valid/ev_ready with the sensor (x, y) of the event; th_we/th5
// load the low 5 bits of the threshold (TH >= 225 assumed);
// fr_req/fr_row/fr_gnt request one whole TOS row for the frame-based Harris
// engine, returned one cycle after the grant on fr_rvalid/fr_data.
// The block structure is the paper's; the frame-read port and the clear
// sweep after reset are this design's.
module nmc_tos_block
  import tos_pkg::*;
#(
  parameter int unsigned ROWS   = 180,
  parameter int unsigned COLS   = 120,
  parameter int unsigned P      = 7,
  parameter int unsigned BASE   = 0,
  localparam int unsigned WW    = WORD_W,
  localparam int unsigned RW    = $clog2(ROWS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // events
  input  logic                    ev_valid,
  output logic                    ev_ready,
  input  x_t                      ev_x,
  input  y_t                      ev_y,
  output logic                    busy,
  // threshold configuration
  input  logic                    th_we,
  input  logic [WW-1:0]           th5,
  // frame read port
  input  logic                    fr_req,
  input  logic [RW-1:0]           fr_row,
  output logic                    fr_gnt,
  output logic                    fr_rvalid,
  output logic [COLS-1:0][WW-1:0] fr_data
);

  // controller
  logic          mo_valid, cmp_valid, cmp_center, wr_valid, clr_en;
  logic [RW-1:0] mo_row, wr_row, clr_row;
  x_t            cur_x;

  nmc_ctrl #(.ROWS(ROWS), .P(P)) u_ctrl (
    .clk, .rst_n,
    .ev_valid, .ev_ready, .ev_y, .busy,
    .mo_valid, .mo_row, .cmp_valid, .cmp_center, .wr_valid, .wr_row,
    .clr_en, .clr_row,
    .fr_req, .fr_gnt
  );

  // the x of the event in flight (the row is held in the controller)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  cur_x <= '0;
    else if (ev_valid && ev_ready) cur_x <= ev_x;
  end

  // column selects
  logic [COLS-1:0] col_sel, center_sel;
  col_selector #(.COLS(COLS), .P(P), .BASE(BASE)) u_cs (
    .ev_x(cur_x), .col_sel, .center_sel
  );

  // TOS array
  logic [RW-1:0]           rd_row;
  logic [COLS-1:0][WW-1:0] rd_data;
  logic                    arr_we;
  logic [RW-1:0]           arr_wrow;
  logic [COLS-1:0]         arr_wcol;
  logic [COLS-1:0][WW-1:0] arr_wdata;
  logic [COLS-1:0][WW-1:0] wb_data;
  logic [COLS-1:0]         wb_en;

  assign rd_row    = mo_valid ? mo_row : fr_row;
  assign arr_we    = clr_en | wr_valid;
  assign arr_wrow  = clr_en ? clr_row : wr_row;
  assign arr_wcol  = clr_en ? '1 : wb_en;
  assign arr_wdata = clr_en ? '0 : wb_data;

  tos_sram_a #(.ROWS(ROWS), .COLS(COLS), .WORD_W(WW)) u_array (
    .clk, .rd_row, .rd_data,
    .wr_en(arr_we), .wr_row(arr_wrow), .wr_col_en(arr_wcol), .wr_data(arr_wdata)
  );

  // MO: minus one
  logic [COLS-1:0][WW-1:0] mo_sum;
  logic [COLS-1:0]         mo_nz, nz_q;
  mo_module #(.COLS(COLS), .WORD_W(WW)) u_mo (.a(rd_data), .sum(mo_sum), .nz(mo_nz));

  // MOL carry-out travels with TOS-1 into the CMP phase
  always_ff @(posedge clk) begin
    if (mo_valid) nz_q <= mo_nz;
  end

  // CMP: compare with TH
  logic [COLS-1:0][WW-1:0] tos1;
  logic [COLS-1:0]         cout;
  cmp_module #(.COLS(COLS), .WORD_W(WW)) u_cmp (
    .clk, .wwl_cmp(mo_valid), .sum_in(mo_sum),
    .th_we, .th_in(th5),
    .tos1, .cout
  );

  // WR: write-back DFFs
  wr_module #(.COLS(COLS), .WORD_W(WW)) u_wr (
    .clk, .wr_ck(cmp_valid), .tos1, .cout, .nz(nz_q),
    .col_sel, .center_sel(center_sel & {COLS{cmp_center}}),
    .wb_data, .wb_en
  );

  // frame read data
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fr_rvalid <= 1'b0;
    else        fr_rvalid <= fr_gnt;
  end
  always_ff @(posedge clk) begin
    if (fr_gnt) fr_data <= rd_data;
  end

endmodule
