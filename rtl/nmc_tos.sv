// nmc_tos: near-memory TOS for a whole sensor.
//
// NUM_BLOCKS nmc_tos_block instances sit side by side in x: block b holds
// sensor columns b*BLOCK_COLS .. b*BLOCK_COLS+BLOCK_COLS-1 and all SENSOR_H
// rows (two 120-column blocks for a 240 x 180 sensor). Every event goes to
// all blocks at once; each updates the columns of the 7 x 7 patch that fall
// in it, so a patch that straddles two blocks is handled in the same pass.
// The blocks run in lockstep: the event is accepted when all are ready, and
// one event takes 2P+2 cycles.
// The frame-read port reads one row of one block (fr_blk) for the Harris
// engine; data return one cycle after fr_gnt.
// Splitting the sensor into 120-column blocks follows the paper; the
// broadcast and the frame-read port are this design's.
module nmc_tos
  import tos_pkg::*;
#(
  parameter int unsigned SENSOR_H   = 180,
  parameter int unsigned BLOCK_COLS = 120,
  parameter int unsigned NUM_BLOCKS = 2,
  parameter int unsigned P          = 7,
  localparam int unsigned RW        = $clog2(SENSOR_H),
  localparam int unsigned BW        = (NUM_BLOCKS > 1) ? $clog2(NUM_BLOCKS) : 1
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               ev_valid,
  output logic                               ev_ready,
  input  x_t                                 ev_x,
  input  y_t                                 ev_y,
  output logic                               busy,
  input  logic                               th_we,
  input  logic [7:0]                         th,
  input  logic                               fr_req,
  input  logic [BW-1:0]                      fr_blk,
  input  logic [RW-1:0]                      fr_row,
  output logic                               fr_gnt,
  output logic                               fr_rvalid,
  output logic [BLOCK_COLS-1:0][WORD_W-1:0]  fr_data
);

  logic [NUM_BLOCKS-1:0] rdy, bsy, gnt, rv;
  logic [BLOCK_COLS-1:0][WORD_W-1:0] bdata [NUM_BLOCKS];
  logic [BW-1:0] fr_blk_q;

  assign ev_ready = &rdy;
  assign busy     = |bsy;
  assign fr_gnt   = |gnt;
  assign fr_rvalid = |rv;
  assign fr_data  = bdata[fr_blk_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      fr_blk_q <= '0;
    else if (fr_gnt) fr_blk_q <= fr_blk;
  end

  for (genvar b = 0; b < NUM_BLOCKS; b++) begin : g_blk
    nmc_tos_block #(
      .ROWS(SENSOR_H), .COLS(BLOCK_COLS), .P(P), .BASE(b * BLOCK_COLS)
    ) u_blk (
      .clk, .rst_n,
      .ev_valid(ev_valid && ev_ready), .ev_ready(rdy[b]),
      .ev_x, .ev_y, .busy(bsy[b]),
      .th_we, .th5(th[WORD_W-1:0]),
      .fr_req(fr_req && (fr_blk == BW'(b))), .fr_row, .fr_gnt(gnt[b]),
      .fr_rvalid(rv[b]), .fr_data(bdata[b])
    );
  end

  // The 5-bit encoding holds only thresholds with the top three bits set.
  a_th_range: assert property (@(posedge clk) disable iff (!rst_n)
    th_we |-> (th[7:WORD_W] == '1));

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (rdy == '0) || (rdy == '1));

endmodule
