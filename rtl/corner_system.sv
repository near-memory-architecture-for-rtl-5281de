// corner_system: event-camera corner-detection front end (top level).
//
// Events from the camera pass a spatio-temporal correlation filter (stcf)
// that drops isolated noise events. Each surviving event is forked three ways:
//   nmc_tos     updates the threshold-ordinal surface (TOS) over the event's
//               7 x 7 patch in 16 cycles, in the near-memory arrays;
//   dvfs        counts it towards the moving-window event rate and picks the
//               supply voltage and clock frequency for the next 5 ms;
//   harris_lut  tags it with the corner bit of the last Harris frame and
//               sends it on (out_*).
// The event moves on when both nmc_tos and harris_lut accept it, so the
// TOS never misses a filtered event; back pressure reaches the camera
// through in_ready.
// Outside this design and reached through ports: the frame-based Harris
// engine (reads TOS rows on fr_*, writes the corner table on lut_*), and the
// regulator / clock generator that apply op (VDD in mV, f_clk in MHz).
// All blocks share one clock here; in the chip the NMC-TOS clock is the one
// DVFS selects. tick is a 1 us strobe from a fixed reference timer.
// The block set and connections follow the paper's system diagram; the fork
// and handshake are this design's.
module corner_system
  import tos_pkg::*;
#(
  parameter int unsigned SENSOR_W     = 240,
  parameter int unsigned SENSOR_H     = 180,
  parameter int unsigned BLOCK_COLS   = 120,
  parameter int unsigned P            = 7,
  parameter int unsigned CNT_W        = 20,
  parameter int unsigned STRIDE_TICKS = 5000,
  localparam int unsigned NUM_BLOCKS  = (SENSOR_W + BLOCK_COLS - 1) / BLOCK_COLS,
  localparam int unsigned RW          = $clog2(SENSOR_H),
  localparam int unsigned BW          = (NUM_BLOCKS > 1) ? $clog2(NUM_BLOCKS) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              tick,
  // configuration
  input  ts_t                               tw_stcf,
  input  logic                              th_we,
  input  logic [7:0]                        th,
  // events from the camera
  input  logic                              in_valid,
  output logic                              in_ready,
  input  event_t                            in_ev,
  // tagged events to the application
  output logic                              out_valid,
  input  logic                              out_ready,
  output tagged_event_t                     out_ev,
  // Harris engine: TOS row reads and corner-table writes
  input  logic                              fr_req,
  input  logic [BW-1:0]                     fr_blk,
  input  logic [RW-1:0]                     fr_row,
  output logic                              fr_gnt,
  output logic                              fr_rvalid,
  output logic [BLOCK_COLS-1:0][WORD_W-1:0] fr_data,
  input  logic                              lut_we,
  input  x_t                                lut_x,
  input  y_t                                lut_y,
  input  logic                              lut_corner,
  // DVFS operating point for the regulator and clock generator
  output op_point_t                         op,
  output logic                              op_update,
  output logic [CNT_W-1:0]                  rate,
  // status
  output logic                              noise_drop,
  output logic                              tos_busy
);

  // STCF
  logic   f_valid, f_ready;
  event_t f_ev;
  stcf #(.SENSOR_W(SENSOR_W), .SENSOR_H(SENSOR_H)) u_stcf (
    .clk, .rst_n, .tw(tw_stcf),
    .in_valid, .in_ready, .in_ev,
    .out_valid(f_valid), .out_ready(f_ready), .out_ev(f_ev),
    .dropped(noise_drop)
  );

  // fork to NMC-TOS and the Harris LUT
  logic tos_ready, lut_ready, accepted;
  assign f_ready  = tos_ready && lut_ready;
  assign accepted = f_valid && f_ready;

  nmc_tos #(
    .SENSOR_H(SENSOR_H), .BLOCK_COLS(BLOCK_COLS), .NUM_BLOCKS(NUM_BLOCKS), .P(P)
  ) u_tos (
    .clk, .rst_n,
    .ev_valid(f_valid && lut_ready), .ev_ready(tos_ready),
    .ev_x(f_ev.x), .ev_y(f_ev.y), .busy(tos_busy),
    .th_we, .th,
    .fr_req, .fr_blk, .fr_row, .fr_gnt, .fr_rvalid, .fr_data
  );

  harris_lut #(.SENSOR_W(SENSOR_W), .SENSOR_H(SENSOR_H)) u_lut (
    .clk, .rst_n,
    .lut_we, .lut_x, .lut_y, .lut_corner,
    .in_valid(f_valid && tos_ready), .in_ready(lut_ready), .in_ev(f_ev),
    .out_valid, .out_ready, .out_ev
  );

  // DVFS
  dvfs #(.CNT_W(CNT_W), .STRIDE_TICKS(STRIDE_TICKS)) u_dvfs (
    .clk, .rst_n, .tick, .ev_pulse(accepted), .rate, .op, .op_update
  );

endmodule
