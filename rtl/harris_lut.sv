// harris_lut: Harris look-up table that tags events as corners.
//
// One bit per pixel says whether the pixel was a corner in the last Harris
// frame. The frame-based Harris engine rewrites it through the write port
// (lut_we, lut_x, lut_y, lut_corner; one pixel per cycle, any time). Each
// event on the input stream is looked up at its (x, y) and leaves one cycle
// later on the output stream with the bit attached. The output register
// stalls with out_ready (in_ready = !out_valid || out_ready). After reset
// every bit is cleared, one per cycle, before in_ready rises; a write from
// the engine in the same cycle as a lookup of the same pixel is seen by the
// next lookup. The table role follows the paper; one bit per pixel, the
// ports and the clear sweep are this design's choices.
module harris_lut
  import tos_pkg::*;
#(
  parameter int unsigned SENSOR_W = 240,
  parameter int unsigned SENSOR_H = 180
) (
  input  logic          clk,
  input  logic          rst_n,
  // writes from the Harris engine
  input  logic          lut_we,
  input  x_t            lut_x,
  input  y_t            lut_y,
  input  logic          lut_corner,
  // event stream
  input  logic          in_valid,
  output logic          in_ready,
  input  event_t        in_ev,
  output logic          out_valid,
  input  logic          out_ready,
  output tagged_event_t out_ev
);

  localparam int unsigned NPIX = SENSOR_W * SENSOR_H;
  localparam int unsigned AW   = $clog2(NPIX);

  logic          lut [NPIX];
  logic          clearing;
  logic [AW-1:0] clr_addr, rd_addr, wr_addr;

  assign rd_addr  = AW'(int'(in_ev.y) * int'(SENSOR_W) + int'(in_ev.x));
  assign wr_addr  = AW'(int'(lut_y) * int'(SENSOR_W) + int'(lut_x));
  assign in_ready = !clearing && (!out_valid || out_ready);

  always_ff @(posedge clk) begin
    if (clearing)    lut[clr_addr] <= 1'b0;
    else if (lut_we) lut[wr_addr]  <= lut_corner;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing  <= 1'b1;
      clr_addr  <= '0;
      out_valid <= 1'b0;
      out_ev    <= '0;
    end else begin
      if (clearing) begin
        clr_addr <= clr_addr + 1'b1;
        if (clr_addr == AW'(NPIX - 1)) clearing <= 1'b0;
      end
      if (in_valid && in_ready) begin
        out_valid     <= 1'b1;
        out_ev.ev     <= in_ev;
        out_ev.corner <= lut[rd_addr];
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

endmodule
