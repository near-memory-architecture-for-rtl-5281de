// dvfs: dynamic voltage and frequency scaling controller.
//
// dvfs_rate_counter counts accepted events over a moving 10 ms window that
// advances every 5 ms; at each step dvfs_lut turns the count into an
// operating point, which is registered on op and held until the next step.
// After reset op is the top point (1.2 V), so no event is lost before the
// first estimate. The regulator and clock generator that apply op are
// outside this design. Reset value and the registered hand-off are this
// design's; the counters and LUT follow the paper.
module dvfs
  import tos_pkg::*;
#(
  parameter int unsigned CNT_W        = 20,
  parameter int unsigned STRIDE_TICKS = 5000
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             tick,
  input  logic             ev_pulse,
  output logic [CNT_W-1:0] rate,
  output op_point_t        op,
  output logic             op_update
);

  logic             rate_valid;
  op_point_t        op_lut;

  dvfs_rate_counter #(.CNT_W(CNT_W), .STRIDE_TICKS(STRIDE_TICKS)) u_cnt (
    .clk, .rst_n, .tick, .ev_pulse, .rate, .rate_valid, .ptr()
  );

  dvfs_lut #(.CNT_W(CNT_W), .WINDOW_US(2 * STRIDE_TICKS)) u_lut (.rate, .op(op_lut));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op        <= '{level: 3'd6, vdd_mv: 11'd1200, fclk_mhz: 11'd1010, overload: 1'b0};
      op_update <= 1'b0;
    end else begin
      op_update <= rate_valid;
      if (rate_valid) op <= op_lut;
    end
  end

endmodule
