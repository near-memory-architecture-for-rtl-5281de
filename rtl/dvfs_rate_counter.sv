// dvfs_rate_counter: moving-window event-rate estimate for DVFS.
//
// Three CNT_W-bit counters work in round robin. A stride lasts STRIDE_TICKS
// ticks of a fixed reference timer (5000 ticks of 1 us = 5 ms = half of the
// 10 ms window TW_DVFS). During a stride the counter selected by ptr counts
// events (ev_pulse); the other two hold the counts of the two previous
// strides, and their sum is the number of events in the last full window.
// At the end of a stride ptr <- (ptr + 1) mod 3, the newly selected counter
// is cleared, rate is updated with the sum of the two completed counters and
// rate_valid pulses for one cycle. Counters and the sum saturate at
// 2^CNT_W - 1. The first estimate comes at the end of the second stride.
// The three-counter scheme, the 50 % stride and the 20-bit width are the
// paper's; the tick time base and the saturation are this design's.
module dvfs_rate_counter #(
  parameter int unsigned CNT_W        = 20,
  parameter int unsigned STRIDE_TICKS = 5000
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             tick,       // reference time base (1 us)
  input  logic             ev_pulse,   // one accepted event
  output logic [CNT_W-1:0] rate,       // events in the last TW_DVFS
  output logic             rate_valid, // one-cycle pulse with a new rate
  output logic [1:0]       ptr
);

  localparam int unsigned TW = $clog2(STRIDE_TICKS + 1);
  localparam logic [CNT_W-1:0] MAXC = '1;

  logic [CNT_W-1:0] cnt [3];
  logic [TW-1:0]    tcnt;
  logic [1:0]       done_strides;
  logic             stride_end;
  logic [1:0]       nptr, optr;   // next counter, and the one not counting next
  logic [CNT_W:0]   sum_next;

  assign stride_end = tick && (tcnt == TW'(STRIDE_TICKS - 1));
  assign nptr       = (ptr == 2'd2) ? 2'd0 : ptr + 2'd1;
  assign optr       = (nptr == 2'd2) ? 2'd0 : nptr + 2'd1;

  // The window that closes now: the counter that was counting (with this
  // cycle's event) plus the counter of the stride before it (optr). The
  // third counter (nptr) holds the oldest stride and is cleared.
  logic [CNT_W-1:0] cur_final;
  always_comb begin
    cur_final = cnt[ptr];
    if (ev_pulse && cnt[ptr] != MAXC) cur_final = cnt[ptr] + 1'b1;
    sum_next = {1'b0, cur_final} + {1'b0, cnt[optr]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 3; i++) cnt[i] <= '0;
      ptr          <= '0;
      tcnt         <= '0;
      rate         <= '0;
      rate_valid   <= 1'b0;
      done_strides <= '0;
    end else begin
      rate_valid <= 1'b0;
      if (tick) tcnt <= stride_end ? '0 : tcnt + 1'b1;
      if (stride_end) begin
        cnt[ptr]  <= cur_final;
        cnt[nptr] <= '0;
        ptr       <= nptr;
        if (done_strides != 2'd2) done_strides <= done_strides + 1'b1;
        rate       <= sum_next[CNT_W] ? MAXC : sum_next[CNT_W-1:0];
        rate_valid <= (done_strides != 2'd0);
      end else if (ev_pulse && cnt[ptr] != MAXC) begin
        cnt[ptr] <= cnt[ptr] + 1'b1;
      end
    end
  end

  a_ptr_range: assert property (@(posedge clk) disable iff (!rst_n) ptr != 2'd3);

endmodule
