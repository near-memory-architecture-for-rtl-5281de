// tb_dvfs_rate_counter: drives random events at changing densities and
// ticks every 1 to 3 cycles through a short stride (40 ticks, 6-bit
// counters). A model counts events per stride; at every stride end the
// counter must pulse rate_valid (from the second stride on) with the sum of
// the last two strides, saturated at 63, and ptr must step 0, 1, 2, 0, ...
module tb_dvfs_rate_counter;
  localparam int CNT_W = 6, STRIDE = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tick, ev_pulse, rate_valid;
  logic [CNT_W-1:0] rate;
  logic [1:0] ptr;
  int checks = 0, failures = 0;
  int n_valid = 0, n_sat = 0;

  dvfs_rate_counter #(.CNT_W(CNT_W), .STRIDE_TICKS(STRIDE)) dut (
    .clk, .rst_n, .tick, .ev_pulse, .rate, .rate_valid, .ptr);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cur = 0, prev = 0, tc = 0, strides = 0, exp_ptr = 0;
  int pend_rate = -1;
  int density = 50, tick_every = 1, cyc = 0;

  always @(posedge clk) if (rst_n) begin
    // outputs from the previous edge
    if (pend_rate >= 0) begin
      checks++;
      if (!rate_valid || int'(rate) != pend_rate) begin
        failures++;
        if (failures < 10) $display("rate %0d valid %0d, expected %0d", rate, rate_valid, pend_rate);
      end
      n_valid++;
    end else begin
      checks++;
      if (rate_valid) failures++;
    end
    checks++;
    if (int'(ptr) != exp_ptr) failures++;
    pend_rate = -1;
    // this edge
    if (ev_pulse) cur++;
    if (tick) begin
      tc++;
      if (tc == STRIDE) begin
        int s;
        s = cur + prev;
        if (s > 63) begin s = 63; n_sat++; end
        if (strides >= 1) pend_rate = s;
        prev = cur; cur = 0; tc = 0; strides++;
        exp_ptr = (exp_ptr + 1) % 3;
      end
    end
  end

  initial begin
    tick = 0; ev_pulse = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 12; phase++) begin
      density = (phase % 4 == 0) ? 100 : (phase % 4 == 1) ? 60 : (phase % 4 == 2) ? 10 : 0;
      tick_every = 1 + phase % 3;
      for (int i = 0; i < 300; i++) begin
        @(negedge clk);
        cyc++;
        ev_pulse = ($urandom_range(99) < density);
        tick = (cyc % tick_every == 0);
      end
    end
    @(negedge clk); tick = 0; ev_pulse = 0;
    @(negedge clk);
    checks++;
    if (n_valid < 20 || n_sat == 0) begin failures++; $display("n_valid=%0d n_sat=%0d", n_valid, n_sat); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
