// tb_cmp_module: loads every threshold value 0..31 into the TH row and, for
// each, writes rows of TOS-1 words covering all 32 values; cout must be 1
// exactly when TOS-1 >= TH, and tos1 must hold what was written. Also checks
// that tos1 does not change while wwl_cmp is low.
module tb_cmp_module;
  localparam int COLS = 120, W = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  logic                   wwl_cmp, th_we;
  logic [COLS-1:0][W-1:0] sum_in, tos1;
  logic [W-1:0]           th_in;
  logic [COLS-1:0]        cout;
  int checks = 0, failures = 0;

  cmp_module dut (.clk, .wwl_cmp, .sum_in, .th_we, .th_in, .tos1, .cout);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wwl_cmp = 0; th_we = 0; sum_in = '0; th_in = '0;
    for (int th = 0; th < 32; th++) begin
      @(negedge clk); th_we = 1; th_in = W'(th);
      @(negedge clk); th_we = 0;
      for (int rep = 0; rep < 3; rep++) begin
        logic [COLS-1:0][W-1:0] d;
        for (int c = 0; c < COLS; c++) d[c] = (rep == 0) ? W'(c) : W'($urandom);
        @(negedge clk); wwl_cmp = 1; sum_in = d;
        @(negedge clk); wwl_cmp = 0; sum_in = ~d;
        @(negedge clk);
        for (int c = 0; c < COLS; c++) begin
          checks++;
          if (tos1[c] !== d[c] || cout[c] !== (int'(d[c]) >= th)) begin
            failures++;
            if (failures < 5) $display("th=%0d s=%0d cout=%0d", th, d[c], cout[c]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
