// tb_mo_module: checks the minus-one logic over all 32 word values in every
// column position: sum must be (a - 1) mod 32 and nz must be (a != 0).
module tb_mo_module;
  localparam int COLS = 120, W = 5;
  logic [COLS-1:0][W-1:0] a, sum;
  logic [COLS-1:0]        nz;
  int checks = 0, failures = 0;

  mo_module dut (.a, .sum, .nz);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 32 + 200; v++) begin
      for (int c = 0; c < COLS; c++) a[c] = (v < 32) ? W'(v + c) : W'($urandom);
      #1;
      for (int c = 0; c < COLS; c++) begin
        int exp_sum;
        exp_sum = (int'(a[c]) + 31) % 32;
        checks++;
        if (int'(sum[c]) != exp_sum || nz[c] != (a[c] != 0)) begin
          failures++;
          if (failures < 5) $display("a=%0d sum=%0d nz=%0d", a[c], sum[c], nz[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
