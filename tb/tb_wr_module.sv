// tb_wr_module: random TOS-1 words, carries, nonzero flags, column and
// centre selects; after a wr_ck edge each column must hold 31 (event pixel),
// TOS-1 (cout = 1) or 0 (cout = 0), and be enabled only if it is a patch
// column whose stored word was not 0 or is the event pixel. Outputs must
// hold while wr_ck is low.
module tb_wr_module;
  localparam int COLS = 120, W = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  logic                   wr_ck;
  logic [COLS-1:0][W-1:0] tos1, wb_data, exp_d;
  logic [COLS-1:0]        cout, nz, col_sel, center_sel, wb_en, exp_e;
  int checks = 0, failures = 0;

  wr_module dut (.clk, .wr_ck, .tos1, .cout, .nz, .col_sel, .center_sel, .wb_data, .wb_en);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_ck = 0;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      for (int c = 0; c < COLS; c++) begin
        tos1[c] = W'($urandom); cout[c] = 1'($urandom); nz[c] = 1'($urandom);
        col_sel[c] = 1'($urandom); center_sel[c] = 1'($urandom_range(9) == 0) & col_sel[c];
        exp_d[c] = center_sel[c] ? 5'd31 : (cout[c] ? tos1[c] : 5'd0);
        exp_e[c] = col_sel[c] & (nz[c] | center_sel[c]);
      end
      wr_ck = 1;
      @(negedge clk);
      wr_ck = 0;
      for (int c = 0; c < COLS; c++) begin
        tos1[c] = ~tos1[c]; cout[c] = ~cout[c]; nz[c] = ~nz[c]; col_sel[c] = ~col_sel[c];
      end
      @(negedge clk);
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (wb_data[c] !== exp_d[c] || wb_en[c] !== exp_e[c]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
