// tb_tos_sram_a: self-checking test of the TOS array at its full size
// (180 x 120 x 5). Writes random rows with random column selects, reads
// every row back and compares with a shadow copy kept by the testbench; also
// reads one row while writing another in the same cycle and checks that the
// read returns the stored word (decoupled read and write ports).
module tb_tos_sram_a;
  localparam int ROWS = 180, COLS = 120, W = 5;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [7:0]                rd_row, wr_row;
  logic [COLS-1:0][W-1:0]    rd_data, wr_data;
  logic                      wr_en;
  logic [COLS-1:0]           wr_col_en;
  logic [COLS-1:0][W-1:0]    shadow [ROWS];

  int checks = 0, failures = 0;

  tos_sram_a dut (.clk, .rd_row, .rd_data, .wr_en, .wr_row, .wr_col_en, .wr_data);

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_row(int r, logic [COLS-1:0] en, logic [COLS-1:0][W-1:0] d);
    @(negedge clk);
    wr_en = 1; wr_row = 8'(r); wr_col_en = en; wr_data = d;
    @(negedge clk);
    wr_en = 0;
    for (int c = 0; c < COLS; c++) if (en[c]) shadow[r][c] = d[c];
  endtask

  initial begin
    wr_en = 0; rd_row = 0; wr_row = 0; wr_col_en = '0; wr_data = '0;
    // fill every row completely
    for (int r = 0; r < ROWS; r++) begin
      logic [COLS-1:0][W-1:0] d;
      for (int c = 0; c < COLS; c++) d[c] = W'($urandom);
      write_row(r, '1, d);
    end
    // partial writes with random column selects
    for (int i = 0; i < 400; i++) begin
      logic [COLS-1:0][W-1:0] d;
      logic [COLS-1:0] en;
      for (int c = 0; c < COLS; c++) begin d[c] = W'($urandom); en[c] = 1'($urandom); end
      write_row($urandom_range(ROWS - 1), en, d);
    end
    // read back
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); rd_row = 8'(r); #1;
      checks++;
      if (rd_data !== shadow[r]) begin
        failures++;
        if (failures < 5) $display("row %0d mismatch", r);
      end
    end
    // read and write different rows in the same cycle
    for (int i = 0; i < 50; i++) begin
      int rr, wr;
      logic [COLS-1:0][W-1:0] d;
      rr = $urandom_range(ROWS - 1);
      wr = (rr + 1 + $urandom_range(ROWS - 2)) % ROWS;
      for (int c = 0; c < COLS; c++) d[c] = W'($urandom);
      @(negedge clk);
      rd_row = 8'(rr); wr_en = 1; wr_row = 8'(wr); wr_col_en = '1; wr_data = d;
      #1;
      checks++;
      if (rd_data !== shadow[rr]) failures++;
      @(posedge clk); #1;
      wr_en = 0;
      for (int c = 0; c < COLS; c++) shadow[wr][c] = d[c];
      rd_row = 8'(wr); #1;
      checks++;
      if (rd_data !== shadow[wr]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
