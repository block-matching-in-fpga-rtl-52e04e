// tb_sum_stride -- self-checking test of the sum-stream thinning gate.
//
// Rows of 11 sums are presented with random gaps for STRIDE = 3. A sum
// must stay valid exactly when its column is a multiple of 3 (the counter
// restarts in every row), and nothing may be valid while in_valid is low.
module tb_sum_stride;
  localparam int STRIDE = 3, COLS = 11, COL_W = 4;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [COL_W-1:0] in_col = '0;

  sum_stride #(.STRIDE(STRIDE), .COL_W(COL_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int kept = 0, dropped = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int row = 0; row < 20; row++)
      for (int c = 0; c < COLS; c++) begin
        @(negedge clk);
        while ($urandom_range(2) == 0) begin
          in_valid = 0;
          in_col = COL_W'($urandom_range(COLS - 1));
          #1 check(out_valid == 0, "no output without input");
          @(negedge clk);
        end
        in_valid = 1;
        in_col = COL_W'(c);
        #1 check(out_valid == (c % STRIDE == 0), $sformatf("row %0d col %0d out_valid %0d", row, c, out_valid));
        if (out_valid) kept++; else dropped++;
      end
    check(kept == 20 * ((COLS + STRIDE - 1) / STRIDE), $sformatf("kept %0d", kept));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
