// tb_sum_worker -- self-checking test of the sliding compute block.
//
// Three random differential images of 12 x 9 pixels (values up to the
// largest 8-bit squared difference, 65025) are streamed with random gaps.
// Each output is compared with the 3 x 3 block sum computed here directly
// from its definition (terms outside the image count as zero), together
// with its coordinates, its tag, the complete-block flag and a latency of
// exactly 3 cycles. A second pass with no gaps checks one sum per cycle.
module tb_sum_worker;
  localparam int DW = 12, DH = 9, BLK = 3, SQ_W = 18, SUM_W = 32, TAG_W = 4;
  localparam int NFR = 3;

  logic clk = 0, rst_n = 0, d_valid = 0;
  logic [SQ_W-1:0] d_data;
  logic [$clog2(DH)-1:0] d_row, s_row;
  logic [$clog2(DW)-1:0] d_col, s_col;
  logic [TAG_W-1:0] d_tag, s_tag;
  logic s_valid, s_full;
  logic [SUM_W-1:0] s_sum;

  sum_worker #(.SQ_W(SQ_W), .SUM_W(SUM_W), .DIFF_W(DW), .DIFF_H(DH), .BLK(BLK),
               .TAG_W(TAG_W)) dut (.*);

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
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int dimg [NFR][DH][DW];
  longint t_in [NFR][DH][DW];
  longint cyc = 0;
  always @(posedge clk) cyc++;

  function automatic longint ref_sum(int f, int r, int c);
    longint s = 0;
    for (int i = 0; i < BLK; i++)
      for (int j = 0; j < BLK; j++)
        if (r - i >= 0 && c - j >= 0) s += dimg[f][r-i][c-j];
    return s;
  endfunction

  int mf = 0, mr = 0, mc = 0, n_out = 0, n_partial = 0;
  always @(posedge clk) begin
    if (rst_n && s_valid) begin
      n_out++;
      check(s_row == mr && s_col == mc && s_tag == TAG_W'(mf + 5),
            $sformatf("coords frame %0d (%0d,%0d) got (%0d,%0d) tag %0d", mf, mr, mc, s_row, s_col, s_tag));
      check(s_sum == SUM_W'(ref_sum(mf, mr, mc)),
            $sformatf("frame %0d (%0d,%0d): exp %0d got %0d", mf, mr, mc, ref_sum(mf, mr, mc), s_sum));
      check(s_full == (mr >= BLK - 1 && mc >= BLK - 1), "s_full");
      check(cyc - t_in[mf][mr][mc] == 3, $sformatf("latency %0d", cyc - t_in[mf][mr][mc]));
      if (!(mr >= BLK - 1 && mc >= BLK - 1)) n_partial++;
      if (mc == DW - 1) begin
        mc = 0;
        if (mr == DH - 1) begin mr = 0; mf++; end
        else mr++;
      end else mc++;
    end
  end

  initial begin
    for (int f = 0; f < NFR; f++)
      for (int r = 0; r < DH; r++)
        for (int c = 0; c < DW; c++)
          dimg[f][r][c] = (f == 0 && r == 2) ? 65025 : $urandom_range(65025);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NFR; f++)
      for (int r = 0; r < DH; r++)
        for (int c = 0; c < DW; c++) begin
          @(negedge clk);
          while (f != NFR - 1 && $urandom_range(3) == 0) begin
            d_valid = 0;
            @(negedge clk);
          end
          d_valid = 1;
          d_data = SQ_W'(dimg[f][r][c]);
          d_row = r[$bits(d_row)-1:0];
          d_col = c[$bits(d_col)-1:0];
          d_tag = TAG_W'(f + 5);
          t_in[f][r][c] = cyc + 1;
        end
    @(negedge clk);
    d_valid = 0;
    repeat (10) @(posedge clk);
    check(n_out == NFR * DW * DH, $sformatf("output count %0d", n_out));
    check(n_partial > 0, "partial edge sums seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
