// tb_diff_square -- self-checking test of the square-difference stage.
//
// A fresh random 20 x 12 frame is streamed for each of the 9 passes of an
// 8 x 8 search window with 4 workers, with random gaps between pixels. The
// testbench plays the sequencer: it supplies row, column, pass and buffer
// delay. Every output is compared with (I(r,c) - I(r-dy, c-dx_k))^2
// computed here for each worker k, in raster order over the overlap region
// (rows WIN/2.., columns WIN/2 .. W-WIN/2-1), with its coordinates, its pass
// tag and a latency of exactly 2 cycles.
module tb_diff_square;
  localparam int W = 20, H = 12, WIN = 8, NW = 4, PIX_W = 8, SQ_W = 18;
  localparam int NPASS = (WIN / 2) * (WIN / NW) + WIN / (2 * NW);
  localparam int DW = W - WIN, DH = H - WIN / 2;
  localparam int TAG_W = 4;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [PIX_W-1:0] in_pixel;
  logic [$clog2(H)-1:0] in_row;
  logic [$clog2(W)-1:0] in_col;
  logic [$clog2((WIN/2)*W + WIN/2 + 1)-1:0] dmin;
  logic [TAG_W-1:0] in_pass;
  logic sq_valid;
  logic [NW-1:0][SQ_W-1:0] sq_data;
  logic [$clog2(DH)-1:0] sq_row;
  logic [$clog2(DW)-1:0] sq_col;
  logic [TAG_W-1:0] sq_pass;

  diff_square #(.PIX_W(PIX_W), .SQ_W(SQ_W), .IMG_W(W), .IMG_H(H), .WIN(WIN),
                .NWORK(NW), .TAG_W(TAG_W)) dut (.*);

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

  int img [NPASS][H][W];
  longint t_in [NPASS][H][W];
  longint cyc = 0;
  always @(posedge clk) cyc++;

  // monitor: expected raster order per pass
  int mp = 0, mr = 0, mc = 0, n_out = 0;
  always @(posedge clk) begin
    if (rst_n && sq_valid) begin
      automatic int r = mr + WIN / 2, c = mc + WIN / 2;
      automatic int dy = WIN / 2 - mp / (WIN / NW);
      n_out++;
      check(sq_row == mr && sq_col == mc && sq_pass == mp,
            $sformatf("coords pass %0d (%0d,%0d) got pass %0d (%0d,%0d)", mp, mr, mc, sq_pass, sq_row, sq_col));
      check(cyc - t_in[mp][r][c] == 2, $sformatf("latency %0d", cyc - t_in[mp][r][c]));
      for (int k = 0; k < NW; k++) begin
        automatic int dx = WIN / 2 - (mp % (WIN / NW)) * NW - k;
        automatic int d = img[mp][r][c] - img[mp][r-dy][c-dx];
        check(sq_data[k] == d * d, $sformatf("pass %0d worker %0d (%0d,%0d): exp %0d got %0d",
              mp, k, mr, mc, d * d, sq_data[k]));
      end
      if (mc == DW - 1) begin
        mc = 0;
        if (mr == DH - 1) begin mr = 0; mp++; end
        else mr++;
      end else mc++;
    end
  end

  initial begin
    for (int p = 0; p < NPASS; p++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) img[p][r][c] = $urandom_range(255);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NPASS; p++) begin
      automatic int dy = WIN / 2 - p / (WIN / NW);
      automatic int dx0 = WIN / 2 - (p % (WIN / NW)) * NW;
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          @(negedge clk);
          while ($urandom_range(4) == 0) begin
            in_valid = 0;
            @(negedge clk);
          end
          in_valid = 1;
          in_pixel = PIX_W'(img[p][r][c]);
          in_row = r[$bits(in_row)-1:0];
          in_col = c[$bits(in_col)-1:0];
          in_pass = p[TAG_W-1:0];
          dmin = $bits(dmin)'(dy * W + dx0 - (NW - 1));
          t_in[p][r][c] = cyc + 1;
        end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(posedge clk);
    check(n_out == NPASS * DW * DH, $sformatf("output count %0d", n_out));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
