// tb_bm_stream_16ch -- the 16-worker configuration of the throughput estimate.
//
// Search window 32, blocks 8 x 8 and 16 workers, the configuration behind
// the 0.13 s per 720p-frame estimate, on a small random 56 x 30 frame so
// that it simulates quickly. The frame is streamed without gaps for the
// 16*2 + 1 = 33 passes of one image. Every sum of every worker is compared
// with direct summation of squared differences at its offset, and the
// image must be finished (all_done) exactly 33 * 56 * 30 input cycles
// after it started, i.e. one pixel per clock with no stall between passes.
module tb_bm_stream_16ch;
  localparam int W = 56, H = 30, WIN = 32, BLK = 8, NW = 16;
  localparam int PIX_W = 8, SUM_W = 32;
  localparam int NPASS = (WIN / 2) * (WIN / NW) + WIN / (2 * NW);
  localparam int DW = W - WIN, DH = H - WIN / 2;
  localparam int PASS_W = $clog2(NPASS), OFF_W = $clog2(WIN) + 2;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [PIX_W-1:0] in_pixel;
  logic sum_valid, sum_full, frame_done, all_done, row_jump;
  logic [NW-1:0][SUM_W-1:0] sum_data;
  logic [$clog2(DH)-1:0] sum_row;
  logic [$clog2(DW)-1:0] sum_col;
  logic [PASS_W-1:0] sum_pass;
  logic signed [OFF_W-1:0] sum_dy;
  logic [NW-1:0][OFF_W-1:0] sum_dx;
  logic cand_valid = 0, cand_first = 0, cand_last = 0;
  logic [SUM_W-1:0] cand_dist = '0, threshold = '0;
  logic [15:0] cand_tag = '0;
  logic best_valid;
  logic [15:0][SUM_W-1:0] best_dist;
  logic [15:0][15:0] best_tag;
  logic [4:0] best_count;

  bm_stream_top #(.IMG_W(W), .IMG_H(H), .WIN(WIN), .BLK(BLK), .NWORK(NW)) dut (.*);

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
    repeat (NPASS * W * H + 2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int img [H][W];
  longint cyc = 0, t_start = 0, t_done = 0;
  always @(posedge clk) cyc++;

  function automatic longint ref_sum(int p, int k, int r, int c);
    automatic int dy = WIN / 2 - p / (WIN / NW);
    automatic int dx = WIN / 2 - (p % (WIN / NW)) * NW - k;
    longint s = 0;
    for (int i = 0; i < BLK; i++)
      for (int j = 0; j < BLK; j++)
        if (r - i >= 0 && c - j >= 0) begin
          automatic int ir = r - i + WIN / 2, ic = c - j + WIN / 2;
          automatic int d = img[ir][ic] - img[ir - dy][ic - dx];
          s += d * d;
        end
    return s;
  endfunction

  int mp = 0, mr = 0, mc = 0, n_out = 0, n_all = 0;
  always @(posedge clk) begin
    if (rst_n && all_done) begin
      n_all++;
      t_done = cyc;
    end
    if (rst_n && sum_valid) begin
      n_out++;
      check(sum_row == mr && sum_col == mc && sum_pass == mp, "position");
      for (int k = 0; k < NW; k++)
        if (sum_data[k] == SUM_W'(ref_sum(mp, k, mr, mc))) checks++;
        else check(0, $sformatf("pass %0d worker %0d (%0d,%0d): exp %0d got %0d", mp, k, mr, mc,
                                ref_sum(mp, k, mr, mc), sum_data[k]));
      if (mc == DW - 1) begin
        mc = 0;
        if (mr == DH - 1) begin mr = 0; mp++; end
        else mr++;
      end else mc++;
    end
  end

  initial begin
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) img[r][c] = $urandom_range(255);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    t_start = cyc + 1;
    for (int p = 0; p < NPASS; p++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          in_valid = 1;
          in_pixel = PIX_W'(img[r][c]);
          @(negedge clk);
        end
    in_valid = 0;
    repeat (10) @(negedge clk);
    check(n_out == NPASS * DH * DW, $sformatf("sum count %0d", n_out));
    check(n_all == 1, "all_done once");
    // all_done is registered: it is seen one cycle after the last pixel
    check(t_done - t_start == longint'(NPASS) * W * H,
          $sformatf("image took %0d cycles, expected %0d", t_done - t_start, NPASS * W * H));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
