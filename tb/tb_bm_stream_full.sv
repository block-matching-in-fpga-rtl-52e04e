// tb_bm_stream_full -- full-size run of the stream block-matching engine.
//
// The engine is used with its default parameters (720 x 1280 frame,
// 32 x 32 search window, 8 x 8 blocks, 4 workers) and takes one complete
// image through all 132 passes, one pixel per clock. The image is the
// ramp I(i,j) = j mod 256: every row equals its column index. Its squared
// differences depend only on the column and the horizontal offset, so the
// expected block sum at sum-table position (r,c) for horizontal offset dx
// is min(r+1, 8) times the sum, over the (up to) 8 columns c-7..c, of
// ((x mod 256) - ((x-dx) mod 256))^2 with x the image column. Away from
// the wrap at 256 this is the constant 64*dx^2 of the complete block.
// Every sum of every worker is checked, with the number of sums per pass,
// the offsets, the frame_done / all_done pulses, and that the whole image
// takes exactly 132 * 720 * 1280 clocks (one pixel per clock).
module tb_bm_stream_full;
  import bm_pkg::*;
  localparam int W = DEF_IMG_W, H = DEF_IMG_H, WIN = DEF_WIN, BLK = DEF_BLK;
  localparam int NW = DEF_NWORK, NB = DEF_NBEST, SUM_W = DEF_SUM_W;
  localparam int NPASS = (WIN / 2) * (WIN / NW) + WIN / (2 * NW);
  localparam int DW = W - WIN, DH = H - WIN / 2;
  localparam int PASS_W = $clog2(NPASS), OFF_W = $clog2(WIN) + 2;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [7:0] in_pixel;
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
  logic [NB-1:0][SUM_W-1:0] best_dist;
  logic [NB-1:0][15:0] best_tag;
  logic [$clog2(NB+1)-1:0] best_count;

  bm_stream_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  localparam longint TOTAL = longint'(NPASS) * W * H;

  initial begin
    repeat (TOTAL + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // column-only reference: colwin[k][c] = sum over the block columns
  longint colwin [NW][DW];
  task automatic build_ref(int p);
    for (int k = 0; k < NW; k++) begin
      automatic int dx = WIN / 2 - (p % (WIN / NW)) * NW - k;
      for (int c = 0; c < DW; c++) begin
        longint s = 0;
        for (int j = 0; j < BLK; j++)
          if (c - j >= 0) begin
            automatic int x = c - j + WIN / 2;
            automatic int d = (x % 256) - ((x - dx) % 256);
            s += d * d;
          end
        colwin[k][c] = s;
      end
    end
  endtask

  // stimulus: one pixel per clock, ramp image
  int dr = 0, dc = 0, dp = 0;
  always @(posedge clk) begin
    if (rst_n && dp < NPASS) begin
      in_valid <= 1'b1;
      in_pixel <= 8'(dc);
      if (dc == W - 1) begin
        dc <= 0;
        if (dr == H - 1) begin dr <= 0; dp <= dp + 1; end
        else dr <= dr + 1;
      end else dc <= dc + 1;
    end else begin
      in_valid <= 1'b0;
    end
  end

  // monitor
  int mp = 0, mr = 0, mc = 0, n_frame = 0, n_all = 0;
  longint n_out = 0, cyc = 0, t_first = -1, t_done = 0;
  always @(posedge clk) begin
    cyc++;
    if (in_valid && t_first < 0) t_first = cyc;
    if (rst_n && frame_done) n_frame++;
    if (rst_n && all_done) begin
      n_all++;
      t_done = cyc;
    end
    if (rst_n && sum_valid) begin
      automatic int rows = (mr + 1 < BLK) ? mr + 1 : BLK;
      if (mr == 0 && mc == 0) build_ref(mp);
      n_out++;
      check(sum_row == mr && sum_col == mc && sum_pass == mp, "position");
      if (mc == 0) check(sum_dy == WIN / 2 - mp / (WIN / NW), "dy");
      for (int k = 0; k < NW; k++) begin
        // message built only on a mismatch: this loop runs 440 million times
        if (sum_data[k] == SUM_W'(rows * colwin[k][mc])) checks++;
        else check(0, $sformatf("pass %0d worker %0d (%0d,%0d): exp %0d got %0d", mp, k, mr, mc,
                                rows * colwin[k][mc], sum_data[k]));
      end
      if (mc == DW - 1) begin
        mc = 0;
        if (mr == DH - 1) begin
          mr = 0;
          mp++;
          if (mp % 16 == 0) $display("pass %0d of %0d done", mp, NPASS);
        end else mr++;
      end else mc++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (dp == NPASS);
    repeat (20) @(posedge clk);
    check(n_out == longint'(NPASS) * DW * DH, $sformatf("sum count %0d", n_out));
    check(n_frame == NPASS, $sformatf("frame_done count %0d", n_frame));
    check(n_all == 1, $sformatf("all_done count %0d", n_all));
    // one pixel per clock, no stall between passes
    check(t_done - t_first == TOTAL, $sformatf("image took %0d cycles, expected %0d", t_done - t_first, TOTAL));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
