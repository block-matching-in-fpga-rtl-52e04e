// tb_bm_stream_top -- end-to-end test of the stream block-matching engine.
//
// Reduced configuration: 24 x 14 frame, 8 x 8 search window, 3 x 3 blocks,
// 4 workers (9 passes per image), stride 2, 4 best candidates. One random
// image is streamed once per pass with random gaps between pixels.
//
// Checked against a reference computed here from the image alone:
//  * every kept sum of every worker equals the sum over the 3 x 3 block of
//    (I(r,c) - I(r-dy, c-dx))^2, zero outside the differential image;
//  * its position follows raster order with every second column kept, its
//    pass and offsets match the pass schedule, sum_full is right, and it
//    appears 5 cycles after the pixel that completes the block;
//  * frame_done, all_done and the window row jumps occur as scheduled.
// The testbench then stands in for the external sum-table memory and the
// re-ordering interconnect: for several reference blocks it gathers the
// candidate distances of all 36 offsets from the stored sum tables and
// streams them into the candidate port; the N-best list must match a
// stable sort of the candidates under the threshold.
// Each mechanism (gaps, partial sums, stride drops, row jumps, list
// overflow, threshold rejection) must occur at least once.
module tb_bm_stream_top;
  localparam int W = 24, H = 14, WIN = 8, BLK = 3, NW = 4, STRIDE = 2, NB = 4;
  localparam int PIX_W = 8, SUM_W = 32, CTAG_W = 8;
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
  logic [SUM_W-1:0] cand_dist, threshold;
  logic [CTAG_W-1:0] cand_tag;
  logic best_valid;
  logic [NB-1:0][SUM_W-1:0] best_dist;
  logic [NB-1:0][CTAG_W-1:0] best_tag;
  logic [$clog2(NB+1)-1:0] best_count;

  bm_stream_top #(.PIX_W(PIX_W), .SUM_W(SUM_W), .IMG_W(W), .IMG_H(H), .WIN(WIN),
                  .BLK(BLK), .NWORK(NW), .STRIDE(STRIDE), .NBEST(NB),
                  .CTAG_W(CTAG_W)) dut (.*);

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
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int img [H][W];
  longint t_in [NPASS][H][W];
  longint cyc = 0;
  always @(posedge clk) cyc++;

  function automatic int ex_dy(int p);
    return WIN / 2 - p / (WIN / NW);
  endfunction
  function automatic int ex_dx(int p, int k);
    return WIN / 2 - (p % (WIN / NW)) * NW - k;
  endfunction
  function automatic longint ref_sum(int p, int k, int r, int c);
    longint s = 0;
    for (int i = 0; i < BLK; i++)
      for (int j = 0; j < BLK; j++)
        if (r - i >= 0 && c - j >= 0) begin
          automatic int ir = r - i + WIN / 2, ic = c - j + WIN / 2;
          automatic int d = img[ir][ic] - img[ir - ex_dy(p)][ic - ex_dx(p, k)];
          s += d * d;
        end
    return s;
  endfunction

  // stored sum tables: [offset index = pass*NW + k][row][col]
  longint table_q [NPASS*NW][DH][DW];

  int mp = 0, mr = 0, mc = 0, n_out = 0, n_partial = 0, n_full = 0;
  int n_frame = 0, n_all = 0, n_jump = 0, n_gap = 0;
  always @(posedge clk) begin
    if (rst_n && frame_done) n_frame++;
    if (rst_n && all_done) n_all++;
    if (rst_n && sum_valid) begin
      n_out++;
      check(sum_row == mr && sum_col == mc && sum_pass == mp,
            $sformatf("position pass %0d (%0d,%0d) got pass %0d (%0d,%0d)", mp, mr, mc, sum_pass, sum_row, sum_col));
      check(sum_dy == ex_dy(mp), $sformatf("dy pass %0d got %0d", mp, sum_dy));
      check(sum_full == (mr >= BLK - 1 && mc >= BLK - 1), "sum_full");
      check(cyc - t_in[mp][mr + WIN/2][mc + WIN/2] == 5,
            $sformatf("latency %0d", cyc - t_in[mp][mr + WIN/2][mc + WIN/2]));
      if (sum_full) n_full++; else n_partial++;
      for (int k = 0; k < NW; k++) begin
        check($signed(sum_dx[k]) == ex_dx(mp, k), $sformatf("dx pass %0d worker %0d", mp, k));
        check(sum_data[k] == SUM_W'(ref_sum(mp, k, mr, mc)),
              $sformatf("pass %0d worker %0d (%0d,%0d): exp %0d got %0d", mp, k, mr, mc,
                        ref_sum(mp, k, mr, mc), sum_data[k]));
        table_q[mp*NW + k][mr][mc] = sum_data[k];
      end
      if (mc + STRIDE > DW - 1) begin
        mc = 0;
        if (mr == DH - 1) begin mr = 0; mp++; end
        else mr++;
      end else mc += STRIDE;
    end
  end

  initial begin
    int ed[$], et[$], pos, n_over = 0, n_rej = 0, rr, cc;
    longint dval;
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++) img[r][c] = $urandom_range(255);
    threshold = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- one complete image: NPASS passes ----
    for (int p = 0; p < NPASS; p++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          @(negedge clk);
          while ($urandom_range(5) == 0) begin
            in_valid = 0;
            n_gap++;
            @(negedge clk);
          end
          in_valid = 1;
          in_pixel = PIX_W'(img[r][c]);
          t_in[p][r][c] = cyc + 1;
          if (r == H - 1 && c == W - 1) begin
            #1 check(row_jump == ((p % (WIN / NW)) == (WIN / NW - 1) || p == NPASS - 1),
                     $sformatf("row_jump pass %0d", p));
            if (row_jump) n_jump++;
          end
        end
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(negedge clk);
    check(n_out == NPASS * DH * ((DW + STRIDE - 1) / STRIDE), $sformatf("sum count %0d", n_out));
    check(n_frame == NPASS, $sformatf("frame_done count %0d", n_frame));
    check(n_all == 1, $sformatf("all_done count %0d", n_all));

    // ---- N best of re-ordered candidates for 12 reference blocks ----
    for (int b = 0; b < 12; b++) begin
      rr = BLK - 1 + $urandom_range(DH - BLK);
      cc = STRIDE * ((BLK - 1 + STRIDE - 1) / STRIDE + $urandom_range((DW - BLK) / STRIDE - 1));
      // threshold: the median-ish distance of this block, so some are rejected
      threshold = SUM_W'(table_q[$urandom_range(NPASS*NW - 1)][rr][cc]);
      ed.delete(); et.delete();
      for (int o = 0; o < NPASS * NW; o++) begin
        @(negedge clk);
        dval = table_q[o][rr][cc];
        cand_valid = 1;
        cand_first = (o == 0);
        cand_last  = (o == NPASS * NW - 1);
        cand_dist  = SUM_W'(dval);
        cand_tag   = CTAG_W'(o);
        if (dval <= threshold) begin
          pos = 0;
          while (pos < ed.size() && ed[pos] <= dval) pos++;
          ed.insert(pos, int'(dval));
          et.insert(pos, o);
        end else n_rej++;
      end
      @(negedge clk);
      cand_valid = 0; cand_first = 0; cand_last = 0;
      if (ed.size() > NB) n_over++;
      check(best_valid == 1, "best_valid");
      check(best_count == ((ed.size() > NB) ? NB : ed.size()), $sformatf("best_count %0d", best_count));
      for (int k = 0; k < NB && k < ed.size(); k++)
        check(best_dist[k] == SUM_W'(ed[k]) && best_tag[k] == CTAG_W'(et[k]),
              $sformatf("block (%0d,%0d) best %0d exp %0d/%0d got %0d/%0d", rr, cc, k, ed[k], et[k],
                        best_dist[k], best_tag[k]));
    end

    $display("mechanisms: gaps=%0d partial_sums=%0d full_sums=%0d stride_dropped=%0d row_jumps=%0d list_overflow=%0d rejected=%0d",
             n_gap, n_partial, n_full, NPASS * DH * DW - n_out, n_jump, n_over, n_rej);
    check(n_gap > 0, "input gaps happened");
    check(n_partial > 0, "partial edge sums happened");
    check(n_full > 0, "complete block sums happened");
    check(NPASS * DH * DW - n_out > 0, "stride dropped sums");
    check(n_jump > 0, "window row jumps happened");
    check(n_over > 0, "N-best list overflow happened");
    check(n_rej > 0, "threshold rejection happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
