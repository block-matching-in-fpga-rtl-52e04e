// bm_stream_top -- stream-based block-matching engine (sum-table generator).
//
// The frame is streamed in row-major order once per pass. In each pass the
// square-difference stage pairs every pixel with the pixel at NWORK
// different search-window offsets, and NWORK sum workers turn the NWORK
// differential images into sum tables: for every block position, the sum
// of squared differences between the block and the block displaced by that
// worker's offset. After (WIN/2)*(WIN/NWORK) + WIN/(2*NWORK) passes the sum
// tables of every offset of the upper half of the search window (the rows
// above the pixel and the left half of its own row) have been produced; by
// symmetry they hold the distances of the full window.
//
//   pixels -> offset_sequencer (position, pass, buffer delay)
//          -> diff_square (pixel buffer, shift register, NWORK squares)
//          -> NWORK x sum_worker (summed-area compute block)
//          -> sum_stride (optional thinning of the sum stream)
//          -> sum outputs (to the sum-table memory outside this block)
//
// The sum tables are written out position by position, one table per
// worker, so the candidates of one reference block are spread over all the
// tables. Re-ordering them per reference block needs the external sum-table
// memory and an interconnect that are not part of this block; the
// re-ordered candidate stream enters again on the cand_* ports and is
// reduced to the N best candidates by pick_n_best.
//
// Interface and timing:
//  * in_valid/in_pixel: one pixel per valid cycle, IMG_W pixels per row,
//    IMG_H rows per frame, gaps allowed, no back-pressure.
//  * sum_*: one entry per valid cycle; sum_data[k] is worker k's block sum
//    for the block whose bottom-right pixel is (sum_row, sum_col) of the
//    (IMG_H-WIN/2) x (IMG_W-WIN) sum table, sum_full marks complete blocks,
//    sum_dy/sum_dx[k] give the offset (rows up, columns left) of the paired
//    block. A sum appears 5 cycles after the pixel that completes it.
//  * frame_done / all_done: one-cycle pulses after the last pixel of a
//    pass / of the last pass.
//  * cand_*, threshold, best_*: see pick_n_best.
//
// The architecture, buffer sizes and defaults (720 x 1280, WIN 32, BLK 8,
// 4 workers) are those of the paper; the port set is this design's choice.
module bm_stream_top #(
  parameter int unsigned PIX_W  = bm_pkg::DEF_PIX_W,
  parameter int unsigned SQ_W   = bm_pkg::DEF_SQ_W,
  parameter int unsigned SUM_W  = bm_pkg::DEF_SUM_W,
  parameter int unsigned IMG_W  = bm_pkg::DEF_IMG_W,
  parameter int unsigned IMG_H  = bm_pkg::DEF_IMG_H,
  parameter int unsigned WIN    = bm_pkg::DEF_WIN,
  parameter int unsigned BLK    = bm_pkg::DEF_BLK,
  parameter int unsigned NWORK  = bm_pkg::DEF_NWORK,
  parameter int unsigned STRIDE = bm_pkg::DEF_STRIDE,
  parameter int unsigned NBEST  = bm_pkg::DEF_NBEST,
  parameter int unsigned CTAG_W = 16,
  localparam int unsigned NPASS  = (WIN / 2) * (WIN / NWORK) + WIN / (2 * NWORK),
  localparam int unsigned PASS_W = (NPASS > 1) ? $clog2(NPASS) : 1,
  localparam int unsigned DIFF_W = IMG_W - WIN,
  localparam int unsigned DIFF_H = IMG_H - WIN / 2,
  localparam int unsigned DCOL_W = $clog2(DIFF_W),
  localparam int unsigned DROW_W = $clog2(DIFF_H),
  localparam int unsigned OFF_W  = $clog2(WIN) + 2
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // pixel stream
  input  logic                               in_valid,
  input  logic [PIX_W-1:0]                   in_pixel,
  // sum-table stream
  output logic                               sum_valid,
  output logic [NWORK-1:0][SUM_W-1:0]        sum_data,
  output logic [DROW_W-1:0]                  sum_row,
  output logic [DCOL_W-1:0]                  sum_col,
  output logic                               sum_full,
  output logic [PASS_W-1:0]                  sum_pass,
  output logic signed [OFF_W-1:0]            sum_dy,
  output logic [NWORK-1:0][OFF_W-1:0]        sum_dx,
  output logic                               frame_done,
  output logic                               all_done,
  output logic                               row_jump,
  // re-ordered candidates of one reference block, and the N best
  input  logic                               cand_valid,
  input  logic                               cand_first,
  input  logic                               cand_last,
  input  logic [SUM_W-1:0]                   cand_dist,
  input  logic [CTAG_W-1:0]                  cand_tag,
  input  logic [SUM_W-1:0]                   threshold,
  output logic                               best_valid,
  output logic [NBEST-1:0][SUM_W-1:0]        best_dist,
  output logic [NBEST-1:0][CTAG_W-1:0]       best_tag,
  output logic [$clog2(NBEST+1)-1:0]         best_count
);

  localparam int unsigned ROW_W = $clog2(IMG_H);
  localparam int unsigned COL_W = $clog2(IMG_W);
  localparam int unsigned DLY_W = $clog2((WIN / 2) * IMG_W + WIN / 2 + 1);

  // ---- pass / offset sequencing -------------------------------------------
  logic [ROW_W-1:0]  in_row;
  logic [COL_W-1:0]  in_col;
  logic [PASS_W-1:0] pass;
  logic [DLY_W-1:0]  dmin;

  offset_sequencer #(
    .IMG_W(IMG_W), .IMG_H(IMG_H), .WIN(WIN), .NWORK(NWORK)
  ) u_seq (
    .clk, .rst_n, .in_valid,
    .in_row, .in_col, .pass, .dmin, .row_jump,
    .frame_done, .all_done
  );

  // ---- image to square difference -----------------------------------------
  logic                        sq_valid;
  logic [NWORK-1:0][SQ_W-1:0]  sq_data;
  logic [DROW_W-1:0]           sq_row;
  logic [DCOL_W-1:0]           sq_col;
  logic [PASS_W-1:0]           sq_pass;

  diff_square #(
    .PIX_W(PIX_W), .SQ_W(SQ_W), .IMG_W(IMG_W), .IMG_H(IMG_H),
    .WIN(WIN), .NWORK(NWORK), .TAG_W(PASS_W)
  ) u_diff (
    .clk, .rst_n, .in_valid, .in_pixel, .in_row, .in_col, .dmin,
    .in_pass(pass),
    .sq_valid, .sq_data, .sq_row, .sq_col, .sq_pass
  );

  // ---- parallel sum workers -----------------------------------------------
  logic [NWORK-1:0]             w_valid, w_full;
  logic [NWORK-1:0][SUM_W-1:0]  w_sum;
  logic [NWORK-1:0][DROW_W-1:0] w_row;
  logic [NWORK-1:0][DCOL_W-1:0] w_col;
  logic [NWORK-1:0][PASS_W-1:0] w_tag;

  for (genvar k = 0; k < NWORK; k++) begin : g_worker
    sum_worker #(
      .SQ_W(SQ_W), .SUM_W(SUM_W), .DIFF_W(DIFF_W), .DIFF_H(DIFF_H),
      .BLK(BLK), .TAG_W(PASS_W)
    ) u_worker (
      .clk, .rst_n,
      .d_valid(sq_valid), .d_data(sq_data[k]), .d_row(sq_row), .d_col(sq_col),
      .d_tag(sq_pass),
      .s_valid(w_valid[k]), .s_sum(w_sum[k]), .s_row(w_row[k]), .s_col(w_col[k]),
      .s_tag(w_tag[k]), .s_full(w_full[k])
    );
  end

  // The workers run in lock step; worker 0's position and tag stand for all.
  sum_stride #(.STRIDE(STRIDE), .COL_W(DCOL_W)) u_stride (
    .clk, .rst_n, .in_valid(w_valid[0]), .in_col(w_col[0]), .out_valid(sum_valid)
  );

  localparam int unsigned GROUPS = WIN / NWORK;

  always_comb begin
    sum_data = w_sum;
    sum_row  = w_row[0];
    sum_col  = w_col[0];
    sum_full = w_full[0];
    sum_pass = w_tag[0];
    sum_dy   = OFF_W'(WIN / 2) - OFF_W'(w_tag[0] / PASS_W'(GROUPS));
    for (int k = 0; k < NWORK; k++)
      sum_dx[k] = OFF_W'(WIN / 2) - OFF_W'(w_tag[0] % PASS_W'(GROUPS)) * OFF_W'(NWORK)
                  - OFF_W'(k);
  end

  // ---- N best candidates of a re-ordered reference block ------------------
  pick_n_best #(.N(NBEST), .DIST_W(SUM_W), .TAG_W(CTAG_W)) u_pick (
    .clk, .rst_n,
    .c_valid(cand_valid), .c_first(cand_first), .c_last(cand_last),
    .c_dist(cand_dist), .c_tag(cand_tag), .threshold,
    .best_valid, .best_dist, .best_tag, .best_count
  );

endmodule
