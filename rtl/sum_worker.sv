// sum_worker -- sliding compute block: squared-difference stream to block sums.
//
// One worker turns the differential image of one search-window offset,
// streamed row-major (DIFF_W pixels per row), into the stream of BLK x BLK
// block sums S(r,c) = sum of D(r-i, c-j) for 0 <= i,j < BLK, i.e. the sum
// for the block whose bottom-right pixel is the current one. Terms outside
// the differential image count as zero, so the first BLK-1 rows and columns
// carry partial sums; s_full marks the sums of complete blocks.
//
// The summed-area recurrence is
//   S(r,c) = S(r-1,c) + S(r,c-1) - S(r-1,c-1)
//          + D(r,c) - D(r-BLK,c) - D(r,c-BLK) + D(r-BLK,c-BLK).
// D(r-BLK,c) comes from a pixel buffer of BLK rows, S(r-1,c) from a sum
// buffer of one row, D(r,c-BLK) and D(r-BLK,c-BLK) from BLK-deep shift
// registers. To keep a single short loop, the terms are regrouped into
// four operands (the paper's optimised data-dependency form):
//   up   = S(r-1,c) - D(r-BLK,c)            read and combined one cycle early
//   left = S(r,c-1) - S(r-1,c-1)            carried from the previous cycle
//   cur  = D(r,c)
//   diag = D(r-BLK,c-BLK) - D(r,c-BLK)      precomputed from the shift registers
//   S(r,c) = left + up + cur + diag,  next left = left + cur + diag - D(r-BLK,c).
//
// Interface: d_valid/d_data with the pixel's d_row/d_col and a tag that is
// carried along. Gaps between valid pixels are allowed; there is no
// back-pressure. Timing: a pixel accepted in cycle t yields its sum on
// s_valid in cycle t+3, so the worker sustains one sum per cycle.
//
// From the paper: the recurrence, the BLK-row pixel buffer and one-row sum
// buffer, zero for unavailable terms, and the pre-read/pre-compute
// regrouping. This design's choice: the exact pipeline split (read, combine,
// accumulate), the tag, the s_full flag, and that the worker outputs every
// position including partial edge sums.
module sum_worker #(
  parameter int unsigned SQ_W   = bm_pkg::DEF_SQ_W,
  parameter int unsigned SUM_W  = bm_pkg::DEF_SUM_W,
  parameter int unsigned DIFF_W = bm_pkg::DEF_IMG_W - bm_pkg::DEF_WIN,
  parameter int unsigned DIFF_H = bm_pkg::DEF_IMG_H - bm_pkg::DEF_WIN / 2,
  parameter int unsigned BLK    = bm_pkg::DEF_BLK,
  parameter int unsigned TAG_W  = 8,
  localparam int unsigned COL_W = $clog2(DIFF_W),
  localparam int unsigned ROW_W = $clog2(DIFF_H),
  localparam int unsigned PDEPTH = BLK * DIFF_W,
  localparam int unsigned PADR_W = $clog2(PDEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              d_valid,
  input  logic [SQ_W-1:0]   d_data,
  input  logic [ROW_W-1:0]  d_row,
  input  logic [COL_W-1:0]  d_col,
  input  logic [TAG_W-1:0]  d_tag,
  output logic              s_valid,
  output logic [SUM_W-1:0]  s_sum,
  output logic [ROW_W-1:0]  s_row,
  output logic [COL_W-1:0]  s_col,
  output logic [TAG_W-1:0]  s_tag,
  output logic              s_full
);

  if (DIFF_W < 4) begin : g_check1
    $error("differential image too narrow for the sum buffer");
  end
  if (SUM_W <= SQ_W) begin : g_check2
    $error("SUM_W must exceed SQ_W");
  end

  typedef logic signed [SUM_W-1:0] acc_t;

  // ---- stage 1: buffer reads (D(r-BLK,c), S(r-1,c)) and pixel write --------
  logic [SQ_W-1:0]  pixbuf [PDEPTH];
  logic [SUM_W-1:0] sumbuf [DIFF_W];
  logic [PADR_W-1:0] pptr_q, paddr;

  assign paddr = (d_row == '0 && d_col == '0) ? '0 : pptr_q;

  logic              v1_q;
  logic [SQ_W-1:0]   d1_q, ptop_rd_q;
  logic [SUM_W-1:0]  stop_rd_q;
  logic [ROW_W-1:0]  row1_q;
  logic [COL_W-1:0]  col1_q;
  logic [TAG_W-1:0]  tag1_q;

  always_ff @(posedge clk) begin
    if (d_valid) begin
      ptop_rd_q     <= pixbuf[paddr];
      pixbuf[paddr] <= d_data;
      stop_rd_q     <= sumbuf[d_col];
      d1_q          <= d_data;
      row1_q        <= d_row;
      col1_q        <= d_col;
      tag1_q        <= d_tag;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q   <= 1'b0;
      pptr_q <= '0;
    end else begin
      v1_q <= d_valid;
      if (d_valid) pptr_q <= (paddr == PADR_W'(PDEPTH - 1)) ? '0 : paddr + 1'b1;
    end
  end

  // input rule: pixels arrive in raster order, one column after the other
  logic [COL_W-1:0] last_col_q;
  logic             seen_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) seen_q <= 1'b0;
    else if (d_valid) begin
      seen_q     <= 1'b1;
      last_col_q <= d_col;
    end
  end
  a_raster: assert property (@(posedge clk) disable iff (!rst_n)
                             d_valid && seen_q && d_col != '0 |-> d_col == last_col_q + 1'b1)
    else $error("differential pixels out of raster order");

  // ---- stage 2: zero the unavailable terms, pre-combine ------------------
  acc_t top, dtop;
  assign top  = (row1_q == '0)               ? '0 : acc_t'(stop_rd_q);
  assign dtop = (row1_q < ROW_W'(BLK))       ? '0 : acc_t'(ptop_rd_q);

  // shift registers: cur_sr[BLK-1] = D(r,c-BLK), top_sr[BLK-1] = D(r-BLK,c-BLK)
  acc_t cur_sr [BLK];
  acc_t top_sr [BLK];

  always_ff @(posedge clk) begin
    if (v1_q) begin
      cur_sr[0] <= acc_t'(d1_q);
      top_sr[0] <= dtop;
      for (int i = 1; i < BLK; i++) begin
        cur_sr[i] <= cur_sr[i-1];
        top_sr[i] <= top_sr[i-1];
      end
    end
  end

  logic              v2_q;
  acc_t              up_q, cur_q, diag_q, dtop_q;
  logic [ROW_W-1:0]  row2_q;
  logic [COL_W-1:0]  col2_q;
  logic [TAG_W-1:0]  tag2_q;

  always_ff @(posedge clk) begin
    if (v1_q) begin
      up_q   <= top - dtop;
      cur_q  <= acc_t'(d1_q);
      diag_q <= (col1_q < COL_W'(BLK)) ? '0 : top_sr[BLK-1] - cur_sr[BLK-1];
      dtop_q <= dtop;
      row2_q <= row1_q;
      col2_q <= col1_q;
      tag2_q <= tag1_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v2_q <= 1'b0;
    else        v2_q <= v1_q;
  end

  // ---- stage 3: the only loop-carried accumulation ------------------------
  acc_t left_q, left_in, sum_next;
  assign left_in  = (col2_q == '0) ? '0 : left_q;
  assign sum_next = left_in + up_q + cur_q + diag_q;

  always_ff @(posedge clk) begin
    if (v2_q) begin
      left_q         <= left_in + cur_q + diag_q - dtop_q;
      s_sum          <= SUM_W'(sum_next);
      sumbuf[col2_q] <= SUM_W'(sum_next);
      s_row          <= row2_q;
      s_col          <= col2_q;
      s_tag          <= tag2_q;
      s_full         <= (row2_q >= ROW_W'(BLK - 1)) && (col2_q >= COL_W'(BLK - 1));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s_valid <= 1'b0;
    else        s_valid <= v2_q;
  end

endmodule
