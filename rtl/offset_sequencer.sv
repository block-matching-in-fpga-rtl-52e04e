// offset_sequencer -- frame position counter and search-window offset stepper.
//
// The stream architecture computes one search-window offset per worker per
// pass of the whole image. This block follows the incoming pixel stream
// (one pixel per accepted in_valid, row-major, IMG_W pixels per row,
// IMG_H rows), reports the row/column of the current pixel, and at the end
// of every frame advances the offset of worker 0 by NWORK window columns.
// After the last column group of a window row it jumps to the first column
// of the next window row. Window rows 0 .. WIN/2-1 (dy = WIN/2 .. 1) are
// swept over all WIN columns; the last window row, the centre row (dy = 0),
// only over its left half (dx = WIN/2 .. 1), ending next to the centre
// pixel. After it the sequencer reports all_done and starts again at the
// window corner for the next image. That makes
// NPASS = (WIN/2)*(WIN/NWORK) + WIN/(2*NWORK) passes per image.
//
// For the current pass it gives dy (rows up) and dx0 (columns left) of
// worker 0's paired pixel, and dmin = dy*IMG_W + dx0 - (NWORK-1): the
// stream distance to the paired pixel of the last worker, the nearest one,
// which is where the square-difference stage reads its pixel buffer.
//
// Timing: in_row/in_col/pass/dmin are combinational views of registers and
// belong to the pixel presented with in_valid in the same cycle. frame_done
// and all_done are registered one-cycle pulses after the last pixel.
//
// From the paper: one offset set per image pass, offsets advance by the
// number of workers, row jump at the end of a window row, WIN divisible by
// NWORK, sweep from the window corner towards the centre. This design's
// choice: only the upper half of the window is swept (the pair distance is
// symmetric, and Fig. 6's output height is height - WIN/2), the centre
// offset itself (distance zero) is left out, WIN/2 must be a multiple of
// NWORK so the centre row splits into whole passes, and the stream has no
// back-pressure.
module offset_sequencer #(
  parameter int unsigned IMG_W = bm_pkg::DEF_IMG_W,
  parameter int unsigned IMG_H = bm_pkg::DEF_IMG_H,
  parameter int unsigned WIN   = bm_pkg::DEF_WIN,
  parameter int unsigned NWORK = bm_pkg::DEF_NWORK,
  localparam int unsigned NPASS = (WIN / 2) * (WIN / NWORK) + WIN / (2 * NWORK),
  localparam int unsigned COL_W = $clog2(IMG_W),
  localparam int unsigned ROW_W = $clog2(IMG_H),
  localparam int unsigned PASS_W = (NPASS > 1) ? $clog2(NPASS) : 1,
  localparam int unsigned DLY_W = $clog2((WIN / 2) * IMG_W + WIN / 2 + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic [ROW_W-1:0]  in_row,
  output logic [COL_W-1:0]  in_col,
  output logic [PASS_W-1:0] pass,
  output logic [DLY_W-1:0]  dmin,
  output logic              row_jump,    // this pass is the last column group of a window row
  output logic              frame_done,
  output logic              all_done
);

  if ((WIN / 2) % NWORK != 0) begin : g_check1
    $error("WIN/2 must be a multiple of NWORK");
  end
  if (NWORK > WIN / 2) begin : g_check2
    $error("NWORK must not exceed WIN/2");
  end
  if (IMG_W <= WIN || IMG_H <= WIN / 2) begin : g_check3
    $error("image smaller than the search window");
  end

  localparam int unsigned GROUPS = WIN / NWORK;   // column groups per window row

  logic [ROW_W-1:0]  row_q;
  logic [COL_W-1:0]  col_q;
  logic [$clog2(WIN/2+1)-1:0] wy_q;    // window row, 0 = top, WIN/2 = centre
  logic [$clog2(GROUPS+1)-1:0] grp_q;  // column group inside the window row

  logic last_col, last_row, last_grp, last_wy;
  assign last_col = (col_q == COL_W'(IMG_W - 1));
  assign last_row = (row_q == ROW_W'(IMG_H - 1));
  // the centre window row holds only the left half of the column groups
  assign last_wy  = (wy_q == $bits(wy_q)'(WIN / 2));
  assign last_grp = last_wy ? (grp_q == $bits(grp_q)'(GROUPS / 2 - 1))
                            : (grp_q == $bits(grp_q)'(GROUPS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_q      <= '0;
      col_q      <= '0;
      wy_q       <= '0;
      grp_q      <= '0;
      frame_done <= 1'b0;
      all_done   <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      all_done   <= 1'b0;
      if (in_valid) begin
        if (last_col) begin
          col_q <= '0;
          if (last_row) begin
            row_q      <= '0;
            frame_done <= 1'b1;
            if (last_grp) begin
              grp_q <= '0;
              if (last_wy) begin
                wy_q     <= '0;
                all_done <= 1'b1;
              end else begin
                wy_q <= wy_q + 1'b1;
              end
            end else begin
              grp_q <= grp_q + 1'b1;
            end
          end else begin
            row_q <= row_q + 1'b1;
          end
        end else begin
          col_q <= col_q + 1'b1;
        end
      end
    end
  end

  logic [DLY_W-1:0] dy, dx0;
  assign dy  = DLY_W'(WIN / 2) - DLY_W'(wy_q);
  assign dx0 = DLY_W'(WIN / 2) - DLY_W'(grp_q) * DLY_W'(NWORK);

  assign in_row   = row_q;
  assign in_col   = col_q;
  assign pass     = PASS_W'(wy_q) * PASS_W'(GROUPS) + PASS_W'(grp_q);
  assign dmin     = dy * DLY_W'(IMG_W) + dx0 - DLY_W'(NWORK - 1);
  assign row_jump = last_grp;

endmodule
