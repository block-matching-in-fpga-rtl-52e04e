// bm_pkg -- constants and helpers shared by the stream block-matching pipeline.
//
// The defaults are the configuration synthesised in the paper's evaluation:
// a transposed 720p frame (720 pixels per row, 1280 rows), a 32 x 32 search
// window, 8 x 8 blocks and 4 parallel sum workers. Pixel width (8 bits) is
// this design's choice; the 18-bit squared difference and 32-bit sum widths
// follow the operand widths quoted for the compute block's adders.
//
// Search-window offsets are numbered by pass. There are
// (WIN/2)*(WIN/NWORK) + WIN/(2*NWORK) passes: WIN/2 full window rows above
// the centre and the left half of the centre row. In pass p the window row
// wy = p / (WIN/NWORK) and the first window column wx0 = (p mod (WIN/NWORK))
// * NWORK; worker k covers window column wx0 + k. The offset of the paired
// pixel, seen from the current pixel, is dy = WIN/2 - wy rows up and
// dx = WIN/2 - wx columns to the left (negative dx means to the right), so
// the sweep starts at the window's top-left corner and moves towards its
// centre. Offsets below the centre row, and right of the centre in it,
// give the same distances with the roles of the two blocks swapped.
package bm_pkg;

  localparam int unsigned DEF_PIX_W  = 8;
  localparam int unsigned DEF_SQ_W   = 18;
  localparam int unsigned DEF_SUM_W  = 32;
  localparam int unsigned DEF_IMG_W  = 720;
  localparam int unsigned DEF_IMG_H  = 1280;
  localparam int unsigned DEF_WIN    = 32;
  localparam int unsigned DEF_BLK    = 8;
  localparam int unsigned DEF_NWORK  = 4;
  localparam int unsigned DEF_STRIDE = 1;
  localparam int unsigned DEF_NBEST  = 16;

  // Number of image passes needed to cover the half search window.
  function automatic int unsigned num_passes(int unsigned win, int unsigned nwork);
    return (win / 2) * (win / nwork) + win / (2 * nwork);
  endfunction

  // Vertical offset (rows up) of the paired pixel in a pass.
  function automatic int offset_dy(int unsigned pass, int unsigned win, int unsigned nwork);
    return int'(win / 2) - int'(pass / (win / nwork));
  endfunction

  // Horizontal offset (columns left) of the paired pixel for worker k in a pass.
  function automatic int offset_dx(int unsigned pass, int unsigned k,
                                   int unsigned win, int unsigned nwork);
    return int'(win / 2) - int'((pass % (win / nwork)) * nwork + k);
  endfunction

endpackage
