// diff_square -- "image to square difference" stage of the stream block matcher.
//
// Every incoming pixel x(r,c) is written into a circular pixel buffer that
// holds the last DEPTH = (WIN/2)*IMG_W + WIN/2 pixels of the stream. The
// buffer is read dmin pixels back, which is the paired ("offset") pixel of
// the last worker; a short shift register of NWORK-1 earlier reads supplies
// the paired pixels of the other workers, each one column further left.
// Worker k therefore receives (x(r,c) - x(r-dy, c-dx0+k))^2.
//
// Only pixels where every offset of the window lands inside the frame are
// passed on: rows WIN/2 .. IMG_H-1 and columns WIN/2 .. IMG_W-WIN/2-1, i.e.
// a differential image of (IMG_H - WIN/2) x (IMG_W - WIN) pixels whose
// coordinates (sq_row, sq_col) start at zero. One differential pixel per
// worker leaves per accepted input pixel inside that region.
//
// Interface: in_valid/in_pixel with the pixel's in_row/in_col, and the pass
// number and dmin of offset_sequencer. The pass number is carried along as
// sq_pass. There is no back-pressure.
// Timing: two register stages; a pixel accepted in cycle t appears on
// sq_valid/sq_data in cycle t+2.
//
// From the paper: the buffered-pixel approach, buffer size of about
// WIN*IMG_W/2, the shift register feeding the parallel workers (Fig. 11)
// and the overlap-only output region (Fig. 6 dimensions). This design's
// choice: synchronous read-before-write buffer, squared value zero-extended
// to SQ_W bits.
module diff_square #(
  parameter int unsigned PIX_W = bm_pkg::DEF_PIX_W,
  parameter int unsigned SQ_W  = bm_pkg::DEF_SQ_W,
  parameter int unsigned IMG_W = bm_pkg::DEF_IMG_W,
  parameter int unsigned IMG_H = bm_pkg::DEF_IMG_H,
  parameter int unsigned WIN   = bm_pkg::DEF_WIN,
  parameter int unsigned NWORK = bm_pkg::DEF_NWORK,
  parameter int unsigned TAG_W = 8,
  localparam int unsigned DEPTH = (WIN / 2) * IMG_W + WIN / 2,
  localparam int unsigned COL_W = $clog2(IMG_W),
  localparam int unsigned ROW_W = $clog2(IMG_H),
  localparam int unsigned DLY_W = $clog2(DEPTH + 1),
  localparam int unsigned ADR_W = $clog2(DEPTH),
  localparam int unsigned DCOL_W = $clog2(IMG_W - WIN),
  localparam int unsigned DROW_W = $clog2(IMG_H - WIN / 2)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [PIX_W-1:0]              in_pixel,
  input  logic [ROW_W-1:0]              in_row,
  input  logic [COL_W-1:0]              in_col,
  input  logic [DLY_W-1:0]              dmin,
  input  logic [TAG_W-1:0]              in_pass,
  output logic                          sq_valid,
  output logic [NWORK-1:0][SQ_W-1:0]    sq_data,
  output logic [DROW_W-1:0]             sq_row,
  output logic [DCOL_W-1:0]             sq_col,
  output logic [TAG_W-1:0]              sq_pass
);

  if (SQ_W < 2 * PIX_W) begin : g_check1
    $error("SQ_W too narrow for a squared pixel difference");
  end
  if (NWORK > WIN / 2) begin : g_check2
    $error("NWORK must not exceed WIN/2");
  end

  // ---- stage 1: buffer write, delayed read -------------------------------
  logic [PIX_W-1:0] pixbuf [DEPTH];
  logic [ADR_W-1:0] wptr;
  logic [ADR_W-1:0] rptr;

  always_comb begin
    if (DLY_W'(wptr) >= dmin) rptr = ADR_W'(DLY_W'(wptr) - dmin);
    else                      rptr = ADR_W'(DLY_W'(wptr) + DLY_W'(DEPTH) - dmin);
  end

  logic [PIX_W-1:0]  rd_q;      // paired pixel of the last worker
  logic [PIX_W-1:0]  x_q;       // current pixel
  logic              v1_q;
  logic [ROW_W-1:0]  row1_q;
  logic [COL_W-1:0]  col1_q;
  logic [TAG_W-1:0]  pass1_q;

  always_ff @(posedge clk) begin
    if (in_valid) begin
      rd_q          <= pixbuf[rptr];
      pixbuf[wptr]  <= in_pixel;
      x_q           <= in_pixel;
      row1_q        <= in_row;
      col1_q        <= in_col;
      pass1_q       <= in_pass;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      v1_q <= 1'b0;
    end else begin
      v1_q <= in_valid;
      if (in_valid) wptr <= (wptr == ADR_W'(DEPTH - 1)) ? '0 : wptr + 1'b1;
    end
  end

  // ---- history of earlier reads: tap j is dmin + j pixels back ------------
  logic [NWORK-1:0][PIX_W-1:0] tap;
  logic [NWORK-1:1][PIX_W-1:0] hist_q;

  always_comb begin
    tap[0] = rd_q;
    for (int j = 1; j < NWORK; j++) tap[j] = hist_q[j];
  end

  if (NWORK > 1) begin : g_hist
    always_ff @(posedge clk) begin
      if (v1_q) begin
        for (int j = 1; j < NWORK; j++) hist_q[j] <= tap[j-1];
      end
    end
  end

  // ---- stage 2: square differences inside the overlap region --------------
  logic in_region;
  assign in_region = (row1_q >= ROW_W'(WIN / 2)) &&
                     (col1_q >= COL_W'(WIN / 2)) &&
                     (col1_q <  COL_W'(IMG_W - WIN / 2));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sq_valid <= 1'b0;
    else        sq_valid <= v1_q && in_region;
  end

  always_ff @(posedge clk) begin
    if (v1_q && in_region) begin
      for (int k = 0; k < NWORK; k++) begin
        automatic logic signed [2*PIX_W+1:0] d;
        d = $signed({{(PIX_W+2){1'b0}}, x_q}) - $signed({{(PIX_W+2){1'b0}}, tap[NWORK-1-k]});
        sq_data[k] <= SQ_W'(d * d);
      end
      sq_row  <= DROW_W'(row1_q - ROW_W'(WIN / 2));
      sq_col  <= DCOL_W'(col1_q - COL_W'(WIN / 2));
      sq_pass <= pass1_q;
    end
  end

endmodule
