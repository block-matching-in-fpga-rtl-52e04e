// sum_stride -- keeps every STRIDE-th block sum of each sum-table row.
//
// Picking the N best candidates costs more than one cycle per candidate, so
// the sum stream can be thinned before that stage: only one sum out of
// every STRIDE along a row stays valid (the first of the row, then every
// STRIDE-th). This lowers the candidate rate, and the memory needed for the
// sum tables, by the factor STRIDE. STRIDE = 1 passes every sum.
//
// Interface: in_valid with the sum's column in_col; out_valid is in_valid
// gated by a column phase counter that restarts at column 0. The data that
// belongs to the sum is not routed through this block; it stays on the
// same cycle. Timing: combinational from in_valid to out_valid.
//
// From the paper: validating the sum output only every STRIDE clocks. This
// design's choice: the counter restarts at every row so that the kept
// columns are the same in every row; the paper gives no stride value, the
// default 1 keeps every sum.
module sum_stride #(
  parameter int unsigned STRIDE = bm_pkg::DEF_STRIDE,
  parameter int unsigned COL_W  = 10,
  localparam int unsigned PH_W  = (STRIDE > 1) ? $clog2(STRIDE) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [COL_W-1:0] in_col,
  output logic             out_valid
);

  if (STRIDE < 1) begin : g_check1
    $error("STRIDE must be at least 1");
  end

  logic [PH_W-1:0] phase_q, phase;

  // phase of the current sum: 0 at the row start, else the running count
  assign phase     = (in_col == '0) ? '0 : phase_q;
  assign out_valid = in_valid && (phase == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) phase_q <= '0;
    else if (in_valid) phase_q <= (phase == PH_W'(STRIDE - 1)) ? '0 : phase + 1'b1;
  end

endmodule
