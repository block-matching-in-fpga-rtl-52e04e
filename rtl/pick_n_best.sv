// pick_n_best -- keeps the N closest candidate blocks of one reference block.
//
// Candidates of one reference block arrive as a stream of (distance, tag)
// pairs, the first marked c_first and the last c_last. A candidate is
// similar only if its distance is at most the threshold (the BM3D rule
// d(P,Q) <= tau, applied here to the un-normalised block sum, so the
// threshold is tau * BLK^2). Similar candidates are inserted into a list
// kept sorted by distance, ascending, and cut at N entries: every entry
// compares itself with the newcomer in parallel and either keeps its
// value, takes the newcomer, or takes its upper neighbour's value. Equal
// distances keep arrival order. One candidate is accepted per cycle.
//
// Interface: c_valid/c_first/c_last/c_dist/c_tag in, threshold static
// during a reference block. One cycle after c_last, best_valid pulses for
// one cycle with best_dist/best_tag (entry 0 is the closest) and
// best_count, the number of entries that are filled (at most N).
//
// From the paper: keeping the N best candidates whose distance is under
// the threshold. The paper recommends but does not detail this stage; the
// parallel insertion list and N = 16 (the usual BM3D hard-thresholding
// group size) are this design's choices.
module pick_n_best #(
  parameter int unsigned N      = bm_pkg::DEF_NBEST,
  parameter int unsigned DIST_W = bm_pkg::DEF_SUM_W,
  parameter int unsigned TAG_W  = 16,
  localparam int unsigned CNT_W = $clog2(N + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        c_valid,
  input  logic                        c_first,
  input  logic                        c_last,
  input  logic [DIST_W-1:0]           c_dist,
  input  logic [TAG_W-1:0]            c_tag,
  input  logic [DIST_W-1:0]           threshold,
  output logic                        best_valid,
  output logic [N-1:0][DIST_W-1:0]    best_dist,
  output logic [N-1:0][TAG_W-1:0]     best_tag,
  output logic [CNT_W-1:0]            best_count
);

  typedef struct packed {
    logic              used;
    logic [DIST_W-1:0] distance;
    logic [TAG_W-1:0]  tag;
  } entry_t;

  entry_t list_q [N];
  entry_t base   [N];
  entry_t list_d [N];
  entry_t cand;
  logic   accept;

  assign cand   = '{used: 1'b1, distance: c_dist, tag: c_tag};
  assign accept = c_valid && (c_dist <= threshold);

  // the newcomer goes in front of the first entry that is empty or farther
  function automatic logic beats(entry_t e, logic [DIST_W-1:0] d);
    return !e.used || (d < e.distance);
  endfunction

  always_comb begin
    for (int i = 0; i < N; i++) base[i] = c_first ? '0 : list_q[i];
    for (int i = 0; i < N; i++) begin
      if (!accept || !beats(base[i], c_dist))             list_d[i] = base[i];
      else if (i == 0 || !beats(base[i-1], c_dist))        list_d[i] = cand;
      else                                                list_d[i] = base[i-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) list_q[i] <= '0;
      best_valid <= 1'b0;
    end else begin
      if (c_valid) begin
        for (int i = 0; i < N; i++) list_q[i] <= list_d[i];
      end
      best_valid <= c_valid && c_last;
    end
  end

  // handshake rules: the block markers only come with a candidate
  a_first_valid: assert property (@(posedge clk) disable iff (!rst_n) c_first |-> c_valid)
    else $error("c_first without c_valid");
  a_last_valid: assert property (@(posedge clk) disable iff (!rst_n) c_last |-> c_valid)
    else $error("c_last without c_valid");

  always_comb begin
    best_count = '0;
    for (int i = 0; i < N; i++) begin
      best_dist[i] = list_q[i].distance;
      best_tag[i]  = list_q[i].tag;
      if (list_q[i].used) best_count = best_count + 1'b1;
    end
  end

endmodule
