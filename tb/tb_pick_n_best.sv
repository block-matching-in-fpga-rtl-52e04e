// tb_pick_n_best -- self-checking test of the N-best candidate list.
//
// 200 reference blocks of 1 to 30 random candidates each are streamed with
// random gaps, N = 4, a random threshold per block and a small distance
// range so that ties occur. The expected list is built here by a stable
// sort of the candidates at or under the threshold, cut at N; the output
// list, its fill count and the single-cycle best_valid pulse one cycle
// after the last candidate are checked. Blocks with more similar
// candidates than N, with fewer, and with rejected ones all occur.
module tb_pick_n_best;
  localparam int N = 4, DIST_W = 12, TAG_W = 8;

  logic clk = 0, rst_n = 0;
  logic c_valid = 0, c_first = 0, c_last = 0;
  logic [DIST_W-1:0] c_dist, threshold;
  logic [TAG_W-1:0] c_tag;
  logic best_valid;
  logic [N-1:0][DIST_W-1:0] best_dist;
  logic [N-1:0][TAG_W-1:0] best_tag;
  logic [$clog2(N+1)-1:0] best_count;

  pick_n_best #(.N(N), .DIST_W(DIST_W), .TAG_W(TAG_W)) dut (.*);

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
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_overflow = 0, n_reject = 0, n_underfull = 0, n_pulses = 0;
  always @(posedge clk) if (rst_n && best_valid) n_pulses++;

  initial begin
    int nc, ed[$], et[$], pos;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 200; b++) begin
      nc = 1 + $urandom_range(29);
      threshold = DIST_W'($urandom_range(40));
      ed.delete(); et.delete();
      for (int i = 0; i < nc; i++) begin
        @(negedge clk);
        while ($urandom_range(3) == 0) begin
          c_valid = 0; c_first = 0; c_last = 0;
          @(negedge clk);
        end
        c_valid = 1;
        c_first = (i == 0);
        c_last  = (i == nc - 1);
        c_dist  = DIST_W'($urandom_range(50));
        c_tag   = TAG_W'(i);
        if (c_dist <= threshold) begin
          // stable insertion: after every entry of equal or smaller distance
          pos = 0;
          while (pos < ed.size() && ed[pos] <= c_dist) pos++;
          ed.insert(pos, int'(c_dist));
          et.insert(pos, i);
        end else n_reject++;
      end
      @(negedge clk);
      c_valid = 0; c_first = 0; c_last = 0;
      check(best_valid == 1, "best_valid one cycle after last");
      if (ed.size() > N) n_overflow++;
      if (ed.size() < N) n_underfull++;
      check(best_count == ((ed.size() > N) ? N : ed.size()),
            $sformatf("block %0d count exp %0d got %0d", b, ed.size(), best_count));
      for (int k = 0; k < N && k < ed.size(); k++)
        check(best_dist[k] == ed[k] && best_tag[k] == et[k],
              $sformatf("block %0d entry %0d exp %0d/%0d got %0d/%0d", b, k, ed[k], et[k],
                        best_dist[k], best_tag[k]));
      @(negedge clk);
      check(best_valid == 0, "best_valid is a single pulse");
    end
    check(n_pulses == 200, $sformatf("pulses %0d", n_pulses));
    check(n_overflow > 0 && n_reject > 0 && n_underfull > 0, "list overflow, rejection and partly filled list all seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
