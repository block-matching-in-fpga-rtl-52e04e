// tb_offset_sequencer -- self-checking test of the frame/offset sequencer.
//
// A 10 x 6 frame is streamed nine times (one image: WIN = 8, NWORK = 4,
// so 4 window rows x 2 column groups plus half the centre row) plus one
// more pass, with random gaps
// between pixels. For every accepted pixel the reported row, column, pass,
// buffer delay and row-jump flag are compared with values computed here
// from the pass number alone; frame_done and all_done must pulse exactly
// once after the last pixel of a frame / of the last pass.
module tb_offset_sequencer;
  localparam int W = 10, H = 6, WIN = 8, NW = 4;
  localparam int NPASS = (WIN / 2) * (WIN / NW) + WIN / (2 * NW);

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [$clog2(H)-1:0] in_row;
  logic [$clog2(W)-1:0] in_col;
  logic [$clog2(NPASS)-1:0] pass;
  logic [$clog2((WIN/2)*W + WIN/2 + 1)-1:0] dmin;
  logic row_jump, frame_done, all_done;

  int checks = 0, failures = 0;

  offset_sequencer #(.IMG_W(W), .IMG_H(H), .WIN(WIN), .NWORK(NW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_frame_done = 0, n_all_done = 0;
  always @(posedge clk) begin
    if (rst_n && frame_done) n_frame_done++;
    if (rst_n && all_done)   n_all_done++;
  end

  initial begin
    int p, dy, dx0, exp_d;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NPASS + 1; f++) begin
      p   = f % NPASS;
      dy  = WIN / 2 - p / (WIN / NW);
      dx0 = WIN / 2 - (p % (WIN / NW)) * NW;
      exp_d = dy * W + dx0 - (NW - 1);
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          while ($urandom_range(3) == 0) begin
            in_valid = 0;
            @(posedge clk); #1;
          end
          in_valid = 1;
          #0;
          check(in_row == r && in_col == c, $sformatf("position %0d,%0d got %0d,%0d", r, c, in_row, in_col));
          check(pass == p, $sformatf("pass %0d got %0d", p, pass));
          check(dmin == exp_d, $sformatf("dmin pass %0d exp %0d got %0d", p, exp_d, dmin));
          check(row_jump == ((p % (WIN / NW)) == (WIN / NW - 1) || p == NPASS - 1), "row_jump");
          @(posedge clk); #1;
          in_valid = 0;
          check(frame_done == (r == H - 1 && c == W - 1), "frame_done timing");
          check(all_done == (r == H - 1 && c == W - 1 && p == NPASS - 1), "all_done timing");
        end
    end
    repeat (3) @(posedge clk);
    check(n_frame_done == NPASS + 1, $sformatf("frame_done count %0d", n_frame_done));
    check(n_all_done == 1, $sformatf("all_done count %0d", n_all_done));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
