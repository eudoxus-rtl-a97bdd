// tb_hamming_match: loads two frames of left/right feature lists back to
// back into the matching-optimization unit and compares its initial stereo
// matches with a brute-force search done here (row tolerance, disparity range,
// smallest Hamming distance, first of equal distances, threshold). Right
// features include near-copies of left descriptors at valid disparities and
// decoys just outside the row and disparity limits. Checks the double
// buffering (the second frame is loaded while the first is searched, and
// bank_free drops when both banks are full), output back-pressure, and the
// search time of at most left x (right + 3) cycles per frame.
module tb_hamming_match;
  import eudoxus_pkg::*;
  localparam int DMAX = 64, TOL = 2, TH = 100, NL = 24, NR = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic feat_valid = 0, feat_side = 0, fe_frame_done = 0, fe_frame_side = 0, bank_free;
  feature_t feat;
  logic m_valid, m_ready = 1, list_done;
  stereo_t m_data;

  hamming_match #(.MAX_FEAT(64), .DMAX(DMAX), .ROW_TOL(TOL), .HAM_TH(TH)) dut (
    .clk, .rst_n, .feat_valid, .feat_side, .feat, .fe_frame_done, .fe_frame_side, .bank_free,
    .m_valid, .m_ready, .m_data, .list_done);

  feature_t lf [2][NL];
  feature_t rf [2][NR];
  stereo_t  exp_q [$];
  int n_done = 0, n_out = 0, saw_not_free = 0;
  int t_start [2], t_end [2];

  function automatic desc_t rnd_desc();
    desc_t d;
    for (int w = 0; w < 8; w++) d[32 * w +: 32] = $urandom;
    return d;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random back-pressure on the output
  always @(negedge clk) m_ready = ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n) begin
    if (m_valid && m_ready) begin
      stereo_t e;
      checks++;
      n_out++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected match"); end
      else begin
        e = exp_q.pop_front();
        if (m_data !== e) begin
          failures++;
          $display("match (%0d,%0d) d=%0d c=%0d, expected (%0d,%0d) d=%0d c=%0d",
                   m_data.x, m_data.y, m_data.disp, m_data.cost, e.x, e.y, e.disp, e.cost);
        end
      end
    end
    if (list_done) begin if (n_done < 2) t_end[n_done] = $time / 10; n_done++; end
    if (!bank_free) saw_not_free++;
  end

  initial begin
    // build two frames and their expected matches
    for (int f = 0; f < 2; f++) begin
      for (int i = 0; i < NL; i++) begin
        lf[f][i].x = coord_t'(70 + 9 * i); lf[f][i].y = coord_t'(10 + 3 * i);
        lf[f][i].desc = rnd_desc();
      end
      for (int j = 0; j < NR; j++) begin
        int i, kind;
        i = j % NL; kind = j / NL + (j % 3);
        rf[f][j].desc = lf[f][i].desc;
        for (int b = 0; b < 8 * (j % 5) + 3; b++) rf[f][j].desc[$urandom_range(0, 255)] ^= 1'b1;
        rf[f][j].y = coord_t'(int'(lf[f][i].y) + (kind == 2 ? 3 : (j % 5) - 2));
        rf[f][j].x = coord_t'(int'(lf[f][i].x) - (kind == 1 ? 65 : int'($urandom_range(0, 64))));
        if (j % 7 == 0) rf[f][j].desc = rnd_desc();
      end
      for (int i = 0; i < NL; i++) begin
        int best, bx;
        best = 1000; bx = 0;
        for (int j = 0; j < NR; j++) begin
          int dy, dx, h;
          dy = int'(rf[f][j].y) - int'(lf[f][i].y);
          dx = int'(lf[f][i].x) - int'(rf[f][j].x);
          h = $countones(lf[f][i].desc ^ rf[f][j].desc);
          if (dy >= -TOL && dy <= TOL && dx >= 0 && dx <= DMAX && h < best) begin best = h; bx = int'(rf[f][j].x); end
        end
        if (best <= TH) begin
          stereo_t e;
          e.x = lf[f][i].x; e.y = lf[f][i].y; e.disp = 8'(int'(lf[f][i].x) - bx); e.cost = 16'(best);
          exp_q.push_back(e);
        end
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      int ff;
      ff = f % 2;
      // wait for a free bank, as feature extraction does
      while (!bank_free) @(negedge clk);
      @(negedge clk);
      for (int s = 0; s < 2; s++) begin
        for (int k = 0; k < (s == 0 ? NL : NR); k++) begin
          feat_valid = 1; feat_side = 1'(s); feat = (s == 0) ? lf[ff][k] : rf[ff][k];
          @(negedge clk);
        end
        feat_valid = 0;
        fe_frame_done = 1; fe_frame_side = 1'(s);
        @(negedge clk);
        fe_frame_done = 0;
        if (f < 2) t_start[f] = $time / 10;
        repeat (3) @(negedge clk);
      end
      if (f == 2) begin
        // third frame repeats the first one
        for (int i = 0; i < NL; i++) begin
          int best, bx;
          best = 1000; bx = 0;
          for (int j = 0; j < NR; j++) begin
            int dy, dx, h;
            dy = int'(rf[0][j].y) - int'(lf[0][i].y);
            dx = int'(lf[0][i].x) - int'(rf[0][j].x);
            h = $countones(lf[0][i].desc ^ rf[0][j].desc);
            if (dy >= -TOL && dy <= TOL && dx >= 0 && dx <= DMAX && h < best) begin best = h; bx = int'(rf[0][j].x); end
          end
          if (best <= TH) begin
            stereo_t e;
            e.x = lf[0][i].x; e.y = lf[0][i].y; e.disp = 8'(int'(lf[0][i].x) - bx); e.cost = 16'(best);
            exp_q.push_back(e);
          end
        end
      end
    end
    while (n_done < 3) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d matches missing", exp_q.size()); end
    checks++;
    if (saw_not_free == 0) begin failures++; $display("both banks were never full at once"); end
    checks++;
    if (t_end[0] - t_start[0] > NL * (NR + 3) * 2 + 8) begin failures++; $display("search too slow"); end
    $display("matches: %0d, cycles with no free bank: %0d, search %0d..%0d", n_out, saw_not_free, t_start[0], t_end[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
