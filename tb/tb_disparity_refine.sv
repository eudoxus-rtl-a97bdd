// tb_disparity_refine: streams two stereo image pairs through the disparity
// refinement unit (W=40, H=20, DMAX=8). The right image is the left one
// shifted by a known disparity, so every refined disparity must land on it
// when it lies within +-RADIUS of the initial guess (initial guesses are
// off by up to 3, so some searches miss it); SAD values and winners
// are also checked against a brute-force model that reads the same raster
// stream (including zero padding and raster wrap) here. The initial matches
// come from a show-ahead queue; one match is placed out of raster order and
// must be dropped without output. Checks the start_ok gate (no pixel is
// accepted while it is low), one result per in-order match, and the
// frame_done pulse per pair.
module tb_disparity_refine;
  import eudoxus_pkg::*;
  localparam int W = 40, H = 20, BLK = 7, DMAX = 8, RAD = 2, HALF = BLK / 2, DT = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start_ok = 0, in_valid = 0, in_ready, in_sof = 0;
  pix_t in_lpix, in_rpix;
  logic mt_valid, mt_pop, out_valid, frame_done;
  stereo_t mt_data, out_data;

  disparity_refine #(.W(W), .H(H), .BLK(BLK), .DMAX(DMAX), .RADIUS(RAD)) dut (
    .clk, .rst_n, .start_ok, .in_valid, .in_ready, .in_sof, .in_lpix, .in_rpix,
    .mt_valid, .mt_data, .mt_pop, .out_valid, .out_data, .frame_done);

  pix_t L [H][W + DT];
  stereo_t mq [$];
  stereo_t exp_q [$];
  int n_frames = 0;

  function automatic int lp(int y, int x);   // raster stream pixel with wrap
    int n;
    n = y * W + x;
    if (n < 0 || n >= H * W) return 0;
    return int'(L[n / W][n % W]);
  endfunction
  function automatic int rp(int y, int x);
    int n;
    n = y * W + x;
    if (n < 0 || n >= H * W) return 0;
    return int'(L[n / W][n % W + DT]);
  endfunction

  task automatic add_match(int x, int y, int d0, bit expect_out);
    stereo_t m, e;
    int best, bd;
    m.x = coord_t'(x); m.y = coord_t'(y); m.disp = 8'(d0); m.cost = 16'd7;
    mq.push_back(m);
    if (!expect_out) return;
    best = 65535; bd = d0;
    for (int d = d0 - RAD; d <= d0 + RAD; d++) begin
      int s;
      if (d < 0 || d > DMAX || x - d - HALF < 0) continue;
      s = 0;
      for (int i = -HALF; i <= HALF; i++)
        for (int j = -HALF; j <= HALF; j++) begin
          int a, b;
          a = lp(y + i, x + j); b = rp(y + i, x + j - d);
          s += (a > b) ? a - b : b - a;
        end
      if (s < best) begin best = s; bd = d; end
    end
    e = m; e.disp = 8'(bd); e.cost = 16'(best);
    exp_q.push_back(e);
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // show-ahead match queue
  always_comb begin
    mt_valid = (mq.size() != 0);
    mt_data  = mt_valid ? mq[0] : '0;
  end
  always @(posedge clk) if (rst_n) begin
    logic p;
    p = mt_pop && mt_valid;
    if (out_valid) begin
      stereo_t e;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = exp_q.pop_front();
        if (out_data !== e) begin
          failures++;
          $display("out (%0d,%0d) d=%0d sad=%0d, expected d=%0d sad=%0d", out_data.x, out_data.y,
                   out_data.disp, out_data.cost, e.disp, e.cost);
        end
      end
    end
    if (frame_done) n_frames++;
    #1 if (p) void'(mq.pop_front());
  end

  initial begin
    int n_true;
    n_true = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      for (int y = 0; y < H; y++) for (int x = 0; x < W + DT; x++)
        L[y][x] = pix_t'((x * 37 + y * 11 + ((x * y) % 7) * 19 + $urandom_range(0, 40)) & 8'hff);
      // matches in raster order; initial disparity off by up to +-2
      for (int y = HALF; y < H - HALF; y += 3)
        for (int x = HALF + DMAX; x < W - HALF; x += 5) begin
          add_match(x, y, DT + ((x + y + f) % 7) - 3, 1'b1);
          n_true++;
          if (f == 1 && y == HALF + 6 && x == HALF + DMAX) add_match(HALF + DMAX, HALF, DT, 1'b0);
        end
      // start_ok low: nothing may be accepted
      @(negedge clk);
      in_valid = 1; in_sof = 1; start_ok = 0;
      repeat (5) begin
        @(negedge clk);
        checks++;
        if (in_ready) begin failures++; $display("pixel accepted without start_ok"); end
      end
      start_ok = 1;
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          in_valid = 1; in_sof = (x == 0 && y == 0);
          in_lpix = L[y][x]; in_rpix = L[y][x + DT];
          @(posedge clk);
          checks++;
          if (!in_ready) begin failures++; $display("pixel not accepted"); end
          @(negedge clk);
          start_ok = 0;
        end
      in_valid = 0; in_sof = 0;
      while (n_frames < f + 1) @(posedge clk);
      checks++;
      if (mq.size() != 0) begin failures++; $display("%0d matches left in queue", mq.size()); end
    end
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d outputs missing", exp_q.size()); end
    $display("in-order matches refined: %0d", n_true);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
