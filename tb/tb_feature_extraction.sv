// tb_feature_extraction: streams a left and a right synthetic 64x48 image
// through the time-shared feature extraction block and compares the key
// points, their descriptors and their 11x11 patches with a reference
// computed here from the images: FAST-9 on the raw image (border 16), the
// 1-4-6-4-1 Gaussian, and the BRIEF tests with the documented pattern
// generator. Also checks the stream rate (one pixel per cycle, then the
// padding lines) and that the filtered image leaves on the f_* port.
module tb_feature_extraction;
  import eudoxus_pkg::*;
  localparam int W = 64, H = 48, T = 20, BORD = 16, P = 31, C = 15, R = P / 2 - 2, LKP = 11;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_sof = 0, in_side = 0, in_ready, start_ok = 1;
  pix_t in_pix = 0;
  logic feat_valid, feat_side, frame_done, frame_side, busy, f_valid, f_sof;
  feature_t feat;
  pix_t feat_patch [LKP][LKP];
  pix_t f_pix;
  logic [15:0] kp_dropped;

  feature_extraction #(.W(W), .H(H), .MAX_KP(256), .FAST_T(T), .LK_P(LKP)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_sof, .in_side, .in_pix, .start_ok,
    .feat_valid, .feat_side, .feat, .feat_patch, .frame_done, .frame_side, .busy,
    .kp_dropped, .f_valid, .f_sof, .f_pix);

  int img [2][H][W];
  int flt [2][H][W];
  int pat [256][4];
  int cr [16] = '{-3,-3,-2,-1, 0, 1, 2, 3, 3, 3, 2, 1, 0,-1,-2,-3};
  int cc [16] = '{ 0, 1, 2, 3, 3, 3, 2, 1, 0,-1,-2,-3,-3,-3,-2,-1};
  int exp_x [2][$], exp_y [2][$];
  int got [2];
  int n_filtered [2];

  function automatic bit fast_ref(int s, int y, int x);
    int runb, rund, best, p;
    if (x < BORD || x >= W - BORD || y < BORD || y >= H - BORD) return 0;
    p = img[s][y][x]; runb = 0; rund = 0; best = 0;
    for (int k = 0; k < 32; k++) begin
      int v;
      v = img[s][y + cr[k % 16]][x + cc[k % 16]];
      runb = (v > p + T) ? runb + 1 : 0;
      rund = (v < p - T) ? rund + 1 : 0;
      if (runb > best) best = runb;
      if (rund > best) best = rund;
    end
    return best >= 9;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // build images and references
  initial begin
    longint unsigned sd;
    int kk [5] = '{1, 4, 6, 4, 1};
    sd = 1;
    for (int b = 0; b < 256; b++)
      for (int k = 0; k < 4; k++) begin
        sd = (sd * 1103515245 + 12345) % (longint'(1) << 31);
        pat[b][k] = int'((sd >> 16) % (2 * R + 1)) - R;
      end
    for (int s = 0; s < 2; s++) begin
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
        img[s][y][x] = 40 + int'($urandom_range(0, 6));
      // bright boxes: their corners are FAST corners
      for (int b = 0; b < 3; b++) begin
        int x0, y0;
        x0 = 14 + 10 * b + 2 * s; y0 = 14 + 4 * b;
        for (int y = y0; y < y0 + 8; y++) for (int x = x0; x < x0 + 6; x++) img[s][y][x] = 180 + 10 * b;
      end
      for (int y = 2; y < H - 2; y++) for (int x = 2; x < W - 2; x++) begin
        int acc;
        acc = 128;
        for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) acc += kk[i] * kk[j] * img[s][y - 2 + i][x - 2 + j];
        flt[s][y][x] = acc / 256;
      end
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
        if (fast_ref(s, y, x)) begin exp_x[s].push_back(x); exp_y[s].push_back(y); end
    end
  end

  // check the feature stream
  always @(posedge clk) if (rst_n && feat_valid) begin
    int s, x, y, k;
    desc_t ed;
    s = int'(feat_side); x = int'(feat.x); y = int'(feat.y); k = got[s];
    got[s]++;
    checks++;
    if (k >= exp_x[s].size() || exp_x[s][k] != x || exp_y[s][k] != y) begin
      failures++; $display("side %0d feature %0d at (%0d,%0d) not expected", s, k, x, y);
    end else begin
      for (int b = 0; b < 256; b++)
        ed[b] = flt[s][y + pat[b][0]][x + pat[b][1]] < flt[s][y + pat[b][2]][x + pat[b][3]];
      checks++;
      if (feat.desc !== ed) begin failures++; $display("descriptor mismatch side %0d (%0d,%0d)", s, x, y); end
      for (int i = 0; i < LKP; i++) for (int j = 0; j < LKP; j++) begin
        checks++;
        if (int'(feat_patch[i][j]) != flt[s][y - 5 + i][x - 5 + j]) failures++;
      end
    end
  end

  // filtered stream: spot-check interior pixels in raster order
  int fidx;
  always @(posedge clk) if (rst_n && f_valid) begin
    int y, x;
    if (f_sof) fidx = 0;
    y = fidx / W; x = fidx % W;
    if (y >= 2 && y < H - 2 && x >= 2 && x < W - 2) begin
      checks++;
      n_filtered[in_side]++;
      if (int'(f_pix) != flt[in_side][y][x]) begin
        failures++; if (failures < 5) $display("filtered pixel (%0d,%0d) %0d vs %0d", x, y, f_pix, flt[in_side][y][x]);
      end
    end
    fidx++;
  end

  initial begin
    int t0, t1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 2; s++) begin
      @(negedge clk);
      while (!in_ready) @(negedge clk);   // the unit accepts a new image
      t0 = 0;
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        in_valid = 1; in_sof = (x == 0 && y == 0); in_side = 1'(s); in_pix = pix_t'(img[s][y][x]);
        @(posedge clk); #1;
        checks++;
        if (!in_ready && !(x == 0 && y == 0) && !(x == W - 1 && y == H - 1)) begin failures++; $display("stream stalled inside a frame"); end
        t0++;
        @(negedge clk);
      end
      in_valid = 0; in_sof = 0;
      t1 = 0;
      while (!frame_done) begin @(posedge clk); #1; t1++; end
      checks++;
      if (frame_side !== 1'(s) || t1 > 22 * W + 8) begin
        failures++; $display("frame_done late: %0d cycles after the last pixel", t1);
      end
    end
    repeat (5) @(posedge clk);
    for (int s = 0; s < 2; s++) begin
      checks++;
      if (got[s] != exp_x[s].size() || got[s] == 0) begin
        failures++; $display("side %0d: %0d features, expected %0d", s, got[s], exp_x[s].size());
      end
    end
    checks++;
    if (kp_dropped != 0) failures++;
    $display("features: left %0d right %0d", got[0], got[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
