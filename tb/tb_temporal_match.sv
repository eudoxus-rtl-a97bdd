// tb_temporal_match: drives the temporal matching unit with three filtered
// left frames (each followed by a right frame that must be ignored). The
// left frames are a smooth synthetic texture moved by a known sub-pixel
// motion (u, v) = (+0.5, -0.3) pixels per frame. Key points of each frame
// are pushed with their 11x11 patches while the frame is current, as feature
// extraction does. Every flow result is compared bit-exactly with a
// software model of the same gradient sums and Cramer solution, and the
// number of results whose flow is within 0.2 pixel of the true motion is
// checked (single-iteration Lucas-Kanade is only approximate). Also checks
// that points of the current frame are never matched against the frame they
// came from, and that every point of frames 0 and 1 gives exactly one flow.
module tb_temporal_match;
  import eudoxus_pkg::*;
  localparam int W = 40, H = 28, LK_P = 11, WIN = 9, HALF = 4, P = 5;
  localparam real U = 0.5, V = -0.3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic f_valid = 0, f_sof = 0, f_side = 0, kp_valid = 0;
  pix_t f_pix;
  feature_t kp_feat;
  pix_t kp_patch [LK_P][LK_P];
  logic out_valid;
  flow_t out_flow;
  logic [15:0] kp_dropped;

  temporal_match #(.W(W), .MAX_KP(32), .LK_P(LK_P)) dut (
    .clk, .rst_n, .f_valid, .f_sof, .f_side, .f_pix, .kp_valid, .kp_feat, .kp_patch,
    .out_valid, .out_flow, .kp_dropped);

  pix_t img [3][H][W];
  flow_t exp_q [$];
  int n_out = 0, n_close = 0, n_exp = 0;

  function automatic pix_t tex(real x, real y);
    real v;
    v = 128.0 + 50.0 * $sin(0.35 * x) + 40.0 * $cos(0.3 * y) + 25.0 * $sin(0.21 * (x + 1.7 * y));
    return pix_t'(int'(v));
  endfunction

  // same integer arithmetic as the hardware
  function automatic flow_t model(int f, int x, int y);
    longint gxx, gxy, gyy, bx, by, det, nu, nv;
    flow_t r;
    gxx = 0; gxy = 0; gyy = 0; bx = 0; by = 0;
    for (int i = -HALF; i <= HALF; i++)
      for (int j = -HALF; j <= HALF; j++) begin
        longint ix, iy, it;
        ix = longint'(img[f][y+i][x+j+1]) - longint'(img[f][y+i][x+j-1]);
        iy = longint'(img[f][y+i+1][x+j]) - longint'(img[f][y+i-1][x+j]);
        it = longint'(img[f+1][y+i][x+j]) - longint'(img[f][y+i][x+j]);
        gxx += ix * ix; gxy += ix * iy; gyy += iy * iy; bx += ix * it; by += iy * it;
      end
    det = gxx * gyy - gxy * gxy;
    nu = -(gyy * bx - gxy * by) * 512;
    nv = -(gxx * by - gxy * bx) * 512;
    r.x = coord_t'(x); r.y = coord_t'(y); r.ok = det > 0;
    r.u = (det > 0) ? 16'(nu / det) : '0;
    r.v = (det > 0) ? 16'(nv / det) : '0;
    if (det > 0 && nu / det > 32767) r.u = 16'sh7fff;
    if (det > 0 && nu / det < -32768) r.u = 16'sh8000;
    if (det > 0 && nv / det > 32767) r.v = 16'sh7fff;
    if (det > 0 && nv / det < -32768) r.v = 16'sh8000;
    return r;
  endfunction

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    flow_t e;
    real du, dv;
    checks++;
    n_out++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected flow"); end
    else begin
      e = exp_q.pop_front();
      if (out_flow !== e) begin
        failures++;
        $display("flow %h, expected %h", out_flow, e);
      end
      du = real'(out_flow.u) / 256.0 - U; dv = real'(out_flow.v) / 256.0 - V;
      if (du < 0.2 && du > -0.2 && dv < 0.2 && dv > -0.2) n_close++;
    end
  end

  task automatic stream(int f, bit side);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        f_valid = 1; f_sof = (x == 0 && y == 0); f_side = side;
        f_pix = side ? pix_t'(255 - int'(img[f][y][x])) : img[f][y][x];
        @(negedge clk);
      end
    f_valid = 0; f_sof = 0;
    repeat (4) @(negedge clk);
  endtask

  initial begin
    for (int f = 0; f < 3; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          img[f][y][x] = tex(real'(x) - U * f, real'(y) - V * f);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int f = 0; f < 3; f++) begin
      stream(f, 1'b0);
      // key points of this left frame, in raster order, pushed with patches
      for (int y = 8; y < H - 8; y += 4)
        for (int x = 8; x < W - 8; x += 3) begin
          kp_valid = 1; kp_feat = '0; kp_feat.x = coord_t'(x); kp_feat.y = coord_t'(y);
          for (int i = 0; i < LK_P; i++)
            for (int j = 0; j < LK_P; j++) kp_patch[i][j] = img[f][y-P+i][x-P+j];
          if (f < 2) begin exp_q.push_back(model(f, x, y)); n_exp++; end
          @(negedge clk);
        end
      kp_valid = 0;
      stream(f, 1'b1);
    end
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d flows missing", exp_q.size()); end
    checks++;
    if (n_close * 10 < n_out * 8) begin failures++; $display("only %0d of %0d flows near the true motion", n_close, n_out); end
    checks++;
    if (kp_dropped != 0) begin failures++; $display("points dropped"); end
    $display("flows: %0d (expected %0d), near true motion: %0d", n_out, n_exp, n_close);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
