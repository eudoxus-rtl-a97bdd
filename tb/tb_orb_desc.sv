// tb_orb_desc: slides random 31x31 windows over a sequence of centre
// positions in raster order and keeps a list of key points at the head of
// the unit's FIFO port. Checks that a descriptor comes out exactly for the
// points the window meets, that a point behind the window is dropped, that
// each of the 256 bits equals the BRIEF test with the pattern rebuilt here
// from the documented generator, and that the 11x11 centre patch is correct.
module tb_orb_desc;
  import eudoxus_pkg::*;
  localparam int P = 31, LKP = 11, R = P / 2 - 2, C = P / 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_desc = 0, n_drop = 0;

  logic in_valid = 0;
  pix_t win [P][P];
  logic signed [COORD_W:0] cx = 0, cy = 0;
  logic kp_valid;
  coord_t kp_x, kp_y;
  logic kp_pop, out_valid;
  feature_t out_feat;
  pix_t out_patch [LKP][LKP];

  orb_desc #(.PATCH(P), .LK_P(LKP)) dut (.clk, .rst_n, .in_valid, .win, .cx, .cy,
    .kp_valid, .kp_x, .kp_y, .kp_pop, .out_valid, .out_feat, .out_patch);

  int pat [256][4];
  int kq_x [$], kq_y [$];
  assign kp_valid = kq_x.size() != 0;
  assign kp_x = kp_valid ? coord_t'(kq_x[0]) : '0;
  assign kp_y = kp_valid ? coord_t'(kq_y[0]) : '0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned s;
    s = 1;
    for (int b = 0; b < 256; b++)
      for (int k = 0; k < 4; k++) begin
        s = (s * 1103515245 + 12345) % (longint'(1) << 31);
        pat[b][k] = int'((s >> 16) % (2 * R + 1)) - R;
      end
    // key points in raster order on a 40 x 20 grid of centres;
    // (5,3) is listed after (6,3) so it is passed and dropped
    kq_x = '{3, 17, 6, 5, 39, 0, 22};
    kq_y = '{1,  1, 3, 3,  7, 9, 19};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int y = 0; y < 20; y++)
      for (int x = 0; x < 40; x++) begin
        bit expect_hit, expect_drop;
        desc_t ed;
        @(negedge clk);
        for (int i = 0; i < P; i++) for (int j = 0; j < P; j++) win[i][j] = pix_t'($urandom);
        cx = (COORD_W+1)'(x); cy = (COORD_W+1)'(y); in_valid = 1;
        expect_hit  = kp_valid && kq_x[0] == x && kq_y[0] == y;
        expect_drop = kp_valid && (kq_y[0] < y || (kq_y[0] == y && kq_x[0] < x));
        for (int b = 0; b < 256; b++)
          ed[b] = win[C + pat[b][0]][C + pat[b][1]] < win[C + pat[b][2]][C + pat[b][3]];
        #1;
        checks++;
        if (kp_pop !== (expect_hit || expect_drop)) begin failures++; $display("pop mismatch at %0d,%0d", x, y); end
        @(posedge clk);
        #1;
        if (expect_hit || expect_drop) begin void'(kq_x.pop_front()); void'(kq_y.pop_front()); end
        in_valid = 0;
        checks++;
        if (out_valid !== expect_hit) begin failures++; $display("valid mismatch at %0d,%0d", x, y); end
        if (expect_drop) n_drop++;
        if (expect_hit) begin
          n_desc++;
          checks++;
          if (out_feat.desc !== ed || int'(out_feat.x) != x || int'(out_feat.y) != y) begin
            failures++; $display("descriptor mismatch at %0d,%0d", x, y);
          end
          for (int i = 0; i < LKP; i++) for (int j = 0; j < LKP; j++) begin
            checks++;
            if (out_patch[i][j] !== win[C - LKP/2 + i][C - LKP/2 + j]) failures++;
          end
        end
      end
    if (n_desc != 6 || n_drop != 1) begin failures++; $display("hits %0d drops %0d", n_desc, n_drop); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
