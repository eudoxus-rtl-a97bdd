// tb_fast_detect: drives 7x7 windows into the FAST detector and compares the
// corner flag with a reference segment test written independently here (it
// scans the doubled circle for the longest run of brighter or darker
// pixels). Directed windows: an arc of exactly 9 and of exactly 8 brighter
// pixels, a 9-arc of darker pixels, an arc that wraps around the circle start,
// and centres just inside and just outside the border; then random windows
// biased toward corners.
module tb_fast_detect;
  import eudoxus_pkg::*;
  localparam int W = 64, H = 48, T = 20, B = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_corner = 0;

  logic in_valid = 0;
  pix_t win [7][7];
  logic signed [COORD_W:0] cx = 0, cy = 0;
  logic out_valid, corner;
  coord_t x, y;

  fast_detect #(.W(W), .H(H), .THRESH(T), .BORDER(B)) dut (
    .clk, .rst_n, .in_valid, .win, .cx, .cy, .out_valid, .corner, .x, .y);

  // circle in clockwise order starting at the top
  int cr [16] = '{-3,-3,-2,-1, 0, 1, 2, 3, 3, 3, 2, 1, 0,-1,-2,-3};
  int cc [16] = '{ 0, 1, 2, 3, 3, 3, 2, 1, 0,-1,-2,-3,-3,-3,-2,-1};

  function automatic bit ref_corner(int px, int py);
    int runb, rund, best;
    int p;
    if (px < B || px >= W - B || py < B || py >= H - B) return 0;
    p = int'(win[3][3]);
    runb = 0; rund = 0; best = 0;
    for (int k = 0; k < 32; k++) begin
      int v;
      v = int'(win[3 + cr[k % 16]][3 + cc[k % 16]]);
      runb = (v > p + T) ? runb + 1 : 0;
      rund = (v < p - T) ? rund + 1 : 0;
      if (runb > best) best = runb;
      if (rund > best) best = rund;
    end
    return best >= 9;
  endfunction

  task automatic apply(int px, int py);
    bit e;
    @(negedge clk);
    cx = (COORD_W+1)'(px); cy = (COORD_W+1)'(py); in_valid = 1;
    e = ref_corner(px, py);
    @(posedge clk); #1;
    in_valid = 0;
    checks++;
    if (!out_valid || corner !== e || (e && (int'(x) != px || int'(y) != py))) begin
      failures++;
      $display("mismatch at (%0d,%0d): got %0d expected %0d", px, py, corner, e);
    end
    if (e) n_corner++;
  endtask

  task automatic flat(pix_t v);
    for (int i = 0; i < 7; i++) for (int j = 0; j < 7; j++) win[i][j] = v;
  endtask

  task automatic arc(int start, int len, pix_t v);
    for (int k = 0; k < len; k++) win[3 + cr[(start + k) % 16]][3 + cc[(start + k) % 16]] = v;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    flat(100);
    repeat (2) @(posedge clk);
    rst_n = 1;
    flat(100); arc(0, 9, 150);  apply(20, 20);     // corner
    flat(100); arc(3, 8, 150);  apply(20, 20);     // 8 only: no corner
    flat(100); arc(5, 9, 40);   apply(30, 25);     // dark corner
    flat(100); arc(12, 9, 200); apply(30, 25);     // wraps around start
    flat(100); arc(0, 9, 121);  apply(20, 20);     // 21 above: corner
    flat(100); arc(0, 9, 120);  apply(20, 20);     // exactly threshold: none
    flat(100); arc(0, 9, 150);  apply(15, 20);     // left of border
    flat(100); arc(0, 9, 150);  apply(16, 31);     // last rows/cols inside
    flat(100); arc(0, 9, 150);  apply(47, 31);
    flat(100); arc(0, 9, 150);  apply(48, 31);     // right of border
    flat(100); arc(0, 9, 150);  apply(20, 32);     // below border
    for (int t = 0; t < 3000; t++) begin
      flat(pix_t'($urandom_range(60, 190)));
      for (int i = 0; i < 7; i++) for (int j = 0; j < 7; j++)
        if ($urandom_range(0, 3) == 0) win[i][j] = pix_t'($urandom);
      arc($urandom_range(0, 15), $urandom_range(6, 12), pix_t'($urandom));
      apply($urandom_range(10, 54), $urandom_range(10, 38));
    end
    if (n_corner < 10) begin failures++; $display("too few corners exercised"); end
    $display("corners seen: %0d", n_corner);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
