// orb_desc: feature descriptor calculation (FC), a binary ORB/BRIEF
// descriptor of DESC_W intensity comparisons in a PATCH x PATCH window of the
// filtered image.
//
// The window slides over the filtered image in raster order (it comes from a
// stencil buffer). Key points found by feature detection wait in a FIFO in
// raster order, and this unit takes them one after another, as the paper
// describes: when the window centre reaches the key point at the head of the
// FIFO, all DESC_W tests are evaluated in that cycle and the point is popped.
// A head that the window has already passed is dropped.
//
// Bit b of the descriptor is 1 when the pixel at pair offset P1[b] is darker
// than the pixel at P2[b] (the BRIEF test). ORB's learned test pattern and
// its orientation steering are not in the paper; here the pattern is drawn
// from a fixed linear congruential generator (state s <- s*1103515245+12345
// mod 2^31, offset = ((s >> 16) mod (2*R+1)) - R with R = PATCH/2 - 2, order
// row1, col1, row2, col2) and the patch is not rotated.
//
// The unit also returns the LK_P x LK_P centre patch of the point, which the
// temporal matching unit keeps for the next frame. Outputs are registered,
// one cycle after the matching window.
module orb_desc
  import eudoxus_pkg::*;
#(
  parameter int unsigned PATCH = 31,
  parameter int unsigned LK_P  = 11
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  pix_t   win [PATCH][PATCH],
  input  logic signed [COORD_W:0] cx,
  input  logic signed [COORD_W:0] cy,
  // key point list (FIFO head)
  input  logic   kp_valid,
  input  coord_t kp_x,
  input  coord_t kp_y,
  output logic   kp_pop,
  // descriptor output
  output logic     out_valid,
  output feature_t out_feat,
  output pix_t     out_patch [LK_P][LK_P]
);
  localparam int C = PATCH / 2;
  localparam int R = PATCH / 2 - 2;

  // pattern offsets, 6-bit two's complement, element (b,k) at bits 6*(4b+k)
  typedef logic [DESC_W*4*6-1:0] pat_t;
  function automatic pat_t gen_pattern();
    pat_t p;
    longint unsigned s;
    int off;
    p = '0;
    s = 64'd1;
    for (int i = 0; i < DESC_W * 4; i++) begin
      s = (s * 64'd1103515245 + 64'd12345) & 64'h7fff_ffff;
      off = int'((s >> 16) % longint'(2 * R + 1)) - R;
      p[6*i +: 6] = 6'(off);
    end
    return p;
  endfunction
  localparam pat_t PAT = gen_pattern();

  function automatic int pat(int b, int k);
    return int'($signed(PAT[6*(4*b+k) +: 6]));
  endfunction

  desc_t d;
  logic  hit, passed;

  always_comb begin
    for (int b = 0; b < DESC_W; b++)
      d[b] = win[C + pat(b,0)][C + pat(b,1)] < win[C + pat(b,2)][C + pat(b,3)];
    hit    = in_valid && kp_valid && (cy == $signed({1'b0, kp_y})) && (cx == $signed({1'b0, kp_x}));
    passed = in_valid && kp_valid && ((cy > $signed({1'b0, kp_y})) ||
             ((cy == $signed({1'b0, kp_y})) && (cx > $signed({1'b0, kp_x}))));
    kp_pop = hit || passed;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_feat  <= '0;
    end else begin
      out_valid <= hit;
      if (hit) begin
        out_feat.x    <= kp_x;
        out_feat.y    <= kp_y;
        out_feat.desc <= d;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (hit)
      for (int i = 0; i < LK_P; i++)
        for (int j = 0; j < LK_P; j++)
          out_patch[i][j] <= win[C - LK_P/2 + i][C - LK_P/2 + j];
  end
endmodule
