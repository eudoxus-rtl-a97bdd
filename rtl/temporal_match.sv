// temporal_match: temporal matching (TM), single-level Lucas-Kanade optical
// flow that tracks the left key points of frame t-1 into frame t.
//
// TM works only on the left image and starts as soon as image filtering
// produces the filtered left image; it is independent of stereo matching.
// Its two tasks follow the paper: derivative calculation (DC) and a linear
// least-squares solver (LSS, module lk_solver).
//   * Each left key point of a frame enters a FIFO together with its 11x11
//     patch of the filtered image and a frame tag. That FIFO is the on-chip
//     buffer of the previous frame's feature points.
//   * In the next frame the filtered left image streams through a stencil
//     buffer with a 9x9 window. When the window centre reaches the head
//     point of the previous frame, DC computes, over the 9x9 window,
//     Ix and Iy from the stored patch (central differences) and
//     It = current - previous, and accumulates gxx, gxy, gyy, bx, by in that
//     cycle. The point is popped; a point the window has passed is dropped.
//   * LSS solves the 2x2 system one cycle later.
// One Lucas-Kanade iteration on one pyramid level is done, so the flow is
// only accurate for motions of about a pixel; iterations and pyramids are not
// described in the paper and are left out. Flow leaves as flow_t (previous
// position and Q8.8 displacement), two cycles after the matching window.
module temporal_match
  import eudoxus_pkg::*;
#(
  parameter int unsigned W      = 1280,
  parameter int unsigned MAX_KP = 1024,
  parameter int unsigned LK_P   = 11
) (
  input  logic     clk,
  input  logic     rst_n,
  // filtered image stream (both sides; only the left one is used)
  input  logic     f_valid,
  input  logic     f_sof,
  input  logic     f_side,
  input  pix_t     f_pix,
  // new left key points with their patches
  input  logic     kp_valid,
  input  feature_t kp_feat,
  input  pix_t     kp_patch [LK_P][LK_P],
  // temporal correspondences
  output logic     out_valid,
  output flow_t    out_flow,
  output logic [15:0] kp_dropped
);
  localparam int unsigned WIN  = LK_P - 2;
  localparam int unsigned HALF = WIN / 2;
  localparam int unsigned ENT_W = 1 + 2 * COORD_W + LK_P * LK_P * PIX_W;
  typedef logic signed [COORD_W:0] scoord_t;

  // ---------------- previous-frame feature buffer ----------------
  logic cur_tag;       // tag of the left frame now streaming
  logic in_left;       // the current filtered frame is a left image
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin cur_tag <= 1'b0; in_left <= 1'b0; end
    else if (f_valid && f_sof) begin
      in_left <= !f_side;
      if (!f_side) cur_tag <= !cur_tag;
    end
  end

  logic [ENT_W-1:0] ent_in, ent_out;
  logic fifo_ready, head_valid, pop;
  always_comb begin
    ent_in = '0;
    ent_in[ENT_W-1] = cur_tag;
    ent_in[ENT_W-2 -: 2*COORD_W] = {kp_feat.y, kp_feat.x};
    for (int i = 0; i < LK_P; i++)
      for (int j = 0; j < LK_P; j++)
        ent_in[(i * LK_P + j) * PIX_W +: PIX_W] = kp_patch[i][j];
  end

  sync_fifo #(.WIDTH(ENT_W), .DEPTH(2 * MAX_KP)) u_prev (
    .clk, .rst_n, .in_valid(kp_valid), .in_ready(fifo_ready), .in_data(ent_in),
    .out_valid(head_valid), .out_ready(pop), .out_data(ent_out), .count());

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) kp_dropped <= '0;
    else if (kp_valid && !fifo_ready) kp_dropped <= kp_dropped + 1'b1;
  end

  logic   h_tag;
  coord_t h_x, h_y;
  pix_t   prev [LK_P][LK_P];
  always_comb begin
    h_tag = ent_out[ENT_W-1];
    {h_y, h_x} = ent_out[ENT_W-2 -: 2*COORD_W];
    for (int i = 0; i < LK_P; i++)
      for (int j = 0; j < LK_P; j++)
        prev[i][j] = ent_out[(i * LK_P + j) * PIX_W +: PIX_W];
  end

  // ---------------- current-frame stencil buffer ----------------
  logic   sv;
  coord_t srow, scol;
  pix_t   cwin [WIN][WIN];
  pix_t   cwin_b [1][1];
  stencil_buffer #(.W(W), .LINES(WIN), .A_COLS(WIN), .B_ROWS(1), .B_COLS(1)) u_sb (
    .clk, .rst_n, .in_valid(f_valid && (f_sof ? !f_side : in_left)), .in_sof(f_sof),
    .in_pix(f_pix), .out_valid(sv), .out_row(srow), .out_col(scol),
    .win_a(cwin), .win_b(cwin_b));

  scoord_t cx, cy;
  always_comb begin
    if (int'(scol) >= int'(HALF)) begin
      cy = scoord_t'(int'(srow) - int'(HALF) - 1); cx = scoord_t'(int'(scol) - int'(HALF));
    end else begin
      cy = scoord_t'(int'(srow) - int'(HALF) - 2); cx = scoord_t'(int'(scol) - int'(HALF) + int'(W));
    end
  end

  // ---------------- derivative calculation (DC) ----------------
  logic hit, passed;
  logic signed [31:0] gxx, gxy, gyy, bx, by;
  always_comb begin
    int ix, iy, it;
    logic head_prev;
    head_prev = head_valid && (h_tag != cur_tag);
    hit    = sv && head_prev && (cy == $signed({1'b0, h_y})) && (cx == $signed({1'b0, h_x}));
    passed = sv && head_prev && ((cy > $signed({1'b0, h_y})) ||
             ((cy == $signed({1'b0, h_y})) && (cx > $signed({1'b0, h_x}))));
    pop = hit || passed;
    gxx = '0; gxy = '0; gyy = '0; bx = '0; by = '0;
    ix = 0; iy = 0; it = 0;
    for (int i = 0; i < int'(WIN); i++)
      for (int j = 0; j < int'(WIN); j++) begin
        ix = int'(prev[i+1][j+2]) - int'(prev[i+1][j]);
        iy = int'(prev[i+2][j+1]) - int'(prev[i][j+1]);
        it = int'(cwin[i][j]) - int'(prev[i+1][j+1]);
        gxx += ix * ix; gxy += ix * iy; gyy += iy * iy;
        bx  += ix * it; by  += iy * it;
      end
  end

  logic dc_valid;
  logic signed [31:0] r_gxx, r_gxy, r_gyy, r_bx, r_by;
  coord_t d_x, d_y, l_x, l_y;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dc_valid <= 1'b0; r_gxx <= '0; r_gxy <= '0; r_gyy <= '0; r_bx <= '0; r_by <= '0;
      d_x <= '0; d_y <= '0; l_x <= '0; l_y <= '0;
    end else begin
      dc_valid <= hit;
      if (hit) begin
        r_gxx <= gxx; r_gxy <= gxy; r_gyy <= gyy; r_bx <= bx; r_by <= by;
        d_x <= h_x; d_y <= h_y;
      end
      if (dc_valid) begin l_x <= d_x; l_y <= d_y; end
    end
  end

  // ---------------- least-squares solver (LSS) ----------------
  logic s_valid, s_ok;
  logic signed [15:0] s_u, s_v;
  lk_solver u_lss (.clk, .rst_n, .in_valid(dc_valid), .gxx(r_gxx), .gxy(r_gxy), .gyy(r_gyy),
                   .bx(r_bx), .by(r_by), .out_valid(s_valid), .u(s_u), .v(s_v), .ok(s_ok));

  assign out_valid   = s_valid;
  assign out_flow.x  = l_x;
  assign out_flow.y  = l_y;
  assign out_flow.u  = s_u;
  assign out_flow.v  = s_v;
  assign out_flow.ok = s_ok;
endmodule
