// disparity_refine: disparity refinement (DR), the second task of stereo
// matching. It refines each initial correspondence from matching
// optimization by block matching (sum of absolute differences, SAD) on the
// raw left and right images.
//
// DR needs the same pixels that FD and IF read, but millions of cycles
// later. Instead of keeping them on chip that long, the design reads both
// images a second time from DRAM into DR's own stencil buffers (the paper's
// pixel-replication optimisation: two small SBs instead of one huge one).
// The left and right images stream in lockstep, one pixel pair per cycle.
// The left SB gives a BLK x BLK window; the right SB gives a BLK x (BLK+DMAX)
// window whose columns cover every disparity in [0, DMAX] for the left
// window's centre. Initial matches wait in a FIFO in raster order; when the
// left window centre reaches the head match (x, y, d0), the SAD of the
// 2*RADIUS+1 candidate disparities d0-RADIUS .. d0+RADIUS (limited to
// [0, DMAX] and to the image) is computed in that cycle and the smallest one
// wins; ties keep the smaller disparity. A head the window has passed is
// dropped. After H*W pixel pairs the unit pushes PAD_LINES zero lines itself
// to flush the last centres, then pulses frame_done.
//
// A new image pair is accepted only while start_ok is high (the frame's match
// list is complete) and after the previous frame_done has been given.
// Outputs are registered, one cycle after the window.
// BLK, RADIUS and DMAX are this design's choices; the paper gives none.
module disparity_refine
  import eudoxus_pkg::*;
#(
  parameter int unsigned W      = 1280,
  parameter int unsigned H      = 720,
  parameter int unsigned BLK    = 7,
  parameter int unsigned DMAX   = 64,
  parameter int unsigned RADIUS = 2
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start_ok,
  input  logic    in_valid,
  output logic    in_ready,
  input  logic    in_sof,
  input  pix_t    in_lpix,
  input  pix_t    in_rpix,
  // initial matches (FIFO head)
  input  logic    mt_valid,
  input  stereo_t mt_data,
  output logic    mt_pop,
  // refined matches
  output logic    out_valid,
  output stereo_t out_data,
  output logic    frame_done
);
  localparam int unsigned RW        = BLK + DMAX;
  localparam int unsigned HALF      = BLK / 2;
  localparam int unsigned PAD_LINES = HALF + 2;
  localparam int unsigned NPIX      = W * H;
  localparam int unsigned NTOT      = W * (H + PAD_LINES);
  localparam int unsigned IDX_W     = $clog2(NTOT + 1);
  typedef logic signed [COORD_W:0] scoord_t;

  typedef enum logic [1:0] {S_IDLE, S_PIX, S_PAD} state_e;
  state_e state;
  logic [2:0] done_pipe;
  logic [IDX_W-1:0] idx;
  logic push, push_sof;
  pix_t push_l, push_r;

  always_comb begin
    // a new image waits until frame_done of the previous one has left
    in_ready = (state == S_IDLE) ? (start_ok && done_pipe == '0) : (state == S_PIX);
    push     = (state == S_PAD) || (in_valid && in_ready && (state == S_PIX || in_sof));
    push_sof = (state == S_IDLE);
    push_l   = (state == S_PAD) ? '0 : in_lpix;
    push_r   = (state == S_PAD) ? '0 : in_rpix;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; idx <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid && in_ready && in_sof) begin state <= S_PIX; idx <= IDX_W'(1); end
        S_PIX:  if (in_valid) begin
          idx <= idx + 1'b1;
          if (idx == IDX_W'(NPIX - 1)) state <= S_PAD;
        end
        S_PAD: begin
          idx <= idx + 1'b1;
          if (idx == IDX_W'(NTOT - 1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done_pipe <= '0;
    else done_pipe <= {done_pipe[1:0], (state == S_PAD) && (idx == IDX_W'(NTOT - 1))};
  end
  assign frame_done = done_pipe[2];

  // ---------------- replicated stencil buffers ----------------
  logic   lv, rv;
  coord_t lrow, lcol, rrow, rcol;
  pix_t   lwin [BLK][BLK];
  pix_t   rwin [BLK][RW];
  pix_t   lwin_b [1][1];
  pix_t   rwin_b [1][1];
  stencil_buffer #(.W(W), .LINES(BLK), .A_COLS(BLK), .B_ROWS(1), .B_COLS(1)) u_sb_l (
    .clk, .rst_n, .in_valid(push), .in_sof(push_sof), .in_pix(push_l),
    .out_valid(lv), .out_row(lrow), .out_col(lcol), .win_a(lwin), .win_b(lwin_b));
  stencil_buffer #(.W(W), .LINES(BLK), .A_COLS(RW), .B_ROWS(1), .B_COLS(1)) u_sb_r (
    .clk, .rst_n, .in_valid(push), .in_sof(push_sof), .in_pix(push_r),
    .out_valid(rv), .out_row(rrow), .out_col(rcol), .win_a(rwin), .win_b(rwin_b));

  // left window centre: HALF+1 lines and HALF pixels behind the newest pixel
  scoord_t cx, cy;
  always_comb begin
    if (int'(lcol) >= int'(HALF)) begin
      cy = scoord_t'(int'(lrow) - int'(HALF) - 1); cx = scoord_t'(int'(lcol) - int'(HALF));
    end else begin
      cy = scoord_t'(int'(lrow) - int'(HALF) - 2); cx = scoord_t'(int'(lcol) - int'(HALF) + int'(W));
    end
  end

  // ---------------- SAD over the candidate disparities ----------------
  logic hit, passed;
  logic [15:0] best_sad;
  logic [7:0]  best_d;
  always_comb begin
    int d, a, b;
    logic [15:0] sad;
    d = 0; a = 0; b = 0; sad = '0;
    hit    = lv && mt_valid && (cy == $signed({1'b0, mt_data.y})) && (cx == $signed({1'b0, mt_data.x}));
    passed = lv && mt_valid && ((cy > $signed({1'b0, mt_data.y})) ||
             ((cy == $signed({1'b0, mt_data.y})) && (cx > $signed({1'b0, mt_data.x}))));
    mt_pop = hit || passed;
    best_sad = '1;
    best_d   = mt_data.disp;
    for (int k = -int'(RADIUS); k <= int'(RADIUS); k++) begin
      d = int'(mt_data.disp) + k;
      if (d >= 0 && d <= int'(DMAX) && int'(cx) - d - int'(HALF) >= 0) begin
        sad = '0;
        for (int i = 0; i < int'(BLK); i++)
          for (int jj = 0; jj < int'(BLK); jj++) begin
            a = int'(lwin[i][jj]);
            b = int'(rwin[i][int'(DMAX) - d + jj]);
            sad += 16'((a > b) ? a - b : b - a);
          end
        if (sad < best_sad) begin best_sad = sad; best_d = 8'(d); end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      out_valid <= hit;
      if (hit) begin
        out_data.x    <= mt_data.x;
        out_data.y    <= mt_data.y;
        out_data.disp <= best_d;
        out_data.cost <= best_sad;
      end
    end
  end
endmodule
