// feature_extraction: the feature extraction (FE) block of the frontend,
// time-shared between the left and the right camera image.
//
// One image of a stereo pair streams in per frame slot, one pixel per cycle,
// left image first; the same hardware then processes the right image (the
// paper shares FE between the two streams because FE is much faster than
// stereo matching). Inside, as in the paper's task graph:
//   * stencil buffer SB1 (7 line FIFOs) feeds two windows from the same
//     input stream: a 7x7 window for feature point detection (FD, FAST) and
//     a 5x5 window for image filtering (IF, Gaussian). FD and IF run in
//     parallel.
//   * detected key points go, in raster order, into a FIFO;
//   * the filtered image streams into stencil buffer SB2 (31 line FIFOs),
//     whose 31x31 window feeds descriptor calculation (FC), which pops the
//     key points from the FIFO as the window reaches them.
// Centre coordinates are derived from the linear push index: the FD centre
// lags the input by 4 lines + 3 pixels, the IF centre by 5 lines + 2 pixels,
// and the FC centre lags the filtered stream by 16 lines + 15 pixels. After
// the H*W pixels of an image the block pushes PAD_LINES lines of zero
// padding itself (in_ready is low meanwhile) so that every key point of the
// image leaves FC before the next image starts; frame_done then pulses.
//
// Interface: pixel stream in_valid/in_ready/in_pix with in_sof on the first
// pixel of an image and in_side (0 left, 1 right) sampled with it. A new
// image is accepted only while start_ok is high. Features leave on
// feat_valid with their side and, for the temporal matcher, their 11x11
// centre patch of the filtered image. The filtered image itself leaves on
// f_valid/f_sof/f_pix. kp_dropped counts key points lost to
// a full key-point FIFO. The sizes of the stencils are this design's choices;
// the paper gives none.
module feature_extraction
  import eudoxus_pkg::*;
#(
  parameter int unsigned W         = 1280,
  parameter int unsigned H         = 720,
  parameter int unsigned MAX_KP    = 1024,
  parameter int unsigned FAST_T    = 20,
  parameter int unsigned LK_P      = 11
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  logic     in_sof,
  input  logic     in_side,
  input  pix_t     in_pix,
  input  logic     start_ok,
  output logic     feat_valid,
  output logic     feat_side,
  output feature_t feat,
  output pix_t     feat_patch [LK_P][LK_P],
  output logic     frame_done,
  output logic     frame_side,
  output logic     busy,
  output logic [15:0] kp_dropped,
  // filtered image stream, for temporal matching
  output logic     f_valid,
  output logic     f_sof,
  output pix_t     f_pix
);
  localparam int unsigned PATCH     = 31;
  localparam int unsigned PAD_LINES = 22;
  localparam int unsigned NPIX      = W * H;
  localparam int unsigned NTOT      = W * (H + PAD_LINES);
  localparam int unsigned IDX_W     = $clog2(NTOT + 1);
  typedef logic signed [COORD_W:0] scoord_t;

  typedef enum logic [1:0] {S_IDLE, S_PIX, S_PAD} state_e;
  state_e state;
  logic [3:0] done_pipe;
  logic [IDX_W-1:0] idx;
  logic side;

  // ---------------- input sequencing ----------------
  logic push, push_sof;
  pix_t push_pix;
  always_comb begin
    // a new image waits until frame_done of the previous one has left
    in_ready = (state == S_IDLE) ? (start_ok && done_pipe == '0) : (state == S_PIX);
    push     = (state == S_PAD) || (in_valid && in_ready && (state == S_PIX || in_sof));
    push_sof = (state == S_IDLE);
    push_pix = (state == S_PAD) ? '0 : in_pix;
  end
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; idx <= '0; side <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid && in_ready && in_sof) begin
          state <= S_PIX; idx <= IDX_W'(1); side <= in_side;
        end
        S_PIX: if (in_valid) begin
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

  // frame_done pulses when the last padding pixel has worked its way out
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done_pipe <= '0;
    else done_pipe <= {done_pipe[2:0], (state == S_PAD) && (idx == IDX_W'(NTOT - 1))};
  end
  assign frame_done = done_pipe[3];
  assign frame_side = side;

  // ---------------- SB1: FD (7x7) and IF (5x5) ----------------
  logic   sb1_valid;
  coord_t sb1_row, sb1_col;
  pix_t   win_fd [7][7];
  pix_t   win_if [5][5];
  stencil_buffer #(.W(W), .LINES(7), .A_COLS(7), .B_ROWS(5), .B_COLS(5)) u_sb1 (
    .clk, .rst_n, .in_valid(push), .in_sof(push_sof), .in_pix(push_pix),
    .out_valid(sb1_valid), .out_row(sb1_row), .out_col(sb1_col),
    .win_a(win_fd), .win_b(win_if));

  // centre of a window whose newest pixel is (row, col), lagging by dr lines
  // and dc pixels, with the column wrapping into the previous line
  function automatic void centre(input coord_t row, input coord_t col, input int dr, input int dc,
                                 output scoord_t cy, output scoord_t cx);
    if (int'(col) >= dc) begin
      cy = scoord_t'(int'(row) - dr);     cx = scoord_t'(int'(col) - dc);
    end else begin
      cy = scoord_t'(int'(row) - dr - 1); cx = scoord_t'(int'(col) - dc + int'(W));
    end
  endfunction

  scoord_t fd_cx, fd_cy, if_cx, if_cy;
  always_comb begin
    centre(sb1_row, sb1_col, 4, 3, fd_cy, fd_cx);
    centre(sb1_row, sb1_col, 5, 2, if_cy, if_cx);
  end

  logic   fd_valid, fd_corner;
  coord_t fd_x, fd_y;
  fast_detect #(.W(W), .H(H), .THRESH(FAST_T), .BORDER(16)) u_fd (
    .clk, .rst_n, .in_valid(sb1_valid), .win(win_fd), .cx(fd_cx), .cy(fd_cy),
    .out_valid(fd_valid), .corner(fd_corner), .x(fd_x), .y(fd_y));

  logic if_valid;
  pix_t if_pix;
  gauss_filter u_if (.clk, .rst_n, .in_valid(sb1_valid), .win(win_if),
                     .out_valid(if_valid), .out_pix(if_pix));

  // IF centre coordinates travel with the filtered pixel
  scoord_t if_cy_q, if_cx_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin if_cy_q <= '0; if_cx_q <= '0; end
    else if (sb1_valid) begin if_cy_q <= if_cy; if_cx_q <= if_cx; end
  end

  // ---------------- key point FIFO ----------------
  logic   kp_in_ready, kp_valid, kp_pop;
  coord_t kp_x, kp_y;
  sync_fifo #(.WIDTH(2 * COORD_W), .DEPTH(MAX_KP)) u_kp_fifo (
    .clk, .rst_n, .in_valid(fd_valid && fd_corner), .in_ready(kp_in_ready),
    .in_data({fd_y, fd_x}), .out_valid(kp_valid), .out_ready(kp_pop),
    .out_data({kp_y, kp_x}), .count());

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) kp_dropped <= '0;
    else if (fd_valid && fd_corner && !kp_in_ready) kp_dropped <= kp_dropped + 1'b1;
  end

  // ---------------- SB2: FC (31x31) on the filtered image ----------------
  logic f_push;
  always_comb begin
    f_push = if_valid && (if_cy_q >= 0) && (if_cy_q < scoord_t'(H));
    f_sof  = (if_cy_q == 0) && (if_cx_q == 0);
  end

  logic   sb2_valid;
  coord_t sb2_row, sb2_col;
  pix_t   win_fc [PATCH][PATCH];
  pix_t   win_unused [1][1];
  stencil_buffer #(.W(W), .LINES(PATCH), .A_COLS(PATCH), .B_ROWS(1), .B_COLS(1)) u_sb2 (
    .clk, .rst_n, .in_valid(f_push), .in_sof(f_sof), .in_pix(if_pix),
    .out_valid(sb2_valid), .out_row(sb2_row), .out_col(sb2_col),
    .win_a(win_fc), .win_b(win_unused));

  scoord_t fc_cx, fc_cy;
  always_comb centre(sb2_row, sb2_col, 16, 15, fc_cy, fc_cx);

  orb_desc #(.PATCH(PATCH), .LK_P(LK_P)) u_fc (
    .clk, .rst_n, .in_valid(sb2_valid), .win(win_fc), .cx(fc_cx), .cy(fc_cy),
    .kp_valid, .kp_x, .kp_y, .kp_pop,
    .out_valid(feat_valid), .out_feat(feat), .out_patch(feat_patch));

  assign feat_side = side;
  assign f_valid   = f_push;
  assign f_pix     = if_pix;
endmodule
