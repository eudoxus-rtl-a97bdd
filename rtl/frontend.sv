// frontend: the vision frontend of the localization accelerator. It turns a
// stereo image pair per frame into spatial (stereo) and temporal (optical
// flow) key-point correspondences for the backend running on the host.
//
// Blocks and the order they run in, per frame t:
//   feature_extraction (FD + IF in parallel, then FC) on the left image, then
//   on the right image, time-shared;
//   temporal_match (DC + LSS) on the filtered left image, against the left
//   key points of frame t-1;
//   hamming_match (MO) once both images' descriptors are in, then
//   disparity_refine (DR) on a second read of both images.
// The critical path FD -> FC -> MO -> DR is pipelined across frames: MO keeps
// two banks of descriptors, so feature extraction of frame t+1 overlaps stereo
// matching of frame t; feature extraction waits only if both banks are busy.
// Initial matches go from MO to DR through a FIFO, and DR starts a frame's
// image pair only after MO has finished that frame's list; a FIFO of
// per-frame match counts keeps DR from taking the next frame's matches.
// Feature extraction waits (fe_stall) when both banks are busy or when two
// finished lists are already waiting for DR.
//
// Interfaces: cam_* is the first image stream (left image, then right image,
// each starting with cam_sof and tagged with cam_side); dr_* is the second,
// lockstep left/right stream for DR. Both come from DMA engines outside this
// module. Results leave on st_* (refined stereo matches) and fl_*
// (optical flow). All stream handshakes are valid/ready.
module frontend
  import eudoxus_pkg::*;
#(
  parameter int unsigned W        = 1280,
  parameter int unsigned H        = 720,
  parameter int unsigned MAX_FEAT = 1024,
  parameter int unsigned DMAX     = 64
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    cam_valid,
  output logic    cam_ready,
  input  logic    cam_sof,
  input  logic    cam_side,
  input  pix_t    cam_pix,
  input  logic    dr_valid,
  output logic    dr_ready,
  input  logic    dr_sof,
  input  pix_t    dr_lpix,
  input  pix_t    dr_rpix,
  output logic    st_valid,
  output stereo_t st_data,
  output logic    st_frame_done,
  output logic    fl_valid,
  output flow_t   fl_data,
  output logic    fe_frame_done,
  output logic    fe_stall,          // FE waiting for a free descriptor bank
  output logic [15:0] kp_dropped
);
  localparam int unsigned LK_P = 11;

  // ---------------- feature extraction ----------------
  logic     feat_valid, feat_side, fe_done, fe_side, fe_busy, bank_free;
  feature_t feat;
  pix_t     patch [LK_P][LK_P];
  logic     f_valid, f_sof;
  pix_t     f_pix;
  logic [15:0] fe_drop, tm_drop;
  logic     count_ok;

  feature_extraction #(.W(W), .H(H), .MAX_KP(MAX_FEAT), .LK_P(LK_P)) u_fe (
    .clk, .rst_n, .in_valid(cam_valid), .in_ready(cam_ready), .in_sof(cam_sof),
    .in_side(cam_side), .in_pix(cam_pix),
    // the right image of a pair always follows its left image into the
    // same bank, so only a new left image has to wait for a free bank
    .start_ok((bank_free && count_ok) || cam_side),
    .feat_valid, .feat_side, .feat, .feat_patch(patch),
    .frame_done(fe_done), .frame_side(fe_side), .busy(fe_busy), .kp_dropped(fe_drop),
    .f_valid, .f_sof, .f_pix);

  assign fe_frame_done = fe_done && fe_side;
  assign fe_stall      = !fe_busy && cam_valid && cam_sof && !cam_side && !(bank_free && count_ok);

  // ---------------- temporal matching ----------------
  temporal_match #(.W(W), .MAX_KP(MAX_FEAT), .LK_P(LK_P)) u_tm (
    .clk, .rst_n, .f_valid, .f_sof, .f_side(feat_side), .f_pix,
    .kp_valid(feat_valid && !feat_side), .kp_feat(feat), .kp_patch(patch),
    .out_valid(fl_valid), .out_flow(fl_data), .kp_dropped(tm_drop));

  assign kp_dropped = fe_drop + tm_drop;

  // ---------------- stereo matching: MO ----------------
  logic    m_valid, m_ready, list_done;
  stereo_t m_data;
  hamming_match #(.MAX_FEAT(MAX_FEAT), .DMAX(DMAX)) u_mo (
    .clk, .rst_n, .feat_valid, .feat_side, .feat,
    .fe_frame_done(fe_done), .fe_frame_side(fe_side), .bank_free,
    .m_valid, .m_ready, .m_data, .list_done);

  logic    mt_valid, mt_pop;
  stereo_t mt_data;
  sync_fifo #(.WIDTH($bits(stereo_t)), .DEPTH(2 * MAX_FEAT)) u_match_fifo (
    .clk, .rst_n, .in_valid(m_valid), .in_ready(m_ready), .in_data(m_data),
    .out_valid(mt_valid), .out_ready(mt_pop), .out_data(mt_data), .count());

  // Matches of consecutive frames share one FIFO, so the number of matches of
  // each finished list is queued too (MO raises list_done the cycle after its
  // last output). DR takes a frame's count when it starts that frame's image
  // pair and sees only that many matches; any it did not consume (none when
  // the list is in raster order) are drained after its frame_done. A new
  // left image enters FE only while at most one count is queued, which
  // bounds the frames in flight between FE and DR to the count FIFO depth.
  localparam int unsigned CW = $clog2(MAX_FEAT + 1);
  logic [CW-1:0] m_count, remaining, cnt_head;
  logic [2:0]    cnt_fill;
  logic          cnt_valid, dr_start, draining, dr_pop;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) m_count <= '0;
    else if (list_done) m_count <= '0;
    else if (m_valid && m_ready) m_count <= m_count + 1'b1;
  end
  sync_fifo #(.WIDTH(CW), .DEPTH(4)) u_count_fifo (
    .clk, .rst_n, .in_valid(list_done), .in_ready(), .in_data(m_count),
    .out_valid(cnt_valid), .out_ready(dr_start), .out_data(cnt_head), .count(cnt_fill));
  assign count_ok = (cnt_fill <= 3'd1);

  assign dr_start = dr_valid && dr_ready && dr_sof && cnt_valid && !draining && (remaining == '0);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remaining <= '0; draining <= 1'b0;
    end else begin
      if (dr_start) remaining <= cnt_head;
      else if (mt_pop) remaining <= remaining - 1'b1;
      if (st_frame_done && remaining != '0) draining <= 1'b1;
      else if (remaining == '0 || (remaining == CW'(1) && mt_pop)) draining <= 1'b0;
    end
  end
  assign mt_pop = dr_pop || (draining && mt_valid && remaining != '0);

  // ---------------- stereo matching: DR ----------------
  disparity_refine #(.W(W), .H(H), .DMAX(DMAX)) u_dr (
    .clk, .rst_n, .start_ok(cnt_valid && !draining && remaining == '0),
    .in_valid(dr_valid), .in_ready(dr_ready), .in_sof(dr_sof), .in_lpix(dr_lpix), .in_rpix(dr_rpix),
    .mt_valid(mt_valid && remaining != '0 && !draining), .mt_data, .mt_pop(dr_pop),
    .out_valid(st_valid), .out_data(st_data), .frame_done(st_frame_done));
endmodule
