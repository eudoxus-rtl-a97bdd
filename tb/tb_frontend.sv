// tb_frontend: end-to-end run of the vision frontend on a small synthetic
// stereo sequence (96 x 64 pixels, DMAX = 16, MAX_FEAT = 32). The scene is a
// mosaic of random-intensity 5 x 5 tiles that moves one pixel to the right
// per frame; the right image is the left one shifted by a true disparity of
// 4 pixels. Six frames are sent on the camera stream; the second (DR)
// stream is held back until the frontend has stalled on a busy bank, then
// all six pairs are sent to it, so both the FE/SM overlap and the FE stall
// happen. Counted mechanisms (each must occur, or a failure is counted):
// left and right features (FD/FC), initial matches (MO), refined matches
// (DR, one per MO match), of which at least half must recover the true
// disparity, optical
// flow results (TM), cycles where FE works while DR works on an earlier
// frame (pipelining), cycles of FE stall, and one DR frame_done per frame.
module tb_frontend;
  import eudoxus_pkg::*;
  localparam int W = 96, H = 64, DMAX = 16, DT = 4, NF = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cam_valid = 0, cam_ready, cam_sof = 0, cam_side = 0;
  pix_t cam_pix = '0;
  logic dr_valid = 0, dr_ready, dr_sof = 0;
  pix_t dr_lpix = '0, dr_rpix = '0;
  logic st_valid, st_frame_done, fl_valid, fe_frame_done, fe_stall;
  stereo_t st_data;
  flow_t fl_data;
  logic [15:0] kp_dropped;

  frontend #(.W(W), .H(H), .MAX_FEAT(32), .DMAX(DMAX)) dut (
    .clk, .rst_n, .cam_valid, .cam_ready, .cam_sof, .cam_side, .cam_pix,
    .dr_valid, .dr_ready, .dr_sof, .dr_lpix, .dr_rpix,
    .st_valid, .st_data, .st_frame_done, .fl_valid, .fl_data,
    .fe_frame_done, .fe_stall, .kp_dropped);

  pix_t tile [64][64];
  function automatic pix_t scene(int f, int side, int x, int y);
    int sx;
    sx = x - f + (side ? DT : 0) + 20;
    return tile[(y / 5) % 64][(sx / 5) % 64];
  endfunction

  int n_featl = 0, n_featr = 0, n_mo = 0, n_st = 0, n_st_true = 0, n_fl = 0, n_fl_ok = 0;
  int n_overlap = 0, n_stall = 0, n_stdone = 0, n_fedone = 0;
  bit dr_go = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.feat_valid && !dut.feat_side) n_featl++;
    if (dut.feat_valid && dut.feat_side) n_featr++;
    if (dut.m_valid && dut.m_ready) n_mo++;
    if (st_valid) begin n_st++; if (st_data.disp == 8'(DT)) n_st_true++; end
    if (fl_valid) begin n_fl++; if (fl_data.ok) n_fl_ok++; end
    if (dut.fe_busy && int'(dut.u_dr.state) != 0) n_overlap++;
    if (fe_stall) begin n_stall++; dr_go = 1; end
    if (st_frame_done) n_stdone++;
    if (fe_frame_done) n_fedone++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog: fe frames %0d, dr frames %0d", n_fedone, n_stdone);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // camera stream: left then right image of each frame
  initial begin
    for (int i = 0; i < 64; i++) for (int j = 0; j < 64; j++) tile[i][j] = pix_t'($urandom_range(0, 255));
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int f = 0; f < NF; f++)
      for (int s = 0; s < 2; s++)
        for (int y = 0; y < H; y++)
          for (int x = 0; x < W; x++) begin
            cam_valid = 1; cam_sof = (x == 0 && y == 0); cam_side = 1'(s); cam_pix = scene(f, s, x, y);
            @(posedge clk);
            while (!cam_ready) @(posedge clk);
            @(negedge clk);
          end
    cam_valid = 0;
  end

  // second stream for DR, held back until FE has stalled once
  initial begin
    wait (rst_n);
    @(negedge clk);
    while (!dr_go) @(negedge clk);
    for (int f = 0; f < NF; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          dr_valid = 1; dr_sof = (x == 0 && y == 0);
          dr_lpix = scene(f, 0, x, y); dr_rpix = scene(f, 1, x, y);
          @(posedge clk);
          while (!dr_ready) @(posedge clk);
          @(negedge clk);
        end
    dr_valid = 0;
    while (n_stdone < NF) @(negedge clk);
    repeat (10) @(negedge clk);
    $display("features L/R %0d/%0d, dropped %0d, MO %0d, DR %0d (true disparity %0d), flow %0d (ok %0d)",
             n_featl, n_featr, kp_dropped, n_mo, n_st, n_st_true, n_fl, n_fl_ok);
    $display("overlap cycles %0d, stall cycles %0d, DR frames %0d, FE frames %0d",
             n_overlap, n_stall, n_stdone, n_fedone);
    checks++; if (n_featl == 0) begin failures++; $display("no left features"); end
    checks++; if (n_featr == 0) begin failures++; $display("no right features"); end
    checks++; if (n_mo == 0) begin failures++; $display("no MO matches"); end
    checks++; if (n_st == 0) begin failures++; $display("no DR results"); end
    checks++; if (n_st_true * 2 < n_st) begin failures++; $display("DR rarely finds the true disparity"); end
    checks++; if (n_st != n_mo) begin failures++; $display("DR results differ from MO matches"); end
    checks++; if (n_fl_ok == 0) begin failures++; $display("no optical flow"); end
    checks++; if (n_overlap == 0) begin failures++; $display("FE and DR never overlapped"); end
    checks++; if (n_stall == 0) begin failures++; $display("FE never stalled"); end
    checks++; if (n_stdone != NF) begin failures++; $display("DR frames %0d", n_stdone); end
    checks++; if (n_fedone != NF) begin failures++; $display("FE frames %0d", n_fedone); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
