// tb_eudoxus_top_full: full-size run of the accelerator with its default
// parameters (1280 x 720 stereo images, MAX_FEAT = 1024, DMAX = 64,
// 256 x 256 scratchpads, the car configuration).
// The scene is a mosaic of random-intensity 40 x 40 tiles moving one
// pixel to the right per frame; the right image is the left one shifted by a
// true disparity of 9 pixels. 3 frame(s) go through the camera stream.
// The DR stream is sent at once, so DR starts as soon as the first match list
// is complete and overlaps feature extraction of frame 1.
// While the frontend runs, the host side loads the backend and runs the
// registration kernel on the refined matches of frame 0: a 3 x 4 camera
// matrix times the 4 x M matrix of homogeneous points [x; y; d; 1] (M up to
// 256), checked against a real-valued product. Counted mechanisms, each of
// which must happen or a failure is counted: left and right features
// (FD/FC), initial matches (MO), refined matches (DR, one per MO match, at
// least half with the true disparity), optical flow (TM), FE working while DR works
// on an earlier frame, one DR frame_done per frame, a backend
// command completing, and the backend busy while the frontend is busy.
module tb_eudoxus_top_full;
  import eudoxus_pkg::*;
  localparam int W = 1280, H = 720, DT = 9, NF = 3, TS = 40, MP = 256, N = 256;
  localparam int AW = 2 * $clog2(N);
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
  logic cmd_valid = 0, cmd_ready, be_done, be_busy, host_we = 0;
  be_cmd_t cmd;
  logic [SPM_ID_W-1:0] host_spm = '0;
  logic [AW-1:0] host_addr = '0, host_raddr = '0;
  fx_t host_wdata = '0, host_rdata;
  logic [31:0] be_op_cycles;

  eudoxus_top dut (
    .clk, .rst_n, .cam_valid, .cam_ready, .cam_sof, .cam_side, .cam_pix,
    .dr_valid, .dr_ready, .dr_sof, .dr_lpix, .dr_rpix,
    .st_valid, .st_data, .st_frame_done, .fl_valid, .fl_data,
    .fe_frame_done, .fe_stall, .kp_dropped,
    .cmd_valid, .cmd_ready, .cmd, .be_done, .be_busy,
    .host_we, .host_spm, .host_addr, .host_wdata, .host_raddr, .host_rdata, .be_op_cycles);

  pix_t tile [64][64];
  function automatic pix_t scene(int f, int side, int x, int y);
    int sx;
    sx = x - f + (side ? DT : 0) + 20;
    return tile[(y / TS) % 64][(sx / TS) % 64];
  endfunction

  int n_featl = 0, n_featr = 0, n_mo = 0, n_st = 0, n_st_true = 0, n_fl = 0;
  int n_overlap = 0, n_stall = 0, n_stdone = 0, n_fedone = 0, n_be = 0, n_be_overlap = 0;
  bit dr_go = 1;
  stereo_t pts [$];

  always @(posedge clk) if (rst_n) begin
    if (dut.u_frontend.feat_valid && !dut.u_frontend.feat_side) n_featl++;
    if (dut.u_frontend.feat_valid && dut.u_frontend.feat_side) n_featr++;
    if (dut.u_frontend.m_valid && dut.u_frontend.m_ready) n_mo++;
    if (st_valid) begin
      n_st++;
      if (st_data.disp == 8'(DT)) n_st_true++;
      if (n_stdone == 0 && pts.size() < MP) pts.push_back(st_data);
    end
    if (fl_valid && fl_data.ok) n_fl++;
    if (dut.u_frontend.fe_busy && int'(dut.u_frontend.u_dr.state) != 0) n_overlap++;
    if (fe_stall) begin n_stall++; dr_go = 1; end
    if (st_frame_done) n_stdone++;
    if (fe_frame_done) n_fedone++;
    if (be_done) n_be++;
    if (be_busy && dut.u_frontend.fe_busy) n_be_overlap++;
  end

  initial begin
    repeat (12000000) @(posedge clk);
    failures++;
    $display("watchdog: fe frames %0d, dr frames %0d", n_fedone, n_stdone);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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
  end

  task automatic wr(int s, int r, int c, real v);
    @(negedge clk);
    host_we = 1; host_spm = SPM_ID_W'(s); host_addr = AW'(r * N + c);
    host_wdata = fx_t'($rtoi(v * 65536.0));
    @(negedge clk);
    host_we = 0;
  endtask

  // host: registration kernel on frame 0's refined matches
  initial begin
    real cam [3][4];
    int m;
    cmd = '0;
    wait (rst_n);
    for (int i = 0; i < 3; i++) for (int j = 0; j < 4; j++) begin
      cam[i][j] = real'($urandom_range(0, 2000)) / 1000.0 - 1.0;
      wr(0, i, j, cam[i][j]);
      cam[i][j] = real'($rtoi(cam[i][j] * 65536.0)) / 65536.0;
    end
    while (n_stdone < 1) @(negedge clk);
    m = pts.size();
    for (int j = 0; j < m; j++) begin
      wr(1, 0, j, real'(pts[j].x) / 64.0); wr(1, 1, j, real'(pts[j].y) / 64.0);
      wr(1, 2, j, real'(pts[j].disp)); wr(1, 3, j, 1.0);
    end
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd.op = OP_MULT; cmd.src_a = 2'd0; cmd.src_b = 2'd1; cmd.dst = 2'd2;
    cmd.m = 9'd3; cmd.k = 9'd4; cmd.n = 9'(m); cmd.trans_b = 1'b0;
    @(negedge clk);
    cmd_valid = 0;
    @(negedge clk);
    while (be_busy) @(negedge clk);
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < m; j++) begin
        real e, g;
        e = cam[i][0] * real'(pts[j].x) / 64.0 + cam[i][1] * real'(pts[j].y) / 64.0 +
            cam[i][2] * real'(pts[j].disp) + cam[i][3];
        @(negedge clk);
        host_spm = 2'd2; host_raddr = AW'(i * N + j);
        @(negedge clk);
        g = real'(host_rdata) / 65536.0;
        checks++;
        if (g - e > 1e-3 || e - g > 1e-3) begin failures++; $display("projection [%0d][%0d] %f vs %f", i, j, g, e); end
      end
    while (n_stdone < NF) @(negedge clk);
    repeat (10) @(negedge clk);
    $display("features L/R %0d/%0d, dropped %0d, MO %0d, DR %0d (true disparity %0d), flow %0d",
             n_featl, n_featr, kp_dropped, n_mo, n_st, n_st_true, n_fl);
    $display("FE/DR overlap %0d, stall %0d, DR frames %0d, FE frames %0d, backend ops %0d (%0d cycles, %0d overlapping FE), points %0d",
             n_overlap, n_stall, n_stdone, n_fedone, n_be, be_op_cycles, n_be_overlap, m);
    checks++; if (n_featl == 0) begin failures++; $display("no left features"); end
    checks++; if (n_featr == 0) begin failures++; $display("no right features"); end
    checks++; if (n_mo == 0) begin failures++; $display("no MO matches"); end
    checks++; if (n_st == 0 || n_st != n_mo) begin failures++; $display("DR results differ from MO matches"); end
    checks++; if (n_st_true * 2 < n_st) begin failures++; $display("DR rarely finds the true disparity"); end
    checks++; if (n_fl == 0) begin failures++; $display("no optical flow"); end
    checks++; if (n_overlap == 0) begin failures++; $display("FE and DR never overlapped"); end
    checks++; if (n_stdone != NF || n_fedone != NF) begin failures++; $display("frame count wrong"); end
    checks++; if (n_be != 1) begin failures++; $display("backend op count %0d", n_be); end
    checks++; if (n_be_overlap == 0) begin failures++; $display("backend never ran beside the frontend"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
