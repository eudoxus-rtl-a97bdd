// eudoxus_top: the localization accelerator, frontend and backend side by
// side as they sit on the FPGA.
//
// The frontend runs on every frame whatever the operating mode: it turns the
// stereo camera images into stereo and temporal key-point correspondences.
// The backend is a matrix-operation engine that the host drives; which
// kernels the host offloads to it depends on the mode it runs in
// (registration, VIO or SLAM) and on its runtime scheduler, both of which
// are host software. The two halves share no datapath; per frame the host
// reads the frontend results, sends a kernel's input matrices to the
// backend, and reads the backend results back.
//
// Ports that lead to parts outside this RTL: the two image streams come from
// DMA engines reading DRAM (cam_* once per image, dr_* a second time, left
// and right in lockstep, for disparity refinement); st_*/fl_* go to the host
// link; cmd_* and host_* are the host's view of the backend.
// Lint note: the assertions inside the backend and the matcher use
// disable iff (!rst_n), so Verilator reports rst_n as both an asynchronous
// reset and a synchronous signal here; they are for simulation only, so this
// is expected.
module eudoxus_top
  import eudoxus_pkg::*;
#(
  parameter int unsigned W        = 1280,
  parameter int unsigned H        = 720,
  parameter int unsigned MAX_FEAT = 1024,
  parameter int unsigned DMAX     = 64,
  parameter int unsigned NMAX     = 256,
  parameter int unsigned BLK      = 4,
  localparam int unsigned AW      = 2 * $clog2(NMAX)
) (
  input  logic    clk,
  input  logic    rst_n,
  // frontend image streams
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
  // frontend results
  output logic    st_valid,
  output stereo_t st_data,
  output logic    st_frame_done,
  output logic    fl_valid,
  output flow_t   fl_data,
  output logic    fe_frame_done,
  output logic    fe_stall,
  output logic [15:0] kp_dropped,
  // backend
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  be_cmd_t             cmd,
  output logic                be_done,
  output logic                be_busy,
  input  logic                host_we,
  input  logic [SPM_ID_W-1:0] host_spm,
  input  logic [AW-1:0]       host_addr,
  input  fx_t                 host_wdata,
  input  logic [AW-1:0]       host_raddr,
  output fx_t                 host_rdata,
  output logic [31:0]         be_op_cycles
);
  frontend #(.W(W), .H(H), .MAX_FEAT(MAX_FEAT), .DMAX(DMAX)) u_frontend (
    .clk, .rst_n,
    .cam_valid, .cam_ready, .cam_sof, .cam_side, .cam_pix,
    .dr_valid, .dr_ready, .dr_sof, .dr_lpix, .dr_rpix,
    .st_valid, .st_data, .st_frame_done, .fl_valid, .fl_data,
    .fe_frame_done, .fe_stall, .kp_dropped);

  backend #(.NMAX(NMAX), .BLK(BLK)) u_backend (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .done(be_done), .busy(be_busy),
    .host_we, .host_spm, .host_addr, .host_wdata, .host_raddr, .host_rdata,
    .op_cycles(be_op_cycles));
endmodule
