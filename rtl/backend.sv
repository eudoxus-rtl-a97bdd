// backend: the backend matrix accelerator. The host offloads the kernels
// that dominate backend latency and its variation (camera-model projection
// in registration, the Kalman gain in VIO, marginalization in SLAM) as
// sequences of five matrix operations that all three share:
// multiplication, decomposition, inverse, transpose and forward/backward
// substitution, plus element-wise addition/subtraction.
//
// Structure: NSPM scratchpads, each able to hold a whole NMAX x NMAX Q16.16
// matrix (row-major, row stride NMAX), and one unit per operation. The host
// fills the scratchpads through the host port, then issues commands; a
// command names the operation, two source scratchpads, a destination
// scratchpad and the shape. One command runs at a time; its operands must be
// in place before it starts. The command's unit is connected to the
// scratchpads for its duration: source A on read port 0 of src_a, source B
// on read port 1 of src_b, the destination's write port, and (for the
// decomposition, which reads back its own results) read port 0 of dst.
// Rules: dst must differ from src_a and src_b; src_a and src_b may be equal.
//
// Example, the Kalman gain S = H P H^T + R, S K = P H^T (matrices in SPMs):
//   MULT  T = P x H^T;  MULT S = H x T;  ADD S = S + R;
//   DECOMP F = ldl(S);  SUBST K = solve(F, T).
// Interface: cmd_valid/cmd_ready accept a be_cmd_t; done pulses when it
// completes. Host port: while idle, host_we writes host_wdata to
// (host_spm, host_addr); host_rdata returns the word at (host_spm,
// host_raddr) one cycle after the address (read port 0). The paper gives the
// list of operations; scratchpad count, number format and the command format
// are this design's choices.
// Lint note: the assertion's disable iff (!rst_n) makes Verilator report
// rst_n as both an asynchronous reset and a synchronous signal; the
// assertion is for simulation only, so this is expected.
module backend
  import eudoxus_pkg::*;
#(
  parameter int unsigned NMAX = 256,
  parameter int unsigned BLK  = 4,
  localparam int unsigned AW  = 2 * $clog2(NMAX)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  be_cmd_t             cmd,
  output logic                done,
  output logic                busy,
  input  logic                host_we,
  input  logic [SPM_ID_W-1:0] host_spm,
  input  logic [AW-1:0]       host_addr,
  input  fx_t                 host_wdata,
  input  logic [AW-1:0]       host_raddr,
  output fx_t                 host_rdata,
  output logic [31:0]         op_cycles    // cycles taken by the last command
);
  localparam int unsigned DEPTH = NMAX * NMAX;

  be_cmd_t cur;
  logic    active;
  logic    start;
  logic [SPM_ID_W-1:0] host_rspm;

  assign cmd_ready = !active;
  assign start     = cmd_valid && cmd_ready;
  assign busy      = active;

  // ---------------- units ----------------
  logic [6:0]    u_start, u_done;
  logic [AW-1:0] a_addr [7];
  logic [AW-1:0] b_addr [7];
  logic          w_en   [7];
  logic [AW-1:0] w_addr [7];
  fx_t           w_data [7];
  logic [AW-1:0] dec_c_raddr;
  fx_t           a_rdata, b_rdata, c_rdata;

  always_comb for (int u = 0; u < 7; u++) u_start[u] = start && (int'(cmd.op) == u);

  be_mult #(.NMAX(NMAX), .BLK(BLK)) u_mult (.clk, .rst_n, .start(u_start[OP_MULT]), .cmd,
    .busy(), .done(u_done[OP_MULT]), .a_addr(a_addr[OP_MULT]), .a_rdata,
    .b_addr(b_addr[OP_MULT]), .b_rdata, .w_en(w_en[OP_MULT]), .w_addr(w_addr[OP_MULT]),
    .w_data(w_data[OP_MULT]));

  be_transpose #(.NMAX(NMAX), .BLK(BLK)) u_trans (.clk, .rst_n, .start(u_start[OP_TRANS]),
    .cmd, .busy(), .done(u_done[OP_TRANS]), .a_addr(a_addr[OP_TRANS]), .a_rdata,
    .w_en(w_en[OP_TRANS]), .w_addr(w_addr[OP_TRANS]), .w_data(w_data[OP_TRANS]));
  assign b_addr[OP_TRANS] = '0;

  be_decomp #(.NMAX(NMAX)) u_decomp (.clk, .rst_n, .start(u_start[OP_DECOMP]), .cmd,
    .busy(), .done(u_done[OP_DECOMP]), .a_addr(a_addr[OP_DECOMP]), .a_rdata,
    .c_raddr(dec_c_raddr), .c_rdata,
    .w_en(w_en[OP_DECOMP]), .w_addr(w_addr[OP_DECOMP]), .w_data(w_data[OP_DECOMP]));
  assign b_addr[OP_DECOMP] = '0;

  be_subst #(.NMAX(NMAX)) u_subst (.clk, .rst_n, .start(u_start[OP_SUBST]), .cmd,
    .busy(), .done(u_done[OP_SUBST]), .a_addr(a_addr[OP_SUBST]), .a_rdata,
    .b_addr(b_addr[OP_SUBST]), .b_rdata,
    .w_en(w_en[OP_SUBST]), .w_addr(w_addr[OP_SUBST]), .w_data(w_data[OP_SUBST]));

  be_inverse #(.NMAX(NMAX)) u_inv (.clk, .rst_n, .start(u_start[OP_INV]), .cmd,
    .busy(), .done(u_done[OP_INV]), .a_addr(a_addr[OP_INV]), .a_rdata,
    .w_en(w_en[OP_INV]), .w_addr(w_addr[OP_INV]), .w_data(w_data[OP_INV]));
  assign b_addr[OP_INV] = '0;

  // addition and subtraction share the misc unit
  logic misc_done;
  be_misc #(.NMAX(NMAX), .BLK(BLK)) u_misc (.clk, .rst_n,
    .start(u_start[OP_ADD] || u_start[OP_SUB]), .cmd, .busy(), .done(misc_done),
    .a_addr(a_addr[OP_ADD]), .a_rdata, .b_addr(b_addr[OP_ADD]), .b_rdata,
    .w_en(w_en[OP_ADD]), .w_addr(w_addr[OP_ADD]), .w_data(w_data[OP_ADD]));
  assign u_done[OP_ADD] = misc_done;
  assign u_done[OP_SUB] = 1'b0;
  assign a_addr[OP_SUB] = '0;
  assign b_addr[OP_SUB] = '0;
  assign w_en[OP_SUB]   = 1'b0;
  assign w_addr[OP_SUB] = '0;
  assign w_data[OP_SUB] = '0;

  // ---------------- command sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; cur <= '0; done <= 1'b0; op_cycles <= '0; host_rspm <= '0;
    end else begin
      done <= 1'b0;
      host_rspm <= host_spm;
      if (start) begin
        active <= 1'b1; cur <= cmd; op_cycles <= '0;
      end else if (active) begin
        op_cycles <= op_cycles + 1'b1;
        if (|u_done) begin active <= 1'b0; done <= 1'b1; end
      end
    end
  end

  // ---------------- scratchpads and their port steering ----------------
  int unsigned uo;
  assign uo = (cur.op == OP_SUB) ? int'(OP_ADD) : int'(cur.op);

  fx_t rd0 [NSPM];
  fx_t rd1 [NSPM];
  for (genvar s = 0; s < NSPM; s++) begin : g_spm
    logic          we;
    logic [AW-1:0] waddr, raddr0, raddr1;
    fx_t           wdata;
    always_comb begin
      if (active) begin
        we     = w_en[uo] && (cur.dst == SPM_ID_W'(s));
        waddr  = w_addr[uo];
        wdata  = w_data[uo];
        raddr0 = (cur.src_a == SPM_ID_W'(s)) ? a_addr[uo] :
                 (cur.op == OP_DECOMP && cur.dst == SPM_ID_W'(s)) ? dec_c_raddr : '0;
        raddr1 = b_addr[uo];
      end else begin
        we     = host_we && (host_spm == SPM_ID_W'(s));
        waddr  = host_addr;
        wdata  = host_wdata;
        raddr0 = host_raddr;
        raddr1 = '0;
      end
    end
    spm #(.WIDTH(DATA_W), .DEPTH(DEPTH)) u_spm (
      .clk, .we, .waddr, .wdata(wdata), .raddr0, .rdata0(rd0[s]), .raddr1, .rdata1(rd1[s]));
  end

  assign a_rdata    = rd0[cur.src_a];
  assign b_rdata    = rd1[cur.src_b];
  assign c_rdata    = rd0[cur.dst];
  assign host_rdata = rd0[host_rspm];

  // a command never writes one of its own sources
  assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (cmd.dst != cmd.src_a) && (cmd.dst != cmd.src_b));
endmodule
