// tb_backend: runs the backend's three offloaded kernels as command
// sequences through the command port, with operands loaded and results read
// back through the host port (NMAX = 16):
//   * Kalman gain (VIO): T = P H^T (MULT, B transposed); S0 = H T (MULT);
//     S = S0 + R (ADD); F = ldl(S) (DECOMP); U = T^T (TRANS);
//     K^T = solve(F, U) (SUBST). K^T is compared with a real-valued
//     K = P H^T (H P H^T + R)^-1.
//   * Camera-model projection (registration): 3 x 4 camera matrix times a
//     4 x 16 block of homogeneous points (MULT).
//   * Marginalization: inverse of a [diag B; B^T D] matrix (INV), then
//     SUB of the result from itself (must give zero).
// Checks results with tolerances, that cmd_ready is low while a command runs,
// that done pulses once per command, that op_cycles is non-zero, and that
// back-to-back commands are accepted as soon as cmd_ready returns.
module tb_backend;
  import eudoxus_pkg::*;
  localparam int N = 16, AW = 8, NS = 12, KM = 4, MP = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid = 0, cmd_ready, done, busy, host_we = 0;
  be_cmd_t cmd;
  logic [SPM_ID_W-1:0] host_spm = '0;
  logic [AW-1:0] host_addr = '0, host_raddr = '0;
  fx_t host_wdata = '0, host_rdata;
  logic [31:0] op_cycles;
  int n_done = 0, n_cmds = 0;

  backend #(.NMAX(N), .BLK(4)) dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .done, .busy,
    .host_we, .host_spm, .host_addr, .host_wdata, .host_raddr, .host_rdata, .op_cycles);

  always @(posedge clk) if (rst_n) begin
    if (done) n_done++;
    if (busy && cmd_ready) begin checks++; failures++; $display("cmd_ready while busy"); end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fx_t to_fx(real r);
    return fx_t'($rtoi(r * 65536.0));
  endfunction
  function automatic real fr(fx_t v);
    return real'(v) / 65536.0;
  endfunction
  function automatic real rnd(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 100000)) / 100000.0;
  endfunction
  task automatic wr(int s, int r, int c, real v);
    @(negedge clk);
    host_we = 1; host_spm = SPM_ID_W'(s); host_addr = AW'(r * N + c); host_wdata = to_fx(v);
    @(negedge clk);
    host_we = 0;
  endtask
  task automatic rd(int s, int r, int c, output real v);
    @(negedge clk);
    host_spm = SPM_ID_W'(s); host_raddr = AW'(r * N + c);
    @(negedge clk);
    v = fr(host_rdata);
  endtask
  task automatic issue(be_op_e op, int a, int b, int d, int m, int k, int n, bit tb);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1;
    cmd.op = op; cmd.src_a = SPM_ID_W'(a); cmd.src_b = SPM_ID_W'(b); cmd.dst = SPM_ID_W'(d);
    cmd.m = 9'(m); cmd.k = 9'(k); cmd.n = 9'(n); cmd.trans_b = tb;
    @(negedge clk);
    cmd_valid = 0;
    n_cmds++;
  endtask
  task automatic wait_idle();
    @(negedge clk);
    while (busy) @(negedge clk);
    checks++;
    if (op_cycles == 0) begin failures++; $display("op_cycles is zero"); end
  endtask
  task automatic near(string w, int r, int c, real got, real exp, real tol);
    checks++;
    if (got - exp > tol || exp - got > tol) begin
      failures++;
      if (failures < 10) $display("%s[%0d][%0d] = %f, expected %f", w, r, c, got, exp);
    end
  endtask

  real P [NS][NS];
  real H [KM][NS];
  real R [KM];
  real S [KM][2*KM];
  real T [NS][KM];
  real K [NS][KM];

  initial begin
    real v;
    cmd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---------------- Kalman gain ----------------
    for (int i = 0; i < NS; i++)
      for (int j = 0; j <= i; j++) begin
        P[i][j] = (i == j) ? rnd(1.0, 2.0) : rnd(-0.1, 0.1); P[j][i] = P[i][j];
      end
    for (int i = 0; i < KM; i++) begin
      R[i] = rnd(0.2, 0.5);
      for (int j = 0; j < NS; j++) H[i][j] = rnd(-1.0, 1.0);
    end
    for (int i = 0; i < NS; i++) for (int j = 0; j < NS; j++) begin
      wr(0, i, j, P[i][j]); P[i][j] = fr(to_fx(P[i][j]));
    end
    for (int i = 0; i < KM; i++) for (int j = 0; j < NS; j++) begin
      wr(1, i, j, H[i][j]); H[i][j] = fr(to_fx(H[i][j]));
    end
    for (int i = 0; i < KM; i++) for (int j = 0; j < KM; j++) wr(2, i, j, (i == j) ? R[i] : 0.0);
    for (int i = 0; i < KM; i++) R[i] = fr(to_fx(R[i]));
    issue(OP_MULT, 0, 1, 3, NS, NS, KM, 1'b1);    // T = P H^T
    issue(OP_MULT, 1, 3, 0, KM, NS, KM, 1'b0);    // S0 = H T
    issue(OP_ADD, 0, 2, 1, KM, 0, KM, 1'b0);      // S = S0 + R
    issue(OP_DECOMP, 1, 1, 0, KM, 0, KM, 1'b0);   // F = ldl(S)
    issue(OP_TRANS, 3, 3, 2, NS, 0, KM, 1'b0);    // U = T^T
    issue(OP_SUBST, 0, 2, 1, KM, 0, NS, 1'b0);    // K^T = solve(F, U)
    wait_idle();
    // reference K = T S^-1
    for (int i = 0; i < NS; i++) for (int j = 0; j < KM; j++) begin
      T[i][j] = 0.0;
      for (int q = 0; q < NS; q++) T[i][j] += P[i][q] * H[j][q];
    end
    for (int i = 0; i < KM; i++) for (int j = 0; j < 2 * KM; j++) begin
      S[i][j] = (j < KM) ? ((i == j) ? R[i] : 0.0) : ((j - KM == i) ? 1.0 : 0.0);
      if (j < KM) for (int q = 0; q < NS; q++) S[i][j] += H[i][q] * T[q][j];
    end
    for (int p = 0; p < KM; p++) begin
      real pv;
      pv = S[p][p];
      for (int j = 0; j < 2 * KM; j++) S[p][j] /= pv;
      for (int i = 0; i < KM; i++) if (i != p) begin
        real f;
        f = S[i][p];
        for (int j = 0; j < 2 * KM; j++) S[i][j] -= f * S[p][j];
      end
    end
    for (int i = 0; i < NS; i++) for (int j = 0; j < KM; j++) begin
      K[i][j] = 0.0;
      for (int q = 0; q < KM; q++) K[i][j] += T[i][q] * S[q][KM+j];
    end
    for (int i = 0; i < NS; i++) for (int j = 0; j < KM; j++) begin
      rd(1, j, i, v);
      near("K", i, j, v, K[i][j], 5e-3);
    end
    // ---------------- projection ----------------
    begin
      real cam [3][4];
      real pts [4][MP];
      for (int i = 0; i < 3; i++) for (int j = 0; j < 4; j++) begin
        cam[i][j] = rnd(-2.0, 2.0); wr(0, i, j, cam[i][j]); cam[i][j] = fr(to_fx(cam[i][j]));
      end
      for (int j = 0; j < MP; j++) for (int i = 0; i < 4; i++) begin
        pts[i][j] = (i == 3) ? 1.0 : rnd(-5.0, 5.0); wr(3, i, j, pts[i][j]); pts[i][j] = fr(to_fx(pts[i][j]));
      end
      issue(OP_MULT, 0, 3, 2, 3, 4, MP, 1'b0);
      wait_idle();
      for (int i = 0; i < 3; i++) for (int j = 0; j < MP; j++) begin
        real e;
        e = 0.0;
        for (int q = 0; q < 4; q++) e += cam[i][q] * pts[q][j];
        rd(2, i, j, v);
        near("proj", i, j, v, e, 1e-3);
      end
    end
    // ---------------- marginalization inverse ----------------
    begin
      localparam int NN = 10;
      real g [NN][2*NN];
      for (int i = 0; i < NN; i++) for (int j = 0; j < NN; j++) g[i][j] = 0.0;
      for (int i = 0; i < NN - 6; i++) begin
        g[i][i] = rnd(1.0, 3.0);
        for (int j = NN - 6; j < NN; j++) begin g[i][j] = rnd(-0.3, 0.3); g[j][i] = g[i][j]; end
      end
      for (int i = NN - 6; i < NN; i++) for (int j = NN - 6; j <= i; j++) begin
        g[i][j] = (i == j) ? rnd(3.0, 4.0) : rnd(-0.3, 0.3); g[j][i] = g[i][j];
      end
      for (int i = 0; i < NN; i++) for (int j = 0; j < NN; j++) begin
        wr(1, i, j, g[i][j]); g[i][j] = fr(to_fx(g[i][j]));
      end
      for (int i = 0; i < NN; i++) for (int j = NN; j < 2 * NN; j++) g[i][j] = (j - NN == i) ? 1.0 : 0.0;
      for (int p = 0; p < NN; p++) begin
        real pv;
        pv = g[p][p];
        for (int j = 0; j < 2 * NN; j++) g[p][j] /= pv;
        for (int i = 0; i < NN; i++) if (i != p) begin
          real f;
          f = g[i][p];
          for (int j = 0; j < 2 * NN; j++) g[i][j] -= f * g[p][j];
        end
      end
      issue(OP_INV, 1, 1, 0, NN, 0, NN, 1'b0);
      issue(OP_SUB, 0, 0, 3, NN, 0, NN, 1'b0);
      wait_idle();
      for (int i = 0; i < NN; i++) for (int j = 0; j < NN; j++) begin
        rd(0, i, j, v);
        near("Minv", i, j, v, g[i][NN+j], 3e-3);
        rd(3, i, j, v);
        near("zero", i, j, v, 0.0, 0.0);
      end
    end
    repeat (3) @(posedge clk);
    checks++;
    if (n_done != n_cmds) begin failures++; $display("%0d done pulses for %0d commands", n_done, n_cmds); end
    $display("commands: %0d", n_cmds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
