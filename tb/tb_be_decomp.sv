// tb_be_decomp: factors random symmetric positive-definite matrices
// (S = M M^T + n I, as an innovation covariance is) of sizes 1..16 with the
// LDL^T unit and compares D and L, packed in the destination, with a
// real-valued LDL^T (tolerance 2e-3, relative for D). The upper triangle of
// the destination must stay untouched.
// The scratchpads are modelled here as word arrays with one-cycle registered
// reads, as in the backend; NMAX = 16 keeps the runs short. Before each
// command the destination is filled with a marker value, so writes outside
// the result region are caught as well. A watchdog ends a hung run.
module tb_be_decomp;
  import eudoxus_pkg::*;
  localparam int N = 16, AW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done, w_en;
  be_cmd_t cmd;
  logic [AW-1:0] a_addr, b_addr, c_raddr, w_addr;
  fx_t a_rdata, b_rdata, c_rdata, w_data;
  fx_t ma [N*N];
  fx_t mb [N*N];
  fx_t mc [N*N];
  localparam fx_t MARK = 32'h5a5a_5a5a;
  always @(posedge clk) begin
    a_rdata <= ma[a_addr];
    b_rdata <= mb[b_addr];
    c_rdata <= mc[c_raddr];
    if (w_en) mc[w_addr] <= w_data;
  end

  be_decomp #(.NMAX(N)) dut (.clk, .rst_n, .start, .cmd, .busy, .done,
    .a_addr, .a_rdata, .c_raddr, .c_rdata, .w_en, .w_addr, .w_data);
  assign b_addr = '0;

  function automatic fx_t to_fx(real r);
    return fx_t'($rtoi(r * 65536.0));
  endfunction
  function automatic real fr(fx_t v);
    return real'(v) / 65536.0;
  endfunction
  function automatic real rnd(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 100000)) / 100000.0;
  endfunction
  task automatic check_near(string what, int r, int c, real got, real exp, real tol);
    checks++;
    if (got - exp > tol || exp - got > tol) begin
      failures++;
      if (failures < 10) $display("%s[%0d][%0d] = %f, expected %f", what, r, c, got, exp);
    end
  endtask
  task automatic check_mark(int rows, int cols);
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        if ((r >= rows || c >= cols) && mc[r*N+c] !== MARK) begin
          checks++; failures++;
          if (failures < 10) $display("write outside result at [%0d][%0d]", r, c);
        end
  endtask
  // runs the command in cmd; returns the cycles from start to done
  task automatic run(output int cycles);
    for (int i = 0; i < N * N; i++) mc[i] = MARK;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    checks++;
    if (!busy && !done) begin failures++; $display("not busy after start"); end
    while (!done) begin @(negedge clk); cycles++; end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("still busy after done"); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    cmd = '0;
    cmd.src_a = 2'd0; cmd.src_b = 2'd1; cmd.dst = 2'd2;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      int n;
      real s [N][N];
      real mm [N][N];
      real l [N][N];
      real d [N];
      n = (t == 0) ? N : (t == 1) ? 1 : $urandom_range(2, N);
      for (int i = 0; i < n; i++) for (int j = 0; j < n; j++) mm[i][j] = rnd(-1.0, 1.0);
      for (int i = 0; i < n; i++)
        for (int j = 0; j < n; j++) begin
          s[i][j] = (i == j) ? real'(n) : 0.0;
          for (int q = 0; q < n; q++) s[i][j] += mm[i][q] * mm[j][q];
        end
      for (int i = 0; i < N * N; i++) ma[i] = '0;
      for (int i = 0; i < n; i++) for (int j = 0; j < n; j++) begin
        ma[i*N+j] = to_fx(s[i][j]); s[i][j] = fr(ma[i*N+j]);
      end
      for (int j = 0; j < n; j++) begin
        d[j] = s[j][j];
        for (int q = 0; q < j; q++) d[j] -= l[j][q] * l[j][q] * d[q];
        for (int i = j + 1; i < n; i++) begin
          l[i][j] = s[i][j];
          for (int q = 0; q < j; q++) l[i][j] -= l[i][q] * l[j][q] * d[q];
          l[i][j] /= d[j];
        end
      end
      cmd.op = OP_DECOMP; cmd.m = 9'(n); cmd.n = 9'(n);
      run(cyc);
      for (int i = 0; i < n; i++) begin
        check_near("D", i, i, fr(mc[i*N+i]), d[i], 2e-3 * d[i]);
        for (int j = 0; j < i; j++) check_near("L", i, j, fr(mc[i*N+j]), l[i][j], 2e-3);
        for (int j = i + 1; j < N; j++) begin
          checks++;
          if (mc[i*N+j] !== MARK) begin failures++; $display("upper triangle written"); end
        end
      end
      check_mark(n, n);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
