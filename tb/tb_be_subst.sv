// tb_be_subst: gives the substitution unit packed LDL^T factors of
// random symmetric positive-definite systems and random right-hand sides
// (n x r, several sizes, including n = 1 and r = 1) and compares the
// solution X of L D L^T X = B with a real-valued solve (tolerance 2e-3).
// The scratchpads are modelled here as word arrays with one-cycle registered
// reads, as in the backend; NMAX = 16 keeps the runs short. Before each
// command the destination is filled with a marker value, so writes outside
// the result region are caught as well. A watchdog ends a hung run.
module tb_be_subst;
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

  be_subst #(.NMAX(N)) dut (.clk, .rst_n, .start, .cmd, .busy, .done,
    .a_addr, .a_rdata, .b_addr, .b_rdata, .w_en, .w_addr, .w_data);
  assign c_raddr = '0;

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
      int n, nr;
      real l [N][N];
      real d [N];
      real y [N];
      real x [N];
      n = (t == 0) ? N : (t == 1) ? 1 : $urandom_range(2, N);
      nr = (t == 2) ? 1 : $urandom_range(1, N);
      for (int i = 0; i < N * N; i++) begin ma[i] = '0; mb[i] = '0; end
      for (int i = 0; i < n; i++) begin
        ma[i*N+i] = to_fx(rnd(0.5, 4.0)); d[i] = fr(ma[i*N+i]);
        for (int j = 0; j < i; j++) begin ma[i*N+j] = to_fx(rnd(-0.5, 0.5)); l[i][j] = fr(ma[i*N+j]); end
        for (int j = 0; j < nr; j++) mb[i*N+j] = to_fx(rnd(-2.0, 2.0));
      end
      cmd.op = OP_SUBST; cmd.m = 9'(n); cmd.n = 9'(nr);
      run(cyc);
      for (int c = 0; c < nr; c++) begin
        for (int i = 0; i < n; i++) begin
          y[i] = fr(mb[i*N+c]);
          for (int q = 0; q < i; q++) y[i] -= l[i][q] * y[q];
        end
        for (int i = n - 1; i >= 0; i--) begin
          x[i] = y[i] / d[i];
          for (int q = i + 1; q < n; q++) x[i] -= l[q][i] * x[q];
        end
        for (int i = 0; i < n; i++) check_near("X", i, c, fr(mc[i*N+c]), x[i], 2e-3 * (1.0 + (x[i] > 0 ? x[i] : -x[i])));
      end
      check_mark(n, nr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
