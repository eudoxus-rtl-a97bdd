// tb_be_mult: multiplies random Q16.16 matrices with the blocked
// multiplication unit, both C = A B and C = A B^T, for shapes that are and
// are not multiples of the tile size (and one empty shape), and compares
// every element with a real-valued product (tolerance 1e-3). It also checks
// the cycle count against tiles(m) tiles(n) (k (BLK+2) + BLK^2 + 1) + 1.
// The scratchpads are modelled here as word arrays with one-cycle registered
// reads, as in the backend; NMAX = 16 keeps the runs short. Before each
// command the destination is filled with a marker value, so writes outside
// the result region are caught as well. A watchdog ends a hung run.
module tb_be_mult;
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

  be_mult #(.NMAX(N), .BLK(4)) dut (.clk, .rst_n, .start, .cmd, .busy, .done,
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
    for (int t = 0; t < 14; t++) begin
      int m, k, n, tiles, bound;
      real rv;
      m = (t == 13) ? 0 : $urandom_range(1, N); k = $urandom_range(1, N); n = $urandom_range(1, N);
      if (t == 0) begin m = N; k = N; n = N; end
      cmd.op = OP_MULT; cmd.m = 9'(m); cmd.k = 9'(k); cmd.n = 9'(n); cmd.trans_b = t[0];
      for (int i = 0; i < N * N; i++) begin ma[i] = to_fx(rnd(-2.0, 2.0)); mb[i] = to_fx(rnd(-2.0, 2.0)); end
      run(cyc);
      for (int r = 0; r < m; r++)
        for (int c = 0; c < n; c++) begin
          rv = 0.0;
          for (int q = 0; q < k; q++)
            rv += fr(ma[r*N+q]) * (cmd.trans_b ? fr(mb[c*N+q]) : fr(mb[q*N+c]));
          check_near("C", r, c, fr(mc[r*N+c]), rv, 1e-3);
        end
      check_mark(m, n);
      tiles = ((m + 3) / 4) * ((n + 3) / 4);
      bound = tiles * (k * 6 + 17) + 3;
      checks++;
      if (cyc > bound) begin failures++; $display("%0dx%0dx%0d took %0d cycles > %0d", m, k, n, cyc, bound); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
