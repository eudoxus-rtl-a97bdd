// be_decomp: matrix decomposition unit (Decomp.) of the backend.
//
// Factors a symmetric positive-definite n x n matrix S (src_a, n = cmd.m)
// as S = L D L^T with L unit lower-triangular and D diagonal, in Q16.16. The
// paper asks for a decomposition followed by forward/backward substitution
// to solve S K = P H^T, and notes S is symmetric; LDL^T is chosen here
// because it uses the symmetry (only the lower triangle is read) and needs
// no square root. The result goes to dst packed: D on the diagonal, L below
// it; the upper triangle of dst is not written.
//
// Column by column (j = 0 .. n-1), with the factors already written to dst
// read back through dst's read port:
//   D_j  = S_jj - sum_{k<j} L_jk^2 D_k          (row j of L is read once,
//                                               and L_jk D_k is kept locally)
//   L_ij = (S_ij - sum_{k<j} L_ik (L_jk D_k)) / D_j   for i > j
// One multiply-accumulate per cycle and one divider; about n^3/6 cycles.
// Lint note: loop counters are one bit wider than an array index because
// they must also hold the count NMAX itself; where they index an array
// the linter reports the truncation, which is harmless because the values
// used as indices are always below the array size.
module be_decomp
  import eudoxus_pkg::*;
#(
  parameter int unsigned NMAX = 256,
  localparam int unsigned AW  = 2 * $clog2(NMAX)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  be_cmd_t       cmd,
  output logic          busy,
  output logic          done,
  output logic [AW-1:0] a_addr,
  input  fx_t           a_rdata,
  output logic [AW-1:0] c_raddr,
  input  fx_t           c_rdata,
  output logic          w_en,
  output logic [AW-1:0] w_addr,
  output fx_t           w_data
);
  localparam int unsigned DW = $clog2(NMAX + 1);
  typedef enum logic [2:0] {S_IDLE, S_ROWJ, S_DJ, S_COLI, S_LIJ} state_e;
  state_e st;

  logic [DW-1:0] n, j, i, q;
  fx_t dvec [NMAX];
  fx_t ljd  [NMAX];
  fx_t acc;
  fx_t dj;

  // read addresses
  always_comb begin
    a_addr  = '0;
    c_raddr = '0;
    unique case (st)
      S_ROWJ: begin a_addr = AW'(j) * AW'(NMAX) + AW'(j); c_raddr = AW'(j) * AW'(NMAX) + AW'(q); end
      S_COLI: begin a_addr = AW'(i) * AW'(NMAX) + AW'(j); c_raddr = AW'(i) * AW'(NMAX) + AW'(q); end
      S_DJ:   a_addr = AW'(j) * AW'(NMAX) + AW'(j);
      S_LIJ:  a_addr = AW'(i) * AW'(NMAX) + AW'(j);
      default: ;
    endcase
  end

  // writes: D_j at the end of S_DJ, L_ij in S_LIJ
  always_comb begin
    w_en   = (st == S_DJ) || (st == S_LIJ);
    w_addr = (st == S_DJ) ? AW'(j) * AW'(NMAX) + AW'(j) : AW'(i) * AW'(NMAX) + AW'(j);
    w_data = (st == S_DJ) ? a_rdata - acc : fx_div(a_rdata - acc, dj);
  end

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk) begin
    // row j of L arrives in S_ROWJ: keep L_jk * D_k
    if (st == S_ROWJ && q != '0) ljd[q - 1'b1] <= fx_mul(c_rdata, dvec[q - 1'b1]);
    if (st == S_DJ) dvec[j] <= a_rdata - acc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; n <= '0; j <= '0; i <= '0; q <= '0; acc <= '0; dj <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          n <= DW'(cmd.m); j <= '0; q <= '0; acc <= '0;
          if (cmd.m == '0) done <= 1'b1; else st <= S_ROWJ;
        end
        S_ROWJ: begin
          // issue k = q (q < j), process k = q-1
          if (q != '0) acc <= acc + fx_mul(c_rdata, fx_mul(c_rdata, dvec[q - 1'b1]));
          if (q == j) st <= S_DJ;
          else q <= q + 1'b1;
        end
        S_DJ: begin
          dj <= a_rdata - acc;
          acc <= '0; q <= '0;
          if (j + 1'b1 == n) begin done <= 1'b1; st <= S_IDLE; end
          else begin i <= j + 1'b1; st <= S_COLI; end
        end
        S_COLI: begin
          if (q != '0) acc <= acc + fx_mul(c_rdata, ljd[q - 1'b1]);
          if (q == j) st <= S_LIJ;
          else q <= q + 1'b1;
        end
        S_LIJ: begin
          acc <= '0; q <= '0;
          if (i + 1'b1 == n) begin j <= j + 1'b1; st <= S_ROWJ; end
          else begin i <= i + 1'b1; st <= S_COLI; end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
