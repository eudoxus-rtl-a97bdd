// be_subst: forward/backward substitution unit (Fwd./Bwd. Substitution) of
// the backend. With the packed LDL^T factors of an n x n matrix S in src_a
// (as written by be_decomp, n = cmd.m), it solves S X = B for the n x cmd.n
// right-hand side B in src_b and writes X to dst. For the Kalman gain this
// is the step S K = P H^T that follows the decomposition of S.
//
// Column by column of B:
//   forward   y_i = b_i - sum_{k<i} L_ik y_k      (also picks up D_i = S'_ii)
//   backward  x_i = y_i / D_i - sum_{k>i} L_ki x_k, for i = n-1 .. 0,
// with x_i written to dst as soon as it is known. y and x share one local
// vector of NMAX words. One multiply-accumulate per cycle, about n^2 + 3n
// cycles per column. Q16.16 throughout.
// Lint note: loop counters are one bit wider than an array index because
// they must also hold the count NMAX itself; where they index an array
// the linter reports the truncation, which is harmless because the values
// used as indices are always below the array size.
module be_subst
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
  output logic [AW-1:0] b_addr,
  input  fx_t           b_rdata,
  output logic          w_en,
  output logic [AW-1:0] w_addr,
  output fx_t           w_data
);
  localparam int unsigned DW = $clog2(NMAX + 1);
  typedef enum logic [2:0] {S_IDLE, S_FWD, S_FEND, S_BWD, S_BEND} state_e;
  state_e st;

  logic [DW-1:0] n, ncol, cc, i, q;
  fx_t vec  [NMAX];
  fx_t dvec [NMAX];
  fx_t acc;

  always_comb begin
    a_addr = '0;
    b_addr = AW'(i) * AW'(NMAX) + AW'(cc);
    unique case (st)
      S_FWD: a_addr = AW'(i) * AW'(NMAX) + AW'(q);   // L_iq, q = 0 .. i (q = i: D_i)
      S_BWD: a_addr = AW'(q) * AW'(NMAX) + AW'(i);   // L_qi, q = i+1 .. n-1
      default: ;
    endcase
    w_en   = (st == S_BEND);
    w_addr = AW'(i) * AW'(NMAX) + AW'(cc);
    w_data = fx_div(vec[i], dvec[i]) - acc;
  end

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk) begin
    if (st == S_FWD && q != '0 && q - 1'b1 == i) dvec[i] <= a_rdata;
    if (st == S_FEND) vec[i] <= b_rdata - acc;
    if (st == S_BEND) vec[i] <= fx_div(vec[i], dvec[i]) - acc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; n <= '0; ncol <= '0; cc <= '0; i <= '0; q <= '0; acc <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          n <= DW'(cmd.m); ncol <= DW'(cmd.n); cc <= '0; i <= '0; q <= '0; acc <= '0;
          if (cmd.m == '0 || cmd.n == '0) done <= 1'b1; else st <= S_FWD;
        end
        S_FWD: begin
          // issue q (0 .. i), process q-1 (the diagonal one is D_i)
          if (q != '0 && q - 1'b1 < i) acc <= acc + fx_mul(a_rdata, vec[q - 1'b1]);
          if (q == i + 1'b1) st <= S_FEND;
          else q <= q + 1'b1;
        end
        S_FEND: begin
          acc <= '0; q <= '0;
          if (i + 1'b1 == n) begin q <= i + 1'b1; st <= S_BWD; end
          else begin i <= i + 1'b1; st <= S_FWD; end
        end
        S_BWD: begin
          // issue q (i+1 .. n-1), process q-1 (> i)
          if (q > i + 1'b1) acc <= acc + fx_mul(a_rdata, vec[q - 1'b1]);
          if (q == n) st <= S_BEND;
          else q <= q + 1'b1;
        end
        S_BEND: begin
          acc <= '0;
          if (i == '0) begin
            if (cc + 1'b1 == ncol) begin done <= 1'b1; st <= S_IDLE; end
            else begin cc <= cc + 1'b1; i <= '0; q <= '0; st <= S_FWD; end
          end else begin
            i <= i - 1'b1; q <= i; st <= S_BWD;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
