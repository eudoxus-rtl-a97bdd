// be_inverse: matrix inverse unit (Inv.) of the backend, specialised for the
// matrix that marginalization inverts.
//
// That matrix is symmetric with the block structure M = [A B; B^T D], where
// A is diagonal (nd x nd) and D is 6 x 6 (6 = degrees of freedom of a pose).
// As the paper prescribes, the hardware is a 6 x 6 inverter combined with
// reciprocal logic for the diagonal part. With n = cmd.m and nd = n - 6:
//   1. ainv_i = 1 / A_ii                         (reciprocals, 1 per cycle)
//   2. E = A^-1 B  (row i of B scaled by ainv_i), and the Schur complement
//      Sc = D - B^T E, accumulated row by row of B (36 MACs per row)
//   3. Si = Sc^-1 by Gauss-Jordan elimination without pivoting (Sc is
//      positive definite when M is), 2 cycles per pivot
//   4. write M^-1 = [A^-1 + F E^T, -F; -F^T, Si] with F = E Si, one element
//      per cycle.
// Inputs come from src_a, the inverse goes to dst. Local storage: ainv, E
// and F (NMAX x 6 words each). Q16.16 throughout; cmd.m must be at least 6.
// Lint note: loop counters are one bit wider than an array index because
// they must also hold the count NMAX itself; where they index an array
// the linter reports the truncation, which is harmless because the values
// used as indices are always below the array size.
module be_inverse
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
  output logic          w_en,
  output logic [AW-1:0] w_addr,
  output fx_t           w_data
);
  localparam int unsigned DW = $clog2(NMAX + 1);
  localparam int unsigned QW = (DW > 6) ? DW : 6;   // q also counts the 36 words of D
  localparam fx_t ONE = fx_t'(1 << FRAC_W);

  typedef enum logic [3:0] {S_IDLE, S_DIAG, S_DBLK, S_BROW, S_BUPD, S_GJ_SCALE, S_GJ_ELIM,
                            S_W_BR, S_W_TR, S_W_BL, S_W_TL} state_e;
  state_e st;

  logic [DW-1:0] nd, i, jx;
  logic [QW-1:0] q;
  logic [2:0]    p;
  fx_t ainv [NMAX];
  fx_t e    [NMAX][6];
  fx_t f    [NMAX][6];
  fx_t sc   [6][12];
  fx_t brow [6];

  // ---------------- reads ----------------
  always_comb begin
    a_addr = '0;
    unique case (st)
      S_DIAG: a_addr = AW'(q) * AW'(NMAX) + AW'(q);
      S_DBLK: a_addr = AW'(nd + DW'(q / 6)) * AW'(NMAX) + AW'(nd + DW'(q % 6));
      S_BROW: a_addr = AW'(i) * AW'(NMAX) + AW'(nd + q);
      default: ;
    endcase
  end

  // F = E * Si for row i, used while writing the off-diagonal blocks
  fx_t frow [6];
  always_comb begin
    for (int c = 0; c < 6; c++) begin
      frow[c] = '0;
      for (int r = 0; r < 6; r++) frow[c] += fx_mul(e[i][r], sc[r][6 + c]);
    end
  end

  // ---------------- writes ----------------
  fx_t tl_sum;
  always_comb begin
    w_en = 1'b0; w_addr = '0; w_data = '0;
    tl_sum = (i == jx) ? ainv[i] : '0;
    for (int r = 0; r < 6; r++) tl_sum += fx_mul(f[i][r], e[jx][r]);
    unique case (st)
      S_W_BR: begin
        w_en = 1'b1;
        w_addr = AW'(nd + DW'(q / 6)) * AW'(NMAX) + AW'(nd + DW'(q % 6));
        w_data = sc[q / 6][6 + q % 6];
      end
      S_W_TR: begin
        w_en = 1'b1;
        w_addr = AW'(i) * AW'(NMAX) + AW'(nd + q);
        w_data = -frow[q];
      end
      S_W_BL: begin
        w_en = 1'b1;
        w_addr = AW'(nd + q) * AW'(NMAX) + AW'(i);
        w_data = -f[i][q];
      end
      S_W_TL: begin
        w_en = 1'b1;
        w_addr = AW'(i) * AW'(NMAX) + AW'(jx);
        w_data = tl_sum;
      end
      default: ;
    endcase
  end

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk) begin
    if (st == S_DIAG && q != '0) ainv[q - 1'b1] <= fx_div(ONE, a_rdata);
    if (st == S_BUPD) for (int c = 0; c < 6; c++) e[i][c] <= fx_mul(brow[c], ainv[i]);
    if (st == S_W_TR && q == '0) for (int c = 0; c < 6; c++) f[i][c] <= frow[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; nd <= '0; i <= '0; jx <= '0; q <= '0; p <= '0; done <= 1'b0;
      for (int r = 0; r < 6; r++) begin
        brow[r] <= '0;
        for (int c = 0; c < 12; c++) sc[r][c] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          nd <= DW'(cmd.m) - DW'(6); q <= '0; i <= '0;
          if (cmd.m < 6) done <= 1'b1;
          else if (cmd.m == 6) st <= S_DBLK;
          else st <= S_DIAG;
        end
        // 1. reciprocals: issue q, process q-1
        S_DIAG: begin
          if (q == QW'(nd)) begin q <= '0; st <= S_DBLK; end
          else q <= q + 1'b1;
        end
        // D block into the left half of the augmented matrix, identity right
        S_DBLK: begin
          if (q != '0) begin
            sc[(q - 1'b1) / 6][(q - 1'b1) % 6] <= a_rdata;
            sc[(q - 1'b1) / 6][6 + (q - 1'b1) % 6] <= ((q - 1'b1) / 6 == (q - 1'b1) % 6) ? ONE : '0;
          end
          if (q == QW'(36)) begin
            q <= '0; i <= '0;
            if (nd == '0) begin p <= '0; st <= S_GJ_SCALE; end
            else st <= S_BROW;
          end else q <= q + 1'b1;
        end
        // 2. row i of B (6 words), then update E and Sc
        S_BROW: begin
          if (q != '0) brow[q - 1'b1] <= a_rdata;
          if (q == QW'(6)) st <= S_BUPD;
          else q <= q + 1'b1;
        end
        S_BUPD: begin
          for (int r = 0; r < 6; r++)
            for (int c = 0; c < 6; c++)
              sc[r][c] <= sc[r][c] - fx_mul(brow[r], fx_mul(brow[c], ainv[i]));
          q <= '0;
          if (i + 1'b1 == nd) begin p <= '0; st <= S_GJ_SCALE; end
          else begin i <= i + 1'b1; st <= S_BROW; end
        end
        // 3. Gauss-Jordan on [Sc | I]
        S_GJ_SCALE: begin
          for (int c = 0; c < 12; c++) sc[p][c] <= fx_mul(sc[p][c], fx_div(ONE, sc[p][p]));
          st <= S_GJ_ELIM;
        end
        S_GJ_ELIM: begin
          for (int r = 0; r < 6; r++)
            if (r != int'(p))
              for (int c = 0; c < 12; c++) sc[r][c] <= sc[r][c] - fx_mul(sc[r][p], sc[p][c]);
          if (p == 3'd5) begin q <= '0; st <= S_W_BR; end
          else begin p <= p + 1'b1; st <= S_GJ_SCALE; end
        end
        // 4. write the inverse
        S_W_BR: begin
          if (q == QW'(35)) begin
            q <= '0; i <= '0;
            if (nd == '0) begin done <= 1'b1; st <= S_IDLE; end
            else st <= S_W_TR;
          end else q <= q + 1'b1;
        end
        S_W_TR: begin
          if (q == QW'(5)) begin
            q <= '0;
            if (i + 1'b1 == nd) begin i <= '0; st <= S_W_BL; end
            else i <= i + 1'b1;
          end else q <= q + 1'b1;
        end
        S_W_BL: begin
          if (q == QW'(5)) begin
            q <= '0;
            if (i + 1'b1 == nd) begin i <= '0; jx <= '0; st <= S_W_TL; end
            else i <= i + 1'b1;
          end else q <= q + 1'b1;
        end
        S_W_TL: begin
          if (jx + 1'b1 == nd) begin
            jx <= '0;
            if (i + 1'b1 == nd) begin done <= 1'b1; st <= S_IDLE; end
            else i <= i + 1'b1;
          end else jx <= jx + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
