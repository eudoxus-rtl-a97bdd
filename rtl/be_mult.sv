// be_mult: blocked matrix multiplication unit (Mult.) of the backend,
// C = A x B or C = A x B^T, in Q16.16.
//
// The backend handles any matrix size up to NMAX by blocking: the compute
// array covers one BLK x BLK tile of C, and the unit iterates over the tiles
// of C and, within a tile, over the inner dimension k. For each k it loads a
// BLK-element column slice of A (read port A) and a BLK-element row slice of
// B, or column slice of B for B^T (read port B), both in parallel over BLK
// cycles, then updates all BLK*BLK accumulators in one cycle (an outer-
// product step on BLK*BLK multipliers). A finished tile is written out, one
// element per cycle. An empty shape (a zero dimension) finishes at once
// without writing. Elements beyond the matrix edges count as zero.
// Accumulators keep full Q32.32 products; the result is truncated to
// Q16.16. Cycles per product: tiles(m) * tiles(n) * (k * (BLK + 2) + BLK^2 + 1),
// plus one.
//
// Shapes: A is cmd.m x cmd.k (src_a), B is cmd.k x cmd.n, or cmd.n x cmd.k
// when cmd.trans_b (src_b), C is cmd.m x cmd.n (dst). The car configuration
// has a larger multiplication unit than the drone one; the paper does not
// give its size, so BLK = 4 is this design's choice.
// Lint note: loop counters are one bit wider than an array index because
// they must also hold the count NMAX itself; where they index an array
// the linter reports the truncation, which is harmless because the values
// used as indices are always below the array size.
module be_mult
  import eudoxus_pkg::*;
#(
  parameter int unsigned NMAX = 256,
  parameter int unsigned BLK  = 4,
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
  localparam int unsigned LW = $clog2(BLK + 1);
  localparam int unsigned WW = $clog2(BLK * BLK + 1);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_MAC, S_WRITE, S_NEXT} state_e;
  state_e st;

  be_cmd_t c;
  logic [DW-1:0] ti, tj, kk;
  logic [LW-1:0] lc;
  logic [WW-1:0] wc;
  fx_t  a_vec [BLK];
  fx_t  b_vec [BLK];
  logic signed [63:0] acc [BLK][BLK];

  // read addresses for load step lc
  logic [DW-1:0] ar, bc;
  always_comb begin
    ar = ti + DW'(lc);
    bc = tj + DW'(lc);
    a_addr = (ar < DW'(c.m)) ? AW'(ar) * AW'(NMAX) + AW'(kk) : '0;
    if (c.trans_b) b_addr = (bc < DW'(c.n)) ? AW'(bc) * AW'(NMAX) + AW'(kk) : '0;
    else           b_addr = (bc < DW'(c.n)) ? AW'(kk) * AW'(NMAX) + AW'(bc) : '0;
  end

  // write-back of the current tile
  logic [DW-1:0] wr, wcol;
  always_comb begin
    wr     = ti + DW'(wc / WW'(BLK));
    wcol   = tj + DW'(wc % WW'(BLK));
    w_en   = (st == S_WRITE) && (wr < DW'(c.m)) && (wcol < DW'(c.n));
    w_addr = AW'(wr) * AW'(NMAX) + AW'(wcol);
    w_data = fx_t'(acc[wc / WW'(BLK)][wc % WW'(BLK)] >>> FRAC_W);
  end

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; c <= '0; ti <= '0; tj <= '0; kk <= '0; lc <= '0; wc <= '0; done <= 1'b0;
      for (int i = 0; i < BLK; i++) begin
        a_vec[i] <= '0; b_vec[i] <= '0;
        for (int j = 0; j < BLK; j++) acc[i][j] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          c <= cmd; ti <= '0; tj <= '0; kk <= '0; lc <= '0;
          for (int i = 0; i < BLK; i++) for (int j = 0; j < BLK; j++) acc[i][j] <= '0;
          if (cmd.m == '0 || cmd.n == '0 || cmd.k == '0) done <= 1'b1;
          else st <= S_LOAD;
        end
        S_LOAD: begin
          // data of step lc-1 arrives now (registered SPM read)
          if (lc != '0) begin
            a_vec[lc - 1'b1] <= (ti + DW'(lc) - 1'b1 < DW'(c.m)) ? a_rdata : '0;
            b_vec[lc - 1'b1] <= (tj + DW'(lc) - 1'b1 < DW'(c.n)) ? b_rdata : '0;
          end
          if (lc == LW'(BLK)) st <= S_MAC;
          else lc <= lc + 1'b1;
        end
        S_MAC: begin
          for (int i = 0; i < BLK; i++)
            for (int j = 0; j < BLK; j++)
              acc[i][j] <= acc[i][j] + 64'(a_vec[i]) * 64'(b_vec[j]);
          lc <= '0;
          if (kk + 1'b1 == DW'(c.k)) begin kk <= '0; wc <= '0; st <= S_WRITE; end
          else begin kk <= kk + 1'b1; st <= S_LOAD; end
        end
        S_WRITE: begin
          if (wc + 1'b1 == WW'(BLK * BLK)) st <= S_NEXT;
          else wc <= wc + 1'b1;
        end
        S_NEXT: begin
          for (int i = 0; i < BLK; i++) for (int j = 0; j < BLK; j++) acc[i][j] <= '0;
          if (tj + DW'(BLK) < DW'(c.n)) begin tj <= tj + DW'(BLK); st <= S_LOAD; end
          else if (ti + DW'(BLK) < DW'(c.m)) begin tj <= '0; ti <= ti + DW'(BLK); st <= S_LOAD; end
          else begin done <= 1'b1; st <= S_IDLE; end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
