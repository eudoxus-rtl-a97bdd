// hamming_match: matching optimization (MO), the first task of stereo
// matching. It gives each left key point an initial right correspondence by
// comparing Hamming distances between descriptors.
//
// Features arrive from feature extraction, the left image's first, then the
// right image's. Left features are read back in order (a list); right ones
// are searched exhaustively, so they sit in a scratchpad. Both lists are
// double-buffered (two banks): feature extraction fills one bank with frame
// t+1 while this unit searches frame t in the other, which is how feature
// extraction and stereo matching are pipelined across frames. A bank is
// marked full on the right image's frame_done and freed when its search ends;
// bank_free tells feature extraction whether it may start the next pair.
//
// Search: for every left point, one right point is examined per cycle. A
// right point is a candidate when its row is within ROW_TOL of the left row
// and its disparity xl - xr is in [0, DMAX] (rectified stereo). The candidate
// with the smallest Hamming distance wins if that distance is at most HAM_TH.
// The unit thus takes at most (left count) x (right count + 3) cycles per
// frame, plus output back-pressure.
// Results leave in left raster order through a valid/ready port; list_done
// pulses when a frame's search is complete. Thresholds and the bank count
// are this design's choices.
// Lint note: the assertion's disable iff (!rst_n) makes Verilator report
// rst_n as both an asynchronous reset and a synchronous signal; the
// assertion is for simulation only, so this is expected.
module hamming_match
  import eudoxus_pkg::*;
#(
  parameter int unsigned MAX_FEAT = 1024,
  parameter int unsigned DMAX     = 64,
  parameter int unsigned ROW_TOL  = 2,
  parameter int unsigned HAM_TH   = 100
) (
  input  logic     clk,
  input  logic     rst_n,
  // from feature extraction
  input  logic     feat_valid,
  input  logic     feat_side,
  input  feature_t feat,
  input  logic     fe_frame_done,
  input  logic     fe_frame_side,
  output logic     bank_free,
  // initial correspondences
  output logic     m_valid,
  input  logic     m_ready,
  output stereo_t  m_data,
  output logic     list_done
);
  localparam int unsigned AW = $clog2(MAX_FEAT);
  localparam int unsigned CW = AW + 1;

  feature_t lmem [2][MAX_FEAT];
  feature_t rmem [2][MAX_FEAT];
  logic [CW-1:0] lcnt [2], rcnt [2];
  logic [1:0] full;
  logic wb;              // bank being written by feature extraction
  logic rb;              // bank being searched

  // ---------------- write side ----------------
  assign bank_free = !full[wb];

  always_ff @(posedge clk) begin
    if (feat_valid && !feat_side && lcnt[wb] < CW'(MAX_FEAT)) lmem[wb][lcnt[wb][AW-1:0]] <= feat;
    if (feat_valid &&  feat_side && rcnt[wb] < CW'(MAX_FEAT)) rmem[wb][rcnt[wb][AW-1:0]] <= feat;
  end

  // ---------------- search side ----------------
  typedef enum logic [1:0] {M_IDLE, M_SCAN, M_OUT, M_NEXT} mstate_e;
  mstate_e st;
  logic [CW-1:0] i, j;
  feature_t lf, rf;
  logic [8:0]  best;
  coord_t      best_xr;
  logic        cand;
  logic [8:0]  hdist;
  logic        release_bank;

  always_comb begin
    rf   = rmem[rb][j[AW-1:0]];
    hdist = 9'($countones(lf.desc ^ rf.desc));
    cand = (int'(rf.y) <= int'(lf.y) + int'(ROW_TOL)) && (int'(rf.y) + int'(ROW_TOL) >= int'(lf.y)) &&
           (lf.x >= rf.x) && (int'(lf.x) - int'(rf.x) <= int'(DMAX));
    release_bank = (st == M_NEXT) && (i + 1'b1 >= lcnt[rb]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; wb <= 1'b0; lcnt <= '{default: '0}; rcnt <= '{default: '0};
    end else begin
      if (feat_valid && !feat_side && lcnt[wb] < CW'(MAX_FEAT)) lcnt[wb] <= lcnt[wb] + 1'b1;
      if (feat_valid &&  feat_side && rcnt[wb] < CW'(MAX_FEAT)) rcnt[wb] <= rcnt[wb] + 1'b1;
      if (fe_frame_done && fe_frame_side) begin
        full[wb] <= 1'b1;
        wb       <= !wb;
      end
      if (release_bank || (st == M_IDLE && full[rb] && lcnt[rb] == '0)) begin
        full[rb] <= 1'b0;
        lcnt[rb] <= '0;
        rcnt[rb] <= '0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; rb <= 1'b0; i <= '0; j <= '0; lf <= '0; best <= '1; best_xr <= '0;
      m_valid <= 1'b0; m_data <= '0; list_done <= 1'b0;
    end else begin
      list_done <= 1'b0;
      unique case (st)
        M_IDLE: if (full[rb]) begin
          if (lcnt[rb] == '0) begin
            list_done <= 1'b1; rb <= !rb;
          end else begin
            i <= '0; j <= '0; lf <= lmem[rb][0]; best <= '1; st <= M_SCAN;
          end
        end
        M_SCAN: begin
          if (j < rcnt[rb]) begin
            if (cand && hdist < best) begin best <= hdist; best_xr <= rf.x; end
            j <= j + 1'b1;
          end else begin
            if (best <= 9'(HAM_TH)) begin
              m_valid     <= 1'b1;
              m_data.x    <= lf.x;
              m_data.y    <= lf.y;
              m_data.disp <= 8'(lf.x - best_xr);
              m_data.cost <= 16'(best);
              st <= M_OUT;
            end else st <= M_NEXT;
          end
        end
        M_OUT: if (m_ready) begin m_valid <= 1'b0; st <= M_NEXT; end
        M_NEXT: begin
          if (i + 1'b1 >= lcnt[rb]) begin
            list_done <= 1'b1; rb <= !rb; st <= M_IDLE;
          end else begin
            i <= i + 1'b1; j <= '0; best <= '1;
            lf <= lmem[rb][AW'(i + 1'b1)];
            st <= M_SCAN;
          end
        end
        default: st <= M_IDLE;
      endcase
    end
  end

  // a bank is never written while it is being searched
  assert property (@(posedge clk) disable iff (!rst_n) feat_valid |-> !(full[wb]));
endmodule
