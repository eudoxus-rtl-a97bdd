// gauss_filter: image filtering (IF), a 5x5 Gaussian smoothing stencil.
//
// The paper's image filtering task is a convolution that shares its input
// stream with feature detection; the kernel is not given. This unit uses the
// separable binomial kernel [1 4 6 4 1] x [1 4 6 4 1] / 256, a common
// Gaussian approximation, and rounds to nearest. One window in, one filtered
// pixel out per cycle, registered (latency 1).
module gauss_filter
  import eudoxus_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  pix_t win [5][5],
  output logic out_valid,
  output pix_t out_pix
);
  localparam int K [5] = '{1, 4, 6, 4, 1};
  logic [15:0] acc;

  always_comb begin
    acc = 16'd128;  // rounding
    for (int i = 0; i < 5; i++)
      for (int j = 0; j < 5; j++)
        acc += 16'(K[i] * K[j]) * 16'(win[i][j]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_pix <= '0;
    end else begin
      out_valid <= in_valid;
      out_pix   <= acc[15:8];
    end
  end
endmodule
