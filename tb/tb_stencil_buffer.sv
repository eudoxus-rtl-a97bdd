// tb_stencil_buffer: checks the stencil buffer in the configuration of the
// paper's SB figure (4 line FIFOs, a 4x3 and a 3x3 window) on a small line
// width. Pixel (r, c) of the streamed image has value (7r + 3c) mod 256, so
// every window element can be predicted from its position: after the push of
// (r, c), win_a[i][j] = pixel (r-4+i, c-2+j) and win_b[i][j] = pixel
// (r-4+i, c-2+j) for the three oldest lines. Only windows lying wholly in
// the image are checked. One pixel per cycle, with random idle cycles.
module tb_stencil_buffer;
  import eudoxus_pkg::*;
  localparam int W = 12, ROWS = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_sof = 0;
  pix_t in_pix = 0;
  logic out_valid;
  coord_t out_row, out_col;
  pix_t win_a [4][3];
  pix_t win_b [3][3];

  stencil_buffer #(.W(W), .LINES(4), .A_COLS(3), .B_ROWS(3), .B_COLS(3)) dut (
    .clk, .rst_n, .in_valid, .in_sof, .in_pix, .out_valid, .out_row, .out_col, .win_a, .win_b);

  function automatic pix_t px(int r, int c);
    return pix_t'((7 * r + 3 * c) % 256);
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker: runs on every output
  always @(posedge clk) if (rst_n && out_valid) begin
    int r, c;
    r = int'(out_row); c = int'(out_col);
    if (r >= 4 && c >= 2) begin
      for (int i = 0; i < 4; i++) for (int j = 0; j < 3; j++) begin
        checks++;
        if (win_a[i][j] !== px(r - 4 + i, c - 2 + j)) begin
          failures++;
          if (failures < 5) $display("win_a mismatch at (%0d,%0d) [%0d][%0d]: %0d vs %0d", r, c, i, j, win_a[i][j], px(r-4+i, c-2+j));
        end
      end
      for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
        checks++;
        if (win_b[i][j] !== px(r - 4 + i, c - 2 + j)) begin
          failures++;
          if (failures < 5) $display("win_b mismatch at (%0d,%0d) [%0d][%0d]", r, c, i, j);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++)
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < W; c++) begin
          @(negedge clk);
          in_valid = 1; in_sof = (r == 0 && c == 0); in_pix = px(r, c) + pix_t'(f);
          if (f == 1) in_pix = px(r, c);
          @(negedge clk);
          in_valid = 0; in_sof = 0;
          if ($urandom_range(0, 3) == 0) @(negedge clk);
        end
    repeat (5) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
