// tb_gauss_filter: random 5x5 windows into the Gaussian filter; the expected
// pixel is the 1-4-6-4-1 binomial sum divided by 256 with rounding, worked
// out here as a separable row pass then column pass.
module tb_gauss_filter;
  import eudoxus_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid;
  pix_t win [5][5];
  pix_t out_pix;

  gauss_filter dut (.clk, .rst_n, .in_valid, .win, .out_valid, .out_pix);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k [5] = '{1, 4, 6, 4, 1};
    for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++) win[i][j] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int rows [5];
      int s, e;
      @(negedge clk);
      for (int i = 0; i < 5; i++) for (int j = 0; j < 5; j++)
        win[i][j] = (t < 3) ? pix_t'(t == 0 ? 0 : (t == 1 ? 255 : 128)) : pix_t'($urandom);
      in_valid = 1;
      s = 0;
      for (int i = 0; i < 5; i++) begin
        rows[i] = 0;
        for (int j = 0; j < 5; j++) rows[i] += k[j] * int'(win[i][j]);
        s += k[i] * rows[i];
      end
      e = (s + 128) / 256;
      @(posedge clk); #1;
      checks++;
      if (!out_valid || int'(out_pix) != e) begin
        failures++; $display("mismatch: got %0d expected %0d", out_pix, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
