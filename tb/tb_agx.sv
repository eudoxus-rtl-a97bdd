// tb_agx: checks the tiled address generator against a software walk of the
// same order (BLK x BLK tiles in row-major tile order, row-major inside a
// tile) for many matrix shapes, including 1 x 1, shapes that are not tile
// multiples, the full NMAX x NMAX and empty shapes (no element at all).
// step is driven randomly, so the generator must hold its element while
// step is low. Every element's row, col, address and last flag is compared,
// and each shape must visit exactly rows x cols elements.
module tb_agx;
  localparam int NMAX = 16, BLK = 4, DW = 5, AW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, step = 0, valid, last;
  logic [DW-1:0] rows, cols, row, col;
  logic [AW-1:0] addr;
  agx #(.NMAX(NMAX), .BLK(BLK)) dut (.clk, .rst_n, .start, .rows, .cols, .step, .valid,
                                     .row, .col, .addr, .last);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int m, n, r_exp [$], c_exp [$];
      r_exp.delete(); c_exp.delete();
      m = $urandom_range(0, NMAX); n = $urandom_range(0, NMAX);
      if (t == 0) begin m = 1; n = 1; end
      if (t == 1) begin m = NMAX; n = NMAX; end
      if (t == 2) begin m = 0; n = 5; end
      for (int tr = 0; tr < m; tr += BLK)
        for (int tc = 0; tc < n; tc += BLK)
          for (int ir = 0; ir < BLK && tr + ir < m; ir++)
            for (int ic = 0; ic < BLK && tc + ic < n; ic++) begin
              r_exp.push_back(tr + ir); c_exp.push_back(tc + ic);
            end
      @(negedge clk);
      start = 1; rows = DW'(m); cols = DW'(n);
      @(negedge clk);
      start = 0;
      for (int k = 0; k < r_exp.size(); k++) begin
        step = 0;
        while (!step) begin
          step = ($urandom_range(0, 2) != 0);
          checks++;
          if (!valid || row != DW'(r_exp[k]) || col != DW'(c_exp[k]) ||
              addr != AW'(r_exp[k] * NMAX + c_exp[k]) || last != (k == r_exp.size() - 1)) begin
            failures++;
            if (failures < 10)
              $display("%0dx%0d element %0d: valid=%0d (%0d,%0d) addr=%0d last=%0d, expected (%0d,%0d)",
                       m, n, k, valid, row, col, addr, last, r_exp[k], c_exp[k]);
          end
          @(negedge clk);
        end
      end
      step = 1;
      checks++;
      if (valid) begin failures++; $display("%0dx%0d: extra element", m, n); end
      @(negedge clk);
      step = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
