// tb_spm: writes random words to random addresses of a scratchpad and reads
// them back on both read ports, checking the one-cycle read latency and that
// a read of an address being written returns the old word.
module tb_spm;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0;
  logic [7:0] waddr = 0, raddr0 = 0, raddr1 = 0;
  logic [31:0] wdata = 0, rdata0, rdata1;
  logic [31:0] model [256];

  spm #(.WIDTH(32), .DEPTH(256)) dut (.clk, .we, .waddr, .wdata, .raddr0, .rdata0, .raddr1, .rdata1);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every word
    for (int a = 0; a < 256; a++) begin
      @(negedge clk); we = 1; waddr = 8'(a); wdata = $urandom; model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 2000; t++) begin
      logic [31:0] e0, e1;
      @(negedge clk);
      raddr0 = 8'($urandom); raddr1 = 8'($urandom);
      we = $urandom_range(0, 1); waddr = raddr0; wdata = $urandom;
      e0 = model[raddr0]; e1 = model[raddr1];
      if (we) model[waddr] = wdata;
      if (we && raddr1 == waddr) e1 = e1;  // old word expected
      @(posedge clk); #1;
      checks += 2;
      if (rdata0 !== e0) begin failures++; $display("port0 mismatch"); end
      if (rdata1 !== e1) begin failures++; $display("port1 mismatch"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
