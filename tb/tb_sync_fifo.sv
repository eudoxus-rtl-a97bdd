// tb_sync_fifo: random pushes and pops against a queue model; checks data
// order, the full/empty flags and the count, including pushes while full.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_ready = 0, in_ready, out_valid;
  logic [15:0] in_data = 0, out_data;
  logic [4:0] count;
  logic [15:0] q [$];

  sync_fifo #(.WIDTH(16), .DEPTH(16)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data, .count);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // check state
      checks++;
      if (out_valid !== (q.size() != 0) || in_ready !== (q.size() != 16) || int'(count) != q.size()) begin
        failures++; $display("flag mismatch size=%0d count=%0d", q.size(), count);
      end
      if (q.size() != 0) begin
        checks++;
        if (out_data !== q[0]) begin failures++; $display("data mismatch"); end
      end
      in_valid = ($urandom_range(0, 99) < ((t / 500) % 2 ? 70 : 30));
      out_ready = ($urandom_range(0, 99) < ((t / 500) % 2 ? 30 : 70));
      in_data = 16'($urandom);
      @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model update on the clock edge
  always @(posedge clk) if (rst_n) begin
    logic do_push, do_pop;
    do_push = in_valid && (q.size() != 16);
    do_pop  = out_ready && (q.size() != 0);
    if (do_pop) void'(q.pop_front());
    if (do_push) q.push_back(in_data);
  end
endmodule
