// be_misc: the backend's miscellaneous element-wise logic, C = A + B or
// C = A - B (for instance adding the noise matrix R in S = H P H^T + R).
//
// The paper lumps the backend logic that is not one of the five matrix
// blocks into "Misc." and gives addition as its example; subtraction is
// added here because the same adder does it. A (src_a, read port 0) and B
// (src_b, read port 1) are cmd.m x cmd.n; the tiled address generator walks
// them and one result is written per cycle to dst, one cycle after the
// reads (m*n + 2 cycles in all). Sums wrap in Q16.16.
module be_misc
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
  logic          g_valid, g_last;
  logic [DW-1:0] g_row, g_col;
  logic [AW-1:0] g_addr;
  logic          p_valid, p_last, sub;

  agx #(.NMAX(NMAX), .BLK(BLK)) u_agx (
    .clk, .rst_n, .start, .rows(DW'(cmd.m)), .cols(DW'(cmd.n)), .step(1'b1),
    .valid(g_valid), .row(g_row), .col(g_col), .addr(g_addr), .last(g_last));

  assign a_addr = g_addr;
  assign b_addr = g_addr;
  assign w_en   = p_valid;
  assign w_data = sub ? a_rdata - b_rdata : a_rdata + b_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid <= 1'b0; p_last <= 1'b0; w_addr <= '0; busy <= 1'b0; done <= 1'b0; sub <= 1'b0;
    end else begin
      p_valid <= g_valid;
      p_last  <= g_valid && g_last;
      w_addr  <= g_addr;
      done    <= p_valid && p_last;
      if (start) begin busy <= 1'b1; sub <= (cmd.op == OP_SUB); end
      else if (p_valid && p_last) busy <= 1'b0;
    end
  end
endmodule
