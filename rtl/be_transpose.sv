// be_transpose: matrix transpose unit (Tp.) of the backend, C = A^T.
//
// A is cmd.m x cmd.n in scratchpad src_a, C is written to scratchpad dst.
// Addresses come from the tiled address generator (agx): one element is
// read per cycle and written one cycle later to the mirrored position, so a
// transpose takes m*n + 2 cycles after start. done pulses once when the last
// element is written. Matrices are stored row-major with row stride NMAX.
module be_transpose
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
  output logic          w_en,
  output logic [AW-1:0] w_addr,
  output fx_t           w_data
);
  localparam int unsigned DW = $clog2(NMAX + 1);
  logic          g_valid, g_last;
  logic [DW-1:0] g_row, g_col;
  logic [AW-1:0] g_addr;
  logic          p_valid, p_last;
  logic [AW-1:0] p_waddr;

  agx #(.NMAX(NMAX), .BLK(BLK)) u_agx (
    .clk, .rst_n, .start, .rows(DW'(cmd.m)), .cols(DW'(cmd.n)), .step(1'b1),
    .valid(g_valid), .row(g_row), .col(g_col), .addr(g_addr), .last(g_last));

  assign a_addr = g_addr;
  assign w_en   = p_valid;
  assign w_addr = p_waddr;
  assign w_data = a_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid <= 1'b0; p_last <= 1'b0; p_waddr <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      p_valid <= g_valid;
      p_last  <= g_valid && g_last;
      p_waddr <= AW'(g_col) * AW'(NMAX) + AW'(g_row);
      done    <= p_valid && p_last;
      if (start) busy <= 1'b1;
      else if (p_valid && p_last) busy <= 1'b0;
    end
  end
endmodule
