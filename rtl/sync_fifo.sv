// sync_fifo: generic synchronous FIFO for lists that are written and read in
// order (key points waiting for descriptor calculation, stereo matches waiting
// for disparity refinement, key points of the previous frame waiting for
// optical flow).
//
// The design uses plain FIFOs wherever a stage reads a list sequentially, as
// the paper prescribes; the paper does not describe the FIFO itself, so this
// is an ordinary circular buffer. Interface: valid/ready on both sides
// (push when in_valid && in_ready, pop when out_valid && out_ready). The head
// is shown combinationally (first-word fall-through); a pushed word is
// visible at the head the cycle after it is written. DEPTH must be a power
// of two.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wr_ptr, rd_ptr;
  logic push, pop;

  assign count     = wr_ptr - rd_ptr;
  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr[AW-1:0]];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + 1'b1;
      if (pop)  rd_ptr <= rd_ptr + 1'b1;
    end
  end

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("sync_fifo: DEPTH must be a power of two");
endmodule
