// spm: scratchpad memory with two synchronous read ports and one write port.
//
// The frontend keeps irregularly accessed data (the right-image descriptors
// searched by matching optimization) in scratchpads, and the backend keeps
// every operand matrix of its matrix units in scratchpads; the paper calls
// for generic SPMs and does not describe them further. This one is a word
// array with registered reads: the word at raddr appears on rdata one cycle
// later. Two read ports let a matrix unit read two operands of the same
// matrix per cycle (on an FPGA this is two block-RAM copies); a read and a
// write of the same address in one cycle return the old word.
module spm #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr0,
  output logic [WIDTH-1:0]         rdata0,
  input  logic [$clog2(DEPTH)-1:0] raddr1,
  output logic [WIDTH-1:0]         rdata1
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata0 <= mem[raddr0];
    rdata1 <= mem[raddr1];
  end
endmodule
