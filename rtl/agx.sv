// agx: address generation for the backend's element-wise matrix units.
//
// Walks the elements of a rows x cols matrix block by block: BLK x BLK tiles
// in row-major tile order, row-major inside a tile, skipping elements outside
// the matrix. It emits one (row, col) pair and its scratchpad address
// (row * NMAX + col) per cycle while `step` is high; `last` marks the final
// element. The paper names an address generation block (AGX) in the backend
// but does not describe it; tiled order is this design's choice, made to
// match the blocked way the other matrix units traverse matrices.
module agx #(
  parameter int unsigned NMAX = 256,
  parameter int unsigned BLK  = 4,
  localparam int unsigned DW  = $clog2(NMAX + 1),
  localparam int unsigned AW  = 2 * $clog2(NMAX)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,    // load dimensions, first element next cycle
  input  logic [DW-1:0] rows,
  input  logic [DW-1:0] cols,
  input  logic          step,     // advance to the next element
  output logic          valid,    // row/col/addr are an element to visit
  output logic [DW-1:0] row,
  output logic [DW-1:0] col,
  output logic [AW-1:0] addr,
  output logic          last
);
  logic [DW-1:0] nr, nc, tr, tc, ir, ic;   // dims, tile origin, offset in tile
  logic [DW-1:0] tile_h, tile_w;

  always_comb begin
    tile_h = (nr - tr < DW'(BLK)) ? nr - tr : DW'(BLK);
    tile_w = (nc - tc < DW'(BLK)) ? nc - tc : DW'(BLK);
    row    = tr + ir;
    col    = tc + ic;
    addr   = AW'(row) * AW'(NMAX) + AW'(col);
    last   = valid && (ic + 1'b1 == tile_w) && (ir + 1'b1 == tile_h) &&
             (tc + tile_w == nc) && (tr + tile_h == nr);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0; nr <= '0; nc <= '0; tr <= '0; tc <= '0; ir <= '0; ic <= '0;
    end else if (start) begin
      nr <= rows; nc <= cols; tr <= '0; tc <= '0; ir <= '0; ic <= '0;
      valid <= (rows != '0) && (cols != '0);
    end else if (step && valid) begin
      if (last) valid <= 1'b0;
      else if (ic + 1'b1 < tile_w) ic <= ic + 1'b1;
      else begin
        ic <= '0;
        if (ir + 1'b1 < tile_h) ir <= ir + 1'b1;
        else begin
          ir <= '0;
          if (tc + tile_w < nc) tc <= tc + tile_w;
          else begin tc <= '0; tr <= tr + tile_h; end
        end
      end
    end
  end
endmodule
