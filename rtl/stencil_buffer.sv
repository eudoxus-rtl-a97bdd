// stencil_buffer: the stencil buffer (SB) of the frontend.
//
// One pixel enters per push. LINES cascaded line FIFOs, each exactly one image
// line (W pixels) long, hold the most recent LINES lines. On each push every
// FIFO pops one pixel, which goes both into the FIFO above it and into the
// shift registers; the incoming pixel enters the first FIFO. Two shift-
// register windows sit on the FIFO outputs so that two stencil operations can
// share one input stream: window A spans all LINES FIFOs and A_COLS columns,
// window B spans the B_ROWS oldest FIFOs and B_COLS columns. This is the
// organisation of the paper's SB figure (4 FIFOs feeding a 4x3 and a 3x3
// shift register, the last FIFO feeding only the first window). Because the
// FIFOs are always one line long they share one column pointer, the column
// counter of the input pixel.
//
// Geometry: after the push of input pixel (row r, column c), the window
// element [i][j] holds image pixel (r - LINES + i, c - COLS + 1 + j), with
// row 0 the oldest line and column COLS-1 the newest. Outputs change the
// cycle after a push (out_valid), together with the (r, c) of that push.
// Rows count from the push marked sof and do not wrap, so a producer can
// push padding lines after a frame to flush the last centres out. Windows
// that straddle an image border hold pixels of other lines; consumers reject
// them by their centre coordinates. Line memories are not reset.
module stencil_buffer
  import eudoxus_pkg::*;
#(
  parameter int unsigned W      = 1280,
  parameter int unsigned LINES  = 4,
  parameter int unsigned A_COLS = 3,
  parameter int unsigned B_ROWS = 3,
  parameter int unsigned B_COLS = 3
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  logic   in_sof,
  input  pix_t   in_pix,
  output logic   out_valid,
  output coord_t out_row,
  output coord_t out_col,
  output pix_t   win_a [LINES][A_COLS],
  output pix_t   win_b [B_ROWS][B_COLS]
);
  pix_t   line_mem [LINES][W];
  pix_t   fifo_out [LINES];
  coord_t col, row;      // position the next pushed pixel takes
  coord_t cur_col, cur_row;

  localparam int unsigned XW = (W > 1) ? $clog2(W) : 1;
  logic [XW-1:0] cidx;   // column as a line-memory index
  assign cur_col = in_sof ? '0 : col;
  assign cur_row = in_sof ? '0 : row;
  assign cidx    = cur_col[XW-1:0];

  always_comb begin
    for (int k = 0; k < LINES; k++) fifo_out[k] = line_mem[k][cidx];
  end

  // cascaded FIFOs: FIFO 0 takes the input, FIFO k takes FIFO k-1's output
  always_ff @(posedge clk) begin
    if (in_valid) begin
      line_mem[0][cidx] <= in_pix;
      for (int k = 1; k < LINES; k++) line_mem[k][cidx] <= fifo_out[k-1];
    end
  end

  // shift registers; window row i (0 = oldest) comes from FIFO LINES-1-i
  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int i = 0; i < LINES; i++) begin
        for (int j = 0; j < int'(A_COLS) - 1; j++) win_a[i][j] <= win_a[i][j+1];
        win_a[i][A_COLS-1] <= fifo_out[LINES-1-i];
      end
      for (int i = 0; i < B_ROWS; i++) begin
        for (int j = 0; j < int'(B_COLS) - 1; j++) win_b[i][j] <= win_b[i][j+1];
        win_b[i][B_COLS-1] <= fifo_out[LINES-1-i];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col <= '0; row <= '0; out_valid <= 1'b0; out_row <= '0; out_col <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_row <= cur_row;
        out_col <= cur_col;
        if (cur_col == coord_t'(W - 1)) begin
          col <= '0;
          row <= cur_row + 1'b1;
        end else begin
          col <= cur_col + 1'b1;
          row <= cur_row;
        end
      end
    end
  end

  initial assert (B_ROWS <= LINES) else $error("stencil_buffer: B_ROWS > LINES");
endmodule
