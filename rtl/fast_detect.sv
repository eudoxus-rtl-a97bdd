// fast_detect: feature point detection (FD) with the FAST segment test.
//
// The paper detects key points with FAST. This unit applies the standard
// FAST-9 test to a 7x7 window: the 16 pixels of the radius-3 Bresenham circle
// around the centre are compared with the centre pixel p; the centre is a
// corner when at least 9 contiguous circle pixels (circularly) are all
// brighter than p + THRESH or all darker than p - THRESH. No non-maximum
// suppression is done (the paper does not mention one). Centres closer than
// BORDER pixels to the image edge are rejected so that every accepted point
// can later get a full descriptor patch.
//
// Interface: win/cx/cy/in_valid describe one 7x7 window per cycle;
// out_valid/corner/x/y are registered one cycle later. Threshold and border
// are this design's choices.
module fast_detect
  import eudoxus_pkg::*;
#(
  parameter int unsigned W      = 1280,
  parameter int unsigned H      = 720,
  parameter int unsigned THRESH = 20,
  parameter int unsigned BORDER = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  pix_t   win [7][7],
  input  logic signed [COORD_W:0] cx,
  input  logic signed [COORD_W:0] cy,
  output logic   out_valid,
  output logic   corner,
  output coord_t x,
  output coord_t y
);
  // circle offsets (row, col) relative to the centre, in circular order
  localparam int CR [16] = '{-3,-3,-2,-1, 0, 1, 2, 3, 3, 3, 2, 1, 0,-1,-2,-3};
  localparam int CC [16] = '{ 0, 1, 2, 3, 3, 3, 2, 1, 0,-1,-2,-3,-3,-3,-2,-1};

  logic [15:0] brighter, darker;
  logic        is_corner, in_img;

  always_comb begin
    int p, q;
    p = int'(win[3][3]);
    for (int i = 0; i < 16; i++) begin
      q = int'(win[3 + CR[i]][3 + CC[i]]);
      brighter[i] = q > p + int'(THRESH);
      darker[i]   = q < p - int'(THRESH);
    end
    is_corner = 1'b0;
    for (int s = 0; s < 16; s++) begin
      logic all_b, all_d;
      all_b = 1'b1; all_d = 1'b1;
      for (int k = 0; k < 9; k++) begin
        all_b &= brighter[(s + k) % 16];
        all_d &= darker[(s + k) % 16];
      end
      if (all_b || all_d) is_corner = 1'b1;
    end
    in_img = (cx >= $signed((COORD_W+1)'(BORDER))) && (cx < $signed((COORD_W+1)'(W - BORDER))) &&
             (cy >= $signed((COORD_W+1)'(BORDER))) && (cy < $signed((COORD_W+1)'(H - BORDER)));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; corner <= 1'b0; x <= '0; y <= '0;
    end else begin
      out_valid <= in_valid;
      corner    <= in_valid && is_corner && in_img;
      x         <= coord_t'(cx);
      y         <= coord_t'(cy);
    end
  end
endmodule
