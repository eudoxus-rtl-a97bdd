// lk_solver: the linear least-squares solver (LSS) task of temporal matching.
//
// Takes the 2x2 Lucas-Kanade normal equations built by derivative
// calculation, G * d = -b with G = [gxx gxy; gxy gyy] and b = [bx; by], and
// solves them by Cramer's rule: det = gxx*gyy - gxy^2,
// u = -(gyy*bx - gxy*by) / det, v = -(gxx*by - gxy*bx) / det.
// The gradients upstream are central differences without the 1/2 factor,
// so G and b arrive scaled by 4 and 2; the result is corrected by SCALE
// (512 gives signed Q8.8 pixels for that scaling) and saturated to 16 bits.
// ok is false for a singular (det <= 0) system. One result per cycle,
// registered (latency 1); the divider is a single-cycle combinational
// divider, chosen for simplicity.
module lk_solver #(
  parameter int SCALE = 512
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic signed [31:0] gxx,
  input  logic signed [31:0] gxy,
  input  logic signed [31:0] gyy,
  input  logic signed [31:0] bx,
  input  logic signed [31:0] by,
  output logic out_valid,
  output logic signed [15:0] u,
  output logic signed [15:0] v,
  output logic ok
);
  logic signed [63:0] det, nu, nv, qu, qv;

  function automatic logic signed [15:0] sat16(logic signed [63:0] a);
    if (a > 64'sd32767)  return 16'sh7fff;
    if (a < -64'sd32768) return 16'sh8000;
    return a[15:0];
  endfunction

  always_comb begin
    det = 64'(gxx) * 64'(gyy) - 64'(gxy) * 64'(gxy);
    nu  = -(64'(gyy) * 64'(bx) - 64'(gxy) * 64'(by)) * 64'(SCALE);
    nv  = -(64'(gxx) * 64'(by) - 64'(gxy) * 64'(bx)) * 64'(SCALE);
    qu  = (det > 0) ? nu / det : 64'sd0;   // signed zero keeps the division signed
    qv  = (det > 0) ? nv / det : 64'sd0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; u <= '0; v <= '0; ok <= 1'b0;
    end else begin
      out_valid <= in_valid;
      u  <= sat16(qu);
      v  <= sat16(qv);
      ok <= det > 0;
    end
  end
endmodule
