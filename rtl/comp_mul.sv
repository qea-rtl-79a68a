// comp_mul: registered complex multiplier for Q2.30 operands.
//
// p = a * b, computed as re = ar*br - ai*bi, im = ar*bi + ai*br with full
// 64-bit products; the sums are scaled back to Q2.30 by an arithmetic shift
// (truncation) and the result wraps if it leaves [-2, 2). One of the two "Comp
// Mul" units of a Special Unit in the paper; the four-product form, the
// truncation and the single pipeline register are this design's choices.
// Timing: p is valid one clock after a and b.
module comp_mul
  import qea_pkg::*;
(
  input  logic  clk,
  input  cplx_t a,
  input  cplx_t b,
  output cplx_t p
);
  logic signed [2*FX_W:0] re_full, im_full;

  always_comb begin
    re_full = (2*FX_W+1)'(a.re * b.re) - (2*FX_W+1)'(a.im * b.im);
    im_full = (2*FX_W+1)'(a.re * b.im) + (2*FX_W+1)'(a.im * b.re);
  end

  always_ff @(posedge clk) begin
    p.re <= fx_t'(re_full >>> FX_FRAC);
    p.im <= fx_t'(im_full >>> FX_FRAC);
  end
endmodule
