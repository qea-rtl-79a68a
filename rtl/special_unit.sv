// special_unit (SU): two complex multiplications and one complex addition.
//
// Dense mode:  out = i0*i1 + i2*i3   (one row of a 2x2 matrix times a pair)
// Sparse mode: out = i0*i1           (a diagonal entry times one amplitude)
// As in the paper's SU drawing, the operands of the second multiplier pass
// through multiplexers steered by op-mode; in sparse mode this design feeds it
// (0, 1) so its product is zero. Which value the paper puts on the second
// multiplexer input is not readable from its figure; the zero is our choice.
// Timing: two clocks from inputs to out (multiply stage, add stage).
module special_unit
  import qea_pkg::*;
(
  input  logic  clk,
  input  logic  dense,   // op-mode: 1 dense, 0 sparse
  input  cplx_t i0,
  input  cplx_t i1,
  input  cplx_t i2,
  input  cplx_t i3,
  output cplx_t out
);
  cplx_t m2, m3, p0, p1;

  always_comb begin
    m2 = dense ? i2 : '0;
    m3 = dense ? i3 : CPLX_ONE;
  end

  comp_mul u_mul0 (.clk, .a(i0), .b(i1), .p(p0));
  comp_mul u_mul1 (.clk, .a(m2), .b(m3), .p(p1));
  comp_add u_add  (.clk, .a(p0), .b(p1), .s(out));
endmodule
