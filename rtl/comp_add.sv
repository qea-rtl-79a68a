// comp_add: registered complex adder for Q2.30 operands.
//
// s = a + b per component, wrapping on overflow. It is the "Comp Add" that sums
// the two products of a Special Unit. Timing: s is valid one clock after a, b.
module comp_add
  import qea_pkg::*;
(
  input  logic  clk,
  input  cplx_t a,
  input  cplx_t b,
  output cplx_t s
);
  always_ff @(posedge clk) begin
    s.re <= a.re + b.re;
    s.im <= a.im + b.im;
  end
endmodule
