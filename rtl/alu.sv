// alu: the flexible ALU of a PE, two Special Units side by side.
//
// in[0..3] feed SU0 and in[4..7] feed SU1 (the paper's I0..I7); op-mode picks
// sparse or dense arithmetic for both. Each clock it can produce two new
// amplitudes. Timing: out valid two clocks after in.
module alu
  import qea_pkg::*;
(
  input  logic  clk,
  input  logic  dense,
  input  cplx_t in  [8],
  output cplx_t out [2]
);
  for (genvar s = 0; s < 2; s++) begin : g_su
    special_unit u_su (
      .clk,
      .dense,
      .i0 (in[4*s+0]),
      .i1 (in[4*s+1]),
      .i2 (in[4*s+2]),
      .i3 (in[4*s+3]),
      .out(out[s])
    );
  end
endmodule
