// gate_memory: one PE's local store of 2x2 gate matrices.
//
// One 256-bit word (u00, u01, u10, u11) per gate number, GATE_DEPTH words.
// Written by the Matrix Coordinator, read by the PE controller once per gate
// (and by the host for read-back). Simple dual port: one write port, one read
// port, read data one clock after the address. Not reset.
module gate_memory
  import qea_pkg::*;
#(
  parameter int GATE_DEPTH = 2048,
  parameter int GW         = $clog2(GATE_DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [GW-1:0] waddr,
  input  gate_mat_t     wdata,
  input  logic          re,
  input  logic [GW-1:0] raddr,
  output gate_mat_t     rdata
);
  gate_mat_t mem [GATE_DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
