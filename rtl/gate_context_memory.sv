// gate_context_memory: the single global memory of gate contexts.
//
// One gate_ctx_t (type, target qubit, control qubit) per gate number, written
// by the host through the AXI mapper and read by the QEA controller as it steps
// through the circuit. One write port, one read port, read data one clock after
// the address. The context fields and their encoding are this design's choice.
module gate_context_memory
  import qea_pkg::*;
#(
  parameter int GATE_DEPTH = 2048,
  parameter int GW         = $clog2(GATE_DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [GW-1:0] waddr,
  input  gate_ctx_t     wdata,
  input  logic          re,
  input  logic [GW-1:0] raddr,
  output gate_ctx_t     rdata
);
  gate_ctx_t mem [GATE_DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
