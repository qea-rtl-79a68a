// data_coordinator: the port arbiter of a PE's Load/Store Unit.
//
// Three clients share the two ports of the State Memory:
//   compute (c*)  the PE's own gate pipeline, both ports
//   CX swapper (x*) the CX bus, port A for CX_addr0 and port B for CX_addr1
//   host (h*)     the State Coordinator's load/store, port A only
// Fixed priority compute > CX > host, decided per port and per clock. The QEA
// controller never runs the PE pipeline and the CX swapper together, and the
// host only loads or reads the state while the core is idle, so the priority
// only matters for misuse. The Gate Memory read port is likewise shared between
// the PE controller (gate values for the next gate) and host read-back.
// Read data of both memories goes straight back to every client. The paper
// names this block; the arbitration scheme is this design's choice.
// Purely combinational.
module data_coordinator
  import qea_pkg::*;
#(
  parameter int NQ_MAX     = 17,
  parameter int AW         = NQ_MAX - PE_BITS,
  parameter int GATE_DEPTH = 2048,
  parameter int GW         = $clog2(GATE_DEPTH)
) (
  // compute pipeline
  input  logic          ca_en, ca_we,
  input  logic [AW-1:0] ca_addr,
  input  cplx_t         ca_wdata,
  input  logic          cb_en, cb_we,
  input  logic [AW-1:0] cb_addr,
  input  cplx_t         cb_wdata,
  // CX swapper bus
  input  logic          xa_en, xa_we,
  input  logic [AW-1:0] xa_addr,
  input  cplx_t         xa_wdata,
  input  logic          xb_en, xb_we,
  input  logic [AW-1:0] xb_addr,
  input  cplx_t         xb_wdata,
  // host load/store
  input  logic          h_en, h_we,
  input  logic [AW-1:0] h_addr,
  input  cplx_t         h_wdata,
  // State Memory ports
  output logic          a_en, a_we,
  output logic [AW-1:0] a_addr,
  output cplx_t         a_wdata,
  output logic          b_en, b_we,
  output logic [AW-1:0] b_addr,
  output cplx_t         b_wdata,
  // Gate Memory read sharing
  input  logic          pc_gre,
  input  logic [GW-1:0] pc_graddr,
  input  logic          h_gre,
  input  logic [GW-1:0] h_graddr,
  output logic          g_re,
  output logic [GW-1:0] g_raddr
);
  always_comb begin
    if (ca_en) begin
      a_en = 1'b1; a_we = ca_we; a_addr = ca_addr; a_wdata = ca_wdata;
    end else if (xa_en) begin
      a_en = 1'b1; a_we = xa_we; a_addr = xa_addr; a_wdata = xa_wdata;
    end else begin
      a_en = h_en; a_we = h_we;  a_addr = h_addr;  a_wdata = h_wdata;
    end

    if (cb_en) begin
      b_en = 1'b1; b_we = cb_we; b_addr = cb_addr; b_wdata = cb_wdata;
    end else begin
      b_en = xb_en; b_we = xb_we; b_addr = xb_addr; b_wdata = xb_wdata;
    end

    g_re    = pc_gre | h_gre;
    g_raddr = pc_gre ? pc_graddr : h_graddr;
  end
endmodule
