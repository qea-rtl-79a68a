// pe: one Processing Element of the QEA array ("open PE").
//
// Contents, as in the paper's PE drawing: a Load/Store Unit (Data Coordinator,
// State Memory, Gate Memory), the Val0..Val3 gate-value registers, the Input
// Selector, the two-SU ALU and the PE Controller. The PE owns one quarter of
// the state vector. It is "open": the words its two State Memory ports read
// (sh_a, sh_b) leave the PE as shared State Data, and the words a partner PE
// read come in (par_a, par_b), so a pair split across two PEs is computed
// without copying data around.
//
// Interfaces: gate start/done from the QEA controller; a host load/store port
// (State Coordinator, local addresses); the CX bus ports A and B (CX swapper,
// local addresses); the Gate Memory write port (Matrix Coordinator) and a host
// read port for Gate Memory. Timing: see pe_controller; all memory reads have
// one clock of latency.
module pe
  import qea_pkg::*;
#(
  parameter int NQ_MAX     = 17,
  parameter int AW         = NQ_MAX - PE_BITS,
  parameter int GATE_DEPTH = 2048,
  parameter int GW         = $clog2(GATE_DEPTH),
  parameter logic [PE_BITS-1:0] PE_ID = '0
) (
  input  logic            clk,
  input  logic            rst_n,
  // gate control
  input  logic            start,
  input  logic [QB_W-1:0] n,
  input  gate_type_e      model,
  input  logic [QB_W-1:0] target,
  input  logic [GW-1:0]   gate_idx,
  output logic            done,
  output logic            busy,
  // shared State Data
  output cplx_t           sh_a,
  output cplx_t           sh_b,
  input  cplx_t           par_a,
  input  cplx_t           par_b,
  // CX bus
  input  logic            xa_en, xa_we,
  input  logic [AW-1:0]   xa_addr,
  input  cplx_t           xa_wdata,
  input  logic            xb_en, xb_we,
  input  logic [AW-1:0]   xb_addr,
  input  cplx_t           xb_wdata,
  // host state load/store (read data is sh_a)
  input  logic            h_en, h_we,
  input  logic [AW-1:0]   h_addr,
  input  cplx_t           h_wdata,
  // gate data
  input  logic            g_we,
  input  logic [GW-1:0]   g_waddr,
  input  gate_mat_t       g_wdata,
  input  logic            h_gre,
  input  logic [GW-1:0]   h_graddr,
  output gate_mat_t       g_rdata
);
  logic          ca_en, ca_we, cb_en, cb_we;
  logic [AW-1:0] ca_addr, cb_addr;
  logic          a_en, a_we, b_en, b_we;
  logic [AW-1:0] a_addr, b_addr;
  cplx_t         a_wdata, b_wdata;
  logic          pc_gre, g_re, val_load;
  logic [GW-1:0] pc_graddr, g_raddr;
  pe_op_e        op;
  logic          lower, sel_a, sel_b, dense;
  cplx_t         val [4];
  cplx_t         alu_in [8];
  cplx_t         alu_out [2];

  pe_controller #(.NQ_MAX(NQ_MAX), .AW(AW), .GATE_DEPTH(GATE_DEPTH), .GW(GW), .PE_ID(PE_ID)) u_ctrl (
    .clk, .rst_n, .start, .n, .model, .target, .gate_idx, .done, .busy,
    .gre(pc_gre), .graddr(pc_graddr), .val_load,
    .op, .lower, .sel_a, .sel_b,
    .ca_en, .ca_we, .ca_addr, .cb_en, .cb_we, .cb_addr
  );

  data_coordinator #(.NQ_MAX(NQ_MAX), .AW(AW), .GATE_DEPTH(GATE_DEPTH), .GW(GW)) u_dc (
    .ca_en, .ca_we, .ca_addr, .ca_wdata(alu_out[0]),
    .cb_en, .cb_we, .cb_addr, .cb_wdata(alu_out[1]),
    .xa_en, .xa_we, .xa_addr, .xa_wdata,
    .xb_en, .xb_we, .xb_addr, .xb_wdata,
    .h_en, .h_we, .h_addr, .h_wdata,
    .a_en, .a_we, .a_addr, .a_wdata,
    .b_en, .b_we, .b_addr, .b_wdata,
    .pc_gre, .pc_graddr, .h_gre, .h_graddr, .g_re, .g_raddr
  );

  state_memory #(.NQ_MAX(NQ_MAX), .DEPTH(1 << AW), .AW(AW)) u_smem (
    .clk,
    .a_en, .a_we, .a_addr, .a_wdata, .a_rdata(sh_a),
    .b_en, .b_we, .b_addr, .b_wdata, .b_rdata(sh_b)
  );

  gate_memory #(.GATE_DEPTH(GATE_DEPTH), .GW(GW)) u_gmem (
    .clk, .we(g_we), .waddr(g_waddr), .wdata(g_wdata),
    .re(g_re), .raddr(g_raddr), .rdata(g_rdata)
  );

  // Val0..Val3: the current gate's matrix, loaded once per gate
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      val <= '{default: '0};
    end else if (val_load) begin
      val[0] <= g_rdata.u00;
      val[1] <= g_rdata.u01;
      val[2] <= g_rdata.u10;
      val[3] <= g_rdata.u11;
    end
  end

  input_selector u_sel (
    .op, .lower, .sel_a, .sel_b,
    .own_a(sh_a), .own_b(sh_b), .par_a, .par_b,
    .val, .alu_in, .dense
  );

  alu u_alu (.clk, .dense, .in(alu_in), .out(alu_out));
endmodule
