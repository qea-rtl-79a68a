// qea_top: the QEA core, a state-vector quantum circuit simulator.
//
// The host (through DMA and an AXI interconnect, outside this design) loads the
// initial state vector, the 2x2 matrix of every single-qubit gate and a list of
// gate contexts, writes n and the gate count with the start bit, waits for done
// and reads the final state back. Inside:
//   axi_mapper          256-bit AXI slave, address decoder, control register
//   gate_context_memory global list of gates (type, target, control)
//   qea_controller      steps through the gates one at a time
//   matrix_coordinator  copies gate matrices into every PE's Gate Memory
//   state_coordinator   moves state words between the bus and the PEs
//   cx_swapper          applies CX gates by swapping amplitudes
//   pe_array            four PEs that apply sparse and dense gates in place
// Numbers are Q2.30 fixed point. NQ_MAX sets the largest circuit (state memory
// 2^NQ_MAX amplitudes over four PEs); circuits of 3 .. NQ_MAX qubits run.
// done is also brought out as a level for an interrupt line.
module qea_top
  import qea_pkg::*;
#(
  parameter int NQ_MAX     = 17,
  parameter int GATE_DEPTH = 2048,
  parameter int ADDR_W     = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  s_axi_awvalid,
  output logic                  s_axi_awready,
  input  logic [ADDR_W-1:0]     s_axi_awaddr,
  input  logic                  s_axi_wvalid,
  output logic                  s_axi_wready,
  input  logic [AXI_DATA_W-1:0] s_axi_wdata,
  output logic                  s_axi_bvalid,
  input  logic                  s_axi_bready,
  output logic [1:0]            s_axi_bresp,
  input  logic                  s_axi_arvalid,
  output logic                  s_axi_arready,
  input  logic [ADDR_W-1:0]     s_axi_araddr,
  output logic                  s_axi_rvalid,
  input  logic                  s_axi_rready,
  output logic [AXI_DATA_W-1:0] s_axi_rdata,
  output logic [1:0]            s_axi_rresp,
  output logic                  done
);
  localparam int AW = NQ_MAX - PE_BITS;
  localparam int GW = $clog2(GATE_DEPTH);

  logic            ctrl_start, busy, cx_busy, pea_busy;
  logic [QB_W-1:0] ctrl_n, target, control;
  logic [GW:0]     ctrl_num_gates, cnt_sparse, cnt_dense, cnt_cx;
  logic            ctx_we, ctx_re;
  logic [GW-1:0]   ctx_waddr, ctx_raddr, gate_idx;
  gate_ctx_t       ctx_wdata, ctx_rdata;
  logic            mat_wr_en, mat_rd_en, mat_rvalid;
  logic [GW-1:0]   mat_wr_idx, mat_rd_idx;
  logic [AXI_DATA_W-1:0] mat_rdata, st_rdata, wr_data;
  logic            st_wr_en, st_rd_en, st_rvalid;
  logic [AW-1:0]   st_wr_word, st_rd_word;
  logic            pe_start, pe_done, cx_start, cx_done;
  gate_type_e      gtype;
  logic            cx_en, cx_we;
  logic [NQ_MAX-1:0] cx_addr0, cx_addr1;
  cplx_t           cx_wdata0, cx_wdata1, cx_rdata0, cx_rdata1;
  logic [NUM_PE-1:0] h_en;
  logic            h_we;
  logic [AW-1:0]   h_addr;
  cplx_t           h_wdata [NUM_PE];
  cplx_t           h_rdata [NUM_PE];
  logic            g_we, g_re;
  logic [GW-1:0]   g_waddr, g_raddr;
  gate_mat_t       g_wdata, g_rdata;

  axi_mapper #(.ADDR_W(ADDR_W), .GATE_DEPTH(GATE_DEPTH), .GW(GW), .NQ_MAX(NQ_MAX), .AW(AW)) u_axi (
    .clk, .rst_n,
    .s_axi_awvalid, .s_axi_awready, .s_axi_awaddr, .s_axi_wvalid, .s_axi_wready, .s_axi_wdata,
    .s_axi_bvalid, .s_axi_bready, .s_axi_bresp,
    .s_axi_arvalid, .s_axi_arready, .s_axi_araddr, .s_axi_rvalid, .s_axi_rready, .s_axi_rdata,
    .s_axi_rresp,
    .ctrl_start, .ctrl_n, .ctrl_num_gates, .stat_done(done), .stat_busy(busy),
    .stat_cnt_sparse(cnt_sparse), .stat_cnt_dense(cnt_dense), .stat_cnt_cx(cnt_cx),
    .ctx_we, .ctx_waddr, .ctx_wdata,
    .mat_wr_en, .mat_wr_idx, .mat_rd_en, .mat_rd_idx, .mat_rvalid, .mat_rdata,
    .st_wr_en, .st_wr_word, .st_rd_en, .st_rd_word, .st_rvalid, .st_rdata,
    .wr_data
  );

  gate_context_memory #(.GATE_DEPTH(GATE_DEPTH), .GW(GW)) u_ctx (
    .clk, .we(ctx_we), .waddr(ctx_waddr), .wdata(ctx_wdata),
    .re(ctx_re), .raddr(ctx_raddr), .rdata(ctx_rdata)
  );

  qea_controller #(.GATE_DEPTH(GATE_DEPTH), .GW(GW)) u_ctrl (
    .clk, .rst_n, .start(ctrl_start), .num_gates(ctrl_num_gates), .done, .busy,
    .ctx_re, .ctx_raddr, .ctx_rdata,
    .pe_start, .gtype, .target, .control, .gate_idx, .pe_done,
    .cx_start, .cx_done, .cnt_sparse, .cnt_dense, .cnt_cx
  );

  matrix_coordinator #(.GATE_DEPTH(GATE_DEPTH), .GW(GW)) u_mat (
    .clk, .rst_n,
    .wr_en(mat_wr_en), .wr_idx(mat_wr_idx), .wr_data,
    .rd_en(mat_rd_en), .rd_idx(mat_rd_idx), .rvalid(mat_rvalid), .rdata(mat_rdata),
    .g_we, .g_waddr, .g_wdata, .g_re, .g_raddr, .g_rdata
  );

  state_coordinator #(.NQ_MAX(NQ_MAX), .AW(AW)) u_st (
    .clk, .rst_n,
    .wr_en(st_wr_en), .wr_word(st_wr_word), .wr_data,
    .rd_en(st_rd_en), .rd_word(st_rd_word), .rvalid(st_rvalid), .rdata(st_rdata),
    .h_en, .h_we, .h_addr, .h_wdata, .h_rdata
  );

  cx_swapper #(.NQ_MAX(NQ_MAX)) u_cx (
    .clk, .rst_n, .start(cx_start), .n(ctrl_n), .control, .target,
    .done(cx_done), .busy(cx_busy),
    .cx_en, .cx_we, .cx_addr0, .cx_addr1, .cx_wdata0, .cx_wdata1, .cx_rdata0, .cx_rdata1
  );

  pe_array #(.NQ_MAX(NQ_MAX), .AW(AW), .GATE_DEPTH(GATE_DEPTH), .GW(GW)) u_pea (
    .clk, .rst_n, .start(pe_start), .n(ctrl_n), .model(gtype), .target, .gate_idx,
    .done(pe_done), .busy(pea_busy),
    .cx_en, .cx_we, .cx_addr0, .cx_addr1, .cx_wdata0, .cx_wdata1, .cx_rdata0, .cx_rdata1,
    .h_en, .h_we, .h_addr, .h_wdata, .h_rdata,
    .g_we, .g_waddr, .g_wdata, .h_gre(g_re), .h_graddr(g_raddr), .g_rdata
  );

  // the controller runs one unit at a time
  assert property (@(posedge clk) disable iff (!rst_n) !(cx_busy && pea_busy));
endmodule
