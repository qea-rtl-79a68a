// pe_array: the Processing Element Array, four PEs and the buses between them.
//
// Amplitude i of the 2^n state vector lives in PE i[1:0] at local address i>>2
// (interleaved distribution, this design's choice; the paper only says the
// vector is split equally). Three connections run along the array:
//   shared State Data : for a dense gate whose index stride 2^b is 1 or 2, PE p
//                       receives the read data of PE p xor 2^b, its pair partner
//   CX bus            : two global addresses from the CX swapper; addr0 uses
//                       port A and addr1 port B of the PE its low bits select;
//                       read data returns one clock later
//   host buses        : per-PE state load/store from the State Coordinator and
//                       a broadcast Gate Memory write from the Matrix Coordinator
// All four PEs are started together, run in lock step and finish together;
// done is PE0's done. n and target must stay stable while a gate runs.
module pe_array
  import qea_pkg::*;
#(
  parameter int NQ_MAX     = 17,
  parameter int AW         = NQ_MAX - PE_BITS,
  parameter int GATE_DEPTH = 2048,
  parameter int GW         = $clog2(GATE_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [QB_W-1:0]   n,
  input  gate_type_e        model,
  input  logic [QB_W-1:0]   target,
  input  logic [GW-1:0]     gate_idx,
  output logic              done,
  output logic              busy,
  // CX bus (global amplitude addresses)
  input  logic              cx_en,
  input  logic              cx_we,
  input  logic [NQ_MAX-1:0] cx_addr0,
  input  logic [NQ_MAX-1:0] cx_addr1,
  input  cplx_t             cx_wdata0,
  input  cplx_t             cx_wdata1,
  output cplx_t             cx_rdata0,
  output cplx_t             cx_rdata1,
  // host state load/store, one amplitude per PE
  input  logic [NUM_PE-1:0] h_en,
  input  logic              h_we,
  input  logic [AW-1:0]     h_addr,
  input  cplx_t             h_wdata [NUM_PE],
  output cplx_t             h_rdata [NUM_PE],
  // gate data
  input  logic              g_we,
  input  logic [GW-1:0]     g_waddr,
  input  gate_mat_t         g_wdata,
  input  logic              h_gre,
  input  logic [GW-1:0]     h_graddr,
  output gate_mat_t         g_rdata
);
  cplx_t            sh_a [NUM_PE];
  cplx_t            sh_b [NUM_PE];
  cplx_t            par_a [NUM_PE];
  cplx_t            par_b [NUM_PE];
  logic [NUM_PE-1:0] pe_done, pe_busy;
  gate_mat_t        pe_grd [NUM_PE];
  logic [QB_W-1:0]  bpos;
  logic [PE_BITS-1:0] sel0_q, sel1_q;

  always_comb bpos = n - target - QB_W'(1);

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    logic [PE_BITS-1:0] partner;
    always_comb begin
      partner  = PE_BITS'(p) ^ (bpos == 0 ? PE_BITS'(1) : PE_BITS'(2));
      par_a[p] = sh_a[partner];
      par_b[p] = sh_b[partner];
    end

    pe #(.NQ_MAX(NQ_MAX), .AW(AW), .GATE_DEPTH(GATE_DEPTH), .GW(GW), .PE_ID(PE_BITS'(p))) u_pe (
      .clk, .rst_n, .start, .n, .model, .target, .gate_idx,
      .done(pe_done[p]), .busy(pe_busy[p]),
      .sh_a(sh_a[p]), .sh_b(sh_b[p]), .par_a(par_a[p]), .par_b(par_b[p]),
      .xa_en(cx_en && cx_addr0[PE_BITS-1:0] == PE_BITS'(p)), .xa_we(cx_we),
      .xa_addr(cx_addr0[NQ_MAX-1:PE_BITS]), .xa_wdata(cx_wdata0),
      .xb_en(cx_en && cx_addr1[PE_BITS-1:0] == PE_BITS'(p)), .xb_we(cx_we),
      .xb_addr(cx_addr1[NQ_MAX-1:PE_BITS]), .xb_wdata(cx_wdata1),
      .h_en(h_en[p]), .h_we, .h_addr, .h_wdata(h_wdata[p]),
      .g_we, .g_waddr, .g_wdata, .h_gre, .h_graddr, .g_rdata(pe_grd[p])
    );
    assign h_rdata[p] = sh_a[p];
  end

  always_ff @(posedge clk) begin
    if (cx_en) begin
      sel0_q <= cx_addr0[PE_BITS-1:0];
      sel1_q <= cx_addr1[PE_BITS-1:0];
    end
  end

  always_comb begin
    done      = pe_done[0];
    busy      = |pe_busy;
    cx_rdata0 = sh_a[sel0_q];
    cx_rdata1 = sh_b[sel1_q];
    g_rdata   = pe_grd[0];
  end

  assert property (@(posedge clk) disable iff (!rst_n) pe_done[0] |-> &pe_done);
endmodule
