// matrix_coordinator: delivers 2x2 gate matrices to the PEs.
//
// A host write of one 256-bit word (u00, u01, u10, u11 of one gate) at a gate
// number is broadcast to the Gate Memory of every PE, so each PE holds the
// matrices locally and reads only its own memory while a gate runs. The
// broadcast goes through one register stage (the word fans out to four
// memories spread over the array), so it reaches the memories one clock after
// the host write. Host reads fetch the word back from PE0's Gate Memory through
// a read register: rvalid and rdata come two clocks after the request. The
// broadcast and the register stages are this design's reading of "delivers
// 2x2 gate matrix data directly to each PE".
module matrix_coordinator
  import qea_pkg::*;
#(
  parameter int GATE_DEPTH = 2048,
  parameter int GW         = $clog2(GATE_DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // from the AXI mapper
  input  logic                  wr_en,
  input  logic [GW-1:0]         wr_idx,
  input  logic [AXI_DATA_W-1:0] wr_data,
  input  logic                  rd_en,
  input  logic [GW-1:0]         rd_idx,
  output logic                  rvalid,
  output logic [AXI_DATA_W-1:0] rdata,
  // to the PE array
  output logic                  g_we,
  output logic [GW-1:0]         g_waddr,
  output gate_mat_t             g_wdata,
  output logic                  g_re,
  output logic [GW-1:0]         g_raddr,
  input  gate_mat_t             g_rdata
);
  logic rd_q;

  always_comb begin
    g_re    = rd_en;
    g_raddr = rd_idx;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      g_we   <= 1'b0;
      rd_q   <= 1'b0;
      rvalid <= 1'b0;
    end else begin
      g_we   <= wr_en;
      rd_q   <= rd_en;
      rvalid <= rd_q;
    end
    if (wr_en) begin
      g_waddr <= wr_idx;
      g_wdata <= gate_mat_t'(wr_data);
    end
    if (rd_q) rdata <= AXI_DATA_W'(g_rdata);
  end
endmodule
