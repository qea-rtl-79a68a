// axi_mapper: the AXI slave of the accelerator and its address decoder.
//
// Accepts single-beat AXI4 transfers with 256-bit data (no bursts, all byte
// lanes written) and maps them, by address bits [27:24], onto:
//   0 control   write: wdata[4:0] = n (qubits), wdata[47:32] = number of
//               gates, wdata[64] = start (one-clock pulse to the controller);
//               read: bit 0 done, bit 1 busy, bits 47:32 number of gates,
//               79:64 / 111:96 / 143:128 sparse / dense / CX gates executed
//   1 context   write only: gate context {control, target, type} in the low
//               bits, at gate number addr[23:5]
//   2 matrix    gate matrix at gate number addr[23:5] (Matrix Coordinator)
//   3 state     four amplitudes at word addr[23:5] (State Coordinator)
// Write handshake: AW and W are taken together in the clock both are valid and
// no response is pending; B follows one clock later and is held until bready.
// Read handshake: AR is taken when no read is in flight and no write is being
// taken in the same clock; R follows one clock after the addressed unit's
// rvalid (control registers: two clocks after AR) and is held until rready. Responses are
// always OKAY. The 256-bit width follows the paper; the single-beat subset,
// the register layout and the address map are this design's choices.
module axi_mapper
  import qea_pkg::*;
#(
  parameter int ADDR_W     = 32,
  parameter int GATE_DEPTH = 2048,
  parameter int GW         = $clog2(GATE_DEPTH),
  parameter int NQ_MAX     = 17,
  parameter int AW         = NQ_MAX - PE_BITS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // AXI4 slave, single beat
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
  // control registers
  output logic                  ctrl_start,
  output logic [QB_W-1:0]       ctrl_n,
  output logic [GW:0]           ctrl_num_gates,
  input  logic                  stat_done,
  input  logic                  stat_busy,
  input  logic [GW:0]           stat_cnt_sparse,
  input  logic [GW:0]           stat_cnt_dense,
  input  logic [GW:0]           stat_cnt_cx,
  // gate context memory write port
  output logic                  ctx_we,
  output logic [GW-1:0]         ctx_waddr,
  output gate_ctx_t             ctx_wdata,
  // Matrix Coordinator
  output logic                  mat_wr_en,
  output logic [GW-1:0]         mat_wr_idx,
  output logic                  mat_rd_en,
  output logic [GW-1:0]         mat_rd_idx,
  input  logic                  mat_rvalid,
  input  logic [AXI_DATA_W-1:0] mat_rdata,
  // State Coordinator
  output logic                  st_wr_en,
  output logic [AW-1:0]         st_wr_word,
  output logic                  st_rd_en,
  output logic [AW-1:0]         st_rd_word,
  input  logic                  st_rvalid,
  input  logic [AXI_DATA_W-1:0] st_rdata,
  // write data shared by the matrix and state paths
  output logic [AXI_DATA_W-1:0] wr_data
);
  logic    wr_take, rd_take, rd_pend, rd_ready;
  region_e wr_reg, rd_reg_q;
  logic [18:0] wr_word, rd_word;

  always_comb begin
    wr_take       = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
    rd_take       = s_axi_arvalid && !s_axi_rvalid && !rd_pend && !wr_take;
    s_axi_awready = wr_take;
    s_axi_wready  = wr_take;
    s_axi_arready = rd_take;
    s_axi_bresp   = 2'b00;
    s_axi_rresp   = 2'b00;

    wr_reg  = region_e'(s_axi_awaddr[27:24]);
    wr_word = s_axi_awaddr[23:5];
    rd_word = s_axi_araddr[23:5];
    wr_data = s_axi_wdata;

    ctx_we     = wr_take && wr_reg == REG_GCTX;
    ctx_waddr  = GW'(wr_word);
    ctx_wdata  = gate_ctx_t'(s_axi_wdata[$bits(gate_ctx_t)-1:0]);
    mat_wr_en  = wr_take && wr_reg == REG_GMAT;
    mat_wr_idx = GW'(wr_word);
    st_wr_en   = wr_take && wr_reg == REG_STATE;
    st_wr_word = AW'(wr_word);

    mat_rd_en  = rd_take && region_e'(s_axi_araddr[27:24]) == REG_GMAT;
    mat_rd_idx = GW'(rd_word);
    st_rd_en   = rd_take && region_e'(s_axi_araddr[27:24]) == REG_STATE;
    st_rd_word = AW'(rd_word);

    // the addressed unit has its read data
    unique case (rd_reg_q)
      REG_GMAT:  rd_ready = mat_rvalid;
      REG_STATE: rd_ready = st_rvalid;
      default:   rd_ready = 1'b1;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ctrl_start     <= 1'b0;
      ctrl_n         <= '0;
      ctrl_num_gates <= '0;
      s_axi_bvalid   <= 1'b0;
      s_axi_rvalid   <= 1'b0;
      s_axi_rdata    <= '0;
      rd_pend        <= 1'b0;
      rd_reg_q       <= REG_CTRL;
    end else begin
      ctrl_start <= 1'b0;
      if (wr_take && wr_reg == REG_CTRL) begin
        ctrl_n         <= s_axi_wdata[QB_W-1:0];
        ctrl_num_gates <= s_axi_wdata[32 +: GW+1];
        ctrl_start     <= s_axi_wdata[64];
      end
      if (wr_take)                         s_axi_bvalid <= 1'b1;
      else if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;

      if (rd_take) begin
        rd_pend  <= 1'b1;
        rd_reg_q <= region_e'(s_axi_araddr[27:24]);
      end
      if (rd_pend && rd_ready) begin
        rd_pend      <= 1'b0;
        s_axi_rvalid <= 1'b1;
        unique case (rd_reg_q)
          REG_CTRL: begin
            s_axi_rdata          <= '0;
            s_axi_rdata[0]       <= stat_done;
            s_axi_rdata[1]       <= stat_busy;
            s_axi_rdata[32 +: GW+1]  <= ctrl_num_gates;
            s_axi_rdata[64 +: GW+1]  <= stat_cnt_sparse;
            s_axi_rdata[96 +: GW+1]  <= stat_cnt_dense;
            s_axi_rdata[128 +: GW+1] <= stat_cnt_cx;
          end
          REG_GMAT:  s_axi_rdata <= mat_rdata;
          REG_STATE: s_axi_rdata <= st_rdata;
          default:   s_axi_rdata <= '0;
        endcase
      end else if (s_axi_rvalid && s_axi_rready) begin
        s_axi_rvalid <= 1'b0;
      end
    end
  end

  // AXI rule: a response, once valid, stays valid until taken
  assert property (@(posedge clk) disable iff (!rst_n) s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid);
  assert property (@(posedge clk) disable iff (!rst_n) s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
endmodule
