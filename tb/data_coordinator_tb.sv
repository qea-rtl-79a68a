// data_coordinator_tb: drives random requests from the compute, CX and host
// clients and checks that each State Memory port and the Gate Memory read port
// carry the request of the highest-priority active client.
module data_coordinator_tb;
  import qea_pkg::*;
  import tb_pkg::*;
  localparam int NQ = 8, AW = NQ - 2, GW = 6;
  int checks = 0, failures = 0;
  logic ca_en, ca_we, cb_en, cb_we, xa_en, xa_we, xb_en, xb_we, h_en, h_we;
  logic [AW-1:0] ca_addr, cb_addr, xa_addr, xb_addr, h_addr, a_addr, b_addr;
  cplx_t ca_wdata, cb_wdata, xa_wdata, xb_wdata, h_wdata, a_wdata, b_wdata;
  logic a_en, a_we, b_en, b_we, pc_gre, h_gre, g_re;
  logic [GW-1:0] pc_graddr, h_graddr, g_raddr;

  data_coordinator #(.NQ_MAX(NQ), .GATE_DEPTH(64)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 300; k++) begin
      {ca_en, ca_we, cb_en, cb_we, xa_en, xa_we, xb_en, xb_we, h_en, h_we, pc_gre, h_gre} = 12'($urandom);
      ca_addr = AW'($urandom); cb_addr = AW'($urandom); xa_addr = AW'($urandom);
      xb_addr = AW'($urandom); h_addr = AW'($urandom);
      ca_wdata = rnd_c(1.0); cb_wdata = rnd_c(1.0); xa_wdata = rnd_c(1.0);
      xb_wdata = rnd_c(1.0); h_wdata = rnd_c(1.0);
      pc_graddr = GW'($urandom); h_graddr = GW'($urandom);
      #1;
      checks += 3;
      if (ca_en) begin
        if (!(a_en && a_we == ca_we && a_addr == ca_addr && a_wdata == ca_wdata)) failures++;
      end else if (xa_en) begin
        if (!(a_en && a_we == xa_we && a_addr == xa_addr && a_wdata == xa_wdata)) failures++;
      end else begin
        if (!(a_en == h_en && (!h_en || (a_we == h_we && a_addr == h_addr && a_wdata == h_wdata)))) failures++;
      end
      if (cb_en) begin
        if (!(b_en && b_we == cb_we && b_addr == cb_addr && b_wdata == cb_wdata)) failures++;
      end else begin
        if (!(b_en == xb_en && (!xb_en || (b_we == xb_we && b_addr == xb_addr && b_wdata == xb_wdata)))) failures++;
      end
      if (g_re != (pc_gre || h_gre) || (pc_gre && g_raddr != pc_graddr) || (!pc_gre && h_gre && g_raddr != h_graddr))
        failures++;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
