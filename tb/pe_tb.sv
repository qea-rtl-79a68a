// pe_tb: one PE (PE 2 of a 7-qubit, four-PE array) with its memories. The
// testbench loads the PE's quarter of a random state through the host port,
// writes gate matrices, runs dense gates whose pairs are local and sparse gates
// on every qubit, reads the quarter back and compares it with a floating-point
// reference. The partner inputs are driven with garbage to show they are not
// used for local gates. Gate latency (2^(n-2) + 5 clocks) is checked too.
module pe_tb;
  import qea_pkg::*;
  import tb_pkg::*;
  localparam int NQ = 7, AW = NQ - 2, GW = 6, D = 1 << AW;
  localparam logic [1:0] PID = 2'd2;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, start, done, busy;
  logic [QB_W-1:0] n, target;
  gate_type_e model;
  logic [GW-1:0] gate_idx, g_waddr, h_graddr;
  cplx_t sh_a, sh_b, par_a, par_b, xa_wdata, xb_wdata, h_wdata;
  logic xa_en, xa_we, xb_en, xb_we, h_en, h_we, g_we, h_gre;
  logic [AW-1:0] xa_addr, xb_addr, h_addr;
  gate_mat_t g_wdata, g_rdata;
  real sr [], si [];

  pe #(.NQ_MAX(NQ), .GATE_DEPTH(64), .PE_ID(PID)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string tag);
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      h_en = 1; h_we = 0; h_addr = AW'(a);
      @(posedge clk); #1;
      h_en = 0;
      checks++;
      if (!close(sh_a, sr[a], si[a], 1e-7)) begin
        failures++;
        $display("%s: local %0d got %f %f exp %f %f", tag, a, to_r(sh_a.re), to_r(sh_a.im), sr[a], si[a]);
      end
    end
  endtask

  initial begin
    real ur [4], ui [4];
    int gi = 0;
    rst_n = 0; start = 0; xa_en = 0; xb_en = 0; xa_we = 0; xb_we = 0; h_en = 0; h_we = 0;
    g_we = 0; h_gre = 0; n = NQ; target = 0; model = GATE_DENSE; gate_idx = 0;
    xa_addr = 0; xb_addr = 0; xa_wdata = '0; xb_wdata = '0; h_graddr = 0;
    sr = new[D]; si = new[D];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      h_en = 1; h_we = 1; h_addr = AW'(a); h_wdata = rnd_c(0.35);
      sr[a] = to_r(h_wdata.re); si[a] = to_r(h_wdata.im);
    end
    @(negedge clk);
    h_en = 0; h_we = 0;
    for (int rep = 0; rep < 3; rep++)
      for (int j = 0; j < NQ; j++) begin
        int b, kind, cyc, bit_v;
        real th;
        b = NQ - 1 - j;
        kind = (b < 2) ? ((rep + j) % 2 == 0 ? 1 : 4) : ((rep + j) % 5);
        th = real'($urandom_range(0, 6283)) / 1000.0;
        cyc = 0;
        std_gate(kind, th, ur, ui);
        @(negedge clk);
        g_we = 1; g_waddr = GW'(gi); g_wdata = to_mat(ur, ui);
        @(negedge clk);
        g_we = 0;
        n = NQ; target = QB_W'(j); model = is_sparse(kind) ? GATE_SPARSE : GATE_DENSE;
        gate_idx = GW'(gi); start = 1;
        par_a = rnd_c(1.0); par_b = rnd_c(1.0);
        @(negedge clk);
        start = 0;
        while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
        checks++;
        if (cyc != D + 5) begin failures++; $display("latency %0d", cyc); end
        // reference on the PE's quarter: local bit b-2 is qubit j of an (n-2)-qubit vector
        if (b >= 2) ref_gate(sr, si, NQ - 2, j, ur, ui);
        else begin
          bit_v = (PID >> b) & 1;
          for (int a = 0; a < D; a++) begin
            real xr, xi;
            xr = sr[a]; xi = si[a];
            sr[a] = ur[3*bit_v]*xr - ui[3*bit_v]*xi;
            si[a] = ur[3*bit_v]*xi + ui[3*bit_v]*xr;
          end
        end
        gi++;
      end
    compare("final");
    // host read-back of a gate matrix
    @(negedge clk);
    h_gre = 1; h_graddr = GW'(gi - 1);
    @(posedge clk); #1;
    h_gre = 0;
    checks++;
    if (g_rdata !== to_mat(ur, ui)) begin failures++; $display("gate read-back"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
