// pe_array_tb: the four-PE array on 6-qubit states. Loads a random state
// through the host buses, applies dense and sparse gates on every qubit
// (qubits 4 and 5 make the PEs exchange data over the shared State Data bus),
// performs a few amplitude swaps over the CX bus as the CX swapper would, reads
// the state back and compares it with a floating-point reference.
module pe_array_tb;
  import qea_pkg::*;
  import tb_pkg::*;
  localparam int NQ = 6, AW = NQ - 2, GW = 6, D = 1 << AW, N = 1 << NQ;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cross_gates = 0;
  logic rst_n, start, done, busy, cx_en, cx_we, h_we, g_we, h_gre;
  logic [QB_W-1:0] n, target;
  gate_type_e model;
  logic [GW-1:0] gate_idx, g_waddr, h_graddr;
  logic [NQ-1:0] cx_addr0, cx_addr1;
  cplx_t cx_wdata0, cx_wdata1, cx_rdata0, cx_rdata1;
  logic [3:0] h_en;
  logic [AW-1:0] h_addr;
  cplx_t h_wdata [4];
  cplx_t h_rdata [4];
  gate_mat_t g_wdata, g_rdata;
  real sr [], si [];

  pe_array #(.NQ_MAX(NQ), .GATE_DEPTH(64)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string tag);
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      h_en = '1; h_we = 0; h_addr = AW'(a);
      @(posedge clk); #1;
      h_en = '0;
      for (int p = 0; p < 4; p++) begin
        checks++;
        if (!close(h_rdata[p], sr[4*a+p], si[4*a+p], 1e-7)) begin
          failures++;
          $display("%s: amp %0d got %f %f exp %f %f", tag, 4*a+p, to_r(h_rdata[p].re), to_r(h_rdata[p].im), sr[4*a+p], si[4*a+p]);
        end
      end
    end
  endtask

  task automatic swap(int i0, int i1);
    cplx_t r0, r1;
    @(negedge clk);
    cx_en = 1; cx_we = 0; cx_addr0 = NQ'(i0); cx_addr1 = NQ'(i1);
    @(negedge clk);
    r0 = cx_rdata0; r1 = cx_rdata1;
    cx_we = 1; cx_wdata0 = r1; cx_wdata1 = r0;
    @(negedge clk);
    cx_en = 0; cx_we = 0;
  endtask

  initial begin
    real ur [4], ui [4], tr, ti, th;
    int gi, kind, cyc;
    rst_n = 0; start = 0; cx_en = 0; cx_we = 0; h_en = '0; h_we = 0; g_we = 0; h_gre = 0;
    n = NQ; target = 0; model = GATE_DENSE; gate_idx = 0; h_graddr = 0;
    cx_addr0 = 0; cx_addr1 = 0; cx_wdata0 = '0; cx_wdata1 = '0;
    sr = new[N]; si = new[N];
    gi = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      h_en = '1; h_we = 1; h_addr = AW'(a);
      for (int p = 0; p < 4; p++) begin
        h_wdata[p] = rnd_c(0.35);
        sr[4*a+p] = to_r(h_wdata[p].re); si[4*a+p] = to_r(h_wdata[p].im);
      end
    end
    @(negedge clk);
    h_en = '0; h_we = 0;
    for (int rep = 0; rep < 2; rep++)
      for (int j = 0; j < NQ; j++) begin
        kind = (rep * NQ + j) % 5;
        th = real'($urandom_range(0, 6283)) / 1000.0;
        std_gate(kind, th, ur, ui);
        @(negedge clk);
        g_we = 1; g_waddr = GW'(gi); g_wdata = to_mat(ur, ui);
        @(negedge clk);
        g_we = 0;
        target = QB_W'(j); model = is_sparse(kind) ? GATE_SPARSE : GATE_DENSE;
        gate_idx = GW'(gi); start = 1;
        if (!is_sparse(kind) && NQ - 1 - j < 2) cross_gates++;
        @(negedge clk);
        start = 0;
        cyc = 0;
        while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
        checks++;
        if (cyc != D + 5) begin failures++; $display("latency %0d", cyc); end
        ref_gate(sr, si, NQ, j, ur, ui);
        gi++;
      end
    compare("gates");
    // swaps: same PE, different PEs, through both port orders
    for (int k = 0; k < 6; k++) begin
      int i0, i1;
      i0 = $urandom_range(0, N-1);
      i1 = (i0 + 1 + $urandom_range(0, N-2)) % N;
      swap(i0, i1);
      tr = sr[i0]; ti = si[i0]; sr[i0] = sr[i1]; si[i0] = si[i1]; sr[i1] = tr; si[i1] = ti;
    end
    compare("swaps");
    checks++;
    if (cross_gates < 2) begin failures++; $display("cross-PE gates not exercised"); end
    $display("cross-PE dense gates: %0d", cross_gates);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
