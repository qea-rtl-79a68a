// qea_templates_tb: the 19 parameterised circuit templates (#1..#19) run on the QEA core, each at 4, 7 and 13 qubits.
//
// The testbench plays the host: it loads a state vector, gate matrices and
// gate contexts over the 256-bit AXI port (holding bready/rready low at
// random), starts the core, waits for done, reads the status counters and the
// final state back and compares the state with a floating-point reference
// simulation of the same gate list. QFT circuits are built as the evaluated
// ones are: H, each controlled phase CP(t) as Rz(t/2) on the control, Rz(t/2)
// on the target, CX, Rz(-t/2) on the target, CX, and each SWAP as three CX;
// on |0...0> the QFT must give the uniform superposition. A 3-qubit W-state
// circuit must give equal probability to |001>, |010> and |100>. The circuit
// templates are rotation layers (Rx, Ry, Rz or H on every qubit) and
// entangling layers (chain, ring, all-to-all, alternating), with each
// controlled rotation or CZ rewritten into Rz, H and CX. The CP and SWAP
// forms follow the evaluated circuits; the template rewrites, the random
// angles and the circuit sizes are this testbench's own. The run time of every
// circuit is checked against the cycle budget of its gates. Each mechanism of
// the design (sparse gate, dense gate within a PE, dense gate across PEs, CX
// within a PE, CX across PEs, a circuit smaller than the maximum, AXI response
// back-pressure) is counted and must happen at least once.
module qea_templates_tb;
  import qea_pkg::*;
  import tb_pkg::*;
  localparam int NQ = 13;
  logic clk = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n;
  logic s_axi_awvalid, s_axi_awready, s_axi_wvalid, s_axi_wready, s_axi_bvalid, s_axi_bready;
  logic s_axi_arvalid, s_axi_arready, s_axi_rvalid, s_axi_rready, done;
  logic [31:0] s_axi_awaddr, s_axi_araddr;
  logic [255:0] s_axi_wdata, s_axi_rdata;
  logic [1:0] s_axi_bresp, s_axi_rresp;
  longint cycle = 0;
  real sr [], si [];
  // mechanism counters
  int m_sparse = 0, m_dense_local = 0, m_dense_cross = 0, m_cx_local = 0, m_cx_cross = 0;
  int m_small = 0, m_bp_b = 0, m_bp_r = 0;

  typedef struct { int kind; int j; int c; real th; } gate_t;   // kind 0..4 as std_gate, 5 = CX
  gate_t circ [$];

  qea_top #(.NQ_MAX(13)) dut (.*);

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (s_axi_bvalid && !s_axi_bready) m_bp_b <= m_bp_b + 1;
    if (s_axi_rvalid && !s_axi_rready) m_bp_r <= m_bp_r + 1;
  end

  initial begin
    repeat (60000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic axi_write(logic [3:0] region, int word, logic [255:0] data);
    @(negedge clk);
    s_axi_awvalid = 1; s_axi_awaddr = {4'd0, region, 19'(word), 5'd0}; s_axi_wvalid = 1; s_axi_wdata = data;
    s_axi_bready = ($urandom_range(0, 7) != 0);
    do @(posedge clk); while (!(s_axi_awready && s_axi_wready));
    @(negedge clk);
    s_axi_awvalid = 0; s_axi_wvalid = 0;
    if (!s_axi_bready) begin
      repeat ($urandom_range(1, 3)) @(negedge clk);
      s_axi_bready = 1;
    end
    while (!s_axi_bvalid) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic axi_read(logic [3:0] region, int word, output logic [255:0] data);
    @(negedge clk);
    s_axi_arvalid = 1; s_axi_araddr = {4'd0, region, 19'(word), 5'd0};
    s_axi_rready = ($urandom_range(0, 7) != 0);
    do @(posedge clk); while (!s_axi_arready);
    @(negedge clk);
    s_axi_arvalid = 0;
    if (!s_axi_rready) begin
      while (!s_axi_rvalid) @(negedge clk);
      repeat ($urandom_range(1, 3)) @(negedge clk);
      s_axi_rready = 1;
    end
    do @(posedge clk); while (!s_axi_rvalid);
    data = s_axi_rdata;
    @(negedge clk);
  endtask

  // random normalised state, or |0...0> when zero is set
  task automatic load_state(int n, bit zero);
    real norm = 0.0;
    logic [255:0] w;
    for (int i = 0; i < (1 << n); i++) begin
      sr[i] = zero ? (i == 0 ? 1.0 : 0.0) : real'($urandom_range(0, 2000000)) / 1000000.0 - 1.0;
      si[i] = zero ? 0.0 : real'($urandom_range(0, 2000000)) / 1000000.0 - 1.0;
      norm += sr[i] * sr[i] + si[i] * si[i];
    end
    norm = $sqrt(norm);
    for (int i = 0; i < (1 << n); i++) begin
      sr[i] = to_r(to_fx(sr[i] / norm));   // what the hardware gets
      si[i] = to_r(to_fx(si[i] / norm));
    end
    for (int wd = 0; wd < (1 << (n - 2)); wd++) begin
      for (int k = 0; k < 4; k++) w[64*k +: 64] = mk(sr[4*wd+k], si[4*wd+k]);
      axi_write(4'd3, wd, w);
    end
  endtask

  task automatic add_gate(int kind, int j, int c, real th);
    gate_t g;
    g.kind = kind; g.j = j; g.c = c; g.th = th;
    circ.push_back(g);
  endtask

  task automatic build_qft(int n);
    real pi = 3.14159265358979323846;
    for (int j = 0; j < n; j++) begin
      add_gate(0, j, 0, 0.0);
      for (int k = j + 1; k < n; k++) begin
        real t;
        t = pi / real'(1 << (k - j));
        add_gate(4, k, 0, t / 2.0);
        add_gate(4, j, 0, t / 2.0);
        add_gate(5, j, k, 0.0);
        add_gate(4, j, 0, -t / 2.0);
        add_gate(5, j, k, 0.0);
      end
    end
    for (int q = 0; q < n / 2; q++) begin
      add_gate(5, n - 1 - q, q, 0.0);
      add_gate(5, q, n - 1 - q, 0.0);
      add_gate(5, n - 1 - q, q, 0.0);
    end
  endtask

  task automatic build_random(int n, int count);
    for (int g = 0; g < count; g++) begin
      int kind, j, c;
      kind = $urandom_range(0, 5);
      j = $urandom_range(0, n - 1);
      c = (j + 1 + $urandom_range(0, n - 2)) % n;
      add_gate(kind, j, c, real'($urandom_range(0, 6283)) / 1000.0);
    end
  endtask

  // Controlled rotations and CZ in the core's gate set: CRz(t) is Rz(t/2) on
  // the target, CX, Rz(-t/2) on the target, CX; CRx(t) is CRz(t) between two H
  // on the target (H Rz H = Rx); CZ is CX between two H on the target.
  function automatic real rnd_angle();
    return real'($urandom_range(0, 6283)) / 1000.0;
  endfunction

  task automatic add_ctrl(int kind, int c, int t);   // kind 2 CRx, 4 CRz, 5 CX, 6 CZ
    real th;
    th = rnd_angle();
    if (kind == 2 || kind == 6) add_gate(0, t, 0, 0.0);
    if (kind == 5 || kind == 6) add_gate(5, t, c, 0.0);
    else begin
      add_gate(4, t, 0, th / 2.0);
      add_gate(5, t, c, 0.0);
      add_gate(4, t, 0, -th / 2.0);
      add_gate(5, t, c, 0.0);
    end
    if (kind == 2 || kind == 6) add_gate(0, t, 0, 0.0);
  endtask

  task automatic rot_layer(int n, int kind);        // a rotation (or H) on every qubit
    for (int q = 0; q < n; q++) add_gate(kind, q, 0, rnd_angle());
  endtask

  // topology: 0 linear chain, 1 ring (chain closed from the last qubit to the
  // first), 2 all-to-all (every control above every target), 3 alternating
  // odd layer (0-1, 2-3, ...), 4 alternating even layer (1-2, 3-4, ...)
  task automatic ent_layer(int n, int topo, int kind);
    case (topo)
      0: for (int q = 0; q < n - 1; q++) add_ctrl(kind, q, q + 1);
      1: begin
        for (int q = 0; q < n - 1; q++) add_ctrl(kind, q, q + 1);
        add_ctrl(kind, n - 1, 0);
      end
      2: for (int a = 0; a < n - 1; a++) for (int b = a + 1; b < n; b++) add_ctrl(kind, a, b);
      3: for (int q = 0; q + 1 < n; q += 2) add_ctrl(kind, q, q + 1);
      default: for (int q = 1; q + 1 < n; q += 2) add_ctrl(kind, q, q + 1);
    endcase
  endtask

  // circuit templates #1..#19 (one layer each), built from rotation layers and
  // chain, ring, all-to-all and alternating entangling layers
  task automatic build_template(int id, int n);
    case (id)
      1:  begin rot_layer(n, 2); rot_layer(n, 4); end
      2:  begin rot_layer(n, 2); rot_layer(n, 4); ent_layer(n, 0, 5); end
      3:  begin rot_layer(n, 2); rot_layer(n, 4); ent_layer(n, 0, 4); end
      4:  begin rot_layer(n, 2); rot_layer(n, 4); ent_layer(n, 0, 2); end
      5:  begin rot_layer(n, 2); rot_layer(n, 4); ent_layer(n, 2, 4); rot_layer(n, 2); rot_layer(n, 4); end
      6:  begin rot_layer(n, 2); rot_layer(n, 4); ent_layer(n, 2, 2); rot_layer(n, 2); rot_layer(n, 4); end
      7:  begin rot_layer(n, 2); rot_layer(n, 4); ent_layer(n, 3, 4); rot_layer(n, 2); rot_layer(n, 4); ent_layer(n, 4, 4); end
      8:  begin rot_layer(n, 2); rot_layer(n, 4); ent_layer(n, 3, 2); rot_layer(n, 2); rot_layer(n, 4); ent_layer(n, 4, 2); end
      9:  begin rot_layer(n, 0); ent_layer(n, 0, 6); rot_layer(n, 2); end
      10: begin rot_layer(n, 3); ent_layer(n, 1, 6); rot_layer(n, 3); end
      11: begin rot_layer(n, 3); rot_layer(n, 4); ent_layer(n, 3, 5); rot_layer(n, 3); rot_layer(n, 4); ent_layer(n, 4, 5); end
      12: begin rot_layer(n, 3); rot_layer(n, 4); ent_layer(n, 3, 6); rot_layer(n, 3); rot_layer(n, 4); ent_layer(n, 4, 6); end
      13: begin rot_layer(n, 3); ent_layer(n, 1, 4); rot_layer(n, 3); ent_layer(n, 1, 4); end
      14: begin rot_layer(n, 3); ent_layer(n, 1, 2); rot_layer(n, 3); ent_layer(n, 1, 2); end
      15: begin rot_layer(n, 3); ent_layer(n, 1, 5); rot_layer(n, 3); ent_layer(n, 1, 5); end
      16: begin rot_layer(n, 2); rot_layer(n, 4); ent_layer(n, 3, 4); ent_layer(n, 4, 4); end
      17: begin rot_layer(n, 2); rot_layer(n, 4); ent_layer(n, 3, 2); ent_layer(n, 4, 2); end
      18: begin rot_layer(n, 2); rot_layer(n, 4); ent_layer(n, 1, 4); end
      default: begin rot_layer(n, 2); rot_layer(n, 4); ent_layer(n, 1, 2); end
    endcase
  endtask

  // 3-qubit W state: Ry(2 acos(1/sqrt(3))) on qubit 0, controlled-H from
  // qubit 0 to 1, CX 1->2, CX 0->1, X on qubit 0. Controlled-H is rewritten as
  // Ry(pi/4), CX, Ry(-pi/4) on the target, and X as H S S H.
  task automatic build_wstate();
    real pi = 3.14159265358979323846;
    add_gate(3, 0, 0, 2.0 * $acos(1.0 / $sqrt(3.0)));
    add_gate(3, 1, 0, pi / 4.0);
    add_gate(5, 1, 0, 0.0);
    add_gate(3, 1, 0, -pi / 4.0);
    add_gate(5, 2, 1, 0.0);
    add_gate(5, 1, 0, 0.0);
    add_gate(0, 0, 0, 0.0);
    add_gate(1, 0, 0, 0.0);
    add_gate(1, 0, 0, 0.0);
    add_gate(0, 0, 0, 0.0);
  endtask

  // the reference state after build_wstate must be (|001> + |010> + |100>)/sqrt(3)
  task automatic check_wstate(real tol);
    for (int i = 0; i < 8; i++) begin
      real p;
      p = sr[i] * sr[i] + si[i] * si[i];
      checks++;
      if (absr(p - ((i == 1 || i == 2 || i == 4) ? 1.0 / 3.0 : 0.0)) > tol) begin
        failures++; $display("W state: probability of %0d is %f", i, p);
      end
    end
  endtask

  // load the gate list, run it, check time, counters and final state
  task automatic run_circuit(string name, int n, real tol);
    logic [255:0] w;
    real ur [4], ui [4];
    int ns = 0, nd = 0, nc = 0;
    longint t0, budget = 0, took;
    real maxerr = 0.0;
    if (n < NQ) m_small++;
    foreach (circ[g]) begin
      gate_ctx_t ctx;
      ctx.target  = QB_W'(circ[g].j);
      ctx.control = QB_W'(circ[g].c);
      if (circ[g].kind == 5) begin
        ctx.gtype = GATE_CX; nc++;
        if (n - 1 - circ[g].j >= 2) m_cx_local++; else m_cx_cross++;
        budget += (1 << (n - 1)) + 4;
        ref_cx(sr, si, n, circ[g].c, circ[g].j);
      end else begin
        std_gate(circ[g].kind, circ[g].th, ur, ui);
        ctx.gtype = is_sparse(circ[g].kind) ? GATE_SPARSE : GATE_DENSE;
        if (is_sparse(circ[g].kind)) begin ns++; m_sparse++; end
        else begin
          nd++;
          if (n - 1 - circ[g].j >= 2) m_dense_local++; else m_dense_cross++;
        end
        budget += (1 << (n - 2)) + 5 + 4;
        axi_write(4'd2, g, 256'(to_mat(ur, ui)));
        ref_gate(sr, si, n, circ[g].j, ur, ui);
      end
      axi_write(4'd1, g, 256'(ctx));
    end
    w = '0; w[4:0] = 5'(n); w[32 +: 16] = 16'(circ.size()); w[64] = 1'b1;
    t0 = cycle;
    axi_write(4'd0, 0, w);
    while (!done) @(negedge clk);
    took = cycle - t0;
    // budget: per gate 4 clocks of controller overhead plus the unit's time,
    // plus the clocks of the start write itself
    checks++;
    if (took < budget || took > budget + 8) begin
      failures++; $display("%s: took %0d cycles, budget %0d", name, took, budget);
    end
    axi_read(4'd0, 0, w);
    checks++;
    if (w[0] != 1'b1 || w[1] != 1'b0 || int'(w[64 +: 16]) != ns || int'(w[96 +: 16]) != nd || int'(w[128 +: 16]) != nc) begin
      failures++; $display("%s: status counters %0d %0d %0d", name, w[64 +: 16], w[96 +: 16], w[128 +: 16]);
    end
    for (int wd = 0; wd < (1 << (n - 2)); wd++) begin
      axi_read(4'd3, wd, w);
      for (int k = 0; k < 4; k++) begin
        cplx_t a;
        a = w[64*k +: 64];
        maxerr = absr(to_r(a.re) - sr[4*wd+k]) > maxerr ? absr(to_r(a.re) - sr[4*wd+k]) : maxerr;
        maxerr = absr(to_r(a.im) - si[4*wd+k]) > maxerr ? absr(to_r(a.im) - si[4*wd+k]) : maxerr;
        checks++;
        if (!close(a, sr[4*wd+k], si[4*wd+k], tol)) begin
          failures++;
          if (failures < 20) $display("%s: amp %0d got %f %f exp %f %f", name, 4*wd+k, to_r(a.re), to_r(a.im), sr[4*wd+k], si[4*wd+k]);
        end
      end
    end
    $display("%s: n=%0d gates=%0d (sparse %0d dense %0d cx %0d) cycles=%0d max error %e",
             name, n, circ.size(), ns, nd, nc, took, maxerr);
    circ.delete();
  endtask

  // QFT of |0...0>: every amplitude must have magnitude 1/sqrt(2^n) and all
  // the same phase (the Rz form of CP leaves a global phase)
  task automatic check_uniform(string name, int n, real tol);
    for (int i = 0; i < (1 << n); i++) begin
      checks++;
      if (absr(sr[i] * sr[i] + si[i] * si[i] - 1.0 / real'(1 << n)) > tol ||
          absr(sr[i] - sr[0]) > tol || absr(si[i] - si[0]) > tol) begin
        failures++; $display("%s: reference not uniform at %0d", name, i);
      end
    end
  endtask

  initial begin
    sr = new[1 << NQ]; si = new[1 << NQ];
    rst_n = 0; s_axi_awvalid = 0; s_axi_wvalid = 0; s_axi_bready = 0; s_axi_arvalid = 0; s_axi_rready = 0;
    s_axi_awaddr = 0; s_axi_araddr = 0; s_axi_wdata = '0;
    repeat (4) @(negedge clk);
    rst_n = 1;
    for (int id = 1; id <= 19; id++) begin
      for (int s = 0; s < 3; s++) begin
        int n;
        n = (s == 0) ? 4 : (s == 1) ? 7 : NQ;
        load_state(n, 1);
        build_template(id, n);
        run_circuit($sformatf("template-%0d", id), n, 1e-5);
      end
    end
    checks++; if (m_sparse == 0)      begin failures++; $display("no sparse gate ran"); end
    checks++; if (m_dense_local == 0) begin failures++; $display("no dense gate within a PE ran"); end
    checks++; if (m_dense_cross == 0) begin failures++; $display("no dense gate across PEs ran"); end
    checks++; if (m_cx_local == 0)    begin failures++; $display("no CX within a PE ran"); end
    checks++; if (m_cx_cross == 0)    begin failures++; $display("no CX across PEs ran"); end
    checks++; if (m_bp_b == 0 || m_bp_r == 0) begin failures++; $display("no AXI back-pressure"); end
    checks++; if (m_small == 0) begin failures++; $display("no circuit below the maximum size"); end
    $display("mechanisms: sparse %0d, dense local %0d, dense cross-PE %0d, CX local %0d, CX cross-PE %0d, smaller circuits %0d, B stalls %0d, R stalls %0d",
             m_sparse, m_dense_local, m_dense_cross, m_cx_local, m_cx_cross, m_small, m_bp_b, m_bp_r);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
