// pe_controller_tb: runs the PE controller (as PE 1 of 4) for sparse and dense
// gates on every target qubit of 3..8-qubit circuits and checks, independently
// of the controller's own arithmetic:
//   - one Gate Memory read of the right gate number, then val_load
//   - every local address read exactly once and written exactly three clocks
//     after it was read, never read and written in the same clock
//   - the pair structure (local pairs differ in bit b-2) and the diagonal
//     selects and cross-PE side, derived from the global amplitude index
//   - done exactly 2^(n-2) + 5 clocks after the edge that samples start
module pe_controller_tb;
  import qea_pkg::*;
  localparam int NQ = 8, AW = NQ - 2, GW = 6;
  localparam logic [1:0] PID = 2'd1;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, start, done, busy, gre, val_load, lower, sel_a, sel_b;
  logic ca_en, ca_we, cb_en, cb_we;
  logic [AW-1:0] ca_addr, cb_addr;
  logic [QB_W-1:0] n, target;
  gate_type_e model;
  logic [GW-1:0] gate_idx, graddr;
  pe_op_e op;

  pe_controller #(.NQ_MAX(NQ), .GATE_DEPTH(64), .PE_ID(PID)) dut (.*);

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (n=%0d t=%0d model=%0d)", msg, n, target, model); end
  endfunction

  task automatic run_gate(int nq, int tq, gate_type_e m);
    int cyc = 0, done_at = -1, greads = 0;
    int b = nq - 1 - tq;
    int rd_cnt [] = new[1 << (nq-2)];
    int wr_cnt [] = new[1 << (nq-2)];
    int rd_time [] = new[1 << (nq-2)];
    logic [AW-1:0] prev_a, prev_b;
    logic prev_rd = 0;
    @(negedge clk);
    n = QB_W'(nq); target = QB_W'(tq); model = m; gate_idx = GW'($urandom); start = 1;
    @(negedge clk);
    start = 0;
    while (done_at < 0 && cyc < 2000) begin
      cyc++;
      if (gre) begin greads++; chk(graddr == gate_idx, "gate address"); end
      if (prev_rd) begin
        // selects of the words read one clock earlier, from the global index
        int ia = int'(prev_a) * 4 + int'(PID), ib = int'(prev_b) * 4 + int'(PID);
        if (m == GATE_SPARSE) begin
          chk(int'(sel_a) == ((ia >> b) & 1) && int'(sel_b) == ((ib >> b) & 1), "diagonal select");
          chk(op == OP_SPARSE, "op sparse");
        end else if (b < 2) begin
          chk(op == OP_DENSE_CROSS && lower == (((PID >> b) & 1) == 0), "cross op/lower");
        end else begin
          chk(op == OP_DENSE_LOCAL, "local op");
          chk(((ia >> b) & 1) == 0 && ib == ia + (1 << b), "local pair");
        end
      end
      prev_rd = 0;
      if (ca_en || cb_en) begin
        chk(ca_en && cb_en && ca_we == cb_we, "both ports together");
        if (!ca_we) begin
          rd_cnt[ca_addr]++; rd_cnt[cb_addr]++;
          rd_time[ca_addr] = cyc; rd_time[cb_addr] = cyc;
          prev_rd = 1; prev_a = ca_addr; prev_b = cb_addr;
        end else begin
          wr_cnt[ca_addr]++; wr_cnt[cb_addr]++;
          chk(rd_time[ca_addr] == cyc - 3 && rd_time[cb_addr] == cyc - 3, "write 3 clocks after read");
        end
      end
      @(negedge clk);
      if (done) done_at = cyc;
    end
    chk(greads == 1, "one gate-value read");
    foreach (rd_cnt[i]) chk(rd_cnt[i] == 1 && wr_cnt[i] == 1, $sformatf("address %0d read/written once", i));
    chk(done_at == (1 << (nq-2)) + 5, $sformatf("gate latency %0d", done_at));
  endtask

  initial begin
    rst_n = 0; start = 0; n = 5; target = 0; model = GATE_DENSE; gate_idx = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int nq = 3; nq <= NQ; nq++)
      for (int tq = 0; tq < nq; tq++) begin
        run_gate(nq, tq, GATE_DENSE);
        run_gate(nq, tq, GATE_SPARSE);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
