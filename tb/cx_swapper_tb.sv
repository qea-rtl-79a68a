// cx_swapper_tb: the CX swapper against a behavioural model of the CX bus (a
// plain array of amplitudes with one clock of read latency). For every
// control/target pair of 3..6-qubit states it checks the permuted vector
// against the reference CX and the gate time of 2^(n-1) clocks from the edge that samples start.
module cx_swapper_tb;
  import qea_pkg::*;
  import tb_pkg::*;
  localparam int NQ = 6, N = 1 << NQ;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, start, done, busy, cx_en, cx_we;
  logic [QB_W-1:0] n, control, target;
  logic [NQ-1:0] cx_addr0, cx_addr1;
  cplx_t cx_wdata0, cx_wdata1, cx_rdata0, cx_rdata1;
  cplx_t mem [N];
  real sr [], si [];

  cx_swapper #(.NQ_MAX(NQ)) dut (.*);

  // bus model: read data one clock later
  always_ff @(posedge clk) begin
    if (cx_en) begin
      if (cx_we) begin
        mem[cx_addr0] <= cx_wdata0;
        mem[cx_addr1] <= cx_wdata1;
      end else begin
        cx_rdata0 <= mem[cx_addr0];
        cx_rdata1 <= mem[cx_addr1];
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    rst_n = 0; start = 0; n = 3; control = 0; target = 1;
    sr = new[N]; si = new[N];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int nq = 3; nq <= NQ; nq++)
      for (int c = 0; c < nq; c++)
        for (int t = 0; t < nq; t++) begin
          if (c == t) continue;
          for (int i = 0; i < (1 << nq); i++) begin
            mem[i] = rnd_c(1.0);
            sr[i] = to_r(mem[i].re); si[i] = to_r(mem[i].im);
          end
          @(negedge clk);
          n = QB_W'(nq); control = QB_W'(c); target = QB_W'(t); start = 1;
          @(negedge clk);
          start = 0;
          cyc = 0;
          while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
          checks++;
          if (cyc != (1 << (nq-1))) begin failures++; $display("latency %0d n=%0d", cyc, nq); end
          ref_cx(sr, si, nq, c, t);
          for (int i = 0; i < (1 << nq); i++) begin
            checks++;
            if (!close(mem[i], sr[i], si[i], 0.0)) begin
              failures++;
              $display("n=%0d c=%0d t=%0d amp %0d wrong", nq, c, t, i);
            end
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
