// qea_controller_tb: the controller against behavioural models of the gate
// context memory (one clock read latency), the PE array and the CX swapper
// (each answers a start with done a random number of clocks later). A random
// list of gates must be launched in order, each on the right unit with the
// right type/target/control/gate number held stable until its done, one at a
// time, with the per-type counts and the final done flag right.
module qea_controller_tb;
  import qea_pkg::*;
  localparam int GW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, start, done, busy, ctx_re, pe_start, pe_done, cx_start, cx_done;
  logic [GW:0] num_gates, cnt_sparse, cnt_dense, cnt_cx;
  logic [GW-1:0] ctx_raddr, gate_idx;
  gate_ctx_t ctx_rdata;
  gate_type_e gtype;
  logic [QB_W-1:0] target, control;
  gate_ctx_t ctx [64];
  int launched, pe_busy_left, cx_busy_left;
  int exp_s, exp_d, exp_c;

  qea_controller #(.GATE_DEPTH(64)) dut (.*);

  always_ff @(posedge clk) if (ctx_re) ctx_rdata <= ctx[ctx_raddr];

  // unit models
  always @(posedge clk) begin
    pe_done <= 0; cx_done <= 0;
    if (pe_busy_left > 0) begin
      pe_busy_left <= pe_busy_left - 1;
      if (pe_busy_left == 1) pe_done <= 1;
    end
    if (cx_busy_left > 0) begin
      cx_busy_left <= cx_busy_left - 1;
      if (cx_busy_left == 1) cx_done <= 1;
    end
    if (pe_start || cx_start) begin
      checks++;
      if (pe_busy_left > 0 || cx_busy_left > 0 || (pe_start && cx_start)) begin
        failures++; $display("overlapping launches");
      end
      checks++;
      if (!(gate_idx == GW'(launched) && gtype == ctx[launched].gtype && target == ctx[launched].target
            && control == ctx[launched].control && (cx_start == (ctx[launched].gtype == GATE_CX)))) begin
        failures++; $display("gate %0d launched wrongly", launched);
      end
      launched <= launched + 1;
      if (pe_start) pe_busy_left <= $urandom_range(1, 12);
      else          cx_busy_left <= $urandom_range(1, 12);
    end
    // fields must stay put while a unit works
    if (pe_busy_left > 0 || cx_busy_left > 0) begin
      checks++;
      if (gtype != ctx[launched-1].gtype || target != ctx[launched-1].target) failures++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; num_gates = 0; launched = 0; pe_busy_left = 0; cx_busy_left = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 4; run++) begin
      int ng;
      ng = (run == 3) ? 0 : $urandom_range(5, 60);
      exp_s = 0; exp_d = 0; exp_c = 0;
      for (int g = 0; g < 64; g++) begin
        ctx[g].gtype = gate_type_e'($urandom_range(0, 2));
        ctx[g].target = QB_W'($urandom_range(0, 16));
        ctx[g].control = QB_W'($urandom_range(0, 16));
        if (g < ng) case (ctx[g].gtype)
          GATE_SPARSE: exp_s++;
          GATE_DENSE:  exp_d++;
          default:     exp_c++;
        endcase
      end
      @(negedge clk);
      launched = 0;
      num_gates = (GW+1)'(ng); start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (launched != ng || busy) begin failures++; $display("run %0d: %0d of %0d launched", run, launched, ng); end
      checks++;
      if (cnt_sparse != (GW+1)'(exp_s) || cnt_dense != (GW+1)'(exp_d) || cnt_cx != (GW+1)'(exp_c)) begin
        failures++; $display("counts");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
