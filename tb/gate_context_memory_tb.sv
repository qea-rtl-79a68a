// gate_context_memory_tb: writes random words to a small gate_context_memory, reads them back in random
// order and checks data and the one-clock read latency.
module gate_context_memory_tb;
  import qea_pkg::*;
  import tb_pkg::*;
  localparam int DEPTH = 64, GW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we, re;
  logic [GW-1:0] waddr, raddr;
  gate_ctx_t wdata, rdata;
  gate_ctx_t model [DEPTH];

  gate_context_memory #(.GATE_DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0;
    for (int k = 0; k < DEPTH; k++) begin
      @(negedge clk);
      we = 1; waddr = GW'(k); wdata = gate_ctx_t'($urandom); model[k] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int k = 0; k < 200; k++) begin
      int r;
      r = $urandom_range(0, DEPTH-1);
      @(negedge clk);
      re = 1; raddr = GW'(r);
      @(posedge clk); #1;
      re = 0;
      checks++;
      if (rdata !== model[r]) begin failures++; $display("addr %0d", r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
