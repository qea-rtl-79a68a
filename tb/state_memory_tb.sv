// state_memory_tb: fills a small state memory through both ports, reads it
// back through both ports and checks data and the one-clock read latency
// against a copy held in the testbench.
module state_memory_tb;
  import qea_pkg::*;
  import tb_pkg::*;
  localparam int NQ = 8, AW = NQ - 2, D = 1 << AW;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic a_en, a_we, b_en, b_we;
  logic [AW-1:0] a_addr, b_addr;
  cplx_t a_wdata, b_wdata, a_rdata, b_rdata;
  cplx_t model [D];

  state_memory #(.NQ_MAX(NQ)) dut (.clk, .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
                                   .b_en, .b_we, .b_addr, .b_wdata, .b_rdata);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_en = 0; b_en = 0; a_we = 0; b_we = 0;
    for (int k = 0; k < D; k += 2) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = AW'(k);   a_wdata = rnd_c(1.0); model[k]   = a_wdata;
      b_en = 1; b_we = 1; b_addr = AW'(k+1); b_wdata = rnd_c(1.0); model[k+1] = b_wdata;
    end
    for (int k = 0; k < 200; k++) begin
      int ra, rb;
      ra = $urandom_range(0, D-1); rb = $urandom_range(0, D-1);
      @(negedge clk);
      a_we = 0; b_we = 0; a_addr = AW'(ra); b_addr = AW'(rb);
      @(posedge clk); #1;
      checks += 2;
      if (a_rdata !== model[ra]) begin failures++; $display("port A addr %0d", ra); end
      if (b_rdata !== model[rb]) begin failures++; $display("port B addr %0d", rb); end
      // overwrite one word through port A and make sure the read-back sees it
      if (k % 10 == 0) begin
        @(negedge clk);
        a_we = 1; a_wdata = rnd_c(1.0); model[ra] = a_wdata; b_en = 0;
        @(negedge clk);
        a_we = 0; b_en = 1; b_addr = AW'(ra);
        @(posedge clk); #1;
        checks++;
        if (b_rdata !== model[ra]) begin failures++; $display("write-read addr %0d", ra); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
