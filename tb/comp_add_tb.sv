// comp_add_tb: random complex sums against real arithmetic, one-clock latency.
module comp_add_tb;
  import qea_pkg::*;
  import tb_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  cplx_t a, b, s;

  comp_add dut (.clk, .a, .b, .s);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real er, ei;
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      a = rnd_c(0.99);
      b = rnd_c(0.99);
      er = to_r(a.re) + to_r(b.re);
      ei = to_r(a.im) + to_r(b.im);
      @(posedge clk); #1;
      checks++;
      if (!close(s, er, ei, 1.0/SCALE)) begin
        failures++;
        $display("mismatch k=%0d", k);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
