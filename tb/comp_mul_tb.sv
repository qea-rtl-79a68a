// comp_mul_tb: random complex products against real arithmetic, with the
// one-clock latency checked by sampling exactly one clock after the inputs.
module comp_mul_tb;
  import qea_pkg::*;
  import tb_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  cplx_t a, b, p;

  comp_mul dut (.clk, .a, .b, .p);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real er, ei;
    for (int k = 0; k < 500; k++) begin
      @(negedge clk);
      a = (k == 0) ? mk(1.0, 0.0) : rnd_c(1.4);
      b = (k == 0) ? mk(-0.5, 0.25) : rnd_c(1.4);
      er = to_r(a.re)*to_r(b.re) - to_r(a.im)*to_r(b.im);
      ei = to_r(a.re)*to_r(b.im) + to_r(a.im)*to_r(b.re);
      @(posedge clk); #1;
      checks++;
      if (!(er < 2.0 && er >= -2.0 && ei < 2.0 && ei >= -2.0)) ;  // outside Q2.30 range: skip compare
      else if (!close(p, er, ei, 3.0/SCALE)) begin
        failures++;
        $display("mismatch k=%0d got %f %f exp %f %f", k, to_r(p.re), to_r(p.im), er, ei);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
