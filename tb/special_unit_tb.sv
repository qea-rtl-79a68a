// special_unit_tb: dense (i0*i1 + i2*i3) and sparse (i0*i1) results against
// real arithmetic, sampled exactly two clocks after the inputs.
module special_unit_tb;
  import qea_pkg::*;
  import tb_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic dense;
  cplx_t i0, i1, i2, i3, out;

  special_unit dut (.clk, .dense, .i0, .i1, .i2, .i3, .out);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real er, ei;
    for (int k = 0; k < 400; k++) begin
      @(negedge clk);
      dense = k[0];
      i0 = rnd_c(0.7); i1 = rnd_c(0.7); i2 = rnd_c(0.7); i3 = rnd_c(0.7);
      er = to_r(i0.re)*to_r(i1.re) - to_r(i0.im)*to_r(i1.im);
      ei = to_r(i0.re)*to_r(i1.im) + to_r(i0.im)*to_r(i1.re);
      if (dense) begin
        er += to_r(i2.re)*to_r(i3.re) - to_r(i2.im)*to_r(i3.im);
        ei += to_r(i2.re)*to_r(i3.im) + to_r(i2.im)*to_r(i3.re);
      end
      @(posedge clk); @(posedge clk); #1;
      checks++;
      if (!close(out, er, ei, 4.0/SCALE)) begin
        failures++;
        $display("mismatch k=%0d dense=%0d got %f %f exp %f %f", k, dense, to_r(out.re), to_r(out.im), er, ei);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
