// alu_tb: both Special Units of the ALU in dense and sparse mode, with results
// streamed one set of inputs per clock and checked two clocks later.
module alu_tb;
  import qea_pkg::*;
  import tb_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic dense;
  cplx_t in [8];
  cplx_t out [2];
  real er [2][$], ei [2][$];

  alu dut (.clk, .dense, .in, .out);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void mulacc(cplx_t a, cplx_t b, ref real r, ref real i);
    r += to_r(a.re)*to_r(b.re) - to_r(a.im)*to_r(b.im);
    i += to_r(a.re)*to_r(b.im) + to_r(a.im)*to_r(b.re);
  endfunction

  initial begin
    for (int k = 0; k < 302; k++) begin
      @(negedge clk);
      // results of the inputs applied two clocks ago
      if (k >= 2) begin
        for (int s = 0; s < 2; s++) begin
          real r, i;
          r = er[s].pop_front(); i = ei[s].pop_front();
          checks++;
          if (!close(out[s], r, i, 4.0/SCALE)) begin
            failures++;
            $display("mismatch k=%0d su=%0d", k, s);
          end
        end
      end
      dense = (k % 3) != 0;
      foreach (in[m]) in[m] = rnd_c(0.7);
      for (int s = 0; s < 2; s++) begin
        real r, i;
        r = 0.0; i = 0.0;
        mulacc(in[4*s], in[4*s+1], r, i);
        if (dense) mulacc(in[4*s+2], in[4*s+3], r, i);
        er[s].push_back(r); ei[s].push_back(i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
