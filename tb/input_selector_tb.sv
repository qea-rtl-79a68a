// input_selector_tb: for each operating mode, checks that every ALU operand is
// the expected one of the own, partner and gate values (all distinct, random).
module input_selector_tb;
  import qea_pkg::*;
  import tb_pkg::*;
  int checks = 0, failures = 0;
  pe_op_e op;
  logic lower, sel_a, sel_b, dense;
  cplx_t own_a, own_b, par_a, par_b;
  cplx_t val [4];
  cplx_t alu_in [8];
  cplx_t exp_in [8];

  input_selector dut (.op, .lower, .sel_a, .sel_b, .own_a, .own_b, .par_a, .par_b, .val, .alu_in, .dense);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 200; k++) begin
      own_a = rnd_c(1.0); own_b = rnd_c(1.0); par_a = rnd_c(1.0); par_b = rnd_c(1.0);
      foreach (val[m]) val[m] = rnd_c(1.0);
      op = pe_op_e'(k % 3);
      lower = k[2]; sel_a = k[3]; sel_b = k[4];
      exp_in = '{default: '0};
      case (op)
        OP_DENSE_LOCAL: exp_in = '{val[0], own_a, val[1], own_b, val[2], own_a, val[3], own_b};
        OP_DENSE_CROSS: exp_in = lower ? '{val[0], own_a, val[1], par_a, val[0], own_b, val[1], par_b}
                                       : '{val[2], par_a, val[3], own_a, val[2], par_b, val[3], own_b};
        default: begin
          exp_in[0] = sel_a ? val[3] : val[0]; exp_in[1] = own_a;
          exp_in[4] = sel_b ? val[3] : val[0]; exp_in[5] = own_b;
        end
      endcase
      #1;
      checks++;
      if (dense != (op != OP_SPARSE)) begin failures++; $display("dense flag k=%0d", k); end
      for (int m = 0; m < 8; m++) begin
        // in sparse mode operands 2,3,6,7 are ignored by the SU
        if (op == OP_SPARSE && (m % 4) >= 2) continue;
        checks++;
        if (alu_in[m] !== exp_in[m]) begin failures++; $display("operand %0d k=%0d op=%0d", m, k, op); end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
