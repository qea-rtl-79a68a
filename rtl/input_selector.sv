// input_selector: picks the eight ALU operands for the current gate.
//
// Inputs are the two words just read from this PE's State Memory (own_a at the
// lower of the two local addresses, own_b at the other), the two words a partner
// PE read at the same addresses (par_a, par_b, the shared State Data of the open
// PE) and the gate values val[0..3] = u00, u01, u10, u11. Following the pair
// update of the paper's Algorithm 1 (x' = u00 x + u01 y, y' = u10 x + u11 y for
// the pair x = psi[i], y = psi[i+g]):
//   OP_DENSE_LOCAL : own_a = x, own_b = y; SU0 -> x', SU1 -> y'
//   OP_DENSE_CROSS : own_a/own_b are two independent amplitudes of this PE and
//                    par_a/par_b their partners; lower says whether this PE
//                    holds the x side. SU0 and SU1 each produce one own result.
//   OP_SPARSE      : SU0 = diag(sel_a)*own_a, SU1 = diag(sel_b)*own_b, where
//                    sel picks u11 (index bit set) or u00.
// The routing rules are derived here from Algorithm 1; the paper only names the
// block. Purely combinational.
module input_selector
  import qea_pkg::*;
(
  input  pe_op_e op,
  input  logic   lower,
  input  logic   sel_a,
  input  logic   sel_b,
  input  cplx_t  own_a,
  input  cplx_t  own_b,
  input  cplx_t  par_a,
  input  cplx_t  par_b,
  input  cplx_t  val [4],
  output cplx_t  alu_in [8],
  output logic   dense
);
  always_comb begin
    dense = (op != OP_SPARSE);
    alu_in = '{default: '0};
    unique case (op)
      OP_DENSE_LOCAL: begin
        alu_in[0] = val[0]; alu_in[1] = own_a; alu_in[2] = val[1]; alu_in[3] = own_b;
        alu_in[4] = val[2]; alu_in[5] = own_a; alu_in[6] = val[3]; alu_in[7] = own_b;
      end
      OP_DENSE_CROSS: begin
        if (lower) begin
          alu_in[0] = val[0]; alu_in[1] = own_a; alu_in[2] = val[1]; alu_in[3] = par_a;
          alu_in[4] = val[0]; alu_in[5] = own_b; alu_in[6] = val[1]; alu_in[7] = par_b;
        end else begin
          alu_in[0] = val[2]; alu_in[1] = par_a; alu_in[2] = val[3]; alu_in[3] = own_a;
          alu_in[4] = val[2]; alu_in[5] = par_b; alu_in[6] = val[3]; alu_in[7] = own_b;
        end
      end
      default: begin  // OP_SPARSE
        alu_in[0] = sel_a ? val[3] : val[0]; alu_in[1] = own_a;
        alu_in[4] = sel_b ? val[3] : val[0]; alu_in[5] = own_b;
      end
    endcase
  end
endmodule
