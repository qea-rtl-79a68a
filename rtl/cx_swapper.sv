// cx_swapper: applies a CX (controlled-NOT) gate by swapping amplitudes.
//
// A CX with control qubit c and target qubit t only exchanges psi[i] and
// psi[i xor 2^tb] for every index i whose control bit cb is 1 (tb = n-1-t,
// cb = n-1-c, qubit 0 being the most significant index bit as in the paper's
// Algorithm 1). No matrix and no multiplier is involved. The paper's
// Algorithm 2 loops over every i with the control bit set, which would swap
// each pair twice; this unit visits only the i whose target bit is 0, i.e.
// 2^(n-2) pairs, by inserting the fixed control (1) and target (0) bits into a
// running counter.
//
// Each pair takes two clocks on the CX bus: a read of both amplitudes
// (CX_addr0 = i, CX_addr1 = i xor 2^tb), then a write of them exchanged; read
// data is expected one clock after the read. done pulses for one clock,
// 2^(n-1) clocks after the edge that samples start.
module cx_swapper
  import qea_pkg::*;
#(
  parameter int NQ_MAX = 17
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [QB_W-1:0]   n,
  input  logic [QB_W-1:0]   control,
  input  logic [QB_W-1:0]   target,
  output logic              done,
  output logic              busy,
  // CX bus
  output logic              cx_en,
  output logic              cx_we,
  output logic [NQ_MAX-1:0] cx_addr0,
  output logic [NQ_MAX-1:0] cx_addr1,
  output cplx_t             cx_wdata0,
  output cplx_t             cx_wdata1,
  input  cplx_t             cx_rdata0,
  input  cplx_t             cx_rdata1
);
  typedef enum logic [1:0] {S_IDLE, S_READ, S_SWAP} state_e;

  state_e            state;
  logic [NQ_MAX-1:0] s, last_s;
  logic [QB_W-1:0]   cb, tb;

  always_comb begin
    logic [31:0] idx;
    if (cb < tb) idx = insert_bit(insert_bit(32'(s), int'(cb), 1'b1), int'(tb), 1'b0);
    else         idx = insert_bit(insert_bit(32'(s), int'(tb), 1'b0), int'(cb), 1'b1);
    cx_addr0  = NQ_MAX'(idx);
    cx_addr1  = NQ_MAX'(idx) | (NQ_MAX'(1) << tb);
    cx_en     = (state != S_IDLE);
    cx_we     = (state == S_SWAP);
    cx_wdata0 = cx_rdata1;
    cx_wdata1 = cx_rdata0;
    busy      = (state != S_IDLE);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      done   <= 1'b0;
      s      <= '0;
      last_s <= '0;
      cb     <= '0;
      tb     <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cb     <= n - control - QB_W'(1);
          tb     <= n - target - QB_W'(1);
          s      <= '0;
          last_s <= NQ_MAX'((32'd1 << (n - QB_W'(2))) - 32'd1);
          state  <= S_READ;
        end
        S_READ: state <= S_SWAP;
        S_SWAP: begin
          if (s == last_s) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            s     <= s + NQ_MAX'(1);
            state <= S_READ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (start && state == S_IDLE) |-> control != target);
endmodule
