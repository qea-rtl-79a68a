// qea_controller: runs a circuit, one gate after another.
//
// After start it walks the gate contexts 0 .. num_gates-1 in the global gate
// context memory. For each gate it reads the context (one clock), latches type,
// target and control, and starts either the PE array (sparse or dense gate,
// whose matrix sits at the same gate number in every Gate Memory) or the CX
// swapper, then waits for that unit's done before fetching the next gate. The
// latched gate fields stay on the outputs while the gate runs. When the last
// gate completes, done is set and stays set until the next start. Per-type gate
// counters are kept for status. The paper names the controller and its
// start/done handshake with the PE array; the stepping order is this design's.
// Timing: 4 clocks of overhead per gate (fetch, decode, launch, and the clock
// in which the unit's done is seen).
module qea_controller
  import qea_pkg::*;
#(
  parameter int GATE_DEPTH = 2048,
  parameter int GW         = $clog2(GATE_DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [GW:0]     num_gates,
  output logic            done,
  output logic            busy,
  // gate context memory read port
  output logic            ctx_re,
  output logic [GW-1:0]   ctx_raddr,
  input  gate_ctx_t       ctx_rdata,
  // PE array
  output logic            pe_start,
  output gate_type_e      gtype,
  output logic [QB_W-1:0] target,
  output logic [QB_W-1:0] control,
  output logic [GW-1:0]   gate_idx,
  input  logic            pe_done,
  // CX swapper
  output logic            cx_start,
  input  logic            cx_done,
  // status
  output logic [GW:0]     cnt_sparse,
  output logic [GW:0]     cnt_dense,
  output logic [GW:0]     cnt_cx
);
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_DECODE, S_LAUNCH, S_WAIT} state_e;

  state_e      state;
  logic [GW:0] g, total;

  always_comb begin
    busy      = (state != S_IDLE);
    ctx_re    = (state == S_FETCH);
    ctx_raddr = GW'(g);
    gate_idx  = GW'(g);
    pe_start  = (state == S_LAUNCH) && (gtype != GATE_CX);
    cx_start  = (state == S_LAUNCH) && (gtype == GATE_CX);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      done       <= 1'b0;
      g          <= '0;
      total      <= '0;
      gtype      <= GATE_SPARSE;
      target     <= '0;
      control    <= '0;
      cnt_sparse <= '0;
      cnt_dense  <= '0;
      cnt_cx     <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          done       <= (num_gates == '0);
          g          <= '0;
          total      <= num_gates;
          cnt_sparse <= '0;
          cnt_dense  <= '0;
          cnt_cx     <= '0;
          if (num_gates != '0) state <= S_FETCH;
        end
        S_FETCH:  state <= S_DECODE;
        S_DECODE: begin
          gtype   <= ctx_rdata.gtype;
          target  <= ctx_rdata.target;
          control <= ctx_rdata.control;
          state   <= S_LAUNCH;
        end
        S_LAUNCH: begin
          unique case (gtype)
            GATE_SPARSE: cnt_sparse <= cnt_sparse + 1'b1;
            GATE_DENSE:  cnt_dense  <= cnt_dense + 1'b1;
            default:     cnt_cx     <= cnt_cx + 1'b1;
          endcase
          state <= S_WAIT;
        end
        S_WAIT: if ((gtype == GATE_CX) ? cx_done : pe_done) begin
          if (g + 1'b1 == total) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            g     <= g + 1'b1;
            state <= S_FETCH;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
