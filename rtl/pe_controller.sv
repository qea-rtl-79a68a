// pe_controller: sequences one sparse or dense gate inside a PE.
//
// On start it latches n (qubits in use), the gate type ("model"), the target
// qubit and the gate number, reads the gate's 2x2 matrix from Gate Memory into
// the Val0..Val3 registers (one read per gate, as the paper suggests), then
// streams the PE's 2^(n-2) local amplitudes through the ALU two at a time.
//
// Qubit j acts on index bit b = n-1-j (Algorithm 1: the partner of psi[i] is
// psi[i + (1 << (n-(j+1)))]). Amplitude i lives in PE i[1:0] at local address
// i >> 2, so:
//   b >= 2, dense : both members of a pair are local, at addresses differing in
//                   local bit b-2 (OP_DENSE_LOCAL)
//   b <  2, dense : the partner is at the same local address in PE (PE_ID xor
//                   2^b); all PEs run in lock step and exchange read data
//                   (OP_DENSE_CROSS); lower = this PE holds the bit-b = 0 side
//   sparse        : every amplitude on its own, diagonal entry chosen by bit b
//
// Timing: a read of two words is issued every second clock, the results are
// written back three clocks later (memory 1 + multiply 1 + add 1), so reads
// and writes never meet on a memory port. A gate takes 2^(n-3) issues; done
// pulses for one clock, 2^(n-2) + 5 clocks after the edge that samples start
// (gate-value load 2, issues 2^(n-2) - 1, pipeline drain 4). n must be at least 3 (the paper's smallest circuit).
// The issue schedule and the cross-PE pairing are this design's choices.
module pe_controller
  import qea_pkg::*;
#(
  parameter int NQ_MAX     = 17,
  parameter int AW         = NQ_MAX - PE_BITS,
  parameter int GATE_DEPTH = 2048,
  parameter int GW         = $clog2(GATE_DEPTH),
  parameter logic [PE_BITS-1:0] PE_ID = '0
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [QB_W-1:0] n,
  input  gate_type_e      model,
  input  logic [QB_W-1:0] target,
  input  logic [GW-1:0]   gate_idx,
  output logic            done,
  output logic            busy,
  // gate values
  output logic            gre,
  output logic [GW-1:0]   graddr,
  output logic            val_load,
  // operand selection, aligned with the State Memory read data
  output pe_op_e          op,
  output logic            lower,
  output logic            sel_a,
  output logic            sel_b,
  // compute ports towards the Data Coordinator (write data comes from the ALU)
  output logic            ca_en, ca_we,
  output logic [AW-1:0]   ca_addr,
  output logic            cb_en, cb_we,
  output logic [AW-1:0]   cb_addr
);
  typedef enum logic [2:0] {S_IDLE, S_GLOAD, S_GLAT, S_RUN, S_DRAIN} state_e;
  localparam int LAT = 3;   // issue to write-back

  state_e          state;
  logic [QB_W-1:0] bpos;      // index bit of the target qubit
  logic [AW-1:0]   t, last_t;
  logic            phase;
  logic [GW-1:0]   gidx;

  logic [AW-1:0]   iss_a, iss_b;
  logic            iss_sel_a, iss_sel_b, issue;
  logic [LAT:1]    vld;
  logic [AW-1:0]   dly_a [LAT+1];
  logic [AW-1:0]   dly_b [LAT+1];

  // issue addresses and diagonal selects for count t
  always_comb begin
    logic [QB_W-1:0] lb;
    lb = bpos - QB_W'(PE_BITS);
    if (op == OP_DENSE_LOCAL) begin
      iss_a = AW'(insert_bit(32'(t), int'(lb), 1'b0));
      iss_b = iss_a | (AW'(1) << lb);
    end else begin
      iss_a = {t[AW-2:0], 1'b0};
      iss_b = {t[AW-2:0], 1'b1};
    end
    if (bpos >= QB_W'(PE_BITS)) begin
      iss_sel_a = iss_a[lb[$clog2(AW)-1:0]];
      iss_sel_b = iss_b[lb[$clog2(AW)-1:0]];
    end else begin
      iss_sel_a = PE_ID[bpos[0]];
      iss_sel_b = PE_ID[bpos[0]];
    end
  end

  assign issue = (state == S_RUN) && !phase;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      vld   <= '0;
      done  <= 1'b0;
      t     <= '0;
      phase <= 1'b0;
      op    <= OP_SPARSE;
      lower <= 1'b0;
      bpos  <= '0;
      gidx  <= '0;
      last_t <= '0;
    end else begin
      done <= 1'b0;
      vld  <= {vld[LAT-1:1], issue};
      unique case (state)
        S_IDLE: if (start) begin
          bpos   <= n - target - QB_W'(1);
          gidx   <= gate_idx;
          last_t <= AW'((32'd1 << (n - QB_W'(3))) - 32'd1);
          if (model == GATE_SPARSE)               op <= OP_SPARSE;
          else if ((n - target - QB_W'(1)) < QB_W'(PE_BITS)) op <= OP_DENSE_CROSS;
          else                                    op <= OP_DENSE_LOCAL;
          lower  <= (n - target - QB_W'(1)) == '0 ? !PE_ID[0] : !PE_ID[1];
          state  <= S_GLOAD;
        end
        S_GLOAD: state <= S_GLAT;
        S_GLAT: begin
          state <= S_RUN;
          t     <= '0;
          phase <= 1'b0;
        end
        S_RUN: begin
          phase <= !phase;
          if (issue) begin
            t <= t + AW'(1);
            if (t == last_t) state <= S_DRAIN;
          end
        end
        S_DRAIN: if (vld == '0) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // address and select delay lines
  always_comb begin
    dly_a[0] = iss_a;
    dly_b[0] = iss_b;
  end
  always_ff @(posedge clk) begin
    for (int k = 1; k <= LAT; k++) begin
      dly_a[k] <= dly_a[k-1];
      dly_b[k] <= dly_b[k-1];
    end
    sel_a <= iss_sel_a;
    sel_b <= iss_sel_b;
  end

  always_comb begin
    busy     = (state != S_IDLE);
    gre      = (state == S_GLOAD);
    graddr   = gidx;
    val_load = (state == S_GLAT);
    // the write of an older issue and a new read never fall in the same clock
    ca_en   = issue | vld[LAT];
    cb_en   = issue | vld[LAT];
    ca_we   = vld[LAT];
    cb_we   = vld[LAT];
    ca_addr = vld[LAT] ? dly_a[LAT] : iss_a;
    cb_addr = vld[LAT] ? dly_b[LAT] : iss_b;
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(issue && vld[LAT]));
  assert property (@(posedge clk) disable iff (!rst_n) (start && state == S_IDLE) |-> n >= QB_W'(3));
endmodule
