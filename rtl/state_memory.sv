// state_memory: one PE's share of the state vector.
//
// DEPTH complex amplitudes (64 bits each) in a true dual-port RAM: ports A and
// B each read or write one word per clock, read data appears one clock after
// the address (registered, like an FPGA block RAM). Results of a gate are
// written back over the old amplitudes, so no second "next state" memory is
// needed, as the paper describes. Writing one address from both ports in the
// same clock is not allowed (the users never do). Not reset.
module state_memory
  import qea_pkg::*;
#(
  parameter int NQ_MAX = 17,
  parameter int DEPTH  = (1 << NQ_MAX) / NUM_PE,
  parameter int AW     = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  cplx_t         a_wdata,
  output cplx_t         a_rdata,
  input  logic          b_en,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  cplx_t         b_wdata,
  output cplx_t         b_rdata
);
  cplx_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) mem[a_addr] <= a_wdata;
      else      a_rdata     <= mem[a_addr];
    end
    if (b_en) begin
      if (b_we) mem[b_addr] <= b_wdata;
      else      b_rdata     <= mem[b_addr];
    end
  end

  // both ports writing the same word in one clock would be a lost update
  assert property (@(posedge clk) !(a_en && a_we && b_en && b_we && a_addr == b_addr));
endmodule
