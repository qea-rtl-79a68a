// state_coordinator: moves state-vector words between the host bus and the PEs.
//
// One 256-bit bus word carries four consecutive amplitudes 4w..4w+3 ({im,re}
// each, amplitude 4w+k in bits 64k+63:64k). With the interleaved distribution
// amplitude 4w+k belongs to PE k at local address w, so the coordinator splits
// a written word into four amplitudes that reach all four State Memories in
// the same clock, and gathers the four amplitudes of a read back into one word.
//
// Both directions are registered, so the wide host bus and the four PE memory
// ports are separated by one flop stage each way:
//   write: wr_en at clock t -> h_en/h_we/h_addr/h_wdata driven from a register
//          at t+1 (the PEs write at the end of t+1);
//   read:  rd_en at clock t -> request at the PEs at t+1, State Memory data on
//          h_rdata at t+2, gathered word on rdata with rvalid high at t+3.
// rdata holds the last word read until the next read completes. A write and a
// read in the same clock are not expected (the AXI mapper takes one per clock);
// if both come, the write wins and no rvalid follows. Used to load the initial
// state and to read the final state while the core is idle.
//
// From the paper: a State Coordinator that assists the AXI Mapper by routing
// state data to the State Memory of each PE. The word layout, the interleaved
// distribution and the register stages are this design's own choices.
module state_coordinator
  import qea_pkg::*;
#(
  parameter int NQ_MAX = 17,
  parameter int AW     = NQ_MAX - PE_BITS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // from the AXI mapper
  input  logic                  wr_en,
  input  logic [AW-1:0]         wr_word,
  input  logic [AXI_DATA_W-1:0] wr_data,
  input  logic                  rd_en,
  input  logic [AW-1:0]         rd_word,
  output logic                  rvalid,
  output logic [AXI_DATA_W-1:0] rdata,
  // to the PE array
  output logic [NUM_PE-1:0]     h_en,
  output logic                  h_we,
  output logic [AW-1:0]         h_addr,
  output cplx_t                 h_wdata [NUM_PE],
  input  cplx_t                 h_rdata [NUM_PE]
);
  logic rd_wait;     // a read request is at the PEs this clock
  logic rd_wait_q;   // its data is on h_rdata this clock

  // request stage: split the word, one amplitude per PE
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      h_en    <= '0;
      h_we    <= 1'b0;
      rd_wait <= 1'b0;
    end else begin
      h_en    <= (wr_en || rd_en) ? '1 : '0;
      h_we    <= wr_en;
      rd_wait <= rd_en && !wr_en;
    end
    h_addr <= wr_en ? wr_word : rd_word;
    for (int k = 0; k < NUM_PE; k++) h_wdata[k] <= wr_data[64*k +: 64];
  end

  // response stage: gather the four amplitudes into one word
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rvalid <= 1'b0;
      rdata  <= '0;
    end else begin
      rvalid <= 1'b0;
      if (rd_wait_q) begin
        rvalid <= 1'b1;
        for (int k = 0; k < NUM_PE; k++) rdata[64*k +: 64] <= h_rdata[k];
      end
    end
  end

  // the State Memory answers one clock after the request sits at the PEs
  always_ff @(posedge clk) begin
    if (!rst_n) rd_wait_q <= 1'b0;
    else        rd_wait_q <= rd_wait;
  end
endmodule
