// state_coordinator_tb: a 256-bit word written at word w must put amplitude k
// into PE k at local address w, all four in the same clock; a read must gather
// the four PEs' words at that address, with rvalid exactly three clocks after
// the request (request register, State Memory, gather register). A read right
// after a write to the same word must return the new word. The PEs' State
// Memories are modelled by behavioural arrays with one clock read latency.
module state_coordinator_tb;
  import qea_pkg::*;
  import tb_pkg::*;
  localparam int NQ = 7, AW = NQ - 2, D = 1 << AW;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, wr_en, rd_en, rvalid, h_we;
  logic [AW-1:0] wr_word, rd_word, h_addr;
  logic [255:0] wr_data, rdata;
  logic [3:0] h_en;
  cplx_t h_wdata [4];
  cplx_t h_rdata [4];
  cplx_t mem [4][D];
  logic [255:0] model [D];

  state_coordinator #(.NQ_MAX(NQ)) dut (.*);

  always_ff @(posedge clk)
    for (int p = 0; p < 4; p++)
      if (h_en[p]) begin
        if (h_we) mem[p][h_addr] <= h_wdata[p];
        else      h_rdata[p] <= mem[p][h_addr];
      end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; wr_en = 0; rd_en = 0; wr_word = 0; rd_word = 0; wr_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int w = 0; w < D; w++) begin
      @(negedge clk);
      wr_en = 1; wr_word = AW'(w);
      wr_data = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      model[w] = wr_data;
    end
    @(negedge clk);
    wr_en = 0;
    @(negedge clk);
    // placement: amplitude k of word w in PE k at address w
    for (int w = 0; w < D; w++)
      for (int p = 0; p < 4; p++) begin
        checks++;
        if (mem[p][w] !== cplx_t'(model[w][64*p +: 64])) begin failures++; $display("PE %0d word %0d", p, w); end
      end
    for (int k = 0; k < 100; k++) begin
      int r, lat;
      r = $urandom_range(0, D-1);
      if (k % 2 == 1) begin   // write the word just before reading it
        @(negedge clk);
        wr_en = 1; wr_word = AW'(r);
        wr_data = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
        model[r] = wr_data;
      end
      @(negedge clk);
      wr_en = 0;
      rd_en = 1; rd_word = AW'(r);
      @(negedge clk);
      rd_en = 0;
      lat = 1;
      while (!rvalid && lat < 10) begin @(negedge clk); lat++; end
      checks++;
      if (!(rvalid && lat == 3 && rdata == model[r])) begin failures++; $display("read %0d latency %0d", r, lat); end
      @(negedge clk);
      checks++;
      if (rvalid || rdata != model[r]) begin failures++; $display("rvalid not a pulse or rdata not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
