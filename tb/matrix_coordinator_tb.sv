// matrix_coordinator_tb: host writes of gate matrices must reach the Gate
// Memory write port unchanged one clock later, and host reads must return
// the Gate Memory word with rvalid two clocks after the request. The four Gate
// Memories are modelled by one behavioural array (all receive the same writes).
module matrix_coordinator_tb;
  import qea_pkg::*;
  import tb_pkg::*;
  localparam int GW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, wr_en, rd_en, rvalid, g_we, g_re;
  logic [GW-1:0] wr_idx, rd_idx, g_waddr, g_raddr;
  logic [255:0] wr_data, rdata;
  gate_mat_t g_wdata, g_rdata;
  gate_mat_t mem [64];
  gate_mat_t model [64];

  matrix_coordinator #(.GATE_DEPTH(64)) dut (.*);

  always_ff @(posedge clk) begin
    if (g_we) mem[g_waddr] <= g_wdata;
    if (g_re) g_rdata <= mem[g_raddr];
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; wr_en = 0; rd_en = 0; wr_idx = 0; rd_idx = 0; wr_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 64; k++) begin
      @(negedge clk);
      wr_en = 1; wr_idx = GW'(k);
      wr_data = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      model[k] = gate_mat_t'(wr_data);
      @(posedge clk); #1;
      checks++;
      if (!(g_we && g_waddr == GW'(k) && g_wdata == model[k])) failures++;
    end
    @(negedge clk);
    wr_en = 0;
    for (int k = 0; k < 100; k++) begin
      int r;
      r = $urandom_range(0, 63);
      @(negedge clk);
      rd_en = 1; rd_idx = GW'(r);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rvalid) failures++;
      @(negedge clk);
      checks++;
      if (!(rvalid && rdata == 256'(model[r]))) begin failures++; $display("read %0d", r); end
      @(negedge clk);
      checks++;
      if (rvalid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
