// axi_mapper_tb: single-beat AXI writes and reads to every region of the map,
// with the master holding bready and rready low for random times. Checks the
// decoded write strobes, addresses and data, the control register and start
// pulse, the status word, and read data returned from behavioural models of
// the Matrix Coordinator (two-clock latency) and State Coordinator (one clock).
module axi_mapper_tb;
  import qea_pkg::*;
  localparam int GW = 6, NQ = 7, AW = NQ - 2;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, starts = 0;
  logic rst_n;
  logic s_axi_awvalid, s_axi_awready, s_axi_wvalid, s_axi_wready, s_axi_bvalid, s_axi_bready;
  logic s_axi_arvalid, s_axi_arready, s_axi_rvalid, s_axi_rready;
  logic [31:0] s_axi_awaddr, s_axi_araddr;
  logic [255:0] s_axi_wdata, s_axi_rdata, mat_rdata, st_rdata, wr_data;
  logic [1:0] s_axi_bresp, s_axi_rresp;
  logic ctrl_start, stat_done, stat_busy, ctx_we, mat_wr_en, mat_rd_en, mat_rvalid;
  logic st_wr_en, st_rd_en, st_rvalid;
  logic [QB_W-1:0] ctrl_n;
  logic [GW:0] ctrl_num_gates, stat_cnt_sparse, stat_cnt_dense, stat_cnt_cx;
  logic [GW-1:0] ctx_waddr, mat_wr_idx, mat_rd_idx;
  gate_ctx_t ctx_wdata;
  logic [AW-1:0] st_wr_word, st_rd_word;
  logic mat_q;
  // what the decoder delivered
  logic [255:0] got_data;
  logic [3:0] got_region;
  logic [18:0] got_word;

  axi_mapper #(.GATE_DEPTH(64), .NQ_MAX(NQ)) dut (.*);

  // read-side unit models: data is a function of the word index
  always_ff @(posedge clk) begin
    mat_q      <= mat_rd_en;
    mat_rvalid <= mat_q;
    st_rvalid  <= st_rd_en;
    if (mat_rd_en) mat_rdata <= {8{26'h1234567 ^ 26'(mat_rd_idx), 6'(mat_rd_idx)}};
    if (st_rd_en)  st_rdata  <= {8{27'h5555555 ^ 27'(st_rd_word), 5'(st_rd_word)}};
    if (ctrl_start && rst_n) starts++;
  end

  always @(posedge clk) begin
    if (ctx_we)    begin got_region <= 4'd1; got_word <= 19'(ctx_waddr);  got_data <= 256'(ctx_wdata); end
    if (mat_wr_en) begin got_region <= 4'd2; got_word <= 19'(mat_wr_idx); got_data <= wr_data; end
    if (st_wr_en)  begin got_region <= 4'd3; got_word <= 19'(st_wr_word); got_data <= wr_data; end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic axi_write(logic [31:0] addr, logic [255:0] data);
    @(negedge clk);
    s_axi_awvalid = 1; s_axi_awaddr = addr; s_axi_wvalid = 1; s_axi_wdata = data;
    s_axi_bready = 0;
    do @(posedge clk); while (!(s_axi_awready && s_axi_wready));
    @(negedge clk);
    s_axi_awvalid = 0; s_axi_wvalid = 0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
    s_axi_bready = 1;
    do @(posedge clk); while (!s_axi_bvalid);
    @(negedge clk);
    s_axi_bready = 0;
  endtask

  task automatic axi_read(logic [31:0] addr, output logic [255:0] data);
    @(negedge clk);
    s_axi_arvalid = 1; s_axi_araddr = addr; s_axi_rready = 0;
    do @(posedge clk); while (!s_axi_arready);
    @(negedge clk);
    s_axi_arvalid = 0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
    s_axi_rready = 1;
    do @(posedge clk); while (!s_axi_rvalid);
    data = s_axi_rdata;
    @(negedge clk);
    s_axi_rready = 0;
  endtask

  initial begin
    logic [255:0] d, r;
    rst_n = 0; s_axi_awvalid = 0; s_axi_wvalid = 0; s_axi_bready = 0; s_axi_arvalid = 0; s_axi_rready = 0;
    s_axi_awaddr = 0; s_axi_araddr = 0; s_axi_wdata = '0;
    stat_done = 0; stat_busy = 0; stat_cnt_sparse = 7; stat_cnt_dense = 9; stat_cnt_cx = 11;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 60; k++) begin
      int reg_i, w;
      reg_i = $urandom_range(1, 3);
      w = $urandom_range(0, 31);
      d = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      got_region = 0;
      axi_write({4'd0, 4'(reg_i), 19'(w), 5'd0}, d);
      checks++;
      if (got_region != 4'(reg_i) || got_word != 19'(w) ||
          (reg_i == 1 ? got_data[11:0] != d[11:0] : got_data != d)) begin
        failures++; $display("write k=%0d region %0d", k, reg_i);
      end
      if (reg_i != 1) begin
        axi_read({4'd0, 4'(reg_i), 19'(w), 5'd0}, r);
        checks++;
        if (reg_i == 2 ? r != {8{26'h1234567 ^ 26'(w), 6'(w)}} : r != {8{27'h5555555 ^ 27'(w), 5'(w)}}) begin
          failures++; $display("read k=%0d region %0d", k, reg_i);
        end
      end
    end
    // control register and start pulse
    d = '0; d[4:0] = 5'd13; d[38:32] = 7'd42; d[64] = 1'b1;
    axi_write(32'h0, d);
    checks++;
    if (ctrl_n != 5'd13 || ctrl_num_gates != 7'd42 || starts != 1) begin failures++; $display("control write %0d %0d %0d", ctrl_n, ctrl_num_gates, starts); end
    stat_done = 1; stat_busy = 0;
    axi_read(32'h0, r);
    checks++;
    if (r[0] != 1'b1 || r[1] != 1'b0 || r[38:32] != 7'd42 || r[70:64] != 7'd7 || r[102:96] != 7'd9 || r[134:128] != 7'd11) begin
      failures++; $display("status read %h", r[143:0]);
    end
    checks++;
    if (s_axi_bresp != 2'b00 || s_axi_rresp != 2'b00) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
