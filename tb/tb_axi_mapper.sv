// tb_axi_mapper: AXI4 write and read bursts of random length into the three
// regions, with an internal-bus target model whose ready toggles and whose
// read latency varies. Checks that every beat lands at the right region and
// beat address, that read bursts return the data with RLAST on the last beat,
// that IDs are echoed and that a B response follows every write burst.
module tb_axi_mapper;
  import hpqea_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [3:0] s_awid = 0, s_arid = 0, s_bid, s_rid;
  logic [31:0] s_awaddr = 0, s_araddr = 0;
  logic [7:0] s_awlen = 0, s_arlen = 0;
  logic s_awvalid = 0, s_awready, s_wlast = 0, s_wvalid = 0, s_wready;
  logic [BUS_W-1:0] s_wdata = 0, s_rdata;
  logic [1:0] s_bresp, s_rresp;
  logic s_bvalid, s_bready = 0, s_arvalid = 0, s_arready, s_rlast, s_rvalid, s_rready = 0;
  ibus_req_t ib_req;
  logic ib_ready, ib_rvalid = 0;
  logic [BUS_W-1:0] ib_rdata = 0;
  logic [BUS_W-1:0] tmem [3][64];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  axi_mapper dut (.*);

  // internal-bus target model
  logic tog = 0;
  int   lat = -1;
  logic [BUS_W-1:0] pend;
  assign ib_ready = tog;
  always_ff @(posedge clk) begin
    tog <= ~tog | ($urandom_range(3) == 0);
    ib_rvalid <= 1'b0;
    if (ib_req.valid && ib_ready) begin
      if (ib_req.we) tmem[ib_req.region][ib_req.addr[5:0]] <= ib_req.wdata;
      else begin
        pend <= tmem[ib_req.region][ib_req.addr[5:0]];
        lat  <= $urandom_range(3);
      end
    end else if (lat > 0) lat <= lat - 1;
    else if (lat == 0) begin
      ib_rvalid <= 1'b1; ib_rdata <= pend; lat <= -1;
    end
  end

  function automatic logic [BUS_W-1:0] pat(int r, int b);
    return {8{32'(r * 1000 + b), 32'hA5A5_0000 | 32'(b)}} ^ BUS_W'($urandom);
  endfunction

  logic [BUS_W-1:0] exp_data [3][64];

  task automatic axi_write(int r, int b0, int len, int id);
    @(negedge clk);
    s_awvalid = 1; s_awaddr = (32'(r) << 28) | (32'(b0) << 5); s_awlen = 8'(len - 1); s_awid = 4'(id);
    @(posedge clk); while (!s_awready) @(posedge clk);
    @(negedge clk); s_awvalid = 0;
    for (int i = 0; i < len; i++) begin
      exp_data[r][b0 + i] = pat(r, b0 + i);
      s_wvalid = 1; s_wdata = exp_data[r][b0 + i]; s_wlast = (i == len - 1);
      @(posedge clk); while (!s_wready) @(posedge clk);
      @(negedge clk);
    end
    s_wvalid = 0; s_wlast = 0; s_bready = 1;
    while (!s_bvalid) @(negedge clk);
    checks++;
    if (s_bid != 4'(id) || s_bresp != 0) begin failures++; $display("FAIL B response"); end
    @(negedge clk); s_bready = 0;
  endtask

  task automatic axi_read(int r, int b0, int len, int id);
    @(negedge clk);
    s_arvalid = 1; s_araddr = (32'(r) << 28) | (32'(b0) << 5); s_arlen = 8'(len - 1); s_arid = 4'(id);
    @(posedge clk); while (!s_arready) @(posedge clk);
    @(negedge clk); s_arvalid = 0; s_rready = 1;
    for (int i = 0; i < len; i++) begin
      while (!s_rvalid) @(negedge clk);
      checks++;
      if (s_rdata !== exp_data[r][b0 + i] || s_rlast != (i == len - 1) || s_rid != 4'(id)) begin
        failures++; $display("FAIL read region %0d beat %0d", r, b0 + i);
      end
      @(negedge clk);
    end
    s_rready = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 12; k++) begin
      int r = k % 3, b0 = $urandom_range(40), len = $urandom_range(1, 16);
      axi_write(r, b0, len, k);
      axi_read(r, b0, len, 15 - k);
    end
    // all regions still hold their own data
    for (int r = 0; r < 3; r++) axi_write(r, 60, 2, r);
    for (int r = 0; r < 3; r++) axi_read(r, 60, 2, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
