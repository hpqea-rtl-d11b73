// hpqea_host_tasks.svh: host-side tasks for testbenches of hpqea_top, included
// inside the testbench module. They act as the host's DMA engine on the AXI4
// port: burst writes and reads, register access, gate-list and state-vector
// upload and download. Expects the testbench to declare the AXI signals with
// the names of hpqea_top's ports, `clk`, and an int `n_bursts`.

localparam logic [31:0] REG_BASE   = 32'h0000_0000;
localparam logic [31:0] GATE_BASE  = 32'h1000_0000;
localparam logic [31:0] STATE_BASE = 32'h2000_0000;

task automatic axi_write_burst(input logic [31:0] addr, input logic [255:0] d[],
                               input int first, input int len);
  @(negedge clk);
  s_awvalid = 1; s_awaddr = addr; s_awlen = 8'(len - 1); s_awid = 4'd1;
  @(posedge clk); while (!s_awready) @(posedge clk);
  @(negedge clk); s_awvalid = 0;
  for (int i = 0; i < len; i++) begin
    s_wvalid = 1; s_wdata = d[first + i]; s_wlast = (i == len - 1);
    @(posedge clk); while (!s_wready) @(posedge clk);
    @(negedge clk);
  end
  s_wvalid = 0; s_wlast = 0; s_bready = 1;
  while (!s_bvalid) @(negedge clk);
  @(negedge clk); s_bready = 0;
  if (len > 1) n_bursts++;
endtask

task automatic axi_read_burst(input logic [31:0] addr, ref logic [255:0] d[],
                              input int first, input int len);
  @(negedge clk);
  s_arvalid = 1; s_araddr = addr; s_arlen = 8'(len - 1); s_arid = 4'd2;
  @(posedge clk); while (!s_arready) @(posedge clk);
  @(negedge clk); s_arvalid = 0; s_rready = 1;
  for (int i = 0; i < len; i++) begin
    while (!s_rvalid) @(negedge clk);
    d[first + i] = s_rdata;
    @(negedge clk);
  end
  s_rready = 0;
  if (len > 1) n_bursts++;
endtask

task automatic reg_write(input int r, input logic [255:0] v);
  logic [255:0] d[] = new[1];
  d[0] = v;
  axi_write_burst(REG_BASE | (32'(r) << 5), d, 0, 1);
endtask

task automatic reg_read(input int r, output logic [255:0] v);
  logic [255:0] d[] = new[1];
  axi_read_burst(REG_BASE | (32'(r) << 5), d, 0, 1);
  v = d[0];
endtask

// beats: array of 256-bit beats, sent in bursts of up to 256
task automatic upload(input logic [31:0] base, input logic [255:0] beats[]);
  for (int b = 0; b < beats.size(); b += 256) begin
    int len = (beats.size() - b > 256) ? 256 : beats.size() - b;
    axi_write_burst(base | (32'(b) << 5), beats, b, len);
  end
endtask

task automatic download(input logic [31:0] base, ref logic [255:0] beats[]);
  for (int b = 0; b < beats.size(); b += 256) begin
    int len = (beats.size() - b > 256) ? 256 : beats.size() - b;
    axi_read_burst(base | (32'(b) << 5), beats, b, len);
  end
endtask
