// tb_state_arbiter: the State Arbiter between a host bus, an HBM model and a
// model of the PEs' global access bus (two-cycle read latency). Checks bus
// beat writes and reads (four amplitudes per beat in the documented order),
// then bulk transfers State Mems -> HBM and HBM -> State Mems.
module tb_state_arbiter;
  import hpqea_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic bus_valid = 0, bus_we = 0, bus_ready, bus_rvalid;
  logic [IB_AW-1:0] bus_addr = 0;
  logic [BUS_W-1:0] bus_wdata = 0, bus_rdata;
  logic xfer_start = 0, xfer_to_hbm = 0, xfer_busy, xfer_done;
  logic [31:0] xfer_hbm_base = 0;
  logic [IB_AW-1:0] xfer_beats = 0;
  logic hbm_req_valid, hbm_req_ready, hbm_req_we, hbm_rvalid = 0;
  logic [31:0] hbm_req_addr;
  logic [BUS_W-1:0] hbm_req_wdata, hbm_rdata = 0;
  gacc_t [1:0] lane, lane_q;
  cplx_t [1:0] lane_rdata;
  int checks = 0, failures = 0;
  amp_t pemem [64];
  logic [BUS_W-1:0] hbm [64];
  logic [BUS_W-1:0] beats [16];

  always #5 clk = ~clk;

  state_arbiter dut (.*);

  // PE access bus model
  always_ff @(posedge clk) begin
    lane_q <= lane;
    for (int l = 0; l < 2; l++)
      if (lane_q[l].en) begin
        if (lane_q[l].we) pemem[lane_q[l].addr[5:0]] <= lane_q[l].wdata;
        else              lane_rdata[l]              <= pemem[lane_q[l].addr[5:0]];
      end
  end

  // HBM model: accepts every other cycle, read data three cycles later
  logic hbm_tog = 0;
  logic [2:0] rd_pipe = 0;
  logic [31:0] rd_addr [3];
  assign hbm_req_ready = hbm_tog;
  always_ff @(posedge clk) begin
    hbm_tog <= ~hbm_tog;
    rd_pipe <= {rd_pipe[1:0], hbm_req_valid && hbm_req_ready && !hbm_req_we};
    rd_addr[0] <= hbm_req_addr; rd_addr[1] <= rd_addr[0]; rd_addr[2] <= rd_addr[1];
    if (hbm_req_valid && hbm_req_ready && hbm_req_we) hbm[hbm_req_addr[5:0]] <= hbm_req_wdata;
    hbm_rvalid <= rd_pipe[2];
    hbm_rdata  <= hbm[rd_addr[2][5:0]];
  end

  task automatic bus_wr(int a, logic [BUS_W-1:0] d);
    @(negedge clk); bus_valid = 1; bus_we = 1; bus_addr = IB_AW'(a); bus_wdata = d;
    while (!bus_ready) @(negedge clk);
    @(negedge clk); bus_valid = 0; bus_we = 0;
  endtask

  task automatic bus_rd(int a, output logic [BUS_W-1:0] d);
    @(negedge clk); bus_valid = 1; bus_we = 0; bus_addr = IB_AW'(a);
    while (!bus_ready) @(negedge clk);
    @(negedge clk); bus_valid = 0;
    while (!bus_rvalid) @(negedge clk);
    d = bus_rdata;
  endtask

  task automatic xfer(bit to_hbm, int base, int nb);
    @(negedge clk); xfer_start = 1; xfer_to_hbm = to_hbm; xfer_hbm_base = base; xfer_beats = IB_AW'(nb);
    @(negedge clk); xfer_start = 0;
    while (!xfer_done) @(negedge clk);
  endtask

  initial begin
    logic [BUS_W-1:0] d;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 16; b++) begin
      for (int j = 0; j < 4; j++) beats[b][64*j +: 64] = rand_amp();
      bus_wr(b, beats[b]);
    end
    repeat (4) @(negedge clk);
    for (int i = 0; i < 64; i++) begin
      checks++;
      if (pemem[i] !== beats[i/4][64*(i%4) +: 64]) begin failures++; $display("FAIL bus write amp %0d", i); end
    end
    for (int b = 15; b >= 0; b -= 2) begin
      bus_rd(b, d);
      checks++;
      if (d !== beats[b]) begin failures++; $display("FAIL bus read beat %0d", b); end
    end
    // State Mems -> HBM at beat 40
    xfer(1, 40, 6);
    for (int b = 0; b < 6; b++) begin
      checks++;
      if (hbm[40 + b] !== beats[b]) begin failures++; $display("FAIL to-HBM beat %0d", b); end
    end
    // HBM -> State Mems from beat 8
    for (int b = 0; b < 16; b++) for (int j = 0; j < 4; j++) hbm[8 + b][64*j +: 64] = rand_amp();
    xfer(0, 8, 16);
    repeat (2) @(negedge clk);
    for (int i = 0; i < 64; i++) begin
      checks++;
      if (pemem[i] !== hbm[8 + i/4][64*(i%4) +: 64]) begin failures++; $display("FAIL from-HBM amp %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
