// tb_controller: the Controller with models of the Gate Arbiter (header one
// cycle after fetch), the dual PEAs and the CX Swapper (done a fixed number of
// cycles after start). Checks register access, the order and kind of
// dispatched gates, the State Mem owner during each gate, the cycle counter
// (3 control cycles + unit time per gate), the BRAM/HBM mode switch with its
// error flag, and the bulk-transfer command outputs.
module tb_controller;
  import hpqea_pkg::*;
  localparam int unsigned MG = 64;
  localparam int PEA_T = 9, CX_T = 5;

  logic clk = 0, rst_n = 0;
  logic bus_valid = 0, bus_we = 0, bus_ready, bus_rvalid;
  logic [IB_AW-1:0] bus_addr = 0;
  logic [BUS_W-1:0] bus_wdata = 0, bus_rdata;
  logic fetch, hdr_valid = 0;
  logic [$clog2(MG)-1:0] fetch_idx;
  gate_hdr_t hdr = '0;
  logic [QW-1:0] n_qubits, cx_control, cx_target;
  owner_e owner;
  logic pea_start, pea_done, cx_start, cx_done;
  logic xfer_start, xfer_to_hbm, xfer_busy = 0;
  logic [31:0] xfer_hbm_base;
  logic [IB_AW-1:0] xfer_beats;
  logic run_busy, run_done, hbm_mode;
  int checks = 0, failures = 0;
  gate_hdr_t gl [MG];
  int n_pea = 0, n_cx = 0, disp_idx = 0, bad_owner = 0, bad_order = 0, owner_cycles = 0;
  int pea_cnt = -1, cx_cnt = -1;

  always #5 clk = ~clk;

  controller #(.MAX_GATES(MG)) dut (.*);

  // Gate Arbiter model
  always_ff @(posedge clk) begin
    hdr_valid <= fetch;
    hdr       <= gl[fetch_idx];
  end

  // execution unit models
  assign pea_done = (pea_cnt == 0);
  assign cx_done  = (cx_cnt == 0);
  always_ff @(posedge clk) begin
    if (pea_start) begin
      pea_cnt <= PEA_T - 1; n_pea++;
      if (gl[disp_idx].kind != GK_SINGLE) bad_order++;
      disp_idx++;
    end else if (pea_cnt >= 0) pea_cnt <= pea_cnt - 1;
    if (cx_start) begin
      cx_cnt <= CX_T - 1; n_cx++;
      if (gl[disp_idx].kind != GK_CX || cx_control != gl[disp_idx].control
          || cx_target != gl[disp_idx].target) bad_order++;
      disp_idx++;
    end else if (cx_cnt >= 0) cx_cnt <= cx_cnt - 1;
    // every busy cycle of a unit is one ownership check
    if (pea_cnt >= 0) begin owner_cycles++; if (owner != OWN_PE) bad_owner++; end
    if (cx_cnt >= 0)  begin owner_cycles++; if (owner != OWN_CX) bad_owner++; end
  end

  task automatic wr(int a, logic [BUS_W-1:0] d);
    @(negedge clk); bus_valid = 1; bus_we = 1; bus_addr = IB_AW'(a); bus_wdata = d;
    @(negedge clk); bus_valid = 0; bus_we = 0;
  endtask

  task automatic rd(int a, output logic [BUS_W-1:0] d);
    @(negedge clk); bus_valid = 1; bus_we = 0; bus_addr = IB_AW'(a);
    @(negedge clk); bus_valid = 0;
    d = bus_rdata;
  endtask

  initial begin
    logic [BUS_W-1:0] d;
    int ng = 20, expect_cycles = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < MG; g++) begin
      gl[g] = '0;
      gl[g].kind = (g % 3 == 2) ? GK_CX : GK_SINGLE;
      gl[g].control = QW'(g % 4);
      gl[g].target  = QW'((g % 4) + 1);
    end
    for (int g = 0; g < ng; g++) expect_cycles += 3 + ((gl[g].kind == GK_CX) ? CX_T : PEA_T);
    wr(1, 10);
    wr(2, ng);
    rd(1, d); checks++; if (d[4:0] != 10) begin failures++; $display("FAIL NQUBITS"); end
    rd(3, d); checks++; if (d[2] != 0) begin failures++; $display("FAIL BRAM mode expected"); end
    wr(0, 1);
    @(negedge clk);
    checks++; if (!run_busy) begin failures++; $display("FAIL not busy"); end
    while (!run_done) @(negedge clk);
    rd(4, d);
    checks++; if (d[31:0] != expect_cycles) begin failures++; $display("FAIL cycles %0d vs %0d", d[31:0], expect_cycles); end
    checks++; if (n_pea + n_cx != ng || n_cx != 6) begin failures++; $display("FAIL dispatch count %0d %0d", n_pea, n_cx); end
    checks++; if (bad_order != 0) begin failures++; $display("FAIL dispatch order"); end
    checks += owner_cycles; failures += bad_owner;
    if (bad_owner != 0) $display("FAIL owner in %0d of %0d busy cycles", bad_owner, owner_cycles);
    checks++; if (owner != OWN_STATE) begin failures++; $display("FAIL owner after run"); end
    rd(3, d); checks++; if (d[1:0] != 2'b10) begin failures++; $display("FAIL status %b", d[4:0]); end
    // HBM mode: 24 qubits, a run is refused
    wr(1, 24);
    rd(3, d); checks++; if (d[2] != 1) begin failures++; $display("FAIL HBM mode not set"); end
    wr(0, 1);
    repeat (3) @(negedge clk);
    rd(3, d); checks++; if (d[3] != 1 || d[0] != 0) begin failures++; $display("FAIL error flag"); end
    // bulk transfer command
    @(negedge clk); bus_valid = 1; bus_we = 1; bus_addr = 5;
    bus_wdata = '0; bus_wdata[0] = 1; bus_wdata[63:32] = 32'h1234; bus_wdata[87:64] = 24'd77;
    @(negedge clk); bus_valid = 0; bus_we = 0;
    @(negedge clk); bus_valid = 1; bus_we = 1; bus_addr = 0; bus_wdata = 2;
    @(negedge clk); bus_valid = 0; bus_we = 0;
    checks++;
    if (!xfer_start || !xfer_to_hbm || xfer_hbm_base != 32'h1234 || xfer_beats != 77) begin
      failures++; $display("FAIL transfer command");
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
