// tb_gate_arbiter: writes a random gate list (header beat + matrix beat per
// gate), reads some beats back over the bus (one-cycle latency), then fetches
// gates in random order and checks the broadcast gate and header one cycle
// after each fetch.
module tb_gate_arbiter;
  import hpqea_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned MG = 16;

  logic clk = 0, rst_n = 0;
  logic bus_valid = 0, bus_we = 0, bus_ready, bus_rvalid;
  logic [IB_AW-1:0] bus_addr = 0;
  logic [BUS_W-1:0] bus_wdata = 0, bus_rdata;
  logic fetch = 0, hdr_valid, gate_we;
  logic [$clog2(MG)-1:0] idx = 0;
  gate_hdr_t hdr;
  gate_t gate_out;
  gate_t gl [MG];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  gate_arbiter #(.MAX_GATES(MG)) dut (.*);

  task automatic wr(int a, logic [BUS_W-1:0] d);
    @(negedge clk); bus_valid = 1; bus_we = 1; bus_addr = IB_AW'(a); bus_wdata = d;
    @(negedge clk); bus_valid = 0; bus_we = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < MG; g++) begin
      gl[g].hdr.kind    = gate_kind_e'($urandom_range(1));
      gl[g].hdr.sparse  = 1'($urandom_range(1));
      gl[g].hdr.target  = QW'($urandom_range(29));
      gl[g].hdr.control = QW'($urandom_range(29));
      for (int k = 0; k < 4; k++) gl[g].m[k] = rand_amp();
      wr(2*g, BUS_W'(gl[g].hdr));
      wr(2*g + 1, gl[g].m);
    end
    for (int b = 0; b < 2 * MG; b += 3) begin
      @(negedge clk); bus_valid = 1; bus_we = 0; bus_addr = IB_AW'(b);
      @(negedge clk); bus_valid = 0;
      checks++;
      if (!bus_rvalid || bus_rdata !== ((b % 2) ? BUS_W'(gl[b/2].m) : BUS_W'(gl[b/2].hdr))) begin
        failures++; $display("FAIL bus read beat %0d", b);
      end
    end
    for (int n = 0; n < 40; n++) begin
      int g = $urandom_range(MG - 1);
      @(negedge clk); fetch = 1; idx = 4'(g);
      @(negedge clk); fetch = 0;
      checks++;
      if (!gate_we || !hdr_valid || gate_out !== gl[g] || hdr !== gl[g].hdr) begin
        failures++; $display("FAIL fetch %0d", g);
      end
      @(negedge clk);
      checks++;
      if (gate_we) begin failures++; $display("FAIL gate_we held"); end
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
