// tb_lsu: Load/Store Unit. Fills the State Mem through the external ports,
// reads it back through both the external and the PE ports (one-cycle read
// latency), overwrites words from the PE side, and checks the Gate Mem.
module tb_lsu;
  import hpqea_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned AW = 4;

  logic clk = 0, rst_n = 0;
  logic          pe_en_a = 0, pe_we_a = 0, pe_en_b = 0, pe_we_b = 0;
  logic [AW-1:0] pe_addr_a = 0, pe_addr_b = 0;
  cplx_t         pe_wdata_a = 0, pe_wdata_b = 0;
  logic          ext_sel = 1;
  logic          ext_en_a = 0, ext_we_a = 0, ext_en_b = 0, ext_we_b = 0;
  logic [AW-1:0] ext_addr_a = 0, ext_addr_b = 0;
  cplx_t         ext_wdata_a = 0, ext_wdata_b = 0;
  cplx_t         rdata_a, rdata_b;
  logic          gate_we = 0;
  gate_t         gate_in = 0, gate_q;
  int   checks = 0, failures = 0;
  amp_t model [16];

  always #5 clk = ~clk;

  lsu #(.AW(AW)) dut (.*);

  task automatic chk(amp_t got, amp_t exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h vs %h", what, got, exp); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // external writes, two words per cycle
    for (int i = 0; i < 16; i += 2) begin
      model[i] = rand_amp(); model[i+1] = rand_amp();
      @(negedge clk);
      ext_en_a = 1; ext_we_a = 1; ext_addr_a = AW'(i);   ext_wdata_a = model[i];
      ext_en_b = 1; ext_we_b = 1; ext_addr_b = AW'(i+1); ext_wdata_b = model[i+1];
    end
    @(negedge clk); ext_en_a = 0; ext_en_b = 0; ext_we_a = 0; ext_we_b = 0;
    // external reads (reverse order on port B)
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      ext_en_a = 1; ext_addr_a = AW'(i);
      ext_en_b = 1; ext_addr_b = AW'(15 - i);
      @(negedge clk);
      ext_en_a = 0; ext_en_b = 0;
      chk(rdata_a, model[i], "ext read A");
      chk(rdata_b, model[15-i], "ext read B");
    end
    // hand the ports to the PE; PE writes some words and reads everything
    ext_sel = 0;
    for (int i = 0; i < 16; i += 4) begin
      model[i] = rand_amp(); model[i+3] = rand_amp();
      @(negedge clk);
      pe_en_a = 1; pe_we_a = 1; pe_addr_a = AW'(i);   pe_wdata_a = model[i];
      pe_en_b = 1; pe_we_b = 1; pe_addr_b = AW'(i+3); pe_wdata_b = model[i+3];
    end
    @(negedge clk); pe_en_a = 0; pe_en_b = 0; pe_we_a = 0; pe_we_b = 0;
    // external port activity must be ignored now
    ext_en_a = 1; ext_we_a = 1; ext_addr_a = 0; ext_wdata_a = '1;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      pe_en_a = 1; pe_addr_a = AW'(i);
      pe_en_b = 1; pe_addr_b = AW'(i ^ 1);
      @(negedge clk);
      pe_en_a = 0; pe_en_b = 0;
      chk(rdata_a, model[i], "pe read A");
      chk(rdata_b, model[i^1], "pe read B");
    end
    ext_en_a = 0; ext_we_a = 0;
    // Gate Mem
    gate_in.hdr.target = 5'd3; gate_in.m[2] = mk(0.25, -0.125);
    @(negedge clk); gate_we = 1;
    @(negedge clk); gate_we = 0; gate_in = '0;
    @(negedge clk);
    checks++;
    if (gate_q.hdr.target != 5'd3 || amp_t'(gate_q.m[2]) != mk(0.25, -0.125)) begin
      failures++; $display("FAIL gate mem");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
