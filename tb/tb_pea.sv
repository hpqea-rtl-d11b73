// tb_pea: one Processing Element Array (the upper one, PEA 1) with 4-word
// State Mems, n = 5 qubits. The array holds amplitudes 16..31; the testbench
// plays the lower array on the cross-PEA inputs. Gates on targets 0..1 (local
// pairs), 2..3 (pairs across PEs on the shared bus) and 4 (pairs across the
// arrays) are compared with the reference model; each gate must take 4 cycles.
module tb_pea;
  import hpqea_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned AW = 2;

  logic clk = 0, rst_n = 0;
  logic [QW-1:0] n_qubits = 5;
  logic start = 0;
  logic [PE_PER_PEA-1:0] busy, done;
  cplx_t [PE_PER_PEA-1:0] ld_a, ld_b, xpea_a, xpea_b, ext_rdata_a, ext_rdata_b;
  logic ext_sel = 1;
  lacc_t [PE_PER_PEA-1:0] ext_a = '0, ext_b = '0;
  logic gate_we = 0;
  gate_t gate_in = '0;
  int checks = 0, failures = 0, busy_cycles = 0;
  amp_t model[];
  amp_t snap [32];

  always #5 clk = ~clk;
  always @(posedge clk) if (busy[0]) busy_cycles++;

  pea #(.AW(AW), .PEA_ID(1)) dut (.*);

  // lower array: same PE position, same word as this array's loads
  always_comb begin
    xpea_a[0] = snap[0*4 + int'(dut.g_pe[0].u_pe.addr_a_q)];
    xpea_b[0] = snap[0*4 + int'(dut.g_pe[0].u_pe.addr_b_q)];
    xpea_a[1] = snap[1*4 + int'(dut.g_pe[1].u_pe.addr_a_q)];
    xpea_b[1] = snap[1*4 + int'(dut.g_pe[1].u_pe.addr_b_q)];
    xpea_a[2] = snap[2*4 + int'(dut.g_pe[2].u_pe.addr_a_q)];
    xpea_b[2] = snap[2*4 + int'(dut.g_pe[2].u_pe.addr_b_q)];
    xpea_a[3] = snap[3*4 + int'(dut.g_pe[3].u_pe.addr_a_q)];
    xpea_b[3] = snap[3*4 + int'(dut.g_pe[3].u_pe.addr_b_q)];
  end

  task automatic load();
    for (int w = 0; w < 4; w += 2) begin
      @(negedge clk);
      for (int k = 0; k < 4; k++) begin
        ext_a[k] = '{en: 1, we: 1, addr: (BRAM_QUBITS-PE_ID_W)'(w),   wdata: model[16 + 4*k + w]};
        ext_b[k] = '{en: 1, we: 1, addr: (BRAM_QUBITS-PE_ID_W)'(w+1), wdata: model[16 + 4*k + w + 1]};
      end
    end
    @(negedge clk); ext_a = '0; ext_b = '0;
  endtask

  task automatic check(string what);
    for (int w = 0; w < 4; w++) begin
      @(negedge clk);
      for (int k = 0; k < 4; k++) ext_a[k] = '{en: 1, we: 0, addr: (BRAM_QUBITS-PE_ID_W)'(w), wdata: '0};
      @(negedge clk); ext_a = '0;
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (amp_t'(ext_rdata_a[k]) !== model[16 + 4*k + w]) begin
          failures++; $display("FAIL %s PE %0d word %0d", what, k, w);
        end
      end
    end
  endtask

  task automatic run_gate(mat_t m, int t, bit sparse);
    @(negedge clk);
    gate_in = '0; gate_in.hdr.sparse = sparse; gate_in.hdr.target = QW'(t);
    for (int k = 0; k < 4; k++) gate_in.m[k] = m[k];
    gate_we = 1;
    @(negedge clk); gate_we = 0; ext_sel = 0; start = 1; busy_cycles = 0;
    for (int i = 0; i < 32; i++) snap[i] = model[i];
    @(negedge clk); start = 0;
    while (busy[0]) @(negedge clk);
    ext_sel = 1;
    checks++;
    if (busy_cycles != 4 || done !== '0) begin
      failures++; $display("FAIL t=%0d cycles %0d", t, busy_cycles);
    end
    apply_1q(model, m, t, sparse);
  endtask

  initial begin
    model = new[32];
    foreach (model[i]) begin model[i] = rand_amp(); snap[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    load();
    check("load");
    for (int t = 0; t < 5; t++) begin
      run_gate(g_h(), t, 0);
      check($sformatf("H t=%0d", t));
      run_gate(g_rz(0.9 + t), t, 1);
      run_gate(g_rx(0.5 + t), t, 0);
      check($sformatf("Rz Rx t=%0d", t));
    end
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
