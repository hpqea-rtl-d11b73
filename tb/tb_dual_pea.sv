// tb_dual_pea: the eight-PE engine with 8-word State Mems (AW = 3).
// For n = 6 and n = 3 qubits: loads a random state through the global access
// lanes, applies random dense and diagonal gates on every target qubit (local
// pairs, pairs across PEs of one PEA, pairs across the two PEAs), reads the
// whole state back through the lanes and compares it with the reference
// model. Checks the gate time, 2 * max(1, 2^(n-4)) cycles, and the lanes'
// two-cycle read latency.
module tb_dual_pea;
  import hpqea_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned AW = 3;

  logic clk = 0, rst_n = 0;
  logic [QW-1:0] n_qubits = 6;
  logic start = 0, busy, done, ext_owner = 1;
  gacc_t [1:0] lane = '0;
  cplx_t [1:0] lane_rdata;
  logic gate_we = 0;
  gate_t gate_in = '0;
  int checks = 0, failures = 0, busy_cycles = 0;
  int n_local = 0, n_intra = 0, n_cross = 0;
  amp_t model[];

  always #5 clk = ~clk;
  always @(posedge clk) if (busy) busy_cycles++;

  dual_pea #(.AW(AW)) dut (.*);

  task automatic load_state();
    for (int i = 0; i < model.size(); i += 2) begin
      @(negedge clk);
      lane[0] = '{en: 1, we: 1, addr: BRAM_QUBITS'(i),   wdata: model[i]};
      lane[1] = (i + 1 < model.size()) ? '{en: 1, we: 1, addr: BRAM_QUBITS'(i+1), wdata: model[i+1]} : '0;
    end
    @(negedge clk); lane = '0;
    @(negedge clk);
  endtask

  task automatic check_state(string what);
    for (int i = 0; i < model.size(); i += 2) begin
      @(negedge clk);
      lane[0] = '{en: 1, we: 0, addr: BRAM_QUBITS'(i),   wdata: '0};
      lane[1] = '{en: 1, we: 0, addr: BRAM_QUBITS'(i+1), wdata: '0};
      @(negedge clk); lane = '0;
      @(negedge clk);                        // data two cycles after request
      checks += 2;
      if (amp_t'(lane_rdata[0]) !== model[i]) begin
        failures++; $display("FAIL %s amp %0d: %h vs %h", what, i, lane_rdata[0], model[i]);
      end
      if (amp_t'(lane_rdata[1]) !== model[i+1]) begin
        failures++; $display("FAIL %s amp %0d: %h vs %h", what, i+1, lane_rdata[1], model[i+1]);
      end
    end
  endtask

  task automatic run_gate(mat_t m, int t, bit sparse);
    int n = int'(n_qubits);
    int expect_cycles = (n - 3 == 0) ? 2 : 2 * (1 << (n - 4));
    @(negedge clk);
    gate_in = '0;
    gate_in.hdr.sparse = sparse; gate_in.hdr.target = QW'(t);
    for (int k = 0; k < 4; k++) gate_in.m[k] = m[k];
    gate_we = 1;
    @(negedge clk); gate_we = 0; ext_owner = 0; start = 1; busy_cycles = 0;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    ext_owner = 1;
    checks++;
    if (busy_cycles != expect_cycles) begin
      failures++; $display("FAIL n=%0d t=%0d cycles %0d, expected %0d", n, t, busy_cycles, expect_cycles);
    end
    if (t < n - 3) n_local++; else if (t < n - 1) n_intra++; else n_cross++;
    apply_1q(model, m, t, sparse);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (n_qubits_list[k]) begin
      n_qubits = QW'(n_qubits_list[k]);
      model = new[1 << n_qubits_list[k]];
      foreach (model[i]) model[i] = rand_amp();
      load_state();
      check_state("load");
      for (int t = 0; t < n_qubits_list[k]; t++) begin
        run_gate(g_h(), t, 0);
        check_state($sformatf("n=%0d H t=%0d", n_qubits_list[k], t));
        run_gate(g_rz(0.4 + t), t, 1);
        run_gate(g_ry(1.3 * t + 0.2), t, 0);
        check_state($sformatf("n=%0d Rz Ry t=%0d", n_qubits_list[k], t));
      end
    end
    checks++;
    if (n_local == 0 || n_intra == 0 || n_cross == 0) begin
      failures++; $display("FAIL a pairing mode was not exercised");
    end
    $display("local %0d, intra-PEA %0d, cross-PEA %0d gates", n_local, n_intra, n_cross);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_qubits_list [2] = '{6, 3};

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
