// tb_pe: one PE (PE number 5 of 8) with a 16-word segment, n = 7 qubits.
// Local-mode gates (targets 0..3) are checked against the reference model on
// the segment; shared-mode gates (targets 4..6) get the partner PE's values
// from a testbench array and must apply row `role` of the gate (role = target
// bit of PE 5's index). Every gate must take 2 * 8 = 16 busy cycles.
module tb_pe;
  import hpqea_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned AW = 4;
  localparam int unsigned ID = 5;
  localparam int unsigned N  = 16;

  logic clk = 0, rst_n = 0;
  logic [QW-1:0] n_qubits = 7;
  logic start = 0, busy, done;
  cplx_t ld_a, ld_b, xin_a, xin_b;
  logic ext_sel = 1;
  logic ext_en_a = 0, ext_we_a = 0, ext_en_b = 0, ext_we_b = 0;
  logic [AW-1:0] ext_addr_a = 0, ext_addr_b = 0;
  cplx_t ext_wdata_a = 0, ext_wdata_b = 0, ext_rdata_a, ext_rdata_b;
  logic gate_we = 0;
  gate_t gate_in = 0;
  int checks = 0, failures = 0;
  amp_t model[], partner [N];
  int busy_cycles;

  always #5 clk = ~clk;

  pe #(.AW(AW), .PE_ID(ID)) dut (.*);

  // partner PE on the shared bus: same local address as this PE's loads
  assign xin_a = partner[dut.addr_a_q];
  assign xin_b = partner[dut.addr_b_q];

  always @(posedge clk) if (busy) busy_cycles++;

  task automatic load_mem();
    for (int i = 0; i < N; i += 2) begin
      @(negedge clk);
      ext_en_a = 1; ext_we_a = 1; ext_addr_a = AW'(i);   ext_wdata_a = model[i];
      ext_en_b = 1; ext_we_b = 1; ext_addr_b = AW'(i+1); ext_wdata_b = model[i+1];
    end
    @(negedge clk); ext_en_a = 0; ext_en_b = 0; ext_we_a = 0; ext_we_b = 0;
  endtask

  task automatic check_mem(string what);
    for (int i = 0; i < N; i++) begin
      @(negedge clk); ext_en_a = 1; ext_addr_a = AW'(i);
      @(negedge clk); ext_en_a = 0;
      checks++;
      if (amp_t'(ext_rdata_a) !== model[i]) begin
        failures++; $display("FAIL %s word %0d: %h vs %h", what, i, ext_rdata_a, model[i]);
      end
    end
  endtask

  task automatic run_gate(mat_t m, int t, bit sparse);
    @(negedge clk);
    gate_in = '0;
    gate_in.hdr.kind = GK_SINGLE; gate_in.hdr.sparse = sparse; gate_in.hdr.target = QW'(t);
    for (int k = 0; k < 4; k++) gate_in.m[k] = m[k];
    gate_we = 1;
    @(negedge clk); gate_we = 0; ext_sel = 0; start = 1; busy_cycles = 0;
    @(negedge clk); start = 0;
    while (!(busy === 1'b0)) @(negedge clk);
    ext_sel = 1;
    checks++;
    if (busy_cycles != 2 * N / 2) begin
      failures++; $display("FAIL cycles t=%0d: %0d", t, busy_cycles);
    end
  endtask

  initial begin
    model = new[N];
    for (int i = 0; i < N; i++) begin model[i] = rand_amp(); partner[i] = rand_amp(); end
    repeat (2) @(posedge clk);
    rst_n = 1;
    load_mem();
    check_mem("load");
    // local mode
    for (int t = 0; t < 4; t++) begin
      automatic mat_t m;
      automatic bit   sp = (t == 2);
      m = sp ? g_rz(0.3 + t) : ((t == 0) ? g_h() : g_ry(1.1 * t));
      run_gate(m, t, sp);
      apply_1q(model, m, t, sp);
      check_mem($sformatf("local t=%0d", t));
    end
    // shared mode: partner values from the testbench
    for (int t = 4; t < 7; t++) begin
      automatic mat_t m;
      automatic int   role = (ID >> (t - 4)) & 1;
      m = (t == 4) ? g_h() : g_rx(0.7 * t);
      run_gate(m, t, 0);
      for (int i = 0; i < N; i++) begin
        if (role == 0) model[i] = caddr(cmulr(m[0], model[i]), cmulr(m[1], partner[i]));
        else           model[i] = caddr(cmulr(m[3], model[i]), cmulr(m[2], partner[i]));
      end
      check_mem($sformatf("shared t=%0d", t));
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
