// tb_hpqea_full: one complete operation of the emulator core at its default
// sizes and at the largest on-chip qubit count, 19 qubits (2^19 amplitudes,
// all eight State Mems full). The host uploads a random state over AXI,
// runs a five-gate circuit that uses every pairing mode (local pair, pair on
// the shared bus, pair across the PEAs) and two CX gates, and reads the whole
// state back; it must equal the reference model bit for bit, and the CYCLES
// register must read 3 per gate + 2^16 per single-qubit gate + 2*(2^17+1)+1
// per CX.
module tb_hpqea_full;
  import hpqea_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [3:0]   s_awid = 0, s_arid = 0, s_bid, s_rid;
  logic [31:0]  s_awaddr = 0, s_araddr = 0;
  logic [7:0]   s_awlen = 0, s_arlen = 0;
  logic         s_awvalid = 0, s_awready, s_wlast = 0, s_wvalid = 0, s_wready;
  logic [255:0] s_wdata = 0, s_rdata;
  logic [1:0]   s_bresp, s_rresp;
  logic         s_bvalid, s_bready = 0, s_arvalid = 0, s_arready, s_rlast, s_rvalid, s_rready = 0;
  logic         hbm_req_valid, hbm_req_ready, hbm_req_we, hbm_rvalid;
  logic [31:0]  hbm_req_addr;
  logic [255:0] hbm_req_wdata, hbm_rdata;
  logic         run_busy, run_done, hbm_mode;

  int checks = 0, failures = 0, n_bursts = 0;
  int n_local = 0, n_intra = 0, n_cross = 0, n_dense = 0, n_sparse = 0, n_cx = 0;
  int n_to_hbm = 0, n_from_hbm = 0, n_switch = 0;

  always #2 clk = ~clk;

  hpqea_top dut (.*);

  hbm_model u_hbm (
    .clk, .req_valid(hbm_req_valid), .req_ready(hbm_req_ready), .req_we(hbm_req_we),
    .req_addr(hbm_req_addr), .req_wdata(hbm_req_wdata), .rvalid(hbm_rvalid), .rdata(hbm_rdata)
  );

  `include "hpqea_host_tasks.svh"

  // ------------------------------------------------------------ mechanism counters
  logic hbm_mode_q = 0;
  always @(posedge clk) begin
    if (dut.pea_start) begin
      unique case (dut.u_dual_pea.g_pea[0].u_pea.xmask)
        3'd0:       n_local++;
        3'd1, 3'd2: n_intra++;
        default:    n_cross++;
      endcase
      if (dut.gate_bc.hdr.sparse) n_sparse++; else n_dense++;
    end
    if (dut.cx_start) n_cx++;
    if (dut.xfer_done) begin
      if (dut.xfer_to_hbm) n_to_hbm++; else n_from_hbm++;
    end
    hbm_mode_q <= hbm_mode;
    if (hbm_mode && !hbm_mode_q) n_switch++;
  end

  // ------------------------------------------------------------ circuits
  typedef struct {
    gate_kind_e kind;
    bit         sparse;
    int         t, c;
    mat_t       m;
  } tgate_t;

  tgate_t circ[$];

  function automatic void add1(mat_t m, int t, bit sparse);
    tgate_t g;
    g.kind = GK_SINGLE; g.sparse = sparse; g.t = t; g.c = 0; g.m = m;
    circ.push_back(g);
  endfunction

  function automatic void addcx(int c, int t);
    tgate_t g;
    g.kind = GK_CX; g.sparse = 0; g.t = t; g.c = c; g.m = '{default: '0};
    circ.push_back(g);
  endfunction

  // QFT: H, controlled phase as Rz(th/2) - CX - Rz(-th/2) - CX on the target,
  // then the qubit-order reversal with SWAP = three CX.
  function automatic void build_qft(int n);
    real pi = 3.14159265358979;
    for (int j = n - 1; j >= 0; j--) begin
      add1(g_h(), j, 0);
      for (int k = j - 1; k >= 0; k--) begin
        real th = pi / real'(1 << (j - k));
        add1(g_rz(th / 2), k, 1);
        addcx(j, k);
        add1(g_rz(-th / 2), k, 1);
        addcx(j, k);
      end
    end
    for (int q = 0; q < n / 2; q++) begin
      addcx(q, n - 1 - q); addcx(n - 1 - q, q); addcx(q, n - 1 - q);
    end
  endfunction

  function automatic void build_layer(int n);
    for (int q = 0; q < n; q++) begin
      add1(g_rx(0.3 * q + 0.1), q, 0);
      add1(g_ry(0.7 * q + 0.2), q, 0);
      add1(g_s(), q, 1);
    end
    for (int q = 0; q + 1 < n; q++) addcx(q, q + 1);
  endfunction

  // ------------------------------------------------------------ host helpers
  function automatic logic [255:0] hdr_beat(tgate_t g);
    gate_hdr_t h;
    h.kind = g.kind; h.sparse = g.sparse; h.target = QW'(g.t); h.control = QW'(g.c);
    return 256'(h);
  endfunction

  function automatic logic [255:0] mat_beat(tgate_t g);
    return {g.m[3], g.m[2], g.m[1], g.m[0]};
  endfunction

  function automatic int expected_cycles(int n);
    int c = 0;
    foreach (circ[i]) begin
      if (circ[i].kind == GK_CX) c += 3 + 2 * ((1 << (n - 2)) + 1) + 1;
      else                       c += 3 + ((n == 3) ? 2 : 2 * (1 << (n - 4)));
    end
    return c;
  endfunction

  task automatic wait_status_clear(int bitpos);
    logic [255:0] v;
    do reg_read(3, v); while (v[bitpos]);
  endtask

  task automatic run_circuit(int n, ref amp_t sv[]);
    logic [255:0] gb[], sb[], v;
    gb = new[2 * circ.size()];
    foreach (circ[i]) begin gb[2*i] = hdr_beat(circ[i]); gb[2*i+1] = mat_beat(circ[i]); end
    upload(GATE_BASE, gb);
    reg_write(1, 256'(n));            // the state layout depends on n: set it first
    sb = new[(sv.size() + 3) / 4];
    foreach (sb[b]) for (int j = 0; j < 4; j++)
      sb[b][64*j +: 64] = (4*b + j < sv.size()) ? sv[4*b + j] : 64'h0;
    upload(STATE_BASE, sb);
    reg_write(2, 256'(circ.size()));
    reg_write(0, 256'd1);
    wait_status_clear(0);
    reg_read(3, v);
    checks++;
    if (!v[1] || v[3]) begin failures++; $display("FAIL n=%0d: status %b", n, v[4:0]); end
    reg_read(4, v);
    checks++;
    if (v[31:0] != 32'(expected_cycles(n))) begin
      failures++; $display("FAIL n=%0d: %0d cycles, expected %0d", n, v[31:0], expected_cycles(n));
    end else $display("n=%0d: %0d gates in %0d cycles", n, circ.size(), v[31:0]);
    foreach (circ[i]) begin
      if (circ[i].kind == GK_CX) apply_cx(sv, circ[i].c, circ[i].t);
      else                       apply_1q(sv, circ[i].m, circ[i].t, circ[i].sparse);
    end
    download(STATE_BASE, sb);
    foreach (sv[i]) begin
      checks++;
      if (sb[i/4][64*(i%4) +: 64] !== sv[i]) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d amp %0d: %h vs %h", n, i, sb[i/4][64*(i%4) +: 64], sv[i]);
      end
    end
  endtask

  // ------------------------------------------------------------ test
  initial begin
    amp_t sv[];
    repeat (3) @(posedge clk);
    rst_n = 1;
    sv = new[1 << BRAM_QUBITS];
    foreach (sv[i]) sv[i] = rand_amp();
    circ.delete();
    add1(g_h(), 0, 0);
    add1(g_h(), 17, 0);
    add1(g_rz(0.6), 18, 1);
    addcx(18, 0);
    addcx(3, 16);
    run_circuit(BRAM_QUBITS, sv);
    $display("mechanisms: local %0d, shared-bus %0d, cross-PEA %0d, dense %0d, sparse %0d, CX %0d",
             n_local, n_intra, n_cross, n_dense, n_sparse, n_cx);
    checks++;
    if (n_local == 0 || n_intra == 0 || n_cross == 0 || n_sparse == 0 || n_cx != 2) begin
      failures++; $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
