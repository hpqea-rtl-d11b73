// dual_pea: the two Processing Element Arrays and the global access bus.
//
// PEA0 holds amplitudes 0 .. 2^(n-1)-1, PEA1 the upper half; inside each, the
// four PEs hold consecutive quarters (global index = {PEA, PE, word}). For a
// single-qubit gate all eight PEs are started together and `done` rises when
// all of them finish. The loads of the two PEAs are cross-wired so a gate on
// the top qubit pairs PE k of PEA0 with PE k of PEA1.
//
// Global access bus (the vertical bus beside the PEAs in the paper's figure):
// two lanes of global amplitude accesses, used by the CX Swapper or the State
// Arbiter while they own the memories (ext_owner = 1). A lane's global index
// is split by the current qubit count into PE number and word. The request is
// registered on the bus, so a read returns its data on lane_rdata two cycles
// after it was presented and a write lands one cycle after it was presented.
// Lane 0 uses port A and lane 1 port B of the addressed PE, so the two lanes
// never collide even when they address the same PE.
module dual_pea
  import hpqea_pkg::*;
#(
  parameter int unsigned AW = BRAM_QUBITS - PE_ID_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [QW-1:0] n_qubits,
  input  logic          start,
  output logic          busy,
  output logic          done,
  input  logic          ext_owner,
  input  gacc_t [1:0]   lane,
  output cplx_t [1:0]   lane_rdata,
  input  logic          gate_we,
  input  gate_t         gate_in
);
  gacc_t [1:0]              lane_q;
  logic  [1:0][PE_ID_W-1:0] lane_pe_q, lane_pe_qq;
  lacc_t [NUM_PE-1:0]       ext_a, ext_b;
  cplx_t [NUM_PE-1:0]       rd_a, rd_b;
  cplx_t [NUM_PE-1:0]       ld_a, ld_b;
  logic  [NUM_PE-1:0]       pe_busy, pe_done;

  function automatic logic [PE_ID_W-1:0] pe_of(logic [BRAM_QUBITS-1:0] g,
                                               logic [QW-1:0] n);
    return PE_ID_W'(g >> (n - QW'(PE_ID_W)));
  endfunction

  function automatic logic [BRAM_QUBITS-1:0] word_of(logic [BRAM_QUBITS-1:0] g,
                                                     logic [QW-1:0] n);
    return g & ((BRAM_QUBITS'(1) << (n - QW'(PE_ID_W))) - 1'b1);
  endfunction

  // bus register stage
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lane_q     <= '0;
      lane_pe_q  <= '0;
      lane_pe_qq <= '0;
    end else begin
      lane_q     <= ext_owner ? lane : '0;
      lane_pe_q  <= {pe_of(lane[1].addr, n_qubits), pe_of(lane[0].addr, n_qubits)};
      lane_pe_qq <= lane_pe_q;
    end
  end

  always_comb begin
    for (int p = 0; p < NUM_PE; p++) begin
      ext_a[p] = '0;
      ext_b[p] = '0;
      if (lane_q[0].en && lane_pe_q[0] == PE_ID_W'(p)) begin
        ext_a[p].en    = 1'b1;
        ext_a[p].we    = lane_q[0].we;
        ext_a[p].addr  = (BRAM_QUBITS-PE_ID_W)'(word_of(lane_q[0].addr, n_qubits));
        ext_a[p].wdata = lane_q[0].wdata;
      end
      if (lane_q[1].en && lane_pe_q[1] == PE_ID_W'(p)) begin
        ext_b[p].en    = 1'b1;
        ext_b[p].we    = lane_q[1].we;
        ext_b[p].addr  = (BRAM_QUBITS-PE_ID_W)'(word_of(lane_q[1].addr, n_qubits));
        ext_b[p].wdata = lane_q[1].wdata;
      end
    end
    lane_rdata[0] = rd_a[lane_pe_qq[0]];
    lane_rdata[1] = rd_b[lane_pe_qq[1]];
  end

  for (genvar a = 0; a < NUM_PEA; a++) begin : g_pea
    localparam int unsigned O = a * PE_PER_PEA;
    localparam int unsigned X = (1 - a) * PE_PER_PEA;
    pea #(.AW(AW), .PEA_ID(a)) u_pea (
      .clk, .rst_n, .n_qubits, .start,
      .busy(pe_busy[O +: PE_PER_PEA]), .done(pe_done[O +: PE_PER_PEA]),
      .ld_a(ld_a[O +: PE_PER_PEA]), .ld_b(ld_b[O +: PE_PER_PEA]),
      .xpea_a(ld_a[X +: PE_PER_PEA]), .xpea_b(ld_b[X +: PE_PER_PEA]),
      .ext_sel(ext_owner),
      .ext_a(ext_a[O +: PE_PER_PEA]), .ext_b(ext_b[O +: PE_PER_PEA]),
      .ext_rdata_a(rd_a[O +: PE_PER_PEA]), .ext_rdata_b(rd_b[O +: PE_PER_PEA]),
      .gate_we, .gate_in
    );
  end

  assign busy = |pe_busy;
  assign done = &pe_done;

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (|pe_done) |-> (&pe_done));
  a_no_ext_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !ext_owner);
endmodule
