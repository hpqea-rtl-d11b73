// pea: Processing Element Array, four PEs on one shared bus.
//
// The four PEs hold consecutive quarters of this PEA's half of the state
// vector. When a gate's target lies in the PE-index bits, each PE needs the
// amplitude its partner loaded in the same cycle. The shared bus carries
// exactly those values: partner = PE index XOR 2^(target-(n-3)). For targets
// on bits 0/1 of the PE index the partner is in this PEA; for bit 2 it is the
// PE with the same position in the other PEA, whose loads arrive on
// xpea_a/xpea_b. The target is latched from the gate header when the Gate
// Mems are written. The shared bus is combinational; PEs run in lockstep.
// Four PEs per array and a bus joining them follow the paper's figure; the
// routing rule is this design's.
module pea
  import hpqea_pkg::*;
#(
  parameter int unsigned AW     = BRAM_QUBITS - PE_ID_W,
  parameter int unsigned PEA_ID = 0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [QW-1:0] n_qubits,
  input  logic          start,
  output logic [PE_PER_PEA-1:0] busy,
  output logic [PE_PER_PEA-1:0] done,
  // loads of this PEA's PEs, and those of the other PEA
  output cplx_t [PE_PER_PEA-1:0] ld_a,
  output cplx_t [PE_PER_PEA-1:0] ld_b,
  input  cplx_t [PE_PER_PEA-1:0] xpea_a,
  input  cplx_t [PE_PER_PEA-1:0] xpea_b,
  // external State Mem access, one pair of ports per PE
  input  logic                        ext_sel,
  input  lacc_t [PE_PER_PEA-1:0]      ext_a,
  input  lacc_t [PE_PER_PEA-1:0]      ext_b,
  output cplx_t [PE_PER_PEA-1:0]      ext_rdata_a,
  output cplx_t [PE_PER_PEA-1:0]      ext_rdata_b,
  // Gate Mem broadcast
  input  logic          gate_we,
  input  gate_t         gate_in
);
  logic [QW-1:0] target_q;
  logic [QW-1:0] lq;
  logic [PE_ID_W-1:0] xmask;
  cplx_t [PE_PER_PEA-1:0] xin_a, xin_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       target_q <= '0;
    else if (gate_we) target_q <= gate_in.hdr.target;
  end

  always_comb begin
    lq    = n_qubits - QW'(PE_ID_W);
    xmask = '0;
    if (target_q >= lq && target_q - lq < QW'(PE_ID_W))
      xmask = PE_ID_W'(1) << (target_q - lq);
  end

  // shared bus
  always_comb begin
    for (int k = 0; k < PE_PER_PEA; k++) begin
      if (xmask[PE_ID_W-1]) begin
        xin_a[k] = xpea_a[k];
        xin_b[k] = xpea_b[k];
      end else begin
        xin_a[k] = ld_a[k ^ int'(xmask[1:0])];
        xin_b[k] = ld_b[k ^ int'(xmask[1:0])];
      end
    end
  end

  for (genvar k = 0; k < PE_PER_PEA; k++) begin : g_pe
    pe #(.AW(AW), .PE_ID(PEA_ID * PE_PER_PEA + k)) u_pe (
      .clk, .rst_n, .n_qubits, .start,
      .busy(busy[k]), .done(done[k]),
      .ld_a(ld_a[k]), .ld_b(ld_b[k]), .xin_a(xin_a[k]), .xin_b(xin_b[k]),
      .ext_sel,
      .ext_en_a(ext_a[k].en), .ext_we_a(ext_a[k].we),
      .ext_addr_a(AW'(ext_a[k].addr)), .ext_wdata_a(ext_a[k].wdata),
      .ext_en_b(ext_b[k].en), .ext_we_b(ext_b[k].we),
      .ext_addr_b(AW'(ext_b[k].addr)), .ext_wdata_b(ext_b[k].wdata),
      .ext_rdata_a(ext_rdata_a[k]), .ext_rdata_b(ext_rdata_b[k]),
      .gate_we, .gate_in
    );
  end
endmodule
