// lsu: the PE Load/Store Unit: Coordinator, State Mem and Gate Mem.
//
// The Coordinator gives the two State Mem ports either to the PE's own
// datapath (ext_sel = 0) or to the external path (ext_sel = 1) used by the
// State Arbiter to load/unload the state and by the CX Swapper. Updated
// amplitudes are written back to the address they were read from, so a gate
// needs no extra memory, as the paper describes. Read data come back one cycle
// after the request on rdata_a/rdata_b, for whichever side issued it.
// The Gate Mem holds the gate currently being executed; the Gate Arbiter
// writes it (gate_we) before the PE is started. A one-entry Gate Mem is this
// design's choice: the paper names the Gate Mem but not its depth.
module lsu
  import hpqea_pkg::*;
#(
  parameter int unsigned AW = BRAM_QUBITS - PE_ID_W
) (
  input  logic          clk,
  input  logic          rst_n,
  // PE datapath side
  input  logic          pe_en_a, pe_we_a,
  input  logic [AW-1:0] pe_addr_a,
  input  cplx_t         pe_wdata_a,
  input  logic          pe_en_b, pe_we_b,
  input  logic [AW-1:0] pe_addr_b,
  input  cplx_t         pe_wdata_b,
  // external side (State Arbiter / CX Swapper)
  input  logic          ext_sel,
  input  logic          ext_en_a, ext_we_a,
  input  logic [AW-1:0] ext_addr_a,
  input  cplx_t         ext_wdata_a,
  input  logic          ext_en_b, ext_we_b,
  input  logic [AW-1:0] ext_addr_b,
  input  cplx_t         ext_wdata_b,
  output cplx_t         rdata_a,
  output cplx_t         rdata_b,
  // Gate Mem
  input  logic          gate_we,
  input  gate_t         gate_in,
  output gate_t         gate_q
);
  logic          en_a, we_a, en_b, we_b;
  logic [AW-1:0] addr_a, addr_b;
  cplx_t         wdata_a, wdata_b;

  // Coordinator: port ownership.
  always_comb begin
    if (ext_sel) begin
      en_a = ext_en_a; we_a = ext_we_a; addr_a = ext_addr_a; wdata_a = ext_wdata_a;
      en_b = ext_en_b; we_b = ext_we_b; addr_b = ext_addr_b; wdata_b = ext_wdata_b;
    end else begin
      en_a = pe_en_a;  we_a = pe_we_a;  addr_a = pe_addr_a;  wdata_a = pe_wdata_a;
      en_b = pe_en_b;  we_b = pe_we_b;  addr_b = pe_addr_b;  wdata_b = pe_wdata_b;
    end
  end

  state_mem #(.AW(AW)) u_state_mem (
    .clk,
    .en_a, .we_a, .addr_a, .wdata_a, .rdata_a,
    .en_b, .we_b, .addr_b, .wdata_b, .rdata_b
  );

  // Gate Mem
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       gate_q <= '0;
    else if (gate_we) gate_q <= gate_in;
  end

  // The datapath must be idle while the external side owns the memory.
  a_no_pe_when_ext: assert property (@(posedge clk) disable iff (!rst_n)
    ext_sel |-> !(pe_en_a || pe_en_b));
endmodule
