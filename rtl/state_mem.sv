// state_mem: one PE's State Mem, a true dual-port RAM of complex amplitudes.
//
// Two independent ports, A and B, each doing one read or one write per clock.
// Reads are synchronous: the word addressed in cycle k appears on rdata in
// cycle k+1 (block-RAM behaviour). A write does not update rdata. Writing the
// same address from both ports in one cycle is not allowed; port B wins.
// Depth 2**AW words of 64 bits (Q2.30 complex). On the FPGA of the paper the
// eight State Mems together are the 2^19-amplitude on-chip state store.
module state_mem
  import hpqea_pkg::*;
#(
  parameter int unsigned AW = BRAM_QUBITS - PE_ID_W
) (
  input  logic          clk,
  input  logic          en_a,
  input  logic          we_a,
  input  logic [AW-1:0] addr_a,
  input  cplx_t         wdata_a,
  output cplx_t         rdata_a,
  input  logic          en_b,
  input  logic          we_b,
  input  logic [AW-1:0] addr_b,
  input  cplx_t         wdata_b,
  output cplx_t         rdata_b
);
  cplx_t mem [2**AW];

  always_ff @(posedge clk) begin
    if (en_a) begin
      if (we_a) mem[addr_a] <= wdata_a;
      else      rdata_a     <= mem[addr_a];
    end
    if (en_b) begin
      if (we_b) mem[addr_b] <= wdata_b;
      else      rdata_b     <= mem[addr_b];
    end
  end
endmodule
