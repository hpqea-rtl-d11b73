// gate_arbiter: gate-list store and distributor.
//
// The host writes the circuit as a list of gates over the internal bus, two
// 256-bit beats per gate: beat 2g holds gate g's header (gate_hdr_t in the low
// bits), beat 2g+1 its 2x2 matrix (four Q2.30 complex entries, a in the low 64
// bits). Both beats can be read back. When the Controller asks for gate `idx`
// (fetch), the gate is read from the store and, one cycle later, broadcast to
// the Gate Mem of every PE (gate_we/gate_out) while its header goes to the
// Controller (hdr_valid/hdr). The paper gives this block's role and its 28.5
// block RAMs; the two-beat format and the depth MAX_GATES = 4096 (about what
// 28.5 RAMs of 36 kb hold at 269 bits per gate) are this design's choices.
// Bus timing: always ready; read data one cycle after the request.
module gate_arbiter
  import hpqea_pkg::*;
#(
  parameter int unsigned MAX_GATES = 4096
) (
  input  logic             clk,
  input  logic             rst_n,
  // internal bus (already decoded to this region)
  input  logic             bus_valid,
  input  logic             bus_we,
  input  logic [IB_AW-1:0] bus_addr,
  input  logic [BUS_W-1:0] bus_wdata,
  output logic             bus_ready,
  output logic             bus_rvalid,
  output logic [BUS_W-1:0] bus_rdata,
  // controller fetch
  input  logic                         fetch,
  input  logic [$clog2(MAX_GATES)-1:0] idx,
  output logic                         hdr_valid,
  output gate_hdr_t                    hdr,
  // broadcast to the PE Gate Mems
  output logic                         gate_we,
  output gate_t                        gate_out
);
  localparam int unsigned GIW = $clog2(MAX_GATES);

  gate_hdr_t            hdr_mem [MAX_GATES];
  logic [BUS_W-1:0]     mat_mem [MAX_GATES];
  logic [GIW-1:0]       bus_gidx;
  logic                 bus_half_q;
  gate_hdr_t            bus_hdr_q;
  logic [BUS_W-1:0]     bus_mat_q;

  assign bus_gidx  = GIW'(bus_addr >> 1);
  assign bus_ready = 1'b1;

  always_ff @(posedge clk) begin
    if (bus_valid && bus_we) begin
      if (bus_addr[0]) mat_mem[bus_gidx] <= bus_wdata;
      else             hdr_mem[bus_gidx] <= bus_wdata[GATE_HDR_W-1:0];
    end
    bus_hdr_q <= hdr_mem[bus_gidx];
    bus_mat_q <= mat_mem[bus_gidx];
    gate_out  <= '{hdr: hdr_mem[idx], m: mat_mem[idx]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bus_rvalid <= 1'b0;
      bus_half_q <= 1'b0;
      gate_we    <= 1'b0;
    end else begin
      bus_rvalid <= bus_valid && !bus_we;
      bus_half_q <= bus_addr[0];
      gate_we    <= fetch;
    end
  end

  assign bus_rdata = bus_half_q ? bus_mat_q : BUS_W'(bus_hdr_q);
  assign hdr_valid = gate_we;
  assign hdr       = gate_out.hdr;
endmodule
