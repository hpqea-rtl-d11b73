// hpqea_top: the HPQEA quantum-circuit emulator core.
//
// A state-vector emulator: the 2^n complex amplitudes of an n-qubit state sit
// in the State Mems of eight PEs (two PEAs of four), and the circuit is applied
// gate by gate. Single-qubit gates (H, S, Rx, Ry, Rz, or any 2x2 matrix) are
// computed by all eight PEs in parallel, each on its own segment, in place.
// CX gates need no arithmetic and are done by the CX Swapper, which swaps
// amplitude pairs with an overlapped load/store schedule.
//
// Blocks and wiring (after the paper's system figure):
//   host AXI4 (256 bit) -> AXI Mapper -> internal bus -> {Controller registers,
//   Gate Arbiter gate list, State Arbiter state vector}
//   Gate Arbiter -> Gate Mem of every PE; Controller -> dual PEAs, CX Swapper
//   CX Swapper and State Arbiter -> global access bus -> PE State Mems
//   State Arbiter <-> HBM port (brought out: the HBM is the FPGA's hard IP)
//
// Use: write the gate list (region 1) and the initial state (region 2), set
// NQUBITS and NGATES, write CTRL bit0, poll STATUS until done, read the state
// back. See controller.sv, gate_arbiter.sv and state_arbiter.sv for formats.
// Clock: one clock domain (the paper runs it at 250 MHz); reset active low,
// asynchronous.
module hpqea_top
  import hpqea_pkg::*;
#(
  parameter int unsigned AW        = BRAM_QUBITS - PE_ID_W,
  parameter int unsigned MAX_GATES = 4096,
  parameter int unsigned ID_W      = 4,
  parameter int unsigned HBM_AW    = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  // host AXI4 slave
  input  logic [ID_W-1:0]  s_awid,
  input  logic [31:0]      s_awaddr,
  input  logic [7:0]       s_awlen,
  input  logic             s_awvalid,
  output logic             s_awready,
  input  logic [BUS_W-1:0] s_wdata,
  input  logic             s_wlast,
  input  logic             s_wvalid,
  output logic             s_wready,
  output logic [ID_W-1:0]  s_bid,
  output logic [1:0]       s_bresp,
  output logic             s_bvalid,
  input  logic             s_bready,
  input  logic [ID_W-1:0]  s_arid,
  input  logic [31:0]      s_araddr,
  input  logic [7:0]       s_arlen,
  input  logic             s_arvalid,
  output logic             s_arready,
  output logic [ID_W-1:0]  s_rid,
  output logic [BUS_W-1:0] s_rdata,
  output logic [1:0]       s_rresp,
  output logic             s_rlast,
  output logic             s_rvalid,
  input  logic             s_rready,
  // HBM port
  output logic              hbm_req_valid,
  input  logic              hbm_req_ready,
  output logic              hbm_req_we,
  output logic [HBM_AW-1:0] hbm_req_addr,
  output logic [BUS_W-1:0]  hbm_req_wdata,
  input  logic              hbm_rvalid,
  input  logic [BUS_W-1:0]  hbm_rdata,
  // status
  output logic              run_busy,
  output logic              run_done,
  output logic              hbm_mode
);
  localparam int unsigned GIW = $clog2(MAX_GATES);

  ibus_req_t        ib_req;
  logic             ib_ready, ib_rvalid;
  logic [BUS_W-1:0] ib_rdata;

  logic             reg_v, gate_v, state_v, none_v;
  logic             reg_ready, gate_ready, state_ready;
  logic             reg_rvalid, gate_rvalid, state_rvalid;
  logic             none_rvalid;
  logic [BUS_W-1:0] reg_rdata, gate_rdata, state_rdata;

  logic             fetch, hdr_valid, gate_we;
  logic [GIW-1:0]   fetch_idx;
  gate_hdr_t        hdr;
  gate_t            gate_bc;

  logic [QW-1:0]    n_qubits, cx_control, cx_target;
  owner_e           owner;
  logic             pea_start, pea_done, pea_busy;
  logic             cx_start, cx_done, cx_busy;

  logic              xfer_start, xfer_to_hbm, xfer_busy, xfer_done;
  logic [HBM_AW-1:0] xfer_hbm_base;
  logic [IB_AW-1:0]  xfer_beats;

  gacc_t [1:0] cx_lane, sa_lane, lane;
  cplx_t [1:0] lane_rdata;

  axi_mapper #(.ID_W(ID_W)) u_axi_mapper (
    .clk, .rst_n,
    .s_awid, .s_awaddr, .s_awlen, .s_awvalid, .s_awready,
    .s_wdata, .s_wlast, .s_wvalid, .s_wready,
    .s_bid, .s_bresp, .s_bvalid, .s_bready,
    .s_arid, .s_araddr, .s_arlen, .s_arvalid, .s_arready,
    .s_rid, .s_rdata, .s_rresp, .s_rlast, .s_rvalid, .s_rready,
    .ib_req, .ib_ready, .ib_rvalid, .ib_rdata
  );

  // internal bus decode
  assign reg_v   = ib_req.valid && ib_req.region == RG_REGS;
  assign gate_v  = ib_req.valid && ib_req.region == RG_GATE;
  assign state_v = ib_req.valid && ib_req.region == RG_STATE;
  assign none_v  = ib_req.valid && ib_req.region == RG_NONE;

  always_comb begin
    unique case (ib_req.region)
      RG_REGS:  ib_ready = reg_ready;
      RG_GATE:  ib_ready = gate_ready;
      RG_STATE: ib_ready = state_ready;
      default:  ib_ready = 1'b1;
    endcase
    ib_rvalid = reg_rvalid | gate_rvalid | state_rvalid | none_rvalid;
    if (reg_rvalid)       ib_rdata = reg_rdata;
    else if (gate_rvalid) ib_rdata = gate_rdata;
    else if (state_rvalid) ib_rdata = state_rdata;
    else                  ib_rdata = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) none_rvalid <= 1'b0;
    else        none_rvalid <= none_v && !ib_req.we;
  end

  controller #(.MAX_GATES(MAX_GATES), .HBM_AW(HBM_AW)) u_controller (
    .clk, .rst_n,
    .bus_valid(reg_v), .bus_we(ib_req.we), .bus_addr(ib_req.addr), .bus_wdata(ib_req.wdata),
    .bus_ready(reg_ready), .bus_rvalid(reg_rvalid), .bus_rdata(reg_rdata),
    .fetch, .fetch_idx, .hdr_valid, .hdr,
    .n_qubits, .owner,
    .pea_start, .pea_done,
    .cx_start, .cx_control, .cx_target, .cx_done,
    .xfer_start, .xfer_to_hbm, .xfer_hbm_base, .xfer_beats, .xfer_busy,
    .run_busy, .run_done, .hbm_mode
  );

  gate_arbiter #(.MAX_GATES(MAX_GATES)) u_gate_arbiter (
    .clk, .rst_n,
    .bus_valid(gate_v), .bus_we(ib_req.we), .bus_addr(ib_req.addr), .bus_wdata(ib_req.wdata),
    .bus_ready(gate_ready), .bus_rvalid(gate_rvalid), .bus_rdata(gate_rdata),
    .fetch, .idx(fetch_idx), .hdr_valid, .hdr,
    .gate_we, .gate_out(gate_bc)
  );

  state_arbiter #(.HBM_AW(HBM_AW)) u_state_arbiter (
    .clk, .rst_n,
    .bus_valid(state_v), .bus_we(ib_req.we), .bus_addr(ib_req.addr), .bus_wdata(ib_req.wdata),
    .bus_ready(state_ready), .bus_rvalid(state_rvalid), .bus_rdata(state_rdata),
    .xfer_start, .xfer_to_hbm, .xfer_hbm_base, .xfer_beats, .xfer_busy, .xfer_done,
    .hbm_req_valid, .hbm_req_ready, .hbm_req_we, .hbm_req_addr, .hbm_req_wdata,
    .hbm_rvalid, .hbm_rdata,
    .lane(sa_lane), .lane_rdata
  );

  cx_swapper u_cx_swapper (
    .clk, .rst_n, .n_qubits,
    .start(cx_start), .control(cx_control), .target(cx_target),
    .busy(cx_busy), .done(cx_done),
    .lane(cx_lane), .lane_rdata
  );

  assign lane = (owner == OWN_CX) ? cx_lane : sa_lane;

  dual_pea #(.AW(AW)) u_dual_pea (
    .clk, .rst_n, .n_qubits,
    .start(pea_start), .busy(pea_busy), .done(pea_done),
    .ext_owner(owner != OWN_PE), .lane, .lane_rdata,
    .gate_we, .gate_in(gate_bc)
  );

  // Only one unit may work on the state vector at a time.
  a_one_unit: assert property (@(posedge clk) disable iff (!rst_n)
    !(pea_busy && cx_busy) && !((pea_busy || cx_busy) && xfer_busy));
  a_xfer_idle_run: assert property (@(posedge clk) disable iff (!rst_n)
    xfer_done |-> !run_busy);
endmodule
