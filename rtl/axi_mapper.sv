// axi_mapper: AXI4 slave for the host's 256-bit DMA bus.
//
// Turns AXI4 bursts into single-beat requests on the internal bus. The byte
// address selects the region with bits [29:28] (0 registers, 1 gate list,
// 2 state vector) and the 256-bit beat inside it with bits [27:5]; INCR bursts
// step the beat address by one per beat, other burst types are treated as
// INCR. One burst is served at a time, a pending write before a pending read.
// Write beats are forwarded as soon as the target is ready; each read beat
// waits for the target's read response (rvalid) and is then offered on R.
// Unused regions answer reads with zero. Responses are always OKAY, so
// BRESP and RRESP are constant 0. The paper gives only this block's
// role (join the external AXI bus to the internal memory bus) and the 256-bit
// width; the map and the one-burst-at-a-time policy are this design's.
module axi_mapper
  import hpqea_pkg::*;
#(
  parameter int unsigned ID_W = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  // AXI4 slave
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
  // internal bus
  output ibus_req_t        ib_req,
  input  logic             ib_ready,
  input  logic             ib_rvalid,
  input  logic [BUS_W-1:0] ib_rdata
);
  typedef enum logic [2:0] {M_IDLE, M_WDATA, M_BRESP, M_RREQ, M_RWAIT, M_RDATA} map_state_e;

  map_state_e        state;
  logic [ID_W-1:0]   id_q;
  region_e           region_q;
  logic [IB_AW-1:0]  beat_q;
  logic [7:0]        left_q;
  logic [BUS_W-1:0]  rbuf_q;

  assign s_awready = (state == M_IDLE);
  assign s_arready = (state == M_IDLE) && !s_awvalid;
  assign s_wready  = (state == M_WDATA) && ib_ready;
  assign s_bvalid  = (state == M_BRESP);
  assign s_bid     = id_q;
  assign s_bresp   = 2'b00;
  assign s_rvalid  = (state == M_RDATA);
  assign s_rid     = id_q;
  assign s_rdata   = rbuf_q;
  assign s_rresp   = 2'b00;
  assign s_rlast   = (left_q == 0);

  always_comb begin
    ib_req        = '0;
    ib_req.region = region_q;
    ib_req.addr   = beat_q;
    if (state == M_WDATA) begin
      ib_req.valid = s_wvalid;
      ib_req.we    = 1'b1;
      ib_req.wdata = s_wdata;
    end else if (state == M_RREQ) begin
      ib_req.valid = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= M_IDLE;
      id_q     <= '0;
      region_q <= RG_NONE;
      beat_q   <= '0;
      left_q   <= '0;
      rbuf_q   <= '0;
    end else begin
      unique case (state)
        M_IDLE: begin
          if (s_awvalid) begin
            id_q     <= s_awid;
            region_q <= region_e'(s_awaddr[29:28]);
            beat_q   <= IB_AW'(s_awaddr[27:5]);
            left_q   <= s_awlen;
            state    <= M_WDATA;
          end else if (s_arvalid) begin
            id_q     <= s_arid;
            region_q <= region_e'(s_araddr[29:28]);
            beat_q   <= IB_AW'(s_araddr[27:5]);
            left_q   <= s_arlen;
            state    <= M_RREQ;
          end
        end
        M_WDATA: if (s_wvalid && ib_ready) begin
          beat_q <= beat_q + 1'b1;
          left_q <= left_q - 1'b1;
          if (s_wlast || left_q == 0) state <= M_BRESP;
        end
        M_BRESP: if (s_bready) state <= M_IDLE;
        M_RREQ: if (ib_ready) state <= M_RWAIT;
        M_RWAIT: if (ib_rvalid) begin
          rbuf_q <= ib_rdata;
          state  <= M_RDATA;
        end
        M_RDATA: if (s_rready) begin
          if (left_q == 0) state <= M_IDLE;
          else begin
            beat_q <= beat_q + 1'b1;
            left_q <= left_q - 1'b1;
            state  <= M_RREQ;
          end
        end
        default: state <= M_IDLE;
      endcase
    end
  end

  a_wlast: assert property (@(posedge clk) disable iff (!rst_n)
    (state == M_WDATA && s_wvalid && s_wready) |-> (s_wlast == (left_q == 0)));
endmodule
