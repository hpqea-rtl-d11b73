// state_arbiter: moves state-vector data into and out of the PE State Mems.
//
// Two sources/destinations share the PEs' global access bus (two lanes):
//  * the host bus: a 256-bit beat b carries amplitudes 4b..4b+3, amplitude j
//    of the beat in bits [64j+63:64j] (real part in the upper 32 bits);
//  * the HBM port (bulk transfer): xfer_start copies xfer_beats beats between
//    HBM beat address xfer_hbm_base.. and on-chip beats 0.. in the direction
//    xfer_to_hbm (1: State Mems to HBM, 0: HBM to State Mems).
// A beat is written to the State Mems in two cycles (two amplitudes per cycle,
// one per lane) and read in four (two request cycles, then the two-cycle bus
// latency). HBM accesses use a valid/ready request and an rvalid response, the
// simplest stand-in for one HBM AXI port. The paper gives this block's role
// (distribute state data from the host and the HBM to internal memory) but
// not its insides; the beat format and handshakes are this design's choices.
// The bus port is ready only when the arbiter is idle, so requests are served
// one at a time and in order.
module state_arbiter
  import hpqea_pkg::*;
#(
  parameter int unsigned HBM_AW = 32     // HBM beat address width
) (
  input  logic             clk,
  input  logic             rst_n,
  // internal bus (decoded to this region)
  input  logic             bus_valid,
  input  logic             bus_we,
  input  logic [IB_AW-1:0] bus_addr,
  input  logic [BUS_W-1:0] bus_wdata,
  output logic             bus_ready,
  output logic             bus_rvalid,
  output logic [BUS_W-1:0] bus_rdata,
  // bulk transfer command
  input  logic              xfer_start,
  input  logic              xfer_to_hbm,
  input  logic [HBM_AW-1:0] xfer_hbm_base,
  input  logic [IB_AW-1:0]  xfer_beats,
  output logic              xfer_busy,
  output logic              xfer_done,
  // HBM port
  output logic              hbm_req_valid,
  input  logic              hbm_req_ready,
  output logic              hbm_req_we,
  output logic [HBM_AW-1:0] hbm_req_addr,
  output logic [BUS_W-1:0]  hbm_req_wdata,
  input  logic              hbm_rvalid,
  input  logic [BUS_W-1:0]  hbm_rdata,
  // global access bus to the dual PEAs
  output gacc_t [1:0]       lane,
  input  cplx_t [1:0]       lane_rdata
);
  typedef enum logic [3:0] {
    S_IDLE, S_W0, S_W1, S_R0, S_R1, S_R2, S_R3, S_BUSRSP, S_HREQ, S_HWAIT, S_HWR
  } sa_state_e;

  sa_state_e         state;
  logic              is_xfer, to_hbm;
  logic [IB_AW-1:0]  beat, beats_left;
  logic [HBM_AW-1:0] hbm_addr;
  logic [BUS_W-1:0]  buf_q;
  logic [BRAM_QUBITS-1:0] base_amp;

  assign base_amp  = BRAM_QUBITS'({beat, 2'b00});
  assign bus_ready = (state == S_IDLE) && !xfer_start;
  assign xfer_busy = is_xfer && (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      is_xfer    <= 1'b0;
      to_hbm     <= 1'b0;
      beat       <= '0;
      beats_left <= '0;
      hbm_addr   <= '0;
      buf_q      <= '0;
      bus_rvalid <= 1'b0;
      xfer_done  <= 1'b0;
    end else begin
      bus_rvalid <= 1'b0;
      xfer_done  <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (xfer_start) begin
            is_xfer    <= 1'b1;
            to_hbm     <= xfer_to_hbm;
            beat       <= '0;
            beats_left <= xfer_beats;
            hbm_addr   <= xfer_hbm_base;
            state      <= (xfer_beats == 0) ? S_IDLE : (xfer_to_hbm ? S_R0 : S_HREQ);
            if (xfer_beats == 0) xfer_done <= 1'b1;
          end else if (bus_valid) begin
            is_xfer <= 1'b0;
            beat    <= bus_addr;
            buf_q   <= bus_wdata;
            state   <= bus_we ? S_W0 : S_R0;
          end
        end
        S_W0: state <= S_W1;
        S_W1: state <= is_xfer ? S_HWR : S_IDLE;    // S_HWR re-used as "next beat"
        S_R0: state <= S_R1;
        S_R1: state <= S_R2;
        S_R2: begin
          buf_q[127:0] <= {lane_rdata[1], lane_rdata[0]};
          state <= S_R3;
        end
        S_R3: begin
          buf_q[255:128] <= {lane_rdata[1], lane_rdata[0]};
          state <= is_xfer ? S_HWR : S_BUSRSP;
        end
        S_BUSRSP: begin
          bus_rvalid <= 1'b1;
          state      <= S_IDLE;
        end
        S_HREQ: if (hbm_req_ready) state <= S_HWAIT;
        S_HWAIT: if (hbm_rvalid) begin
          buf_q <= hbm_rdata;
          state <= S_W0;
        end
        S_HWR: begin
          // to HBM: wait for the write to be accepted; from HBM: nothing to send
          if (!to_hbm || hbm_req_ready) begin
            beat       <= beat + 1'b1;
            hbm_addr   <= hbm_addr + 1'b1;
            beats_left <= beats_left - 1'b1;
            if (beats_left == 1) begin
              state     <= S_IDLE;
              xfer_done <= 1'b1;
            end else begin
              state <= to_hbm ? S_R0 : S_HREQ;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign bus_rdata     = buf_q;
  assign hbm_req_valid = (state == S_HREQ) || (state == S_HWR && to_hbm);
  assign hbm_req_we    = (state == S_HWR);
  assign hbm_req_addr  = hbm_addr;
  assign hbm_req_wdata = buf_q;

  always_comb begin
    lane = '0;
    unique case (state)
      S_W0, S_W1: begin
        for (int l = 0; l < 2; l++) begin
          lane[l].en    = 1'b1;
          lane[l].we    = 1'b1;
          lane[l].addr  = base_amp + BRAM_QUBITS'((state == S_W1 ? 2 : 0) + l);
          lane[l].wdata = buf_q[64*((state == S_W1 ? 2 : 0) + l) +: 64];
        end
      end
      S_R0, S_R1: begin
        for (int l = 0; l < 2; l++) begin
          lane[l].en   = 1'b1;
          lane[l].addr = base_amp + BRAM_QUBITS'((state == S_R1 ? 2 : 0) + l);
        end
      end
      default: ;
    endcase
  end
endmodule
