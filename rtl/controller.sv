// controller: runs a circuit on the dual PEAs and the CX Swapper.
//
// Host registers (internal-bus region REGS, one register per 256-bit beat,
// value in the low bits):
//   0 CTRL    write: bit0 start the circuit, bit1 start a bulk HBM transfer
//   1 NQUBITS qubit count n
//   2 NGATES  number of gates in the gate list
//   3 STATUS  read: bit0 busy, bit1 done, bit2 hbm_mode, bit3 error,
//             bit4 transfer busy
//   4 CYCLES  read: clock cycles of the last run, start to done
//   5 XFER    write: bit0 direction (1 = to HBM), bits 32..63 HBM beat base,
//             bits 64..87 number of beats
// Reads return data one cycle after the request; bits above a register's
// width read as zero (so most of bus_rdata is constant by design).
//
// Run sequence per gate: FETCH (ask the Gate Arbiter for gate pc), GATE (the
// gate is being written into every PE's Gate Mem; its header arrives here),
// DISPATCH (start the dual PEAs for a single-qubit gate or the CX Swapper for
// a CX, and hand the State Mem ports to that unit), EXEC (wait for done). The
// State Arbiter owns the State Mems whenever no circuit runs.
//
// Memory mode: hbm_mode is set automatically when n exceeds the on-chip
// capacity (BRAM_QUBITS = 19), as the paper's hybrid memory scheme does. In
// that mode this design offers the bulk transfer between HBM and the State
// Mems but does not run circuits (error flag): the paper does not describe how
// gates are applied to a state vector larger than the on-chip memory.
module controller
  import hpqea_pkg::*;
#(
  parameter int unsigned MAX_GATES = 4096,
  parameter int unsigned HBM_AW    = 32
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
  // Gate Arbiter
  output logic                         fetch,
  output logic [$clog2(MAX_GATES)-1:0] fetch_idx,
  input  logic                         hdr_valid,
  input  gate_hdr_t                    hdr,
  // execution units
  output logic [QW-1:0]    n_qubits,
  output owner_e           owner,
  output logic             pea_start,
  input  logic             pea_done,
  output logic             cx_start,
  output logic [QW-1:0]    cx_control,
  output logic [QW-1:0]    cx_target,
  input  logic             cx_done,
  // State Arbiter bulk transfer
  output logic              xfer_start,
  output logic              xfer_to_hbm,
  output logic [HBM_AW-1:0] xfer_hbm_base,
  output logic [IB_AW-1:0]  xfer_beats,
  input  logic              xfer_busy,
  // status
  output logic             run_busy,
  output logic             run_done,
  output logic             hbm_mode
);
  localparam int unsigned GIW = $clog2(MAX_GATES);

  typedef enum logic [2:0] {C_IDLE, C_FETCH, C_GATE, C_DISPATCH, C_EXEC} ctl_state_e;

  ctl_state_e      state;
  logic [GIW:0]    n_gates, pc;
  gate_hdr_t       hdr_q;
  logic [31:0]     cycles;
  logic            err;
  logic            start_req;

  assign hbm_mode  = n_qubits > QW'(BRAM_QUBITS);
  assign bus_ready = 1'b1;
  assign start_req = bus_valid && bus_we && bus_addr == 0 && bus_wdata[0];
  assign run_busy  = (state != C_IDLE);

  // register writes, reads
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_qubits      <= QW'(3);
      n_gates       <= '0;
      xfer_to_hbm   <= 1'b0;
      xfer_hbm_base <= '0;
      xfer_beats    <= '0;
      xfer_start    <= 1'b0;
      bus_rvalid    <= 1'b0;
      bus_rdata     <= '0;
    end else begin
      xfer_start <= 1'b0;
      bus_rvalid <= bus_valid && !bus_we;
      if (bus_valid && bus_we && state == C_IDLE) begin
        unique case (bus_addr)
          0: xfer_start <= bus_wdata[1];
          1: n_qubits   <= bus_wdata[QW-1:0];
          2: n_gates    <= bus_wdata[GIW:0];
          5: begin
            xfer_to_hbm   <= bus_wdata[0];
            xfer_hbm_base <= bus_wdata[32 +: HBM_AW];
            xfer_beats    <= bus_wdata[64 +: IB_AW];
          end
          default: ;
        endcase
      end
      if (bus_valid && !bus_we) begin
        unique case (bus_addr)
          1: bus_rdata <= BUS_W'(n_qubits);
          2: bus_rdata <= BUS_W'(n_gates);
          3: bus_rdata <= BUS_W'({xfer_busy, err, hbm_mode, run_done, run_busy});
          4: bus_rdata <= BUS_W'(cycles);
          default: bus_rdata <= '0;
        endcase
      end
    end
  end

  // run FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= C_IDLE;
      pc       <= '0;
      hdr_q    <= '0;
      cycles   <= '0;
      err      <= 1'b0;
      run_done <= 1'b0;
      owner    <= OWN_STATE;
    end else begin
      if (state != C_IDLE) cycles <= cycles + 1'b1;
      unique case (state)
        C_IDLE: if (start_req) begin
          run_done <= 1'b0;
          cycles   <= '0;
          pc       <= '0;
          if (hbm_mode || n_qubits < QW'(PE_ID_W)) begin
            err <= 1'b1;
          end else begin
            err   <= 1'b0;
            state <= (n_gates == 0) ? C_IDLE : C_FETCH;
            if (n_gates == 0) run_done <= 1'b1;
            else              owner    <= OWN_PE;
          end
        end
        C_FETCH: state <= C_GATE;
        C_GATE: if (hdr_valid) begin
          hdr_q <= hdr;
          state <= C_DISPATCH;
        end
        C_DISPATCH: begin
          owner <= (hdr_q.kind == GK_CX) ? OWN_CX : OWN_PE;
          state <= C_EXEC;
        end
        C_EXEC: if ((hdr_q.kind == GK_CX) ? cx_done : pea_done) begin
          pc <= pc + 1'b1;
          if (pc + 1'b1 == n_gates) begin
            state    <= C_IDLE;
            run_done <= 1'b1;
            owner    <= OWN_STATE;
          end else begin
            state <= C_FETCH;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  assign fetch      = (state == C_FETCH);
  assign fetch_idx  = GIW'(pc);
  // start pulses in DISPATCH; the unit's first State Mem access comes one
  // cycle later, when the owner register has already switched
  assign pea_start  = (state == C_DISPATCH) && (hdr_q.kind != GK_CX);
  assign cx_start   = (state == C_DISPATCH) && (hdr_q.kind == GK_CX);
  assign cx_control = hdr_q.control;
  assign cx_target  = hdr_q.target;
endmodule
