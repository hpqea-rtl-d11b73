// cx_swapper: executes a CNOT by swapping amplitude pairs in the state vector.
//
// CX(control c, target t) exchanges amplitude i and i + 2^t for every index i
// whose bit c is 1 and bit t is 0: N = 2^(n-2) pairs, no arithmetic. Pair k's
// two indices are k with zeros inserted at bits c and t, then bit c set (and
// bit t set for the second index).
//
// Schedule (the paper's overlapped IDLE/LOAD/STORE flow). One Idl cycle
// computes the first pair (CP). Then LOAD and STORE cycles alternate:
//   LOAD : ER - export the read request of the current pair (both amplitudes
//               at once, lanes 0 and 1);
//          RB - put the data of the read issued two cycles earlier into the
//               buffer, crossed over (that is the swap).
//   STORE: WB - put the current pair's addresses into the write buffer;
//          EW - export the buffered write of the previous pair;
//          CP - compute the next pair's positions.
// The first LOAD/STORE (Start phase) has no RB/EW, the last LOAD/STORE (End
// phase) has no ER/WB/CP. Total: 1 + 2N + 2 = 2*(2^(n-2)+1)+1 cycles, which is
// the count the paper gives; `busy` is high for exactly those cycles and
// `done` pulses in the last one. The last write lands one cycle later, on the
// bus register of the state memory. Pairs are disjoint, so overlapping the
// reads of pair k+1 with the write of pair k is hazard-free.
// Memory interface: two global access lanes with a read latency of two cycles
// (the registered access bus plus the block RAM), as the figure's ER-to-RB
// distance implies.
module cx_swapper
  import hpqea_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic [QW-1:0] n_qubits,
  input  logic          start,
  input  logic [QW-1:0] control,
  input  logic [QW-1:0] target,
  output logic          busy,
  output logic          done,
  output gacc_t [1:0]   lane,
  input  cplx_t [1:0]   lane_rdata
);
  typedef enum logic [1:0] {S_OFF, S_IDL, S_LOAD, S_STORE} cx_state_e;
  typedef logic [MAX_QUBITS-1:0] idx_t;

  cx_state_e     state;
  logic [QW-1:0] ctl_q, tgt_q;
  idx_t          n_pairs, cp_cnt, er_cnt, ew_cnt;
  idx_t          pos0, pos1, waddr0, waddr1;
  cplx_t         wdata0, wdata1;
  logic          er_flag, rb_flag;
  logic          do_er, do_ew, do_cp;
  idx_t          cp0, cp1;

  // CP: positions of pair cp_cnt
  always_comb begin
    logic [QW-1:0] lo, hi;
    idx_t          x;
    lo  = (ctl_q < tgt_q) ? ctl_q : tgt_q;
    hi  = (ctl_q < tgt_q) ? tgt_q : ctl_q;
    x   = insert0(insert0(cp_cnt, lo), hi);
    cp0 = x | (idx_t'(1) << ctl_q);
    cp1 = cp0 | (idx_t'(1) << tgt_q);
  end

  assign do_er = (state == S_LOAD)  && (er_cnt < n_pairs);
  assign do_ew = (state == S_STORE) && rb_flag;
  assign do_cp = (state == S_IDL) || ((state == S_STORE) && (cp_cnt < n_pairs));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_OFF;
      ctl_q   <= '0;
      tgt_q   <= '0;
      n_pairs <= '0;
      cp_cnt  <= '0;
      er_cnt  <= '0;
      ew_cnt  <= '0;
      pos0    <= '0;
      pos1    <= '0;
      waddr0  <= '0;
      waddr1  <= '0;
      wdata0  <= '0;
      wdata1  <= '0;
      er_flag <= 1'b0;
      rb_flag <= 1'b0;
    end else begin
      if (do_cp) begin
        pos0   <= cp0;
        pos1   <= cp1;
        cp_cnt <= cp_cnt + 1'b1;
      end
      unique case (state)
        S_OFF: if (start) begin
          ctl_q   <= control;
          tgt_q   <= target;
          n_pairs <= idx_t'(1) << (n_qubits - QW'(2));
          cp_cnt  <= '0;
          er_cnt  <= '0;
          ew_cnt  <= '0;
          er_flag <= 1'b0;
          rb_flag <= 1'b0;
          state   <= S_IDL;
        end
        S_IDL: state <= S_LOAD;
        S_LOAD: begin
          er_flag <= do_er;
          if (do_er) er_cnt <= er_cnt + 1'b1;
          rb_flag <= er_flag;
          if (er_flag) begin            // RB, crossed over
            wdata0 <= lane_rdata[1];
            wdata1 <= lane_rdata[0];
          end
          state <= S_STORE;
        end
        S_STORE: begin
          if (er_flag) begin            // WB
            waddr0 <= pos0;
            waddr1 <= pos1;
          end
          if (do_ew) ew_cnt <= ew_cnt + 1'b1;
          state <= done ? S_OFF : S_LOAD;
        end
        default: state <= S_OFF;
      endcase
    end
  end

  // The CP of a STORE happens in the same cycle as its WB: WB takes the
  // positions the preceding ER used, CP replaces them with the next pair.
  assign busy = (state != S_OFF);
  assign done = do_ew && (ew_cnt + 1'b1 == n_pairs);

  always_comb begin
    lane = '0;
    if (do_er) begin
      lane[0].en   = 1'b1;
      lane[0].addr = BRAM_QUBITS'(pos0);
      lane[1].en   = 1'b1;
      lane[1].addr = BRAM_QUBITS'(pos1);
    end else if (do_ew) begin
      lane[0].en    = 1'b1;
      lane[0].we    = 1'b1;
      lane[0].addr  = BRAM_QUBITS'(waddr0);
      lane[0].wdata = wdata0;
      lane[1].en    = 1'b1;
      lane[1].we    = 1'b1;
      lane[1].addr  = BRAM_QUBITS'(waddr1);
      lane[1].wdata = wdata1;
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> state == S_OFF);
  a_ctl_ne_tgt: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> control != target);
endmodule
