// pe: Processing Element, one eighth of the state-vector engine.
//
// Holds one contiguous segment of the state vector (2**AW amplitudes) in its
// LSU and applies the single-qubit gate found in its Gate Mem to it, in place.
// Parts: PE Controller (the FSM below), Input Selector, ALU (two Special
// Units) and LSU, as in the paper's PE figure.
//
// Access modes (the paper's two modes, with this design's scheduling):
//  * local  (target < n-3): both amplitudes of a pair live in this PE. Each
//    step reads the pair (i, i + 2^t) through ports A and B, the two SUs
//    compute rows 0 and 1 of the gate, and both results are written back.
//  * shared (target >= n-3): the partner amplitude has the same local address
//    in the partner PE (PE index XOR 2^(t-(n-3))). Each step reads local words
//    2k and 2k+1; the words just loaded are published on ld_a/ld_b and the
//    partner's arrive on xin_a/xin_b over the shared bus, so no PE reads
//    another PE's memory. Both SUs then compute row `role` of the gate, where
//    role is the target bit of this PE's global index.
// One step takes two clocks: RD (issue reads) and WR (compute, write back).
// A gate takes 2 * 2^(n-4) cycles (2 cycles when n = 3 in shared mode), and
// `done` pulses in the last WR cycle. All PEs start together and run in
// lockstep, which keeps the shared-bus exchange aligned.
module pe
  import hpqea_pkg::*;
#(
  parameter int unsigned AW    = BRAM_QUBITS - PE_ID_W,
  parameter int unsigned PE_ID = 0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [QW-1:0] n_qubits,     // 3 .. AW+3
  input  logic          start,
  output logic          busy,
  output logic          done,
  // shared bus
  output cplx_t         ld_a,
  output cplx_t         ld_b,
  input  cplx_t         xin_a,
  input  cplx_t         xin_b,
  // external access to the State Mem (through the LSU coordinator)
  input  logic          ext_sel,
  input  logic          ext_en_a, ext_we_a,
  input  logic [AW-1:0] ext_addr_a,
  input  cplx_t         ext_wdata_a,
  input  logic          ext_en_b, ext_we_b,
  input  logic [AW-1:0] ext_addr_b,
  input  cplx_t         ext_wdata_b,
  output cplx_t         ext_rdata_a,
  output cplx_t         ext_rdata_b,
  // Gate Mem write
  input  logic          gate_we,
  input  gate_t         gate_in
);
  typedef enum logic [1:0] {S_IDLE, S_RD, S_WR} pe_state_e;

  pe_state_e     state;
  gate_t         gate_q;
  logic [AW:0]   step, last_step;
  logic [QW-1:0] lq;            // local qubits: n - 3
  logic          shared_mode, role;
  logic [AW-1:0] addr_a_q, addr_b_q;
  logic          en_b_q;
  logic [AW-1:0] rd_addr_a, rd_addr_b;

  cplx_t rdata_a, rdata_b;
  cplx_t y0, y1;
  cplx_t x_self_a, x_other_a, x_self_b, x_other_b;
  cplx_t m0a, m0b, m1a, m1b;

  logic          pe_en_a, pe_we_a, pe_en_b, pe_we_b;
  logic [AW-1:0] pe_addr_a, pe_addr_b;

  // ---------------------------------------------------------------- PE Controller
  always_comb begin
    lq          = n_qubits - QW'(PE_ID_W);
    shared_mode = gate_q.hdr.target >= lq;
    role        = 1'b0;
    if (shared_mode) role = 1'(PE_ID_W'(PE_ID) >> (gate_q.hdr.target - lq));
    // steps per gate: 2^(lq-1), at least one
    if (lq == 0) last_step = '0;
    else         last_step = (AW+1)'((32'd1 << (lq - 1'b1)) - 1);
  end

  always_comb begin
    logic [MAX_QUBITS-1:0] base;
    base = insert0(MAX_QUBITS'(step), gate_q.hdr.target);
    if (shared_mode) begin
      rd_addr_a = AW'({step, 1'b0});
      rd_addr_b = AW'({step, 1'b1});
    end else begin
      rd_addr_a = AW'(base);
      rd_addr_b = AW'(base | (MAX_QUBITS'(1) << gate_q.hdr.target));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      step     <= '0;
      addr_a_q <= '0;
      addr_b_q <= '0;
      en_b_q   <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          step  <= '0;
          state <= S_RD;
        end
        S_RD: begin
          addr_a_q <= rd_addr_a;
          addr_b_q <= rd_addr_b;
          en_b_q   <= !(shared_mode && lq == 0);
          state    <= S_WR;
        end
        S_WR: begin
          if (step == last_step) state <= S_IDLE;
          else begin
            step  <= step + 1'b1;
            state <= S_RD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_WR) && (step == last_step);

  always_comb begin
    pe_en_a   = 1'b0;
    pe_we_a   = 1'b0;
    pe_en_b   = 1'b0;
    pe_we_b   = 1'b0;
    pe_addr_a = rd_addr_a;
    pe_addr_b = rd_addr_b;
    if (state == S_RD) begin
      pe_en_a = 1'b1;
      pe_en_b = !(shared_mode && lq == 0);
    end else if (state == S_WR) begin
      pe_en_a   = 1'b1;
      pe_we_a   = 1'b1;
      pe_en_b   = en_b_q;
      pe_we_b   = 1'b1;
      pe_addr_a = addr_a_q;
      pe_addr_b = addr_b_q;
    end
  end

  // ---------------------------------------------------------------- Input Selector
  // Row r of the gate is applied as m[r][r]*x_r + m[r][1-r]*x_(1-r); in sparse
  // mode the SU keeps only the first product, i.e. the diagonal term.
  always_comb begin
    if (shared_mode) begin
      x_self_a  = rdata_a;  x_other_a = xin_a;
      x_self_b  = rdata_b;  x_other_b = xin_b;
      m0a = role ? gate_q.m[3] : gate_q.m[0];   // d : a
      m0b = role ? gate_q.m[2] : gate_q.m[1];   // c : b
      m1a = m0a;
      m1b = m0b;
    end else begin
      x_self_a  = rdata_a;  x_other_a = rdata_b;   // SU0: row 0
      x_self_b  = rdata_b;  x_other_b = rdata_a;   // SU1: row 1
      m0a = gate_q.m[0];  m0b = gate_q.m[1];
      m1a = gate_q.m[3];  m1b = gate_q.m[2];
    end
  end

  alu u_alu (
    .op (gate_q.hdr.sparse),
    .m0a, .m0b, .x0a(x_self_a), .x1a(x_other_a),
    .m1a, .m1b, .x0b(x_self_b), .x1b(x_other_b),
    .y0, .y1
  );

  // ---------------------------------------------------------------- LSU
  lsu #(.AW(AW)) u_lsu (
    .clk, .rst_n,
    .pe_en_a, .pe_we_a, .pe_addr_a, .pe_wdata_a(y0),
    .pe_en_b, .pe_we_b, .pe_addr_b, .pe_wdata_b(y1),
    .ext_sel,
    .ext_en_a, .ext_we_a, .ext_addr_a, .ext_wdata_a,
    .ext_en_b, .ext_we_b, .ext_addr_b, .ext_wdata_b,
    .rdata_a, .rdata_b,
    .gate_we, .gate_in, .gate_q
  );

  assign ld_a        = rdata_a;
  assign ld_b        = rdata_b;
  assign ext_rdata_a = rdata_a;
  assign ext_rdata_b = rdata_b;

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> state == S_IDLE);
endmodule
