// hpqea_pkg: types and constants shared by the HPQEA state-vector emulator.
//
// Number format. Every amplitude and every gate-matrix entry is a complex
// number whose real and imaginary parts are 32-bit two's-complement fixed
// point with 2 integer bits and 30 fractional bits (Q2.30), as in the paper.
// A complex value is therefore 64 bits, and a full 2x2 gate matrix is exactly
// one 256-bit host-bus beat.
//
// Organisation. The state vector of n qubits (3 <= n <= BRAM_QUBITS) is cut
// into NUM_PE = 8 contiguous segments: the top index bit selects one of the two
// Processing Element Arrays, the next two bits one of its four PEs, and the
// remaining n-3 bits the word inside that PE's State Mem. This follows the
// paper's "two parts, one for each PEA, each further divided into four
// segments"; the exact bit assignment is this design's choice.
//
// Gate encoding (this design's choice; the paper gives none): a gate is a
// header (kind, sparse flag, target, control) plus the matrix [[a,b],[c,d]].
// Sparse gates (diagonal: S, Rz) use only a and d.
package hpqea_pkg;

  // Fixed-point format (paper: 32-bit, 2 integer + 30 fractional bits).
  localparam int unsigned FX_W    = 32;
  localparam int unsigned FX_FRAC = 30;

  // Qubits held on chip. The paper puts the BRAM/HBM switch at 19 qubits.
  localparam int unsigned BRAM_QUBITS = 19;
  // Largest qubit count the design is sized for (HBM limit in the paper).
  localparam int unsigned MAX_QUBITS  = 30;
  localparam int unsigned QW          = 5;   // width of a qubit index / count

  localparam int unsigned NUM_PEA     = 2;
  localparam int unsigned PE_PER_PEA  = 4;
  localparam int unsigned NUM_PE      = NUM_PEA * PE_PER_PEA;
  localparam int unsigned PE_ID_W     = 3;   // log2(NUM_PE)

  // Host bus width (paper: 256-bit AXI).
  localparam int unsigned BUS_W       = 256;

  typedef logic signed [FX_W-1:0] fx_t;

  typedef struct packed {
    fx_t re;
    fx_t im;
  } cplx_t;

  typedef enum logic [1:0] {
    GK_SINGLE = 2'd0,   // single-qubit gate, executed by the dual PEAs
    GK_CX     = 2'd1    // CNOT, executed by the CX Swapper
  } gate_kind_e;

  typedef struct packed {
    gate_kind_e    kind;
    logic          sparse;    // 1: diagonal matrix, only a and d used
    logic [QW-1:0] target;
    logic [QW-1:0] control;
  } gate_hdr_t;

  // Matrix entries: m[0]=a, m[1]=b, m[2]=c, m[3]=d of [[a,b],[c,d]].
  typedef struct packed {
    gate_hdr_t   hdr;
    cplx_t [3:0] m;
  } gate_t;

  localparam int unsigned GATE_HDR_W = $bits(gate_hdr_t);

  // Internal memory bus behind the AXI mapper.
  typedef enum logic [1:0] {
    RG_REGS  = 2'd0,
    RG_GATE  = 2'd1,
    RG_STATE = 2'd2,
    RG_NONE  = 2'd3
  } region_e;

  localparam int unsigned IB_AW = 24;        // beat address inside a region

  typedef struct packed {
    logic             valid;
    logic             we;
    region_e          region;
    logic [IB_AW-1:0] addr;                  // in 256-bit beats
    logic [BUS_W-1:0] wdata;
  } ibus_req_t;

  // Owner of the PE state-memory ports outside a gate.
  typedef enum logic [1:0] {
    OWN_PE    = 2'd0,   // PE datapaths (single-qubit gate)
    OWN_CX    = 2'd1,   // CX Swapper
    OWN_STATE = 2'd2    // State Arbiter
  } owner_e;

  // One global access lane into the distributed state vector.
  typedef struct packed {
    logic                   en;
    logic                   we;
    logic [BRAM_QUBITS-1:0] addr;   // global amplitude index
    cplx_t                  wdata;
  } gacc_t;

  // One local access to a PE's State Mem port.
  typedef struct packed {
    logic                           en;
    logic                           we;
    logic [BRAM_QUBITS-PE_ID_W-1:0] addr;
    cplx_t                          wdata;
  } lacc_t;

  // Q2.30 product with truncation of the low fraction bits.
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*FX_W-1:0] p;
    p = a * b;
    return fx_t'(p >>> FX_FRAC);
  endfunction

  function automatic cplx_t c_mul(cplx_t a, cplx_t b);
    cplx_t r;
    r.re = fx_mul(a.re, b.re) - fx_mul(a.im, b.im);
    r.im = fx_mul(a.re, b.im) + fx_mul(a.im, b.re);
    return r;
  endfunction

  function automatic cplx_t c_add(cplx_t a, cplx_t b);
    cplx_t r;
    r.re = a.re + b.re;
    r.im = a.im + b.im;
    return r;
  endfunction

  // Insert a zero bit at position p of v (bits at and above p move up one).
  function automatic logic [MAX_QUBITS-1:0] insert0(logic [MAX_QUBITS-1:0] v,
                                                    logic [QW-1:0] p);
    logic [MAX_QUBITS-1:0] lo_mask;
    lo_mask = (MAX_QUBITS'(1) << p) - 1'b1;
    return ((v & ~lo_mask) << 1) | (v & lo_mask);
  endfunction

endpackage
