// qea_pkg: types and constants shared by the QEA state-vector simulator.
//
// Amplitudes and gate-matrix entries are complex numbers in signed fixed point
// Q2.30 (2 integer bits including sign, 30 fractional bits), packed as {im, re}
// in 64 bits. A 2x2 gate matrix is four such numbers, exactly one 256-bit host
// bus word. The 32-bit Q2.30 format, the four PEs and the 256-bit bus follow the
// paper; the packing order, the gate-context encoding and the address map are
// this design's own choices.
package qea_pkg;

  parameter int FX_W       = 32;        // fixed-point word
  parameter int FX_FRAC    = 30;        // fractional bits
  parameter int NUM_PE     = 4;         // processing elements (fixed: routing uses 2 index bits)
  parameter int PE_BITS    = 2;
  parameter int AXI_DATA_W = 256;
  parameter int QB_W       = 5;         // width of a qubit number / qubit count

  typedef logic signed [FX_W-1:0] fx_t;

  typedef struct packed {
    fx_t im;
    fx_t re;
  } cplx_t;

  localparam fx_t   FX_ONE   = fx_t'(1) <<< FX_FRAC;
  localparam cplx_t CPLX_ONE = '{im: '0, re: FX_ONE};

  // 2x2 gate matrix u[row][col], one bus word
  typedef struct packed {
    cplx_t u11;
    cplx_t u10;
    cplx_t u01;
    cplx_t u00;
  } gate_mat_t;

  typedef enum logic [1:0] {
    GATE_SPARSE = 2'd0,   // diagonal matrix: S, Rz
    GATE_DENSE  = 2'd1,   // full matrix: H, Rx, Ry
    GATE_CX     = 2'd2    // handled by the CX swapper
  } gate_type_e;

  // Gate context, one entry of the global context memory
  typedef struct packed {
    logic [QB_W-1:0] control;
    logic [QB_W-1:0] target;
    gate_type_e      gtype;
  } gate_ctx_t;

  // How a PE processes the current gate
  typedef enum logic [1:0] {
    OP_SPARSE      = 2'd0,  // each amplitude times one diagonal entry
    OP_DENSE_LOCAL = 2'd1,  // both members of a pair in this PE
    OP_DENSE_CROSS = 2'd2   // partner amplitude comes from another PE
  } pe_op_e;

  // Address map of the host bus: addr[27:24] selects a region, addr[23:5] a word
  typedef enum logic [3:0] {
    REG_CTRL  = 4'd0,
    REG_GCTX  = 4'd1,
    REG_GMAT  = 4'd2,
    REG_STATE = 4'd3
  } region_e;

  // Insert bit value b at position pos of x (bits at and above pos move up one)
  function automatic logic [31:0] insert_bit(input logic [31:0] x, input int unsigned pos, input logic b);
    logic [31:0] low_mask;
    low_mask = (32'd1 << pos) - 32'd1;
    return ((x & ~low_mask) << 1) | (32'(b) << pos) | (x & low_mask);
  endfunction

endpackage
