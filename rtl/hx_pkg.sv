// hx_pkg: types, constants and small functions shared by the HyperX engines.
//
// Number format. Every real value on chip (node features, LSH projection
// vectors, adjacency and landmark-histogram values, the kernel vector C and
// the Nystrom projection matrix) is a 32-bit two's-complement fixed-point
// number with FRAC fractional bits (Q16.16). The element width of 32 bits and
// the 16 elements per 512-bit memory word follow the published design; the
// published design uses FP32, fixed point is this implementation's choice.
//
// Hashing. hash64() is a seeded shift/add/xor integer mixer (no multiplies)
// and xs128p_next() one step of a xorshift128+ generator; together they give
// the per-level probe hashes of the minimal perfect hash. The exact mixing
// constants are this implementation's own; any off-line table builder must use
// the same two functions.
//
// Interface and timing: constants, types and pure functions only; no state,
// no clock. The functions become combinational logic where they are called.
package hx_pkg;

  localparam int unsigned DATA_W = 32;   // element width
  localparam int unsigned FRAC   = 16;   // fractional bits of Q16.16
  localparam int unsigned ACC_W  = 64;   // accumulator width

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Fixed-point multiply: Q16.16 x Q16.16 -> Q16.16 (floor, truncated to 32 bits)
  function automatic data_t fx_mul(input data_t a, input data_t b);
    acc_t p;
    p = acc_t'(a) * acc_t'(b);
    return data_t'(p >>> FRAC);
  endfunction

  // Seeded 64-bit integer hash (shift/add/xor mixer).
  function automatic logic [63:0] hash64(input logic [63:0] key, input logic [63:0] seed);
    logic [63:0] h;
    h = seed ^ key;
    h = (~h) + (h << 21);
    h = h ^ (h >> 24);
    h = (h + (h << 3)) + (h << 8);
    h = h ^ (h >> 14);
    h = (h + (h << 2)) + (h << 4);
    h = h ^ (h >> 28);
    h = h + (h << 31);
    return h;
  endfunction

  // xorshift128+ state and step; the returned value is s1_new + s0_old.
  typedef struct packed {
    logic [63:0] s0;
    logic [63:0] s1;
  } xs_state_t;

  function automatic xs_state_t xs128p_next(input xs_state_t s);
    logic [63:0] a, b;
    xs_state_t n;
    a = s.s0;
    b = s.s1;
    a = a ^ (a << 23);
    n.s0 = b;
    n.s1 = a ^ b ^ (a >> 17) ^ (b >> 26);
    return n;
  endfunction

  // Memory regions of the host load port of the top level.
  typedef enum logic [3:0] {
    RG_REG       = 4'd0,   // scalar configuration registers
    RG_FEAT      = 4'd1,   // node feature matrix F (row-major, MAX_F per row)
    RG_LSHU_U    = 4'd2,   // LSH projection vectors u(t) (MAX_F per hop)
    RG_A_SCHED   = 4'd3,   // adjacency schedule table (iteration*P + pe)
    RG_A_ROWPTR  = 4'd4,   // adjacency CSR row pointers
    RG_A_COLVAL  = 4'd5,   // adjacency CSR {col, val}
    RG_H_SCHED   = 4'd6,   // landmark histogram schedule tables
    RG_H_ROWPTR  = 4'd7,   // landmark histogram CSR row pointers
    RG_H_COLVAL  = 4'd8,   // landmark histogram CSR {col, val}
    RG_MPH_LEVEL = 4'd9,   // MPH level bit-array words ({level, word})
    RG_MPH_RANK  = 4'd10,  // MPH rank vector ({level, word})
    RG_MPH_CB    = 4'd11,  // MPH codebook store {code, hist_idx}
    RG_PROTO     = 4'd12,  // class prototypes (class*WORDS + word)
    RG_KSE_DESC  = 4'd13   // per-hop landmark matrix descriptor (see kse)
  } region_e;

  // Register map of region RG_REG (word addresses).
  localparam int unsigned REG_N_NODES   = 0;
  localparam int unsigned REG_N_FEAT    = 1;
  localparam int unsigned REG_N_HOPS    = 2;
  localparam int unsigned REG_A_NITER   = 3;   // schedule iterations of A
  localparam int unsigned REG_LSH_SHIFT = 4;   // w = 2^(shift-FRAC)
  localparam int unsigned REG_N_LAND    = 5;   // s
  localparam int unsigned REG_DIM       = 6;   // d
  localparam int unsigned REG_N_CLASSES = 7;
  localparam int unsigned REG_PNYS_BASE = 8;   // byte address of Pnys in DDR
  localparam int unsigned REG_LSH_B     = 16;  // + hop: b(t), Q16.16
  localparam int unsigned REG_N_BINS    = 32;  // + hop: |B(t)|
  localparam int unsigned REG_CB_BASE   = 48;  // + hop: first codebook entry
  localparam int unsigned REG_LVL_LOG2  = 64;  // + hop*8 + level
  localparam int unsigned REG_LVL_BASE  = 144; // + hop*8 + level

endpackage
