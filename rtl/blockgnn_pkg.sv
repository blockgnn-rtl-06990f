// blockgnn_pkg: types, constants and fixed-point helpers shared by the
// BlockGNN accelerator.
//
// Numbers are 32-bit signed fixed point with FRAC fractional bits (Q16.16).
// The 32-bit width follows the prototype; the binary point is this design's
// choice. Spectral (frequency-domain) data are complex: a pair of such words.
// The command word that the host pushes into the command FIFO, and the VPU
// operation codes, are this design's own encoding.
package blockgnn_pkg;

  localparam int DW   = 32;   // fixed-point word
  localparam int FRAC = 16;   // fractional bits

  typedef logic signed [DW-1:0] fix_t;

  typedef struct packed {
    fix_t re;
    fix_t im;
  } cplx_t;

  // Command opcodes
  typedef enum logic [3:0] {
    CMD_NOP  = 4'd0,
    CMD_LDW  = 4'd1,   // preload PE weights of a layer from the weight buffer
    CMD_GEMV = 4'd2,   // h' = W h for `len` vectors through CirCore
    CMD_VPU  = 4'd3,   // element-wise vector op over `len` NFB words
    CMD_SWAP = 4'd4    // swap NFB ping-pong banks
  } opcode_e;

  // VPU operations
  typedef enum logic [3:0] {
    VOP_ADD  = 4'd0,   // a + b            (bias, aggregation sums)
    VOP_MUL  = 4'd1,   // a * b            (element-wise product, G-GCN gate)
    VOP_MAX  = 4'd2,   // max(a, b)        (GS-Pool max pooling)
    VOP_RELU = 4'd3,   // max(a, 0)
    VOP_SIG  = 4'd4,   // sigmoid(a)       (piecewise linear)
    VOP_EXP  = 4'd5,   // exp(a)           (piecewise linear)
    VOP_ELU  = 4'd6,   // a>0 ? a : exp(a)-1
    VOP_SCL  = 4'd7,   // a * scalar       (GCN degree normalisation)
    VOP_COPY = 4'd8    // a
  } vop_e;

  // Command word. Addresses are word addresses (NFB: one word = 16*M
  // elements; WB: one complex weight).
  typedef struct packed {
    opcode_e     op;
    vop_e        vop;
    logic [19:0] src_a;   // NFB input base / WB base for CMD_LDW
    logic [19:0] src_b;   // NFB second operand base (VPU)
    logic [19:0] dst;     // NFB result base
    logic [15:0] len;     // vectors (GEMV) or words (VPU)
    logic [7:0]  p;       // output sub-vectors N/n
    logic [7:0]  q;       // input sub-vectors M/n
    fix_t        scalar;  // VPU scalar
  } cmd_t;


  function automatic fix_t fmul(fix_t a, fix_t b);
    logic signed [2*DW-1:0] pr;
    pr = a * b;
    return fix_t'(pr >>> FRAC);
  endfunction

  function automatic cplx_t cmul(cplx_t a, cplx_t b);
    logic signed [2*DW:0] rr, ii;
    cplx_t o;
    rr = (2*DW+1)'(a.re * b.re) - (2*DW+1)'(a.im * b.im);
    ii = (2*DW+1)'(a.re * b.im) + (2*DW+1)'(a.im * b.re);
    o.re = fix_t'(rr >>> FRAC);
    o.im = fix_t'(ii >>> FRAC);
    return o;
  endfunction

  function automatic cplx_t cadd(cplx_t a, cplx_t b);
    cplx_t o;
    o.re = a.re + b.re;
    o.im = a.im + b.im;
    return o;
  endfunction

  function automatic cplx_t csub(cplx_t a, cplx_t b);
    cplx_t o;
    o.re = a.re - b.re;
    o.im = a.im - b.im;
    return o;
  endfunction

endpackage
