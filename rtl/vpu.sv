// vpu: the vector processing unit, a SIMD datapath of M lanes x 16 elements.
//
// One call of the datapath applies `op` element-wise to operand words a and
// b (16*M fixed-point elements each) and returns the result word y in the
// same cycle (purely combinational; the controller registers it into the
// node-feature buffer). Operations (blockgnn_pkg::vop_e):
//   ADD a+b, MUL a*b, MAX max(a,b), RELU max(a,0), SIG sigmoid(a),
//   EXP exp(a), ELU (a>0 ? a : exp(a)-1), SCL a*scalar, COPY a.
// These cover the paper's VPU duties: non-linear functions (ReLU, Exp,
// Sigmoid, and ELU for GAT), vector-vector multiply and add, bias addition,
// GS-Pool max pooling and GCN degree scaling.
//
// The lane count and the 16-element SIMD width follow the paper. How the
// non-linear functions are computed is not given there; this design uses
//   exp(x)     = 2^(x*log2 e): integer part as a shift, 2^f ~ 1+0.6565f+0.3435f^2,
//                saturating above 2^15 and flushing to 0 below 2^-16;
//   sigmoid(x) = the PLAN piecewise-linear approximation
//                (|x|>=5: 1; >=2.375: |x|/32+0.84375; >=1: |x|/8+0.625;
//                 else |x|/4+0.5; negative x: 1 - sigmoid(|x|)).
module vpu
  import blockgnn_pkg::*;
#(
  parameter int M    = 1,
  parameter int SIMD = 16,
  localparam int WE  = M * SIMD
) (
  input  vop_e op,
  input  fix_t scalar,
  input  fix_t a [WE],
  input  fix_t b [WE],
  output fix_t y [WE]
);
  localparam fix_t ONE   = fix_t'(1 << FRAC);
  localparam fix_t LOG2E = fix_t'(94548);        // 1.442695 in Q16.16
  localparam fix_t FMAX  = fix_t'(32'h7fff_ffff);

  function automatic fix_t f_exp(fix_t x);
    fix_t t, fr, poly;
    logic signed [DW-FRAC-1:0] ip;
    t    = fmul(x, LOG2E);
    ip   = t[DW-1:FRAC];                        // floor
    fr   = {{(DW-FRAC){1'b0}}, t[FRAC-1:0]};    // fraction in [0,1)
    poly = ONE + fmul(fr, fix_t'(43025)) + fmul(fmul(fr, fr), fix_t'(22511));
    if (ip >= 15) return FMAX;
    if (ip < -16) return '0;
    if (ip >= 0)  return poly <<< ip;
    return poly >>> (-ip);
  endfunction

  function automatic fix_t f_sig(fix_t x);
    fix_t ax, s;
    ax = (x < 0) ? -x : x;
    if (ax >= fix_t'(5 << FRAC))           s = ONE;
    else if (ax >= fix_t'(155648))         s = (ax >>> 5) + fix_t'(55296);  // 2.375, 0.84375
    else if (ax >= ONE)                    s = (ax >>> 3) + fix_t'(40960);  // 0.625
    else                                   s = (ax >>> 2) + fix_t'(32768);  // 0.5
    return (x < 0) ? ONE - s : s;
  endfunction

  always_comb begin
    for (int e = 0; e < WE; e++) begin
      unique case (op)
        VOP_ADD:  y[e] = a[e] + b[e];
        VOP_MUL:  y[e] = fmul(a[e], b[e]);
        VOP_MAX:  y[e] = (a[e] > b[e]) ? a[e] : b[e];
        VOP_RELU: y[e] = (a[e] > 0) ? a[e] : '0;
        VOP_SIG:  y[e] = f_sig(a[e]);
        VOP_EXP:  y[e] = f_exp(a[e]);
        VOP_ELU:  y[e] = (a[e] > 0) ? a[e] : f_exp(a[e]) - ONE;
        VOP_SCL:  y[e] = fmul(a[e], scalar);
        VOP_COPY: y[e] = a[e];
        default:  y[e] = a[e];
      endcase
    end
  end

endmodule
