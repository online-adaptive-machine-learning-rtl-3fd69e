// svr_pkg: number format and shared types of the kernel-SVR dataflow engine.
//
// All values that cross the host streams (kernel values, kernel-inverse
// entries, support vector weights, dot products) are signed fixed point with
// DATA_W bits and FRAC_W fractional bits: Q32.32 in 64 bits. A product of two
// such numbers is kept at full width (2*DATA_W bits, 2*FRAC_W fraction) while it
// is summed, and is brought back to Q32.32 by an arithmetic right shift of
// FRAC_W (truncation towards minus infinity) and by dropping the upper bits.
// The number format is this design's own choice: the paper does not say which
// arithmetic its FPGA kernels use. A 32-bit Q32.32 format was tried first and
// is not enough: the inverse of a Gaussian kernel matrix kept by the online
// updates reaches entries of 10^3..10^4 (condition numbers of that order), and
// 16 fraction bits then lose the inverse entirely within a few hundred
// updates. Q32.32 holds entries up to 2^31 with 2^-32 resolution.
package svr_pkg;

  localparam int unsigned DATA_W = 64;
  localparam int unsigned FRAC_W = 32;
  localparam int unsigned PROD_W = 2 * DATA_W;
  // Accumulators hold up to 2^(ACC_W-PROD_W) full-width products without overflow.
  localparam int unsigned ACC_W  = PROD_W + 16;

  typedef logic signed [DATA_W-1:0] fx_t;
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [ACC_W-1:0]  acc_t;


  // Operation the engine runs on its input stream (the "manager" routing).
  typedef enum logic [1:0] {
    OP_PREDICT = 2'd0,  // Algorithm 5 / Fig. 3: p[i] = sum_j S[j] * K[i,j]
    OP_FITNESS = 2'd1,  // Algorithm 6 / Fig. 4: I = K^-1 k, c = I . k
    OP_UPDATE  = 2'd2   // eqs. (10)/(11): M[i,j] - s * u[i] * v[j]
  } op_e;

  // On-chip vector memory a host write goes to.
  typedef enum logic [1:0] {
    VEC_S   = 2'd0,     // support vector weights S (prediction)
    VEC_KSX = 2'd1,     // kernel vector k_{S,x} (local fitness)
    VEC_U   = 2'd2,     // rank-1 update, row vector u
    VEC_V   = 2'd3      // rank-1 update, column vector v
  } vec_sel_e;

  // Q32.32 product, truncated back to DATA_W bits.
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    prod_t p;
    p = prod_t'(a) * prod_t'(b);
    return fx_t'(p >>> FRAC_W);
  endfunction

  // Full-width accumulator brought back to Q32.32.
  function automatic fx_t acc_to_fx(acc_t a);
    return fx_t'(a >>> FRAC_W);
  endfunction

endpackage
