// svr_ref_pkg: reference arithmetic for the testbenches.
//
// Written apart from the RTL, with wide signed integers: fixed-point operands
// of DATA_W bits with FRAC_W fraction bits (Q32.32), products of full
// 2*DATA_W width, sums of products truncated by an arithmetic shift (floor),
// and the reciprocal floor(2^(2*FRAC_W) / |d|) with sign, saturated to the
// largest positive value when it reaches 2^(DATA_W-1).
package svr_ref_pkg;
  import svr_pkg::DATA_W;
  import svr_pkg::FRAC_W;

  typedef logic signed [DATA_W-1:0]    rfx_t;
  typedef logic signed [2*DATA_W-1:0]  rprod_t;
  typedef logic signed [2*DATA_W+15:0] racc_t;

  localparam rfx_t ONE    = rfx_t'(1) <<< FRAC_W;
  localparam rfx_t FX_MAX = {1'b0, {(DATA_W-1){1'b1}}};

  function automatic rprod_t ref_prod(rfx_t a, rfx_t b);
    rprod_t x, y;
    x = a;
    y = b;
    return x * y;
  endfunction

  function automatic rfx_t ref_mul(rfx_t a, rfx_t b);
    return rfx_t'(ref_prod(a, b) >>> FRAC_W);
  endfunction

  function automatic rfx_t ref_trunc(racc_t acc);
    return rfx_t'(acc >>> FRAC_W);
  endfunction

  function automatic rfx_t ref_recip(rfx_t d, output bit zero);
    logic [2*DATA_W:0] m, q;
    zero = (d == 0);
    if (d == 0) return FX_MAX;
    m = (d < 0) ? -d : d;
    q = ((2*DATA_W+1)'(1) << (2 * FRAC_W)) / m;
    if (q > FX_MAX) q = FX_MAX;
    return (d < 0) ? -rfx_t'(q) : rfx_t'(q);
  endfunction

  // Fixed point from a real, rounded to nearest.
  function automatic rfx_t to_fx(real r);
    real sc;
    sc = r * (2.0 ** FRAC_W);
    return rfx_t'(longint'(sc));
  endfunction

  function automatic real from_fx(rfx_t a);
    return real'(a) / (2.0 ** FRAC_W);
  endfunction

  // Random value in [-2^e, 2^e).
  function automatic rfx_t rnd_fx(int e);
    logic [63:0] r;
    int sh;
    r  = {$urandom, $urandom};
    sh = e + FRAC_W + 1;           // bits of the range
    if (sh < 64) r = r & ((64'd1 << sh) - 1);
    return rfx_t'(r) - (rfx_t'(1) <<< (sh - 1));
  endfunction

endpackage
