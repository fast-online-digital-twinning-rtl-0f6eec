// merinda_pkg: number format, saturating fixed-point arithmetic, the piecewise
// linear nonlinearities and the polynomial term enumeration shared by every
// block of the MERINDA model-recovery kernel.
//
// Numbers are signed Q16.16 in 32 bits (fx_t). Every multiply keeps the full
// 64-bit product, shifts it right by 16 (truncation toward minus infinity) and
// saturates to the 32-bit range; every add saturates. The number format, the
// sigmoid/tanh approximation and the term ordering are choices of this design:
// the kernel description names sigmoid, tanh, ReLU and an M-th order
// polynomial library but not how they are computed.
package merinda_pkg;

  localparam int unsigned DW   = 32;  // data word width
  localparam int unsigned FRAC = 16;  // fractional bits

  typedef logic signed [DW-1:0]   fx_t;
  typedef logic signed [2*DW-1:0] fx_wide_t;

  localparam fx_t FX_ONE  = fx_t'(1 <<< FRAC);
  localparam fx_t FX_HALF = fx_t'(1 <<< (FRAC - 1));
  localparam fx_t FX_MAX  = fx_t'({1'b0, {(DW-1){1'b1}}});
  localparam fx_t FX_MIN  = fx_t'({1'b1, {(DW-1){1'b0}}});

  // Activation selector of the activation unit.
  typedef enum logic [1:0] {
    ACT_SIGMOID = 2'd0,
    ACT_TANH    = 2'd1,
    ACT_RELU    = 2'd2,
    ACT_LINEAR  = 2'd3
  } act_e;

  // Saturate a wide value to the Q16.16 range.
  function automatic fx_t fx_sat(input fx_wide_t v);
    if (v > fx_wide_t'(FX_MAX)) return FX_MAX;
    if (v < fx_wide_t'(FX_MIN)) return FX_MIN;
    return fx_t'(v);
  endfunction

  function automatic fx_t fx_add(input fx_t a, input fx_t b);
    return fx_sat(fx_wide_t'(a) + fx_wide_t'(b));
  endfunction

  function automatic fx_t fx_sub(input fx_t a, input fx_t b);
    return fx_sat(fx_wide_t'(a) - fx_wide_t'(b));
  endfunction

  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    fx_wide_t p;
    p = fx_wide_t'(a) * fx_wide_t'(b);
    return fx_sat(p >>> FRAC);
  endfunction

  function automatic fx_t fx_abs(input fx_t a);
    if (a == FX_MIN) return FX_MAX;
    return (a < 0) ? -a : a;
  endfunction

  // Piecewise linear sigmoid (PLAN): four segments on |x|, mirrored for x < 0.
  //   |x| >= 5          : 1
  //   2.375 <= |x| < 5  : |x|/32 + 0.84375
  //   1 <= |x| < 2.375  : |x|/8  + 0.625
  //   0 <= |x| < 1      : |x|/4  + 0.5
  function automatic fx_t fx_sigmoid(input fx_t x);
    fx_t a, y;
    a = fx_abs(x);
    if (a >= fx_t'(5 <<< FRAC))        y = FX_ONE;
    else if (a >= fx_t'(155648))       y = (a >>> 5) + fx_t'(55296);  // 2.375, 0.84375
    else if (a >= FX_ONE)              y = (a >>> 3) + fx_t'(40960);  // 0.625
    else                               y = (a >>> 2) + FX_HALF;
    return (x < 0) ? (FX_ONE - y) : y;
  endfunction

  // tanh(x) = 2*sigmoid(2x) - 1, on the same piecewise linear sigmoid.
  function automatic fx_t fx_tanh(input fx_t x);
    fx_t s;
    s = fx_sigmoid(fx_add(x, x));
    return fx_sub(fx_add(s, s), FX_ONE);
  endfunction

  function automatic fx_t fx_relu(input fx_t x);
    return (x < 0) ? '0 : x;
  endfunction

  // Number of monomials of degree <= order in nvar variables: C(order+nvar, nvar).
  function automatic int unsigned n_terms(input int unsigned nvar, input int unsigned order);
    longint unsigned r;
    r = 1;
    for (int unsigned i = 1; i <= nvar; i++) r = r * longint'(order + i) / longint'(i);
    return int'(r);
  endfunction

  localparam int unsigned MAX_ORDER = 8;

  // Variable index of factor f of polynomial term t. A term is a non-decreasing
  // tuple of `order` indices into {x_0 .. x_(nvar-1), 1}; index nvar stands for
  // the constant 1, so every term is a product of exactly `order` factors.
  // Terms are numbered in odometer order: (0,0,0), (0,0,1), ... , (nvar,nvar,nvar).
  function automatic int unsigned term_factor(input int unsigned nvar,
                                              input int unsigned order,
                                              input int unsigned t,
                                              input int unsigned f);
    int unsigned idx [MAX_ORDER];
    int p;
    for (int i = 0; i < MAX_ORDER; i++) idx[i] = 0;
    for (int unsigned n = 0; n < t; n++) begin
      p = int'(order) - 1;
      while (p > 0 && idx[p] == nvar) p--;
      idx[p] = idx[p] + 1;
      for (int q = p + 1; q < int'(order); q++) idx[q] = idx[p];
    end
    return idx[f];
  endfunction

endpackage
