// sen_pkg: number format and arithmetic shared by every block of the sparse
// edge-processing trainer.
//
// All stored quantities (weights, activations, activation derivatives, deltas)
// are 10-bit two's-complement fixed point with 7 fractional bits, i.e. 3 integer
// bits including the sign, range [-4, 4) in steps of 1/128. That format is the
// one the design is evaluated with; change W and FRAC here to build the 12- and
// 16-bit variants. Products are kept at full width and sums of products are
// formed in a 32-bit accumulator; a value is rounded (floor, arithmetic shift)
// and saturated only when it is stored. The activation function is a hard
// sigmoid clamp(1/2 + z/4, 0, 1) with derivative 1/4 inside |z| < 2 and 0
// outside; the learning rate is a power of two, 2^-eta_shift. Both are choices
// of this implementation: the text does not say which nonlinearity, rounding
// or learning-rate form the hardware uses.
package sen_pkg;

  localparam int unsigned W    = 10;  // total bits of every stored value
  localparam int unsigned FRAC = 7;   // fractional bits
  localparam int unsigned PW   = 2*W; // full product width
  localparam int unsigned AW   = 32;  // accumulator width

  typedef logic signed [W-1:0]  fx_t;
  typedef logic signed [PW-1:0] prod_t;
  typedef logic signed [AW-1:0] acc_t;

  localparam fx_t FX_MAX  = fx_t'((1 << (W-1)) - 1);
  localparam fx_t FX_MIN  = fx_t'(-(1 << (W-1)));
  localparam fx_t FX_ONE  = fx_t'(1 << FRAC);
  localparam fx_t FX_HALF = fx_t'(1 << (FRAC-1));
  localparam fx_t FX_QTR  = fx_t'(1 << (FRAC-2));

  // Saturate an accumulator value (already at scale 2^FRAC) to W bits.
  function automatic fx_t sat(input acc_t v);
    if (v > acc_t'(FX_MAX)) return FX_MAX;
    if (v < acc_t'(FX_MIN)) return FX_MIN;
    return fx_t'(v);
  endfunction

  // Full-precision product, scale 2^(2*FRAC).
  function automatic acc_t mul_full(input fx_t a, input fx_t b);
    prod_t p;
    p = prod_t'(a) * prod_t'(b);
    return acc_t'(p);
  endfunction

  // Product rounded back to the stored format.
  function automatic fx_t mul(input fx_t a, input fx_t b);
    return sat(mul_full(a, b) >>> FRAC);
  endfunction

  // Saturating sum of two stored values.
  function automatic fx_t add(input fx_t a, input fx_t b);
    return sat(acc_t'(a) + acc_t'(b));
  endfunction

  // Hard sigmoid of a sum of full-precision products (scale 2^(2*FRAC)).
  function automatic fx_t act_f(input acc_t s);
    acc_t z, y;
    z = s >>> FRAC;
    y = acc_t'(FX_HALF) + (z >>> 2);
    if (y < 0)               return '0;
    if (y > acc_t'(FX_ONE))  return FX_ONE;
    return fx_t'(y);
  endfunction

  // Derivative of act_f for the same sum.
  function automatic fx_t act_df(input acc_t s);
    acc_t z;
    z = s >>> FRAC;
    return (z > -acc_t'(2*FX_ONE) && z < acc_t'(2*FX_ONE)) ? FX_QTR : fx_t'(0);
  endfunction

  // Weight update w - 2^-eta * a * d.
  function automatic fx_t upd(input fx_t w, input fx_t a, input fx_t d,
                              input logic [3:0] eta_shift);
    return sat(acc_t'(w) - (mul_full(a, d) >>> (FRAC + int'(eta_shift))));
  endfunction

endpackage
