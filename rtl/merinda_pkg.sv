// merinda_pkg: number format, shared types and fixed-point helpers of the
// GRU forward-pass accelerator.
//
// All activations, weights and biases are 16-bit signed fixed point with 12
// fraction bits (Q3.12, range [-8, 8), step 1/4096). A product of two Q3.12
// values is Q6.24; accumulators keep 40 bits of Q.24 so that a sum over a few
// hundred products cannot overflow. Results are brought back to Q3.12 by
// rounding half up and saturating. The number format is this design's own
// choice; the source architecture does not state one.
package merinda_pkg;

  localparam int DATA_W = 16;
  localparam int FRAC   = 12;
  localparam int ACC_W  = 40;

  typedef logic signed [DATA_W-1:0] fx_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  localparam fx_t FX_ONE  = fx_t'(1 <<< FRAC);
  localparam fx_t FX_MAX  = fx_t'({1'b0, {(DATA_W-1){1'b1}}});
  localparam fx_t FX_MIN  = fx_t'({1'b1, {(DATA_W-1){1'b0}}});

  // Which parameter array a configuration write goes to.
  typedef enum logic [2:0] {
    SEL_WR = 3'd0,  // reset-gate weights  Wr[row][col], col < H+I
    SEL_WZ = 3'd1,  // update-gate weights Wz[row][col]
    SEL_WA = 3'd2,  // candidate weights   Wa[row][col]
    SEL_BR = 3'd3,  // reset-gate bias     br[row]
    SEL_BZ = 3'd4,  // update-gate bias    bz[row]
    SEL_BA = 3'd5,  // candidate bias      ba[row]
    SEL_WY = 3'd6,  // dense weights       Wy[row][col], col < H
    SEL_BY = 3'd7   // dense bias          by[row]
  } wsel_e;

  // Q.24 accumulator value -> Q3.12, round half up, saturate.
  function automatic fx_t acc_to_fx(acc_t a);
    acc_t r;
    r = (a + acc_t'(1 <<< (FRAC-1))) >>> FRAC;
    if (r > acc_t'(FX_MAX))      return FX_MAX;
    else if (r < acc_t'(FX_MIN)) return FX_MIN;
    else                         return fx_t'(r);
  endfunction

  // Q3.12 x Q3.12 -> Q3.12, round half up, saturate.
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    acc_t p;
    p = acc_t'(a) * acc_t'(b);
    return acc_to_fx(p);
  endfunction

  // Saturating Q3.12 addition.
  function automatic fx_t fx_add(fx_t a, fx_t b);
    acc_t s;
    s = acc_t'(a) + acc_t'(b);
    if (s > acc_t'(FX_MAX))      return FX_MAX;
    else if (s < acc_t'(FX_MIN)) return FX_MIN;
    else                         return fx_t'(s);
  endfunction

  // Saturating Q3.12 subtraction a - b.
  function automatic fx_t fx_sub(fx_t a, fx_t b);
    acc_t s;
    s = acc_t'(a) - acc_t'(b);
    if (s > acc_t'(FX_MAX))      return FX_MAX;
    else if (s < acc_t'(FX_MIN)) return FX_MIN;
    else                         return fx_t'(s);
  endfunction

endpackage
