// sigmoid_pwl: logistic sigmoid of a Q3.12 value, used for the reset gate r
// and update gate z of the GRU.
//
// The GRU gates apply sigma() to a weighted sum; how sigma is evaluated in
// hardware is this design's choice. It is a four-segment piecewise-linear
// approximation with power-of-two slopes (no multiplier):
//   |x| <  1     : 0.5     + |x|/4
//   |x| <  2.375 : 0.625   + |x|/8
//   |x| <  5     : 0.84375 + |x|/32
//   |x| >= 5     : 1
// and sigma(-x) = 1 - sigma(x). The largest error against the true sigmoid is
// below 0.02. Combinational, no clock.
module sigmoid_pwl
  import merinda_pkg::*;
(
  input  fx_t x,
  output fx_t y
);
  localparam fx_t BP1  = fx_t'(4096);   // 1.0
  localparam fx_t BP2  = fx_t'(9728);   // 2.375
  localparam fx_t BP3  = fx_t'(20480);  // 5.0
  localparam fx_t OFS1 = fx_t'(2048);   // 0.5
  localparam fx_t OFS2 = fx_t'(2560);   // 0.625
  localparam fx_t OFS3 = fx_t'(3456);   // 0.84375

  fx_t ax;
  fx_t pos;

  always_comb begin
    // |x|, with the most negative code mapped to the most positive one
    if (x == FX_MIN)  ax = FX_MAX;
    else if (x < 0)   ax = -x;
    else              ax = x;

    if (ax >= BP3)       pos = FX_ONE;
    else if (ax >= BP2)  pos = OFS3 + (ax >>> 5);
    else if (ax >= BP1)  pos = OFS2 + (ax >>> 3);
    else                 pos = OFS1 + (ax >>> 2);

    y = (x < 0) ? (FX_ONE - pos) : pos;
  end
endmodule
