// tanh_pwl: hyperbolic tangent of a Q3.12 value, used for the GRU candidate
// state cc = tanh(...).
//
// Built on the piecewise-linear sigmoid through the identity
// tanh(x) = 2*sigma(2x) - 1; the argument 2x saturates at the Q3.12 range.
// This construction is this design's choice. Combinational, no clock.
module tanh_pwl
  import merinda_pkg::*;
(
  input  fx_t x,
  output fx_t y
);
  fx_t x2;
  fx_t s;

  always_comb begin
    if (x > fx_t'(16383))       x2 = FX_MAX;
    else if (x < fx_t'(-16384)) x2 = FX_MIN;
    else                        x2 = x <<< 1;
  end

  sigmoid_pwl u_sig (.x(x2), .y(s));

  assign y = (s <<< 1) - FX_ONE;
endmodule
