// mac_unit: multiply-accumulate register, the inner-loop engine of every
// weighted sum in the accelerator (sum_r, sum_z, sum and logits).
//
// clr loads the bias (Q3.12, aligned to Q.24) into the accumulator, as the
// loops start with "sum <- b[i]"; each cycle with en high adds a*b. clr has
// priority over en. y is the accumulator rounded and saturated to Q3.12 and is
// valid the cycle after the last en. One multiplier per instance.
module mac_unit
  import merinda_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  fx_t  bias,
  input  logic en,
  input  fx_t  a,
  input  fx_t  b,
  output acc_t acc,
  output fx_t  y
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (clr)   acc <= acc_t'(bias) <<< FRAC;
    else if (en)    acc <= acc + acc_t'(a) * acc_t'(b);
  end

  assign y = acc_to_fx(acc);
endmodule
