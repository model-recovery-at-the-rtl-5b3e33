// modc_buf: buffer for mod_concat = [r o a_prev ; x_t], the operand vector of
// the candidate-state sum.
//
// The whole vector (H reset-gated hidden values followed by the I inputs) is
// written in one cycle when we is high, then read one column per cycle during
// the candidate sweep. The read is registered: dout shows entry raddr one
// clock later, the same latency as the weight RAMs, so operand and weight
// arrive together. Keeping mod_concat in a memory follows the source design;
// the single-cycle full-width write is this design's choice (a true two-port
// block RAM would need H extra cycles per step).
module modc_buf
  import merinda_pkg::*;
#(
  parameter int H = 32,
  parameter int I = 8,
  localparam int N  = H + I,
  localparam int AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          we,
  input  fx_t           din [N],
  input  logic [AW-1:0] raddr,
  output fx_t           dout
);
  fx_t mem [N];

  always_ff @(posedge clk) begin
    if (we) mem <= din;
    dout <= mem[raddr];
  end
endmodule
