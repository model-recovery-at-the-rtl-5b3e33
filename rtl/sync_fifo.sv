// sync_fifo: synchronous first-word-fall-through FIFO with valid/ready on
// both sides.
//
// It decouples the DMA sample stream from the GRU layer, so the stream can
// keep arriving while a time step is being computed. out_data shows the
// oldest entry whenever out_valid is high; a word moves on a cycle where valid
// and ready are both high. A full FIFO drops in_ready, an empty one drops
// out_valid. Depth and width are this design's choices.
// The assertions are disabled during the asynchronous reset, so rst_n also
// feeds sampled logic.
module sync_fifo #(
  parameter int WIDTH = 17,
  parameter int DEPTH = 16,
  localparam int AW   = $clog2(DEPTH),
  localparam int CW   = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [CW-1:0]    count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             push, pop;

  assign in_ready  = (count != CW'(DEPTH));
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (pop)  rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + CW'(push) - CW'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_data;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= CW'(DEPTH));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && count == '0));
endmodule
