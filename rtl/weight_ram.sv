// weight_ram: on-chip RAM for one row of a weight matrix.
//
// The accelerator keeps all weights on chip so that the forward pass needs no
// external memory traffic. Each hidden unit (and each dense output) owns one
// of these RAMs, so every row of a matrix is read in the same cycle while the
// column index sweeps. One write port, one read port; the read is registered,
// so rdata shows mem[raddr] one clock after raddr, as a block RAM does.
// Row partitioning and the one-cycle latency are this design's choices.
module weight_ram #(
  parameter int DEPTH = 40,
  parameter int WIDTH = 16,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
