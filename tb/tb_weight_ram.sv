// tb_weight_ram: writes random words, reads them back with the one-cycle read
// latency, and checks that a write does not disturb other addresses.
module tb_weight_ram;
  int checks = 0, failures = 0;
  localparam int DEPTH = 40;
  logic clk = 0, we = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [15:0] wdata = 0, rdata;
  logic [15:0] model [DEPTH];
  weight_ram #(.DEPTH(DEPTH), .WIDTH(16)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int k = 0; k < DEPTH; k++) begin
      @(negedge clk); we = 1; waddr = 6'(k); wdata = 16'($urandom); model[k] = wdata;
    end
    @(negedge clk); we = 0;
    for (int rep = 0; rep < 500; rep++) begin
      int ra;
      ra = $urandom_range(0, DEPTH-1);
      @(negedge clk);
      raddr = 6'(ra);
      if ($urandom_range(0, 2) == 0) begin
        int wa;
        wa = $urandom_range(0, DEPTH-1);
        if (wa == ra) wa = (wa + 1) % DEPTH;
        we = 1; waddr = 6'(wa); wdata = 16'($urandom);
      end else we = 0;
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
      checks++;
      if (rdata !== model[ra]) begin
        failures++; $display("addr %0d read %h expected %h", ra, rdata, model[ra]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
