// tb_modc_buf: writes random full vectors and reads every column back with
// the one-cycle latency; checks that the buffer holds its contents while we
// is low.
module tb_modc_buf;
  import merinda_pkg::*;
  int checks = 0, failures = 0;
  localparam int H = 32, I = 8, N = H + I;
  logic clk = 0, we = 0;
  fx_t din [N];
  fx_t model [N];
  logic [5:0] raddr = 0;
  fx_t dout;
  modc_buf #(.H(H), .I(I)) dut (.clk, .we, .din, .raddr, .dout);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int rep = 0; rep < 20; rep++) begin
      @(negedge clk);
      for (int k = 0; k < N; k++) begin din[k] = fx_t'($urandom); model[k] = din[k]; end
      we = 1;
      @(negedge clk);
      we = 0;
      for (int k = 0; k < N; k++) din[k] = fx_t'($urandom);  // must be ignored
      for (int k = 0; k < N; k++) begin
        raddr = 6'(k);
        @(negedge clk);
        checks++;
        if (dout != model[k]) begin failures++; $display("col %0d: %0d vs %0d", k, dout, model[k]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
