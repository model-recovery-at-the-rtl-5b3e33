// tb_mac_unit: loads random biases, accumulates random products with random
// enable gaps and checks the accumulator and the rounded/saturated output
// against an integer model, including saturation at both ends.
module tb_mac_unit;
  import merinda_pkg::*;
  import merinda_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  fx_t bias, a, b, y;
  acc_t acc;
  mac_unit dut (.clk, .rst_n, .clr, .bias, .en, .a, .b, .acc, .y);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    longint model;
    bias = 0; a = 0; b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 200; trial++) begin
      int len;
      int big;
      big  = (trial % 10 == 9);
      len  = 1 + $urandom_range(0, 40);
      bias = fx_t'($urandom);
      @(negedge clk); clr = 1;
      @(negedge clk); clr = 0;
      model = longint'(int'(bias)) * 4096;
      for (int k = 0; k < len; k++) begin
        en = ($urandom_range(0, 3) != 0);
        a  = big ? fx_t'($urandom) : fx_t'($urandom_range(0, 8191) - 4096);
        b  = big ? fx_t'($urandom) : fx_t'($urandom_range(0, 8191) - 4096);
        if (en) model += longint'(int'(a)) * longint'(int'(b));
        @(negedge clk);
      end
      en = 0;
      @(negedge clk);
      checks++;
      if (longint'(acc) != model) begin
        failures++; $display("acc mismatch %0d vs %0d", acc, model);
      end
      checks++;
      if (int'(y) != rsum_to_fx(model)) begin
        failures++; $display("y mismatch %0d vs %0d", y, rsum_to_fx(model));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
