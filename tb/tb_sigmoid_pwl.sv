// tb_sigmoid_pwl: sweeps every Q3.12 input code through the sigmoid and
// compares with an integer reference of the piecewise-linear curve and, with
// a tolerance of 0.02, with the true logistic function.
module tb_sigmoid_pwl;
  import merinda_pkg::*;
  import merinda_ref_pkg::*;
  int checks = 0, failures = 0;
  fx_t x, y;
  sigmoid_pwl dut (.x, .y);
  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    real tr, err, maxerr;
    maxerr = 0.0;
    for (int v = -32768; v <= 32767; v++) begin
      x = fx_t'(v);
      #1;
      checks++;
      if (int'(y) != rsig(v)) begin
        failures++;
        if (failures < 10) $display("mismatch x=%0d y=%0d ref=%0d", v, y, rsig(v));
      end
      tr  = 1.0 / (1.0 + $exp(-to_real(v)));
      err = to_real(int'(y)) - tr;
      if (err < 0) err = -err;
      if (err > maxerr) maxerr = err;
    end
    checks++;
    if (maxerr > 0.02) begin failures++; $display("max error %f too large", maxerr); end
    $display("sigmoid max abs error vs exp(): %f", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
