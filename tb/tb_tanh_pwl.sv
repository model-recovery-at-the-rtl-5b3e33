// tb_tanh_pwl: sweeps every Q3.12 input code through tanh and compares with
// the integer reference 2*sigma(2x)-1 and, within 0.04, with the true tanh.
module tb_tanh_pwl;
  import merinda_pkg::*;
  import merinda_ref_pkg::*;
  int checks = 0, failures = 0;
  fx_t x, y;
  tanh_pwl dut (.x, .y);
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
      if (int'(y) != rtanh(v)) begin
        failures++;
        if (failures < 10) $display("mismatch x=%0d y=%0d ref=%0d", v, y, rtanh(v));
      end
      tr  = (1.0 - $exp(-2.0 * to_real(v))) / (1.0 + $exp(-2.0 * to_real(v)));
      err = to_real(int'(y)) - tr;
      if (err < 0) err = -err;
      if (err > maxerr) maxerr = err;
    end
    checks++;
    if (maxerr > 0.04) begin failures++; $display("max error %f too large", maxerr); end
    $display("tanh max abs error: %f", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
