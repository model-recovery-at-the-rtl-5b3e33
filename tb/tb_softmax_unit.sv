// tb_softmax_unit: random logit vectors (narrow and wide spreads) through the
// softmax. Each probability is compared bit for bit with an integer model of
// the exponent/reciprocal scheme and, within 0.07, with the true softmax; the
// sum of the outputs must be close to 1 and the latency 3*O+26 cycles.
module tb_softmax_unit;
  import merinda_pkg::*;
  import merinda_ref_pkg::*;
  int checks = 0, failures = 0;
  localparam int O = 64;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_tag = 0, out_valid, out_ready = 0, out_tag, busy;
  fx_t logits [O], prob [O];
  softmax_unit #(.O(O)) dut (.clk, .rst_n, .in_valid, .in_ready, .logits, .in_tag,
    .out_valid, .out_ready, .prob, .out_tag, .busy);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    real maxerr;
    maxerr = 0.0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      int lg [O];
      int mx, cyc, sum, recip, psum;
      real tsum;
      int spread;
      spread = (t % 3 == 0) ? 30000 : ((t % 3 == 1) ? 8000 : 2000);
      mx = -32768;
      for (int k = 0; k < O; k++) begin
        lg[k] = $urandom_range(0, spread) - spread / 2;
        logits[k] = fx_t'(lg[k]);
        if (lg[k] > mx) mx = lg[k];
      end
      @(negedge clk);
      in_tag = t[0];
      in_valid = 1;
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      in_valid = 0;
      cyc = 1;
      while (!out_valid) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 3 * O + 26) begin failures++; $display("latency %0d expected %0d", cyc, 3 * O + 26); end
      // integer model
      sum = 0;
      for (int k = 0; k < O; k++) sum += rexp_q(lg[k] - mx);
      recip = (1 << 24) / sum;
      tsum = 0.0;
      for (int k = 0; k < O; k++) tsum += $exp(to_real(lg[k] - mx));
      psum = 0;
      for (int k = 0; k < O; k++) begin
        int e;
        real tp, err;
        e = (rexp_q(lg[k] - mx) * recip + 2048) >>> 12;
        checks++;
        if (int'(prob[k]) != e) begin failures++; $display("t %0d k %0d: %0d vs %0d", t, k, prob[k], e); end
        tp = $exp(to_real(lg[k] - mx)) / tsum;
        err = to_real(int'(prob[k])) - tp;
        if (err < 0) err = -err;
        if (err > maxerr) maxerr = err;
        psum += int'(prob[k]);
      end
      checks++;
      if (psum < 4096 - 200 || psum > 4096 + 200) begin failures++; $display("sum of p = %0d", psum); end
      checks++;
      if (out_tag != in_tag) begin failures++; $display("tag lost"); end
      repeat ($urandom_range(0, 3)) @(negedge clk);
      out_ready = 1;
      @(negedge clk);
      out_ready = 0;
    end
    checks++;
    if (maxerr > 0.07) begin failures++; $display("max error %f", maxerr); end
    $display("softmax max abs error vs exact: %f", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
