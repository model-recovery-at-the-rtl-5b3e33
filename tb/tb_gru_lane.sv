// tb_gru_lane: one hidden unit driven through complete GRU steps by hand:
// writes random weight rows and biases, sweeps the gate and candidate columns
// with the RAM-aligned timing of the controller, and checks r*a_prev and the
// new hidden value against the integer reference of the GRU equations.
module tb_gru_lane;
  import merinda_pkg::*;
  import merinda_ref_pkg::*;
  int checks = 0, failures = 0;
  localparam int H = 32, I = 8, N = H + I;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  wsel_e wr_sel = SEL_WR;
  logic [5:0] wr_col = 0, addr = 0;
  fx_t wr_data = 0, col = 0, a_prev = 0, modc, a_new;
  logic clr = 0, en_gate = 0, act_gate = 0, en_cand = 0, act_cand = 0;
  int wr_m [N], wz_m [N], wa_m [N];
  int br_m, bz_m, ba_m;
  int cat_v [N], mc_v [N];

  gru_lane #(.H(H), .I(I)) dut (.clk, .rst_n, .wr_en, .wr_sel, .wr_col, .wr_data, .addr, .col,
    .clr, .en_gate, .act_gate, .en_cand, .act_cand, .a_prev, .modc, .a_new);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(wsel_e s, int c, int v);
    @(negedge clk); wr_en = 1; wr_sel = s; wr_col = 6'(c); wr_data = fx_t'(v);
    @(negedge clk); wr_en = 0;
  endtask

  // sweep: address j at cycle k, operand col and enable at cycle k+1
  task automatic sweep(bit cand);
    for (int j = 0; j <= N; j++) begin
      @(negedge clk);
      if (j < N) addr = 6'(j);
      if (j > 0) begin
        col = fx_t'(cand ? mc_v[j-1] : cat_v[j-1]);
        if (cand) en_cand = 1; else en_gate = 1;
      end
    end
    @(negedge clk); en_gate = 0; en_cand = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 30; trial++) begin
      longint acc;
      int r_m, z_m, cc_m, modc_m, anew_m, ap;
      for (int j = 0; j < N; j++) begin
        wr_m[j] = $urandom_range(0, 4095) - 2048; wr(SEL_WR, j, wr_m[j]);
        wz_m[j] = $urandom_range(0, 4095) - 2048; wr(SEL_WZ, j, wz_m[j]);
        wa_m[j] = $urandom_range(0, 4095) - 2048; wr(SEL_WA, j, wa_m[j]);
        cat_v[j] = $urandom_range(0, 8191) - 4096;
        mc_v[j]  = $urandom_range(0, 8191) - 4096;
      end
      br_m = $urandom_range(0, 4095) - 2048; wr(SEL_BR, 0, br_m);
      bz_m = $urandom_range(0, 4095) - 2048; wr(SEL_BZ, 0, bz_m);
      ba_m = $urandom_range(0, 4095) - 2048; wr(SEL_BA, 0, ba_m);
      ap = $urandom_range(0, 8191) - 4096;
      a_prev = fx_t'(ap);
      // reference
      acc = longint'(br_m) * 4096; for (int j = 0; j < N; j++) acc += longint'(wr_m[j]) * cat_v[j];
      r_m = rsig(rsum_to_fx(acc));
      acc = longint'(bz_m) * 4096; for (int j = 0; j < N; j++) acc += longint'(wz_m[j]) * cat_v[j];
      z_m = rsig(rsum_to_fx(acc));
      acc = longint'(ba_m) * 4096; for (int j = 0; j < N; j++) acc += longint'(wa_m[j]) * mc_v[j];
      cc_m = rtanh(rsum_to_fx(acc));
      modc_m = rmul(r_m, ap);
      anew_m = sat16(longint'(ap) + rmul(z_m, sat16(longint'(cc_m) - ap)));
      // drive one step
      @(negedge clk); clr = 1;
      @(negedge clk); clr = 0;
      sweep(0);
      act_gate = 1; @(negedge clk); act_gate = 0;
      #1;
      checks++;
      if (int'(modc) != modc_m) begin failures++; $display("trial %0d modc %0d vs %0d", trial, modc, modc_m); end
      sweep(1);
      act_cand = 1; @(negedge clk); act_cand = 0;
      #1;
      checks++;
      if (int'(a_new) != anew_m) begin failures++; $display("trial %0d a_new %0d vs %0d", trial, a_new, anew_m); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
