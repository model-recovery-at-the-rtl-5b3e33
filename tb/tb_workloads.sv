// tb_workloads: forward passes of the accelerator, at its default sizes, over
// input traces shaped like the five benchmark systems of the model-recovery
// evaluation: automated insulin delivery (3 states, 1 input, 200 samples),
// Lotka-Volterra (2 states), chaotic Lorenz (3 states), F8 cruiser (3 states,
// 1 input) and a pathogenic-attack model (5 states, 1 input).
//
// The Lotka-Volterra, Lorenz and insulin (Bergman minimal model) traces are
// integrated here with 4th-order Runge-Kutta; the F8 and pathogenic traces are
// smooth synthetic signals with the right number of channels, since only the
// shape of the data matters to the hardware. Each channel is scaled to [-1, 1]
// and sent as one feature; unused feature slots are zero. The network weights
// are random (trained weights are not part of the hardware). Every output
// beat is compared with the integer reference model; for each system the test
// also checks that its state and input count fit the I input slots and that
// its library size C(M+n, n) fits the O outputs, and reports the cycles used.
// A last run repeats the Lorenz trace with a 16-unit network loaded into the
// 32-unit hardware (spare units zeroed), the smaller of the two hidden sizes
// that fit the target device.
module tb_workloads;
  import merinda_pkg::*;
  import merinda_ref_pkg::*;
  localparam int H = 32, I = 8, O = 64, N = H + I;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic [15:0] s_axis_tdata = 0;
  logic s_axis_tvalid = 0, s_axis_tready, s_axis_tlast = 0;
  logic [15:0] m_axis_tdata;
  logic m_axis_tvalid, m_axis_tready = 1, m_axis_tlast;
  logic cfg_we = 0;
  logic [2:0] cfg_sel = 0;
  logic [7:0] cfg_row = 0, cfg_col = 0;
  logic [15:0] cfg_wdata = 0;
  logic out_softmax = 0;
  logic [31:0] stat_steps;
  logic busy;

  merinda_top dut (.clk, .rst_n, .s_axis_tdata, .s_axis_tvalid, .s_axis_tready, .s_axis_tlast,
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tready, .m_axis_tlast,
    .cfg_we, .cfg_sel, .cfg_row, .cfg_col, .cfg_wdata, .out_softmax, .stat_steps, .busy);

  always #5 clk = ~clk;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog: steps=%0d", stat_steps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  int Wr [H][N], Wz [H][N], Wa [H][N], br [H], bz [H], ba [H];
  int Wy [O][H], by [O];
  int a_m [H];
  typedef struct { int x [I]; bit last; } step_t;
  step_t xq [$];
  bit ref_new_seq = 1;

  function automatic int rnd(int mag);
    return $urandom_range(0, 2 * mag) - mag;
  endfunction

  task automatic ref_step(int x [I], output int y [O]);
    int cat [N], mc [N], r [H], z [H], an [H];
    longint acc;
    for (int j = 0; j < H; j++) cat[j] = a_m[j];
    for (int j = 0; j < I; j++) cat[H+j] = x[j];
    for (int i = 0; i < H; i++) begin
      acc = longint'(br[i]) * 4096; for (int j = 0; j < N; j++) acc += longint'(Wr[i][j]) * cat[j];
      r[i] = rsig(rsum_to_fx(acc));
      acc = longint'(bz[i]) * 4096; for (int j = 0; j < N; j++) acc += longint'(Wz[i][j]) * cat[j];
      z[i] = rsig(rsum_to_fx(acc));
      mc[i] = rmul(r[i], a_m[i]);
    end
    for (int j = 0; j < I; j++) mc[H+j] = x[j];
    for (int i = 0; i < H; i++) begin
      int cc;
      acc = longint'(ba[i]) * 4096; for (int j = 0; j < N; j++) acc += longint'(Wa[i][j]) * mc[j];
      cc = rtanh(rsum_to_fx(acc));
      an[i] = sat16(longint'(a_m[i]) + rmul(z[i], sat16(longint'(cc) - a_m[i])));
    end
    a_m = an;
    for (int o = 0; o < O; o++) begin
      acc = longint'(by[o]) * 4096;
      for (int j = 0; j < H; j++) acc += longint'(Wy[o][j]) * a_m[j];
      y[o] = rsum_to_fx(acc);
      if (y[o] < 0) y[o] = 0;
    end
  endtask

  // ---------------- output checker ----------------
  int exp_y [O];
  int beat = 0, steps_checked = 0;
  bit exp_last;
  always @(posedge clk) begin
    if (rst_n && m_axis_tvalid && m_axis_tready) begin
      if (beat == 0) begin
        step_t s;
        s = xq.pop_front();
        if (ref_new_seq) for (int i = 0; i < H; i++) a_m[i] = 0;
        ref_step(s.x, exp_y);
        ref_new_seq = s.last;
        exp_last = s.last;
      end
      checks++;
      if (int'(fx_t'(m_axis_tdata)) != exp_y[beat]) begin
        failures++;
        if (failures < 10) $display("step %0d beat %0d: got %0d expected %0d", steps_checked, beat, fx_t'(m_axis_tdata), exp_y[beat]);
      end
      checks++;
      if (m_axis_tlast != (exp_last && beat == O - 1)) begin failures++; $display("tlast wrong"); end
      if (beat == O - 1) begin beat = 0; steps_checked++; end
      else beat++;
    end
  end

  // ---------------- trace generation ----------------
  localparam int MAXLEN = 200;
  real tr [MAXLEN][I];

  function automatic void deriv(int sys, real x [5], real u, output real dx [5]);
    for (int k = 0; k < 5; k++) dx[k] = 0.0;
    case (sys)
      0: begin  // Bergman minimal model: glucose G, remote insulin X, plasma insulin Ip; u = insulin rate
        dx[0] = -0.03 * (x[0] - 110.0) - x[1] * x[0];
        dx[1] = -0.02 * x[1] + 1.0e-5 * (x[2] - 10.0);
        dx[2] = -0.1 * (x[2] - 10.0) + u;
      end
      1: begin  // Lotka-Volterra (hare, lynx)
        dx[0] = 0.55 * x[0] - 0.028 * x[0] * x[1];
        dx[1] = -0.84 * x[1] + 0.026 * x[0] * x[1];
      end
      2: begin  // Lorenz
        dx[0] = 10.0 * (x[1] - x[0]);
        dx[1] = x[0] * (28.0 - x[2]) - x[1];
        dx[2] = x[0] * x[1] - (8.0 / 3.0) * x[2];
      end
      default: ;
    endcase
  endfunction

  // fills tr[0..len-1][0..n+m-1], each channel scaled to [-1, 1]
  task automatic make_trace(int sys, int n, int m, int len, real dt, int sub);
    real x [5], k1 [5], k2 [5], k3 [5], k4 [5], xt [5], u, mx;
    for (int k = 0; k < 5; k++) x[k] = 0.0;
    case (sys)
      0: begin x[0] = 160.0; x[1] = 0.0; x[2] = 10.0; end
      1: begin x[0] = 30.0; x[1] = 4.0; end
      2: begin x[0] = 1.0; x[1] = 1.0; x[2] = 1.0; end
      default: ;
    endcase
    for (int t = 0; t < len; t++) begin
      u = (sys == 0 && (t % 48) < 2) ? 5.0 : 0.0;
      if (sys >= 3) begin
        // synthetic smooth channels for the F8 and pathogenic traces
        for (int c = 0; c < n + m; c++)
          tr[t][c] = $sin(0.07 * (c + 1) * t + 0.5 * c) * $cos(0.013 * t * (c + 2));
      end else begin
        for (int c = 0; c < n; c++) tr[t][c] = x[c];
        if (m > 0) tr[t][n] = u;
        repeat (sub) begin
          deriv(sys, x, u, k1);
          for (int k = 0; k < 5; k++) xt[k] = x[k] + 0.5 * dt * k1[k];
          deriv(sys, xt, u, k2);
          for (int k = 0; k < 5; k++) xt[k] = x[k] + 0.5 * dt * k2[k];
          deriv(sys, xt, u, k3);
          for (int k = 0; k < 5; k++) xt[k] = x[k] + dt * k3[k];
          deriv(sys, xt, u, k4);
          for (int k = 0; k < 5; k++) x[k] = x[k] + dt / 6.0 * (k1[k] + 2.0 * k2[k] + 2.0 * k3[k] + k4[k]);
        end
      end
    end
    for (int c = 0; c < n + m; c++) begin
      real mean;
      mean = 0.0;
      for (int t = 0; t < len; t++) mean += tr[t][c] / len;
      mx = 1.0e-9;
      for (int t = 0; t < len; t++) begin
        real d;
        d = tr[t][c] - mean;
        if (d < 0.0) d = -d;
        if (d > mx) mx = d;
      end
      for (int t = 0; t < len; t++) tr[t][c] = (tr[t][c] - mean) / mx;
    end
    for (int t = 0; t < len; t++) for (int c = n + m; c < I; c++) tr[t][c] = 0.0;
  endtask

  function automatic int binom(int a, int b);
    longint r;
    r = 1;
    for (int k = 1; k <= b; k++) r = r * (a - b + k) / k;
    return int'(r);
  endfunction

  task automatic send_trace(int len);
    for (int t = 0; t < len; t++) begin
      step_t s;
      s.last = (t == len - 1);
      for (int c = 0; c < I; c++) s.x[c] = to_q(tr[t][c]);
      xq.push_back(s);
      for (int c = 0; c < I; c++) begin
        @(negedge clk);
        s_axis_tvalid = 1; s_axis_tdata = 16'(s.x[c]); s_axis_tlast = s.last && (c == I - 1);
        @(posedge clk);
        while (!s_axis_tready) @(posedge clk);
      end
      @(negedge clk);
      s_axis_tvalid = 0; s_axis_tlast = 0;
    end
  endtask

  task automatic cfg(wsel_e s, int row, int c, int v);
    @(negedge clk); cfg_we = 1; cfg_sel = 3'(s); cfg_row = 8'(row); cfg_col = 8'(c); cfg_wdata = 16'(v);
  endtask

  typedef struct { string name; int sys; int n; int m; int order; int len; real dt; int sub; } wl_t;
  wl_t wl [5];

  initial begin
    int total;
    wl[0] = '{"AID",        0, 3, 1, 2, 200, 1.0,  5};
    wl[1] = '{"Lotka",      1, 2, 0, 2, 100, 0.05, 4};
    wl[2] = '{"Lorenz",     2, 3, 0, 2, 100, 0.005, 4};
    wl[3] = '{"F8",         3, 3, 1, 3, 100, 0.0,  1};
    wl[4] = '{"Pathogenic", 4, 5, 1, 3, 100, 0.0,  1};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < H; i++) begin
      for (int j = 0; j < N; j++) begin
        Wr[i][j] = rnd(1000); cfg(SEL_WR, i, j, Wr[i][j]);
        Wz[i][j] = rnd(1000); cfg(SEL_WZ, i, j, Wz[i][j]);
        Wa[i][j] = rnd(1000); cfg(SEL_WA, i, j, Wa[i][j]);
      end
      br[i] = rnd(1024); cfg(SEL_BR, i, 0, br[i]);
      bz[i] = rnd(1024); cfg(SEL_BZ, i, 0, bz[i]);
      ba[i] = rnd(1024); cfg(SEL_BA, i, 0, ba[i]);
    end
    for (int o = 0; o < O; o++) begin
      for (int j = 0; j < H; j++) begin Wy[o][j] = rnd(1500); cfg(SEL_WY, o, j, Wy[o][j]); end
      by[o] = rnd(1024); cfg(SEL_BY, o, 0, by[o]);
    end
    @(negedge clk); cfg_we = 0;
    total = 0;
    foreach (wl[w]) begin
      int t0, terms;
      terms = binom(wl[w].order + wl[w].n, wl[w].n);
      checks++;
      if (wl[w].n + wl[w].m > I) begin failures++; $display("%s: %0d channels do not fit %0d inputs", wl[w].name, wl[w].n + wl[w].m, I); end
      checks++;
      if (terms + wl[w].m > O) begin failures++; $display("%s: %0d outputs needed, %0d built", wl[w].name, terms + wl[w].m, O); end
      make_trace(wl[w].sys, wl[w].n, wl[w].m, wl[w].len, wl[w].dt, wl[w].sub);
      t0 = cycle;
      send_trace(wl[w].len);
      total += wl[w].len;
      wait (steps_checked == total);
      $display("%-10s states=%0d inputs=%0d library terms=%0d samples=%0d cycles=%0d (%0d per sample)",
               wl[w].name, wl[w].n, wl[w].m, terms, wl[w].len, cycle - t0, (cycle - t0) / wl[w].len);
    end
    // The 16-unit network of the hidden-size comparison on the same hardware:
    // hidden units 16..31 get zero weights and biases, and the other units
    // ignore them, so those units hold a = 0 (tanh(0) = 0) at every step.
    for (int i = 0; i < H; i++) begin
      for (int j = 0; j < N; j++)
        if (i >= H / 2 || (j >= H / 2 && j < H)) begin
          Wr[i][j] = 0; cfg(SEL_WR, i, j, 0);
          Wz[i][j] = 0; cfg(SEL_WZ, i, j, 0);
          Wa[i][j] = 0; cfg(SEL_WA, i, j, 0);
        end
      if (i >= H / 2) begin
        br[i] = 0; cfg(SEL_BR, i, 0, 0);
        bz[i] = 0; cfg(SEL_BZ, i, 0, 0);
        ba[i] = 0; cfg(SEL_BA, i, 0, 0);
      end
    end
    @(negedge clk); cfg_we = 0;
    begin
      int t0;
      make_trace(2, 3, 0, 100, 0.005, 4);
      t0 = cycle;
      send_trace(100);
      total += 100;
      wait (steps_checked == total);
      checks++;
      foreach (a_m[i]) if (i >= H / 2 && a_m[i] != 0) begin failures++; $display("spare unit %0d moved", i); end
      $display("%-10s Lorenz trace, 16 of %0d hidden units, samples=100 cycles=%0d", "MR(16)", H, cycle - t0);
    end
    repeat (10) @(negedge clk);
    checks++;
    if (busy || xq.size() != 0) begin failures++; $display("pipeline not empty"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
