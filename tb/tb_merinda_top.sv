// tb_merinda_top: end-to-end test of the accelerator at its default sizes
// (H=32 hidden units, I=8 inputs, O=64 outputs).
//
// Random weights are written through the configuration port; four sequences
// of input vectors are streamed in over the sample stream: a 200-step
// sequence (the length of one glucose-insulin trace) with no gaps and ReLU
// outputs, two short sequences with random gaps, random output back-pressure
// and the output mode switched while data is in flight, the last of which
// ends with a short vector, and a softmax-only sequence. Every output beat is
// compared with an integer reference of GRU -> dense -> ReLU/softmax, tlast is
// checked, and the step interval of the unstalled sequence must be
// 2*(H+I)+7 cycles. The test counts how often each mechanism happened and
// fails if one never did: input back-pressure, output back-pressure, softmax
// stall of the dense layer, overlap of GRU and dense work, hidden-state
// restart at a sequence boundary, both output modes, a mode switch, and a
// short final vector.
module tb_merinda_top;
  import merinda_pkg::*;
  import merinda_ref_pkg::*;
  localparam int H = 32, I = 8, O = 64, N = H + I;
  localparam int STEP_CYC = 2 * N + 7;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic [15:0] s_axis_tdata = 0;
  logic s_axis_tvalid = 0, s_axis_tready, s_axis_tlast = 0;
  logic [15:0] m_axis_tdata;
  logic m_axis_tvalid, m_axis_tready = 0, m_axis_tlast;
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

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: steps=%0d", stat_steps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  int Wr [H][N], Wz [H][N], Wa [H][N], br [H], bz [H], ba [H];
  int Wy [O][H], by [O];
  int a_m [H];
  bit ref_new_seq = 1;

  typedef struct { int x [I]; bit last; } step_t;
  step_t xq [$];
  bit    modeq [$];    // 1 = ReLU, recorded when the dense layer takes a step

  function automatic int rnd(int mag);
    return $urandom_range(0, 2 * mag) - mag;
  endfunction

  task automatic ref_gru(int x [I]);
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
  endtask

  task automatic ref_out(bit relu, output int y [O]);
    longint acc;
    int mx, sum, recip;
    for (int o = 0; o < O; o++) begin
      acc = longint'(by[o]) * 4096;
      for (int j = 0; j < H; j++) acc += longint'(Wy[o][j]) * a_m[j];
      y[o] = rsum_to_fx(acc);
      if (relu && y[o] < 0) y[o] = 0;
    end
    if (!relu) begin
      mx = -32768;
      for (int o = 0; o < O; o++) if (y[o] > mx) mx = y[o];
      sum = 0;
      for (int o = 0; o < O; o++) sum += rexp_q(y[o] - mx);
      recip = (1 << 24) / sum;
      for (int o = 0; o < O; o++) y[o] = (rexp_q(y[o] - mx) * recip + 2048) >>> 12;
    end
  endtask

  // ---------------- mechanism counters ----------------
  int n_in_bp = 0, n_out_bp = 0, n_sm_stall = 0, n_overlap = 0, n_restart = 0;
  int n_relu = 0, n_softmax = 0, n_switch = 0, n_short = 0;
  bit last_mode_valid = 0, last_mode = 0;
  int cycle = 0;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      if (s_axis_tvalid && !s_axis_tready) n_in_bp++;
      if (m_axis_tvalid && !m_axis_tready) n_out_bp++;
      if (dut.y_valid && !dut.y_ready && !dut.y_relu && dut.sm_busy) n_sm_stall++;
      if (dut.gru_busy && dut.dense_busy) n_overlap++;
      if (dut.h_valid && dut.h_ready) begin
        modeq.push_back(!out_softmax);
        if (!out_softmax) n_relu++; else n_softmax++;
        if (last_mode_valid && last_mode != !out_softmax) n_switch++;
        last_mode_valid = 1;
        last_mode = !out_softmax;
      end
    end
  end

  // ---------------- output checker ----------------
  int  exp_y [O];
  int  beat = 0;
  int  steps_checked = 0;
  bit  exp_last;
  always @(posedge clk) begin
    if (rst_n && m_axis_tvalid && m_axis_tready) begin
      if (beat == 0) begin
        step_t s;
        bit relu;
        if (xq.size() == 0 || modeq.size() == 0) begin
          failures++; $display("output with no step pending");
        end else begin
          s = xq.pop_front();
          relu = modeq.pop_front();
          if (ref_new_seq) begin
            for (int i = 0; i < H; i++) a_m[i] = 0;
            if (steps_checked > 0) n_restart++;
          end
          ref_gru(s.x);
          ref_out(relu, exp_y);
          ref_new_seq = s.last;
          exp_last = s.last;
        end
      end
      checks++;
      if (int'(fx_t'(m_axis_tdata)) != exp_y[beat]) begin
        failures++;
        if (failures < 10) $display("step %0d beat %0d: got %0d expected %0d", steps_checked, beat, fx_t'(m_axis_tdata), exp_y[beat]);
      end
      checks++;
      if (m_axis_tlast != (exp_last && beat == O - 1)) begin failures++; $display("tlast wrong at step %0d beat %0d", steps_checked, beat); end
      if (beat == O - 1) begin beat = 0; steps_checked++; end
      else beat++;
    end
  end

  // ---------------- stimulus ----------------
  task automatic cfg(wsel_e s, int row, int c, int v);
    @(negedge clk); cfg_we = 1; cfg_sel = 3'(s); cfg_row = 8'(row); cfg_col = 8'(c); cfg_wdata = 16'(v);
  endtask

  int in_gap_pct = 0;   // percent of cycles with tvalid low
  int out_gap_pct = 0;  // percent of cycles with tready low

  always @(negedge clk) m_axis_tready <= ($urandom_range(0, 99) >= out_gap_pct);

  task automatic send_beat(int v, bit last);
    while ($urandom_range(0, 99) < in_gap_pct) begin
      s_axis_tvalid = 0; @(negedge clk);
    end
    s_axis_tvalid = 1; s_axis_tdata = 16'(v); s_axis_tlast = last;
    @(posedge clk);
    while (!s_axis_tready) @(posedge clk);
    @(negedge clk);
    s_axis_tvalid = 0; s_axis_tlast = 0;
  endtask

  task automatic send_seq(int len, bit short_end);
    for (int t = 0; t < len; t++) begin
      step_t s;
      int nb;
      s.last = (t == len - 1);
      nb = (short_end && s.last) ? I - 3 : I;
      for (int j = 0; j < I; j++) s.x[j] = (j < nb) ? rnd(4096) : 0;
      if (nb < I) n_short++;
      xq.push_back(s);
      for (int j = 0; j < nb; j++) send_beat(s.x[j], s.last && j == nb - 1);
    end
  endtask

  int step_times [$];
  logic [31:0] prev_steps = 0;
  always @(posedge clk) begin
    if (stat_steps != prev_steps) step_times.push_back(cycle);
    prev_steps <= stat_steps;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < H; i++) begin
      for (int j = 0; j < N; j++) begin
        Wr[i][j] = rnd(1200); cfg(SEL_WR, i, j, Wr[i][j]);
        Wz[i][j] = rnd(1200); cfg(SEL_WZ, i, j, Wz[i][j]);
        Wa[i][j] = rnd(1200); cfg(SEL_WA, i, j, Wa[i][j]);
      end
      br[i] = rnd(2048); cfg(SEL_BR, i, 0, br[i]);
      bz[i] = rnd(2048); cfg(SEL_BZ, i, 0, bz[i]);
      ba[i] = rnd(2048); cfg(SEL_BA, i, 0, ba[i]);
    end
    for (int o = 0; o < O; o++) begin
      for (int j = 0; j < H; j++) begin Wy[o][j] = rnd(1500); cfg(SEL_WY, o, j, Wy[o][j]); end
      by[o] = rnd(2048); cfg(SEL_BY, o, 0, by[o]);
    end
    @(negedge clk); cfg_we = 0;

    // sequence 0: 200 steps, no gaps, ReLU - checks the step rate
    out_softmax = 0; in_gap_pct = 0; out_gap_pct = 0;
    send_seq(200, 0);
    wait (steps_checked == 200);
    checks++;
    begin
      int bad;
      bad = 0;
      for (int k = 5; k < 195; k++) if (step_times[k] - step_times[k-1] != STEP_CYC) bad++;
      if (bad != 0) begin
        failures++;
        $display("step interval wrong in %0d places (e.g. %0d, expected %0d)", bad,
                 step_times[10] - step_times[9], STEP_CYC);
      end else $display("step interval %0d cycles", STEP_CYC);
    end

    // sequences 1 and 2: gaps, back-pressure, mode switches in flight
    in_gap_pct = 30; out_gap_pct = 40;
    fork
      begin
        send_seq(12, 0);
        send_seq(9, 1);
      end
      begin
        repeat (60) begin
          repeat ($urandom_range(30, 200)) @(negedge clk);
          out_softmax = ~out_softmax;
        end
      end
    join_any
    disable fork;
    wait (steps_checked == 221);

    // sequence 3: softmax only, output always ready
    out_softmax = 1; in_gap_pct = 0; out_gap_pct = 0;
    send_seq(10, 0);
    wait (steps_checked == 231);
    repeat (20) @(negedge clk);

    checks++;
    if (busy) begin failures++; $display("busy after the last output"); end
    checks++;
    if (xq.size() != 0 || stat_steps != 231) begin failures++; $display("steps left over: %0d, stat_steps=%0d", xq.size(), stat_steps); end
    $display("mechanisms: in_backpressure=%0d out_backpressure=%0d softmax_stall=%0d overlap=%0d restart=%0d relu_steps=%0d softmax_steps=%0d mode_switches=%0d short_vectors=%0d",
             n_in_bp, n_out_bp, n_sm_stall, n_overlap, n_restart, n_relu, n_softmax, n_switch, n_short);
    checks++; if (n_in_bp == 0)    begin failures++; $display("input back-pressure never happened"); end
    checks++; if (n_out_bp == 0)   begin failures++; $display("output back-pressure never happened"); end
    checks++; if (n_sm_stall == 0) begin failures++; $display("softmax stall never happened"); end
    checks++; if (n_overlap == 0)  begin failures++; $display("GRU/dense overlap never happened"); end
    checks++; if (n_restart < 3)   begin failures++; $display("sequence restart happened %0d times", n_restart); end
    checks++; if (n_relu == 0 || n_softmax == 0) begin failures++; $display("an output mode was never used"); end
    checks++; if (n_switch == 0)   begin failures++; $display("mode never switched"); end
    checks++; if (n_short == 0)    begin failures++; $display("no short vector"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
