// tb_gru_cell: loads random GRU weights through the configuration port and
// runs two sequences of random input vectors. Every hidden vector a[t] is
// compared with an integer reference of the GRU equations; the time from
// accepting x_t to h_valid is checked to be 2*(H+I)+7 cycles; the hidden state
// must restart from zero after a step marked x_last; h_ready is held low at
// random to check that the layer waits.
module tb_gru_cell;
  import merinda_pkg::*;
  import merinda_ref_pkg::*;
  int checks = 0, failures = 0;
  localparam int H = 32, I = 8, N = H + I;
  localparam int STEP_CYC = 2 * N + 7;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  wsel_e cfg_sel = SEL_WR;
  logic [7:0] cfg_row = 0, cfg_col = 0;
  fx_t cfg_wdata = 0;
  logic x_valid = 0, x_ready, x_last = 0;
  fx_t x_vec [I];
  logic h_valid, h_ready = 0, h_last, busy;
  fx_t h_vec [H];
  int Wr [H][N], Wz [H][N], Wa [H][N], br [H], bz [H], ba [H];
  int a_m [H];
  int stalls = 0;

  gru_cell #(.H(H), .I(I)) dut (.clk, .rst_n, .cfg_we, .cfg_sel, .cfg_row, .cfg_col, .cfg_wdata,
    .x_valid, .x_ready, .x_vec, .x_last, .h_valid, .h_ready, .h_vec, .h_last, .busy);
  always #5 clk = ~clk;
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg(wsel_e s, int row, int c, int v);
    @(negedge clk); cfg_we = 1; cfg_sel = s; cfg_row = 8'(row); cfg_col = 8'(c); cfg_wdata = fx_t'(v);
  endtask

  function automatic int rnd(int mag);
    return $urandom_range(0, 2 * mag) - mag;
  endfunction

  task automatic ref_step(int x [I]);
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
    // writes to the dense arrays must not land in the GRU
    cfg(SEL_WY, 0, 0, 1234); cfg(SEL_BY, 1, 0, 4321);
    @(negedge clk); cfg_we = 0;

    for (int seq = 0; seq < 2; seq++) begin
      for (int i = 0; i < H; i++) a_m[i] = 0;
      for (int t = 0; t < 8; t++) begin
        int x [I];
        int cyc;
        for (int j = 0; j < I; j++) begin x[j] = rnd(4096); x_vec[j] = fx_t'(x[j]); end
        x_last  = (t == 7);
        x_valid = 1;
        @(posedge clk);
        while (!x_ready) @(posedge clk);
        @(negedge clk);
        x_valid = 0;
        cyc = 1;
        while (!h_valid) begin @(negedge clk); cyc++; end
        checks++;
        if (cyc != STEP_CYC) begin failures++; $display("step latency %0d, expected %0d", cyc, STEP_CYC); end
        ref_step(x);
        // hold h_ready low for a while; the output and the layer must wait
        repeat ($urandom_range(0, 6)) begin
          @(negedge clk);
          stalls++;
          checks++;
          if (!h_valid || x_ready) begin failures++; $display("did not wait for h_ready"); end
        end
        checks++;
        for (int i = 0; i < H; i++)
          if (int'(h_vec[i]) != a_m[i]) begin
            failures++; $display("seq %0d t %0d unit %0d: %0d vs %0d", seq, t, i, h_vec[i], a_m[i]);
            break;
          end
        checks++;
        if (h_last != x_last) begin failures++; $display("h_last wrong"); end
        h_ready = 1;
        @(negedge clk);
        h_ready = 0;
      end
    end
    $display("h_ready stall cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
