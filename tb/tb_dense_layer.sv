// tb_dense_layer: loads random Wy and by, feeds random hidden vectors with and
// without ReLU, and checks every output against the integer reference, the
// H+3-cycle latency, the end-of-sequence tag and that the layer waits for
// y_ready before taking the next vector.
module tb_dense_layer;
  import merinda_pkg::*;
  import merinda_ref_pkg::*;
  int checks = 0, failures = 0;
  localparam int H = 32, O = 64;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  wsel_e cfg_sel = SEL_WY;
  logic [7:0] cfg_row = 0, cfg_col = 0;
  fx_t cfg_wdata = 0;
  logic h_valid = 0, h_ready, h_last = 0, relu_en = 0;
  fx_t h_vec [H];
  logic y_valid, y_ready = 0, y_last, y_relu, busy;
  fx_t y_vec [O];
  int Wy [O][H], by [O];
  int relu_clamped = 0;

  dense_layer #(.H(H), .O(O)) dut (.clk, .rst_n, .cfg_we, .cfg_sel, .cfg_row, .cfg_col, .cfg_wdata,
    .h_valid, .h_ready, .h_vec, .h_last, .relu_en, .y_valid, .y_ready, .y_vec, .y_last, .y_relu, .busy);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic cfg(wsel_e s, int row, int c, int v);
    @(negedge clk); cfg_we = 1; cfg_sel = s; cfg_row = 8'(row); cfg_col = 8'(c); cfg_wdata = fx_t'(v);
  endtask
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int o = 0; o < O; o++) begin
      for (int j = 0; j < H; j++) begin Wy[o][j] = $urandom_range(0, 4000) - 2000; cfg(SEL_WY, o, j, Wy[o][j]); end
      by[o] = $urandom_range(0, 4000) - 2000; cfg(SEL_BY, o, 0, by[o]);
    end
    cfg(SEL_WR, 0, 0, 999);  // GRU arrays must not land here
    @(negedge clk); cfg_we = 0;
    for (int t = 0; t < 12; t++) begin
      int hv [H];
      int cyc;
      for (int j = 0; j < H; j++) begin hv[j] = $urandom_range(0, 8191) - 4096; h_vec[j] = fx_t'(hv[j]); end
      relu_en = t[0];
      h_last  = (t % 4 == 3);
      h_valid = 1;
      #1;
      while (!h_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      h_valid = 0;
      for (int j = 0; j < H; j++) h_vec[j] = fx_t'($urandom);  // snapshot must be used
      cyc = 1;
      while (!y_valid) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != H + 3) begin failures++; $display("latency %0d expected %0d", cyc, H + 3); end
      repeat ($urandom_range(0, 4)) begin
        @(negedge clk);
        checks++;
        if (!y_valid || h_ready) begin failures++; $display("did not wait for y_ready"); end
      end
      for (int o = 0; o < O; o++) begin
        longint acc;
        int e;
        acc = longint'(by[o]) * 4096;
        for (int j = 0; j < H; j++) acc += longint'(Wy[o][j]) * hv[j];
        e = rsum_to_fx(acc);
        if (relu_en && e < 0) begin e = 0; relu_clamped++; end
        checks++;
        if (int'(y_vec[o]) != e) begin failures++; $display("t %0d out %0d: %0d vs %0d", t, o, y_vec[o], e); end
      end
      checks++;
      if (y_last != h_last || y_relu != relu_en) begin failures++; $display("tag wrong"); end
      y_ready = 1;
      @(negedge clk);
      y_ready = 0;
    end
    checks++;
    if (relu_clamped == 0) begin failures++; $display("ReLU never clamped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
