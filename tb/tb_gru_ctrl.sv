// tb_gru_ctrl: runs several steps (back to back and with gaps) and checks the
// exact cycle of every phase strobe against the schedule: clr with start,
// N address cycles per sweep, en delayed one cycle, and upd 2*N+6 cycles after
// start.
module tb_gru_ctrl;
  int checks = 0, failures = 0;
  localparam int H = 32, I = 8, N = H + I;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, clr, en_gate, act_gate, modc_we, en_cand, act_cand, upd;
  logic [5:0] addr;
  gru_ctrl #(.H(H), .I(I)) dut (.clk, .rst_n, .start, .busy, .addr, .clr, .en_gate, .act_gate,
    .modc_we, .en_cand, .act_cand, .upd);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // expected strobes at offset c (0 = start cycle)
  task automatic expect_cycle(int c);
    logic e_clr, e_eg, e_ag, e_mw, e_ec, e_ac, e_up, e_busy;
    e_clr  = (c == 0);
    e_busy = (c >= 1) && (c <= 2*N+6);
    e_eg   = (c >= 2) && (c <= N+1);
    e_ag   = (c == N+2);
    e_mw   = (c == N+3);
    e_ec   = (c >= N+5) && (c <= 2*N+4);
    e_ac   = (c == 2*N+5);
    e_up   = (c == 2*N+6);
    checks++;
    if ({clr, en_gate, act_gate, modc_we, en_cand, act_cand, upd, busy} !==
        {e_clr, e_eg, e_ag, e_mw, e_ec, e_ac, e_up, e_busy}) begin
      failures++;
      $display("cycle %0d: got %b expected %b", c, {clr, en_gate, act_gate, modc_we, en_cand, act_cand, upd, busy},
               {e_clr, e_eg, e_ag, e_mw, e_ec, e_ac, e_up, e_busy});
    end
    if (c >= 1 && c <= N) begin
      checks++;
      if (addr != 6'(c-1)) begin failures++; $display("gate addr %0d at cycle %0d", addr, c); end
    end
    if (c >= N+4 && c <= 2*N+3) begin
      checks++;
      if (addr != 6'(c-N-4)) begin failures++; $display("cand addr %0d at cycle %0d", addr, c); end
    end
  endtask
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int step = 0; step < 6; step++) begin
      int gap;
      gap = (step % 2) ? 0 : $urandom_range(1, 5);
      for (int g = 0; g < gap; g++) begin
        @(negedge clk);
        checks++;
        if (busy || upd) begin failures++; $display("busy while idle"); end
      end
      @(negedge clk);
      start = 1;
      for (int c = 0; c <= 2*N+6; c++) begin
        #1 expect_cycle(c);
        if (c < 2*N+6) begin
          @(negedge clk);
          start = (c < 2*N+5) ? $urandom_range(0, 1) : 0;  // ignored while busy
        end
      end
      @(negedge clk); start = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
