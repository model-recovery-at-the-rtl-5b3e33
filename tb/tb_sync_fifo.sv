// tb_sync_fifo: random push/pop traffic against a queue model; checks order,
// data, the count output and that the FIFO fills and drains completely.
module tb_sync_fifo;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [16:0] in_data = 0, out_data;
  logic [4:0] count;
  logic [16:0] q[$];
  int full_seen = 0, empty_seen = 0;
  sync_fifo #(.WIDTH(17), .DEPTH(16)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data, .count);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      int phase;
      logic push, pop;
      phase = (cyc / 500) % 2;
      @(negedge clk);
      checks++;
      if (count != 5'(q.size()) || out_valid != (q.size() != 0) || in_ready != (q.size() < 16)) begin
        failures++; $display("status mismatch count=%0d model=%0d", count, q.size());
      end
      if (q.size() == 16) full_seen++;
      if (q.size() == 0) empty_seen++;
      in_valid  = ($urandom_range(0, 9) < (phase ? 8 : 3));
      in_data   = 17'($urandom);
      out_ready = ($urandom_range(0, 9) < (phase ? 3 : 8));
      #1;
      push = in_valid && in_ready;
      pop  = out_valid && out_ready;
      if (pop) begin
        checks++;
        if (out_data != q[0]) begin failures++; $display("data mismatch %h vs %h", out_data, q[0]); end
        void'(q.pop_front());
      end
      if (push) q.push_back(in_data);
    end
    checks++;
    if (full_seen == 0 || empty_seen == 0) begin failures++; $display("full/empty never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
