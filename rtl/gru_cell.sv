// gru_cell: the GRU flow layer - one GRU time step per input vector x_t.
//
// Computes, for all H hidden units at once,
//   r  = sigma(Wr*[a_prev ; x] + br)      z = sigma(Wz*[a_prev ; x] + bz)
//   cc = tanh(Wa*[r o a_prev ; x] + ba)   a = z o cc + (1 - z) o a_prev
// with H gru_lane instances (loops over the hidden index unrolled), one
// gru_ctrl sweeping the column index j, the hidden-state buffer a_prev held in
// H separate registers (fully partitioned, every lane reads its own entry and
// the sweep reads entry j), concat formed on the fly from those registers and
// the input register, and modc_buf holding mod_concat.
//
// Interface: x_valid/x_ready take x_vec (I values, Q3.12) and x_last, which
// marks the final step of a sequence. a_prev is zero for the first step after
// reset and after a step marked x_last. After the step, h_vec (= a[t]) is
// offered with h_valid/h_ready and h_last; the next step starts only once it
// has been taken (possibly in the same cycle), so the consumer (the dense layer) works on a[t] while a[t+1]
// is computed. A step takes 2*(H+I)+7 cycles from acceptance of x_t to
// h_valid. Weights are written through cfg_* (row = hidden index i, col = j).
// Equations and buffer placement follow the source kernel; the zero initial
// state, the hand-off and the schedule are this design's choices.
// cfg_col bits above $clog2(H+I) are ignored, since column indices stop
// at H+I-1. The assertion is disabled during the asynchronous reset, so rst_n
// also feeds sampled logic.
module gru_cell
  import merinda_pkg::*;
#(
  parameter int H = 32,
  parameter int I = 8,
  localparam int N  = H + I,
  localparam int AW = $clog2(N),
  localparam int HW = (H > 1) ? $clog2(H) : 1,
  localparam int XW = (I > 1) ? $clog2(I) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration
  input  logic        cfg_we,
  input  wsel_e       cfg_sel,
  input  logic [7:0]  cfg_row,
  input  logic [7:0]  cfg_col,
  input  fx_t         cfg_wdata,
  // input vector
  input  logic        x_valid,
  output logic        x_ready,
  input  fx_t         x_vec [I],
  input  logic        x_last,
  // hidden state out
  output logic        h_valid,
  input  logic        h_ready,
  output fx_t         h_vec [H],
  output logic        h_last,
  output logic        busy
);
  fx_t           a_prev [H];
  fx_t           x_reg  [I];
  fx_t           modc   [H];
  fx_t           a_new  [H];
  fx_t           modc_din [N];
  fx_t           col_gate, col_cand, col;
  logic          seq_new, last_reg, h_pend;
  logic          start;
  logic [AW-1:0] addr;
  logic          clr, en_gate, act_gate, modc_we, en_cand, act_cand, upd;
  logic          gru_wsel;

  assign x_ready = !busy && (!h_pend || h_ready);
  assign start   = x_valid && x_ready;
  assign gru_wsel = (cfg_sel != SEL_WY) && (cfg_sel != SEL_BY);

  gru_ctrl #(.H(H), .I(I)) u_ctrl (
    .clk, .rst_n, .start, .busy, .addr, .clr, .en_gate, .act_gate,
    .modc_we, .en_cand, .act_cand, .upd);

  // concat[j] = [a_prev ; x][j], registered to line up with the weight RAMs
  always_ff @(posedge clk) begin
    if (addr < AW'(H)) col_gate <= a_prev[HW'(addr)];
    else               col_gate <= x_reg[XW'(addr - AW'(H))];
  end

  always_comb begin
    for (int k = 0; k < H; k++) modc_din[k]   = modc[k];
    for (int k = 0; k < I; k++) modc_din[H+k] = x_reg[k];
  end

  modc_buf #(.H(H), .I(I)) u_modc (
    .clk, .we(modc_we), .din(modc_din), .raddr(addr), .dout(col_cand));

  assign col = en_cand ? col_cand : col_gate;

  for (genvar g = 0; g < H; g++) begin : g_lane
    gru_lane #(.H(H), .I(I)) u_lane (
      .clk, .rst_n,
      .wr_en   (cfg_we && gru_wsel && cfg_row == 8'(g)),
      .wr_sel  (cfg_sel),
      .wr_col  (cfg_col[AW-1:0]),
      .wr_data (cfg_wdata),
      .addr, .col, .clr, .en_gate, .act_gate, .en_cand, .act_cand,
      .a_prev  (a_prev[g]),
      .modc    (modc[g]),
      .a_new   (a_new[g]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < H; k++) a_prev[k] <= '0;
      for (int k = 0; k < I; k++) x_reg[k]  <= '0;
      seq_new  <= 1'b1;
      last_reg <= 1'b0;
      h_pend   <= 1'b0;
      h_last   <= 1'b0;
    end else begin
      if (start) begin
        x_reg    <= x_vec;
        last_reg <= x_last;
        seq_new  <= x_last;
        if (seq_new) for (int k = 0; k < H; k++) a_prev[k] <= '0;
      end
      if (upd) begin
        a_prev <= a_new;
        h_pend <= 1'b1;
        h_last <= last_reg;
      end else if (h_pend && h_ready) begin
        h_pend <= 1'b0;
      end
    end
  end

  assign h_valid = h_pend;
  assign h_vec   = a_prev;

  a_h_stable: assert property (@(posedge clk) disable iff (!rst_n)
                               h_valid && !h_ready |=> h_valid && $stable(h_last));
endmodule
