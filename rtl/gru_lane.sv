// gru_lane: one hidden unit i of the GRU layer.
//
// A lane does, for its own index i, everything the GRU kernel's unrolled
// loops over i do:
//   sum_r = br + sum_j Wr[i][j]*concat[j],  r = sigma(sum_r)        (L4)
//   sum_z = bz + sum_j Wz[i][j]*concat[j],  z = sigma(sum_z)        (L4)
//   modc  = r * a_prev[i]                                           (L5)
//   sum   = ba + sum_j Wa[i][j]*mod_concat[j],  cc = tanh(sum)      (L7)
//   a_new = z*cc + (1-z)*a_prev[i]  computed as a_prev + z*(cc-a_prev) (L8)
// The rows Wr[i], Wz[i], Wa[i] sit in three private RAMs addressed by the
// column j that the controller sweeps; col carries concat[j] (gate phase) or
// mod_concat[j] (candidate phase), broadcast to all lanes and aligned with the
// RAM output. The lane has five multipliers: three MACs and two products.
//
// Timing (strobes from gru_ctrl): clr loads the three biases; en_gate
// accumulates the two gate sums; act_gate latches r and z; en_cand accumulates
// the candidate sum; act_cand latches cc. modc and a_new are combinational
// from the latched values. Weights are written with wr_en/wr_sel/wr_col.
// The equations follow the source kernel; the column-serial schedule, the
// piecewise-linear activations and the number format are this design's.
// The MACs' full-width acc outputs are left open on purpose: the lane
// uses only their rounded y outputs.
module gru_lane
  import merinda_pkg::*;
#(
  parameter int H = 32,
  parameter int I = 8,
  localparam int N  = H + I,
  localparam int AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  // weight / bias write port (row already decoded)
  input  logic          wr_en,
  input  wsel_e         wr_sel,
  input  logic [AW-1:0] wr_col,
  input  fx_t           wr_data,
  // column sweep
  input  logic [AW-1:0] addr,
  input  fx_t           col,
  input  logic          clr,
  input  logic          en_gate,
  input  logic          act_gate,
  input  logic          en_cand,
  input  logic          act_cand,
  // state
  input  fx_t           a_prev,
  output fx_t           modc,
  output fx_t           a_new
);
  fx_t br, bz, ba;
  fx_t wr_q, wz_q, wa_q;
  fx_t sum_r, sum_z, sum_a;
  fx_t sig_r, sig_z, tanh_a;
  fx_t r, z, cc;

  weight_ram #(.DEPTH(N), .WIDTH(DATA_W)) u_wr (
    .clk, .we(wr_en && wr_sel == SEL_WR), .waddr(wr_col), .wdata(wr_data), .raddr(addr), .rdata(wr_q));
  weight_ram #(.DEPTH(N), .WIDTH(DATA_W)) u_wz (
    .clk, .we(wr_en && wr_sel == SEL_WZ), .waddr(wr_col), .wdata(wr_data), .raddr(addr), .rdata(wz_q));
  weight_ram #(.DEPTH(N), .WIDTH(DATA_W)) u_wa (
    .clk, .we(wr_en && wr_sel == SEL_WA), .waddr(wr_col), .wdata(wr_data), .raddr(addr), .rdata(wa_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      br <= '0; bz <= '0; ba <= '0;
    end else if (wr_en) begin
      if (wr_sel == SEL_BR) br <= wr_data;
      if (wr_sel == SEL_BZ) bz <= wr_data;
      if (wr_sel == SEL_BA) ba <= wr_data;
    end
  end

  mac_unit u_mac_r (.clk, .rst_n, .clr, .bias(br), .en(en_gate), .a(wr_q), .b(col), .acc(), .y(sum_r));
  mac_unit u_mac_z (.clk, .rst_n, .clr, .bias(bz), .en(en_gate), .a(wz_q), .b(col), .acc(), .y(sum_z));
  mac_unit u_mac_a (.clk, .rst_n, .clr, .bias(ba), .en(en_cand), .a(wa_q), .b(col), .acc(), .y(sum_a));

  sigmoid_pwl u_sig_r (.x(sum_r), .y(sig_r));
  sigmoid_pwl u_sig_z (.x(sum_z), .y(sig_z));
  tanh_pwl    u_tanh  (.x(sum_a), .y(tanh_a));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= '0; z <= '0; cc <= '0;
    end else begin
      if (act_gate) begin r <= sig_r; z <= sig_z; end
      if (act_cand) cc <= tanh_a;
    end
  end

  assign modc  = fx_mul(r, a_prev);
  assign a_new = fx_add(a_prev, fx_mul(z, fx_sub(cc, a_prev)));
endmodule
