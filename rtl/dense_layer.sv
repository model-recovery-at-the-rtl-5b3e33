// dense_layer: the dense (analytical-inverse) layer that maps the H hidden
// values a[t] to O outputs,
//   y[i] = by[i] + sum_j Wy[i][j] * a[j]      (optionally y[i] = max(0, y[i]))
//
// In the model-recovery network these outputs are the candidate model
// coefficients (one per library term) plus input shift values, with a ReLU on
// the coefficient outputs; the accelerator kernel instead feeds the raw
// weighted sums to a softmax. relu_en chooses, per vector, which of the two
// this layer emits (the softmax itself is a separate unit).
//
// Structure: O output lanes, each with its own row RAM of Wy (H words), its
// bias register and a MAC; a snapshot register of a[t] is swept one column per
// cycle. The snapshot frees the GRU layer to compute a[t+1] meanwhile.
// Interface: h_valid/h_ready take h_vec, h_last and relu_en (sampled at the
// handshake); y_vec with y_last and y_relu (the sampled relu_en) is offered
// with y_valid/y_ready H+3 cycles after the h handshake. A new vector is taken
// only when the layer is idle and its output has been consumed. Weights come
// in through cfg_* with cfg_sel = SEL_WY / SEL_BY, row = output i, col = j.
// The equation is the source kernel's; the schedule is this design's.
// The MAC's acc output is left open (only the rounded y is used), and
// cfg_col bits above $clog2(H) are ignored, since column indices stop at H-1.
// The assertion is disabled during the asynchronous reset, so rst_n also
// feeds sampled logic.
module dense_layer
  import merinda_pkg::*;
#(
  parameter int H = 32,
  parameter int O = 64,
  localparam int AW = (H > 1) ? $clog2(H) : 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cfg_we,
  input  wsel_e      cfg_sel,
  input  logic [7:0] cfg_row,
  input  logic [7:0] cfg_col,
  input  fx_t        cfg_wdata,
  input  logic       h_valid,
  output logic       h_ready,
  input  fx_t        h_vec [H],
  input  logic       h_last,
  input  logic       relu_en,
  output logic       y_valid,
  input  logic       y_ready,
  output fx_t        y_vec [O],
  output logic       y_last,
  output logic       y_relu,
  output logic       busy
);
  typedef enum logic [1:0] {IDLE, SWP, LAST, OUT} state_e;

  state_e        state;
  logic [AW-1:0] cnt;
  logic          en, clr, accept;
  fx_t           hsnap [H];
  fx_t           col;
  fx_t           wq   [O];
  fx_t           by   [O];
  fx_t           sum  [O];
  logic          y_pend;

  assign h_ready = (state == IDLE) && !y_pend;
  assign accept  = h_valid && h_ready;
  assign clr     = accept;
  assign busy    = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= IDLE;
      cnt    <= '0;
      en     <= 1'b0;
      y_pend <= 1'b0;
      y_last <= 1'b0;
      y_relu <= 1'b0;
      for (int k = 0; k < H; k++) hsnap[k] <= '0;
      for (int k = 0; k < O; k++) y_vec[k] <= '0;
    end else begin
      en <= (state == SWP);
      unique case (state)
        IDLE: if (accept) begin
          hsnap  <= h_vec;
          y_last <= h_last;
          y_relu <= relu_en;
          cnt    <= '0;
          state  <= SWP;
        end
        SWP:  if (cnt == AW'(H-1)) state <= LAST; else cnt <= cnt + 1'b1;
        LAST: state <= OUT;
        OUT: begin
          for (int k = 0; k < O; k++)
            y_vec[k] <= (y_relu && sum[k] < 0) ? fx_t'(0) : sum[k];
          y_pend <= 1'b1;
          state  <= IDLE;
        end
        default: state <= IDLE;
      endcase
      if (y_pend && y_ready) y_pend <= 1'b0;
    end
  end

  assign y_valid = y_pend;

  always_ff @(posedge clk) col <= hsnap[cnt];

  for (genvar g = 0; g < O; g++) begin : g_out
    weight_ram #(.DEPTH(H), .WIDTH(DATA_W)) u_wy (
      .clk, .we(cfg_we && cfg_sel == SEL_WY && cfg_row == 8'(g)),
      .waddr(cfg_col[AW-1:0]), .wdata(cfg_wdata), .raddr(cnt), .rdata(wq[g]));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) by[g] <= '0;
      else if (cfg_we && cfg_sel == SEL_BY && cfg_row == 8'(g)) by[g] <= cfg_wdata;
    end
    mac_unit u_mac (.clk, .rst_n, .clr, .bias(by[g]), .en, .a(wq[g]), .b(col),
                    .acc(), .y(sum[g]));
  end

  a_y_stable: assert property (@(posedge clk) disable iff (!rst_n)
                               y_valid && !y_ready |=> y_valid && $stable(y_last));
endmodule
