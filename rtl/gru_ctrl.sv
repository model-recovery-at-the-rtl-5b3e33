// gru_ctrl: sequencer of one GRU time step.
//
// The step is split into phases in the order of the loop dependencies of the
// GRU kernel: the reset/update gate sums need concat = [a_prev ; x] (L2-L4),
// the reset-gated concat needs r (L5-L6), the candidate sum needs mod_concat
// (L7) and the state update needs z, cc and a_prev (L8). Each weighted sum is
// swept one column j per cycle, all hidden units in parallel.
//
//   IDLE   start seen: clr loads the biases into every accumulator
//   G_SWP  N = H+I cycles, addr = j issues the column to the weight RAMs
//   G_LAST last gate MAC (read data lags the address by one cycle)
//   G_ACT  act_gate: r = sigma(sum_r), z = sigma(sum_z) are latched
//   M_WR   modc_we: mod_concat = [r o a_prev ; x] is written
//   C_SWP  N cycles, addr = j for the candidate sum
//   C_LAST last candidate MAC
//   C_ACT  act_cand: cc = tanh(sum) is latched
//   UPD    upd: a_prev <= z*cc + (1-z)*a_prev
//
// en_gate / en_cand are the address strobes delayed by one cycle, aligned with
// the RAM read data. upd comes 2*N+6 cycles after the start cycle; start is
// accepted only in IDLE, so consecutive steps are 2*N+7 cycles apart. The
// phase order follows the source kernel; the cycle-level schedule is this
// design's own.
// The assertion is disabled during the asynchronous reset, so rst_n also
// feeds sampled logic.
module gru_ctrl #(
  parameter int H = 32,
  parameter int I = 8,
  localparam int N  = H + I,
  localparam int AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic [AW-1:0] addr,
  output logic          clr,
  output logic          en_gate,
  output logic          act_gate,
  output logic          modc_we,
  output logic          en_cand,
  output logic          act_cand,
  output logic          upd
);
  typedef enum logic [3:0] {
    IDLE, G_SWP, G_LAST, G_ACT, M_WR, C_SWP, C_LAST, C_ACT, UPD
  } state_e;

  state_e        state;
  logic [AW-1:0] cnt;
  logic          last_col;

  assign last_col = (cnt == AW'(N-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= IDLE;
      cnt     <= '0;
      en_gate <= 1'b0;
      en_cand <= 1'b0;
    end else begin
      en_gate <= (state == G_SWP);
      en_cand <= (state == C_SWP);
      unique case (state)
        IDLE:   if (start) begin state <= G_SWP; cnt <= '0; end
        G_SWP:  if (last_col) state <= G_LAST; else cnt <= cnt + 1'b1;
        G_LAST: state <= G_ACT;
        G_ACT:  state <= M_WR;
        M_WR:   begin state <= C_SWP; cnt <= '0; end
        C_SWP:  if (last_col) state <= C_LAST; else cnt <= cnt + 1'b1;
        C_LAST: state <= C_ACT;
        C_ACT:  state <= UPD;
        UPD:    state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

  assign busy     = (state != IDLE);
  assign addr     = cnt;
  assign clr      = (state == IDLE) && start;
  assign act_gate = (state == G_ACT);
  assign modc_we  = (state == M_WR);
  assign act_cand = (state == C_ACT);
  assign upd      = (state == UPD);

  a_one_phase: assert property (@(posedge clk) disable iff (!rst_n)
                                $onehot0({en_gate, act_gate, modc_we, en_cand, act_cand, upd}));
endmodule
