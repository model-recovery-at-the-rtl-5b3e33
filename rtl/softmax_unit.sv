// softmax_unit: softmax over the O outputs of one time step,
//   p[k] = exp(y[k] - max(y)) / sum_j exp(y[j] - max(y)).
//
// The elements are handled one per cycle: a pass finds the maximum m; a second
// pass forms e[k] = 2^(d*log2(e)) for d = y[k]-m <= 0, splitting the exponent
// into an integer part n (a right shift) and a fraction f with 2^f taken as
// 1+f, and sums the e[k]; a 25-step restoring divider forms the reciprocal
// 1/sum once; a last pass multiplies every e[k] by it. All values are Q3.12;
// e[k] lies in (0,1], the sum in [1,O], p[k] in [0,1].
//
// Interface: in_valid/in_ready take logits and a one-bit tag (carried through
// to out_tag, used for the end-of-sequence mark). prob is offered with
// out_valid/out_ready 3*O+26 cycles after the input handshake; the unit takes
// the next vector one cycle after the output handshake. The softmax comes from
// the source kernel; the exponent and division method are this design's.
// The top bit of the divider remainder is computed but never read: after a
// subtraction the remainder is always below the divisor.
module softmax_unit
  import merinda_pkg::*;
#(
  parameter int O = 64,
  localparam int KW = (O > 1) ? $clog2(O) : 1,
  localparam int SW = DATA_W + KW + 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  fx_t  logits [O],
  input  logic in_tag,
  output logic out_valid,
  input  logic out_ready,
  output fx_t  prob [O],
  output logic out_tag,
  output logic busy
);
  typedef enum logic [2:0] {IDLE, MAX, EXP, DIV, NORM, DONE} state_e;

  localparam logic signed [15:0] LOG2E = 16'sd5909;  // log2(e) in Q.12

  state_e         state;
  logic [KW-1:0]  k;
  logic [4:0]     bitn;
  fx_t            lg   [O];
  fx_t            ev   [O];
  fx_t            m;
  logic [SW-1:0]  sum;
  logic [SW:0]    rem;
  logic [12:0]    recip;

  // exponent of the current element
  logic signed [DATA_W:0]   d;
  logic signed [DATA_W+16:0] t;
  logic signed [DATA_W+4:0] tq;      // d*log2e in Q.12, floor
  logic signed [DATA_W+4:0] nint;    // integer part (<= 0)
  logic [11:0]              ffrac;
  logic [12:0]              mant;
  fx_t                      e_k;
  logic [SW:0]              rem_sh;
  logic [25:0]              prod;

  always_comb begin
    d     = (DATA_W+1)'(lg[k]) - (DATA_W+1)'(m);
    t     = (DATA_W+17)'(d) * (DATA_W+17)'(LOG2E);
    tq    = (DATA_W+5)'(t >>> FRAC);
    nint  = tq >>> FRAC;
    ffrac = tq[11:0];
    mant  = 13'd4096 + 13'(ffrac);
    if (nint < -(DATA_W+5)'(12)) e_k = '0;
    else                         e_k = fx_t'(16'(mant) >> (-nint));
    rem_sh = {rem[SW-1:0], (bitn == 5'd24)};   // numerator is 2^24
    prod   = 26'(ev[k]) * 26'(recip);
  end

  assign in_ready  = (state == IDLE);
  assign out_valid = (state == DONE);
  assign busy      = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= IDLE;
      k       <= '0;
      bitn    <= '0;
      m       <= '0;
      sum     <= '0;
      rem     <= '0;
      recip   <= '0;
      out_tag <= 1'b0;
      for (int j = 0; j < O; j++) begin lg[j] <= '0; ev[j] <= '0; prob[j] <= '0; end
    end else begin
      unique case (state)
        IDLE: if (in_valid) begin
          lg      <= logits;
          out_tag <= in_tag;
          m       <= FX_MIN;
          k       <= '0;
          state   <= MAX;
        end
        MAX: begin
          if (lg[k] > m) m <= lg[k];
          if (k == KW'(O-1)) begin k <= '0; sum <= '0; state <= EXP; end
          else k <= k + 1'b1;
        end
        EXP: begin
          ev[k] <= e_k;
          sum   <= sum + SW'(unsigned'(e_k));
          if (k == KW'(O-1)) begin rem <= '0; bitn <= 5'd24; recip <= '0; state <= DIV; end
          else k <= k + 1'b1;
        end
        DIV: begin
          if (rem_sh >= {1'b0, sum}) begin
            rem   <= rem_sh - {1'b0, sum};
            recip <= {recip[11:0], 1'b1};
          end else begin
            rem   <= rem_sh;
            recip <= {recip[11:0], 1'b0};
          end
          if (bitn == 5'd0) begin k <= '0; state <= NORM; end
          else bitn <= bitn - 1'b1;
        end
        NORM: begin
          prob[k] <= fx_t'((prod + 26'd2048) >> FRAC);
          if (k == KW'(O-1)) state <= DONE;
          else k <= k + 1'b1;
        end
        DONE: if (out_ready) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end
endmodule
