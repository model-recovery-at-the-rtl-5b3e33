// merinda_top: forward-pass accelerator for GRU-based model recovery.
//
// The model-recovery network replaces an iterative neural-ODE layer with a
// GRU layer followed by a dense layer; this block is the part of that network
// that runs in the FPGA fabric. A DMA engine streams the training trace in,
// one time step x_t = [Y(t) ; U(t)] after another; for each step the GRU layer
// updates its H hidden values and the dense layer maps them to O outputs
// (model-coefficient estimates and input shifts), emitted either with a ReLU
// or through a softmax. Sparsity-based selection of the outputs, the
// Runge-Kutta simulation of the recovered model and training run elsewhere.
//
// Dataflow:  s_axis -> sync_fifo -> vector assembly -> gru_cell -> dense_layer
//            -> (softmax_unit when out_softmax) -> serializer -> m_axis
// Every stage has a valid/ready hand-off, so the dense layer, softmax and
// serializer work on step t while the GRU computes step t+1, and any full
// stage stalls the ones before it.
//
// Interface
//  s_axis_*  16-bit Q3.12 features, I beats per time step. tlast on the last
//            beat of the last step of a sequence; the hidden state restarts
//            from zero for the next sequence. A tlast before the I-th beat
//            closes the vector early with the missing features as zero.
//  m_axis_*  16-bit Q3.12 outputs, O beats per time step, tlast on the last
//            beat of the last step of a sequence.
//  cfg_*     weight/bias writes: cfg_sel selects the array (merinda_pkg::wsel_e),
//            cfg_row the hidden unit or output, cfg_col the column.
//  out_softmax  0: ReLU outputs, 1: softmax outputs; sampled per time step.
//  stat_steps   number of GRU time steps completed since reset.
//  busy         high while any sample or result is still inside the pipeline.
// Timing: a GRU step takes 2*(H+I)+7 cycles; the dense layer H+3; the softmax
// 3*O+27 per step, so in softmax mode at the default sizes the softmax sets
// the step rate. The block partition and equations follow the source
// architecture; stream framing, configuration port and schedule are this
// design's choices.
// The FIFO's count output is left open: the stream handshake alone paces
// the input. The assertions are disabled during the asynchronous reset, so
// rst_n also feeds sampled logic.
module merinda_top
  import merinda_pkg::*;
#(
  parameter int H = 32,
  parameter int I = 8,
  parameter int O = 64,
  localparam int IW = (I > 1) ? $clog2(I) : 1,
  localparam int OW = (O > 1) ? $clog2(O) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  // sample stream from DMA
  input  logic [15:0] s_axis_tdata,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  input  logic        s_axis_tlast,
  // result stream to DMA
  output logic [15:0] m_axis_tdata,
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic        m_axis_tlast,
  // configuration
  input  logic        cfg_we,
  input  logic [2:0]  cfg_sel,
  input  logic [7:0]  cfg_row,
  input  logic [7:0]  cfg_col,
  input  logic [15:0] cfg_wdata,
  input  logic        out_softmax,
  output logic [31:0] stat_steps,
  output logic        busy
);
  // ---------------- input FIFO ----------------
  logic        f_valid, f_ready;
  logic [16:0] f_data;

  sync_fifo #(.WIDTH(17), .DEPTH(16)) u_in_fifo (
    .clk, .rst_n,
    .in_valid(s_axis_tvalid), .in_ready(s_axis_tready), .in_data({s_axis_tlast, s_axis_tdata}),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data), .count());

  // ---------------- vector assembly ----------------
  fx_t           xbuf [I];
  logic [IW-1:0] beat;
  logic          vec_full, vec_last;
  logic          x_ready;
  logic          f_pop, f_closes;

  assign f_ready  = !vec_full;
  assign f_pop    = f_valid && f_ready;
  assign f_closes = (beat == IW'(I-1)) || f_data[16];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat     <= '0;
      vec_full <= 1'b0;
      vec_last <= 1'b0;
      for (int k = 0; k < I; k++) xbuf[k] <= '0;
    end else begin
      if (f_pop) begin
        xbuf[beat] <= fx_t'(f_data[15:0]);
        if (f_closes) begin
          vec_full <= 1'b1;
          vec_last <= f_data[16];
          beat     <= '0;
          for (int k = 0; k < I; k++)
            if (IW'(k) > beat) xbuf[k] <= '0;
        end else begin
          beat <= beat + 1'b1;
        end
      end else if (vec_full && x_ready) begin
        vec_full <= 1'b0;
      end
    end
  end

  // ---------------- GRU flow layer ----------------
  logic  h_valid, h_ready, h_last, gru_busy;
  fx_t   h_vec [H];

  gru_cell #(.H(H), .I(I)) u_gru (
    .clk, .rst_n,
    .cfg_we, .cfg_sel(wsel_e'(cfg_sel)), .cfg_row, .cfg_col, .cfg_wdata(fx_t'(cfg_wdata)),
    .x_valid(vec_full), .x_ready, .x_vec(xbuf), .x_last(vec_last),
    .h_valid, .h_ready, .h_vec, .h_last, .busy(gru_busy));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                   stat_steps <= '0;
    else if (h_valid && h_ready)  stat_steps <= stat_steps + 1'b1;
  end

  // ---------------- dense layer ----------------
  logic  y_valid, y_ready, y_last, y_relu, dense_busy;
  fx_t   y_vec [O];

  dense_layer #(.H(H), .O(O)) u_dense (
    .clk, .rst_n,
    .cfg_we, .cfg_sel(wsel_e'(cfg_sel)), .cfg_row, .cfg_col, .cfg_wdata(fx_t'(cfg_wdata)),
    .h_valid, .h_ready, .h_vec, .h_last, .relu_en(!out_softmax),
    .y_valid, .y_ready, .y_vec, .y_last, .y_relu, .busy(dense_busy));

  // ---------------- softmax ----------------
  logic  sm_in_valid, sm_in_ready, sm_out_valid, sm_out_ready, sm_tag, sm_busy;
  fx_t   sm_prob [O];

  // ReLU vectors bypass the softmax, but only once it is empty, so that the
  // output order always matches the step order.
  logic  ser_load_relu, ser_load_sm, ser_busy;

  assign sm_in_valid   = y_valid && !y_relu;
  assign ser_load_relu = y_valid && y_relu && !sm_busy && !ser_busy;
  assign y_ready       = y_relu ? ser_load_relu : sm_in_ready;

  softmax_unit #(.O(O)) u_softmax (
    .clk, .rst_n,
    .in_valid(sm_in_valid), .in_ready(sm_in_ready), .logits(y_vec), .in_tag(y_last),
    .out_valid(sm_out_valid), .out_ready(sm_out_ready), .prob(sm_prob), .out_tag(sm_tag),
    .busy(sm_busy));

  // ---------------- output serializer ----------------
  fx_t           obuf [O];
  logic [OW-1:0] obeat;
  logic          olast;

  assign ser_load_sm   = sm_out_valid && !ser_busy;
  assign sm_out_ready  = ser_load_sm;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ser_busy <= 1'b0;
      obeat    <= '0;
      olast    <= 1'b0;
      for (int k = 0; k < O; k++) obuf[k] <= '0;
    end else begin
      if (ser_load_sm) begin
        obuf     <= sm_prob;
        olast    <= sm_tag;
        obeat    <= '0;
        ser_busy <= 1'b1;
      end else if (ser_load_relu) begin
        obuf     <= y_vec;
        olast    <= y_last;
        obeat    <= '0;
        ser_busy <= 1'b1;
      end else if (ser_busy && m_axis_tready) begin
        if (obeat == OW'(O-1)) ser_busy <= 1'b0;
        else                   obeat    <= obeat + 1'b1;
      end
    end
  end

  assign m_axis_tvalid = ser_busy;

  // anything still in flight anywhere in the pipeline
  assign busy = f_valid || vec_full || gru_busy || h_valid || dense_busy || y_valid ||
                sm_busy || ser_busy;
  assign m_axis_tdata  = obuf[obeat];
  assign m_axis_tlast  = ser_busy && olast && (obeat == OW'(O-1));

  a_axis_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
      m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata) && $stable(m_axis_tlast));
  a_no_double_load: assert property (@(posedge clk) disable iff (!rst_n)
      !(ser_load_sm && ser_load_relu));
endmodule
