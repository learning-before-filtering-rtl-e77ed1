// lbf_feeder: data feeder between the detector-side streams and the pipeline.
//
// DATA and TRUTH arrive as one value per cycle (data_valid_i / truth_valid_i,
// no back-pressure: the source is continuous). They are written into two
// FIFOs while the design is in the learn or update state, so input that
// arrives while the network updates its parameters is buffered and consumed
// faster afterwards (rate averaging). A value arriving at a full FIFO is
// dropped and sets the sticky overflow_o flag.
//
// A sample is released only when it is complete (n_inputs data values and
// n_truth truth values buffered) and the control unit allows it (feed_en_i,
// high in the learn state while the batch is not complete). Samples start at
// least P = max(n_inputs, N_NEURONS) + 2 cycles apart, the minimum period of
// the forward and backward layers. For a sample starting at cycle S
// (outputs registered):
//   act_o   : alpha^0_i at S+i, i = 0..n_inputs-1, then the constant 1 with
//             `last` at S+n_inputs (the bias input of layer 1);
//   pipe_o  : {i, alpha^0_i, 1} at S+i, the PIPE stream of backward layer 0;
//   truth_o : tau_t at S+t, t = 0..n_truth-1;
//   sample_o: pulse at S-2 (the cycle the sample is started).
// FIFO depths are this implementation's choice (the size needed follows from
// the update duration and the input rate).
module lbf_feeder
  import lbf_pkg::*;
#(
  parameter int unsigned DATA_DEPTH  = 1024,
  parameter int unsigned TRUTH_DEPTH = 1024
) (
  input  logic     clk,
  input  logic     rst_n,
  input  net_cfg_t net_i,
  input  state_e   state_i,
  input  logic     feed_en_i,
  input  logic     data_valid_i,
  input  data_t    data_i,
  input  logic     truth_valid_i,
  input  data_t    truth_i,
  output stream_t  act_o,
  output stream_t  truth_o,
  output pipe_t    pipe_o,
  output logic     sample_o,
  output logic     overflow_o,
  output logic [$clog2(DATA_DEPTH):0] data_level_o
);

  localparam int unsigned DAW = $clog2(DATA_DEPTH);
  localparam int unsigned TAW = $clog2(TRUTH_DEPTH);

  data_t dmem [0:DATA_DEPTH-1];
  data_t tmem [0:TRUTH_DEPTH-1];
  logic [DAW-1:0] d_wp, d_rp;
  logic [TAW-1:0] t_wp, t_rp;
  logic [DAW:0]   d_cnt;
  logic [TAW:0]   t_cnt;

  logic accept;
  assign accept = (state_i == ST_LEARN) || (state_i == ST_UPDATE);

  logic d_push, t_push, d_pop, t_pop;
  assign d_push = accept && data_valid_i  && (d_cnt < (DAW+1)'(DATA_DEPTH));
  assign t_push = accept && truth_valid_i && (t_cnt < (TAW+1)'(TRUTH_DEPTH));

  // ---- sample sequencer ---------------------------------------------------
  logic       busy, start;
  idx_t       pos;       // element position within the sample
  logic [7:0] gap;       // cycles until the next sample may start
  idx_t       period;
  idx_t       span;      // cycles a sample occupies the outputs
  assign period = ((net_i.n_inputs > idx_t'(N_NEURONS)) ? net_i.n_inputs : idx_t'(N_NEURONS)) + idx_t'(2);
  assign span   = (net_i.n_inputs + idx_t'(1) > net_i.n_truth) ? net_i.n_inputs + idx_t'(1) : net_i.n_truth;

  assign start = !busy && gap == '0 && feed_en_i && net_i.n_inputs != '0
                 && d_cnt >= (DAW+1)'(net_i.n_inputs) && t_cnt >= (TAW+1)'(net_i.n_truth);
  assign d_pop = busy && pos < net_i.n_inputs;
  assign t_pop = busy && pos < net_i.n_truth;
  assign sample_o = start;

  always_ff @(posedge clk) begin
    if (d_push) dmem[d_wp] <= data_i;
    if (t_push) tmem[t_wp] <= truth_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_wp <= '0; d_rp <= '0; d_cnt <= '0;
      t_wp <= '0; t_rp <= '0; t_cnt <= '0;
      busy <= 1'b0; pos <= '0; gap <= '0;
      act_o <= '0; truth_o <= '0; pipe_o <= '0;
      overflow_o <= 1'b0;
    end else begin
      if (d_push) d_wp <= d_wp + DAW'(1);
      if (t_push) t_wp <= t_wp + TAW'(1);
      if (d_pop)  d_rp <= d_rp + DAW'(1);
      if (t_pop)  t_rp <= t_rp + TAW'(1);
      d_cnt <= d_cnt + (DAW+1)'(d_push) - (DAW+1)'(d_pop);
      t_cnt <= t_cnt + (TAW+1)'(t_push) - (TAW+1)'(t_pop);
      if (accept && ((data_valid_i && !d_push) || (truth_valid_i && !t_push)))
        overflow_o <= 1'b1;

      if (gap != '0) gap <= gap - 8'd1;
      if (start) begin
        busy <= 1'b1;
        pos  <= '0;
        gap  <= 8'(period) - 8'd1;
      end else if (busy) begin
        pos <= pos + idx_t'(1);
        if (pos + idx_t'(1) == span) busy <= 1'b0;
      end

      // data stream with trailing 1
      act_o.valid <= busy && pos <= net_i.n_inputs;
      act_o.last  <= busy && pos == net_i.n_inputs;
      act_o.idx   <= pos;
      act_o.data  <= (pos == net_i.n_inputs) ? FX_ONE : dmem[d_rp];
      // PIPE of backward layer 0: the inputs, derivative unused (1)
      pipe_o.valid <= d_pop;
      pipe_o.idx   <= pos;
      pipe_o.act   <= dmem[d_rp];
      pipe_o.deriv <= FX_ONE;
      // truth stream
      truth_o.valid <= t_pop;
      truth_o.last  <= t_pop && pos == net_i.n_truth - idx_t'(1);
      truth_o.idx   <= pos;
      truth_o.data  <= tmem[t_rp];
    end
  end

  assign data_level_o = d_cnt;

endmodule
