// lbf_top: real-time neural-network training primitive.
//
// A fully connected network of up to N_LAYERS x N_NEURONS neurons is trained
// by gradient descent directly on a continuous input stream. Every step of the
// training (forward propagation, cost derivative, backward propagation,
// gradient accumulation) has its own pipelined hardware block and all of them
// work at the same time on successive samples:
//
//   DATA/TRUTH -> feeder -> forward network --------> cost -> backward network
//                  |  \        | PIPE per layer         ^         |  RE-CONFIGURATION
//                  |   \-------+--> delay-2 per layer --+-------->|
//                  \--> delay-1 (truth) ----------------/         v
//   CONFIGURATION -> configurator -> CONFIGURATION stream to all blocks
//   TRIGGERS -> control (config / learn / update / read-out)
//   LEARNED <- read-out answers leaving the forward network
//
// Interface (all synchronous to clk, rst_n asynchronous active low):
//   cfg_i            configuration commands (accepted in the config state)
//   data_valid_i/_i  one input value per cycle
//   truth_valid_i/_i one truth value per cycle
//   start_learn_i, end_learn_i, start_readout_i   user triggers (pulses)
//   learned_o        read-out stream, same command format as cfg_i
//   pred_o           the network prediction of each sample (plus trailing 1)
//   state_o, batches_o  operational state, completed batches
//   feeder_overflow_o   input FIFO overflow (sticky)
//   recfg_overflow_o    re-configuration queue overflow (sticky)
//   sync_err_o          a PIPE delay is set so that data arrives misaligned
// The delays of delay-1 and delay-2 are run-time registers that the user must
// set from the layer latencies (see the documentation of the streams).
module lbf_top
  import lbf_pkg::*;
#(
  parameter int unsigned FEED_DEPTH  = 1024,
  parameter int unsigned DELAY_DEPTH = 2048,
  parameter int unsigned RECFG_DEPTH = 64
) (
  input  logic     clk,
  input  logic     rst_n,
  input  cfg_cmd_t cfg_i,
  input  logic     data_valid_i,
  input  data_t    data_i,
  input  logic     truth_valid_i,
  input  data_t    truth_i,
  input  logic     start_learn_i,
  input  logic     end_learn_i,
  input  logic     start_readout_i,
  output cfg_cmd_t learned_o,
  output stream_t  pred_o,
  output state_e   state_o,
  output logic [15:0] batches_o,
  output logic     feeder_overflow_o,
  output logic     recfg_overflow_o,
  output logic     sync_err_o
);

  net_cfg_t net;
  state_e   state;
  logic     feed_en, clr, sample, done, fifo_empty, reg_wr;
  cfg_cmd_t ctl_cmd, cfg_bc;
  cfg_cmd_t recfg [0:N_LAYERS];
  stream_t  act0, truth_f, truth_d, pred, err;
  pipe_t    pipe_src [0:N_LAYERS];
  pipe_t    pipe_dly [0:N_LAYERS];
  pipe_t    fwd_pipe [1:N_LAYERS];
  logic [$clog2(FEED_DEPTH):0] level;

  lbf_control u_control (
    .clk, .rst_n, .net_i(net),
    .start_learn_i, .end_learn_i, .start_readout_i,
    .sample_i(sample), .done_i(done), .fifo_empty_i(fifo_empty),
    .state_o(state), .feed_en_o(feed_en), .clr_o(clr), .ctl_o(ctl_cmd),
    .batches_o
  );

  lbf_configurator #(.FIFO_DEPTH(RECFG_DEPTH)) u_configurator (
    .clk, .rst_n, .state_i(state), .cfg_i, .ctl_i(ctl_cmd), .recfg_i(recfg),
    .net_o(net), .cfg_o(cfg_bc), .reg_wr_o(reg_wr),
    .fifo_empty_o(fifo_empty), .fifo_overflow_o(recfg_overflow_o)
  );

  lbf_feeder #(.DATA_DEPTH(FEED_DEPTH), .TRUTH_DEPTH(FEED_DEPTH)) u_feeder (
    .clk, .rst_n, .net_i(net), .state_i(state), .feed_en_i(feed_en),
    .data_valid_i, .data_i, .truth_valid_i, .truth_i,
    .act_o(act0), .truth_o(truth_f), .pipe_o(pipe_src[0]),
    .sample_o(sample), .overflow_o(feeder_overflow_o), .data_level_o(level)
  );

  lbf_fwd_net u_forward (
    .clk, .rst_n, .clr_i(clr), .net_i(net),
    .act_i(act0), .cfg_i(cfg_bc), .pred_o(pred), .pipe_o(fwd_pipe),
    .learned_o
  );

  for (genvar l = 1; l <= N_LAYERS; l++) begin : g_pipe_src
    assign pipe_src[l] = fwd_pipe[l];
  end

  // delay-1: truth values towards the cost block
  stream_t truth_dd;
  logic    truth_dv;
  lbf_delay_line #(.T(stream_t), .DEPTH(DELAY_DEPTH), .DW(DLY_W)) u_delay1 (
    .clk, .rst_n, .delay_i(net.truth_dly),
    .valid_i(truth_f.valid), .data_i(truth_f),
    .valid_o(truth_dv), .data_o(truth_dd)
  );
  always_comb begin
    truth_d = truth_dd;
    truth_d.valid = truth_dv;
  end

  // delay-2: one PIPE delay line per backward layer
  for (genvar l = 0; l <= N_LAYERS; l++) begin : g_delay2
    pipe_t d;
    logic  v;
    lbf_delay_line #(.T(pipe_t), .DEPTH(DELAY_DEPTH), .DW(DLY_W)) u_delay2 (
      .clk, .rst_n, .delay_i(net.pipe_dly[l]),
      .valid_i(pipe_src[l].valid), .data_i(pipe_src[l]),
      .valid_o(v), .data_o(d)
    );
    always_comb begin
      pipe_dly[l] = d;
      pipe_dly[l].valid = v;
    end
  end

  lbf_cost u_cost (
    .clk, .rst_n, .net_i(net), .pred_i(pred), .truth_i(truth_d), .err_o(err)
  );

  lbf_bck_net u_backward (
    .clk, .rst_n, .clr_i(clr), .net_i(net),
    .err_i(err), .pipe_i(pipe_dly), .cfg_i(cfg_bc),
    .recfg_o(recfg), .done_o(done), .sync_err_o
  );

  assign pred_o  = pred;
  assign state_o = state;

endmodule
