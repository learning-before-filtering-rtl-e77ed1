// lbf_fwd_net: the forward network, N_LAYERS forward layers in a pipeline.
//
// The ACTIVATION stream from the feeder (inputs alpha^0 plus the trailing 1)
// enters layer 1; each layer's ACTIVATION output feeds the next layer, and the
// last layer's output is the network prediction alpha^L (followed by a
// trailing 1, which the cost block ignores). Each layer also emits its PIPE
// stream (activations and derivatives) towards the backward network.
//
// The CONFIGURATION stream runs through all layers in series, neuron by
// neuron. Read-out answers are produced inside the neurons, so the stream
// leaving the last layer, restricted to commands with `resp` set, is the
// LEARNED output. A sample needs sum over l of (n^{l-1} + N_NEURONS + 5)
// cycles to cross the network.
module lbf_fwd_net
  import lbf_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clr_i,
  input  net_cfg_t net_i,
  input  stream_t  act_i,
  input  cfg_cmd_t cfg_i,
  output stream_t  pred_o,
  output pipe_t    pipe_o [1:N_LAYERS],
  output cfg_cmd_t learned_o
);

  stream_t  act_c [0:N_LAYERS];
  cfg_cmd_t cfg_c [0:N_LAYERS];

  assign act_c[0] = act_i;
  assign cfg_c[0] = cfg_i;

  for (genvar l = 1; l <= N_LAYERS; l++) begin : g_layer
    lbf_fwd_layer #(.L(l)) u_layer (
      .clk, .rst_n, .clr_i, .net_i,
      .act_i(act_c[l-1]), .cfg_i(cfg_c[l-1]),
      .act_o(act_c[l]), .pipe_o(pipe_o[l]), .cfg_o(cfg_c[l])
    );
  end

  assign pred_o = act_c[N_LAYERS];

  always_comb begin
    learned_o = cfg_c[N_LAYERS];
    learned_o.valid = cfg_c[N_LAYERS].valid && cfg_c[N_LAYERS].resp;
  end

endmodule
