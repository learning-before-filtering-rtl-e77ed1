// lbf_bck_net: the backward network, N_LAYERS+1 backward layers.
//
// Backward layer N_LAYERS receives the cost derivatives and computes only the
// bias gradients of the last forward layer; each following layer l computes
// the weight gradients of forward layer l+1 and the bias gradients of forward
// layer l; the extra layer 0 computes only the weight gradients of forward
// layer 1. The ERROR stream and the CONFIGURATION stream run through the
// layers in the order N_LAYERS, ..., 0. Layer l takes the PIPE stream of
// forward layer l (for l = 0: the input sample) from its delay line.
//
// Outputs: each layer's RE-CONFIGURATION stream (the control unit triggers one
// layer at a time, so at most one is active in a cycle), done_o from layer 0
// (a sample has been fully absorbed into the gradients), sync_err_o if any
// neuron saw misaligned PIPE data.
module lbf_bck_net
  import lbf_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clr_i,
  input  net_cfg_t net_i,
  input  stream_t  err_i,
  input  pipe_t    pipe_i  [0:N_LAYERS],
  input  cfg_cmd_t cfg_i,
  output cfg_cmd_t recfg_o [0:N_LAYERS],
  output logic     done_o,
  output logic     sync_err_o
);

  stream_t  err_c [0:N_LAYERS+1];   // err_c[l+1] enters layer l
  cfg_cmd_t cfg_c [0:N_LAYERS+1];
  logic [N_LAYERS:0] done, serr;

  assign err_c[N_LAYERS+1] = err_i;
  assign cfg_c[N_LAYERS+1] = cfg_i;

  for (genvar l = 0; l <= N_LAYERS; l++) begin : g_layer
    lbf_bck_layer #(.L(l)) u_layer (
      .clk, .rst_n, .clr_i, .net_i,
      .err_i(err_c[l+1]), .pipe_i(pipe_i[l]), .cfg_i(cfg_c[l+1]),
      .err_o(err_c[l]), .cfg_o(cfg_c[l]), .recfg_o(recfg_o[l]),
      .done_o(done[l]), .sync_err_o(serr[l])
    );
  end

  assign done_o     = done[0];
  assign sync_err_o = |serr;

  // Layer 0 produces no error stream; the configuration leaving it is unused.
  stream_t  unused_err;
  cfg_cmd_t unused_cfg;
  logic [N_LAYERS:1] unused_done;
  assign unused_err  = err_c[0];
  assign unused_cfg  = cfg_c[0];
  assign unused_done = done[N_LAYERS:1];

endmodule
