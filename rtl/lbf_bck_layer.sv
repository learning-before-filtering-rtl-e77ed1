// lbf_bck_layer: backward layer l (0..N_LAYERS), a chain of N_NEURONS
// backward neurons followed by the update module.
//
// Layout mirrors the forward layer: chain position q holds neuron
// J = N_NEURONS-1-q, the ERROR, CONFIGURATION and PIPE streams advance one
// neuron per cycle, and neuron 0 is next to the update module. The number of
// active neurons is n^l (n_inputs for l = 0).
//
// RESULT shifting: neurons load their slot when their error result (learn) or
// their value/gradient pair (update trigger) is ready; neuron 0 loads last.
// The cycle after it has loaded, the controller shifts that entry set (chosen
// by parity) towards the update module for n^l cycles, so entries leave in the
// order j = 0..n^l-1. This gives the rules p_sample >= n^l and p_update >= n^l.
//
// Timing: if error element 0 of a sample enters at cycle E, the layer's own
// ERROR element 0 leaves at E + n_err + N_NEURONS + 2, where n_err is the
// number of incoming error elements (n^{l+1}, or n^L for the first layer).
// An update trigger entering at cycle T gives re-configuration command j at
// T + N_NEURONS + 4 + j.
// done_o pulses when neuron 0 has processed the last error element of a
// sample (for l = 0 this marks the sample as fully absorbed by the
// gradients). sync_err_o is the OR of the neurons' PIPE alignment errors.
module lbf_bck_layer
  import lbf_pkg::*;
#(
  parameter int unsigned L = 0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clr_i,
  input  net_cfg_t net_i,
  input  stream_t  err_i,
  input  pipe_t    pipe_i,
  input  cfg_cmd_t cfg_i,
  output stream_t  err_o,
  output cfg_cmd_t cfg_o,
  output cfg_cmd_t recfg_o,
  output logic     done_o,
  output logic     sync_err_o
);

  localparam int unsigned N = N_NEURONS;

  stream_t  err_c  [0:N];
  pipe_t    pipe_c [0:N];
  cfg_cmd_t cfg_c  [0:N];
  res_t     res_c  [0:N];
  logic     load [0:N-1];
  logic     load_par [0:N-1];
  logic     done [0:N-1];
  logic [N-1:0] serr;

  logic shift_en, shift_par;
  idx_t shift_cnt, n_act;

  assign n_act = n_of(net_i, L);

  assign err_c[0]  = err_i;
  assign pipe_c[0] = pipe_i;
  assign cfg_c[0]  = cfg_i;
  assign res_c[0]  = '0;

  for (genvar q = 0; q < N; q++) begin : g_neuron
    lbf_bck_neuron #(.L(L), .J(N - 1 - q)) u_neuron (
      .clk, .rst_n, .clr_i, .net_i,
      .err_i(err_c[q]), .err_o(err_c[q+1]),
      .pipe_i(pipe_c[q]), .pipe_o(pipe_c[q+1]),
      .cfg_i(cfg_c[q]), .cfg_o(cfg_c[q+1]),
      .res_i(res_c[q]), .res_o(res_c[q+1]),
      .shift_en_i(shift_en), .shift_par_i(shift_par),
      .load_o(load[q]), .load_par_o(load_par[q]),
      .done_o(done[q]), .sync_err_o(serr[q])
    );
  end

  assign shift_en = (shift_cnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shift_cnt <= '0;
      shift_par <= 1'b0;
    end else if (clr_i) begin
      shift_cnt <= '0;
    end else if (load[N-1]) begin
      shift_cnt <= n_act;
      shift_par <= load_par[N-1];
    end else if (shift_en) begin
      shift_cnt <= shift_cnt - idx_t'(1);
    end
  end

  res_t res_out;
  always_comb begin
    res_out       = res_c[N];
    res_out.valid = shift_en && res_c[N].valid && res_c[N].par == shift_par;
  end

  lbf_update #(.L(L)) u_update (
    .clk, .rst_n, .net_i,
    .res_i(res_out), .res_idx_i(n_act - shift_cnt),
    .err_o, .recfg_o,
    .cfg_i(cfg_c[N]), .cfg_o
  );

  assign done_o     = done[N-1];
  assign sync_err_o = |serr;

  // Streams leaving the end of the neuron chain are not used further.
  stream_t unused_err;
  pipe_t   unused_pipe;
  assign unused_err  = err_c[N];
  assign unused_pipe = pipe_c[N];

endmodule
