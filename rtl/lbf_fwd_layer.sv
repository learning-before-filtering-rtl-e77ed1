// lbf_fwd_layer: forward layer l, a chain of N_NEURONS forward neurons
// followed by the activation module.
//
// Chain position q holds neuron J = N_NEURONS-1-q, so neuron 0 is the one next
// to the activation module and the transparent neurons (J >= n^l) are
// clustered at the start of the chain. ACTIVATION and CONFIGURATION advance one
// neuron per cycle, so every neuron performs one multiply-accumulate per
// cycle while a sample passes.
//
// STIMULUS shifting: each neuron latches its stimulus into its own slot when
// it finishes. Neuron 0 finishes last; the cycle after it has loaded, the
// shift controller moves the slots of that sample (selected by their parity)
// one position towards the activation module per cycle, for n^l cycles, so the
// stimuli leave in the order chi_0, chi_1, ..., chi_{n-1}. Stimuli of the next
// sample may already be loaded upstream during the shift; they are not
// moved. This reproduces the period rule p >= max(n_inputs^l + 2, n^l)
// (the feeder enforces the stricter max(n_inputs, N_NEURONS) + 2).
//
// Timing: if the first activation of a sample is at the layer input at cycle
// S, the first activation of the next layer leaves at S + n^{l-1} + N + 5
// (n^{l-1} + 1 inputs including the trailing 1, N-1 hops, D_FWD, one shift
// cycle, D_SIGMA).
module lbf_fwd_layer
  import lbf_pkg::*;
#(
  parameter int unsigned L = 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clr_i,
  input  net_cfg_t net_i,
  input  stream_t  act_i,
  input  cfg_cmd_t cfg_i,
  output stream_t  act_o,
  output pipe_t    pipe_o,
  output cfg_cmd_t cfg_o
);

  localparam int unsigned N = N_NEURONS;

  stream_t  act_c [0:N];
  cfg_cmd_t cfg_c [0:N];
  logic     sv [0:N];
  logic     sp [0:N];
  data_t    sd [0:N];
  logic     load [0:N-1];
  logic     load_par [0:N-1];

  logic     shift_en, shift_par;
  idx_t     shift_cnt;

  assign act_c[0] = act_i;
  assign cfg_c[0] = cfg_i;
  assign sv[0] = 1'b0;
  assign sp[0] = 1'b0;
  assign sd[0] = '0;

  for (genvar q = 0; q < N; q++) begin : g_neuron
    lbf_fwd_neuron #(.L(L), .J(N - 1 - q)) u_neuron (
      .clk, .rst_n, .clr_i, .net_i,
      .act_i(act_c[q]), .act_o(act_c[q+1]),
      .cfg_i(cfg_c[q]), .cfg_o(cfg_c[q+1]),
      .stim_valid_i(sv[q]), .stim_par_i(sp[q]), .stim_data_i(sd[q]),
      .stim_valid_o(sv[q+1]), .stim_par_o(sp[q+1]), .stim_data_o(sd[q+1]),
      .shift_en_i(shift_en), .shift_par_i(shift_par),
      .load_o(load[q]), .load_par_o(load_par[q])
    );
  end

  // Shift controller: starts when neuron 0 (last position) has loaded.
  assign shift_en = (shift_cnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shift_cnt <= '0;
      shift_par <= 1'b0;
    end else if (clr_i) begin
      shift_cnt <= '0;
    end else if (load[N-1]) begin
      shift_cnt <= net_i.n_neur[L];
      shift_par <= load_par[N-1];
    end else if (shift_en) begin
      shift_cnt <= shift_cnt - idx_t'(1);
    end
  end

  stream_t stim_out;
  always_comb begin
    stim_out       = '0;
    stim_out.valid = shift_en && sv[N] && sp[N] == shift_par;
    stim_out.idx   = net_i.n_neur[L] - shift_cnt;
    stim_out.data  = sd[N];
  end

  lbf_activation #(.L(L)) u_act (
    .clk, .rst_n, .net_i,
    .stim_i(stim_out), .act_o, .pipe_o,
    .cfg_i(cfg_c[N]), .cfg_o
  );

  // The pass-through ACTIVATION at the end of the chain is not used further.
  stream_t unused_act;
  assign unused_act = act_c[N];

endmodule
