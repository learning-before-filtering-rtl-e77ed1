// lbf_fwd_neuron: one forward neuron j of forward layer l.
//
// The neuron sits in a chain: the ACTIVATION and CONFIGURATION streams enter,
// are used here, and leave one cycle later through output registers (the
// "latch" boxes of the neuron drawing). While a sample streams past, the
// multiply-accumulate unit (MAA-1) adds w[k]*a[k] for every activation k and,
// on the trailing constant activation 1 that closes each sample (flag `last`),
// adds the bias. memory-1 holds the weights at addresses 0..N_NEURONS-1 and
// the bias at address N_NEURONS; the address is the element index carried by
// the stream.
//
// MAA-1 is three registers deep: operand register, product register,
// accumulator. The final stimulus is written into this neuron's slot of the
// STIMULUS pipe D_FWD = 3 cycles after the `last` activation was seen at the
// input, and the accumulator restarts at zero on the same edge, so no extra
// reset cycle is needed between samples.
//
// STIMULUS pipe slot: holds {valid, par, value}. `par` is the sample parity of
// this neuron; the layer's shift controller moves only slots whose parity
// equals shift_par_i, so results of the next sample that are loaded while the
// previous sample is still being shifted out stay in place. Loading has
// priority over shifting.
//
// Configuration: WEIGHT/BIAS commands addressed to (layer L, neuron J) write
// memory-1; READ_W/READ_B commands addressed here leave the neuron replaced by
// a WEIGHT/BIAS command carrying the stored value with `resp` set (read-out
// uses the same command format as configuration).
//
// A neuron with J >= n^l (run-time number of active neurons) is transparent:
// it only forwards the streams. Transparent neurons are the ones farthest from
// the layer output (highest J). Following the architecture description:
// memory-1, MAA-1, pass-through latches, transparency. Choices of this
// implementation: fixed-point arithmetic, addressing by element index,
// parity-tagged stimulus slots.
module lbf_fwd_neuron
  import lbf_pkg::*;
#(
  parameter int unsigned L = 1,   // forward layer number (1..N_LAYERS)
  parameter int unsigned J = 0    // neuron index within the layer
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clr_i,        // state clear (configuration state)
  input  net_cfg_t net_i,
  input  stream_t  act_i,
  output stream_t  act_o,
  input  cfg_cmd_t cfg_i,
  output cfg_cmd_t cfg_o,
  input  logic     stim_valid_i,  // upstream STIMULUS slot
  input  logic     stim_par_i,
  input  data_t    stim_data_i,
  output logic     stim_valid_o,  // this neuron's STIMULUS slot
  output logic     stim_par_o,
  output data_t    stim_data_o,
  input  logic     shift_en_i,
  input  logic     shift_par_i,
  output logic     load_o,        // slot loaded this cycle (result ready)
  output logic     load_par_o
);

  localparam int unsigned BIAS_ADDR = N_NEURONS;

  data_t mem [0:N_NEURONS];   // memory-1: weights then bias

  logic active;
  assign active = (idx_t'(J) < net_i.n_neur[L]);

  // ---------------- configuration decode / read-out ----------------------
  logic hit;
  assign hit = cfg_i.valid && !cfg_i.resp && cfg_i.layer == lay_t'(L) && cfg_i.neuron == idx_t'(J);

  always_ff @(posedge clk) begin
    if (hit && cfg_i.param == P_WEIGHT && cfg_i.index < idx_t'(N_NEURONS))
      mem[cfg_i.index] <= cfg_i.value;
    if (hit && cfg_i.param == P_BIAS)
      mem[BIAS_ADDR] <= cfg_i.value;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_o <= '0;
      act_o <= '0;
    end else begin
      cfg_o <= cfg_i;
      if (hit && cfg_i.param == P_READ_W) begin
        cfg_o.resp  <= 1'b1;
        cfg_o.param <= P_WEIGHT;
        cfg_o.value <= (cfg_i.index < idx_t'(N_NEURONS)) ? mem[cfg_i.index] : '0;
      end else if (hit && cfg_i.param == P_READ_B) begin
        cfg_o.resp  <= 1'b1;
        cfg_o.param <= P_BIAS;
        cfg_o.value <= mem[BIAS_ADDR];
      end
      act_o <= act_i;
    end
  end

  // ---------------- MAA-1 ---------------------------------------------------
  logic  s1_v, s1_last, s2_v, s2_last;
  data_t s1_w, s1_a, s2_p, acc;
  logic  par;
  data_t result;

  assign result = acc + s2_p;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_last <= 1'b0; s1_w <= '0; s1_a <= '0;
      s2_v <= 1'b0; s2_last <= 1'b0; s2_p <= '0;
      acc  <= '0;
    end else begin
      s1_v    <= act_i.valid && active && !clr_i;
      s1_last <= act_i.last;
      s1_a    <= act_i.data;
      s1_w    <= act_i.last ? mem[BIAS_ADDR]
               : (act_i.idx < idx_t'(N_NEURONS) ? mem[act_i.idx] : '0);
      s2_v    <= s1_v;
      s2_last <= s1_last;
      s2_p    <= fx_mul(s1_w, s1_a);
      if (clr_i)
        acc <= '0;
      else if (s2_v)
        acc <= s2_last ? '0 : result;
    end
  end

  assign load_o     = s2_v && s2_last;
  assign load_par_o = par;

  // ---------------- STIMULUS slot --------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stim_valid_o <= 1'b0;
      stim_par_o   <= 1'b0;
      stim_data_o  <= '0;
      par          <= 1'b0;
    end else if (clr_i) begin
      stim_valid_o <= 1'b0;
      par          <= 1'b0;
    end else if (load_o) begin
      stim_valid_o <= 1'b1;
      stim_par_o   <= par;
      stim_data_o  <= result;
      par          <= ~par;
    end else if (shift_en_i) begin
      if (stim_valid_i && stim_par_i == shift_par_i) begin
        stim_valid_o <= 1'b1;
        stim_par_o   <= stim_par_i;
        stim_data_o  <= stim_data_i;
      end else if (stim_valid_o && stim_par_o == shift_par_i) begin
        stim_valid_o <= 1'b0;
      end
    end
  end

endmodule
