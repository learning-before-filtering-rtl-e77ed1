// lbf_update: update module at the end of backward layer l.
//
// Receives the RESULT stream of the layer: one entry per active neuron j, in
// order j = 0..n^l-1.
//   Learn state (entries of kind R_ERR): RESULT[V] = epsilon^l_j is passed to
//   the ERROR output with latency D_SUM_ERROR = 1, index j, `last` on the
//   final neuron. This feeds the next backward layer.
//   Update state (kinds R_W / R_B): computes v - s * g, the gradient-descent
//   step with the learning rate s from the register file, in D_SUM_UPDATE = 3
//   cycles (operand register, product register, difference/encoder register),
//   and the encoder turns it into a configuration command on recfg_o:
//     R_W entry from trigger k: WEIGHT, layer l+1, neuron k, index j
//     R_B entry               : BIAS,   layer l,   neuron j
// The CONFIGURATION stream passes through one register.
// The gradient is the sum over the batch; averaging over the batch is folded
// into s. The drawing of this module shows an adder after the multiplier;
// the subtraction written here follows the update equations of the text.
module lbf_update
  import lbf_pkg::*;
#(
  parameter int unsigned L = 0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  net_cfg_t net_i,
  input  res_t     res_i,       // valid only for entries being shifted out
  input  idx_t     res_idx_i,   // neuron index j of the entry
  output stream_t  err_o,
  output cfg_cmd_t recfg_o,
  input  cfg_cmd_t cfg_i,
  output cfg_cmd_t cfg_o
);

  logic   u1_v, u2_v;
  rkind_e u1_kind, u2_kind;
  idx_t   u1_k, u1_j, u2_k, u2_j;
  data_t  u1_v_val, u1_g, u2_v_val, u2_p;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      err_o <= '0; cfg_o <= '0; recfg_o <= '0;
      u1_v <= 1'b0; u1_kind <= R_W; u1_k <= '0; u1_j <= '0; u1_v_val <= '0; u1_g <= '0;
      u2_v <= 1'b0; u2_kind <= R_W; u2_k <= '0; u2_j <= '0; u2_v_val <= '0; u2_p <= '0;
    end else begin
      cfg_o <= cfg_i;
      // learn: error pass-through
      err_o.valid <= res_i.valid && res_i.kind == R_ERR;
      err_o.idx   <= res_idx_i;
      err_o.last  <= (res_idx_i == n_of(net_i, L) - idx_t'(1));
      err_o.data  <= res_i.v;
      // update: v - s*g
      u1_v     <= res_i.valid && res_i.kind != R_ERR;
      u1_kind  <= res_i.kind;
      u1_k     <= res_i.k;
      u1_j     <= res_idx_i;
      u1_v_val <= res_i.v;
      u1_g     <= res_i.g;
      u2_v     <= u1_v;
      u2_kind  <= u1_kind;
      u2_k     <= u1_k;
      u2_j     <= u1_j;
      u2_v_val <= u1_v_val;
      u2_p     <= fx_mul(net_i.step, u1_g);
      // encoder
      recfg_o.valid <= u2_v;
      recfg_o.resp  <= 1'b0;
      recfg_o.value <= u2_v_val - u2_p;
      if (u2_kind == R_B) begin
        recfg_o.param  <= P_BIAS;
        recfg_o.layer  <= lay_t'(L);
        recfg_o.neuron <= u2_j;
        recfg_o.index  <= '0;
      end else begin
        recfg_o.param  <= P_WEIGHT;
        recfg_o.layer  <= lay_t'(L + 1);
        recfg_o.neuron <= u2_k;
        recfg_o.index  <= u2_j;
      end
    end
  end

endmodule
