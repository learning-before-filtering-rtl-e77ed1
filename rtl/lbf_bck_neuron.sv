// lbf_bck_neuron: backward neuron j of backward layer l (l = 0..N_LAYERS).
//
// Learn state. The ERROR stream carries epsilon^{l+1}_k, k = 0..n^{l+1}-1
// (for the first backward layer, l = N_LAYERS, it carries the cost
// derivatives dGamma/dalpha^L_k). For each element the neuron
//   MAA-2: accumulates w^{l+1}_{kj} * epsilon_k (memory-2 holds the weights
//          of forward layer l+1 that leave neuron j, i.e. the permuted copy);
//          in the first backward layer the weight is 1 for k = j and 0
//          otherwise, so the sum is the cost derivative of output j;
//   MAA-3: accumulates alpha^l_j * epsilon_k into grad_w[k]
//          (dGamma/dw^{l+1}_{kj}); not present in the first backward layer.
// After the last element the sum is multiplied by sigma'(chi^l_j) (*sigma'),
// giving epsilon^l_j, which is latched into the RESULT slot (kind R_ERR) and
// added to grad_b (dGamma/db^l_j). The last backward layer (l = 0) only
// accumulates grad_w and produces no error. MAA-2 plus *sigma' take
// D_BCK = 3 cycles after the last error element.
//
// latch-A: the PIPE stream (activation and derivative of forward layer l, one
// element per neuron, tagged with j) passes through the chain; the neuron
// captures its own element in a capture register. At element 0 of the next
// error sample the capture is moved into latch-A (and element 0 already uses
// the captured activation). A second capture before that move, or a move with
// nothing captured, sets sync_err_o: the delay line feeding PIPE is set wrong.
//
// Update state. An update trigger on the CONFIGURATION stream (UPD_W with
// index k, or UPD_B) addressed to this backward layer makes every active
// neuron latch {value, gradient} = {w^{l+1}_{kj}, grad_w[k]} or
// {b^l_j, grad_b} into its RESULT slot after D_UPDATE = 2 cycles, and clear
// that gradient. memory-2 keeps the weight copies and, at address N_NEURONS,
// the bias b^l_j; both are written by WEIGHT/BIAS configuration commands, so
// the re-configuration produced by the update module refreshes them too.
//
// RESULT slot: {valid, par, kind, k, v, g}, shifted by the layer controller
// in the same parity-tagged way as the forward STIMULUS pipe.
// Following the architecture description: memory-2, MAA-2, *sigma', MAA-3,
// grad_w, grad_b, latch-A, RESULT[V]/RESULT[G] and their dual use. Choices of
// this implementation: fixed-point arithmetic, capture/move split of latch-A,
// gradients cleared when read and in the configuration state.
module lbf_bck_neuron
  import lbf_pkg::*;
#(
  parameter int unsigned L = 0,   // backward layer number (0..N_LAYERS)
  parameter int unsigned J = 0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clr_i,
  input  net_cfg_t net_i,
  input  stream_t  err_i,
  output stream_t  err_o,
  input  pipe_t    pipe_i,
  output pipe_t    pipe_o,
  input  cfg_cmd_t cfg_i,
  output cfg_cmd_t cfg_o,
  input  res_t     res_i,       // upstream RESULT slot
  output res_t     res_o,       // this neuron's RESULT slot
  input  logic     shift_en_i,
  input  logic     shift_par_i,
  output logic     load_o,
  output logic     load_par_o,
  output logic     done_o,      // last error element of a sample processed
  output logic     sync_err_o
);

  localparam bit FIRST = (L == N_LAYERS);
  localparam bit LAST  = (L == 0);
  localparam int unsigned BIAS_ADDR = N_NEURONS;

  data_t mem2   [0:N_NEURONS];
  localparam int unsigned KW = $clog2(N_NEURONS);
  data_t grad_w [0:N_NEURONS-1];   // valid only where gw_ok is set
  logic [N_NEURONS-1:0] gw_ok;
  data_t grad_b;

  logic active;
  assign active = (idx_t'(J) < n_of(net_i, L));

  // ---------------- configuration: memory-2 writes --------------------------
  logic wr_w, wr_b;
  assign wr_w = !FIRST && cfg_i.valid && !cfg_i.resp && cfg_i.param == P_WEIGHT
                && cfg_i.layer == lay_t'(L + 1) && cfg_i.index == idx_t'(J)
                && cfg_i.neuron < idx_t'(N_NEURONS);
  assign wr_b = !LAST && cfg_i.valid && !cfg_i.resp && cfg_i.param == P_BIAS
                && cfg_i.layer == lay_t'(L) && cfg_i.neuron == idx_t'(J);

  always_ff @(posedge clk) begin
    if (wr_w) mem2[cfg_i.neuron] <= cfg_i.value;
    if (wr_b) mem2[BIAS_ADDR]    <= cfg_i.value;
  end

  // ---------------- pass-through latches ------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      err_o <= '0; pipe_o <= '0; cfg_o <= '0;
    end else begin
      err_o <= err_i; pipe_o <= pipe_i; cfg_o <= cfg_i;
    end
  end

  // ---------------- latch-A ----------------------------------------------------
  data_t cap_act, cap_der, a_act, a_der;
  logic  cap_full, sync_err;
  logic  capture, move;
  assign capture = active && pipe_i.valid && pipe_i.idx == idx_t'(J);
  // the first backward layer only needs sigma' at the end of the sample, so
  // its move happens at the last error element (its PIPE and ERROR streams
  // are only D_COST cycles apart); all other layers move at element 0
  assign move    = active && err_i.valid && (FIRST ? err_i.last : err_i.idx == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cap_act <= '0; cap_der <= '0; a_act <= '0; a_der <= '0;
      cap_full <= 1'b0; sync_err <= 1'b0;
    end else if (clr_i) begin
      cap_full <= 1'b0; sync_err <= 1'b0;
    end else begin
      if (move) begin
        a_act <= cap_act;
        a_der <= cap_der;
        if (!cap_full) sync_err <= 1'b1;
      end
      if (capture) begin
        cap_act <= pipe_i.act;
        cap_der <= pipe_i.deriv;
        if (cap_full && !move) sync_err <= 1'b1;
      end
      if (capture)   cap_full <= 1'b1;
      else if (move) cap_full <= 1'b0;
    end
  end
  assign sync_err_o = sync_err;

  // ---------------- MAA-2 / MAA-3 pipeline ------------------------------------
  logic  s1_v, s1_last, s2_v, s2_last;
  idx_t  s1_k, s2_k;
  data_t s1_e, s1_w, s1_a, s2_pe, s2_pg, acc, sum, eps;

  assign sum = acc + s2_pe;
  assign eps = fx_mul(sum, a_der);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_last <= 1'b0; s1_k <= '0; s1_e <= '0; s1_w <= '0; s1_a <= '0;
      s2_v <= 1'b0; s2_last <= 1'b0; s2_k <= '0; s2_pe <= '0; s2_pg <= '0;
      acc  <= '0;
    end else begin
      s1_v    <= err_i.valid && active && !clr_i;
      s1_last <= err_i.last;
      s1_k    <= err_i.idx;
      s1_e    <= err_i.data;
      if (FIRST)
        s1_w <= (err_i.idx == idx_t'(J)) ? FX_ONE : '0;
      else
        s1_w <= (err_i.idx < idx_t'(N_NEURONS)) ? mem2[err_i.idx] : '0;
      s1_a    <= (err_i.idx == '0) ? cap_act : a_act;
      s2_v    <= s1_v;
      s2_last <= s1_last;
      s2_k    <= s1_k;
      s2_pe   <= fx_mul(s1_w, s1_e);
      s2_pg   <= fx_mul(s1_a, s1_e);
      if (clr_i)
        acc <= '0;
      else if (s2_v)
        acc <= s2_last ? '0 : sum;
    end
  end

  assign done_o = s2_v && s2_last;

  // ---------------- update triggers --------------------------------------------
  logic   u1_v;
  rkind_e u1_kind;
  idx_t   u1_k;
  logic   trig_w, trig_b;
  assign trig_w = !FIRST && active && cfg_i.valid && !cfg_i.resp && cfg_i.param == P_UPD_W
                  && cfg_i.layer == lay_t'(L) && cfg_i.index < idx_t'(N_NEURONS);
  assign trig_b = !LAST && active && cfg_i.valid && !cfg_i.resp && cfg_i.param == P_UPD_B
                  && cfg_i.layer == lay_t'(L);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u1_v <= 1'b0; u1_kind <= R_W; u1_k <= '0;
    end else begin
      u1_v    <= (trig_w || trig_b) && !clr_i;
      u1_kind <= trig_b ? R_B : R_W;
      u1_k    <= cfg_i.index;
    end
  end

  // ---------------- gradient memories ------------------------------------------
  logic ld_err, ld_upd;
  assign ld_err = !LAST && s2_v && s2_last;
  assign ld_upd = u1_v;

  // grad_w is a plain memory; gw_ok marks the entries written since the last
  // clear, so clearing all gradients is one register operation
  logic [KW-1:0] s2_a, u1_a;
  data_t gw_s2, gw_u1;
  assign s2_a  = s2_k[KW-1:0];
  assign u1_a  = u1_k[KW-1:0];
  assign gw_s2 = gw_ok[s2_a] ? grad_w[s2_a] : '0;
  assign gw_u1 = gw_ok[u1_a] ? grad_w[u1_a] : '0;

  always_ff @(posedge clk)
    if (!FIRST && s2_v && !(ld_upd && u1_kind == R_W) && !clr_i)
      grad_w[s2_a] <= gw_s2 + s2_pg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gw_ok  <= '0;
      grad_b <= '0;
    end else if (clr_i) begin
      gw_ok  <= '0;
      grad_b <= '0;
    end else begin
      if (ld_upd && u1_kind == R_W)
        gw_ok[u1_a] <= 1'b0;
      else if (!FIRST && s2_v)
        gw_ok[s2_a] <= 1'b1;
      if (ld_upd && u1_kind == R_B)
        grad_b <= '0;
      else if (ld_err)
        grad_b <= grad_b + eps;
    end
  end

  // ---------------- RESULT slot ------------------------------------------------
  logic par;
  assign load_o     = ld_err || ld_upd;
  assign load_par_o = par;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_o <= '0;
      par   <= 1'b0;
    end else if (clr_i) begin
      res_o.valid <= 1'b0;
      par         <= 1'b0;
    end else if (load_o) begin
      res_o.valid <= 1'b1;
      res_o.par   <= par;
      par         <= ~par;
      if (ld_upd) begin
        res_o.kind <= u1_kind;
        res_o.k    <= u1_k;
        res_o.v    <= (u1_kind == R_B) ? mem2[BIAS_ADDR] : mem2[u1_k];
        res_o.g    <= (u1_kind == R_B) ? grad_b : gw_u1;
      end else begin
        res_o.kind <= R_ERR;
        res_o.k    <= '0;
        res_o.v    <= eps;
        res_o.g    <= '0;
      end
    end else if (shift_en_i) begin
      if (res_i.valid && res_i.par == shift_par_i)
        res_o <= res_i;
      else if (res_o.valid && res_o.par == shift_par_i)
        res_o.valid <= 1'b0;
    end
  end

endmodule
