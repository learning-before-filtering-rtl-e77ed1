// lbf_cost: cost structure, sum-of-squares cost Gamma = sum_j (alpha_j - tau_j)^2.
//
// Its derivative with respect to the prediction is taken as the plain
// difference alpha_j - tau_j (the constant factor 2 is left to the learning
// rate), which is the ERROR stream entering the first backward layer.
//
// Truth values tau_t arrive on truth_i (from the truth delay line, index t)
// and are written into a capture register file. When prediction element 0 of
// a sample arrives, the captured set is copied into the active set, and that
// element already uses the captured value; later elements use the active set.
// The truth delay must therefore bring a sample's truth values in after
// element 0 of the previous prediction and no later than one cycle before
// element 0 of its own prediction.
//
// Latency D_COST = 3: operand register, subtraction register, output register.
// Output: ERROR stream with index j and `last` on j = n^L - 1; the trailing 1
// of the prediction stream is dropped. Only the sum-of-squares function is
// built; the architecture allows others of equal latency to be selected.
module lbf_cost
  import lbf_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  net_cfg_t net_i,
  input  stream_t  pred_i,
  input  stream_t  truth_i,
  output stream_t  err_o
);

  localparam int unsigned KW = $clog2(N_NEURONS);
  data_t cap [0:N_NEURONS-1];
  data_t act [0:N_NEURONS-1];

  always_ff @(posedge clk) begin
    if (truth_i.valid && truth_i.idx < idx_t'(N_NEURONS))
      cap[truth_i.idx[KW-1:0]] <= truth_i.data;
    if (pred_i.valid && !pred_i.last && pred_i.idx == '0)
      for (int i = 0; i < N_NEURONS; i++) act[i] <= cap[i];
  end

  stream_t s1, s2;
  data_t   s1_tau;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0; s1_tau <= '0; s2 <= '0; err_o <= '0;
    end else begin
      s1       <= pred_i;
      s1.valid <= pred_i.valid && !pred_i.last;
      s1.last  <= (pred_i.idx == net_i.n_neur[N_LAYERS] - idx_t'(1));
      s1_tau   <= (pred_i.idx == '0) ? cap[0]
                : (pred_i.idx < idx_t'(N_NEURONS) ? act[pred_i.idx[KW-1:0]] : '0);
      s2       <= s1;
      s2.data  <= s1.data - s1_tau;
      err_o    <= s2;
    end
  end

endmodule
