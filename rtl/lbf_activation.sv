// lbf_activation: activation module at the end of forward layer l.
//
// Receives the layer's stimuli chi_j one per cycle (j = 0..n^l-1, in order)
// and computes, in parallel, three activation functions and their
// derivatives:
//   linear : sigma(x) = x                    sigma'(x) = 1
//   ReLU   : sigma(x) = max(x, 0)            sigma'(x) = (x > 0)
//   PaReLU : sigma(x) = x > 0 ? x : a*x      sigma'(x) = x > 0 ? 1 : a
// The run-time register act_sel[l] selects one of them (multiplexer), and
// slope[l] is the PaReLU negative slope a (a configured constant here; it is
// not learned). The latency is fixed at D_SIGMA = 3 for every function:
// input register, function register, selection/output register.
//
// Outputs:
//   act_o  ACTIVATION stream for the next layer: sigma(chi_j) with index j,
//          followed on the next cycle by the constant 1 with `last` set and
//          index n^l, which the next layer's neurons multiply by their bias.
//   pipe_o PIPE stream: {j, sigma(chi_j), sigma'(chi_j)} for the backward
//          network (through a delay line).
// The CONFIGURATION stream passes through one register.
// Following the architecture description: the three functions, the
// selection by configuration, the ACTIVATION/PIPE outputs, the latency 3.
// This implementation's choice: the module appends the trailing 1.
module lbf_activation
  import lbf_pkg::*;
#(
  parameter int unsigned L = 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  net_cfg_t net_i,
  input  stream_t  stim_i,
  output stream_t  act_o,
  output pipe_t    pipe_o,
  input  cfg_cmd_t cfg_i,
  output cfg_cmd_t cfg_o
);

  typedef struct packed {
    logic  valid;
    idx_t  idx;
    data_t a_lin, d_lin, a_relu, d_relu, a_prelu, d_prelu;
  } fn_t;

  stream_t s1;
  fn_t     s2;
  logic    tail;   // emit the trailing 1 next cycle

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1    <= '0;
      s2    <= '0;
      act_o <= '0;
      pipe_o <= '0;
      cfg_o <= '0;
      tail  <= 1'b0;
    end else begin
      cfg_o <= cfg_i;
      // stage 1: input register
      s1 <= stim_i;
      // stage 2: all functions in parallel
      s2.valid   <= s1.valid;
      s2.idx     <= s1.idx;
      s2.a_lin   <= s1.data;
      s2.d_lin   <= FX_ONE;
      s2.a_relu  <= (s1.data > 0) ? s1.data : '0;
      s2.d_relu  <= (s1.data > 0) ? FX_ONE : '0;
      s2.a_prelu <= (s1.data > 0) ? s1.data : fx_mul(net_i.slope[L], s1.data);
      s2.d_prelu <= (s1.data > 0) ? FX_ONE : net_i.slope[L];
      // stage 3: selection and outputs
      tail <= 1'b0;
      if (s2.valid) begin
        act_o.valid <= 1'b1;
        act_o.last  <= 1'b0;
        act_o.idx   <= s2.idx;
        pipe_o.valid <= 1'b1;
        pipe_o.idx   <= s2.idx;
        unique case (net_i.act_sel[L])
          ACT_RELU:   begin act_o.data <= s2.a_relu;  pipe_o.act <= s2.a_relu;  pipe_o.deriv <= s2.d_relu;  end
          ACT_PARELU: begin act_o.data <= s2.a_prelu; pipe_o.act <= s2.a_prelu; pipe_o.deriv <= s2.d_prelu; end
          default:    begin act_o.data <= s2.a_lin;   pipe_o.act <= s2.a_lin;   pipe_o.deriv <= s2.d_lin;   end
        endcase
        tail <= (s2.idx == net_i.n_neur[L] - idx_t'(1));
      end else if (tail) begin
        act_o.valid  <= 1'b1;
        act_o.last   <= 1'b1;
        act_o.idx    <= net_i.n_neur[L];
        act_o.data   <= FX_ONE;
        pipe_o.valid <= 1'b0;
      end else begin
        act_o.valid  <= 1'b0;
        act_o.last   <= 1'b0;
        pipe_o.valid <= 1'b0;
      end
    end
  end

endmodule
