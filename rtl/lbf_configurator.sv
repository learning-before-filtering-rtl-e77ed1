// lbf_configurator: entry point of the CONFIGURATION stream.
//
// Commands have the fields layer, neuron, index, parameter kind and value.
//  * In the configuration state the user stream cfg_i is accepted. A command
//    addressed to the non-existent layer REG_LAYER writes the network register
//    selected by its index field (register map in lbf_pkg: n_inputs, n_truth,
//    n_batch, step s, truth delay, and per layer the active neuron count, the
//    activation function, the PaReLU slope and the PIPE delay). Every other
//    command (weights and biases) is broadcast to the forward and backward
//    networks.
//  * In the other states the user stream is ignored. Commands from the
//    control unit (update triggers, read-out requests) are broadcast with
//    priority; re-configuration commands coming back from the backward
//    layers' update modules are queued in a FIFO and broadcast in the free
//    cycles. The control unit spaces its triggers so that the FIFO stays
//    short; fifo_empty_o tells it when all new parameters have left.
// Broadcast latency D_CONFIG = 2 (arbitration register, output register).
// The queueing of re-configuration commands is this implementation's choice;
// the architecture routes them back to the configurator without saying how
// they share the stream with the triggers.
module lbf_configurator
  import lbf_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 64
) (
  input  logic     clk,
  input  logic     rst_n,
  input  state_e   state_i,
  input  cfg_cmd_t cfg_i,
  input  cfg_cmd_t ctl_i,
  input  cfg_cmd_t recfg_i [0:N_LAYERS],
  output net_cfg_t net_o,
  output cfg_cmd_t cfg_o,
  output logic     reg_wr_o,
  output logic     fifo_empty_o,
  output logic     fifo_overflow_o
);

  localparam int unsigned AW = $clog2(FIFO_DEPTH);

  // ---------------- merge of the re-configuration streams ------------------
  cfg_cmd_t recfg;
  always_comb begin
    recfg = '0;
    for (int l = 0; l <= N_LAYERS; l++)
      if (recfg_i[l].valid) recfg = recfg_i[l];
  end

  logic [N_LAYERS:0] recfg_v;
  always_comb for (int l = 0; l <= N_LAYERS; l++) recfg_v[l] = recfg_i[l].valid;
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(recfg_v));

  // ---------------- FIFO ------------------------------------------------------
  cfg_cmd_t       fmem [0:FIFO_DEPTH-1];
  logic [AW-1:0]  wp, rp;
  logic [AW:0]    cnt;
  logic           push, pop;

  assign push = recfg.valid && cnt < (AW+1)'(FIFO_DEPTH);
  assign fifo_empty_o = (cnt == '0);

  always_ff @(posedge clk) if (push) fmem[wp] <= recfg;

  // ---------------- arbitration ----------------------------------------------
  logic     user_ok, is_reg;
  cfg_cmd_t arb;
  assign user_ok = (state_i == ST_CONFIG) && cfg_i.valid;
  assign is_reg  = user_ok && cfg_i.layer == REG_LAYER;
  assign reg_wr_o = is_reg;

  always_comb begin
    arb = '0;
    pop = 1'b0;
    if (user_ok) begin
      if (!is_reg) arb = cfg_i;
    end else if (ctl_i.valid) begin
      arb = ctl_i;
    end else if (cnt != '0) begin
      arb = fmem[rp];
      pop = 1'b1;
    end
  end

  cfg_cmd_t stage1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
      fifo_overflow_o <= 1'b0;
      stage1 <= '0;
      cfg_o  <= '0;
    end else begin
      if (push) wp <= wp + AW'(1);
      if (pop)  rp <= rp + AW'(1);
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
      if (recfg.valid && !push) fifo_overflow_o <= 1'b1;
      stage1 <= arb;
      cfg_o  <= stage1;
    end
  end

  // ---------------- network register file ------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      net_o.n_inputs  <= '0;
      net_o.n_truth   <= '0;
      net_o.n_batch   <= 16'd1;
      net_o.step      <= '0;
      net_o.truth_dly <= DLY_W'(1);
      for (int l = 0; l <= N_LAYERS; l++) begin
        net_o.n_neur[l]   <= idx_t'(N_NEURONS);
        net_o.act_sel[l]  <= ACT_LINEAR;
        net_o.slope[l]    <= '0;
        net_o.pipe_dly[l] <= DLY_W'(1);
      end
    end else if (is_reg) begin
      unique case (int'(cfg_i.index))
        REG_N_INPUTS:  net_o.n_inputs  <= idx_t'(cfg_i.value);
        REG_N_TRUTH:   net_o.n_truth   <= idx_t'(cfg_i.value);
        REG_N_BATCH:   net_o.n_batch   <= 16'(cfg_i.value);
        REG_STEP:      net_o.step      <= cfg_i.value;
        REG_TRUTH_DLY: net_o.truth_dly <= DLY_W'(cfg_i.value);
        default: begin
          for (int l = 0; l <= N_LAYERS; l++) begin
            if (int'(cfg_i.index) == REG_N_NEUR   + l) net_o.n_neur[l]   <= idx_t'(cfg_i.value);
            if (int'(cfg_i.index) == REG_ACT_SEL  + l) net_o.act_sel[l]  <= act_e'(cfg_i.value[1:0]);
            if (int'(cfg_i.index) == REG_SLOPE    + l) net_o.slope[l]    <= cfg_i.value;
            if (int'(cfg_i.index) == REG_PIPE_DLY + l) net_o.pipe_dly[l] <= DLY_W'(cfg_i.value);
          end
        end
      endcase
    end
  end

endmodule
