// lbf_control: operational state machine of the training pipeline.
//
// States (after reset: config):
//   config   : the configurator accepts user commands. Trigger start_learn
//              moves to learn, trigger start_readout moves to read-out.
//   learn    : the feeder is allowed to release samples until n_batch samples
//              of the batch have started; then the state becomes update.
//   update   : (1) wait until backward layer 0 has absorbed all n_batch
//              samples into the gradients; (2) issue update triggers on the
//              CONFIGURATION stream, backward layer by backward layer from
//              N_LAYERS down to 0: first UPD_W for every weight index
//              k < n^{l+1}, then one UPD_B (none for the first/last layer
//              where they do not apply), spaced n^l + 1 cycles apart;
//              (3) wait until the last re-configuration command has been
//              broadcast and has crossed the longest configuration chain;
//              then go to config if end_learn was triggered during this
//              batch, otherwise start the next batch in learn.
//   read-out : issue READ_W / READ_B for every active parameter of forward
//              layers 1..N_LAYERS (for each neuron j: weights k < n^{l-1}, then
//              the bias), one per cycle, wait for the answers to leave the
//              forward network, return to config.
// Triggers are single-cycle pulses. clr_o (config and read-out states) clears
// pipeline state in the neurons.
// Following the architecture: the four states and their transitions, update
// triggers on the configuration stream, weights before biases, spacing of at
// least n^l. Choices of this implementation: layers are triggered one after
// the other (the architecture lets all layers update concurrently, which needs
// a wider re-configuration path), and fixed settle times.
module lbf_control
  import lbf_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  net_cfg_t net_i,
  input  logic     start_learn_i,
  input  logic     end_learn_i,
  input  logic     start_readout_i,
  input  logic     sample_i,        // feeder started a sample
  input  logic     done_i,          // backward layer 0 finished a sample
  input  logic     fifo_empty_i,    // configurator re-configuration FIFO empty
  output state_e   state_o,
  output logic     feed_en_o,
  output logic     clr_o,
  output cfg_cmd_t ctl_o,
  output logic [15:0] batches_o     // completed learn-update cycles
);

  localparam int unsigned N = N_NEURONS;
  // last trigger -> last result: up to N_LAYERS+2 neuron chains
  localparam int unsigned SETTLE_RESULTS = (N_LAYERS + 2) * (N + 1) + 8;
  localparam int unsigned SETTLE_CHAIN   = (N_LAYERS + 1) * (N + 1) + 8;

  typedef enum logic [2:0] {
    U_DRAIN, U_TRIG, U_WAIT, U_FIFO, U_CHAIN
  } usub_e;

  state_e      state;
  usub_e       usub;
  logic        end_flag;
  logic [15:0] issued, done_cnt;
  logic [LAY_W-1:0] lay;
  logic        phase_b;
  idx_t        k, j;
  logic [15:0] tcnt;

  assign state_o   = state;
  assign feed_en_o = (state == ST_LEARN) && (issued < net_i.n_batch);
  assign clr_o     = (state == ST_CONFIG) || (state == ST_READOUT);

  idx_t n_cur, n_next, n_in_cur;
  assign n_cur    = n_of(net_i, int'(lay));
  assign n_next   = (int'(lay) < N_LAYERS) ? n_of(net_i, int'(lay) + 1) : '0;
  assign n_in_cur = n_of(net_i, (int'(lay) == 0) ? 0 : int'(lay) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_CONFIG; usub <= U_DRAIN; end_flag <= 1'b0;
      issued <= '0; done_cnt <= '0; lay <= '0; phase_b <= 1'b0;
      k <= '0; j <= '0; tcnt <= '0; ctl_o <= '0; batches_o <= '0;
    end else begin
      ctl_o <= '0;
      if (sample_i) issued <= issued + 16'd1;
      if (done_i)   done_cnt <= done_cnt + 16'd1;
      if (end_learn_i && (state == ST_LEARN || state == ST_UPDATE)) end_flag <= 1'b1;

      unique case (state)
        ST_CONFIG: begin
          end_flag <= 1'b0;
          if (start_learn_i) begin
            state <= ST_LEARN;
            issued <= '0; done_cnt <= '0;
          end else if (start_readout_i) begin
            state <= ST_READOUT;
            lay <= lay_t'(1); j <= '0; k <= '0; phase_b <= 1'b0; usub <= U_TRIG;
          end
        end

        ST_LEARN: begin
          if (issued >= net_i.n_batch) begin
            state <= ST_UPDATE;
            usub  <= U_DRAIN;
          end
        end

        ST_UPDATE: begin
          unique case (usub)
            U_DRAIN: if (done_cnt >= net_i.n_batch) begin
              usub <= U_TRIG; lay <= lay_t'(N_LAYERS); k <= '0; phase_b <= 1'b0; tcnt <= '0;
            end
            U_TRIG: begin
              if (tcnt != '0) begin
                tcnt <= tcnt - 16'd1;
              end else if (!phase_b) begin
                if (int'(lay) < N_LAYERS && k < n_next) begin
                  ctl_o <= '{valid: 1'b1, resp: 1'b0, param: P_UPD_W, layer: lay,
                             neuron: '0, index: k, value: '0};
                  k <= k + idx_t'(1);
                  tcnt <= 16'(n_cur);
                end else begin
                  phase_b <= 1'b1;
                end
              end else begin
                if (lay != '0) begin
                  ctl_o <= '{valid: 1'b1, resp: 1'b0, param: P_UPD_B, layer: lay,
                             neuron: '0, index: '0, value: '0};
                  tcnt <= 16'(n_cur);
                  lay <= lay - lay_t'(1);
                  k <= '0; phase_b <= 1'b0;
                end else begin
                  usub <= U_WAIT; tcnt <= 16'(SETTLE_RESULTS);
                end
              end
            end
            U_WAIT: if (tcnt != '0) tcnt <= tcnt - 16'd1; else usub <= U_FIFO;
            U_FIFO: if (fifo_empty_i) begin usub <= U_CHAIN; tcnt <= 16'(SETTLE_CHAIN); end
            default: begin  // U_CHAIN
              if (tcnt != '0) tcnt <= tcnt - 16'd1;
              else begin
                batches_o <= batches_o + 16'd1;
                issued <= '0; done_cnt <= '0;
                state <= (end_flag || end_learn_i) ? ST_CONFIG : ST_LEARN;
              end
            end
          endcase
        end

        default: begin  // ST_READOUT
          if (usub == U_TRIG) begin
            if (!phase_b && k < n_in_cur) begin
              ctl_o <= '{valid: 1'b1, resp: 1'b0, param: P_READ_W, layer: lay,
                         neuron: j, index: k, value: '0};
              k <= k + idx_t'(1);
            end else begin
              ctl_o <= '{valid: 1'b1, resp: 1'b0, param: P_READ_B, layer: lay,
                         neuron: j, index: '0, value: '0};
              k <= '0; phase_b <= 1'b0;
              if (j + idx_t'(1) < n_cur) j <= j + idx_t'(1);
              else begin
                j <= '0;
                if (int'(lay) < N_LAYERS) lay <= lay + lay_t'(1);
                else begin usub <= U_CHAIN; tcnt <= 16'(N_LAYERS * (N + 1) + 8); end
              end
            end
          end else begin
            if (tcnt != '0) tcnt <= tcnt - 16'd1;
            else state <= ST_CONFIG;
          end
        end
      endcase
    end
  end

endmodule
