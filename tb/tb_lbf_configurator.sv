// tb_lbf_configurator: self-checking test of the configurator.
//
// Checks, against an independent model:
//  * every register of the map is written by a REG_LAYER command in the
//    config state and read back on net_o; commands outside config are ignored;
//  * weight/bias commands are broadcast on cfg_o exactly D_CONFIG = 2 cycles
//    later; register writes are not broadcast;
//  * outside config, control commands are broadcast with priority while
//    re-configuration commands are queued and broadcast in order in the free
//    cycles; fifo_empty_o reflects the queue;
//  * more re-configuration commands than the queue holds set the sticky
//    overflow flag.
module tb_lbf_configurator;
  import lbf_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  state_e   state = ST_CONFIG;
  cfg_cmd_t cfg_i = '0, ctl_i = '0, cfg_o;
  cfg_cmd_t recfg [0:N_LAYERS];
  net_cfg_t net;
  logic reg_wr, fempty, fovf;

  lbf_configurator dut (.clk, .rst_n, .state_i(state), .cfg_i, .ctl_i, .recfg_i(recfg),
                        .net_o(net), .cfg_o, .reg_wr_o(reg_wr),
                        .fifo_empty_o(fempty), .fifo_overflow_o(fovf));

  int checks = 0, failures = 0, cyc = 0;
  cfg_cmd_t expq [$];
  int       expt [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL cyc %0d: %s", cyc, what);
    end
  endtask

  // broadcast monitor: every output command must be the next expected one at
  // its expected cycle (or later, for queued commands: expt = -1)
  always @(negedge clk) if (rst_n) begin
    if (cfg_o.valid) begin
      check(expq.size() > 0, "unexpected broadcast");
      if (expq.size() > 0) begin
        check(cfg_o == expq[0], "broadcast content/order");
        if (expt[0] >= 0) check(cyc == expt[0], $sformatf("broadcast latency: cycle %0d, expected %0d", cyc, expt[0]));
        void'(expq.pop_front());
        void'(expt.pop_front());
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  function automatic cfg_cmd_t mk(param_e p, int layer, int neuron, int index, data_t v);
    return '{valid: 1'b1, resp: 1'b0, param: p, layer: lay_t'(layer), neuron: idx_t'(neuron),
             index: idx_t'(index), value: v};
  endfunction

  // model of the arbitration: user command (config state, not a register
  // write), else control command, else the oldest queued re-configuration
  cfg_cmd_t mq [$];
  task automatic tick();
    cfg_cmd_t arb;
    arb = '0;
    if (state == ST_CONFIG && cfg_i.valid) begin
      if (cfg_i.layer != REG_LAYER) arb = cfg_i;
    end else if (ctl_i.valid) begin
      arb = ctl_i;
    end else if (mq.size() > 0) begin
      arb = mq.pop_front();
    end
    for (int l = 0; l <= N_LAYERS; l++)
      if (recfg[l].valid && mq.size() < 64) mq.push_back(recfg[l]);
    if (arb.valid) begin
      expq.push_back(arb);
      expt.push_back(cyc + 2);
    end
    @(negedge clk);
    cyc++;
    cfg_i = '0; ctl_i = '0;
    for (int l = 0; l <= N_LAYERS; l++) recfg[l] = '0;
  endtask

  initial begin
    data_t v;
    int rv [0:127];
    for (int l = 0; l <= N_LAYERS; l++) recfg[l] = '0;
    @(negedge clk);
    rst_n = 1;
    tick();
    // reset values
    check(net.n_batch == 16'd1 && net.truth_dly == DLY_W'(1) && net.n_neur[1] == idx_t'(N_NEURONS),
          "reset values of the register map");
    // register writes
    for (int i = 0; i < 128; i++) rv[i] = -1;
    for (int i = 0; i < 80; i++) begin
      int idx;
      idx = int'($urandom % 80);
      v = data_t'($urandom % 2000);
      cfg_i = mk(P_REG, int'(REG_LAYER), 0, idx, v);
      rv[idx] = int'(v);
      tick();
      check(!cfg_o.valid, "register write not broadcast");
    end
    tick();
    tick();
    if (rv[REG_N_INPUTS] >= 0) check(net.n_inputs == idx_t'(rv[REG_N_INPUTS]), "n_inputs");
    if (rv[REG_N_TRUTH] >= 0)  check(net.n_truth == idx_t'(rv[REG_N_TRUTH]), "n_truth");
    if (rv[REG_N_BATCH] >= 0)  check(net.n_batch == 16'(rv[REG_N_BATCH]), "n_batch");
    if (rv[REG_STEP] >= 0)     check(net.step == data_t'(rv[REG_STEP]), "step");
    if (rv[REG_TRUTH_DLY] >= 0) check(net.truth_dly == DLY_W'(rv[REG_TRUTH_DLY]), "truth delay");
    for (int l = 0; l <= N_LAYERS; l++) begin
      if (rv[REG_N_NEUR + l] >= 0)   check(net.n_neur[l] == idx_t'(rv[REG_N_NEUR + l]), "n_neur");
      if (rv[REG_ACT_SEL + l] >= 0)  check(net.act_sel[l] == act_e'(rv[REG_ACT_SEL + l] % 4), "act_sel");
      if (rv[REG_SLOPE + l] >= 0)    check(net.slope[l] == data_t'(rv[REG_SLOPE + l]), "slope");
      if (rv[REG_PIPE_DLY + l] >= 0) check(net.pipe_dly[l] == DLY_W'(rv[REG_PIPE_DLY + l]), "pipe delay");
    end
    // every register explicitly
    for (int l = 0; l <= N_LAYERS; l++) begin
      cfg_i = mk(P_REG, int'(REG_LAYER), 0, REG_PIPE_DLY + l, data_t'(100 + l)); tick();
      cfg_i = mk(P_REG, int'(REG_LAYER), 0, REG_N_NEUR + l, data_t'(1 + l)); tick();
    end
    cfg_i = mk(P_REG, int'(REG_LAYER), 0, REG_STEP, data_t'(1234)); tick();
    cfg_i = mk(P_REG, int'(REG_LAYER), 0, REG_N_BATCH, data_t'(64)); tick();
    tick();
    check(net.step == data_t'(1234) && net.n_batch == 16'd64, "step and batch registers");
    for (int l = 0; l <= N_LAYERS; l++)
      check(net.pipe_dly[l] == DLY_W'(100 + l) && net.n_neur[l] == idx_t'(1 + l), "per-layer registers");
    // weights and biases broadcast with latency 2
    for (int i = 0; i < 50; i++) begin
      cfg_i = mk(($urandom % 2) ? P_WEIGHT : P_BIAS, 1 + int'($urandom % N_LAYERS),
                 int'($urandom % N_NEURONS), int'($urandom % N_NEURONS), data_t'($urandom));
      tick();
    end
    repeat (4) tick();
    check(expq.size() == 0, "all weight commands broadcast");
    // learn state: user commands ignored, control priority, queue in order
    state = ST_UPDATE;
    cfg_i = mk(P_WEIGHT, 1, 0, 0, 32'h5); tick();
    cfg_i = mk(P_REG, int'(REG_LAYER), 0, REG_STEP, 32'h77); tick();
    repeat (3) tick();
    check(net.step != 32'h77, "register write outside config ignored");
    for (int i = 0; i < 40; i++) begin
      cfg_cmd_t r;
      if (i % 3 == 0) begin
        ctl_i = mk(P_UPD_W, int'($urandom % N_LAYERS), 0, i, '0);
        // the control command goes out ahead of queued entries
      end
      r = mk(P_WEIGHT, 1 + int'($urandom % N_LAYERS), i, 0, data_t'($urandom));
      recfg[$urandom % (N_LAYERS + 1)] = r;
      tick();
      if (i == 0) check(!fempty, "queue not empty after a push");
    end
    repeat (60) tick();
    check(fempty, "queue drained");
    check(!fovf, "no overflow at this load");
    // the queue holds 64: push 200 back to back with control commands stalling it
    for (int i = 0; i < 200; i++) begin
      ctl_i = mk(P_UPD_B, 0, 0, 0, '0);
      recfg[0] = mk(P_BIAS, 1, i, 0, '0);
      tick();
    end
    check(fovf, "overflow flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
