// tb_lbf_top: end-to-end test of the training primitive at its default size
// (4 layers x 64 neurons).
//
// The network of the reference experiment is configured: 6 inputs, layers of
// 64, 64, 16 and 7 active neurons (so layers 3 and 4 have transparent
// neurons), PaReLU everywhere, one-hot truth of 7 classes. The delay lines are
// set from the layer latencies. Random samples are streamed in at a steady
// rate, two batches are trained (end-of-learning is triggered during the
// second), the parameters are read out through LEARNED and compared bit by
// bit with an independent fixed-point model of mini-batch gradient descent.
// Every prediction of the first batch is compared with the model as well.
// Finally the input is flooded to provoke a feeder overflow.
// Mechanisms counted (each must occur): register writes, learn->update,
// update triggers, re-configuration commands, update->learn, update->config,
// read-out answers, input buffered during update, samples released at the
// minimum period, PaReLU negative branch, transparent neurons, FIFO overflow.
module tb_lbf_top;
  import lbf_pkg::*;

  localparam int N  = N_NEURONS;
  localparam int NL = N_LAYERS;
  localparam int NB = 64;        // batch size of the reference experiment
  localparam int NBATCH = 2;
  localparam int NIN = 6;
  localparam int NOUT = 7;
  localparam int SAMPLE_GAP = 200;   // source: one sample every SAMPLE_GAP cycles

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_cmd_t cfg_i = '0;
  logic data_valid = 0, truth_valid = 0;
  data_t data_v = '0, truth_v = '0;
  logic start_learn = 0, end_learn = 0, start_readout = 0;
  cfg_cmd_t learned;
  stream_t pred;
  state_e state;
  logic [15:0] batches;
  logic f_ovf, r_ovf, serr;

  lbf_top dut (
    .clk, .rst_n, .cfg_i, .data_valid_i(data_valid), .data_i(data_v),
    .truth_valid_i(truth_valid), .truth_i(truth_v),
    .start_learn_i(start_learn), .end_learn_i(end_learn), .start_readout_i(start_readout),
    .learned_o(learned), .pred_o(pred), .state_o(state), .batches_o(batches),
    .feeder_overflow_o(f_ovf), .recfg_overflow_o(r_ovf), .sync_err_o(serr)
  );

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // ---------------- reference model -----------------------------------------
  function automatic data_t m(data_t a, data_t b);
    longint p;
    p = longint'(a) * longint'(b);
    return data_t'(p >>> FRAC_W);
  endfunction

  int nl [0:NL];
  data_t w  [1:NL][0:N-1][0:N-1];
  data_t b  [1:NL][0:N-1];
  data_t gw [1:NL][0:N-1][0:N-1];
  data_t gb [1:NL][0:N-1];
  data_t slope = data_t'(16384);     // 0.25
  data_t step  = data_t'(1024);      // 2^-6
  data_t xs [0:NBATCH*NB-1][0:NIN-1];
  data_t ts [0:NBATCH*NB-1][0:NOUT-1];
  data_t pred_ref [0:NB-1][0:NOUT-1];

  function automatic data_t rnd(int range_bits);
    int r;
    r = int'($urandom % (1 << range_bits)) - (1 << (range_bits - 1));
    return data_t'(r);
  endfunction

  task automatic model_sample(int s, bit record, int si);
    data_t a [0:NL][0:N-1];
    data_t d [0:NL][0:N-1];
    data_t e [0:NL+1][0:N-1];
    data_t z, sum;
    for (int i = 0; i < NIN; i++) a[0][i] = xs[s][i];
    for (int l = 1; l <= NL; l++)
      for (int j = 0; j < nl[l]; j++) begin
        z = '0;
        for (int k = 0; k < nl[l-1]; k++) z += m(w[l][j][k], a[l-1][k]);
        z += m(b[l][j], FX_ONE);
        a[l][j] = (z > 0) ? z : m(slope, z);
        d[l][j] = (z > 0) ? FX_ONE : slope;
      end
    if (record) for (int j = 0; j < NOUT; j++) pred_ref[si][j] = a[NL][j];
    for (int j = 0; j < nl[NL]; j++) e[NL+1][j] = a[NL][j] - ts[s][j];
    for (int j = 0; j < nl[NL]; j++) begin
      e[NL][j] = m(e[NL+1][j], d[NL][j]);
      gb[NL][j] += e[NL][j];
    end
    for (int l = NL - 1; l >= 0; l--)
      for (int j = 0; j < nl[l]; j++) begin
        sum = '0;
        for (int k = 0; k < nl[l+1]; k++) begin
          gw[l+1][k][j] += m(a[l][j], e[l+1][k]);
          sum += m(w[l+1][k][j], e[l+1][k]);
        end
        if (l > 0) begin
          e[l][j] = m(sum, d[l][j]);
          gb[l][j] += e[l][j];
        end
      end
  endtask

  task automatic model_update();
    for (int l = 1; l <= NL; l++)
      for (int j = 0; j < nl[l]; j++) begin
        for (int k = 0; k < nl[l-1]; k++) begin
          w[l][j][k] -= m(step, gw[l][j][k]);
          gw[l][j][k] = '0;
        end
        b[l][j] -= m(step, gb[l][j]);
        gb[l][j] = '0;
      end
  endtask

  // ---------------- stimulus helpers ------------------------------------------
  task automatic send(param_e p, int layer, int neuron, int index, data_t value);
    @(negedge clk);
    cfg_i = '{valid: 1'b1, resp: 1'b0, param: p, layer: lay_t'(layer),
              neuron: idx_t'(neuron), index: idx_t'(index), value: value};
    @(negedge clk);
    cfg_i = '0;
  endtask

  task automatic wreg(int index, int value);
    send(P_REG, int'(REG_LAYER), 0, index, data_t'(value));
  endtask

  task automatic pulse(ref logic sig);
    @(negedge clk); sig = 1'b1;
    @(negedge clk); sig = 1'b0;
  endtask

  // source process: one sample every SAMPLE_GAP cycles
  bit flood = 0;
  int src_sent = 0;
  task automatic source(int count);
    for (int s = 0; s < count; s++) begin
      for (int i = 0; i < NOUT; i++) begin
        @(negedge clk);
        data_valid = (i < NIN);
        data_v = (i < NIN) ? xs[s][i] : '0;
        truth_valid = 1'b1;
        truth_v = ts[s][i];
      end
      @(negedge clk);
      data_valid = 0; truth_valid = 0;
      repeat (SAMPLE_GAP - NOUT - 1) @(negedge clk);
      src_sent++;
    end
  endtask

  // ---------------- monitors ---------------------------------------------------
  int n_regwr = 0, n_l2u = 0, n_u2l = 0, n_u2c = 0, n_trig = 0, n_recfg = 0;
  int n_buffered = 0, n_minper = 0, n_neg = 0, n_learned = 0, n_samples = 0;
  longint last_sample = -1000;
  state_e prev_state = ST_CONFIG;
  int pred_cnt = 0;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_configurator.reg_wr_o) n_regwr++;
    if (prev_state == ST_LEARN && state == ST_UPDATE) n_l2u++;
    if (prev_state == ST_UPDATE && state == ST_LEARN) n_u2l++;
    if (prev_state == ST_UPDATE && state == ST_CONFIG) n_u2c++;
    prev_state <= state;
    if (dut.u_control.ctl_o.valid && dut.u_control.ctl_o.param inside {P_UPD_W, P_UPD_B}) n_trig++;
    if (dut.u_configurator.recfg.valid) n_recfg++;
    if (state == ST_UPDATE && data_valid) n_buffered++;
    if (dut.sample) begin
      n_samples++;
      if (cyc - last_sample == longint'(N + 2)) n_minper++;
      check(cyc - last_sample >= longint'(N + 2), "sample period below max(n_inputs,N)+2");
      last_sample <= cyc;
    end
    if (dut.u_forward.g_layer[1].u_layer.stim_out.valid &&
        dut.u_forward.g_layer[1].u_layer.stim_out.data < 0) n_neg++;
    // predictions of the first batch
    if (pred.valid && !pred.last && pred_cnt < NB * NOUT && batches == 0) begin
      check(pred.data == pred_ref[pred_cnt / NOUT][pred.idx], $sformatf(
            "prediction sample %0d out %0d: %0d vs %0d", pred_cnt / NOUT, pred.idx,
            pred.data, pred_ref[pred_cnt / NOUT][pred.idx]));
      pred_cnt++;
    end
  end

  // read-out capture
  data_t rw [1:NL][0:N-1][0:N-1];
  data_t rb [1:NL][0:N-1];
  always @(posedge clk) if (learned.valid) begin
    n_learned++;
    if (learned.param == P_WEIGHT)
      rw[learned.layer][learned.neuron][learned.index] = learned.value;
    else
      rb[learned.layer][learned.neuron] = learned.value;
  end

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- main sequence ------------------------------------------------
  int lat_s [0:NL];   // S_l - S_0 : first element of layer l output
  int lat_e [0:NL];   // E_l - S_0 : first error element entering backward layer l
  int p, dly;

  initial begin
    nl[0] = NIN; nl[1] = 64; nl[2] = 64; nl[3] = 16; nl[4] = 7;
    for (int l = 1; l <= NL; l++)
      for (int j = 0; j < N; j++) begin
        b[l][j] = rnd(14);
        gb[l][j] = '0;
        for (int k = 0; k < N; k++) begin
          w[l][j][k] = rnd(15);
          gw[l][j][k] = '0;
        end
      end
    for (int s = 0; s < NBATCH * NB; s++) begin
      int cls;
      cls = int'($urandom % NOUT);
      for (int i = 0; i < NIN; i++) xs[s][i] = rnd(17);
      for (int i = 0; i < NOUT; i++) ts[s][i] = (i == cls) ? FX_ONE : '0;
    end

    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // latencies and delay settings
    p = N + 2;
    lat_s[0] = 0;
    for (int l = 1; l <= NL; l++) lat_s[l] = lat_s[l-1] + nl[l-1] + N + 5;
    lat_e[NL] = lat_s[NL] + D_COST;
    lat_e[NL-1] = lat_e[NL] + nl[NL] + N + 2;
    for (int l = NL - 2; l >= 0; l--) lat_e[l] = lat_e[l+1] + nl[l+2] + N + 2;

    wreg(REG_N_INPUTS, NIN);
    wreg(REG_N_TRUTH, NOUT);
    wreg(REG_N_BATCH, NB);
    wreg(REG_STEP, int'(step));
    wreg(REG_TRUTH_DLY, lat_s[NL] - NOUT - (p - NOUT) / 2);
    for (int l = 1; l <= NL; l++) begin
      wreg(REG_N_NEUR + l, nl[l]);
      wreg(REG_ACT_SEL + l, int'(ACT_PARELU));
      wreg(REG_SLOPE + l, int'(slope));
    end
    for (int l = 0; l <= NL; l++) begin
      // capture window of the PIPE element 0 relative to ERROR element 0 (E):
      // [E-p, E-n] for layers moving latch-A at error element 0,
      // [E-p+n-1, E-1] for the first backward layer (moves at the last one)
      if (l == NL) dly = lat_e[l] - lat_s[l] - 1 - (p - nl[l] + 1) / 2;
      else         dly = lat_e[l] - lat_s[l] - nl[l] - (p - nl[l]) / 2;
      if (dly < 1) dly = 1;
      wreg(REG_PIPE_DLY + l, dly);
    end
    for (int l = 1; l <= NL; l++)
      for (int j = 0; j < nl[l]; j++) begin
        for (int k = 0; k < nl[l-1]; k++) send(P_WEIGHT, l, j, k, w[l][j][k]);
        send(P_BIAS, l, j, 0, b[l][j]);
      end

    // model: batch by batch
    for (int bt = 0; bt < NBATCH; bt++) begin
      for (int s = 0; s < NB; s++) model_sample(bt * NB + s, bt == 0, s);
      model_update();
    end

    pulse(start_learn);
    fork
      source(NBATCH * NB);
      begin
        wait (batches == 16'(NBATCH - 1));
        pulse(end_learn);
      end
    join
    wait (state == ST_CONFIG);
    check(batches == 16'(NBATCH), "number of completed batches");
    check(!serr, "PIPE alignment error flagged");
    check(!r_ovf, "re-configuration queue overflow");
    check(!f_ovf, "feeder overflow during steady input");
    check(pred_cnt == NB * NOUT, "all predictions of batch 1 seen");

    // read-out
    pulse(start_readout);
    @(negedge clk);
    wait (state == ST_CONFIG);
    for (int l = 1; l <= NL; l++)
      for (int j = 0; j < nl[l]; j++) begin
        for (int k = 0; k < nl[l-1]; k++)
          check(rw[l][j][k] == w[l][j][k], $sformatf("w[%0d][%0d][%0d] = %0d, expected %0d",
                l, j, k, rw[l][j][k], w[l][j][k]));
        check(rb[l][j] == b[l][j], $sformatf("b[%0d][%0d] = %0d, expected %0d",
              l, j, rb[l][j], b[l][j]));
      end

    // overflow: flood the input while learning
    pulse(start_learn);
    @(negedge clk);
    data_valid = 1; data_v = FX_ONE; truth_valid = 1; truth_v = '0;
    repeat (2 * 1024) @(negedge clk);
    data_valid = 0; truth_valid = 0;
    check(f_ovf, "feeder overflow flagged under flood");
    pulse(end_learn);

    // mechanism coverage
    $display("regwr=%0d l2u=%0d u2l=%0d u2c=%0d trig=%0d recfg=%0d buffered=%0d minper=%0d neg=%0d learned=%0d samples=%0d",
             n_regwr, n_l2u, n_u2l, n_u2c, n_trig, n_recfg, n_buffered, n_minper, n_neg, n_learned, n_samples);
    check(n_regwr > 0, "register writes");
    check(n_l2u >= NBATCH, "learn->update");
    check(n_u2l >= 1, "update->learn");
    check(n_u2c >= 1, "update->config");
    check(n_trig > 0, "update triggers");
    check(n_recfg > 0, "re-configuration commands");
    check(n_buffered > 0, "input buffered during update");
    check(n_minper > 0, "samples at the minimum period");
    check(n_neg > 0, "PaReLU negative branch");
    check(n_learned > 0, "read-out answers");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
