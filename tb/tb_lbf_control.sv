// tb_lbf_control: self-checking test of the operating state machine.
//
// A small network (n^0..n^4 = 3, 5, 4, 2, 3) with batch 4 is driven with
// sample_i / done_i pulses standing in for the feeder and backward layer 0.
// Checked against the rules of the design:
//  * config -> learn on start_learn; learn -> update after n_batch samples
//    have started (feed_en drops then); update waits for n_batch done pulses;
//  * the update triggers: per backward layer l (from 4 down to 0) exactly
//    n^{l+1} UPD_W with indices 0..n^{l+1}-1, then one UPD_B for l > 0, each
//    at least n^l cycles after the previous trigger;
//  * update -> learn without end_learn, update -> config after end_learn;
//  * read-out issues one READ_W per weight and one READ_B per bias of layers
//    1..4, then returns to config; clr is high in config and read-out.
module tb_lbf_control;
  import lbf_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  net_cfg_t net = '0;
  logic start_learn = 0, end_learn = 0, start_readout = 0, sample = 0, done = 0;
  state_e state;
  logic feed_en, clr;
  cfg_cmd_t ctl;
  logic [15:0] batches;

  lbf_control dut (.clk, .rst_n, .net_i(net), .start_learn_i(start_learn), .end_learn_i(end_learn),
                   .start_readout_i(start_readout), .sample_i(sample), .done_i(done),
                   .fifo_empty_i(1'b1), .state_o(state), .feed_en_o(feed_en), .clr_o(clr),
                   .ctl_o(ctl), .batches_o(batches));

  int checks = 0, failures = 0, cyc = 0;
  int nl [0:N_LAYERS];
  int nw [0:N_LAYERS], nb [0:N_LAYERS], last_trig = -1000, last_lay = N_LAYERS;
  int n_rw = 0, n_rb = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL cyc %0d: %s", cyc, what);
    end
  endtask

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n) begin
    check(clr == (state == ST_CONFIG || state == ST_READOUT), "clr in config and read-out");
    if (ctl.valid) begin
      int l;
      l = int'(ctl.layer);
      unique case (ctl.param)
        P_UPD_W, P_UPD_B: begin
          check(state == ST_UPDATE, "trigger only in update");
          check(l <= last_lay, "layers triggered from last to first");
          if (l == last_lay)
            check(cyc - last_trig >= nl[l], $sformatf("trigger spacing %0d < n^%0d", cyc - last_trig, l));
          if (ctl.param == P_UPD_W) begin
            check(l < N_LAYERS && int'(ctl.index) == nw[l], "weight trigger index in order");
            nw[l]++;
          end else begin
            check(l > 0 && nw[l] == ((l < N_LAYERS) ? nl[l+1] : 0), "bias trigger after all weights");
            nb[l]++;
          end
          last_trig = cyc;
          last_lay = l;
        end
        P_READ_W: begin check(state == ST_READOUT, "read-out in read-out state"); n_rw++; end
        P_READ_B: begin check(state == ST_READOUT, "read-out in read-out state"); n_rb++; end
        default: check(0, "unexpected command");
      endcase
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic pulse(ref logic s);
    @(negedge clk); s = 1;
    @(negedge clk); s = 0;
  endtask

  task automatic run_batch(bit with_end);
    int started;
    started = 0;
    for (int l = 0; l <= N_LAYERS; l++) begin nw[l] = 0; nb[l] = 0; end
    last_lay = N_LAYERS;
    // samples while enabled
    while (started < 10) begin
      @(negedge clk);
      if (feed_en) begin
        sample = 1; started++;
        @(negedge clk); sample = 0;
        repeat (5) @(negedge clk);
      end else break;
    end
    check(started == 4, $sformatf("n_batch samples released (%0d)", started));
    repeat (3) @(negedge clk);
    check(state == ST_UPDATE, "learn -> update after the batch");
    if (with_end) pulse(end_learn);
    // update must wait for the done pulses
    repeat (50) @(negedge clk);
    check(nw[N_LAYERS - 1] == 0, "no trigger before the batch is absorbed");
    repeat (4) begin pulse(done); repeat (3) @(negedge clk); end
    wait (state != ST_UPDATE);
    @(negedge clk);
    for (int l = 0; l <= N_LAYERS; l++) begin
      check(nw[l] == ((l < N_LAYERS) ? nl[l+1] : 0), $sformatf("weight triggers of layer %0d", l));
      check(nb[l] == ((l > 0) ? 1 : 0), $sformatf("bias triggers of layer %0d", l));
    end
    check(state == (with_end ? ST_CONFIG : ST_LEARN), "state after update");
  endtask

  initial begin
    int exp_w, exp_b;
    nl = '{3, 5, 4, 2, 3};
    net.n_inputs = idx_t'(nl[0]);
    net.n_batch = 16'd4;
    for (int l = 0; l <= N_LAYERS; l++) net.n_neur[l] = idx_t'(nl[l]);
    @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(state == ST_CONFIG && !feed_en, "reset state");
    pulse(start_learn);
    check(state == ST_LEARN, "config -> learn");
    run_batch(0);
    check(batches == 16'd1, "batch counted");
    run_batch(1);
    check(batches == 16'd2, "second batch counted");
    // read-out
    pulse(start_readout);
    check(state == ST_READOUT, "config -> read-out");
    wait (state == ST_CONFIG);
    exp_w = 0; exp_b = 0;
    for (int l = 1; l <= N_LAYERS; l++) begin exp_w += nl[l] * nl[l-1]; exp_b += nl[l]; end
    check(n_rw == exp_w && n_rb == exp_b, $sformatf("read-out requests %0d/%0d, expected %0d/%0d", n_rw, n_rb, exp_w, exp_b));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
