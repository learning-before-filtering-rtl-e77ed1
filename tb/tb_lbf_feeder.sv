// tb_lbf_feeder: self-checking test of the data feeder.
//
// With n_inputs = 6 and n_truth = 7, a backlog of samples is written into
// the FIFOs during the update state (nothing may be released then), then the
// learn state lets them go. Checked against a model of the input order:
//  * each released sample: ACTIVATION elements 0..5 with the right values and
//    indices on consecutive cycles, then the constant 1 with `last` and index
//    6; PIPE carries the same inputs; TRUTH carries the 7 truth values;
//  * the start of the sample's outputs follows sample_o by exactly 2 cycles;
//  * consecutive samples start exactly max(n_inputs, N_NEURONS)+2 cycles
//    apart while a backlog exists (the minimum period) and never closer;
//  * no sample is released while feed_en is low;
//  * input in the config state is not accepted; a flood sets the sticky
//    overflow flag.
module tb_lbf_feeder;
  import lbf_pkg::*;

  localparam int NIN = 6, NTR = 7, P = N_NEURONS + 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  net_cfg_t net = '0;
  state_e   state = ST_CONFIG;
  logic     feed_en = 0, dv = 0, tv = 0, sample, ovf;
  data_t    dd = '0, td = '0;
  stream_t  act, truth;
  pipe_t    pipe;
  logic [$clog2(1024):0] level;

  lbf_feeder dut (.clk, .rst_n, .net_i(net), .state_i(state), .feed_en_i(feed_en),
                  .data_valid_i(dv), .data_i(dd), .truth_valid_i(tv), .truth_i(td),
                  .act_o(act), .truth_o(truth), .pipe_o(pipe), .sample_o(sample),
                  .overflow_o(ovf), .data_level_o(level));

  int checks = 0, failures = 0, cyc = 0;
  data_t dq [$], tq [$];
  int last_start = -1000, n_samples = 0, n_minper = 0;
  int start_at [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL cyc %0d: %s", cyc, what);
    end
  endtask

  always @(posedge clk) cyc <= cyc + 1;

  // sample starts and their outputs
  always @(posedge clk) if (rst_n) begin
    if (sample) begin
      check(feed_en, "sample released only when enabled");
      check(cyc - last_start >= P, "sample period");
      if (cyc - last_start == P) n_minper++;
      last_start = cyc;
      start_at.push_back(cyc + 2);
      n_samples++;
    end
    if (act.valid) begin
      int e;
      check(start_at.size() > 0, "ACTIVATION without a sample start");
      if (start_at.size() > 0) begin
        e = cyc - start_at[0];
        check(act.idx == idx_t'(e), $sformatf("ACTIVATION element %0d at offset %0d", act.idx, e));
        if (e < NIN) begin
          check(!act.last && act.data == dq[e], "input value");
          check(pipe.valid && pipe.idx == idx_t'(e) && pipe.act == dq[e], "PIPE of the inputs");
        end else begin
          check(act.last && act.data == FX_ONE, "trailing 1");
          for (int i = 0; i < NIN; i++) void'(dq.pop_front());
          void'(start_at.pop_front());
        end
      end
    end
    if (truth.valid) begin
      check(truth.data == tq[0], "truth value");
      void'(tq.pop_front());
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic push_sample();
    for (int i = 0; i < NTR; i++) begin
      @(negedge clk);
      dv = (i < NIN); dd = data_t'($urandom);
      tv = 1'b1;      td = data_t'($urandom);
      if (i < NIN) dq.push_back(dd);
      tq.push_back(td);
    end
    @(negedge clk);
    dv = 0; tv = 0;
  endtask

  initial begin
    net.n_inputs = idx_t'(NIN);
    net.n_truth  = idx_t'(NTR);
    @(negedge clk);
    rst_n = 1;
    // config state: ignored
    @(negedge clk); dv = 1; tv = 1;
    @(negedge clk); dv = 0; tv = 0;
    repeat (3) @(negedge clk);
    check(level == '0, "input ignored in config");
    // update state: buffer 20 samples, none released
    state = ST_UPDATE;
    feed_en = 0;
    for (int s = 0; s < 20; s++) push_sample();
    check(n_samples == 0, "no release during update");
    check(level == ($clog2(1024) + 1)'(20 * NIN), "backlog buffered");
    // learn: released at the minimum period
    state = ST_LEARN;
    feed_en = 1;
    repeat (25 * P) @(negedge clk);
    check(n_samples == 20, "all buffered samples released");
    check(n_minper >= 19, "minimum period under backlog");
    check(dq.size() == 0 && tq.size() == 0, "all values delivered");
    check(!ovf, "no overflow yet");
    // flood
    dv = 1; tv = 1; feed_en = 0;
    repeat (1100) @(negedge clk);
    dv = 0; tv = 0;
    check(ovf, "overflow flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
