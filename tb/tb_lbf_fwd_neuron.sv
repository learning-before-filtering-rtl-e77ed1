// tb_lbf_fwd_neuron: self-checking test of one forward neuron (layer 1,
// neuron 3).
//
// The neuron's weights and bias are written with WEIGHT/BIAS commands
// (commands for other neurons must not touch them). Random samples of n
// inputs plus the trailing 1 are streamed through it, back to back or with
// gaps. For each sample the neuron must load its STIMULUS slot exactly once,
// a fixed number of cycles after the trailing 1 (the MAA-1 latency), with
// chi = sum_k w_k * alpha_k + b computed independently in fixed point.
// The ACTIVATION and CONFIGURATION streams must pass through one register.
// A READ_W / READ_B request for this neuron must come out as a WEIGHT / BIAS
// answer with resp set and the stored value; a transparent neuron
// (n^1 <= 3) must never load.
module tb_lbf_fwd_neuron;
  import lbf_pkg::*;

  localparam int J = 3;
  localparam int LOAD_LAT = 2;   // trailing 1 at cycle t -> load at t + 2

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  net_cfg_t net = '0;
  stream_t  act_i = '0, act_o;
  cfg_cmd_t cfg_i = '0, cfg_o;
  logic sv_o, sp_o, load, load_par;
  data_t sd_o;

  lbf_fwd_neuron #(.L(1), .J(J)) dut (
    .clk, .rst_n, .clr_i(1'b0), .net_i(net), .act_i, .act_o, .cfg_i, .cfg_o,
    .stim_valid_i(1'b0), .stim_par_i(1'b0), .stim_data_i('0),
    .stim_valid_o(sv_o), .stim_par_o(sp_o), .stim_data_o(sd_o),
    .shift_en_i(1'b0), .shift_par_i(1'b0), .load_o(load), .load_par_o(load_par));

  int checks = 0, failures = 0, cyc = 0;
  data_t w [0:N_NEURONS];
  int exp_load [$];
  data_t exp_val [$];
  stream_t prev_act;
  cfg_cmd_t prev_cfg;
  int n_loads = 0;

  function automatic data_t m(data_t a, data_t b);
    longint p;
    p = longint'(a) * longint'(b);
    return data_t'(p >>> FRAC_W);
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL cyc %0d: %s", cyc, what);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (load) begin
      n_loads++;
      check(exp_load.size() > 0 && exp_load[0] == cyc, "load cycle");
      if (exp_load.size() > 0) begin
        void'(exp_load.pop_front());
        // the slot takes the result on this edge
        #1 check(sv_o && sd_o == exp_val[0], $sformatf("stimulus %0d, expected %0d", sd_o, exp_val[0]));
        void'(exp_val.pop_front());
      end
    end
  end

  // pass-through registers: inputs change at the falling edge, so just after
  // a rising edge the output must equal the input that was sampled
  always @(posedge clk) begin
    prev_act = act_i;
    prev_cfg = cfg_i;
    #1;
    if (rst_n && cyc > 2) begin
      check(act_o == prev_act, "ACTIVATION pass-through");
      check(cfg_o == prev_cfg || prev_cfg.param inside {P_READ_W, P_READ_B},
            "CONFIGURATION pass-through");
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic cmd(param_e p, int neuron, int index, data_t v);
    @(negedge clk);
    cfg_i = '{valid: 1'b1, resp: 1'b0, param: p, layer: lay_t'(1), neuron: idx_t'(neuron),
              index: idx_t'(index), value: v};
    @(negedge clk);
    cfg_i = '0;
  endtask

  initial begin
    int n;
    data_t a, sum;
    net.n_neur[1] = idx_t'(N_NEURONS);
    @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < N_NEURONS; k++) begin
      w[k] = data_t'($urandom % 65536) - data_t'(32768);
      cmd(P_WEIGHT, J, k, w[k]);
      cmd(P_WEIGHT, J + 1, k, data_t'($urandom));   // other neuron: ignored
    end
    w[N_NEURONS] = data_t'($urandom % 65536);
    cmd(P_BIAS, J, 0, w[N_NEURONS]);
    cmd(P_BIAS, J - 1, 0, data_t'($urandom));
    for (int s = 0; s < 60; s++) begin
      n = 1 + int'($urandom % N_NEURONS);
      net.n_inputs = idx_t'(n);
      sum = '0;
      for (int k = 0; k <= n; k++) begin
        @(negedge clk);
        a = (k == n) ? FX_ONE : data_t'($urandom % 131072) - data_t'(65536);
        act_i = '{valid: 1'b1, last: (k == n), idx: idx_t'(k), data: a};
        sum += m((k == n) ? w[N_NEURONS] : w[k], a);
        if (k == n) begin
          exp_load.push_back(cyc + LOAD_LAT);
          exp_val.push_back(sum);
        end
      end
      @(negedge clk);
      act_i = '0;
      repeat ($urandom % 3) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    check(exp_load.size() == 0 && n_loads == 60, "one load per sample");
    // read-out
    for (int k = 0; k < 4; k++) begin
      @(negedge clk);
      cfg_i = '{valid: 1'b1, resp: 1'b0, param: (k == 3) ? P_READ_B : P_READ_W, layer: lay_t'(1),
                neuron: idx_t'(J), index: idx_t'(k), value: '0};
      @(negedge clk);
      cfg_i = '0;
      check(cfg_o.valid && cfg_o.resp && cfg_o.param == ((k == 3) ? P_BIAS : P_WEIGHT) &&
            cfg_o.value == ((k == 3) ? w[N_NEURONS] : w[k]), "read-out answer");
    end
    // transparent neuron: no load
    net.n_neur[1] = idx_t'(J);
    n_loads = 0;
    for (int k = 0; k <= 5; k++) begin
      @(negedge clk);
      act_i = '{valid: 1'b1, last: (k == 5), idx: idx_t'(k), data: FX_ONE};
    end
    @(negedge clk);
    act_i = '0;
    repeat (5) @(negedge clk);
    check(n_loads == 0, "transparent neuron does not load");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
