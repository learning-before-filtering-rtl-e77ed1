// tb_lbf_activation: self-checking test of the activation module (layer 1).
//
// Bursts of n stimuli (n random in 1..N_NEURONS) are fed one per cycle with
// random values; each burst uses a random function (linear, ReLU, PaReLU
// with a random slope). The expected ACTIVATION and PIPE outputs are
// computed independently and checked cycle by cycle three cycles later,
// including the trailing constant 1 (last, index n) after each burst and the
// one-register pass-through of the CONFIGURATION stream.
module tb_lbf_activation;
  import lbf_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  net_cfg_t net = '0;
  stream_t  stim = '0, act;
  pipe_t    pipe;
  cfg_cmd_t cfg_i = '0, cfg_o;

  lbf_activation #(.L(1)) dut (.clk, .rst_n, .net_i(net), .stim_i(stim),
                               .act_o(act), .pipe_o(pipe), .cfg_i, .cfg_o);

  int checks = 0, failures = 0;

  function automatic data_t m(data_t a, data_t b);
    longint p;
    p = longint'(a) * longint'(b);
    return data_t'(p >>> FRAC_W);
  endfunction

  // expected outputs, indexed by the cycle they must appear
  stream_t  e_act  [0:255];
  pipe_t    e_pipe [0:255];
  cfg_cmd_t e_cfg  [0:255];
  int cyc = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL cyc %0d: %s", cyc, what);
    end
  endtask

  always @(negedge clk) if (rst_n && cyc > 4) begin
    stream_t ea;
    pipe_t   ep;
    ea = e_act[cyc % 256];
    ep = e_pipe[cyc % 256];
    check(act.valid == ea.valid, "act valid");
    if (ea.valid)
      check(act.last == ea.last && act.idx == ea.idx && act.data == ea.data,
            $sformatf("act %0d/%0d/%0d vs %0d/%0d/%0d", act.last, act.idx, act.data, ea.last, ea.idx, ea.data));
    check(pipe.valid == ep.valid, "pipe valid");
    if (ep.valid)
      check(pipe.idx == ep.idx && pipe.act == ep.act && pipe.deriv == ep.deriv, "pipe data");
    check(cfg_o == e_cfg[cyc % 256], "cfg pass-through");
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int n;
    act_e f;
    data_t x, a, d;
    for (int i = 0; i < 256; i++) begin e_act[i] = '0; e_pipe[i] = '0; e_cfg[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 60; b++) begin
      n = 1 + int'($urandom % N_NEURONS);
      f = act_e'($urandom % 3);
      net.n_neur[1] = idx_t'(n);
      net.act_sel[1] = f;
      net.slope[1] = data_t'($urandom % 65536);
      for (int j = 0; j < n + 1 + int'($urandom % 4); j++) begin
        @(negedge clk);
        cyc++;
        e_act[(cyc + 4) % 256] = '0;
        e_pipe[(cyc + 3) % 256] = '0;
        cfg_i = '{valid: 1'($urandom), resp: 1'($urandom), param: P_WEIGHT, layer: lay_t'($urandom),
                  neuron: idx_t'($urandom), index: idx_t'($urandom), value: data_t'($urandom)};
        e_cfg[(cyc + 1) % 256] = cfg_i;
        if (j < n) begin
          x = data_t'($urandom) >>> ($urandom % 16);
          stim = '{valid: 1'b1, last: 1'b0, idx: idx_t'(j), data: x};
          unique case (f)
            ACT_LINEAR: begin a = x; d = FX_ONE; end
            ACT_RELU:   begin a = (x > 0) ? x : '0; d = (x > 0) ? FX_ONE : '0; end
            default:    begin a = (x > 0) ? x : m(net.slope[1], x); d = (x > 0) ? FX_ONE : net.slope[1]; end
          endcase
          e_act[(cyc + 3) % 256]  = '{valid: 1'b1, last: 1'b0, idx: idx_t'(j), data: a};
          e_pipe[(cyc + 3) % 256] = '{valid: 1'b1, idx: idx_t'(j), act: a, deriv: d};
          if (j == n - 1)
            e_act[(cyc + 4) % 256] = '{valid: 1'b1, last: 1'b1, idx: idx_t'(n), data: FX_ONE};
        end else begin
          stim = '0;
        end
      end
      // let the burst finish before the configuration changes
      for (int k = 0; k < 4; k++) begin
        @(negedge clk);
        cyc++;
        stim = '0;
        e_act[(cyc + 4) % 256] = '0;
        e_pipe[(cyc + 3) % 256] = '0;
        cfg_i = '0;
        e_cfg[(cyc + 1) % 256] = '0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
