// tb_lbf_cost: self-checking test of the cost block.
//
// For a series of samples with a random output count n (1..N_NEURONS), the
// truth values of sample s are written after prediction s-1 has started and
// before its own prediction (the window the truth delay must meet), then the
// prediction of sample s arrives one element per cycle followed by the
// trailing 1. Every ERROR element must equal alpha_j - tau_j of the same
// sample, appear exactly D_COST = 3 cycles after its prediction element,
// carry index j and `last` on j = n-1; the trailing 1 must not produce an
// error element.
module tb_lbf_cost;
  import lbf_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  net_cfg_t net = '0;
  stream_t  pred = '0, truth = '0, err;

  lbf_cost dut (.clk, .rst_n, .net_i(net), .pred_i(pred), .truth_i(truth), .err_o(err));

  int checks = 0, failures = 0, cyc = 0;
  stream_t expd [0:255];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL cyc %0d: %s", cyc, what);
    end
  endtask

  always @(negedge clk) if (rst_n) begin
    stream_t e;
    e = expd[cyc % 256];
    check(err.valid == e.valid, "error valid");
    if (e.valid)
      check(err.idx == e.idx && err.last == e.last && err.data == e.data,
            $sformatf("error %0d/%0d/%0d vs %0d/%0d/%0d", err.idx, err.last, err.data, e.idx, e.last, e.data));
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  data_t tau [0:N_NEURONS-1];
  data_t alpha [0:N_NEURONS-1];

  task automatic step();
    @(negedge clk);
    cyc++;
    expd[(cyc + 3) % 256] = '0;
    pred = '0;
    truth = '0;
  endtask

  initial begin
    int n;
    for (int i = 0; i < 256; i++) expd[i] = '0;
    @(negedge clk);
    rst_n = 1;
    n = 1 + int'($urandom % N_NEURONS);
    net.n_neur[N_LAYERS] = idx_t'(n);
    for (int s = 0; s < 40; s++) begin
      // truth of this sample, written before its prediction starts
      for (int t = 0; t < n; t++) begin
        step();
        tau[t] = data_t'($urandom);
        truth = '{valid: 1'b1, last: (t == n - 1), idx: idx_t'(t), data: tau[t]};
      end
      if ($urandom % 2) step();
      // prediction, then the trailing 1
      for (int j = 0; j <= n; j++) begin
        step();
        alpha[j % N_NEURONS] = data_t'($urandom);
        pred = '{valid: 1'b1, last: (j == n), idx: idx_t'(j), data: (j == n) ? FX_ONE : alpha[j % N_NEURONS]};
        if (j < n)
          expd[(cyc + 3) % 256] = '{valid: 1'b1, last: (j == n - 1), idx: idx_t'(j),
                                   data: alpha[j] - tau[j]};
      end
    end
    repeat (5) step();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
