// tb_lbf_update: self-checking test of the update module (backward layer 2).
//
// Random RESULT entries are presented one per cycle with random gaps:
//  * kind R_ERR (learn): the error must leave on err_o exactly 1 cycle later
//    (D_SUM_ERROR) with index j and `last` on j = n^2 - 1, and produce no
//    re-configuration command;
//  * kinds R_W / R_B (update): recfg_o must carry v - s*g (s from the
//    register file, fixed-point product computed independently) exactly 3
//    cycles later (D_SUM_UPDATE), encoded as WEIGHT(layer 3, neuron k,
//    index j) or BIAS(layer 2, neuron j);
//  * the CONFIGURATION stream passes through one register.
module tb_lbf_update;
  import lbf_pkg::*;

  localparam int L = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  net_cfg_t net = '0;
  res_t     res = '0;
  idx_t     ridx = '0;
  stream_t  err;
  cfg_cmd_t recfg, cfg_i = '0, cfg_o;

  lbf_update #(.L(L)) dut (.clk, .rst_n, .net_i(net), .res_i(res), .res_idx_i(ridx),
                           .err_o(err), .recfg_o(recfg), .cfg_i, .cfg_o);

  int checks = 0, failures = 0, cyc = 0;
  stream_t  e_err [0:255];
  cfg_cmd_t e_rec [0:255];
  cfg_cmd_t e_cfg [0:255];

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

  always @(negedge clk) if (rst_n && cyc > 4) begin
    stream_t ee;
    cfg_cmd_t er;
    ee = e_err[cyc % 256];
    er = e_rec[cyc % 256];
    check(err.valid == ee.valid, "error valid");
    if (ee.valid) check(err.idx == ee.idx && err.last == ee.last && err.data == ee.data, "error content");
    check(recfg.valid == er.valid, "re-configuration valid");
    if (er.valid) check(recfg == er, $sformatf("re-configuration %p vs %p", recfg, er));
    check(cfg_o == e_cfg[cyc % 256], "configuration pass-through");
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int n;
    for (int i = 0; i < 256; i++) begin e_err[i] = '0; e_rec[i] = '0; e_cfg[i] = '0; end
    n = 1 + int'($urandom % N_NEURONS);
    net.n_neur[L] = idx_t'(n);
    net.step = data_t'($urandom % 4096);
    @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      cyc++;
      e_err[(cyc + 1) % 256] = '0;
      e_rec[(cyc + 3) % 256] = '0;
      cfg_i = '{valid: 1'($urandom), resp: 1'($urandom), param: P_BIAS, layer: lay_t'($urandom),
                neuron: idx_t'($urandom), index: idx_t'($urandom), value: data_t'($urandom)};
      e_cfg[(cyc + 1) % 256] = cfg_i;
      res = '0;
      ridx = idx_t'($urandom % n);
      if ($urandom % 4 != 0) begin
        res.valid = 1'b1;
        res.par   = 1'($urandom);
        res.kind  = rkind_e'($urandom % 3);
        res.k     = idx_t'($urandom % N_NEURONS);
        res.v     = data_t'($urandom);
        res.g     = data_t'($urandom) >>> 8;
        if (res.kind == R_ERR)
          e_err[(cyc + 1) % 256] = '{valid: 1'b1, last: (int'(ridx) == n - 1), idx: ridx, data: res.v};
        else if (res.kind == R_W)
          e_rec[(cyc + 3) % 256] = '{valid: 1'b1, resp: 1'b0, param: P_WEIGHT, layer: lay_t'(L + 1),
                                     neuron: res.k, index: ridx, value: res.v - m(net.step, res.g)};
        else
          e_rec[(cyc + 3) % 256] = '{valid: 1'b1, resp: 1'b0, param: P_BIAS, layer: lay_t'(L),
                                     neuron: ridx, index: '0, value: res.v - m(net.step, res.g)};
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
