// tb_lbf_delay_line: self-checking test of the programmable delay line.
//
// A random stream (random valid pattern, random data) is pushed through the
// delay line at its default depth. For several delays, including the minimum
// 1 and the maximum DEPTH, every output cycle is compared with a reference
// history of the input: valid_o(t) = valid_i(t-d), data_o(t) = data_i(t-d)
// whenever the reference is valid. The delay is changed on the fly; checking
// restarts DEPTH cycles after each change.
module tb_lbf_delay_line;
  localparam int DEPTH = 2048;
  localparam int DW = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [DW-1:0] delay = 1;
  logic valid_i = 0, valid_o;
  logic [31:0] data_i = 0, data_o;

  lbf_delay_line dut (.clk, .rst_n, .delay_i(delay), .valid_i, .data_i, .valid_o, .data_o);

  int checks = 0, failures = 0;
  logic        hv [0:8191];
  logic [31:0] hd [0:8191];
  int t = 0, settle = 0;

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // sample outputs just before the edge, then record the inputs of this cycle
  always @(negedge clk) if (rst_n) begin
    if (settle == 0 && t >= DEPTH + 1) begin
      int s;
      s = (t - int'(delay)) % 8192;
      checks++;
      if (valid_o !== hv[s] || (hv[s] && data_o !== hd[s])) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d d=%0d: got %b/%h expected %b/%h",
                                    t, delay, valid_o, data_o, hv[s], hd[s]);
      end
    end
  end

  initial begin
    int delays [6];
    delays = '{1, 2, 17, 300, DEPTH - 1, DEPTH};
    repeat (3) @(negedge clk);
    rst_n = 1;
    // fill the line once so every output has a reference
    foreach (delays[i]) begin
      delay = DW'(delays[i]);
      settle = 1;
      for (int c = 0; c < 2 * DEPTH + 400; c++) begin
        @(negedge clk);
        #1;
        if (c == DEPTH) settle = 0;
        valid_i = ($urandom % 3) != 0;
        data_i  = $urandom;
        hv[t % 8192] = valid_i;
        hd[t % 8192] = data_i;
        t++;
      end
    end
    valid_i = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
