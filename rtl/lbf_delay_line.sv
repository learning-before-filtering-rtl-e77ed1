// lbf_delay_line: run-time configurable delay line (delay-1 for TRUTH,
// delay-2 for each PIPE stream).
//
// A circular buffer of DEPTH entries is written every cycle at the write
// pointer; the output is read combinationally DELAY entries behind it, so
// out(t) = in(t - delay) for 1 <= delay <= DEPTH. The valid flags are kept in
// a separate array that is cleared at reset, so no stale entry is emitted;
// the payload array has no reset and maps to a block RAM. The delay comes from
// the network register file and must be set while the pipeline is empty.
// The payload type T is a parameter, so the same module serves the TRUTH
// stream and the PIPE streams. DEPTH is this implementation's choice; the
// architecture only states that the delay is configurable at run time.
module lbf_delay_line #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned DW    = 12
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [DW-1:0] delay_i,
  input  logic          valid_i,
  input  T              data_i,
  output logic          valid_o,
  output T              data_o
);

  localparam int unsigned AW = $clog2(DEPTH);

  T               mem  [0:DEPTH-1];
  logic [DEPTH-1:0] vmem;
  logic [AW-1:0]  wp, rp;

  assign rp = wp - AW'(delay_i);

  always_ff @(posedge clk) mem[wp] <= data_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp   <= '0;
      vmem <= '0;
    end else begin
      wp       <= wp + AW'(1);
      vmem[wp] <= valid_i;
    end
  end

  assign valid_o = vmem[rp];
  assign data_o  = mem[rp];

  // While data flows the delay must lie within 1..DEPTH.
  assert property (@(posedge clk) disable iff (!rst_n)
                   valid_i |-> (delay_i >= DW'(1)) && (delay_i <= DW'(DEPTH)));

endmodule
