// timestamp_gen: the current timestamp, ts_now = get_timestamp() >> 11.
//
// A 64-bit counter of clock cycles (synchronous active-low reset to zero)
// stands for the platform's timestamp; ts_now is the counter shifted right by
// SHIFT (11, as in the source's P4 program) and truncated to T_W = 32 bits, so
// one ts_now unit is 2048 clock cycles. The shift is the source's; counting
// clock cycles is this design's choice. ts_now is registered.
module timestamp_gen
  import charon_pkg::*;
#(
  parameter int unsigned SHIFT = TS_SHIFT
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic [63:0] timestamp,
  output ts_t         ts_now
);
  always_ff @(posedge clk) begin
    if (!rst_n) timestamp <= '0;
    else        timestamp <= timestamp + 64'd1;
  end

  logic [63:0] shifted;
  assign shifted = timestamp >> SHIFT;
  assign ts_now  = shifted[T_W-1:0];
endmodule
