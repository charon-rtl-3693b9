// tb_timestamp_gen: checks that the timestamp counts clock cycles from zero
// after reset and that ts_now is that count shifted right by 11: it steps
// exactly every 2048 cycles. Runs 10,000 cycles and compares every cycle
// with a counter kept by the testbench.
module tb_timestamp_gen;
  import charon_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [63:0] timestamp;
  ts_t ts_now;
  longint unsigned n = 0;
  int checks = 0, failures = 0, steps = 0;
  ts_t prev;

  timestamp_gen dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(timestamp == 0 && ts_now == 0, "zero after reset");
    prev = ts_now;
    for (int k = 0; k < 10000; k++) begin
      @(negedge clk);
      n++;
      check(timestamp == n, $sformatf("timestamp %0d vs %0d", timestamp, n));
      check(ts_now == ts_t'(n >> 11), $sformatf("ts_now %0d at %0d", ts_now, n));
      if (ts_now != prev) begin
        steps++;
        check(n % 2048 == 0, $sformatf("ts_now stepped at cycle %0d", n));
      end
      prev = ts_now;
    end
    check(steps == 4, $sformatf("ts_now steps %0d", steps));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
