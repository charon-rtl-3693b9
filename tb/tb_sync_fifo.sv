// tb_sync_fifo: self-checking test of the first-word-fall-through queue at
// its default 64-entry depth. A queue model in the testbench predicts dout,
// empty, full and count; random pushes and pops run first, then the queue is
// filled to exactly 64 entries (full must rise, and a push is held off), then
// drained to empty.
module tb_sync_fifo;
  localparam int W = 16, D = 64;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0;
  logic [W-1:0] din = '0, dout;
  logic empty, full;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic compare();
    check(empty == (model.size() == 0), "empty");
    check(full == (model.size() == D), "full");
    check(count == model.size(), $sformatf("count %0d vs %0d", count, model.size()));
    if (model.size() > 0) check(dout == model[0], $sformatf("dout %h vs %h", dout, model[0]));
  endtask

  task automatic step(input bit w, input bit r, input logic [W-1:0] d);
    wr_en = w && !full; rd_en = r && !empty; din = d;
    @(posedge clk); #1;
    if (wr_en && rd_en) begin void'(model.pop_front()); model.push_back(d); end
    else if (wr_en) model.push_back(d);
    else if (rd_en) void'(model.pop_front());
    wr_en = 0; rd_en = 0;
    compare();
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    compare();
    for (int i = 0; i < 2000; i++) step($urandom_range(0, 99) < 55, $urandom_range(0, 99) < 45, W'($urandom));
    while (!full) step(1, 0, W'($urandom));
    check(count == D, "filled to depth");
    step(1, 0, 16'hDEAD);             // refused: queue is full
    check(model.size() == D, "no overflow");
    while (!empty) step(0, 1, '0);
    check(count == 0, "drained");
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
