// tb_ip_table: checks the server-id -> address table: all zero after reset,
// each written address read back at its id (IPv4 and IPv6 values), a write
// to one id leaving the others unchanged, and random rewrites.
module tb_ip_table;
  import charon_pkg::*;
  logic clk = 0, rst_n = 0, cfg_we = 0;
  sid_t cfg_addr = '0, sid = '0;
  ip_t cfg_ip = '0, ip;
  ip_t model [N_SERVERS];
  int checks = 0, failures = 0;

  ip_table dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input int a, input ip_t v);
    @(negedge clk); cfg_we = 1; cfg_addr = sid_t'(a); cfg_ip = v; model[a] = v;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic check_all(input string tag);
    for (int i = 0; i < N_SERVERS; i++) begin
      sid = sid_t'(i); #1;
      check(ip == model[i], $sformatf("%s: id %0d -> %h", tag, i, ip));
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N_SERVERS; i++) model[i] = '0;
    check_all("reset");
    for (int i = 0; i < N_SERVERS; i++)
      wr(i, (i % 2) ? {96'h0, 8'd10, 8'd0, 8'd0, 8'(i + 1)}               // 10.0.0.i+1
                    : {16'h2001, 16'h0db8, 80'h0, 16'(i + 1)});           // 2001:db8::i+1
    check_all("filled");
    for (int n = 0; n < 200; n++) begin
      wr($urandom_range(0, N_SERVERS - 1), {$urandom, $urandom, $urandom, $urandom});
      check_all("random");
    end
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
