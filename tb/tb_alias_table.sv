// tb_alias_table: checks the alias-method sampler. First the worked example
// of the design (entry 0: threshold 3, alias 2; entry 1: 12, 3; entry 2: 9, 1;
// idx0 = 0 with x0 < 3 gives 0, idx1 = 2 with x1 >= 9 gives alias 1), then
// every (idx, rnd) pair against the rule rnd < threshold -> idx, else alias,
// then a weighted draw: an alias table built in the testbench (Vose's
// method) for weights 1:2:...:16 is loaded, and 64k draws with uniform idx
// and rnd must hit each server with frequency within 15% of its weight.
module tb_alias_table;
  import charon_pkg::*;
  logic clk = 0, rst_n = 0, cfg_we = 0, took_alias;
  sid_t cfg_addr = '0, cfg_alias = '0, idx = '0, cand;
  logic [THR_W-1:0] cfg_thresh = '0, rnd = '0;
  int checks = 0, failures = 0;
  int thr_m [N_SERVERS], ali_m [N_SERVERS];

  alias_table dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input int a, input int t, input int al);
    @(negedge clk);
    cfg_we = 1; cfg_addr = sid_t'(a); cfg_thresh = THR_W'(t); cfg_alias = sid_t'(al);
    thr_m[a] = t; ali_m[a] = al;
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    int cnt [N_SERVERS];
    real w [N_SERVERS], p [N_SERVERS];
    int lo_q[$], hi_q[$];
    real tot;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N_SERVERS; i++) wr(i, 0, 0);
    wr(0, 3, 2); wr(1, 12, 3); wr(2, 9, 1);
    idx = 0; rnd = 2; #1; check(cand == 0 && !took_alias, "example: x0 < 3 gives entry 0");
    idx = 2; rnd = 9; #1; check(cand == 1 && took_alias, "example: x1 >= 9 gives alias 1");
    idx = 2; rnd = 200; #1; check(cand == 1, "example: x1 > 9 gives alias 1");
    // exhaustive rule check on random contents
    for (int i = 0; i < N_SERVERS; i++) wr(i, $urandom_range(0, 255), $urandom_range(0, N_SERVERS - 1));
    for (int i = 0; i < N_SERVERS; i++)
      for (int r = 0; r < 256; r++) begin
        idx = sid_t'(i); rnd = THR_W'(r); #1;
        check(cand == ((r < thr_m[i]) ? i : ali_m[i]), $sformatf("rule idx %0d rnd %0d", i, r));
      end
    // weighted draw with a Vose alias table for weights 1..16
    tot = 0;
    for (int i = 0; i < N_SERVERS; i++) begin w[i] = i + 1; tot += w[i]; end
    for (int i = 0; i < N_SERVERS; i++) begin
      p[i] = w[i] * N_SERVERS / tot;
      if (p[i] < 1.0) lo_q.push_back(i); else hi_q.push_back(i);
    end
    while (lo_q.size() > 0 && hi_q.size() > 0) begin
      int s, l;
      s = lo_q.pop_front();
      l = hi_q.pop_front();
      wr(s, int'(p[s] * 256.0), l);
      p[l] = p[l] + p[s] - 1.0;
      if (p[l] < 1.0) lo_q.push_back(l); else hi_q.push_back(l);
    end
    while (hi_q.size() > 0) wr(hi_q.pop_front(), 255, 0);
    while (lo_q.size() > 0) wr(lo_q.pop_front(), 255, 0);
    for (int i = 0; i < N_SERVERS; i++) cnt[i] = 0;
    for (int n = 0; n < 65536; n++) begin
      idx = sid_t'(n % N_SERVERS); rnd = THR_W'(n / N_SERVERS); #1;
      cnt[cand]++;
    end
    for (int i = 0; i < N_SERVERS; i++) begin
      real expect_n;
      expect_n = 65536.0 * w[i] / tot;
      check(cnt[i] > 0.85 * expect_n && cnt[i] < 1.15 * expect_n,
            $sformatf("server %0d drawn %0d times, expected about %0d", i, cnt[i], int'(expect_n)));
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
