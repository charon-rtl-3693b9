// tb_score_bram: checks the Score Table block RAM: the all-zero start, the
// two-cycle read latency (data for the address of cycle n appears in cycle
// n+2, and not in n+1), read-first behaviour on a same-address write, and
// random writes and reads against an array model.
module tb_score_bram;
  import charon_pkg::*;
  logic clk = 0, we = 0;
  sid_t addr = '0;
  blob_t din = '0, dout;
  blob_t model [N_SERVERS];
  int checks = 0, failures = 0;

  score_bram dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic blob_t rnd_blob();
    return {$urandom, $urandom, 8'($urandom)};
  endfunction

  initial begin
    for (int i = 0; i < N_SERVERS; i++) model[i] = '0;
    // initial contents
    for (int i = 0; i < N_SERVERS; i++) begin
      addr = sid_t'(i); @(posedge clk); @(posedge clk); #1;
      check(dout == '0, $sformatf("initial zero at %0d", i));
    end
    // fill
    for (int i = 0; i < N_SERVERS; i++) begin
      model[i] = rnd_blob();
      we = 1; addr = sid_t'(i); din = model[i]; @(posedge clk); #1; we = 0;
    end
    // latency: present addr for one cycle, then a different one
    for (int i = 0; i < N_SERVERS; i++) begin
      addr = sid_t'(i); @(posedge clk); #1;
      addr = sid_t'(i ^ 1); @(posedge clk); #1;
      check(dout == model[i], $sformatf("2-cycle read %0d", i));
      @(posedge clk); #1;
      check(dout == model[i ^ 1], $sformatf("next read %0d", i ^ 1));
    end
    // one-cycle data is still the previous word (latency is not 1)
    addr = 4'd3; @(posedge clk); @(posedge clk); #1;
    addr = 4'd5; @(posedge clk); #1;
    check(dout == model[3] && model[3] != model[5], "not yet new word after 1 cycle");
    // read-first on write
    we = 1; addr = 4'd7; din = rnd_blob(); @(posedge clk); #1; we = 0;
    @(posedge clk); #1;
    check(dout == model[7], "read-first returns old word");
    model[7] = din;
    @(posedge clk); @(posedge clk); #1;
    check(dout == model[7], "new word after write");
    // random traffic
    for (int n = 0; n < 500; n++) begin
      int a = $urandom_range(0, N_SERVERS - 1);
      if ($urandom_range(0, 1)) begin
        we = 1; addr = sid_t'(a); din = rnd_blob(); @(posedge clk); #1; we = 0; model[a] = din;
      end else begin
        addr = sid_t'(a); @(posedge clk); @(posedge clk); #1;
        check(dout == model[a], $sformatf("random read %0d", a));
      end
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
