// tb_rmw_state_machine: drives the state machine from a queue model in the
// testbench (first word fall through) and uses the real Score Table RAM.
// Checks: the worked example of the design (entries {g=1,v=2,t=5} and
// {g=3,v=1,t=7}, Time()=8 -> scores 0 and 2, index 0 chosen and raised by
// one flow), the cycle counts (a GET_IND_OP result 9 cycles after its
// queue read, UPDATE_OP/COPY_OP 2 cycles, WAIT_BRAM held 4 cycles), the
// values written back, and random operations against a table model.
module tb_rmw_state_machine;
  import charon_pkg::*;
  import tb_model_pkg::*;

  logic clk = 0, rst_n = 0;
  logic fifo_empty, fifo_rd_en, bram_we, result_valid_r, wait_bram;
  score_req_t fifo_dout;
  sid_t bram_addr;
  blob_t bram_din, bram_dout, result_r;
  score_req_t q[$];
  entry_t model [N_SERVERS];
  blob_t expect_q[$];
  int checks = 0, failures = 0;
  int cyc = 0, last_rd = 0, wait_len = 0;
  int lat_q[$];

  rmw_state_machine dut (.*);
  score_bram u_bram (.clk, .we(bram_we), .addr(bram_addr), .din(bram_din), .dout(bram_dout));

  always #5 clk = ~clk;
  assign fifo_empty = (q.size() == 0);
  assign fifo_dout  = fifo_empty ? '0 : q[0];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected latency of each popped request, checked at its result
  // The queue model pops at the falling edge after a read, so the state
  // machine samples a stable head at the rising edge.
  logic pop_pending = 1'b0;
  always @(negedge clk) begin
    if (pop_pending) void'(q.pop_front());
    pop_pending = 1'b0;
  end

  always @(posedge clk) begin
    int lat;
    cyc <= cyc + 1;
    if (rst_n && fifo_rd_en) begin
      lat_q.push_back(q[0].opcode == GET_IND_OP ? 9 : 2);
      last_rd <= cyc;
      pop_pending = 1'b1;
    end
    if (rst_n && result_valid_r) begin
      lat = lat_q.pop_front();
      check(cyc - last_rd == lat, $sformatf("latency %0d, expected %0d", cyc - last_rd, lat));
      check(result_r == expect_q.pop_front(), $sformatf("result %h", result_r));
    end
    if (wait_bram) wait_len <= wait_len + 1;
    else if (wait_len != 0) begin
      check(wait_len == 4, $sformatf("WAIT_BRAM length %0d", wait_len));
      wait_len <= 0;
    end
  end

  // model of one request, applied when it is queued (requests run in order)
  task automatic push(input opcode_e op, input sid_t i0, input sid_t i1, input blob_t d);
    score_req_t r;
    r.opcode = op; r.index0 = i0; r.index1 = i1; r.data = d;
    if (op == UPDATE_OP) begin
      model[i0] = unpack(d);
      expect_q.push_back(d);
    end else if (op == COPY_OP) begin
      expect_q.push_back(d);
    end else begin
      longint unsigned now = 64'(d[31:0]);
      longint unsigned s0 = model_score(model[i0], now);
      longint unsigned s1 = model_score(model[i1], now);
      entry_t e0 = model[i0], e1 = model[i1];
      if (s0 < s1) s0 = (s0 + (1 << 20)) & 64'hFFFF_FFFF;
      else         s1 = (s1 + (1 << 20)) & 64'hFFFF_FFFF;
      // chosen is i0 iff its predicted score is strictly lower
      expect_q.push_back(blob_t'((model_score(e0, now) < model_score(e1, now)) ? i0 : i1));
      e0.g = s0; e0.t = now; e1.g = s1; e1.t = now;
      model[i0] = e0;
      model[i1] = e1;
    end
    q.push_back(r);
  endtask

  task automatic drain();
    while (q.size() != 0 || expect_q.size() != 0) @(posedge clk);
    repeat (3) @(posedge clk);
  endtask

  task automatic compare_table(input string tag);
    for (int i = 0; i < N_SERVERS; i++)
      check(u_bram.mem[i] == pack(model[i]), $sformatf("%s: entry %0d = %h, model %h", tag, i, u_bram.mem[i], pack(model[i])));
  endtask

  function automatic blob_t mk(longint unsigned g, longint unsigned v, longint unsigned t);
    entry_t e; e.g = g; e.v = v; e.t = t; return pack(e);
  endfunction

  initial begin
    for (int i = 0; i < N_SERVERS; i++) begin model[i].g = 0; model[i].t = 0; model[i].v = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // worked example
    push(UPDATE_OP, 0, 0, mk(1, 2, 5));
    push(UPDATE_OP, 1, 0, mk(3, 1, 7));
    push(UPDATE_OP, 2, 0, mk(2, 1, 6));
    drain();
    compare_table("after updates");
    push(GET_IND_OP, 0, 1, blob_t'(8));
    drain();
    check(u_bram.mem[0] == mk(1 << 20, 2, 8), "example: server 0 raised by one flow");
    check(u_bram.mem[1] == mk(2, 1, 8), "example: server 1 score 2 written back");
    push(COPY_OP, 0, 0, blob_t'(72'h5));
    drain();
    // random operations, back to back
    for (int n = 0; n < 400; n++) begin
      int k = $urandom_range(0, 2);
      if (k == 0) push(UPDATE_OP, sid_t'($urandom), '0, mk($urandom_range(0, 1 << 24), $urandom_range(0, 255), $urandom_range(0, 4000)));
      else if (k == 1) push(GET_IND_OP, sid_t'($urandom), sid_t'($urandom), blob_t'(4000 + n * 3));
      else push(COPY_OP, '0, '0, blob_t'($urandom_range(0, 15)));
      if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 12)) @(posedge clk);
    end
    drain();
    compare_table("after random");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
