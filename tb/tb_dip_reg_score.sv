// tb_dip_reg_score: end-to-end test of the extern (queue + state machine +
// Score Table). Requests are pushed with data_in_valid/data_in_ready; a model
// applied in push order predicts every OUTPUT. Checks the worked example of
// the design, back-pressure (a burst of GET_IND_OP fills the 64-entry queue,
// data_in_ready falls, nothing is lost), the steady rate (one GET_IND_OP
// result per 9 cycles under a full queue, one COPY_OP per 2), the latency of
// a lone request, and the final table contents.
module tb_dip_reg_score;
  import charon_pkg::*;
  import tb_model_pkg::*;

  logic clk = 0, rst_n = 0, data_in_valid = 0, data_in_ready, OUTPUT_VALID, wait_bram;
  score_req_t data_in = '0;
  blob_t OUTPUT;
  entry_t model [N_SERVERS];
  blob_t expect_q[$];
  int checks = 0, failures = 0, cyc = 0, stalls = 0, n_out = 0;
  int out_cyc[$];

  dip_reg_score dut (.clk_lookup(clk), .*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // The monitor samples at the falling edge; cyc counts rising edges.
  always @(posedge clk) cyc <= cyc + 1;
  blob_t e_out;
  always @(negedge clk) begin
    if (rst_n && OUTPUT_VALID) begin
      check(expect_q.size() != 0, "unexpected output");
      if (expect_q.size() != 0) begin e_out = expect_q.pop_front(); check(OUTPUT == e_out, $sformatf("output %h expected %h at %0d (n_out %0d)", OUTPUT, e_out, cyc, n_out)); end
      out_cyc.push_back(cyc);
      n_out++;
    end
  end

  function automatic blob_t mk(longint unsigned g, longint unsigned v, longint unsigned t);
    entry_t e; e.g = g; e.v = v; e.t = t; return pack(e);
  endfunction

  task automatic model_apply(input score_req_t r);
    if (r.opcode == GET_IND_OP) begin
      longint unsigned now = 64'(r.data[31:0]);
      longint unsigned s0 = model_score(model[r.index0], now);
      longint unsigned s1 = model_score(model[r.index1], now);
      bit pick0 = s0 < s1;
      if (pick0) s0 = (s0 + (1 << 20)) & 64'hFFFF_FFFF;
      else       s1 = (s1 + (1 << 20)) & 64'hFFFF_FFFF;
      model[r.index0].g = s0; model[r.index0].t = now;
      model[r.index1].g = s1; model[r.index1].t = now;
      expect_q.push_back(blob_t'(pick0 ? r.index0 : r.index1));
    end else begin
      if (r.opcode == UPDATE_OP) model[r.index0] = unpack(r.data);
      expect_q.push_back(r.data);
    end
  endtask

  // Drive at the falling edge and hold the request until it is taken;
  // acc_cyc is the value of cyc in the cycle the request is taken.
  int acc_cyc = 0;
  task automatic push(input opcode_e op, input sid_t i0, input sid_t i1, input blob_t d);
    @(negedge clk);
    data_in = '{opcode: op, index0: i0, index1: i1, data: d};
    data_in_valid = 1;
    while (!data_in_ready) begin stalls++; @(negedge clk); end
    model_apply(data_in);
    acc_cyc = cyc;
    @(posedge clk);
    #1 data_in_valid = 0;
  endtask

  task automatic drain();
    while (expect_q.size() != 0) @(posedge clk);
    repeat (12) @(posedge clk);
  endtask

  initial begin
    int c0;
    for (int i = 0; i < N_SERVERS; i++) begin model[i].g = 0; model[i].t = 0; model[i].v = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // worked example of the design
    push(UPDATE_OP, 0, 0, mk(1, 2, 5));
    push(UPDATE_OP, 1, 0, mk(3, 1, 7));
    drain();
    push(GET_IND_OP, 0, 1, blob_t'(8));
    c0 = acc_cyc;
    drain();
    check(out_cyc[$] - c0 == 10, $sformatf("lone GET_IND_OP latency %0d", out_cyc[$] - c0));
    check(OUTPUT == 0, "example chooses server 0");
    check(dut.u_bram.mem[0] == mk(1 << 20, 2, 8) && dut.u_bram.mem[1] == mk(2, 1, 8), "example write-back");
    push(COPY_OP, 0, 0, blob_t'(9));
    c0 = acc_cyc;
    drain();
    check(out_cyc[$] - c0 == 3, $sformatf("lone COPY_OP latency %0d", out_cyc[$] - c0));
    // burst: 100 GET_IND_OP back to back; the queue fills
    out_cyc.delete();
    for (int n = 0; n < 100; n++)
      push(GET_IND_OP, sid_t'($urandom), sid_t'($urandom), blob_t'(100 + n));
    check(stalls > 0, "back-pressure seen");
    drain();
    for (int k = 1; k < out_cyc.size(); k++)
      check(out_cyc[k] - out_cyc[k-1] == 9, $sformatf("GET_IND_OP spacing %0d", out_cyc[k] - out_cyc[k-1]));
    out_cyc.delete();
    for (int n = 0; n < 50; n++) push(COPY_OP, '0, '0, blob_t'(n));
    drain();
    for (int k = 1; k < out_cyc.size(); k++)
      check(out_cyc[k] - out_cyc[k-1] == 2, $sformatf("COPY_OP spacing %0d", out_cyc[k] - out_cyc[k-1]));
    // random mix with idle gaps
    for (int n = 0; n < 300; n++) begin
      int k = $urandom_range(0, 2);
      if (k == 0) push(UPDATE_OP, sid_t'($urandom), '0, mk($urandom_range(0, 1 << 22), $urandom_range(0, 255), 300 + n));
      else if (k == 1) push(GET_IND_OP, sid_t'($urandom), sid_t'($urandom), blob_t'(300 + n + $urandom_range(0, 50)));
      else push(COPY_OP, '0, '0, blob_t'($urandom_range(0, 15)));
      if ($urandom_range(0, 4) == 0) repeat ($urandom_range(1, 20)) @(posedge clk);
    end
    drain();
    for (int i = 0; i < N_SERVERS; i++)
      check(dut.u_bram.mem[i] == pack(model[i]), $sformatf("table entry %0d", i));
    check(n_out == 454, $sformatf("outputs %0d", n_out));
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
