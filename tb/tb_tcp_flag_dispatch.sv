// tb_tcp_flag_dispatch: checks the request built for each packet class:
// a client SYN -> GET_IND_OP with the two alias candidates and ts_now;
// a server SYNACK -> UPDATE_OP at the server id with the blob
// {g = GRE key[31:8] followed by 8 zero bits, t = ts_now, v = GRE key[7:0]};
// anything else -> COPY_OP carrying the server id.
module tb_tcp_flag_dispatch;
  import charon_pkg::*;
  pkt_hdr_t hdr;
  sid_t alias_idx0, alias_idx1, dip;
  ts_t ts_now;
  pkt_class_e cls;
  score_req_t req;
  int checks = 0, failures = 0;

  tcp_flag_dispatch dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int n = 0; n < 500; n++) begin
      hdr = '0;
      hdr.from_server = 1'($urandom); hdr.syn = 1'($urandom); hdr.ack = 1'($urandom);
      hdr.gre_key = $urandom; hdr.sport = 16'($urandom);
      alias_idx0 = sid_t'($urandom); alias_idx1 = sid_t'($urandom); dip = sid_t'($urandom);
      ts_now = $urandom;
      #1;
      if (hdr.syn && !hdr.ack && !hdr.from_server) begin
        check(cls == CLS_SYN && req.opcode == GET_IND_OP, "SYN class");
        check(req.index0 == alias_idx0 && req.index1 == alias_idx1, "SYN indexes");
        check(req.data == {40'h0, ts_now}, "SYN data = ts_now");
      end else if (hdr.syn && hdr.ack && hdr.from_server) begin
        check(cls == CLS_SYNACK && req.opcode == UPDATE_OP, "SYNACK class");
        check(req.index0 == dip && req.index1 == 0, "SYNACK indexes");
        check(req.data[71:40] == {hdr.gre_key[31:8], 8'h00}, "SYNACK g");
        check(req.data[39:8] == ts_now, "SYNACK t");
        check(req.data[7:0] == hdr.gre_key[7:0], "SYNACK v");
      end else begin
        check(cls == CLS_OTHER && req.opcode == COPY_OP, "other class");
        check(req.index0 == 0 && req.index1 == 0 && req.data == 72'(dip), "COPY carries dip");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
