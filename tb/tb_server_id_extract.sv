// tb_server_id_extract: checks that the server id is the top 4 bits of TSval
// for a packet from a server and of TSecr for a packet from a client, and
// that no id is reported for a client SYN or when the timestamp option is
// absent. All flag combinations with random timestamps.
module tb_server_id_extract;
  import charon_pkg::*;
  logic from_server, syn, ack, ts_present, valid;
  logic [31:0] ts_val, ts_ecr;
  sid_t sid;
  int checks = 0, failures = 0;

  server_id_extract dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int n = 0; n < 400; n++) begin
      {from_server, syn, ack, ts_present} = 4'(n);
      ts_val = $urandom; ts_ecr = $urandom;
      #1;
      check(valid == (ts_present && !(syn && !ack && !from_server)), $sformatf("valid case %0d", n % 16));
      check(sid == (from_server ? ts_val[31:28] : ts_ecr[31:28]), $sformatf("sid case %0d", n % 16));
    end
    // example: the server with id 0 answered, the client echoes 0x0xxxxxxx
    from_server = 0; syn = 0; ack = 1; ts_present = 1; ts_val = 32'hFFFF_0000; ts_ecr = 32'h0123_4567; #1;
    check(valid && sid == 0, "client echo of server 0");
    ts_ecr = 32'hB000_0001; #1;
    check(valid && sid == 4'hB, "client echo of server 11");
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
