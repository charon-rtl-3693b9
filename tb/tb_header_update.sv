// tb_header_update: checks the header actions: a client packet is GRE
// encapsulated (outer IP and GRE valid, outer source = LB address, outer
// destination = server address, GRE key 0), a server packet is stripped of
// its outer IP and GRE headers, the layer-2 addresses are rewritten, the
// flow headers pass unchanged, and a client non-SYN packet without a server
// id is marked drop.
module tb_header_update;
  import charon_pkg::*;
  pkt_hdr_t hdr;
  pkt_class_e cls;
  logic dip_valid;
  sid_t server_id;
  ip_t server_ip, lb_ip;
  logic [MAC_W-1:0] lb_mac, next_hop_mac;
  out_hdr_t out;
  int checks = 0, failures = 0;

  header_update dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int n = 0; n < 500; n++) begin
      hdr = '0;
      hdr.from_server = 1'($urandom); hdr.syn = 1'($urandom); hdr.ack = 1'($urandom);
      hdr.src_ip = {$urandom, $urandom, $urandom, $urandom}; hdr.ts_ecr = $urandom;
      cls = pkt_class_e'($urandom_range(0, 2));
      dip_valid = 1'($urandom); server_id = sid_t'($urandom);
      server_ip = {$urandom, $urandom, $urandom, $urandom};
      lb_ip = {$urandom, $urandom, $urandom, $urandom};
      lb_mac = {$urandom, 16'($urandom)}; next_hop_mac = {$urandom, 16'($urandom)};
      #1;
      check(out.hdr == hdr && out.server_id == server_id, "flow headers pass");
      check(out.eth_src == lb_mac && out.eth_dst == next_hop_mac, "layer 2 rewrite");
      if (hdr.from_server) begin
        check(!out.outer_valid && !out.gre_valid && !out.drop, "decapsulate server packet");
      end else begin
        check(out.outer_valid && out.gre_valid, "encapsulate client packet");
        check(out.outer_src == lb_ip && out.outer_dst == server_ip && out.gre_key == 0, "outer header fields");
        check(out.drop == (cls == CLS_OTHER && !dip_valid), "drop without server id");
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
