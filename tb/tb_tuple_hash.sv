// tb_tuple_hash: checks both hash instances (CRC-32 and CRC-32C polynomials,
// MSB first, init all ones, no final xor) against a byte-at-a-time reference
// over the 37-byte tuple {src_ip, dst_ip, proto, sport, dport}. The
// reference is first validated on the standard check string "123456789"
// (CRC-32/MPEG-2 = 0x0376E6E7). Random tuples; also checks that the two
// instances differ and that one flipped tuple bit changes the hash.
module tb_tuple_hash;
  import charon_pkg::*;
  import tb_model_pkg::*;

  ip_t src_ip, dst_ip;
  logic [7:0] proto;
  logic [15:0] sport, dport;
  logic [31:0] h0, h1;
  int checks = 0, failures = 0;

  tuple_hash #(.POLY(32'h04C1_1DB7)) dut0 (.src_ip, .dst_ip, .proto, .sport, .dport, .hash(h0));
  tuple_hash #(.POLY(32'h1EDC_6F41)) dut1 (.src_ip, .dst_ip, .proto, .sport, .dport, .hash(h1));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] ref_hash(logic [31:0] poly);
    byte unsigned m[] = new[37];
    logic [295:0] k = {src_ip, dst_ip, proto, sport, dport};
    for (int i = 0; i < 37; i++) m[i] = k[295 - 8*i -: 8];
    return crc_bytes(poly, m);
  endfunction

  initial begin
    byte unsigned chk[] = '{8'h31, 8'h32, 8'h33, 8'h34, 8'h35, 8'h36, 8'h37, 8'h38, 8'h39};
    logic [31:0] prev_h;
    check(crc_bytes(32'h04C1_1DB7, chk) == 32'h0376_E6E7, "reference CRC-32/MPEG-2 check value");
    for (int n = 0; n < 300; n++) begin
      src_ip = {$urandom, $urandom, $urandom, $urandom};
      dst_ip = {$urandom, $urandom, $urandom, $urandom};
      proto = 8'($urandom); sport = 16'($urandom); dport = 16'($urandom);
      #1;
      check(h0 == ref_hash(32'h04C1_1DB7), $sformatf("hash0 %h", h0));
      check(h1 == ref_hash(32'h1EDC_6F41), $sformatf("hash1 %h", h1));
      check(h0 != h1, "two different hashes");
      prev_h = h0;
      sport[$urandom_range(0, 15)] ^= 1'b1;
      #1;
      check(h0 != prev_h, "hash depends on the source port");
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
