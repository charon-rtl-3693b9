// tuple_hash: hash of a flow's 5-tuple (Hash0 / Hash1 of the load balancer).
//
// The load balancer applies two different hash functions to the 5-tuple
// (source IP, destination IP, protocol, source port, destination port) of a
// SYN; each result selects an entry of an alias table. The source does not
// name the functions. This design uses a CRC over the 296-bit tuple, MSB
// first, with initial value all ones and no final inversion; the polynomial is
// a parameter, so the two instances differ (CRC-32 0x04C11DB7 and CRC-32C
// 0x1EDC6F41 by default). Purely combinational: hash follows the inputs in
// the same cycle.
module tuple_hash
  import charon_pkg::*;
#(
  parameter logic [31:0] POLY = 32'h04C1_1DB7
) (
  input  ip_t         src_ip,
  input  ip_t         dst_ip,
  input  logic [7:0]  proto,
  input  logic [15:0] sport,
  input  logic [15:0] dport,
  output logic [31:0] hash
);
  localparam int unsigned KEY_W = 2*IP_W + 8 + 16 + 16;

  logic [KEY_W-1:0] key;
  assign key = {src_ip, dst_ip, proto, sport, dport};

  always_comb begin
    logic [31:0] crc;
    crc = '1;
    for (int i = KEY_W - 1; i >= 0; i--) begin
      crc = (crc[31] ^ key[i]) ? ((crc << 1) ^ POLY) : (crc << 1);
    end
    hash = crc;
  end
endmodule
