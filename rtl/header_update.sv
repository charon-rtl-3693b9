// header_update: last match-action stage, after the IP Table lookup.
//
// It decides which headers the deparser emits and fills their fields:
//   client -> LB (SYN or later packet): the packet is sent to the chosen
//     server inside GRE. The outer IP header (ip46_ext) and the GRE header are
//     made valid; outer source = the load balancer's address, outer
//     destination = the server address read from the IP Table, GRE key = 0.
//     The client's own IP header becomes the inner header (ip46_int).
//   server -> LB (SYNACK): the outer IP and GRE headers are removed
//     (invalid) and the inner packet goes on to the client.
// The layer-2 header is rewritten with the load balancer's MAC as source and
// the next hop's MAC as destination. A client packet that is not a SYN and
// carries no server id (no timestamp option) is marked drop. The list of
// actions and the valid/invalid rule per direction are the source's; the
// field values (GRE key 0, MAC addresses from configuration inputs) are this
// design's choices. Most of `out` is the input header handed on unchanged for
// the deparser (the inner headers), and gre_key is the constant 0 above, so
// those output bits are tied to inputs or to a constant by design.
// Combinational.
module header_update
  import charon_pkg::*;
(
  input  pkt_hdr_t          hdr,
  input  pkt_class_e        cls,
  input  logic              dip_valid,
  input  sid_t              server_id,
  input  ip_t               server_ip,
  input  ip_t               lb_ip,
  input  logic [MAC_W-1:0]  lb_mac,
  input  logic [MAC_W-1:0]  next_hop_mac,
  output out_hdr_t          out
);
  always_comb begin
    out.hdr       = hdr;
    out.server_id = server_id;
    out.eth_src   = lb_mac;
    out.eth_dst   = next_hop_mac;
    out.gre_key   = '0;
    if (hdr.from_server) begin
      out.outer_valid = 1'b0;
      out.gre_valid   = 1'b0;
      out.outer_src   = '0;
      out.outer_dst   = '0;
      out.drop        = 1'b0;
    end else begin
      out.outer_valid = 1'b1;
      out.gre_valid   = 1'b1;
      out.outer_src   = lb_ip;
      out.outer_dst   = server_ip;
      out.drop        = (cls == CLS_OTHER) && !dip_valid;
    end
  end
endmodule
