// server_id_extract: server id from the TCP timestamp option.
//
// The chosen server's id travels in the upper SID_W bits (4 bits for 16
// servers) of the 32-bit TCP timestamp. A server puts it in the TSval of its
// SYNACK (server -> LB); the client then echoes that value in the TSecr of
// every later packet (client -> LB). So the id is taken from TSval for a
// packet from a server and from TSecr for a packet from a client; this
// field choice follows RFC 7323 and is this design's reading of "the server
// id is preserved in the higher bits of the TCP timestamp option". SYN
// packets carry no id yet. valid is low when the option is absent or the
// packet is a client SYN. Combinational.
module server_id_extract
  import charon_pkg::*;
(
  input  logic                from_server,
  input  logic                syn,
  input  logic                ack,
  input  logic                ts_present,
  input  logic [TS_OPT_W-1:0] ts_val,
  input  logic [TS_OPT_W-1:0] ts_ecr,
  output logic                valid,
  output sid_t                sid
);
  logic [TS_OPT_W-1:0] field;

  assign field = from_server ? ts_val : ts_ecr;
  assign sid   = field[TS_OPT_W-1 -: SID_W];
  assign valid = ts_present && !(syn && !ack && !from_server);
endmodule
