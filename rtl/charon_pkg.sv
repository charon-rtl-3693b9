// charon_pkg: types, sizes and score arithmetic shared by the load-balancer
// datapath.
//
// The Score Table keeps one 72-bit "blob" per server, packed as
//   blob[71:40] = g  (remaining work / active flows, fixed point, 1 flow = 1<<20)
//   blob[39:8]  = t  (timestamp of the last update, in ts_now units)
//   blob[7:0]   = v  (processing speed, work drained per ts_now unit)
// which is the d_stack(a,b,c) = (a<<40)|(b<<8)|(c&0xff) layout of the
// dip_reg_score state-machine figure. The predicted score of a server is
//   g' = max(0, g - v*(ts_now - t)).
// The subtraction ts_now - t is done modulo 2^32, so a timestamp wrap between
// two updates is handled as long as the two are less than 2^32 units apart.
// Sixteen servers (4-bit server id) and a 64-entry request queue are the
// sizes of the published prototype; widths of the packet-header fields not
// fixed by TCP/IP (threshold, hash, addresses) are this design's choices.
package charon_pkg;

  // ---- sizes --------------------------------------------------------------
  localparam int unsigned N_SERVERS  = 16;                  // servers in all tables
  localparam int unsigned SID_W      = $clog2(N_SERVERS);   // server id width (4)
  localparam int unsigned FIFO_DEPTH = 64;                  // dip_reg_score input queue
  localparam int unsigned G_W        = 32;                  // score g
  localparam int unsigned T_W        = 32;                  // timestamp t / ts_now
  localparam int unsigned V_W        = 8;                   // velocity v
  localparam int unsigned BLOB_W     = G_W + T_W + V_W;     // 72-bit Score Table entry
  localparam int unsigned TS_SHIFT   = 11;                  // ts_now = timestamp >> 11
  localparam int unsigned UNIT_SHIFT = 20;                  // one new flow adds 1<<20 to g
  localparam int unsigned THR_W      = 8;                   // alias threshold / random width
  localparam int unsigned IP_W       = 128;                 // IPv4 held in an IPv6-sized field
  localparam int unsigned TS_OPT_W   = 32;                  // TCP timestamp value width
  localparam int unsigned GRE_KEY_W  = 32;                  // GRE key field width
  localparam int unsigned MAC_W      = 48;

  typedef logic [SID_W-1:0]  sid_t;
  typedef logic [BLOB_W-1:0] blob_t;
  typedef logic [G_W-1:0]    score_t;
  typedef logic [T_W-1:0]    ts_t;
  typedef logic [V_W-1:0]    vel_t;
  typedef logic [IP_W-1:0]   ip_t;

  // ---- dip_reg_score operation codes -------------------------------------
  typedef enum logic [1:0] {
    COPY_OP    = 2'd0,   // buffer: copy data to the output
    UPDATE_OP  = 2'd1,   // write server feedback into the Score Table
    GET_IND_OP = 2'd2    // power-of-2 choice between index0 and index1
  } opcode_e;

  // One request to dip_reg_score (one FIFO entry).
  typedef struct packed {
    opcode_e opcode;
    sid_t    index0;
    sid_t    index1;
    blob_t   data;
  } score_req_t;

  // Parsed headers of one packet, as the match-action stage sees them.
  // src_ip/dst_ip/proto/ports are the flow's own (client<->VIP) addresses:
  // the only IP header of a client packet, the inner one of a GRE packet
  // coming back from a server.
  typedef struct packed {
    logic                  from_server;  // arrived GRE-encapsulated from a server
    logic                  syn;          // TCP SYN flag
    logic                  ack;          // TCP ACK flag
    ip_t                   src_ip;
    ip_t                   dst_ip;
    logic [7:0]            proto;
    logic [15:0]           sport;
    logic [15:0]           dport;
    logic                  ts_present;   // TCP timestamp option present
    logic [TS_OPT_W-1:0]   ts_val;
    logic [TS_OPT_W-1:0]   ts_ecr;
    logic [GRE_KEY_W-1:0]  gre_key;      // server feedback {g[31:8], v}
  } pkt_hdr_t;

  // Packet class chosen by the TCP-flag stage.
  typedef enum logic [1:0] {
    CLS_SYN    = 2'd0,   // client -> LB, new flow
    CLS_SYNACK = 2'd1,   // server -> LB, feedback
    CLS_OTHER  = 2'd2    // established flow (not SYN)
  } pkt_class_e;

  // Headers leaving the match-action stage towards the deparser.
  typedef struct packed {
    logic                  drop;         // no server id: packet is discarded
    pkt_hdr_t              hdr;          // flow headers, unchanged
    logic                  outer_valid;  // outer IP header (ip46_ext) emitted
    logic                  gre_valid;    // GRE header emitted
    ip_t                   outer_src;    // LB address
    ip_t                   outer_dst;    // chosen server address
    logic [GRE_KEY_W-1:0]  gre_key;
    logic [MAC_W-1:0]      eth_src;
    logic [MAC_W-1:0]      eth_dst;
    sid_t                  server_id;    // server the packet was steered to
  } out_hdr_t;

  // ---- score arithmetic ---------------------------------------------------
  function automatic score_t blob_g(blob_t b);  return b[BLOB_W-1 -: G_W];   endfunction
  function automatic ts_t    blob_t_(blob_t b); return b[V_W +: T_W];        endfunction
  function automatic vel_t   blob_v(blob_t b);  return b[V_W-1:0];           endfunction

  // d_stack(a,b,c) = (a<<40)|(b<<8)|(c&0xff)
  function automatic blob_t d_stack(score_t g, ts_t t, vel_t v);
    return {g, t, v};
  endfunction

  // get_score(x) = max(0, g - v*(ts_now - t))
  function automatic score_t get_score(blob_t b, ts_t ts_now);
    logic [G_W+V_W-1:0] drained;
    ts_t                elapsed;
    elapsed = ts_now - blob_t_(b);
    drained = (G_W+V_W)'(blob_v(b)) * (G_W+V_W)'(elapsed);
    if (drained >= (G_W+V_W)'(blob_g(b))) return '0;
    return blob_g(b) - G_W'(drained);
  endfunction

endpackage
