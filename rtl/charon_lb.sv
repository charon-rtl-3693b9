// charon_lb: match-action pipeline of a stateless, load-aware load balancer.
//
// Packets arrive as parsed headers (pkt_hdr_t). Per packet:
//   1. The TCP flags pick the path. For a client SYN, two hashes of the
//      5-tuple pick an entry in each of two Alias Tables; each table, with a
//      random number, draws one weighted candidate server. For any other
//      packet, the server id is read from the upper 4 bits of the TCP
//      timestamp option.
//   2. dip_reg_score receives {opCode, index0, index1, data}: it chooses the
//      less loaded of the two candidates (SYN), stores a server's feedback
//      from its SYNACK, or passes the server id through (later packets).
//   3. The resulting server id addresses the IP Table; header_update then
//      encapsulates client packets in GRE towards that server, or strips the
//      GRE/outer IP of a server's SYNACK going to the client.
// Timing: the ingress side (hashes, alias lookups, request building) is
// combinational; a packet is taken when in_valid and in_ready are high, and
// in_ready falls while dip_reg_score's 64-entry queue is full (back-pressure).
// The packet's headers wait in a descriptor queue while dip_reg_score works;
// when its result comes out, the IP Table is read and out_valid/out_hdr
// are registered, one cycle after OUTPUT_VALID. A SYN taken in cycle n while
// dip_reg_score is idle has out_valid high in cycle n+11; any other packet in
// cycle n+4. dip_reg_score serves one SYN per 9 cycles and any other packet
// per 2 cycles.
// The parser and deparser of the P4 program, and the control plane that
// fills the Alias and IP Tables through the cfg_* ports, are outside this
// module. The descriptor queue, the cfg ports and all handshakes are this
// design's; the flow of data between the tables follows the source.
module charon_lb
  import charon_pkg::*;
#(
  parameter int unsigned QUEUE_DEPTH = FIFO_DEPTH
) (
  input  logic             clk,
  input  logic             rst_n,
  // parsed packets in
  input  logic             in_valid,
  input  pkt_hdr_t         in_hdr,
  output logic             in_ready,
  // headers out, towards the deparser
  output logic             out_valid,
  output out_hdr_t         out_hdr,
  // control plane: Alias Tables (bit 0: table 0, bit 1: table 1)
  input  logic [1:0]       cfg_alias_we,
  input  sid_t             cfg_alias_addr,
  input  logic [THR_W-1:0] cfg_alias_thresh,
  input  sid_t             cfg_alias_alias,
  // control plane: IP Table
  input  logic             cfg_ip_we,
  input  sid_t             cfg_ip_addr,
  input  ip_t              cfg_ip,
  // control plane: own addresses
  input  ip_t              cfg_lb_ip,
  input  logic [MAC_W-1:0] cfg_lb_mac,
  input  logic [MAC_W-1:0] cfg_next_hop_mac
);
  // ---- descriptor kept while dip_reg_score works -------------------------------
  typedef struct packed {
    pkt_hdr_t   hdr;
    pkt_class_e cls;
    logic       dip_valid;
    sid_t       dip;
  } desc_t;

  // ---- ingress -----------------------------------------------------------------
  logic [31:0]      hash0, hash1;
  logic [THR_W-1:0] rnd0, rnd1;
  sid_t             alias_idx0, alias_idx1, dip;
  logic             took_alias0, took_alias1, dip_valid;
  ts_t              ts_now;
  logic [63:0]      timestamp;
  pkt_class_e       cls;
  score_req_t       req;
  logic             score_ready, desc_full, accept;

  tuple_hash #(.POLY(32'h04C1_1DB7)) u_hash0 (
    .src_ip(in_hdr.src_ip), .dst_ip(in_hdr.dst_ip), .proto(in_hdr.proto),
    .sport(in_hdr.sport), .dport(in_hdr.dport), .hash(hash0));
  tuple_hash #(.POLY(32'h1EDC_6F41)) u_hash1 (
    .src_ip(in_hdr.src_ip), .dst_ip(in_hdr.dst_ip), .proto(in_hdr.proto),
    .sport(in_hdr.sport), .dport(in_hdr.dport), .hash(hash1));

  lfsr_rng #(.WIDTH(THR_W), .SEED(16'hACE1)) u_rng0 (.clk, .rst_n, .rnd(rnd0));
  lfsr_rng #(.WIDTH(THR_W), .SEED(16'h5EED)) u_rng1 (.clk, .rst_n, .rnd(rnd1));

  alias_table u_alias0 (
    .clk, .rst_n,
    .cfg_we(cfg_alias_we[0]), .cfg_addr(cfg_alias_addr),
    .cfg_thresh(cfg_alias_thresh), .cfg_alias(cfg_alias_alias),
    .idx(hash0[SID_W-1:0]), .rnd(rnd0), .cand(alias_idx0), .took_alias(took_alias0));
  alias_table u_alias1 (
    .clk, .rst_n,
    .cfg_we(cfg_alias_we[1]), .cfg_addr(cfg_alias_addr),
    .cfg_thresh(cfg_alias_thresh), .cfg_alias(cfg_alias_alias),
    .idx(hash1[SID_W-1:0]), .rnd(rnd1), .cand(alias_idx1), .took_alias(took_alias1));

  timestamp_gen u_ts (.clk, .rst_n, .timestamp(timestamp), .ts_now(ts_now));

  server_id_extract u_sid (
    .from_server(in_hdr.from_server), .syn(in_hdr.syn), .ack(in_hdr.ack),
    .ts_present(in_hdr.ts_present), .ts_val(in_hdr.ts_val), .ts_ecr(in_hdr.ts_ecr),
    .valid(dip_valid), .sid(dip));

  tcp_flag_dispatch u_dispatch (
    .hdr(in_hdr), .alias_idx0, .alias_idx1, .ts_now, .dip, .cls, .req);

  assign in_ready = score_ready && !desc_full;
  assign accept   = in_valid && in_ready;

  // ---- dip_reg_score and the descriptor queue ----------------------------------
  logic  score_valid, desc_empty, wait_bram;
  blob_t score_out;
  desc_t desc_in, desc_head;
  logic [$clog2(2*QUEUE_DEPTH+1)-1:0] desc_count;

  dip_reg_score #(.QUEUE_DEPTH(QUEUE_DEPTH)) u_score (
    .clk_lookup    (clk),
    .rst_n         (rst_n),
    .data_in_valid (accept),
    .data_in       (req),
    .data_in_ready (score_ready),
    .OUTPUT_VALID  (score_valid),
    .OUTPUT        (score_out),
    .wait_bram     (wait_bram));

  assign desc_in = '{hdr: in_hdr, cls: cls, dip_valid: dip_valid, dip: dip};

  // Holds every packet inside dip_reg_score: its queue plus the one in work.
  sync_fifo #(.WIDTH($bits(desc_t)), .DEPTH(2*QUEUE_DEPTH)) u_desc (
    .clk, .rst_n,
    .wr_en (accept),
    .din   (desc_in),
    .rd_en (score_valid),
    .dout  (desc_head),
    .empty (desc_empty),
    .full  (desc_full),
    .count (desc_count));

  // ---- egress: IP Table and header update --------------------------------------
  sid_t     server_id;
  ip_t      server_ip;
  out_hdr_t out_next;

  assign server_id = (desc_head.cls == CLS_SYN) ? score_out[SID_W-1:0] : desc_head.dip;

  ip_table u_ip (
    .clk, .rst_n,
    .cfg_we(cfg_ip_we), .cfg_addr(cfg_ip_addr), .cfg_ip(cfg_ip),
    .sid(server_id), .ip(server_ip));

  header_update u_hdr (
    .hdr(desc_head.hdr), .cls(desc_head.cls), .dip_valid(desc_head.dip_valid),
    .server_id, .server_ip, .lb_ip(cfg_lb_ip), .lb_mac(cfg_lb_mac),
    .next_hop_mac(cfg_next_hop_mac), .out(out_next));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_hdr   <= '0;
    end else begin
      out_valid <= score_valid;
      if (score_valid) out_hdr <= out_next;
    end
  end

  // Every result of dip_reg_score belongs to a waiting descriptor.
  a_desc_match: assert property (@(posedge clk) disable iff (!rst_n) score_valid |-> !desc_empty);
endmodule
