// tcp_flag_dispatch: the TCP-flag stage of the match-action pipeline.
//
// It classifies a parsed packet and builds the request sent to dip_reg_score,
// exactly as the source's P4 workflow figure maps fields to the extern's
// inputs:
//   SYN    (client -> LB): index0 = alias_idx0, index1 = alias_idx1,
//                          data = ts_now, opCode = GET_IND_OP
//   SYNACK (server -> LB): index0 = dip, index1 = 0,
//                          data = blob = g ++ ts_now ++ v, opCode = UPDATE_OP
//   not SYN (client -> LB): index0 = 0, index1 = 0, data = dip, opCode = COPY_OP
// dip is the server id found in the TCP timestamp option. The server's
// feedback is the 32-bit GRE key; this design reads it as {g[31:8], v[7:0]}:
// the upper 24 bits are the top bits of the server's 32-bit score g (its low
// 8 bits are sent as zero) and the low byte is the velocity v. A packet
// from a server that is not a SYNACK takes the COPY_OP path. Combinational.
module tcp_flag_dispatch
  import charon_pkg::*;
(
  input  pkt_hdr_t   hdr,
  input  sid_t       alias_idx0,
  input  sid_t       alias_idx1,
  input  ts_t        ts_now,
  input  sid_t       dip,
  output pkt_class_e cls,
  output score_req_t req
);
  score_t fb_g;
  vel_t   fb_v;

  assign fb_g = {hdr.gre_key[GRE_KEY_W-1:V_W], {(G_W-(GRE_KEY_W-V_W)){1'b0}}};
  assign fb_v = hdr.gre_key[V_W-1:0];

  always_comb begin
    if (hdr.syn && !hdr.ack && !hdr.from_server)    cls = CLS_SYN;
    else if (hdr.syn && hdr.ack && hdr.from_server) cls = CLS_SYNACK;
    else                                            cls = CLS_OTHER;

    unique case (cls)
      CLS_SYN: begin
        req.opcode = GET_IND_OP;
        req.index0 = alias_idx0;
        req.index1 = alias_idx1;
        req.data   = blob_t'(ts_now);
      end
      CLS_SYNACK: begin
        req.opcode = UPDATE_OP;
        req.index0 = dip;
        req.index1 = '0;
        req.data   = d_stack(fb_g, ts_now, fb_v);
      end
      default: begin
        req.opcode = COPY_OP;
        req.index0 = '0;
        req.index1 = '0;
        req.data   = blob_t'(dip);
      end
    endcase
  end
endmodule
