// tb_charon_lb: end-to-end test of the load balancer at its default sizes
// (16 servers, 64-entry request queue), with a reference model kept in the
// testbench: its own alias tables, IP table, Score Table and hashes.
//
// Phases:
//  1. Latency burst: 600 packets, one every 16 cycles - 16 packets of
//     established flows (COPY path) then 584 SYNs (full power-of-2 choice).
//     Every packet of a kind must see the same latency, SYN longer.
//  2. Server feedback: SYNACKs from every server (UPDATE path) with light or
//     heavy loads, then an idle stretch so predicted scores decay to zero.
//  3. Back-to-back SYN burst: the request queue fills and in_ready drops.
//  4. Random mix of SYN, SYNACK, established packets, packets without a
//     timestamp option (dropped) and idle gaps.
// Every output is compared with the model. Each mechanism of the design
// (alias vs. entry draw, choice of either candidate, score clamped at zero,
// back-pressure, encapsulation, decapsulation, drop, the three operations)
// is counted, and one that never happens is a failure.
module tb_charon_lb;
  import charon_pkg::*;
  import tb_model_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid;
  pkt_hdr_t in_hdr = '0;
  out_hdr_t out_hdr;
  logic [1:0] cfg_alias_we = '0;
  sid_t cfg_alias_addr = '0, cfg_alias_alias = '0, cfg_ip_addr = '0;
  logic [THR_W-1:0] cfg_alias_thresh = '0;
  logic cfg_ip_we = 0;
  ip_t cfg_ip = '0;
  ip_t cfg_lb_ip = {16'h2001, 16'h0db8, 80'h0, 16'h0001};
  logic [MAC_W-1:0] cfg_lb_mac = 48'h02_00_00_00_00_01, cfg_next_hop_mac = 48'h02_00_00_00_00_fe;

  charon_lb dut (.*);
  always #5 clk = ~clk;

  // ---- bookkeeping ------------------------------------------------------------
  int checks = 0, failures = 0;
  int cyc = 0;
  longint unsigned tcount = 0;         // timestamp model: cycles since reset
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) tcount <= tcount + 1;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // mechanism counters
  int n_syn = 0, n_synack = 0, n_copy = 0, n_alias = 0, n_entry = 0, n_pick0 = 0, n_pick1 = 0;
  int n_clamp = 0, n_stall = 0, n_encap = 0, n_decap = 0, n_drop = 0;

  // ---- reference model ----------------------------------------------------------
  int     thr_m [2][N_SERVERS], ali_m [2][N_SERVERS];
  ip_t    ip_m  [N_SERVERS];
  entry_t sc_m  [N_SERVERS];

  typedef struct {
    out_hdr_t o;
    int       acc_cyc;
    bit       is_syn;
  } exp_t;
  exp_t exp_q[$];

  function automatic logic [31:0] flow_hash(pkt_hdr_t h, logic [31:0] poly);
    byte unsigned m[] = new[37];
    logic [295:0] k = {h.src_ip, h.dst_ip, h.proto, h.sport, h.dport};
    for (int i = 0; i < 37; i++) m[i] = k[295 - 8*i -: 8];
    return crc_bytes(poly, m);
  endfunction

  // Called in the cycle the packet is taken (before the accepting edge).
  task automatic model_packet(input pkt_hdr_t h);
    exp_t e;
    sid_t sid;
    longint unsigned now = (tcount >> 11) & 64'hFFFF_FFFF;
    bit dip_ok = h.ts_present && !(h.syn && !h.ack && !h.from_server);
    sid_t dip = h.from_server ? h.ts_val[31 -: SID_W] : h.ts_ecr[31 -: SID_W];
    e.is_syn = 0;
    if (h.syn && !h.ack && !h.from_server) begin
      int idx[2], rnd[2], cand[2];
      longint unsigned s[2];
      idx[0] = int'(flow_hash(h, 32'h04C1_1DB7) & 32'(N_SERVERS - 1));
      idx[1] = int'(flow_hash(h, 32'h1EDC_6F41) & 32'(N_SERVERS - 1));
      rnd[0] = int'(dut.u_rng0.rnd);
      rnd[1] = int'(dut.u_rng1.rnd);
      for (int t = 0; t < 2; t++) begin
        if (rnd[t] < thr_m[t][idx[t]]) begin cand[t] = idx[t]; n_entry++; end
        else begin cand[t] = ali_m[t][idx[t]]; n_alias++; end
      end
      for (int t = 0; t < 2; t++) begin
        s[t] = model_score(sc_m[cand[t]], now);
        if (s[t] == 0 && sc_m[cand[t]].g != 0) n_clamp++;
      end
      if (s[0] < s[1]) begin sid = sid_t'(cand[0]); s[0] = (s[0] + (1 << 20)) & 64'hFFFF_FFFF; n_pick0++; end
      else             begin sid = sid_t'(cand[1]); s[1] = (s[1] + (1 << 20)) & 64'hFFFF_FFFF; n_pick1++; end
      sc_m[cand[0]].g = s[0]; sc_m[cand[0]].t = now;
      sc_m[cand[1]].g = s[1]; sc_m[cand[1]].t = now;
      e.is_syn = 1;
      n_syn++;
    end else if (h.syn && h.ack && h.from_server) begin
      sc_m[dip].g = {h.gre_key[31:8], 8'h00};
      sc_m[dip].t = now;
      sc_m[dip].v = h.gre_key[7:0];
      sid = dip;
      n_synack++;
    end else begin
      sid = dip;
      n_copy++;
    end
    e.o = '0;
    e.o.hdr = h;
    e.o.server_id = sid;
    e.o.eth_src = cfg_lb_mac;
    e.o.eth_dst = cfg_next_hop_mac;
    if (!h.from_server) begin
      e.o.outer_valid = 1;
      e.o.gre_valid = 1;
      e.o.outer_src = cfg_lb_ip;
      e.o.outer_dst = ip_m[sid];
      e.o.drop = !(h.syn && !h.ack) && !dip_ok;
    end
    e.acc_cyc = cyc;
    exp_q.push_back(e);
  endtask

  // ---- output monitor (falling edge) -------------------------------------------
  int lat_syn[$], lat_other[$];
  exp_t e_out;
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      check(exp_q.size() != 0, "output with no packet pending");
      if (exp_q.size() != 0) begin
        e_out = exp_q.pop_front();
        check(out_hdr == e_out.o, $sformatf("headers: got server %0d dst %h drop %0d, expected server %0d dst %h drop %0d",
              out_hdr.server_id, out_hdr.outer_dst, out_hdr.drop, e_out.o.server_id, e_out.o.outer_dst, e_out.o.drop));
        if (e_out.is_syn) lat_syn.push_back(cyc - e_out.acc_cyc);
        else              lat_other.push_back(cyc - e_out.acc_cyc);
        if (out_hdr.drop) n_drop++;
        else if (out_hdr.outer_valid) n_encap++;
        else n_decap++;
      end
    end
  end

  // ---- drivers ---------------------------------------------------------------------
  task automatic send(input pkt_hdr_t h);
    @(negedge clk);
    in_hdr = h;
    in_valid = 1;
    while (!in_ready) begin n_stall++; @(negedge clk); end
    check(dut.ts_now == ts_t'(tcount >> 11), "timestamp model in step");
    model_packet(h);
    @(posedge clk);
    #1 in_valid = 0;
  endtask

  // A TCP timestamp whose upper SID_W bits hold the server id.
  function automatic logic [31:0] ts_with_id(input int srv);
    logic [31:0] low_mask;
    low_mask = (32'h1 << (32 - SID_W)) - 32'h1;
    return (32'(srv) << (32 - SID_W)) | ($urandom & low_mask);
  endfunction

  function automatic pkt_hdr_t client_pkt(input bit syn, input int srv);
    pkt_hdr_t h = '0;
    h.src_ip = {96'h0, 8'd192, 8'd0, 8'($urandom), 8'($urandom)};
    h.dst_ip = {96'h0, 32'h0a00_0064};                     // VIP
    h.proto  = 8'd6;
    h.sport  = 16'($urandom);
    h.dport  = 16'd80;
    h.syn    = syn;
    h.ack    = !syn;
    h.ts_present = 1;
    h.ts_val = $urandom;
    h.ts_ecr = syn ? 32'h0 : ts_with_id(srv);
    return h;
  endfunction

  function automatic pkt_hdr_t synack_pkt(input int srv, input int g24, input int v);
    pkt_hdr_t h = '0;
    h.from_server = 1;
    h.src_ip = {96'h0, 32'h0a00_0064};
    h.dst_ip = {96'h0, 8'd192, 8'd0, 8'($urandom), 8'($urandom)};
    h.proto  = 8'd6;
    h.sport  = 16'd80;
    h.dport  = 16'($urandom);
    h.syn = 1; h.ack = 1;
    h.ts_present = 1;
    h.ts_val = ts_with_id(srv);
    h.ts_ecr = $urandom;
    h.gre_key = {24'(g24), 8'(v)};
    return h;
  endfunction

  task automatic cfg_alias(input int t, input int a, input int thr, input int al);
    @(negedge clk);
    cfg_alias_we = 2'b01 << t; cfg_alias_addr = sid_t'(a);
    cfg_alias_thresh = THR_W'(thr); cfg_alias_alias = sid_t'(al);
    thr_m[t][a] = thr; ali_m[t][a] = al;
    @(negedge clk);
    cfg_alias_we = '0;
  endtask

  task automatic drain();
    while (exp_q.size() != 0) @(negedge clk);
    repeat (4) @(negedge clk);
  endtask

  // ---- stimulus ----------------------------------------------------------------------
  initial begin
    real w [N_SERVERS], p [N_SERVERS], tot;
    int lo_q[$], hi_q[$];
    for (int i = 0; i < N_SERVERS; i++) begin sc_m[i].g = 0; sc_m[i].t = 0; sc_m[i].v = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // IP Table: server i at 10.1.0.(i+1)
    for (int i = 0; i < N_SERVERS; i++) begin
      @(negedge clk);
      cfg_ip_we = 1; cfg_ip_addr = sid_t'(i); cfg_ip = {96'h0, 8'd10, 8'd1, 8'd0, 8'(i + 1)};
      ip_m[i] = cfg_ip;
      @(negedge clk);
      cfg_ip_we = 0;
    end
    // Alias Tables: servers 0-7 have weight 2, servers 8-15 weight 1
    // (Vose's construction, thresholds in 1/256).
    tot = 0;
    for (int i = 0; i < N_SERVERS; i++) begin w[i] = (i < 8) ? 2.0 : 1.0; tot += w[i]; end
    for (int i = 0; i < N_SERVERS; i++) begin
      p[i] = w[i] * N_SERVERS / tot;
      if (p[i] < 1.0) lo_q.push_back(i); else hi_q.push_back(i);
    end
    while (lo_q.size() > 0 && hi_q.size() > 0) begin
      int s, l;
      s = lo_q.pop_front();
      l = hi_q.pop_front();
      for (int t = 0; t < 2; t++) cfg_alias(t, s, int'(p[s] * 256.0), l);
      p[l] = p[l] + p[s] - 1.0;
      if (p[l] < 1.0) lo_q.push_back(l); else hi_q.push_back(l);
    end
    while (hi_q.size() > 0) begin int l; l = hi_q.pop_front(); for (int t = 0; t < 2; t++) cfg_alias(t, l, 256 - 1, l); end
    while (lo_q.size() > 0) begin int l; l = lo_q.pop_front(); for (int t = 0; t < 2; t++) cfg_alias(t, l, 256 - 1, l); end

    // Phase 1: 600-packet burst, one packet every 16 cycles.
    for (int n = 0; n < 600; n++) begin
      send(client_pkt(n >= 16, n % N_SERVERS));
      repeat (15) @(negedge clk);
    end
    drain();
    check(lat_other.size() == 16 && lat_syn.size() == 584, "burst: 16 + 584 packets out");
    foreach (lat_other[i]) check(lat_other[i] == lat_other[0], "burst: constant latency of established packets");
    foreach (lat_syn[i]) check(lat_syn[i] == lat_syn[0], "burst: constant SYN latency");
    check(lat_other[0] == 4, $sformatf("established packet latency %0d", lat_other[0]));
    check(lat_syn[0] == 11, $sformatf("SYN latency %0d", lat_syn[0]));
    $display("burst latency: established %0d cycles, SYN %0d cycles", lat_other[0], lat_syn[0]);

    // Phase 2: feedback from every server, then decay.
    for (int i = 0; i < N_SERVERS; i++)
      send(synack_pkt(i, (i % 4 == 0) ? 24'h000001 : 24'h000400 * (i + 1), (i % 4 == 0) ? 255 : 1));
    repeat (3 * 2048) @(negedge clk);
    for (int n = 0; n < 100; n++) send(client_pkt(1, 0));
    drain();

    // Phase 3: back-to-back SYNs fill the request queue.
    for (int n = 0; n < 200; n++) send(client_pkt(1, 0));
    drain();

    // Phase 4: random mix.
    for (int n = 0; n < 1500; n++) begin
      int k;
      k = $urandom_range(0, 9);
      if (k < 4)      send(client_pkt(1, 0));
      else if (k < 5) send(synack_pkt($urandom_range(0, 15), $urandom_range(0, 24'h00ffff), $urandom_range(0, 255)));
      else if (k < 9) send(client_pkt(0, $urandom_range(0, 15)));
      else begin
        pkt_hdr_t h;
        h = client_pkt(0, 3);
        h.ts_present = 0;
        send(h);
      end
      if ($urandom_range(0, 9) == 0) repeat ($urandom_range(1, 400)) @(negedge clk);
    end
    drain();

    for (int i = 0; i < N_SERVERS; i++)
      check(dut.u_score.u_bram.mem[i] == pack(sc_m[i]), $sformatf("Score Table entry %0d", i));
    $display("mechanisms: GET_IND_OP %0d, UPDATE_OP %0d, COPY_OP %0d, alias draws %0d, entry draws %0d,",
             n_syn, n_synack, n_copy, n_alias, n_entry);
    $display("            first candidate chosen %0d, second chosen %0d, score clamped at 0 %0d, stall cycles %0d,",
             n_pick0, n_pick1, n_clamp, n_stall);
    $display("            encapsulated %0d, decapsulated %0d, dropped %0d", n_encap, n_decap, n_drop);
    check(n_syn > 0, "GET_IND_OP happened");
    check(n_synack > 0, "UPDATE_OP happened");
    check(n_copy > 0, "COPY_OP happened");
    check(n_alias > 0, "alias draw happened");
    check(n_entry > 0, "entry draw happened");
    check(n_pick0 > 0, "first candidate chosen");
    check(n_pick1 > 0, "second candidate chosen");
    check(n_clamp > 0, "score clamped at zero");
    check(n_stall > 0, "back-pressure happened");
    check(n_encap > 0, "encapsulation happened");
    check(n_decap > 0, "decapsulation happened");
    check(n_drop > 0, "drop happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
