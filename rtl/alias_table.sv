// alias_table: one Alias Table with its alias-method sampler.
//
// Each of the N_SERVERS entries holds a threshold and an alias (another
// server id). Given an entry index idx (from a 5-tuple hash) and a random
// number rnd, the sampled candidate is idx itself when rnd < threshold[idx]
// and alias[idx] otherwise. Filled by the control plane with Vose's alias
// construction from server weights, this draws server i with probability
// proportional to its weight. The source states the rule twice: the text
// says "If the random number is bigger than the threshold, the output ... is
// the alias, otherwise the entry index" and its example says "x1 >= 9" gives
// the alias; the example's form (rnd >= threshold selects the alias) is
// followed. Threshold and random number are THR_W = 8 bits here (a
// probability of threshold/256), a choice of this design.
//
// The table is written one entry per clock through the cfg_* port (synchronous
// write, the control plane's path). The lookup is combinational: cand follows
// idx and rnd in the same cycle. Entries reset to threshold 0 / alias 0.
module alias_table
  import charon_pkg::*;
#(
  parameter int unsigned DEPTH = N_SERVERS
) (
  input  logic             clk,
  input  logic             rst_n,
  // control-plane write
  input  logic             cfg_we,
  input  sid_t             cfg_addr,
  input  logic [THR_W-1:0] cfg_thresh,
  input  sid_t             cfg_alias,
  // lookup
  input  sid_t             idx,
  input  logic [THR_W-1:0] rnd,
  output sid_t             cand,
  output logic             took_alias
);
  logic [THR_W-1:0] thresh_q [DEPTH];
  sid_t             alias_q  [DEPTH];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) begin
        thresh_q[i] <= '0;
        alias_q[i]  <= '0;
      end
    end else if (cfg_we) begin
      thresh_q[cfg_addr] <= cfg_thresh;
      alias_q[cfg_addr]  <= cfg_alias;
    end
  end

  always_comb begin
    took_alias = (rnd >= thresh_q[idx]);
    cand       = took_alias ? alias_q[idx] : idx;
  end
endmodule
