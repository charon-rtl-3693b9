// ip_table: server id -> server IP address (the IP Table).
//
// One IP_W-bit address per server id; the control plane writes an entry
// per clock through cfg_we/cfg_addr/cfg_ip (synchronous write), and the
// match-action stage reads the address of a server id combinationally
// (ip follows sid in the same cycle). The table is a plain register array
// indexed by the id, which is the whole function the source gives; IPv4
// addresses are held in the low 32 bits. Entries reset to zero.
module ip_table
  import charon_pkg::*;
#(
  parameter int unsigned DEPTH = N_SERVERS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic cfg_we,
  input  sid_t cfg_addr,
  input  ip_t  cfg_ip,
  input  sid_t sid,
  output ip_t  ip
);
  ip_t table_q [DEPTH];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) table_q[i] <= '0;
    end else if (cfg_we) begin
      table_q[cfg_addr] <= cfg_ip;
    end
  end

  assign ip = table_q[sid];
endmodule
