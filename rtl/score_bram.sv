// score_bram: the Score Table memory of dip_reg_score (one blob per server).
//
// Single-port block RAM with a write enable and a read latency of two clock
// cycles: the address is registered at the first edge and the read data at
// the second, so the word addressed in cycle n is on dout in cycle n+2. This
// matches the source's statement that each read takes 2 clocks and the
// state machine, which captures a blob two states after presenting its
// address. A write (we=1) stores din at addr at the clock edge; a read of the
// same address in that cycle returns the old word (read-first). The table
// starts all zero (g=0, t=0, v=0), as an FPGA block RAM does after
// configuration; the table has no reset, as block RAMs have none. Depth
// and width follow the prototype (16 servers, 72-bit blob); the port names
// d_addr_in_bram, d_data_in_bram, d_we_bram and d_data_out_bram of the source
// are the caller's signal names.
module score_bram #(
  parameter int unsigned DEPTH = charon_pkg::N_SERVERS,
  parameter int unsigned WIDTH = charon_pkg::BLOB_W
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         din,
  output logic [WIDTH-1:0]         dout
);
  logic [WIDTH-1:0]         mem [DEPTH];
  logic [WIDTH-1:0]         rd_q;

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  // Stage 1: registered address, read-first data read.
  always_ff @(posedge clk) begin
    if (we) mem[addr] <= din;
    rd_q <= mem[addr];
  end

  // Stage 2: output register.
  always_ff @(posedge clk) begin
    dout   <= rd_q;
  end
endmodule
