// lfsr_rng: free-running pseudo-random number source, the Random() of the
// alias method.
//
// A 16-bit maximal-length Galois LFSR (taps 16,14,13,11; polynomial 0xB400)
// that steps every clock cycle; rnd is its low WIDTH bits. SEED sets the
// value loaded by the synchronous active-low reset (must be non-zero), so two
// instances with different seeds give two different sequences. The source
// only says that each candidate draw uses "a random number"; the LFSR is
// this design's choice.
module lfsr_rng #(
  parameter int unsigned WIDTH = 8,
  parameter logic [15:0] SEED  = 16'hACE1
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic [WIDTH-1:0] rnd
);
  logic [15:0] state;

  always_ff @(posedge clk) begin
    if (!rst_n)        state <= SEED;
    else if (state[0]) state <= (state >> 1) ^ 16'hB400;
    else               state <= state >> 1;
  end

  assign rnd = state[WIDTH-1:0];

  a_nonzero: assert property (@(posedge clk) disable iff (!rst_n) state != '0);
endmodule
