// sync_fifo: single-clock first-word-fall-through queue.
//
// Used as the input queue of dip_reg_score, where it stores the requests
// {opCode, index0, index1, data} until the state machine reads them; the
// prototype's queue holds 64 entries. The head entry is always visible on
// dout while empty is low; rd_en pops it at the next clock edge. wr_en pushes
// din at the clock edge. A push and a pop may happen in the same cycle. The
// queue is a plain array with read and write pointers and an occupancy count;
// that structure, the first-word-fall-through behaviour and the synchronous
// active-low reset are this design's choices (the source gives only the
// queue's function and depth). Writing when full or reading when empty is a
// protocol error, flagged by assertions and ignored by the logic.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         din,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         dout,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;

  wire do_wr = wr_en && !full;
  wire do_rd = rd_en && !empty;

  assign empty = (count == '0);
  assign full  = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign dout  = mem[rd_ptr];

  function automatic logic [AW-1:0] incr(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= incr(wr_ptr);
      if (do_rd) rd_ptr <= incr(rd_ptr);
      case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // Handshake rules: never push into a full queue, never pop an empty one.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty);
endmodule
