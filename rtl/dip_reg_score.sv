// dip_reg_score: the load-aware core of the load balancer (a P4 extern).
//
// It holds the Score Table - one blob {g, t, v} per server - and serves three
// kinds of request, each {opCode, index0, index1, data}:
//   GET_IND_OP (SYN)    index0/index1 are the two candidates drawn by the alias
//                       method, data[31:0] is ts_now; the result is the id of
//                       the candidate with the lower predicted score, whose
//                       score is then raised by one flow.
//   UPDATE_OP (SYNACK)  data is the feedback blob of server index0; it is
//                       written to the table and also returned as the result.
//   COPY_OP  (others)   data (the server id found in the packet) is returned.
// Following the source's schematic it is a FIFO that stores the inputs, the
// read-modify-write STATE_MACHINE, and a BRAM with the scores, all clocked by
// clk_lookup. Requests are answered in order, one OUTPUT_VALID pulse per
// request; a GET_IND_OP takes 9 cycles of the state machine, the other two
// take 2. The queue holds 64 requests as in the prototype. The reset input
// and the data_in_ready output (queue not full; a request is taken when
// data_in_valid and data_in_ready are both high) are this design's additions:
// the schematic shows only data_in_valid, data_in and clk_lookup in, and
// OUTPUT_VALID and OUTPUT out.
module dip_reg_score
  import charon_pkg::*;
#(
  parameter int unsigned QUEUE_DEPTH = FIFO_DEPTH
) (
  input  logic       clk_lookup,
  input  logic       rst_n,
  input  logic       data_in_valid,
  input  score_req_t data_in,
  output logic       data_in_ready,
  output logic       OUTPUT_VALID,
  output blob_t      OUTPUT,
  output logic       wait_bram       // state machine is in WAIT_BRAM
);
  score_req_t fifo_dout;
  logic       fifo_empty, fifo_full, rd_en_pfifo;
  logic [$clog2(QUEUE_DEPTH+1)-1:0] fifo_count;

  sid_t  d_addr_in_bram;
  blob_t d_data_in_bram, d_data_out_bram;
  logic  d_we_bram;

  assign data_in_ready = !fifo_full;

  sync_fifo #(.WIDTH($bits(score_req_t)), .DEPTH(QUEUE_DEPTH)) u_fifo (
    .clk   (clk_lookup),
    .rst_n (rst_n),
    .wr_en (data_in_valid && !fifo_full),
    .din   (data_in),
    .rd_en (rd_en_pfifo),
    .dout  (fifo_dout),
    .empty (fifo_empty),
    .full  (fifo_full),
    .count (fifo_count)
  );

  rmw_state_machine u_sm (
    .clk            (clk_lookup),
    .rst_n          (rst_n),
    .fifo_empty     (fifo_empty),
    .fifo_dout      (fifo_dout),
    .fifo_rd_en     (rd_en_pfifo),
    .bram_addr      (d_addr_in_bram),
    .bram_din       (d_data_in_bram),
    .bram_we        (d_we_bram),
    .bram_dout      (d_data_out_bram),
    .result_valid_r (OUTPUT_VALID),
    .result_r       (OUTPUT),
    .wait_bram      (wait_bram)
  );

  score_bram #(.DEPTH(N_SERVERS), .WIDTH(BLOB_W)) u_bram (
    .clk  (clk_lookup),
    .we   (d_we_bram),
    .addr (d_addr_in_bram),
    .din  (d_data_in_bram),
    .dout (d_data_out_bram)
  );
endmodule
