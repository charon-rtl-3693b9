// rmw_state_machine: the read-modify-write controller of dip_reg_score.
//
// It takes one request at a time from the input queue and executes it on the
// Score Table block RAM:
//   COPY_OP    - the request's data is copied to the result (2 cycles).
//   UPDATE_OP  - data (a blob {g,t,v} built from a server's SYNACK feedback)
//                is written at index0 and also copied to the result (2 cycles).
//   GET_IND_OP - the blobs of candidates index0 and index1 are read (2 clocks
//                each), both predicted scores g' = max(0, g - v*(ts_now - t))
//                are computed with ts_now = data, the candidate with the lower
//                score (index1 on a tie) gets one flow, 1<<20, added to its
//                score, both scores are written back with t = ts_now, and the
//                chosen index is the result (9 cycles).
// The two top-level states RMW_START and WAIT_BRAM and their sub-states
// (READ_FIFO, UPDATE_OP, COPY_OP, GET_IND_OP_1..4 in RMW_START and
// GET_IND_OP_0..3 in WAIT_BRAM), the actions of each sub-state and the 1<<20
// increment are those of the source's state-machine figure. The figure's
// get_score has no max(0, ...), the text does; the clamp is kept. This design
// merges the figure's ind_op / able_read counters into one enumerated
// sub-state, and stays in READ_FIFO while the queue is empty instead of
// popping unconditionally.
//
// Interface: the queue is first-word-fall-through (fifo_empty, fifo_dout,
// fifo_rd_en pops); the block RAM has a 2-cycle read latency (bram_addr,
// bram_din, bram_we, bram_dout). result_valid_r is a one-cycle pulse with
// result_r, registered, one cycle after the last sub-state of an operation.
// Reset is synchronous and active low; while it is held the block neither
// pops the queue nor writes the RAM.
module rmw_state_machine
  import charon_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // input queue
  input  logic       fifo_empty,
  input  score_req_t fifo_dout,
  output logic       fifo_rd_en,
  // Score Table block RAM
  output sid_t       bram_addr,
  output blob_t      bram_din,
  output logic       bram_we,
  input  blob_t      bram_dout,
  // result
  output logic       result_valid_r,
  output blob_t      result_r,
  // observation
  output logic       wait_bram       // 1 while in the WAIT_BRAM top-level state
);

  typedef enum logic [3:0] {
    S_READ_FIFO,          // RMW_START
    S_UPDATE_OP,
    S_COPY_OP,
    S_GET_IND_1,
    S_GET_IND_2,
    S_GET_IND_3,
    S_GET_IND_4,
    S_WAIT_0,             // WAIT_BRAM
    S_WAIT_1,
    S_WAIT_2,
    S_WAIT_3
  } sub_state_e;

  sub_state_e state, state_next;

  // request registers (index0, index1, data of the figure; the opCode only
  // selects the next sub-state, so it is not kept)
  sid_t    index0, index1;
  blob_t   data;
  // working registers
  blob_t   blob0, blob1;
  score_t  score0, score1;
  ts_t     ts_now;
  sid_t    index_chosen;
  sid_t    addr_r;                     // d_addr_in_bram_r: held address

  assign wait_bram = (state inside {S_WAIT_0, S_WAIT_1, S_WAIT_2, S_WAIT_3});

  // ---- combinational outputs and next state --------------------------------
  always_comb begin
    state_next = state;
    fifo_rd_en = 1'b0;
    bram_we    = 1'b0;
    bram_addr  = addr_r;
    bram_din   = d_stack(score0, ts_now, blob_v(blob0));
    unique case (state)
      S_READ_FIFO: begin
        if (!fifo_empty) begin
          fifo_rd_en = 1'b1;
          unique case (fifo_dout.opcode)
            UPDATE_OP:  state_next = S_UPDATE_OP;
            GET_IND_OP: state_next = S_GET_IND_1;
            default:    state_next = S_COPY_OP;
          endcase
        end
      end
      S_UPDATE_OP: begin
        bram_we    = 1'b1;
        bram_addr  = index0;
        bram_din   = data;
        state_next = S_READ_FIFO;
      end
      S_COPY_OP:   state_next = S_READ_FIFO;
      S_GET_IND_1: begin
        bram_addr  = index0;
        state_next = S_GET_IND_2;
      end
      S_GET_IND_2: state_next = S_GET_IND_3;
      S_GET_IND_3: begin
        bram_addr  = index1;
        state_next = S_GET_IND_4;
      end
      S_GET_IND_4: state_next = S_WAIT_0;
      S_WAIT_0:    state_next = S_WAIT_1;
      S_WAIT_1:    state_next = S_WAIT_2;
      S_WAIT_2: begin
        bram_we    = 1'b1;
        bram_addr  = index0;
        bram_din   = d_stack(score0, ts_now, blob_v(blob0));
        state_next = S_WAIT_3;
      end
      S_WAIT_3: begin
        bram_we    = 1'b1;
        bram_addr  = index1;
        bram_din   = d_stack(score1, ts_now, blob_v(blob1));
        state_next = S_READ_FIFO;
      end
      default:     state_next = S_READ_FIFO;
    endcase
    // No queue read and no RAM write while reset is held, whatever the
    // state register powered up as.
    if (!rst_n) begin
      fifo_rd_en = 1'b0;
      bram_we    = 1'b0;
    end
  end

  // ---- registers ---------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state          <= S_READ_FIFO;
      result_valid_r <= 1'b0;
      result_r       <= '0;
      addr_r         <= '0;
      index0         <= '0;
      index1         <= '0;
      data           <= '0;
      blob0          <= '0;
      blob1          <= '0;
      score0         <= '0;
      score1         <= '0;
      ts_now         <= '0;
      index_chosen   <= '0;
    end else begin
      state          <= state_next;
      result_valid_r <= 1'b0;
      addr_r         <= bram_addr;
      unique case (state)
        S_READ_FIFO: if (!fifo_empty) begin
          index0  <= fifo_dout.index0;
          index1  <= fifo_dout.index1;
          data    <= fifo_dout.data;
        end
        S_UPDATE_OP, S_COPY_OP: begin
          result_r       <= data;
          result_valid_r <= 1'b1;
        end
        S_GET_IND_3: begin
          blob0  <= bram_dout;
          ts_now <= data[T_W-1:0];
        end
        S_WAIT_0: begin
          score0 <= get_score(blob0, ts_now);
          score1 <= get_score(bram_dout, ts_now);
          blob1  <= bram_dout;
        end
        S_WAIT_1: begin
          if (score0 < score1) begin
            score0       <= score0 + (score_t'(1) << UNIT_SHIFT);
            index_chosen <= index0;
          end else begin
            score1       <= score1 + (score_t'(1) << UNIT_SHIFT);
            index_chosen <= index1;
          end
        end
        S_WAIT_3: begin
          result_r       <= blob_t'(index_chosen);
          result_valid_r <= 1'b1;
        end
        default: ;
      endcase
    end
  end

  // A GET_IND_OP always reaches WAIT_BRAM four cycles after leaving READ_FIFO.
  a_get_ind_len: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_GET_IND_1) |-> ##4 (state == S_WAIT_0));
endmodule
