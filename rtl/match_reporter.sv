// match_reporter: turns the accept vector of the STE+ array into match records.
//
// After every step the accepting STE+ that became active must be reported as
// {STE id, input symbol offset, score} records to the score/match buffer.
// Several may accept after the same symbol, so the reporter walks the accept
// vector with a priority encoder, lowest STE id first, one record per cycle.
//
// Timing. `step` marks a cycle in which the array consumes a symbol and
// step_offset is that symbol's offset; the vector it produces is visible the
// next cycle, and from then on it is "new" until every set bit has been sent.
// A record is sent (rec_valid && rec_ready) combinationally from the live
// accept vector and scores. `hold` tells the controller not to step: it is
// high while, after this cycle, bits would still be left to send (two or more
// left, or one left that the buffer cannot take). With zero or one accepting
// STE+ per symbol the array therefore runs one symbol per cycle; each further
// record costs one stall cycle. The stall is this design's choice: the paper
// says only that ids, offsets and scores are flushed to an output buffer.
// STE ids are 16 bits wide; for arrays smaller than 64K the upper id bits of
// a record are always zero.
module match_reporter
  import napoly_pkg::*;
#(
  parameter int unsigned NUM_STE = 1024
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               step,
  input  offset_t            step_offset,
  input  logic [NUM_STE-1:0] accept_vec,
  input  score_t             score_vec [NUM_STE],
  output logic               rec_valid,
  output match_rec_t         rec,
  input  logic               rec_ready,
  output logic               hold
);
  logic               vec_new;
  logic [NUM_STE-1:0] done_mask, remaining;
  offset_t            off_q;
  localparam int unsigned IDX_W = (NUM_STE > 1) ? $clog2(NUM_STE) : 1;

  logic               multi, push;
  logic [IDX_W-1:0]   first;

  assign remaining = vec_new ? (accept_vec & ~done_mask) : '0;
  assign multi     = |(remaining & (remaining - 1'b1));
  assign rec_valid = |remaining;
  assign push      = rec_valid && rec_ready;
  assign hold      = multi || (rec_valid && !rec_ready);

  always_comb begin
    first = '0;
    for (int i = int'(NUM_STE) - 1; i >= 0; i--) begin
      if (remaining[i]) first = IDX_W'(i);
    end
  end

  assign rec.ste_id = ste_id_t'(first);
  assign rec.offset = off_q;
  assign rec.score  = score_vec[first];

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      vec_new   <= 1'b0;
      done_mask <= '0;
      off_q     <= '0;
    end else if (step) begin
      vec_new   <= 1'b1;
      done_mask <= '0;
      off_q     <= step_offset;
    end else if (push) begin
      done_mask[first] <= 1'b1;
      if (!multi) vec_new <= 1'b0;
    end else if (!rec_valid) begin
      vec_new <= 1'b0;
    end
  end

  a_no_step_on_hold: assert property (@(posedge clk) disable iff (!rst_n) hold |-> !step);

endmodule
