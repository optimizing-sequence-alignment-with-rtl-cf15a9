// score_match_buffer: output buffer of match records, plus the best match.
//
// Match records from the reporter enter a DEPTH-entry FIFO (valid/ready on
// both sides); the DRAM side drains it. While records pass in, the buffer
// keeps the record with the highest score seen since the last clear
// (best_valid, best); on equal scores the earlier record stays. This is how
// the design names the best alignment: the highest-scoring accepting path.
// The FIFO depth is this design's choice.
module score_match_buffer
  import napoly_pkg::*;
#(
  parameter int unsigned DEPTH = 256
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  // from the match reporter
  input  logic       in_valid,
  input  match_rec_t in_rec,
  output logic       in_ready,
  // DRAM side
  output logic       out_valid,
  output match_rec_t out_rec,
  input  logic       out_ready,
  // best match
  output logic       best_valid,
  output match_rec_t best
);
  logic full, empty, push;

  assign in_ready  = !full;
  assign push      = in_valid && !full;
  assign out_valid = !empty;

  napoly_fifo #(.T(match_rec_t), .DEPTH(DEPTH)) u_fifo (
    .clk   (clk),
    .rst_n (rst_n),
    .clear (1'b0),
    .push  (push),
    .wdata (in_rec),
    .full  (full),
    .pop   (out_valid && out_ready),
    .rdata (out_rec),
    .empty (empty)
  );

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      best_valid <= 1'b0;
      best       <= '0;
    end else if (push && (!best_valid || (in_rec.score > best.score))) begin
      best_valid <= 1'b1;
      best       <= in_rec;
    end
  end

endmodule
