// ste_plus: one scored state transition element (STE+) of NAPOLY+.
//
// What it does. The STE+ keeps the behaviour of the plain NAPOLY STE and adds
// a path score. Each step it looks up the current input symbol in its 256 x 1
// symbol RAM. Its state bit is set on the next step when the symbol matches
// and at least one incoming activation is present; otherwise it clears, unless
// the start bit is set (a start STE+ is active at all times). When active it
// drives its FANOUT outgoing activations, each AND-ed with one interconnect
// configuration bit. Alongside, the +/- unit adds the configured edge score
// to the incoming score and the sum is kept in the local score register,
// which is the outgoing score seen by successors.
//
// Scoring rules (this design's reading of the paper):
//   * incoming score = maximum score over the active incoming activations, so
//     the best path into a state survives (Viterbi-style max-plus); the
//     paper draws a single "coming score" input and does not say how
//     several active predecessors are reduced;
//   * the dedicated start fan-in (config bit start_link) is always active and
//     carries score 0: every new symbol may open a new path at score 0;
//   * a start STE+ outputs score 0;
//   * the +/- unit saturates at the score limits instead of wrapping.
//
// Configuration. All configuration registers form one shift register
// (cfg_in -> cfg_out, one bit per cfg_shift). From the chain output end the
// order is: start, accept, route[FANOUT-1:0], start_link, edge_score
// (MSB first). The symbol RAM is written one bit at a time (sym_we).
//
// Interface and timing. in_act[k]/in_score[k] come from predecessors, already
// AND-ed with their configuration bit. On a clock edge with step high the
// state and score registers take their next values; clear empties them.
// out_act, out_score, active and accept are functions of the registers, so a
// result is visible the cycle after the step that produced it. sat_evt flags
// a step in which the adder saturated for an STE+ that becomes active.
module ste_plus
  import napoly_pkg::*;
#(
  parameter int unsigned FANOUT = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration chain
  input  logic              cfg_shift,
  input  logic              cfg_in,
  output logic              cfg_out,
  // symbol RAM write port (from the pattern buffer)
  input  logic              sym_we,
  input  symbol_t           sym_waddr,
  input  logic              sym_wdata,
  // operation
  input  logic              step,
  input  logic              clear,
  input  symbol_t           symbol,
  input  logic [FANOUT-1:0] in_act,
  input  score_t            in_score [FANOUT],
  output logic [FANOUT-1:0] out_act,
  output score_t            out_score,
  output logic              active,
  output logic              accept,
  output logic              sat_evt
);
  localparam int unsigned CFG_W = 2 + FANOUT + 1 + SCORE_W;

  // ---- configuration registers (one shift chain) ----
  logic [CFG_W-1:0] cfg_q;
  logic              start_bit, accept_bit, start_link;
  logic [FANOUT-1:0] route;
  score_t            edge_score;

  assign start_bit  = cfg_q[CFG_W-1];
  assign accept_bit = cfg_q[CFG_W-2];
  assign route      = cfg_q[CFG_W-3 -: FANOUT];
  assign start_link = cfg_q[SCORE_W];
  assign edge_score = score_t'(cfg_q[SCORE_W-1:0]);
  assign cfg_out    = cfg_q[CFG_W-1];

  always_ff @(posedge clk) begin
    if (!rst_n)         cfg_q <= '0;
    else if (cfg_shift) cfg_q <= {cfg_q[CFG_W-2:0], cfg_in};
  end

  // ---- symbol RAM, 256 x 1 ----
  logic sym_ram [NUM_SYMBOLS];
  logic sym_match;

  always_ff @(posedge clk) begin
    if (sym_we) sym_ram[sym_waddr] <= sym_wdata;
  end
  assign sym_match = sym_ram[symbol];

  // ---- fan-in: OR of activations and maximum of their scores ----
  logic   any_in;
  score_t best_in;

  always_comb begin
    any_in  = start_link;
    best_in = start_link ? score_t'(0) : SCORE_MIN;
    for (int k = 0; k < FANOUT; k++) begin
      if (in_act[k]) begin
        if (!any_in || (in_score[k] > best_in)) best_in = in_score[k];
        any_in = 1'b1;
      end
    end
  end

  // ---- next state and +/- unit ----
  logic   state_q, state_d;
  score_t score_q, score_d;

  assign state_d = sym_match && any_in;
  assign score_d = sat_add(best_in, edge_score);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= 1'b0;
      score_q <= '0;
    end else if (clear) begin
      state_q <= 1'b0;
      score_q <= '0;
    end else if (step) begin
      state_q <= state_d;
      score_q <= state_d ? score_d : score_t'(0);
    end
  end

  // ---- outputs ----
  assign active    = state_q || start_bit;
  assign out_score = start_bit ? score_t'(0) : score_q;
  assign out_act   = {FANOUT{active}} & route;
  assign accept    = state_q && accept_bit;
  assign sat_evt   = step && state_d && !start_bit && sat_overflows(best_in, edge_score);

endmodule
