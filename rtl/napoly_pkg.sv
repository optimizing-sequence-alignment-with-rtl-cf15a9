// napoly_pkg: widths, record types and the saturating score adder shared by
// the NAPOLY+ blocks.
//
// NAPOLY+ is a scored NFA overlay: every state transition element (STE+)
// carries a symbol class, a state bit and a local path score. The constants
// here fix the widths that cross block boundaries:
//   * symbols are 8 bits, so each STE+ symbol RAM is 256 x 1 (the STE of the
//     original NAPOLY overlay is drawn with a 256x1 symbol memory);
//   * scores are 16-bit two's complement (a design choice; no width is given);
//   * STE ids are 16 bits, enough for the largest array evaluated (64K);
//   * symbol offsets are 32 bits (a design choice).
// Pattern-buffer words come in two kinds: a write of one symbol-RAM bit of one
// STE+, or one bit shifted into the configuration chain of the array.
package napoly_pkg;

  localparam int unsigned SYM_W       = 8;
  localparam int unsigned NUM_SYMBOLS = 1 << SYM_W;
  localparam int unsigned SCORE_W     = 16;
  localparam int unsigned STE_ID_W    = 16;
  localparam int unsigned OFFSET_W    = 32;

  typedef logic [SYM_W-1:0]           symbol_t;
  typedef logic signed [SCORE_W-1:0]  score_t;
  typedef logic [STE_ID_W-1:0]        ste_id_t;
  typedef logic [OFFSET_W-1:0]        offset_t;

  localparam score_t SCORE_MAX = score_t'({1'b0, {(SCORE_W-1){1'b1}}});
  localparam score_t SCORE_MIN = score_t'({1'b1, {(SCORE_W-1){1'b0}}});

  // Kind of a pattern-buffer word.
  typedef enum logic {
    PW_SYMBOL = 1'b0,   // write sym_ram[symbol] of STE+ ste_id with value bit_val
    PW_CONFIG = 1'b1    // shift bit_val into the configuration chain
  } pat_kind_t;

  typedef struct packed {
    pat_kind_t kind;
    ste_id_t   ste_id;
    symbol_t   symbol;
    logic      bit_val;
  } pat_word_t;

  // One report: an accepting STE+ became active after the symbol at `offset`
  // with accumulated path score `score`.
  typedef struct packed {
    ste_id_t ste_id;
    offset_t offset;
    score_t  score;
  } match_rec_t;

  // Controller phases.
  typedef enum logic [1:0] {
    ST_IDLE   = 2'd0,
    ST_CONFIG = 2'd1,
    ST_RUN    = 2'd2
  } ctrl_state_t;

  // Saturating signed addition: the +/- unit of an STE+ never wraps.
  function automatic score_t sat_add(score_t a, score_t b);
    logic signed [SCORE_W:0] s;
    s = {a[SCORE_W-1], a} + {b[SCORE_W-1], b};
    if (s > $signed({1'b0, SCORE_MAX}))      return SCORE_MAX;
    else if (s < $signed({1'b1, SCORE_MIN})) return SCORE_MIN;
    else                                     return score_t'(s);
  endfunction

  function automatic logic sat_overflows(score_t a, score_t b);
    logic signed [SCORE_W:0] s;
    s = {a[SCORE_W-1], a} + {b[SCORE_W-1], b};
    return (s > $signed({1'b0, SCORE_MAX})) || (s < $signed({1'b1, SCORE_MIN}));
  endfunction

endpackage
