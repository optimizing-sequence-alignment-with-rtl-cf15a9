// pattern_buffer: buffer between DRAM and the STE+ array for the pattern set.
//
// The pattern set reaches the array as a stream of pattern words (see
// napoly_pkg::pat_word_t). The DRAM side writes words with a valid/ready
// handshake; they are queued in a DEPTH-entry FIFO. While load_en is high
// (the reconfiguration stage) one word per cycle is taken from the head and
// decoded, in the same cycle, into either a symbol-RAM write of one STE+
// (sym_we, sym_ste, sym_addr, sym_bit) or a one-bit shift of the array's
// configuration chain (cfg_shift, cfg_bit). The word format and the FIFO
// depth are this design's choices; the paper only says that pattern sets are
// held in a buffer that feeds the STE+ array.
module pattern_buffer
  import napoly_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic      clk,
  input  logic      rst_n,
  // DRAM side
  input  logic      wr_valid,
  input  pat_word_t wr_word,
  output logic      wr_ready,
  // array side
  input  logic      load_en,
  output logic      sym_we,
  output ste_id_t   sym_ste,
  output symbol_t   sym_addr,
  output logic      sym_bit,
  output logic      cfg_shift,
  output logic      cfg_bit,
  output logic      empty
);
  pat_word_t head;
  logic      full, pop;

  assign wr_ready = !full;
  assign pop      = load_en && !empty;

  napoly_fifo #(.T(pat_word_t), .DEPTH(DEPTH)) u_fifo (
    .clk   (clk),
    .rst_n (rst_n),
    .clear (1'b0),
    .push  (wr_valid && !full),
    .wdata (wr_word),
    .full  (full),
    .pop   (pop),
    .rdata (head),
    .empty (empty)
  );

  assign sym_we    = pop && (head.kind == PW_SYMBOL);
  assign sym_ste   = head.ste_id;
  assign sym_addr  = head.symbol;
  assign sym_bit   = head.bit_val;
  assign cfg_shift = pop && (head.kind == PW_CONFIG);
  assign cfg_bit   = head.bit_val;

endmodule
