// napoly_plus_top: the NAPOLY+ core, a scored-NFA processor for sequence
// alignment.
//
// Structure (left to right in the data flow):
//   DRAM ports -> pattern_buffer -> configuration chain / symbol RAMs of
//   ste_array; DRAM ports -> symbol_buffer -> symbol broadcast to ste_array;
//   ste_array accept vector and scores -> match_reporter -> score_match_buffer
//   -> DRAM ports. napoly_ctrl sequences the reconfiguration stage (CONFIG)
//   and the operation stage (RUN).
// The DRAM itself is outside this core: its three streams are the ports
// pat_*, sym_* and out_*.
//
// Use: write pattern words, pulse cmd_config and then end_of_data after the
// last word; when state is back to IDLE, write symbols, pulse cmd_run and then
// end_of_data after the last symbol. During RUN one symbol is consumed per
// cycle except in stall cycles (more than one accepting STE+ after a symbol).
// Every accepting STE+ that becomes active yields one {ste_id, offset, score}
// record on out_*; best/best_valid hold the highest-scoring record of the run.
// done pulses when the run is over and all its records are in the buffer.
module napoly_plus_top
  import napoly_pkg::*;
#(
  parameter int unsigned NUM_STE       = 1024,
  parameter int unsigned FANOUT        = 16,
  parameter int unsigned PAT_BUF_DEPTH = 1024,
  parameter int unsigned SYM_BUF_DEPTH = 65536,
  parameter int unsigned OUT_BUF_DEPTH = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  // host commands and status
  input  logic        cmd_config,
  input  logic        cmd_run,
  input  logic        end_of_data,
  output ctrl_state_t state,
  output logic        done,
  output logic        stall,      // RUN cycle held for pending reports
  output logic        sat_event,  // some STE+ score saturated this step
  // pattern stream from DRAM
  input  logic        pat_valid,
  input  pat_word_t   pat_word,
  output logic        pat_ready,
  // symbol stream from DRAM
  input  logic        sym_valid,
  input  symbol_t     sym_data,
  output logic        sym_ready,
  // match records to DRAM
  output logic        out_valid,
  output match_rec_t  out_rec,
  input  logic        out_ready,
  // best match of the current run
  output logic        best_valid,
  output match_rec_t  best,
  // configuration chain end (read-back)
  output logic        cfg_out
);
  // pattern buffer -> array
  logic    load_en, arr_sym_we, arr_sym_bit, cfg_shift, cfg_bit, pat_empty;
  ste_id_t arr_sym_ste;
  symbol_t arr_sym_addr;
  // symbol buffer -> array
  logic    head_valid, step, clear;
  symbol_t symbol;
  offset_t offset;
  // array -> reporter
  logic [NUM_STE-1:0] accept_vec, active_vec;
  score_t             score_vec [NUM_STE];
  // reporter -> buffer
  logic       rec_valid, rec_ready, rep_hold;
  match_rec_t rec;

  pattern_buffer #(.DEPTH(PAT_BUF_DEPTH)) u_pat_buf (
    .clk       (clk),
    .rst_n     (rst_n),
    .wr_valid  (pat_valid),
    .wr_word   (pat_word),
    .wr_ready  (pat_ready),
    .load_en   (load_en),
    .sym_we    (arr_sym_we),
    .sym_ste   (arr_sym_ste),
    .sym_addr  (arr_sym_addr),
    .sym_bit   (arr_sym_bit),
    .cfg_shift (cfg_shift),
    .cfg_bit   (cfg_bit),
    .empty     (pat_empty)
  );

  symbol_buffer #(.DEPTH(SYM_BUF_DEPTH)) u_sym_buf (
    .clk          (clk),
    .rst_n        (rst_n),
    .wr_valid     (sym_valid),
    .wr_sym       (sym_data),
    .wr_ready     (sym_ready),
    .step         (step),
    .clear_offset (clear),
    .sym_valid    (head_valid),
    .symbol       (symbol),
    .offset       (offset)
  );

  ste_array #(.NUM_STE(NUM_STE), .FANOUT(FANOUT)) u_array (
    .clk        (clk),
    .rst_n      (rst_n),
    .cfg_shift  (cfg_shift),
    .cfg_in     (cfg_bit),
    .cfg_out    (cfg_out),
    .sym_we     (arr_sym_we),
    .sym_ste    (arr_sym_ste),
    .sym_waddr  (arr_sym_addr),
    .sym_wdata  (arr_sym_bit),
    .step       (step),
    .clear      (clear),
    .symbol     (symbol),
    .accept_vec (accept_vec),
    .active_vec (active_vec),
    .score_vec  (score_vec),
    .sat_any    (sat_event)
  );

  match_reporter #(.NUM_STE(NUM_STE)) u_reporter (
    .clk         (clk),
    .rst_n       (rst_n),
    .clear       (clear),
    .step        (step),
    .step_offset (offset),
    .accept_vec  (accept_vec),
    .score_vec   (score_vec),
    .rec_valid   (rec_valid),
    .rec         (rec),
    .rec_ready   (rec_ready),
    .hold        (rep_hold)
  );

  score_match_buffer #(.DEPTH(OUT_BUF_DEPTH)) u_out_buf (
    .clk        (clk),
    .rst_n      (rst_n),
    .clear      (clear),
    .in_valid   (rec_valid),
    .in_rec     (rec),
    .in_ready   (rec_ready),
    .out_valid  (out_valid),
    .out_rec    (out_rec),
    .out_ready  (out_ready),
    .best_valid (best_valid),
    .best       (best)
  );

  napoly_ctrl u_ctrl (
    .clk         (clk),
    .rst_n       (rst_n),
    .cmd_config  (cmd_config),
    .cmd_run     (cmd_run),
    .end_of_data (end_of_data),
    .pat_empty   (pat_empty),
    .sym_valid   (head_valid),
    .rep_hold    (rep_hold),
    .rep_pending (rec_valid),
    .state       (state),
    .load_en     (load_en),
    .step        (step),
    .stall       (stall),
    .clear       (clear),
    .done        (done)
  );

endmodule
