// tb_napoly_plus_full: end-to-end test of the NAPOLY+ core at its default
// size (1024 STE+, fan-out 16, 65536-symbol input buffer). The whole
// configuration chain of all 1024 STE+ is loaded twice. The stimulus and
// checks are in napoly_tb_host.
module tb_napoly_plus_full;
  import napoly_pkg::*;

  logic clk = 0;
  logic rst_n, cmd_config, cmd_run, end_of_data, done, stall, sat_event;
  ctrl_state_t state;
  logic pat_valid, pat_ready, sym_valid, sym_ready, out_valid, out_ready;
  logic best_valid, cfg_out;
  pat_word_t pat_word;
  symbol_t sym_data;
  match_rec_t out_rec, best;

  always #5 clk = ~clk;

  napoly_plus_top dut (.*);

  napoly_tb_host #(.NUM_STE(1024), .FANOUT(16), .WATCHDOG(400000)) host (.*);
endmodule
