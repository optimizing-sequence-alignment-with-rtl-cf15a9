// tb_napoly_plus_top: end-to-end test of the NAPOLY+ core at reduced size
// (64 STE+, fan-out 16, small buffers so that the output buffer fills).
// The stimulus and checks are in napoly_tb_host.
module tb_napoly_plus_top;
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

  napoly_plus_top #(
    .NUM_STE(64), .FANOUT(16), .PAT_BUF_DEPTH(64), .SYM_BUF_DEPTH(512), .OUT_BUF_DEPTH(4)
  ) dut (.*);

  napoly_tb_host #(.NUM_STE(64), .FANOUT(16), .WATCHDOG(200000)) host (.*);
endmodule
