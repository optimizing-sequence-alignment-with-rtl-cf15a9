// tb_napoly_ctrl: self-checking test of the NAPOLY+ controller.
//
// Drives random commands, end_of_data pulses, buffer flags and reporter
// flags, and compares every output with a cycle model of the two stages:
// CONFIG (load_en until end_of_data has been seen and the pattern buffer is
// empty) and RUN (step = symbol available and no hold, stall = symbol
// available and hold; done when end_of_data has been seen, no symbol and no
// report is left). clear must pulse exactly in the cycle that starts a run.
module tb_napoly_ctrl;
  import napoly_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cmd_config = 0, cmd_run = 0, end_of_data = 0;
  logic pat_empty = 1, sym_valid = 0, rep_hold = 0, rep_pending = 0;
  ctrl_state_t state;
  logic load_en, step, stall, clear, done;

  int checks = 0, failures = 0;
  int n_cfg = 0, n_run = 0, n_done = 0, n_stall = 0, n_step = 0;

  napoly_ctrl dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    ctrl_state_t m_st;
    bit m_eod;
    m_st = ST_IDLE; m_eod = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int it = 0; it < 20000; it++) begin
      bit e_load, e_step, e_stall, e_clear, e_done, leave, eod;
      #1;
      cmd_config  = ($urandom % 40) == 0;
      cmd_run     = ($urandom % 40) == 0;
      end_of_data = ($urandom % 30) == 0;
      pat_empty   = ($urandom % 3) == 0;
      sym_valid   = ($urandom % 4) != 0;
      rep_hold    = ($urandom % 3) == 0;
      rep_pending = rep_hold || (($urandom % 3) == 0);
      #1;
      eod     = m_eod || end_of_data;
      e_load  = m_st == ST_CONFIG;
      e_step  = m_st == ST_RUN && sym_valid && !rep_hold;
      e_stall = m_st == ST_RUN && sym_valid && rep_hold;
      e_clear = m_st == ST_IDLE && !cmd_config && cmd_run;
      leave   = (m_st == ST_CONFIG && eod && pat_empty) ||
                (m_st == ST_RUN && eod && !sym_valid && !rep_pending);
      e_done  = m_st == ST_RUN && leave;
      check(state == m_st, "state");
      check(load_en == e_load, "load_en");
      check(step == e_step, "step");
      check(stall == e_stall, "stall");
      check(clear == e_clear, "clear");
      check(done == e_done, "done");
      if (e_done) n_done++;
      if (e_stall) n_stall++;
      if (e_step) n_step++;
      @(posedge clk);
      case (m_st)
        ST_IDLE: begin
          m_eod = end_of_data;
          if (cmd_config) begin m_st = ST_CONFIG; n_cfg++; end
          else if (cmd_run) begin m_st = ST_RUN; n_run++; end
        end
        default: begin
          if (leave) begin m_st = ST_IDLE; m_eod = 0; end
          else if (end_of_data) m_eod = 1;
        end
      endcase
    end
    check(n_cfg > 10 && n_run > 10 && n_done > 10 && n_stall > 10, "coverage");
    $display("configs %0d runs %0d done %0d steps %0d stalls %0d", n_cfg, n_run, n_done, n_step, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
