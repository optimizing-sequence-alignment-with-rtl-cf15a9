// napoly_ctrl: sequences the two stages of NAPOLY+ operation.
//
// IDLE:   waits for a command. cmd_config enters CONFIG; cmd_run enters RUN
//         and, in the same cycle, pulses `clear` (all STE+ states and scores,
//         the symbol offset and the best match are reset).
// CONFIG: the reconfiguration stage. load_en lets the pattern buffer apply one
//         word per cycle to the array. Once end_of_data has been seen and the
//         pattern buffer is empty, returns to IDLE.
// RUN:    the operation stage. `step` (consume one symbol) is high whenever a
//         symbol is available and the match reporter does not hold; a cycle
//         with a symbol but a hold is a stall. Once end_of_data has been seen,
//         the symbol buffer is empty and no report is pending, pulses `done`
//         and returns to IDLE.
// end_of_data is a pulse from the host after the last word of the current
// stage has been written; it is remembered until the stage ends. The stage
// split follows the paper (a reconfiguration stage, then operation); the
// commands and this handshake are this design's choices.
module napoly_ctrl
  import napoly_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_config,
  input  logic        cmd_run,
  input  logic        end_of_data,
  input  logic        pat_empty,
  input  logic        sym_valid,
  input  logic        rep_hold,
  input  logic        rep_pending,
  output ctrl_state_t state,
  output logic        load_en,
  output logic        step,
  output logic        stall,
  output logic        clear,
  output logic        done
);
  logic eod_q;
  logic leave;

  assign load_en = (state == ST_CONFIG);
  assign step    = (state == ST_RUN) && sym_valid && !rep_hold;
  assign stall   = (state == ST_RUN) && sym_valid && rep_hold;
  assign clear   = (state == ST_IDLE) && !cmd_config && cmd_run;

  always_comb begin
    unique case (state)
      ST_CONFIG: leave = (eod_q || end_of_data) && pat_empty;
      ST_RUN:    leave = (eod_q || end_of_data) && !sym_valid && !rep_pending && !step;
      default:   leave = 1'b0;
    endcase
  end
  assign done = (state == ST_RUN) && leave;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      eod_q <= 1'b0;
    end else begin
      unique case (state)
        ST_IDLE: begin
          eod_q <= end_of_data;
          if (cmd_config)   state <= ST_CONFIG;
          else if (cmd_run) state <= ST_RUN;
        end
        ST_CONFIG, ST_RUN: begin
          if (leave) begin
            state <= ST_IDLE;
            eod_q <= 1'b0;
          end else if (end_of_data) begin
            eod_q <= 1'b1;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  a_step_only_in_run: assert property (@(posedge clk) disable iff (!rst_n) step |-> state == ST_RUN);
  a_no_step_on_hold:  assert property (@(posedge clk) disable iff (!rst_n) rep_hold |-> !step);

endmodule
