// ste_array: the NAPOLY+ array of NUM_STE scored STEs and their interconnect.
//
// STEs are numbered 0..NUM_STE-1 in one dimension (the two-dimensional
// placement of the chip does not change the logic). STE m drives FANOUT
// point-to-point links; link k of STE m reaches STE m - floor((FANOUT-1)/2) + k,
// so an STE reaches itself and FANOUT-1 neighbours, n-floor((f-1)/2) to
// n+floor(f/2), as in NAPOLY. Links that would leave the array are unused.
// Each link carries an activation bit and the source's outgoing score.
// Besides these local links, every STE+ has a dedicated start fan-in, enabled
// by its start_link configuration bit (the connection of every STE+ to the
// start STE+); it is internal to each STE+ because the start is always active.
//
// The input symbol, step and clear are broadcast on global wires. The
// configuration chain runs from cfg_in through STE 0, STE 1, ... to cfg_out,
// so the bits for the highest-numbered STE are shifted in first. A symbol-RAM
// write (sym_we, sym_ste) is decoded to the one addressed STE.
//
// Outputs: accept_vec and score_vec give each STE's accept output and score
// register (valid the cycle after a step); active_vec shows the active STEs;
// sat_any is high during a step in which any STE+ adder saturated.
module ste_array
  import napoly_pkg::*;
#(
  parameter int unsigned NUM_STE = 1024,
  parameter int unsigned FANOUT  = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_shift,
  input  logic               cfg_in,
  output logic               cfg_out,
  input  logic               sym_we,
  input  ste_id_t            sym_ste,
  input  symbol_t            sym_waddr,
  input  logic               sym_wdata,
  input  logic               step,
  input  logic               clear,
  input  symbol_t            symbol,
  output logic [NUM_STE-1:0] accept_vec,
  output logic [NUM_STE-1:0] active_vec,
  output score_t             score_vec [NUM_STE],
  output logic               sat_any
);
  localparam int LO = (int'(FANOUT) - 1) / 2;

  logic [FANOUT-1:0] out_act [NUM_STE];
  logic [FANOUT-1:0] in_act  [NUM_STE];
  score_t            in_score [NUM_STE][FANOUT];
  logic [NUM_STE:0]  chain;
  logic [NUM_STE-1:0] sat_vec;

  assign chain[0] = cfg_in;
  assign cfg_out  = chain[NUM_STE];
  assign sat_any  = |sat_vec;

  for (genvar t = 0; t < NUM_STE; t++) begin : g_ste
    // fan-in wiring: input k of STE t comes from link k of STE t+LO-k
    for (genvar k = 0; k < FANOUT; k++) begin : g_in
      localparam int SRC = t + LO - k;
      if (SRC >= 0 && SRC < int'(NUM_STE)) begin : g_link
        assign in_act[t][k]   = out_act[SRC][k];
        assign in_score[t][k] = score_vec[SRC];
      end else begin : g_edge
        assign in_act[t][k]   = 1'b0;
        assign in_score[t][k] = '0;
      end
    end

    ste_plus #(.FANOUT(FANOUT)) u_ste (
      .clk       (clk),
      .rst_n     (rst_n),
      .cfg_shift (cfg_shift),
      .cfg_in    (chain[t]),
      .cfg_out   (chain[t+1]),
      .sym_we    (sym_we && (sym_ste == ste_id_t'(t))),
      .sym_waddr (sym_waddr),
      .sym_wdata (sym_wdata),
      .step      (step),
      .clear     (clear),
      .symbol    (symbol),
      .in_act    (in_act[t]),
      .in_score  (in_score[t]),
      .out_act   (out_act[t]),
      .out_score (score_vec[t]),
      .active    (active_vec[t]),
      .accept    (accept_vec[t]),
      .sat_evt   (sat_vec[t])
    );
  end

endmodule
