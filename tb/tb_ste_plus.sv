// tb_ste_plus: self-checking test of one STE+.
//
// The configuration is loaded through the shift chain and read back at
// cfg_out; the symbol RAM is loaded with a random symbol class. Then random
// steps drive random symbols, incoming activations and incoming scores, and a
// reference model written here (wide integer arithmetic, explicit clamping)
// predicts state, score, out_act, accept and the saturation flag. Several
// configurations are covered: plain STE+ with and without the start fan-in,
// accepting STE+, start STE+, and extreme edge scores that saturate.
module tb_ste_plus;
  import napoly_pkg::*;

  localparam int F     = 16;
  localparam int CFG_W = 2 + F + 1 + SCORE_W;

  logic clk = 0, rst_n = 0;
  logic cfg_shift = 0, cfg_in = 0, cfg_out;
  logic sym_we = 0, sym_wdata = 0;
  symbol_t sym_waddr = '0, symbol = '0;
  logic step = 0, clear = 0;
  logic [F-1:0] in_act = '0, out_act;
  score_t in_score [F];
  score_t out_score;
  logic active, accept, sat_evt;

  int checks = 0, failures = 0;

  ste_plus #(.FANOUT(F)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
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

  // reference state
  bit ref_class [256];
  bit m_start, m_accept, m_link;
  bit [F-1:0] m_route;
  int m_edge;
  bit m_state;
  int m_score;

  task automatic load_cfg(bit st, bit acc, bit [F-1:0] rt, bit lnk, int edge_s);
    logic [CFG_W-1:0] v;
    v = {st, acc, rt, lnk, SCORE_W'(edge_s)};
    for (int i = CFG_W - 1; i >= 0; i--) begin
      cfg_shift <= 1; cfg_in <= v[i];
      @(posedge clk);
    end
    cfg_shift <= 0;
    @(posedge clk);
    m_start = st; m_accept = acc; m_route = rt; m_link = lnk; m_edge = edge_s;
  endtask

  task automatic load_class(int density);
    for (int s = 0; s < 256; s++) begin
      ref_class[s] = ($urandom % 100) < density;
      sym_we <= 1; sym_waddr <= symbol_t'(s); sym_wdata <= ref_class[s];
      @(posedge clk);
    end
    sym_we <= 0;
  endtask

  function automatic int clamp(int v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  task automatic run_random(int n, int act_pct, bit big_scores);
    int best, any, raw;
    bit nxt, sat;
    for (int it = 0; it < n; it++) begin
      // drive inputs
      symbol   = symbol_t'($urandom);
      for (int k = 0; k < F; k++) begin
        in_act[k]   = ($urandom % 100) < act_pct;
        in_score[k] = big_scores ? score_t'($urandom) : score_t'(int'($urandom % 41) - 20);
      end
      step = ($urandom % 4) != 0;
      #1;
      // reference
      any  = int'(m_link);
      best = m_link ? 0 : -40000;
      for (int k = 0; k < F; k++)
        if (in_act[k]) begin
          if (any == 0 || int'(in_score[k]) > best) best = int'(in_score[k]);
          any = 1;
        end
      nxt = ref_class[symbol] && (any != 0);
      raw = best + m_edge;
      sat = step && nxt && !m_start && (raw != clamp(raw));
      check(sat_evt == sat, "sat_evt");
      @(posedge clk);
      if (step) begin
        m_state = nxt;
        m_score = nxt ? clamp(raw) : 0;
      end
      #1;
      check(active == (m_state || m_start), "active");
      check(accept == (m_state && m_accept), "accept");
      check(out_act == ({F{m_state || m_start}} & m_route), "out_act");
      check(int'(out_score) == (m_start ? 0 : m_score), "out_score");
    end
    step = 0;
  endtask

  initial begin
    foreach (in_score[k]) in_score[k] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    m_state = 0; m_score = 0;
    check(active == 0 && accept == 0 && out_act == 0, "reset");

    load_class(50);

    // 1: chain load and read-back
    begin
      logic [CFG_W-1:0] v, got;
      v = {1'b0, 1'b1, F'(16'hA5C3), 1'b1, SCORE_W'(-7)};
      load_cfg(v[CFG_W-1], v[CFG_W-2], v[CFG_W-3 -: F], v[SCORE_W], -7);
      for (int i = CFG_W - 1; i >= 0; i--) begin
        #1 got[i] = cfg_out;
        cfg_shift <= 1; cfg_in <= v[i];
        @(posedge clk);
      end
      cfg_shift <= 0;
      @(posedge clk);
      check(got == v, "chain read-back");
    end

    // 2: accepting STE+ with the start fan-in, mixed activity
    run_random(3000, 20, 0);
    // 3: no start fan-in, sparse activity
    load_cfg(0, 0, F'($urandom), 0, 2);
    run_random(3000, 10, 0);
    // 4: clear empties state
    clear <= 1; @(posedge clk); clear <= 0; #1;
    m_state = 0; m_score = 0;
    check(active == 0 && out_score == 0, "clear");
    // 5: start STE+ stays active with score 0
    load_cfg(1, 0, F'($urandom), 0, 5);
    run_random(1000, 30, 0);
    // 6: large scores and edge scores to saturate both ways
    load_cfg(0, 1, F'($urandom), 1, 30000);
    run_random(2000, 30, 1);
    load_cfg(0, 1, F'($urandom), 0, -30000);
    run_random(2000, 30, 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
