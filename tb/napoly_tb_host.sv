// napoly_tb_host: host, DRAM stand-in and checker for end-to-end tests of
// napoly_plus_top. It connects to every port of the core.
//
// What it runs:
//   1. Configuration 1, loaded through the pattern buffer: the four-state DNA
//      automaton of the paper's running example (start state; A into state 2,
//      G loop on state 2, C from state 2 to the accepting state 4; C into
//      state 3, T loop on state 3, G from state 3 to state 4; mismatch classes
//      [^CG] and [^TG] back to the start) in ANML form, one STE+ per labelled
//      transition, with match score +2 and mismatch score -1. The start STE+
//      reaches the first STE+s over local links. Added to it: a group of four
//      accepting STE+ on the symbol 'X' fed by the start fan-in (four matches
//      after one symbol, so the reporter must stall the array), and a
//      self-looping STE+ on 'Z' with edge score +30000 (its score saturates).
//   2. Run 1: the input begins with "AGC", which must report the accepting
//      STE+ of state 4 at offset 2 with score 6 (state 3 is active at score 2,
//      as in the paper's trace), then random symbols. Symbols are written
//      while the run goes on; the output is drained with random ready so the
//      4-entry output buffer fills and holds the array.
//   3. Configuration 2: the same automaton with match score +3.
//   4. Run 2: all symbols are preloaded and the output drained at full rate;
//      the array must take exactly one symbol per cycle except one stall cycle
//      for each record beyond the first after any symbol.
// An independent model here (a list of edges and the max-plus rules) predicts
// every record and the best match. Each mechanism (reconfiguration, start
// fan-in, start STE+, stall for several matches, output back-pressure,
// saturation) is counted and must have happened at least once.
module napoly_tb_host
  import napoly_pkg::*;
#(
  parameter int unsigned NUM_STE  = 64,
  parameter int unsigned FANOUT   = 16,
  parameter int unsigned WATCHDOG = 400000
) (
  input  logic        clk,
  output logic        rst_n,
  output logic        cmd_config,
  output logic        cmd_run,
  output logic        end_of_data,
  input  ctrl_state_t state,
  input  logic        done,
  input  logic        stall,
  input  logic        sat_event,
  output logic        pat_valid,
  output pat_word_t   pat_word,
  input  logic        pat_ready,
  output logic        sym_valid,
  output symbol_t     sym_data,
  input  logic        sym_ready,
  input  logic        out_valid,
  input  match_rec_t  out_rec,
  output logic        out_ready,
  input  logic        best_valid,
  input  match_rec_t  best,
  input  logic        cfg_out
);
  localparam int LO    = (int'(FANOUT) - 1) / 2;
  localparam int CFG_W = 2 + int'(FANOUT) + 1 + SCORE_W;
  localparam int MAXN  = 64;   // STE+ used by the test automaton (ids < MAXN)

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- automaton description ----------------
  bit cls   [MAXN][256];
  bit st    [MAXN], acc [MAXN], lnk [MAXN], used [MAXN];
  int edge_s[MAXN];
  int pred  [MAXN][$];

  function automatic void set_ste(int id, string chars, bit negate, int e,
                                  bit is_start, bit is_acc, bit link);
    used[id] = 1; st[id] = is_start; acc[id] = is_acc; lnk[id] = link;
    edge_s[id] = e;
    for (int s = 0; s < 256; s++) begin
      bit in_set = 0;
      for (int i = 0; i < chars.len(); i++) if (chars[i] == s[7:0]) in_set = 1;
      cls[id][s] = negate ? !in_set : in_set;
    end
  endfunction

  function automatic void add_edge(int from, int to);
    pred[to].push_back(from);
  endfunction

  function automatic void build(int m);   // m = match score
    for (int i = 0; i < MAXN; i++) begin
      used[i] = 0; st[i] = 0; acc[i] = 0; lnk[i] = 0; edge_s[i] = 0; pred[i].delete();
      for (int s = 0; s < 256; s++) cls[i][s] = 0;
    end
    // DNA example, ANML form
    set_ste(0, "",   0,  0, 1, 0, 0);   // start STE+
    set_ste(1, "A",  0,  m, 0, 0, 0);   // 1 -A-> 2
    set_ste(2, "G",  0,  m, 0, 0, 0);   // 2 -G-> 2
    set_ste(3, "C",  0,  m, 0, 1, 0);   // 2 -C-> 4 (accept)
    set_ste(4, "C",  0,  m, 0, 0, 0);   // 1 -C-> 3
    set_ste(5, "T",  0,  m, 0, 0, 0);   // 3 -T-> 3
    set_ste(6, "G",  0,  m, 0, 1, 0);   // 3 -G-> 4 (accept)
    set_ste(7, "CG", 1, -1, 0, 0, 0);   // 2 -[^CG]-> 1
    set_ste(8, "TG", 1, -1, 0, 0, 0);   // 3 -[^TG]-> 1
    add_edge(0, 1); add_edge(1, 2); add_edge(2, 2); add_edge(1, 3); add_edge(2, 3);
    add_edge(0, 4); add_edge(4, 5); add_edge(5, 5); add_edge(4, 6); add_edge(5, 6);
    add_edge(1, 7); add_edge(2, 7); add_edge(4, 8); add_edge(5, 8);
    // four accepting STE+ on 'X' from the start fan-in
    for (int i = 0; i < 4; i++) set_ste(20 + i, "X", 0, i + 1, 0, 1, 1);
    // saturating self loop on 'Z'
    set_ste(30, "Z", 0, 30000, 0, 1, 1);
    add_edge(30, 30);
  endfunction

  // ---------------- DRAM side: pattern stream ----------------
  // ready as seen at the coming clock edge (it depends on registers only)
  logic pat_ready_s, sym_ready_s;
  always @(negedge clk) begin
    pat_ready_s = pat_ready;
    sym_ready_s = sym_ready;
  end

  // valid stays high between words; the caller drops it after the last one
  task automatic send_word(pat_word_t w);
    pat_valid <= 1; pat_word <= w;
    do @(posedge clk); while (!pat_ready_s);
  endtask

  task automatic configure();
    logic [CFG_W-1:0] v;
    bit [FANOUT-1:0] rt;
    @(posedge clk);
    cmd_config <= 1; @(posedge clk); cmd_config <= 0;
    // symbol RAMs of the used STE+
    for (int id = 0; id < MAXN; id++)
      if (used[id])
        for (int s = 0; s < 256; s++)
          send_word('{PW_SYMBOL, ste_id_t'(id), symbol_t'(s), cls[id][s]});
    // configuration chain: highest STE+ first, MSB first
    for (int n = int'(NUM_STE) - 1; n >= 0; n--) begin
      rt = '0;
      v  = '0;
      if (n < MAXN && used[n]) begin
        for (int t = 0; t < MAXN; t++)
          foreach (pred[t][j])
            if (pred[t][j] == n) begin
              int k;
              k = t - n + LO;
              if (k < 0 || k >= int'(FANOUT)) $fatal(1, "edge %0d->%0d out of reach", n, t);
              rt[k] = 1;
            end
        v = {st[n], acc[n], rt, lnk[n], SCORE_W'(edge_s[n])};
      end
      for (int i = CFG_W - 1; i >= 0; i--)
        send_word('{PW_CONFIG, ste_id_t'(0), symbol_t'(0), v[i]});
    end
    pat_valid <= 0;
    end_of_data <= 1; @(posedge clk); end_of_data <= 0;
    while (state != ST_IDLE) @(posedge clk);
  endtask

  // ---------------- reference model ----------------
  bit m_state [MAXN];
  int m_score [MAXN];
  match_rec_t exp_q [$];
  match_rec_t m_best;
  bit m_best_valid;
  int exp_stalls;
  int n_start_link_act, n_start_ste_act;

  function automatic int clamp(int v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  function automatic void model_reset();
    for (int i = 0; i < MAXN; i++) begin m_state[i] = 0; m_score[i] = 0; end
    exp_q.delete();
    m_best_valid = 0; m_best = '0; exp_stalls = 0;
  endfunction

  function automatic void model_step(symbol_t s, int off);
    bit nst [MAXN];
    int nsc [MAXN];
    int nacc;
    for (int t = 0; t < MAXN; t++) begin
      bit any;
      int b;
      any = lnk[t]; b = 0;
      foreach (pred[t][j]) begin
        int p;
        p = pred[t][j];
        if (m_state[p] || st[p]) begin
          int sc;
          sc = st[p] ? 0 : m_score[p];
          if (!any || sc > b) b = sc;
          any = 1;
        end
      end
      nst[t] = used[t] && cls[t][s] && any;
      nsc[t] = nst[t] ? clamp(b + edge_s[t]) : 0;
      if (nst[t] && lnk[t]) n_start_link_act++;
      if (nst[t] && (t == 1 || t == 4)) n_start_ste_act++;
    end
    nacc = 0;
    for (int t = 0; t < MAXN; t++) begin
      m_state[t] = nst[t]; m_score[t] = nsc[t];
      if (nst[t] && acc[t]) begin
        match_rec_t r;
        r = '{ste_id_t'(t), offset_t'(off), score_t'(nsc[t])};
        exp_q.push_back(r);
        if (!m_best_valid || r.score > m_best.score) begin m_best = r; m_best_valid = 1; end
        nacc++;
      end
    end
    if (nacc > 1) exp_stalls += nacc - 1;
  endfunction

  // ---------------- output drain and event counters ----------------
  match_rec_t got_q [$];
  int ready_pct = 100;
  int n_stall = 0, n_sat = 0, n_backpressure = 0, n_configs = 0, n_runs = 0;
  int run_steps = 0, run_stalls = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (out_valid && out_ready) got_q.push_back(out_rec);
      if (stall) begin n_stall++; run_stalls++; end
      if (sat_event) n_sat++;
      if (dut_full_hold()) n_backpressure++;
    end
  end

  // the reporter is held by a full output buffer: records are waiting but
  // the DRAM side is not taking them
  function automatic bit dut_full_hold();
    return stall && out_valid && !out_ready;
  endfunction

  always @(negedge clk) out_ready <= ($urandom % 100) < ready_pct;

  // ---------------- runs ----------------
  task automatic run(string prefix, int len, bit preload);
    symbol_t seq [$];
    string alpha;
    int cyc;
    alpha = "ACGTXZ";
    for (int i = 0; i < prefix.len(); i++) seq.push_back(prefix[i]);
    while (seq.size() < len) seq.push_back(alpha[$urandom % alpha.len()]);
    model_reset();
    foreach (seq[i]) model_step(seq[i], i);
    got_q.delete();
    run_stalls = 0;
    if (preload) begin
      foreach (seq[i]) begin
        sym_valid <= 1; sym_data <= seq[i];
        do @(posedge clk); while (!sym_ready_s);
      end
      sym_valid <= 0;
    end
    cmd_run <= 1; @(posedge clk); cmd_run <= 0;
    n_runs++;
    if (!preload) begin
      foreach (seq[i]) begin
        // a random idle cycle, then the symbol
        if (($urandom % 4) == 0) begin
          sym_valid <= 0;
          @(posedge clk);
        end
        sym_valid <= 1; sym_data <= seq[i];
        do @(posedge clk); while (!sym_ready_s);
      end
      sym_valid <= 0;
    end
    end_of_data <= 1; @(posedge clk); end_of_data <= 0;
    cyc = 0;
    while (!done) begin @(posedge clk); cyc++; end
    @(posedge clk);
    while (out_valid) @(posedge clk);
    repeat (2) @(posedge clk);
    // compare
    check(got_q.size() == exp_q.size(), "record count");
    if (got_q.size() != exp_q.size())
      $display("records: got %0d expected %0d", got_q.size(), exp_q.size());
    for (int i = 0; i < exp_q.size() && i < got_q.size(); i++)
      check(got_q[i] == exp_q[i], $sformatf("record %0d", i));
    check(best_valid == m_best_valid && (!m_best_valid || best == m_best), "best match");
    if (preload) begin
      // one symbol per cycle, one stall per extra record
      check(run_stalls == exp_stalls, "stall cycles");
      check(cyc <= len + exp_stalls + 2, "run length in cycles");
      $display("run of %0d symbols: %0d cycles to done, %0d stall cycles", len, cyc, run_stalls);
    end
  endtask

  initial begin
    rst_n = 0; cmd_config = 0; cmd_run = 0; end_of_data = 0;
    pat_valid = 0; pat_word = '0; sym_valid = 0; sym_data = '0;
    n_start_link_act = 0; n_start_ste_act = 0;
    repeat (5) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);

    // configuration 1 and run 1 with back-pressure
    build(2);
    configure(); n_configs++;
    ready_pct = 40;
    run("AGC", 300, 0);
    // the paper's trace: "AGC" reaches state 4 with score 6
    check(exp_q.size() > 0 && exp_q[0] == '{ste_id_t'(3), offset_t'(2), score_t'(6)}, "AGC scores 6 (model)");
    check(got_q.size() > 0 && got_q[0] == '{ste_id_t'(3), offset_t'(2), score_t'(6)}, "AGC scores 6");

    // configuration 2 and run 2 at full rate
    build(3);
    configure(); n_configs++;
    ready_pct = 100;
    run("AGGGC", 400, 1);
    check(got_q.size() > 0 && got_q[0] == '{ste_id_t'(3), offset_t'(4), score_t'(15)}, "AGGGC scores 15");

    $display("configs %0d runs %0d stalls %0d backpressure %0d saturations %0d start-link %0d start-STE %0d",
             n_configs, n_runs, n_stall, n_backpressure, n_sat, n_start_link_act, n_start_ste_act);
    check(n_configs >= 2 && n_runs >= 2, "mode switches");
    check(n_stall > 0, "stall happened");
    check(n_backpressure > 0, "back-pressure happened");
    check(n_sat > 0, "saturation happened");
    check(n_start_link_act > 0, "start fan-in used");
    check(n_start_ste_act > 0, "start STE+ used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
