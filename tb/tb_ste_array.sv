// tb_ste_array: self-checking test of the STE+ array and its interconnect.
//
// A small array (32 STEs, fan-out 6, so each STE reaches n-2 .. n+3) gets a
// random configuration through the shift chain and random symbol classes.
// A reference model written here applies the NAPOLY+ rules to the whole array
// (links from source m, position k reach STE m-floor((f-1)/2)+k; incoming
// score is the best active predecessor, the start fan-in gives score 0, start
// STEs stay active at score 0, scores clamp at the 16-bit limits) and the
// active, accept and score vectors are compared after every step. The chain
// is also checked end to end: after the array is loaded, the bits leaving
// cfg_out must be the bits that entered NUM_STE*CFG_W shifts earlier.
module tb_ste_array;
  import napoly_pkg::*;

  localparam int N     = 32;
  localparam int F     = 6;
  localparam int LO    = (F - 1) / 2;
  localparam int CFG_W = 2 + F + 1 + SCORE_W;

  logic clk = 0, rst_n = 0;
  logic cfg_shift = 0, cfg_in = 0, cfg_out;
  logic sym_we = 0, sym_wdata = 0;
  ste_id_t sym_ste = '0;
  symbol_t sym_waddr = '0, symbol = '0;
  logic step = 0, clear = 0;
  logic [N-1:0] accept_vec, active_vec;
  score_t score_vec [N];
  logic sat_any;

  int checks = 0, failures = 0;
  int n_accept_steps = 0, n_sat = 0;

  ste_array #(.NUM_STE(N), .FANOUT(F)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    check(n_accept_steps > 0, "some STE accepted");
    $display("accepting steps: %0d", n_accept_steps);
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

  bit cls [N][256];
  bit st [N], acc [N], lnk [N];
  bit [F-1:0] rt [N];
  int edge_s [N];
  bit m_state [N];
  int m_score [N];

  function automatic int clamp(int v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  task automatic random_config(int pct_link, int pct_route);
    logic [CFG_W-1:0] v;
    bit stream [$];
    for (int n = 0; n < N; n++) begin
      st[n]     = ($urandom % 100) < 6;
      acc[n]    = !st[n] && (($urandom % 100) < 30);
      lnk[n]    = !acc[n] && (($urandom % 100) < pct_link);
      for (int k = 0; k < F; k++) rt[n][k] = ($urandom % 100) < pct_route;
      edge_s[n] = int'($urandom % 9) - 3;
    end
    // highest STE first, each MSB first
    for (int n = N - 1; n >= 0; n--) begin
      v = {st[n], acc[n], rt[n], lnk[n], SCORE_W'(edge_s[n])};
      for (int i = CFG_W - 1; i >= 0; i--) stream.push_back(v[i]);
    end
    foreach (stream[i]) begin
      cfg_shift <= 1; cfg_in <= stream[i];
      @(posedge clk);
    end
    cfg_shift <= 0;
    @(posedge clk);
  endtask

  task automatic load_classes();
    for (int n = 0; n < N; n++)
      for (int s = 0; s < 256; s++) begin
        cls[n][s] = (s < 4) ? (($urandom % 100) < 55) : 1'b0;
        sym_we <= 1; sym_ste <= ste_id_t'(n); sym_waddr <= symbol_t'(s); sym_wdata <= cls[n][s];
        @(posedge clk);
      end
    sym_we <= 0;
  endtask

  task automatic compare(string what);
    for (int n = 0; n < N; n++) begin
      check(active_vec[n] == (m_state[n] || st[n]), {what, " active"});
      check(accept_vec[n] == (m_state[n] && acc[n]), {what, " accept"});
      check(int'(score_vec[n]) == (st[n] ? 0 : m_score[n]), {what, " score"});
    end
  endtask

  task automatic run_steps(int steps);
    bit any [N];
    int best [N];
    bit nst [N];
    int nsc [N];
    for (int it = 0; it < steps; it++) begin
      symbol = symbol_t'($urandom % 5);   // symbol 4 matches nothing
      step   = ($urandom % 5) != 0;
      // reference: scatter from sources
      for (int t = 0; t < N; t++) begin
        any[t]  = lnk[t];
        best[t] = 0;
      end
      for (int m = 0; m < N; m++) begin
        if (m_state[m] || st[m])
          for (int k = 0; k < F; k++) begin
            int t, sc;
            t  = m - LO + k;
            sc = st[m] ? 0 : m_score[m];
            if (t >= 0 && t < N && rt[m][k]) begin
              if (!any[t] || sc > best[t]) best[t] = sc;
              any[t] = 1;
            end
          end
      end
      for (int t = 0; t < N; t++) begin
        nst[t] = cls[t][symbol] && any[t];
        nsc[t] = nst[t] ? clamp(best[t] + edge_s[t]) : 0;
      end
      @(posedge clk);
      if (step)
        for (int t = 0; t < N; t++) begin
          m_state[t] = nst[t];
          m_score[t] = nsc[t];
        end
      #1;
      if (accept_vec != 0) n_accept_steps++;
      compare("step");
    end
    step = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    load_classes();
    foreach (m_state[n]) begin m_state[n] = 0; m_score[n] = 0; end

    for (int round = 0; round < 4; round++) begin
      random_config(round == 0 ? 20 : 5, 35);
      clear <= 1; @(posedge clk); clear <= 0; #1;
      foreach (m_state[n]) begin m_state[n] = 0; m_score[n] = 0; end
      compare("clear");
      run_steps(600);
    end

    // chain pass-through: shift a known pattern through the whole array
    begin
      bit pat [$];
      int errs = 0;
      for (int i = 0; i < 2 * N * CFG_W; i++) pat.push_back($urandom % 2);
      for (int i = 0; i < 2 * N * CFG_W; i++) begin
        #1;
        if (i >= N * CFG_W && cfg_out != pat[i - N * CFG_W]) errs++;
        cfg_shift <= 1; cfg_in <= pat[i];
        @(posedge clk);
      end
      cfg_shift <= 0;
      check(errs == 0, "chain pass-through");
    end

    check(n_accept_steps > 0, "some STE accepted");
    $display("accepting steps: %0d", n_accept_steps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
