// tb_score_match_buffer: self-checking test of the score/match buffer.
//
// Random match records are offered with random valid and drained with random
// out_ready. Checked against a queue model: order, in_ready/out_valid flags
// (the buffer is filled to its depth), and the best-match register, which must
// hold the first record with the highest score accepted since the last clear.
module tb_score_match_buffer;
  import napoly_pkg::*;

  localparam int DEPTH = 4;

  logic clk = 0, rst_n = 0, clear = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, best_valid;
  match_rec_t in_rec = '0, out_rec, best;

  int checks = 0, failures = 0;
  match_rec_t q [$];
  bit m_bv = 0;
  match_rec_t m_best;
  int n_full = 0, n_best_upd = 0;

  score_match_buffer #(.DEPTH(DEPTH)) dut (.*);

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
    m_best = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int it = 0; it < 6000; it++) begin
      bit do_push, do_pop;
      #1;
      in_valid = (it % 500 < 250) ? (($urandom % 4) != 0) : (($urandom % 4) == 0);
      in_rec.ste_id = ste_id_t'($urandom);
      in_rec.offset = offset_t'(it);
      in_rec.score  = score_t'(int'($urandom % 200) - 100);
      out_ready = ($urandom % 2) == 0;
      clear = ($urandom % 700) == 0;
      #1;
      check(in_ready == (q.size() < DEPTH), "in_ready");
      check(out_valid == (q.size() > 0), "out_valid");
      if (q.size() == DEPTH) n_full++;
      if (q.size() > 0) check(out_rec == q[0], "order");
      check(best_valid == m_bv && (!m_bv || best == m_best), "best");
      do_push = in_valid && in_ready;
      do_pop  = out_valid && out_ready;
      @(posedge clk);
      if (do_pop) void'(q.pop_front());
      if (do_push) q.push_back(in_rec);
      if (clear) m_bv = 0;
      else if (do_push && (!m_bv || in_rec.score > m_best.score)) begin
        m_bv = 1; m_best = in_rec; n_best_upd++;
      end
    end
    check(n_full > 10 && n_best_upd > 10, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
