// tb_match_reporter: self-checking test of the match reporter.
//
// The testbench plays the array and the controller: it steps (only when hold
// is low), then presents a random accept vector and random scores, which it
// keeps stable until the next step, as the array does. For every step the
// expected records are the set bits of the vector in ascending STE id, each
// with the step's offset and that STE's score. rec_ready is random. Checked:
// records, their order, that every record is sent exactly once, and the
// timing rule that hold is high exactly while more than one record is left
// (or one that cannot be accepted), so vectors with at most one accepting STE
// cost no stall cycle.
module tb_match_reporter;
  import napoly_pkg::*;

  localparam int N = 16;

  logic clk = 0, rst_n = 0, clear = 0, step = 0;
  offset_t step_offset = '0;
  logic [N-1:0] accept_vec = '0;
  score_t score_vec [N];
  logic rec_valid, rec_ready = 1, hold;
  match_rec_t rec;

  int checks = 0, failures = 0;
  match_rec_t exp_q [$];
  int n_hold = 0, n_multi = 0, n_notready = 0;

  match_reporter #(.NUM_STE(N)) dut (.*);

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

  initial begin
    int off;
    bit pending_vec;
    logic [N-1:0] next_vec;
    off = 0;
    pending_vec = 0;
    foreach (score_vec[i]) score_vec[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int it = 0; it < 20000; it++) begin
      int left;
      #1;
      // the array output changes only after a step
      if (pending_vec) begin
        int r;
        r = $urandom % 10;
        next_vec = (r < 4) ? '0 : (r < 7) ? (N'(1) << ($urandom % N)) : N'($urandom);
        accept_vec = next_vec;
        foreach (score_vec[i]) score_vec[i] = score_t'($urandom);
        for (int i = 0; i < N; i++)
          if (accept_vec[i]) exp_q.push_back('{ste_id_t'(i), offset_t'(off - 1), score_vec[i]});
        if ($countones(accept_vec) > 1) n_multi++;
        pending_vec = 0;
      end
      rec_ready = ($urandom % 5) != 0;
      if (!rec_ready) n_notready++;
      #1;
      left = exp_q.size();
      check(rec_valid == (left > 0), "rec_valid");
      check(hold == (left > 1 || (left == 1 && !rec_ready)), "hold rule");
      if (hold) n_hold++;
      if (rec_valid && left > 0) check(rec == exp_q[0], "record");
      step = !hold && (($urandom % 8) != 0);
      step_offset = offset_t'(off);
      @(posedge clk);
      if (rec_valid && rec_ready) void'(exp_q.pop_front());
      if (step) begin
        off++;
        pending_vec = 1;
      end
    end
    step = 0;
    check(n_hold > 100 && n_multi > 100, "coverage");
    $display("hold cycles %0d, multi-accept vectors %0d", n_hold, n_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
