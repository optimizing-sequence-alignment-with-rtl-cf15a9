// tb_pattern_buffer: self-checking test of the pattern buffer.
//
// Random pattern words (both kinds) are written with random valid while
// load_en is toggled at random. Every word must come out exactly once, in
// order, decoded to the right command: a symbol-RAM write for PW_SYMBOL, a
// chain shift for PW_CONFIG, and nothing while load_en is low or the buffer
// is empty. wr_ready must drop exactly when DEPTH words are held.
module tb_pattern_buffer;
  import napoly_pkg::*;

  localparam int DEPTH = 8;

  logic clk = 0, rst_n = 0;
  logic wr_valid = 0, wr_ready, load_en = 0;
  pat_word_t wr_word = '0;
  logic sym_we, sym_bit, cfg_shift, cfg_bit, empty;
  ste_id_t sym_ste;
  symbol_t sym_addr;

  int checks = 0, failures = 0;
  pat_word_t q [$];
  int n_sym = 0, n_cfg = 0, n_full = 0;

  pattern_buffer #(.DEPTH(DEPTH)) dut (.*);

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
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int it = 0; it < 5000; it++) begin
      bit do_push;
      #1;
      wr_valid = ($urandom % 3) != 0;
      wr_word.kind    = pat_kind_t'($urandom % 2);
      wr_word.ste_id  = ste_id_t'($urandom);
      wr_word.symbol  = symbol_t'($urandom);
      wr_word.bit_val = 1'($urandom);
      load_en = (it % 400 < 200) ? (($urandom % 4) == 0) : (($urandom % 4) != 0);
      #1;
      check(wr_ready == (q.size() < DEPTH), "wr_ready");
      check(empty == (q.size() == 0), "empty");
      if (q.size() == DEPTH) n_full++;
      if (load_en && q.size() > 0) begin
        pat_word_t e;
        e = q[0];
        if (e.kind == PW_SYMBOL) begin
          n_sym++;
          check(sym_we && !cfg_shift && sym_ste == e.ste_id && sym_addr == e.symbol && sym_bit == e.bit_val, "symbol write");
        end else begin
          n_cfg++;
          check(cfg_shift && !sym_we && cfg_bit == e.bit_val, "config shift");
        end
      end else begin
        check(!sym_we && !cfg_shift, "idle");
      end
      do_push = wr_valid && wr_ready;
      @(posedge clk);
      if (load_en && q.size() > 0) void'(q.pop_front());
      if (do_push) q.push_back(wr_word);
    end
    check(n_sym > 100 && n_cfg > 100 && n_full > 10, "coverage");
    $display("symbol writes %0d, config shifts %0d, full cycles %0d", n_sym, n_cfg, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
