// tb_symbol_buffer: self-checking test of the symbol buffer.
//
// Random symbols are written with random valid while the consumer steps at
// random (only when a symbol is valid). The symbols must come out in order,
// wr_ready must follow the fill level, and offset must equal the number of
// symbols consumed since the last clear_offset, which is pulsed a few times.
module tb_symbol_buffer;
  import napoly_pkg::*;

  localparam int DEPTH = 16;

  logic clk = 0, rst_n = 0;
  logic wr_valid = 0, wr_ready, step = 0, clear_offset = 0, sym_valid;
  symbol_t wr_sym = '0, symbol;
  offset_t offset;

  int checks = 0, failures = 0;
  symbol_t q [$];
  int m_off = 0, n_full = 0;

  symbol_buffer #(.DEPTH(DEPTH)) dut (.*);

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
    #1 check(offset == 0 && !sym_valid, "reset");
    for (int it = 0; it < 5000; it++) begin
      bit do_push;
      #1;
      wr_valid     = (it % 600 < 300) ? (($urandom % 4) != 0) : (($urandom % 4) == 0);
      wr_sym       = symbol_t'($urandom);
      step         = sym_valid && (($urandom % 2) == 0);
      clear_offset = ($urandom % 500) == 0;
      #1;
      check(sym_valid == (q.size() > 0), "sym_valid");
      check(wr_ready == (q.size() < DEPTH), "wr_ready");
      if (q.size() == DEPTH) n_full++;
      if (q.size() > 0) check(symbol == q[0], "symbol order");
      check(offset == offset_t'(m_off), "offset");
      do_push = wr_valid && wr_ready;
      @(posedge clk);
      if (step) void'(q.pop_front());
      if (do_push) q.push_back(wr_sym);
      if (clear_offset) m_off = 0;
      else if (step) m_off++;
    end
    check(n_full > 10, "buffer filled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
