// napoly_fifo: synchronous first-in first-out queue used by the three NAPOLY+
// buffers (pattern, symbol and score/match buffer).
//
// Storage is a plain array of DEPTH entries of type T with read and write
// pointers and an occupancy counter. The head entry is presented
// combinationally on rdata whenever empty is low (show-ahead), so a consumer
// can look at a word and pop it in the same cycle. push while full and pop
// while empty are illegal and are caught by assertions. clear empties the
// queue in one cycle. Reset is synchronous and active low. All outputs follow the clock edge after push/pop.
module napoly_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       push,
  input  T                           wdata,
  output logic                       full,
  input  logic                       pop,
  output T                           rdata,
  output logic                       empty
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam logic [PW-1:0] LAST = PW'(DEPTH - 1);

  T mem [DEPTH];
  logic [PW-1:0] wr_ptr, rd_ptr;
  logic [$clog2(DEPTH+1)-1:0] count;

  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty = (count == '0);
  assign rdata = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else if (clear) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == LAST) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == LAST) ? '0 : rd_ptr + 1'b1;
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
