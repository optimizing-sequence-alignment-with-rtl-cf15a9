// symbol_buffer: buffer of the input sequence that feeds all STE+.
//
// The DRAM side writes 8-bit symbols with a valid/ready handshake into a
// DEPTH-entry FIFO (65536 x 8 by default, the size of the input buffer of the
// original NAPOLY STE). The head symbol is broadcast to the array on `symbol`
// with sym_valid; `step` consumes it. The buffer also counts consumed symbols:
// `offset` is the position in the input stream of the head symbol, which is
// the offset reported with a match. clear_offset restarts the count at 0 at
// the beginning of a stream; the queued symbols are kept.
module symbol_buffer
  import napoly_pkg::*;
#(
  parameter int unsigned DEPTH = 65536
) (
  input  logic    clk,
  input  logic    rst_n,
  // DRAM side
  input  logic    wr_valid,
  input  symbol_t wr_sym,
  output logic    wr_ready,
  // array side
  input  logic    step,
  input  logic    clear_offset,
  output logic    sym_valid,
  output symbol_t symbol,
  output offset_t offset
);
  logic full, empty;

  assign wr_ready  = !full;
  assign sym_valid = !empty;

  napoly_fifo #(.T(symbol_t), .DEPTH(DEPTH)) u_fifo (
    .clk   (clk),
    .rst_n (rst_n),
    .clear (1'b0),
    .push  (wr_valid && !full),
    .wdata (wr_sym),
    .full  (full),
    .pop   (step),
    .rdata (symbol),
    .empty (empty)
  );

  always_ff @(posedge clk) begin
    if (!rst_n || clear_offset) offset <= '0;
    else if (step)              offset <= offset + 1'b1;
  end

  a_step_needs_symbol: assert property (@(posedge clk) disable iff (!rst_n) step |-> sym_valid);

endmodule
