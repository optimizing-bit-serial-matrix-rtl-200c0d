// sync_fifo: synchronization FIFO between two stage controllers. Tokens carry no
// information, so the FIFO reduces to a saturating up/down counter of tokens.
// A Signal instruction pushes a token, a Wait instruction blocks until avail is
// high and then pops one.
//
// Interface: push (requires space), pop (requires avail), count of tokens held.
// Timing: a token pushed in cycle t can be popped from cycle t+1. Push and pop in
// the same cycle leave the count unchanged. Reset empties it. DEPTH is this
// design's choice.
//
// Lint note: rst_n resets the counter asynchronously and also disables the
// two assertions, which sample it on the clock; only the assertions use it
// synchronously, so this is not a mixed-reset flop.
module sync_fifo #(
  parameter int DEPTH = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic                       pop,
  output logic                       avail,
  output logic                       space,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int CW = $clog2(DEPTH + 1);
  assign avail = (count != '0);
  assign space = (count != CW'(DEPTH));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) count <= '0;
    else        count <= count + CW'(push) - CW'(pop);
  end

  // Handshake rules: never push into a full FIFO or pop an empty one.
  assert property (@(posedge clk) disable iff (!rst_n) push |-> space);
  assert property (@(posedge clk) disable iff (!rst_n) pop  |-> avail);
endmodule
