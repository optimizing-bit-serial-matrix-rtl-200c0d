// result_buffer: decouples the execute stage from the result stage. It holds BR
// slots, each a full DM x DN tile of A-bit accumulators. The execute stage writes
// a whole tile into one slot in a single cycle; the result stage reads one row of
// DN values at a time while the execute stage may already accumulate the next
// tile into the DPUs.
//
// Interface: write we/wslot/wdata (whole tile), read rslot/rrow -> rdata (DN x A
// bits, element n at bits [n*A +: A]), combinational read as from distributed
// (LUT) RAM. Storage is small and LUT-based as in the design; the row-wise read
// port is this design's choice. Not reset.
module result_buffer #(
  parameter int DM = 10,
  parameter int DN = 10,
  parameter int A  = 32,
  parameter int BR = 2
) (
  input  logic                        clk,
  input  logic                        we,
  input  logic [$clog2(BR)-1:0]       wslot,
  input  logic signed [A-1:0]         wdata [DM][DN],
  input  logic [$clog2(BR)-1:0]       rslot,
  input  logic [$clog2(DM)-1:0]       rrow,
  output logic [DN*A-1:0]             rdata
);
  logic [DN*A-1:0] mem [BR][DM];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int m = 0; m < DM; m++)
        for (int n = 0; n < DN; n++)
          mem[wslot][m][n*A +: A] <= wdata[m][n];
    end
  end

  assign rdata = mem[rslot][rrow];
endmodule
