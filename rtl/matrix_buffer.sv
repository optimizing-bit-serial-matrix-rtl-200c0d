// matrix_buffer: on-chip buffer for one row (LHS) or column (RHS) slice of an
// input bit matrix. The fetch interconnect writes it F bits at a time; the execute
// stage reads it DK bits at a time, so the two ports differ in width by the
// integer factor DK/F, as a block RAM with asymmetric ports does.
//
// Interface: write port we/waddr/wdata in F-bit word units; F-bit word w lands in
// bits [(w mod DK/F)*F +: F] of DK-bit word w/(DK/F). Read port raddr in DK-bit
// word units, rdata registered: valid one cycle after raddr (always reading).
// DEPTH counts DK-bit words. The memory is not reset.
// The asymmetric dual-port organisation follows the design; the port latency and
// the bit ordering inside a word are this design's choices.
module matrix_buffer #(
  parameter int DEPTH = 1024,
  parameter int DK    = 256,
  parameter int F     = 64
) (
  input  logic                               clk,
  input  logic                               we,
  input  logic [$clog2(DEPTH*(DK/F))-1:0]    waddr,
  input  logic [F-1:0]                       wdata,
  input  logic [$clog2(DEPTH)-1:0]           raddr,
  output logic [DK-1:0]                      rdata
);
  localparam int RATIO = DK / F;
  localparam int SW    = (RATIO > 1) ? $clog2(RATIO) : 1;

  logic [DK-1:0] mem [DEPTH];

  initial begin
    assert (DK % F == 0) else $error("matrix_buffer: DK must be a multiple of F");
  end

  logic [$clog2(DEPTH)-1:0] wrow;
  logic [SW-1:0]            wsub;
  always_comb begin
    wrow = $clog2(DEPTH)'(waddr / RATIO);
    wsub = SW'(waddr % RATIO);
  end

  always_ff @(posedge clk) begin
    if (we) mem[wrow][wsub*F +: F] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
