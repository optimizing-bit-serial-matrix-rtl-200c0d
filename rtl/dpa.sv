// dpa: dot product array of DM x DN dot product units. Row m of the array
// receives the word read from left-hand matrix buffer m, column n the word from
// right-hand matrix buffer n, both by broadcast, so DPU (m,n) accumulates the dot
// product of LHS row m and RHS column n. Negate and accumulator mode come from the
// one execute instruction in flight and are shared by every DPU.
//
// Interface: lhs[m], rhs[n] are DK-bit words, acc[m][n] the A-bit accumulators.
// Timing: that of the DPU, acc updates 4 cycles after a valid beat; one beat per
// cycle gives DM*DN*DK AND operations and as many popcount additions per cycle.
// The broadcast organisation follows the design.
module dpa
  import bismo_pkg::*;
#(
  parameter int DM = 10,
  parameter int DN = 10,
  parameter int DK = 256,
  parameter int A  = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [DK-1:0]       lhs [DM],
  input  logic [DK-1:0]       rhs [DN],
  input  logic                negate,
  input  acc_mode_e           acc_mode,
  output logic signed [A-1:0] acc [DM][DN]
);
  for (genvar m = 0; m < DM; m++) begin : g_row
    for (genvar n = 0; n < DN; n++) begin : g_col
      dpu #(.DK(DK), .A(A)) u_dpu (
        .clk(clk), .rst_n(rst_n), .in_valid(in_valid),
        .lhs(lhs[m]), .rhs(rhs[n]), .negate(negate), .acc_mode(acc_mode),
        .acc(acc[m][n])
      );
    end
  end
endmodule
