// and_popcount: fused AND-popcount of two DK-bit vectors, the binary
// multiply-accumulate core of every dot product unit.
//
// How it works: the bit products a[i]&b[i] are never formed as a separate
// layer. Each group of three neighbouring products is reduced at once by a full
// adder into one sum bit (weight 1) and one carry bit (weight 2) - the fused
// pre-compression that fits two 6-input LUTs per group on an FPGA. This turns the
// DK x 1 bit heap into two columns of ceil(DK/3) bits. The two columns are then
// counted and combined as count = sum_ones + 2*carry_ones.
//
// Timing: fully pipelined, one new vector pair per cycle, result LATENCY = 3
// cycles after the inputs (register after pre-compression, after the column
// counts, after the final addition).
//
// The pre-compression follows the design; the later compression steps are a
// portable stand-in for the device-specific greedy counter schedule (5,2)/(6)/
// slice counters used on Xilinx parts: same result, different counter mapping.
module and_popcount #(
  parameter int DK = 256
) (
  input  logic                   clk,
  input  logic [DK-1:0]          a,
  input  logic [DK-1:0]          b,
  output logic [$clog2(DK+1)-1:0] count
);
  localparam int G  = (DK + 2) / 3;        // groups of three products
  localparam int GW = $clog2(G + 1);
  localparam int CW = $clog2(DK + 1);

  logic [3*G-1:0] pa, pb;
  logic [G-1:0]   s_d, c_d;                // pre-compression outputs
  logic [G-1:0]   s_q, c_q;
  logic [GW-1:0]  ns_q, nc_q;

  always_comb begin
    pa = '0;
    pb = '0;
    pa[DK-1:0] = a;
    pb[DK-1:0] = b;
    for (int g = 0; g < G; g++) begin
      logic x0, x1, x2;
      x0 = pa[3*g]   & pb[3*g];
      x1 = pa[3*g+1] & pb[3*g+1];
      x2 = pa[3*g+2] & pb[3*g+2];
      s_d[g] = x0 ^ x1 ^ x2;
      c_d[g] = (x0 & x1) | (x0 & x2) | (x1 & x2);
    end
  end

  function automatic logic [GW-1:0] ones(input logic [G-1:0] v);
    logic [GW-1:0] n;
    n = '0;
    for (int i = 0; i < G; i++) n += GW'(v[i]);
    return n;
  endfunction

  always_ff @(posedge clk) begin
    s_q   <= s_d;
    c_q   <= c_d;
    ns_q  <= ones(s_q);
    nc_q  <= ones(c_q);
    count <= CW'(ns_q) + (CW'(nc_q) << 1);
  end
endmodule
