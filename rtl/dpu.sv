// dpu: dot product unit. Each beat it takes DK bits of a left-hand row and DK
// bits of a right-hand column, forms their binary dot product (AND-popcount),
// optionally negates it, and adds it to a second operand chosen by the
// accumulator mode: zero (start a new result), the accumulator (same weight), or
// the accumulator shifted left by one (the previous, higher-weight wavefront of
// bit positions is worth twice the current one).
//
// Because bit-position pairs (i,j) are visited in wavefronts of equal i+j from
// the highest weight down, a fixed one-bit left shift of the accumulator replaces
// the variable barrel shifter of a classic bit-serial DPU; the weight 2^(i+j) is
// built up Horner-style. Two's complement operands are handled by negating the
// contributions whose bit positions include a sign bit.
//
// Interface: in_valid/lhs/rhs/negate/acc_mode are sampled together. Timing: the
// popcount takes 3 cycles; negate, acc_mode and valid travel in a matching delay
// line, and acc is updated on the 4th clock edge after the inputs (LATENCY = 4).
// The accumulator is A bits wide and wraps on overflow.
//
// Structure (AND-popcount, negate, adder, 3-input mux, accumulator) follows the
// design; the mode encoding, latency and reset clearing are this design's choices.
module dpu
  import bismo_pkg::*;
#(
  parameter int DK = 256,
  parameter int A  = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [DK-1:0]       lhs,
  input  logic [DK-1:0]       rhs,
  input  logic                negate,
  input  acc_mode_e           acc_mode,
  output logic signed [A-1:0] acc
);
  localparam int PC_LAT = 3;
  localparam int CW     = $clog2(DK + 1);

  logic [CW-1:0]   pc;
  logic            v_d   [PC_LAT];
  logic            neg_d [PC_LAT];
  acc_mode_e       mode_d[PC_LAT];

  and_popcount #(.DK(DK)) u_mac (.clk(clk), .a(lhs), .b(rhs), .count(pc));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < PC_LAT; i++) begin
        v_d[i]    <= 1'b0;
        neg_d[i]  <= 1'b0;
        mode_d[i] <= ACC_KEEP;
      end
    end else begin
      v_d[0]    <= in_valid;
      neg_d[0]  <= negate;
      mode_d[0] <= acc_mode;
      for (int i = 1; i < PC_LAT; i++) begin
        v_d[i]    <= v_d[i-1];
        neg_d[i]  <= neg_d[i-1];
        mode_d[i] <= mode_d[i-1];
      end
    end
  end

  logic signed [A-1:0] contrib, addend;
  always_comb begin
    contrib = neg_d[PC_LAT-1] ? -$signed(A'(pc)) : $signed(A'(pc));
    unique case (mode_d[PC_LAT-1])
      ACC_ZERO:  addend = '0;
      ACC_SHIFT: addend = acc <<< 1;
      default:   addend = acc;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               acc <= '0;
    else if (v_d[PC_LAT-1])   acc <= addend + contrib;
  end
endmodule
