// tb_dpu: self-checking testbench for one dot-product unit.
// A reference model applies the same mode/negate sequence as the DPU:
// acc' = {0, acc, acc<<1}[mode] + (negate ? -pc : pc) with pc = popcount(l&r).
// Random operands, random modes, random negation and random idle cycles
// (in_valid low) are driven one per cycle; the DPU accumulator is compared
// every cycle against the reference value from four cycles earlier, which
// checks this design's four-edge input-to-accumulator latency exactly.
// Also runs a proper bit-serial signed product (wavefront order, Fig. 5 of
// the paper) for 3-bit x 2-bit signed vectors and checks the integer result.
module tb_dpu;
  import bismo_pkg::*;
  localparam int DK = 64;
  localparam int A  = 32;
  localparam int LAT = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, negate = 1'b0;
  logic [DK-1:0] lhs = '0, rhs = '0;
  acc_mode_e acc_mode = ACC_ZERO;
  logic signed [A-1:0] acc;
  int checks = 0, failures = 0;
  int n_zero = 0, n_keep = 0, n_shift = 0, n_neg = 0;
  int exp_q[$];

  dpu #(.DK(DK), .A(A)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ref_acc = 0;

  // drive one beat at the falling edge and record the expected accumulator
  task automatic beat(input logic v, input acc_mode_e md, input logic ng,
                      input logic [DK-1:0] l, input logic [DK-1:0] r);
    int exp_v, pc;
    @(negedge clk);
    exp_v = exp_q.pop_front();
    checks++;
    if (acc !== A'(exp_v)) begin
      failures++;
      if (failures < 10) $display("%0t acc=%0d expected %0d", $time, acc, exp_v);
    end
    in_valid = v; acc_mode = md; negate = ng; lhs = l; rhs = r;
    if (v) begin
      pc = $countones(l & r);
      case (md)
        ACC_ZERO:  ref_acc = 0;
        ACC_SHIFT: ref_acc = ref_acc <<< 1;
        default:   ;
      endcase
      ref_acc = ng ? ref_acc - pc : ref_acc + pc;
    end
    exp_q.push_back(ref_acc);
  endtask

  function automatic logic [DK-1:0] rv();
    return {$urandom, $urandom};
  endfunction

  initial begin
    int lv[DK], rvv[DK], expect_dot;
    logic [DK-1:0] lb[3], rb[2];
    int first, wf_first, i;
    for (int k = 0; k < LAT; k++) exp_q.push_back(0);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // random mode/negate stream
    for (int t = 0; t < 500; t++) begin
      logic v; acc_mode_e md; logic ng;
      v  = ($urandom % 4) != 0;
      md = acc_mode_e'($urandom % 3);
      ng = $urandom % 2;
      if (v && md == ACC_ZERO) n_zero++;
      if (v && md == ACC_KEEP) n_keep++;
      if (v && md == ACC_SHIFT) n_shift++;
      if (v && ng) n_neg++;
      beat(v, md, ng, rv(), rv());
    end
    // signed bit-serial dot product: 3-bit signed lhs, 2-bit signed rhs
    expect_dot = 0;
    for (int k = 0; k < DK; k++) begin
      lv[k]  = int'($urandom % 8) - 4;
      rvv[k] = int'($urandom % 4) - 2;
      expect_dot += lv[k] * rvv[k];
      for (int b = 0; b < 3; b++) lb[b][k] = 1'((lv[k] >>> b) & 1);
      for (int b = 0; b < 2; b++) rb[b][k] = 1'((rvv[k] >>> b) & 1);
    end
    first = 1;
    for (int w = 3; w >= 0; w--) begin
      wf_first = 1;
      for (i = 2; i >= 0; i--) begin
        int j;
        j = w - i;
        if (j < 0 || j > 1) continue;
        beat(1'b1, first ? ACC_ZERO : (wf_first ? ACC_SHIFT : ACC_KEEP),
             (i == 2) ^ (j == 1), lb[i], rb[j]);
        first = 0; wf_first = 0;
      end
    end
    repeat (LAT) beat(1'b0, ACC_KEEP, 1'b0, '0, '0);
    checks++;
    if (acc !== A'(expect_dot)) begin
      failures++;
      $display("bit-serial dot product %0d expected %0d", acc, expect_dot);
    end
    checks++;
    if (n_zero == 0 || n_keep == 0 || n_shift == 0 || n_neg == 0) begin
      failures++; $display("mode coverage incomplete");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
