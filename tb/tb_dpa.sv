// tb_dpa: self-checking testbench for the DM x DN dot-product array.
// Uses a small 3x2 array with DK=32 so every unit is visible. Each cycle the
// testbench drives DM random LHS rows and DN random RHS rows (one shared mode
// and negate, as the paper's array broadcasts them) and keeps a reference
// accumulator for every (m,n) unit. Each accumulator is compared every cycle
// against the reference from four cycles earlier, so the broadcast wiring
// (row m x column n) and the array latency are both checked.
module tb_dpa;
  import bismo_pkg::*;
  localparam int DM = 3, DN = 2, DK = 32, A = 32, LAT = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, negate = 1'b0;
  logic [DK-1:0] lhs [DM];
  logic [DK-1:0] rhs [DN];
  acc_mode_e acc_mode = ACC_ZERO;
  logic signed [A-1:0] acc [DM][DN];
  int checks = 0, failures = 0;
  int ref_acc [DM][DN];
  int hist [LAT][DM*DN];   // circular history of reference values

  dpa #(.DM(DM), .DN(DN), .DK(DK), .A(A)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int snap[DM*DN];
    for (int m = 0; m < DM; m++) lhs[m] = '0;
    for (int n = 0; n < DN; n++) rhs[n] = '0;
    for (int m = 0; m < DM; m++) for (int n = 0; n < DN; n++) ref_acc[m][n] = 0;
    for (int k = 0; k < DM*DN; k++) snap[k] = 0;
    for (int k = 0; k < LAT; k++) hist[k] = snap;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      snap = hist[t % LAT];
      for (int m = 0; m < DM; m++)
        for (int n = 0; n < DN; n++) begin
          checks++;
          if (acc[m][n] !== A'(snap[m*DN+n])) begin
            failures++;
            if (failures < 10) $display("t=%0d acc[%0d][%0d]=%0d expected %0d", t, m, n, acc[m][n], snap[m*DN+n]);
          end
        end
      in_valid = ($urandom % 5) != 0;
      acc_mode = acc_mode_e'($urandom % 3);
      negate   = $urandom % 2;
      for (int m = 0; m < DM; m++) lhs[m] = $urandom;
      for (int n = 0; n < DN; n++) rhs[n] = $urandom;
      for (int m = 0; m < DM; m++)
        for (int n = 0; n < DN; n++) begin
          if (in_valid) begin
            int pc;
            pc = $countones(lhs[m] & rhs[n]);
            if (acc_mode == ACC_ZERO) ref_acc[m][n] = 0;
            else if (acc_mode == ACC_SHIFT) ref_acc[m][n] = ref_acc[m][n] <<< 1;
            ref_acc[m][n] = negate ? ref_acc[m][n] - pc : ref_acc[m][n] + pc;
          end
          snap[m*DN+n] = ref_acc[m][n];
        end
      hist[t % LAT] = snap;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
