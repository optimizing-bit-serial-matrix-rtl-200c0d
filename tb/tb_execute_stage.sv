// tb_execute_stage: self-checking testbench for the execute stage.
// Small geometry: DM=DN=2, DK=32, buffers of 16 rows. The LHS/RHS matrix
// buffers are modelled here as arrays with a one-cycle registered read, like
// matrix_buffer. Each test multiplies a random 2 x K signed 3-bit LHS by a
// K x 2 signed 2-bit RHS, K = L*DK, with one execute run per bit pair in the
// wavefront order of the paper (Fig. 5): ZERO on the first run, SHIFT on the
// first run of each new wavefront, KEEP otherwise, negation when exactly one
// of the two bits is a sign bit. The last run sets write_res; the tile
// written to the result buffer must equal the integer product.
// Timing check: a run that only accumulates must finish (run_done) exactly
// L+1 cycles after it is accepted (L buffer reads + 1 finish cycle), leaving
// its beats in the DPU pipeline while the next run starts; the run that writes
// the result must take L+5 (4 more cycles of read/DPU latency to drain).
module tb_execute_stage;
  import bismo_pkg::*;
  localparam int DM = 2, DN = 2, DK = 32, A = 32, BM = 16, BN = 16, BR = 2;
  localparam int LB = 3, RB = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic run_valid = 1'b0;
  exec_run_t run = '0;
  logic run_done, res_we, active;
  logic [$clog2(BM)-1:0] lhs_raddr;
  logic [$clog2(BN)-1:0] rhs_raddr;
  logic [DK-1:0] lhs_rdata [DM];
  logic [DK-1:0] rhs_rdata [DN];
  logic [$clog2(BR)-1:0] res_slot;
  logic signed [A-1:0] res_data [DM][DN];
  logic [DK-1:0] lmem [DM][BM];
  logic [DK-1:0] rmem [DN][BN];
  int checks = 0, failures = 0;

  execute_stage #(.DM(DM), .DN(DN), .DK(DK), .A(A), .BM(BM), .BN(BN), .BR(BR)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    for (int m = 0; m < DM; m++) lhs_rdata[m] <= lmem[m][lhs_raddr];
    for (int n = 0; n < DN; n++) rhs_rdata[n] <= rmem[n][rhs_raddr];
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // captured tile
  int got [DM][DN];
  int got_slot = -1;
  always @(posedge clk) if (res_we) begin
    got_slot <= res_slot;
    for (int m = 0; m < DM; m++) for (int n = 0; n < DN; n++) got[m][n] <= res_data[m][n];
  end

  task automatic do_run(input exec_run_t r, input int len, input int expect_cyc);
    int cyc;
    @(negedge clk);
    run = r; run_valid = 1'b1;
    @(negedge clk);
    run_valid = 1'b0;
    cyc = 1;
    while (!run_done && cyc < 1000) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != expect_cyc) begin
      failures++;
      $display("run of length %0d took %0d cycles, expected %0d", len, cyc, expect_cyc);
    end
  endtask

  initial begin
    int lv [DM][];
    int rv [DN][];
    int expect_p [DM][DN];
    exec_run_t r;
    for (int m = 0; m < DM; m++) for (int a = 0; a < BM; a++) lmem[m][a] = '0;
    for (int n = 0; n < DN; n++) for (int a = 0; a < BN; a++) rmem[n][a] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int test = 0; test < 4; test++) begin
      int L, K, first, wf_first, slot;
      L = 1 + test;            // 1..4 words per plane
      K = L * DK;
      slot = test % BR;
      for (int m = 0; m < DM; m++) lv[m] = new[K];
      for (int n = 0; n < DN; n++) rv[n] = new[K];
      for (int m = 0; m < DM; m++) for (int k = 0; k < K; k++) lv[m][k] = int'($urandom % 8) - 4;
      for (int n = 0; n < DN; n++) for (int k = 0; k < K; k++) rv[n][k] = int'($urandom % 4) - 2;
      for (int m = 0; m < DM; m++)
        for (int n = 0; n < DN; n++) begin
          expect_p[m][n] = 0;
          for (int k = 0; k < K; k++) expect_p[m][n] += lv[m][k] * rv[n][k];
        end
      // plane i of LHS at rows i*L .. i*L+L-1, plane j of RHS at j*L
      for (int m = 0; m < DM; m++)
        for (int i = 0; i < LB; i++)
          for (int k = 0; k < K; k++) lmem[m][i*L + k/DK][k%DK] = 1'((lv[m][k] >>> i) & 1);
      for (int n = 0; n < DN; n++)
        for (int j = 0; j < RB; j++)
          for (int k = 0; k < K; k++) rmem[n][j*L + k/DK][k%DK] = 1'((rv[n][k] >>> j) & 1);
      first = 1;
      for (int w = LB + RB - 2; w >= 0; w--) begin
        wf_first = 1;
        for (int i = LB - 1; i >= 0; i--) begin
          int j;
          j = w - i;
          if (j < 0 || j >= RB) continue;
          r = '0;
          r.lhs_offset = 16'(i * L);
          r.rhs_offset = 16'(j * L);
          r.length     = 16'(L);
          r.negate     = (i == LB - 1) ^ (j == RB - 1);
          r.acc_mode   = first ? ACC_ZERO : (wf_first ? ACC_SHIFT : ACC_KEEP);
          r.write_res  = (w == 0);
          r.res_slot   = 4'(slot);
          do_run(r, L, (w == 0) ? L + 5 : L + 1);
          first = 0; wf_first = 0;
        end
      end
      @(negedge clk);
      checks++;
      if (got_slot != slot) begin failures++; $display("result slot %0d expected %0d", got_slot, slot); end
      for (int m = 0; m < DM; m++)
        for (int n = 0; n < DN; n++) begin
          checks++;
          if (got[m][n] !== expect_p[m][n]) begin
            failures++;
            $display("test %0d P[%0d][%0d] = %0d expected %0d", test, m, n, got[m][n], expect_p[m][n]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
