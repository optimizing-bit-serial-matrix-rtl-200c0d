// tb_execute_workload: the execute-stage workloads of the evaluation, run on
// the execute stage at its default parameters (10 x 256 x 10 array, buffers of
// 1024 rows). The matrix buffers are modelled here as arrays with a one-cycle
// registered read, already filled, as in the paper's peak-compute experiment
// (fetch and result costs left out).
//  - Binary 10 x K x 10 products, K = 256, 2048, 8192, 16384: efficiency
//    L / (L + 5) per run with L = K/256 buffer words.
//  - Multi-bit 10 x 2048 x 10 and 10 x 16384 x 10 products at 2 x 2 and
//    4 x 4 bits (signed), one run per bit pair in wavefront order. The runs
//    follow each other through the DPU pipeline and only the last one drains
//    it, so the runtime must be (w*a - 1)(L + 1) + (L + 5) cycles: slightly
//    less than w * a times the binary runtime, the effect the paper reports.
// Each product is compared element by element with an integer reference, and
// every run must take exactly L + 1 cycles from acceptance to run_done, or
// L + 5 when it writes the result.
module tb_execute_workload;
  import bismo_pkg::*;
  localparam int DM = 10, DN = 10, DK = 256, A = 32, BM = 1024, BN = 1024, BR = 2;

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

  execute_stage dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    for (int m = 0; m < DM; m++) lhs_rdata[m] <= lmem[m][lhs_raddr];
    for (int n = 0; n < DN; n++) rhs_rdata[n] <= rmem[n][rhs_raddr];
  end

  initial begin
    repeat (2000000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int got [DM][DN];
  always @(posedge clk) if (res_we)
    for (int m = 0; m < DM; m++) for (int n = 0; n < DN; n++) got[m][n] <= res_data[m][n];

  task automatic do_run(input exec_run_t r, input int len, input int expect_cyc, inout int total);
    int cyc;
    @(negedge clk);
    run = r; run_valid = 1'b1;
    @(negedge clk);
    run_valid = 1'b0;
    cyc = 1;
    while (!run_done && cyc < 100000) begin @(negedge clk); cyc++; end
    total += cyc;
    checks++;
    if (cyc != expect_cyc) begin
      failures++;
      $display("run of length %0d took %0d cycles, expected %0d", len, cyc, expect_cyc);
    end
  endtask

  // multiply a random DM x K (lb bits) by K x DN (rb bits); sgn selects signed
  task automatic product(input int K, input int lb, input int rb, input bit sgn, output int total);
    int lv [DM][];
    int rv [DN][];
    int expect_p [DM][DN];
    int L, first, wf_first;
    exec_run_t r;
    L = K / DK;
    total = 0;
    for (int m = 0; m < DM; m++) lv[m] = new[K];
    for (int n = 0; n < DN; n++) rv[n] = new[K];
    for (int m = 0; m < DM; m++)
      for (int k = 0; k < K; k++)
        lv[m][k] = sgn ? int'($urandom % (1 << lb)) - (1 << (lb - 1)) : int'($urandom % (1 << lb));
    for (int n = 0; n < DN; n++)
      for (int k = 0; k < K; k++)
        rv[n][k] = sgn ? int'($urandom % (1 << rb)) - (1 << (rb - 1)) : int'($urandom % (1 << rb));
    for (int m = 0; m < DM; m++)
      for (int n = 0; n < DN; n++) begin
        expect_p[m][n] = 0;
        for (int k = 0; k < K; k++) expect_p[m][n] += lv[m][k] * rv[n][k];
      end
    for (int m = 0; m < DM; m++)
      for (int i = 0; i < lb; i++)
        for (int k = 0; k < K; k++) lmem[m][i*L + k/DK][k%DK] = 1'((lv[m][k] >>> i) & 1);
    for (int n = 0; n < DN; n++)
      for (int j = 0; j < rb; j++)
        for (int k = 0; k < K; k++) rmem[n][j*L + k/DK][k%DK] = 1'((rv[n][k] >>> j) & 1);
    first = 1;
    for (int w = lb + rb - 2; w >= 0; w--) begin
      wf_first = 1;
      for (int i = lb - 1; i >= 0; i--) begin
        int j;
        j = w - i;
        if (j < 0 || j >= rb) continue;
        r = '0;
        r.lhs_offset = 16'(i * L);
        r.rhs_offset = 16'(j * L);
        r.length     = 16'(L);
        r.negate     = sgn && ((i == lb - 1) ^ (j == rb - 1));
        r.acc_mode   = first ? ACC_ZERO : (wf_first ? ACC_SHIFT : ACC_KEEP);
        r.write_res  = (w == 0);
        do_run(r, L, (w == 0) ? L + 5 : L + 1, total);
        first = 0; wf_first = 0;
      end
    end
    @(negedge clk);
    for (int m = 0; m < DM; m++)
      for (int n = 0; n < DN; n++) begin
        checks++;
        if (got[m][n] !== expect_p[m][n]) begin
          failures++;
          if (failures < 10) $display("K=%0d %0dx%0d P[%0d][%0d] = %0d expected %0d", K, lb, rb, m, n, got[m][n], expect_p[m][n]);
        end
      end
  endtask

  initial begin
    int ks [4] = '{256, 2048, 8192, 16384};
    int t1, tw;
    for (int m = 0; m < DM; m++) for (int a = 0; a < BM; a++) lmem[m][a] = '0;
    for (int n = 0; n < DN; n++) for (int a = 0; a < BN; a++) rmem[n][a] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    foreach (ks[x]) begin
      product(ks[x], 1, 1, 1'b0, t1);
      $display("binary 10x%0dx10: %0d cycles, execute efficiency %0.1f %%",
               ks[x], t1, 100.0 * (ks[x] / DK) / t1);
    end
    foreach (ks[x]) begin
      if (ks[x] != 2048 && ks[x] != 16384) continue;
      product(ks[x], 1, 1, 1'b0, t1);
      for (int b = 2; b <= 4; b += 2) begin
        product(ks[x], b, b, 1'b1, tw);
        $display("signed %0dx%0d-bit 10x%0dx10: %0d cycles = %0.2f x binary (w*a = %0d)",
                 b, b, ks[x], tw, real'(tw) / t1, b * b);
        checks++;
        if (tw != (b * b - 1) * (ks[x] / DK + 1) + ks[x] / DK + 5 || tw >= b * b * t1) begin
          failures++; $display("multi-bit runtime %0d not as expected", tw);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
