// tb_stage_overlap: the stage-overlap experiment of the evaluation at the
// paper's size: 256 x 4096 x 256 binary matrices multiplied on an 8 x 64 x 8
// instance by block matrix multiplication, once with the fetch, execute and
// result stages overlapped and once with them run one after another. The
// operands are twice what fits on chip: the right-hand matrix is loaded in two
// halves of 128 columns (16 slices of 64 buffer rows per RHS buffer, so the
// RHS buffers have 1024 rows), and each 8-row left-hand tile is fetched once
// per half and reused for 16 output tiles of 8 x 8 (one execute run of 64
// words each).
// Overlapped program: two LHS slots and two result slots, so the fetch of the
// next LHS tile and the write-back of finished tiles run while the array
// computes. Sequential program: one slot; every tile is written back before
// the next run starts, and the next fetch waits for the whole group.
// Both programs must produce the exact product (integer reference), and the
// overlapped one must finish in fewer cycles; both cycle counts are printed.
// Operands are written to memory directly in bit-serial layout (P2S is not
// part of this experiment).
module tb_stage_overlap;
  import bismo_pkg::*;

  localparam int DM = 8, DK = 64, DN = 8, A = 32, F = 64, R = 64, BM = 128, BN = 1024, BR = 2, M = 8;
  localparam int MR = 256, K = 4096, NC = 256;  // product size (the paper's)
  localparam int HALF = NC / 2;                // RHS columns held on chip at once
  localparam int TM = MR / DM, TN = NC / DN;
  localparam int L = K / DK;                   // execute words per run
  localparam int FW = K / F;                   // fetch words per matrix row
  localparam int SRC_L = 'h00000, SRC_R = 'h20000, RES = 'h40000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cycles = 0;
  always @(posedge clk) cycles++;

  logic fetch_instr_valid, fetch_instr_ready, exec_instr_valid, exec_instr_ready, res_instr_valid, res_instr_ready;
  fetch_instr_t fetch_instr; exec_instr_t exec_instr; result_instr_t res_instr;
  logic p2s_cmd_valid = 1'b0, p2s_cmd_ready; p2s_run_t p2s_cmd = '0;
  logic busy;
  logic          rd_v [2], rd_r [2], rsp_v [2];
  logic [31:0]   rd_a [2];
  logic [F-1:0]  rsp_d [2];
  logic          wr_v [2], wr_r [2];
  logic [31:0]   wr_a [2];
  logic [R-1:0]  wr_d [2];

  bismo_top #(.DM(DM), .DK(DK), .DN(DN), .A(A), .F(F), .R(R), .BM(BM), .BN(BN), .BR(BR), .M(M)) dut (
    .clk, .rst_n,
    .fetch_instr_valid, .fetch_instr_ready, .fetch_instr,
    .exec_instr_valid, .exec_instr_ready, .exec_instr,
    .res_instr_valid, .res_instr_ready, .res_instr,
    .fetch_rd_req_valid(rd_v[0]), .fetch_rd_req_ready(rd_r[0]), .fetch_rd_req_addr(rd_a[0]),
    .fetch_rd_rsp_valid(rsp_v[0]), .fetch_rd_rsp_data(rsp_d[0]),
    .res_wr_valid(wr_v[0]), .res_wr_ready(wr_r[0]), .res_wr_addr(wr_a[0]), .res_wr_data(wr_d[0]),
    .p2s_cmd_valid, .p2s_cmd_ready, .p2s_cmd,
    .p2s_rd_req_valid(rd_v[1]), .p2s_rd_req_ready(rd_r[1]), .p2s_rd_req_addr(rd_a[1]),
    .p2s_rd_rsp_valid(rsp_v[1]), .p2s_rd_rsp_data(rsp_d[1]),
    .p2s_wr_valid(wr_v[1]), .p2s_wr_ready(wr_r[1]), .p2s_wr_addr(wr_a[1]), .p2s_wr_data(wr_d[1]),
    .busy);

  main_memory_model #(.DW(F), .WORDS(65536), .NRD(2), .NWR(2), .LAT(4), .STALL(1'b0)) mem (
    .clk, .rd_req_valid(rd_v), .rd_req_ready(rd_r), .rd_req_addr(rd_a),
    .rd_rsp_valid(rsp_v), .rd_rsp_data(rsp_d),
    .wr_valid(wr_v), .wr_ready(wr_r), .wr_addr(wr_a), .wr_data(wr_d));

  initial begin
    repeat (3000000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // host instruction streams
  fetch_instr_t  fq [$];
  exec_instr_t   eq [$];
  result_instr_t rq [$];

  function automatic fetch_instr_t f_sync(op_e op);
    fetch_instr_t x; x = '0; x.op = op; return x;
  endfunction
  function automatic exec_instr_t e_sync(op_e op, logic chan);
    exec_instr_t x; x = '0; x.op = op; x.chan = chan; return x;
  endfunction
  function automatic result_instr_t r_sync(op_e op);
    result_instr_t x; x = '0; x.op = op; return x;
  endfunction
  function automatic fetch_instr_t f_run(int base, int rows, int start, int boff);
    fetch_instr_t x;
    x = '0;
    x.op = OP_RUN;
    x.run.base_addr = base; x.run.block_bytes = 16'(rows * K / 8); x.run.block_stride = 0;
    x.run.num_blocks = 1; x.run.buf_offset = 16'(boff); x.run.buf_start = 8'(start);
    x.run.buf_range = 8'(rows); x.run.words_per_buf = 16'(FW);
    return x;
  endfunction

  // Block schedule: the right-hand matrix is loaded half at a time (HALF
  // columns, one K-long slice per 8-column tile in each RHS buffer, so a
  // buffer holds HALF/DN slices); for every 8-row LHS tile ("group") the LHS
  // slice is fetched once and reused for all HALF/DN output tiles of the half.
  task automatic build_program(input bit overlap);
    int t, g;
    exec_instr_t ei;
    result_instr_t ri;
    fetch_instr_t fi;
    t = 0;
    g = 0;
    for (int h = 0; h < NC / HALF; h++)
      for (int tm = 0; tm < TM; tm++) begin
        int slot;
        slot = overlap ? g % 2 : 0;
        // fetch: wait until the slot (and, for a new half, all RHS slices) is free
        if (overlap) begin
          if (g >= 2 && !(h > 0 && tm == 1)) fq.push_back(f_sync(OP_WAIT));
          if (h > 0 && tm == 0) fq.push_back(f_sync(OP_WAIT));
        end else if (g >= 1) fq.push_back(f_sync(OP_WAIT));
        if (tm == 0) begin
          fi = '0;
          fi.op = OP_RUN;
          fi.run.base_addr = SRC_R + h * HALF * K / 8; fi.run.block_bytes = 16'(DN * K / 8);
          fi.run.block_stride = DN * K / 8; fi.run.num_blocks = 16'(HALF / DN);
          fi.run.buf_offset = 0; fi.run.buf_start = 8'(DM); fi.run.buf_range = 8'(DN);
          fi.run.words_per_buf = 16'(FW);
          fq.push_back(fi);
        end
        fq.push_back(f_run(SRC_L + tm * DM * K / 8, DM, 0, slot * FW));
        fq.push_back(f_sync(OP_SIGNAL));
        // execute: one run per output tile of this half, reusing the LHS slice
        eq.push_back(e_sync(OP_WAIT, 1'b0));
        for (int tn = 0; tn < HALF / DN; tn++) begin
          ei = '0;
          ei.op = OP_RUN;
          ei.run.lhs_offset = 16'(slot * L);
          ei.run.rhs_offset = 16'(tn * L);
          ei.run.length     = 16'(L);
          ei.run.acc_mode   = ACC_ZERO;
          ei.run.write_res  = 1'b1;
          ei.run.res_slot   = 4'(overlap ? t % BR : 0);
          if (overlap) begin
            if (t >= BR) eq.push_back(e_sync(OP_WAIT, 1'b1));
            eq.push_back(ei);
            eq.push_back(e_sync(OP_SIGNAL, 1'b1));
          end else begin
            eq.push_back(ei);
            eq.push_back(e_sync(OP_SIGNAL, 1'b1));
            eq.push_back(e_sync(OP_WAIT, 1'b1));    // result written back
          end
          rq.push_back(r_sync(OP_WAIT));
          ri = '0;
          ri.op = OP_RUN;
          ri.run.base_addr  = RES;
          ri.run.offset     = (tm * DM * NC + h * HALF + tn * DN) * (A / 8);
          ri.run.row_stride = NC * (A / 8);
          ri.run.res_slot   = 4'(overlap ? t % BR : 0);
          rq.push_back(ri);
          rq.push_back(r_sync(OP_SIGNAL));
          t++;
        end
        eq.push_back(e_sync(OP_SIGNAL, 1'b0));
        g++;
      end
  endtask

  // queue feeders: change inputs at the falling edge
  logic go = 1'b0;
  logic f_taken = 1'b0, e_taken = 1'b0, r_taken = 1'b0;
  initial begin
    fetch_instr_valid = 1'b0; exec_instr_valid = 1'b0; res_instr_valid = 1'b0;
    fetch_instr = '0; exec_instr = '0; res_instr = '0;
  end
  always @(negedge clk) begin
    if (f_taken) void'(fq.pop_front());
    if (e_taken) void'(eq.pop_front());
    if (r_taken) void'(rq.pop_front());
    fetch_instr_valid = go && fq.size() > 0;
    fetch_instr       = fq.size() > 0 ? fq[0] : '0;
    exec_instr_valid  = go && eq.size() > 0;
    exec_instr        = eq.size() > 0 ? eq[0] : '0;
    res_instr_valid   = go && rq.size() > 0;
    res_instr         = rq.size() > 0 ? rq[0] : '0;
    f_taken = fetch_instr_valid && fetch_instr_ready;
    e_taken = exec_instr_valid && exec_instr_ready;
    r_taken = res_instr_valid && res_instr_ready;
  end

  logic lbits [MR][K];
  logic rbits [NC][K];

  task automatic run_and_check(input bit overlap, output int cyc);
    int t0, got, exp_v, a;
    for (int x = RES / 8; x < RES / 8 + MR * NC * (A / 8) / 8; x++) mem.mem[x] = '0;
    build_program(overlap);
    // reset between programs so no token is left over from the previous one
    @(negedge clk);
    rst_n = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    t0 = cycles;
    go = 1'b1;
    repeat (2) @(negedge clk);
    while (busy || fq.size() > 0 || eq.size() > 0 || rq.size() > 0) @(negedge clk);
    go = 1'b0;
    cyc = cycles - t0;
    for (int m = 0; m < MR; m++)
      for (int n = 0; n < NC; n++) begin
        exp_v = 0;
        for (int k = 0; k < K; k++) exp_v += int'(lbits[m][k] & rbits[n][k]);
        a = RES + (m * NC + n) * (A / 8);
        got = int'(mem.mem[a / 8][(a % 8) * 8 +: 32]);
        checks++;
        if (got !== exp_v) begin
          failures++;
          if (failures < 10) $display("%s: P[%0d][%0d] = %0d expected %0d", overlap ? "overlapped" : "sequential", m, n, got, exp_v);
        end
      end
  endtask

  initial begin
    int c_ov, c_seq;
    #1;
    for (int m = 0; m < MR; m++)
      for (int k = 0; k < K; k++) begin
        int a;
        lbits[m][k] = 1'($urandom);
        a = SRC_L + (m * K + k) / 8;
        mem.mem[a / 8][(a % 8) * 8 + k % 8] = lbits[m][k];
      end
    for (int n = 0; n < NC; n++)
      for (int k = 0; k < K; k++) begin
        int a;
        rbits[n][k] = 1'($urandom);
        a = SRC_R + (n * K + k) / 8;
        mem.mem[a / 8][(a % 8) * 8 + k % 8] = rbits[n][k];
      end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_and_check(1'b0, c_seq);
    run_and_check(1'b1, c_ov);
    $display("256x4096x256 binary on 8x64x8: sequential %0d cycles, overlapped %0d cycles, speedup %0.2f",
             c_seq, c_ov, real'(c_seq) / c_ov);
    checks++;
    if (c_ov >= c_seq) begin failures++; $display("overlap gave no speedup"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
