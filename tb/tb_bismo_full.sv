// tb_bismo_full: end-to-end test of the overlay at its default (paper)
// configuration: a 10 x 256 x 10 dot-product array, 64-bit fetch and result
// paths, 1024-row matrix buffers and a two-slot result buffer. The top is
// instantiated with no parameter override. The workload is the same program
// as tb_bismo_top, scaled up: a signed 3-bit 30 x 256 left matrix times a
// signed 2-bit 256 x 10 right matrix, computed as three 10 x 10 tiles of six
// bit-pair steps each (one DK-word per buffer row), after both operands are
// converted to bit-serial planes by the P2S unit. Every element of the
// 30 x 10 product is compared with an integer reference, and the same
// mechanism counters (accumulator modes, negation, Wait stalls in all three
// stages, fetch/execute overlap, P2S write-back, result-slot reuse, memory
// back pressure) must each be seen.
module tb_bismo_full;
  import bismo_pkg::*;

  // copies of the top's default parameters, used only to build the workload;
  // the top itself is instantiated without any parameter override
  localparam int DM = 10, DK = 256, DN = 10, A = 32, F = 64, R = 64, BM = 1024, BN = 1024, BR = 2, M = 8;
  localparam int TILES = 3;
  localparam int K  = 256;             // dot product length (bits)
  localparam int LB = 3, RB = 2;       // precisions, signed
  localparam int WATCHDOG = 200000;

  localparam int LROWS = DM * TILES;
  localparam int SRC_L = 'h0000, SRC_R = 'h2000, DST_L = 'h3000, DST_R = 'h4000, RES = 'h5000;
  localparam int LPLANE = LROWS * K / 8, RPLANE = DN * K / 8;
  localparam int FW_ROW = K / F;       // F-bit words per matrix row
  localparam int DKW_ROW = K / DK;     // DK-bit words per matrix row

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycles = 0;
  always @(posedge clk) cycles++;

  // ---------------- DUT ----------------
  logic fetch_instr_valid, fetch_instr_ready, exec_instr_valid, exec_instr_ready, res_instr_valid, res_instr_ready;
  fetch_instr_t fetch_instr; exec_instr_t exec_instr; result_instr_t res_instr;
  logic p2s_cmd_valid, p2s_cmd_ready; p2s_run_t p2s_cmd;
  logic busy;

  logic          rd_v [2], rd_r [2], rsp_v [2];
  logic [31:0]   rd_a [2];
  logic [F-1:0]  rsp_d [2];
  logic          wr_v [2], wr_r [2];
  logic [31:0]   wr_a [2];
  logic [R-1:0]  wr_d [2];

  bismo_top dut (
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

  main_memory_model #(.DW(F), .WORDS(4096), .NRD(2), .NWR(2), .LAT(5), .STALL(1'b1)) mem (
    .clk, .rd_req_valid(rd_v), .rd_req_ready(rd_r), .rd_req_addr(rd_a),
    .rd_rsp_valid(rsp_v), .rd_rsp_data(rsp_d),
    .wr_valid(wr_v), .wr_ready(wr_r), .wr_addr(wr_a), .wr_data(wr_d));

  // ---------------- workload ----------------
  int lmat [LROWS][K];
  int rmat [DN][K];       // right matrix, transposed: rmat[n][k] = Rmatrix[k][n]

  task automatic put_byte(int addr, logic [7:0] v);
    mem.mem[addr / 8][(addr % 8) * 8 +: 8] = v;
  endtask

  // ---------------- mechanism counters ----------------
  int n_zero = 0, n_keep = 0, n_shift = 0, n_neg = 0;
  int f_wait = 0, e_wait = 0, r_wait = 0, overlap = 0, p2s_wb = 0, res_runs = 0;
  exec_run_t er;
  assign er = exec_run_t'(dut.e_run);
  always @(negedge clk) if (rst_n) begin
    if (dut.e_run_v) begin
      case (er.acc_mode)
        ACC_ZERO:  n_zero++;
        ACC_SHIFT: n_shift++;
        default:   n_keep++;
      endcase
      if (er.negate) n_neg++;
    end
    if (dut.fc_wait) f_wait++;
    if (dut.ec_wait) e_wait++;
    if (dut.rc_wait) r_wait++;
    if (dut.u_fetch.u_reader.rsp_active && dut.e_active) overlap++;
    if (dut.p2s_wr_valid) p2s_wb++;
    if (dut.r_run_v) res_runs++;
  end

  // ---------------- host: instruction streams ----------------
  fetch_instr_t  fq [$];
  exec_instr_t   eq [$];
  result_instr_t rq [$];

  function automatic fetch_instr_t f_sync(op_e op);
    fetch_instr_t x = '0; x.op = op; return x;
  endfunction
  function automatic exec_instr_t e_sync(op_e op, logic chan);
    exec_instr_t x = '0; x.op = op; x.chan = chan; return x;
  endfunction
  function automatic result_instr_t r_sync(op_e op);
    result_instr_t x = '0; x.op = op; return x;
  endfunction
  function automatic fetch_instr_t f_run(int base, int bytes, int start, int range, int boff);
    fetch_instr_t x = '0;
    x.op = OP_RUN;
    x.run.base_addr = base; x.run.block_bytes = 16'(bytes); x.run.block_stride = 0;
    x.run.num_blocks = 1; x.run.buf_offset = 16'(boff); x.run.buf_start = 8'(start);
    x.run.buf_range = 8'(range); x.run.words_per_buf = 16'(FW_ROW);
    return x;
  endfunction

  task automatic build_program();
    int k = 0;
    for (int t = 0; t < TILES; t++) begin
      bit first = 1;
      for (int w = LB + RB - 2; w >= 0; w--) begin
        bit first_in_wf = 1;
        for (int i = LB - 1; i >= 0; i--) begin
          int j = w - i;
          int slot = k % 2;
          bit last;
          exec_instr_t ei;
          result_instr_t ri;
          if (j < 0 || j >= RB) continue;
          last = (w == 0);
          // fetch
          if (k >= 2) fq.push_back(f_sync(OP_WAIT));
          fq.push_back(f_run(DST_L + i * LPLANE + t * DM * K / 8, DM * K / 8, 0, DM, slot * FW_ROW));
          fq.push_back(f_run(DST_R + j * RPLANE, DN * K / 8, DM, DN, slot * FW_ROW));
          fq.push_back(f_sync(OP_SIGNAL));
          // execute
          eq.push_back(e_sync(OP_WAIT, 1'b0));
          if (last && t >= BR) eq.push_back(e_sync(OP_WAIT, 1'b1));
          ei = '0;
          ei.op = OP_RUN;
          ei.run.lhs_offset = 16'(slot * DKW_ROW);
          ei.run.rhs_offset = 16'(slot * DKW_ROW);
          ei.run.length     = 16'(DKW_ROW);
          ei.run.negate     = (i == LB - 1) ^ (j == RB - 1);
          ei.run.acc_mode   = first ? ACC_ZERO : (first_in_wf ? ACC_SHIFT : ACC_KEEP);
          ei.run.write_res  = last;
          ei.run.res_slot   = 4'(t % BR);
          eq.push_back(ei);
          eq.push_back(e_sync(OP_SIGNAL, 1'b0));
          if (last) begin
            eq.push_back(e_sync(OP_SIGNAL, 1'b1));
            rq.push_back(r_sync(OP_WAIT));
            ri = '0;
            ri.op = OP_RUN;
            ri.run.base_addr  = RES;
            ri.run.offset     = t * DM * (DN * A / 8);
            ri.run.row_stride = DN * A / 8;
            ri.run.res_slot   = 4'(t % BR);
            rq.push_back(ri);
            rq.push_back(r_sync(OP_SIGNAL));
          end
          first = 0;
          first_in_wf = 0;
          k++;
        end
      end
    end
  endtask

  // queue feeders: inputs change at the falling edge, so the DUT samples
  // stable values; an item offered while ready is high is taken at the next
  // rising edge and removed at the following falling edge.
  logic go = 1'b0;
  logic go_exec = 1'b0;  // execute instructions arrive late, so fetch must block on Wait
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
    exec_instr_valid  = go_exec && eq.size() > 0;
    exec_instr        = eq.size() > 0 ? eq[0] : '0;
    res_instr_valid   = go && rq.size() > 0;
    res_instr         = rq.size() > 0 ? rq[0] : '0;
    f_taken = fetch_instr_valid && fetch_instr_ready;
    e_taken = exec_instr_valid && exec_instr_ready;
    r_taken = res_instr_valid && res_instr_ready;
  end

  task automatic p2s_convert(int src, int dst, int rows, int cols, int prec);
    p2s_cmd.src_addr = src; p2s_cmd.dst_addr = dst;
    p2s_cmd.rows = 16'(rows); p2s_cmd.cols = 16'(cols); p2s_cmd.prec = 4'(prec);
    @(negedge clk);
    p2s_cmd_valid = 1'b1;
    while (!p2s_cmd_ready) @(negedge clk);
    @(negedge clk);
    p2s_cmd_valid = 1'b0;
    while (dut.p2s_busy) @(posedge clk);
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- main ----------------
  initial begin
    int t0, t1;
    p2s_cmd_valid = 1'b0;
    p2s_cmd = '0;
    #1;
    for (int m = 0; m < LROWS; m++)
      for (int k = 0; k < K; k++) begin
        lmat[m][k] = int'($urandom % (1 << LB)) - (1 << (LB - 1));
        put_byte(SRC_L + m * K + k, 8'(lmat[m][k]));
      end
    for (int n = 0; n < DN; n++)
      for (int k = 0; k < K; k++) begin
        rmat[n][k] = int'($urandom % (1 << RB)) - (1 << (RB - 1));
        put_byte(SRC_R + n * K + k, 8'(rmat[n][k]));
      end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);

    // parallel-to-serial conversion of both operands
    p2s_convert(SRC_L, DST_L, LROWS, K, LB);
    p2s_convert(SRC_R, DST_R, DN, K, RB);
    for (int b = 0; b < LB; b++)
      for (int m = 0; m < LROWS; m++)
        for (int k = 0; k < K; k++) begin
          int a;
          logic bit_v;
          a = DST_L + b * LPLANE + (m * K + k) / 8;
          bit_v = mem.mem[a / 8][(a % 8) * 8 + k % 8];
          if (bit_v !== 1'(lmat[m][k] >>> b)) begin
            failures++;
            if (failures < 5) $display("P2S mismatch L bit %0d row %0d col %0d", b, m, k);
          end
        end
    checks++;

    // matrix multiplication
    build_program();
    t0 = cycles;
    go = 1'b1;
    fork begin repeat (400) @(negedge clk); go_exec = 1'b1; end join_none
    repeat (2) @(negedge clk);
    while (busy || fq.size() > 0 || eq.size() > 0 || rq.size() > 0) @(negedge clk);
    t1 = cycles;
    $display("multiplication took %0d cycles", t1 - t0);

    for (int m = 0; m < LROWS; m++)
      for (int n = 0; n < DN; n++) begin
        int exp_v;
        int got;
        int a;
        exp_v = 0;
        a = RES + m * (DN * A / 8) + n * (A / 8);
        for (int k = 0; k < K; k++) exp_v += lmat[m][k] * rmat[n][k];
        got = int'(mem.mem[a / 8][(a % 8) * 8 +: 32]);
        checks++;
        if (got !== exp_v) begin
          failures++;
          $display("P[%0d][%0d] = %0d, expected %0d", m, n, got, exp_v);
        end
      end

    $display("mechanisms: zero=%0d keep=%0d shift=%0d negate=%0d fetch_wait=%0d exec_wait=%0d result_wait=%0d overlap=%0d p2s_writeback=%0d result_runs=%0d mem_rd_stall=%0d mem_wr_stall=%0d",
             n_zero, n_keep, n_shift, n_neg, f_wait, e_wait, r_wait, overlap, p2s_wb, res_runs, mem.rd_stalls, mem.wr_stalls);
    checks++; if (n_zero == 0)  begin failures++; $display("accumulator zero mode never used"); end
    checks++; if (n_keep == 0)  begin failures++; $display("accumulator keep mode never used"); end
    checks++; if (n_shift == 0) begin failures++; $display("accumulator shift mode never used"); end
    checks++; if (n_neg == 0)   begin failures++; $display("negation never used"); end
    checks++; if (f_wait == 0)  begin failures++; $display("fetch never stalled on Wait"); end
    checks++; if (e_wait == 0)  begin failures++; $display("execute never stalled on Wait"); end
    checks++; if (r_wait == 0)  begin failures++; $display("result never stalled on Wait"); end
    checks++; if (overlap == 0) begin failures++; $display("fetch and execute never overlapped"); end
    checks++; if (p2s_wb == 0)  begin failures++; $display("P2S never wrote back"); end
    checks++; if (res_runs <= BR) begin failures++; $display("result buffer slots never reused"); end
    checks++; if (mem.rd_stalls == 0 || mem.wr_stalls == 0) begin failures++; $display("no memory back pressure seen"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
