// bismo_top: the bit-serial matrix multiplication overlay. An integer matrix
// product is computed as a weighted sum of binary matrix products; this top
// wires the three-stage pipeline that does so, plus the standalone
// parallel-to-serial converter.
//
//   fetch:   instruction queue -> controller -> fetch_stage (StreamReader and
//            router chains) -> DM left-hand and DN right-hand matrix buffers
//   execute: instruction queue -> controller -> execute_stage (sequence
//            generator and DM x DN DPU array) -> result buffer
//   result:  instruction queue -> controller -> result_stage (downsizer and
//            strided write DMA) -> main memory
//   sync:    four token FIFOs, fetch->execute, execute->fetch,
//            execute->result, result->execute
//   p2s:     separate command port and memory channels
//
// The stages share data only through the buffers and meet only through the
// token FIFOs, so fetching the next operands, multiplying and writing results
// overlap as far as the instruction streams allow.
//
// Interface: each instruction queue takes host pushes (valid/ready, instruction
// structs from bismo_pkg). Every memory master has its own channel at the
// ports (fetch read, result write, P2S read and write); the platform
// interconnect that merges them into one DRAM port is outside this design.
// busy is high while any queue holds instructions or any stage or the P2S works.
// Defaults are the 10 x 256 x 10 array with F = R = 64, A = 32 and buffers of
// 1024 words; the queue and FIFO depths are this design's choices.
//
// Lint notes: the token FIFOs' count outputs are left open, since the
// controllers need only avail/space. fc_wait, ec_wait, rc_wait and e_active are
// internal status nets kept for observation (the testbenches count Wait
// stalls and stage overlap from them); nothing in the design reads them.
// rst_n is asynchronous for all flops; the only synchronous use is the
// disable condition of the token FIFOs' handshake assertions.
module bismo_top
  import bismo_pkg::*;
#(
  parameter int DM = 10,
  parameter int DK = 256,
  parameter int DN = 10,
  parameter int A  = 32,
  parameter int F  = 64,
  parameter int R  = 64,
  parameter int BM = 1024,
  parameter int BN = 1024,
  parameter int BR = 2,
  parameter int M  = 8,
  parameter int IQ_DEPTH   = 16,
  parameter int SYNC_DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // host instruction queues
  input  logic              fetch_instr_valid,
  output logic              fetch_instr_ready,
  input  fetch_instr_t      fetch_instr,
  input  logic              exec_instr_valid,
  output logic              exec_instr_ready,
  input  exec_instr_t       exec_instr,
  input  logic              res_instr_valid,
  output logic              res_instr_ready,
  input  result_instr_t     res_instr,
  // fetch read channel
  output logic              fetch_rd_req_valid,
  input  logic              fetch_rd_req_ready,
  output logic [ADDR_W-1:0] fetch_rd_req_addr,
  input  logic              fetch_rd_rsp_valid,
  input  logic [F-1:0]      fetch_rd_rsp_data,
  // result write channel
  output logic              res_wr_valid,
  input  logic              res_wr_ready,
  output logic [ADDR_W-1:0] res_wr_addr,
  output logic [R-1:0]      res_wr_data,
  // P2S
  input  logic              p2s_cmd_valid,
  output logic              p2s_cmd_ready,
  input  p2s_run_t          p2s_cmd,
  output logic              p2s_rd_req_valid,
  input  logic              p2s_rd_req_ready,
  output logic [ADDR_W-1:0] p2s_rd_req_addr,
  input  logic              p2s_rd_rsp_valid,
  input  logic [F-1:0]      p2s_rd_rsp_data,
  output logic              p2s_wr_valid,
  input  logic              p2s_wr_ready,
  output logic [ADDR_W-1:0] p2s_wr_addr,
  output logic [R-1:0]      p2s_wr_data,
  output logic              busy
);
  localparam int LWA = $clog2(BM * (DK / F));
  localparam int RWA = $clog2(BN * (DK / F));
  localparam int FW  = $bits(fetch_instr_t);
  localparam int EW  = $bits(exec_instr_t);
  localparam int RW  = $bits(result_instr_t);

  // ---------------- instruction queues ----------------
  logic          fq_v, fq_r, eq_v, eq_r, rq_v, rq_r;
  logic [FW-1:0] fq_d;
  logic [EW-1:0] eq_d;
  logic [RW-1:0] rq_d;

  fifo #(.WIDTH(FW), .DEPTH(IQ_DEPTH)) u_fetch_q (
    .clk, .rst_n, .in_valid(fetch_instr_valid), .in_ready(fetch_instr_ready), .in_data(fetch_instr),
    .out_valid(fq_v), .out_ready(fq_r), .out_data(fq_d));
  fifo #(.WIDTH(EW), .DEPTH(IQ_DEPTH)) u_exec_q (
    .clk, .rst_n, .in_valid(exec_instr_valid), .in_ready(exec_instr_ready), .in_data(exec_instr),
    .out_valid(eq_v), .out_ready(eq_r), .out_data(eq_d));
  fifo #(.WIDTH(RW), .DEPTH(IQ_DEPTH)) u_res_q (
    .clk, .rst_n, .in_valid(res_instr_valid), .in_ready(res_instr_ready), .in_data(res_instr),
    .out_valid(rq_v), .out_ready(rq_r), .out_data(rq_d));

  // ---------------- synchronization FIFOs ----------------
  logic f2e_push, f2e_pop, f2e_avail, f2e_space;
  logic e2f_push, e2f_pop, e2f_avail, e2f_space;
  logic e2r_push, e2r_pop, e2r_avail, e2r_space;
  logic r2e_push, r2e_pop, r2e_avail, r2e_space;

  sync_fifo #(.DEPTH(SYNC_DEPTH)) u_f2e (.clk, .rst_n, .push(f2e_push), .pop(f2e_pop), .avail(f2e_avail), .space(f2e_space), .count());
  sync_fifo #(.DEPTH(SYNC_DEPTH)) u_e2f (.clk, .rst_n, .push(e2f_push), .pop(e2f_pop), .avail(e2f_avail), .space(e2f_space), .count());
  sync_fifo #(.DEPTH(SYNC_DEPTH)) u_e2r (.clk, .rst_n, .push(e2r_push), .pop(e2r_pop), .avail(e2r_avail), .space(e2r_space), .count());
  sync_fifo #(.DEPTH(SYNC_DEPTH)) u_r2e (.clk, .rst_n, .push(r2e_push), .pop(r2e_pop), .avail(r2e_avail), .space(r2e_space), .count());

  // ---------------- controllers ----------------
  logic fc_busy, ec_busy, rc_busy, fc_wait, ec_wait, rc_wait;
  logic f_run_v, f_run_done, e_run_v, e_run_done, r_run_v, r_run_done;
  logic [FETCH_RUN_W-1:0]  f_run;
  logic [EXEC_RUN_W-1:0]   e_run;
  logic [RESULT_RUN_W-1:0] r_run;

  stage_controller #(.RUN_W(FETCH_RUN_W), .NCHAN(1)) u_fetch_ctrl (
    .clk, .rst_n, .instr_valid(fq_v), .instr_ready(fq_r), .instr(fq_d),
    .tok_avail(e2f_avail), .tok_pop(e2f_pop), .tok_space(f2e_space), .tok_push(f2e_push),
    .run_valid(f_run_v), .run(f_run), .run_done(f_run_done), .busy(fc_busy), .waiting(fc_wait));

  logic [1:0] e_pop, e_push;
  stage_controller #(.RUN_W(EXEC_RUN_W), .NCHAN(2)) u_exec_ctrl (
    .clk, .rst_n, .instr_valid(eq_v), .instr_ready(eq_r), .instr(eq_d),
    .tok_avail({r2e_avail, f2e_avail}), .tok_pop(e_pop),
    .tok_space({e2r_space, e2f_space}), .tok_push(e_push),
    .run_valid(e_run_v), .run(e_run), .run_done(e_run_done), .busy(ec_busy), .waiting(ec_wait));
  assign f2e_pop  = e_pop[0];
  assign r2e_pop  = e_pop[1];
  assign e2f_push = e_push[0];
  assign e2r_push = e_push[1];

  stage_controller #(.RUN_W(RESULT_RUN_W), .NCHAN(1)) u_res_ctrl (
    .clk, .rst_n, .instr_valid(rq_v), .instr_ready(rq_r), .instr(rq_d),
    .tok_avail(e2r_avail), .tok_pop(e2r_pop), .tok_space(r2e_space), .tok_push(r2e_push),
    .run_valid(r_run_v), .run(r_run), .run_done(r_run_done), .busy(rc_busy), .waiting(rc_wait));

  // ---------------- fetch stage and matrix buffers ----------------
  logic           lhs_we [DM];
  logic [LWA-1:0] lhs_waddr [DM];
  logic [F-1:0]   lhs_wdata [DM];
  logic           rhs_we [DN];
  logic [RWA-1:0] rhs_waddr [DN];
  logic [F-1:0]   rhs_wdata [DN];

  fetch_stage #(.DM(DM), .DN(DN), .DK(DK), .F(F), .BM(BM), .BN(BN)) u_fetch (
    .clk, .rst_n, .run_valid(f_run_v), .run(fetch_run_t'(f_run)), .run_done(f_run_done),
    .rd_req_valid(fetch_rd_req_valid), .rd_req_ready(fetch_rd_req_ready), .rd_req_addr(fetch_rd_req_addr),
    .rd_rsp_valid(fetch_rd_rsp_valid), .rd_rsp_data(fetch_rd_rsp_data),
    .lhs_we, .lhs_waddr, .lhs_wdata, .rhs_we, .rhs_waddr, .rhs_wdata);

  logic [$clog2(BM)-1:0] lhs_raddr;
  logic [$clog2(BN)-1:0] rhs_raddr;
  logic [DK-1:0]         lhs_rdata [DM];
  logic [DK-1:0]         rhs_rdata [DN];

  for (genvar m = 0; m < DM; m++) begin : g_lhs_buf
    matrix_buffer #(.DEPTH(BM), .DK(DK), .F(F)) u_buf (
      .clk, .we(lhs_we[m]), .waddr(lhs_waddr[m]), .wdata(lhs_wdata[m]),
      .raddr(lhs_raddr), .rdata(lhs_rdata[m]));
  end
  for (genvar n = 0; n < DN; n++) begin : g_rhs_buf
    matrix_buffer #(.DEPTH(BN), .DK(DK), .F(F)) u_buf (
      .clk, .we(rhs_we[n]), .waddr(rhs_waddr[n]), .wdata(rhs_wdata[n]),
      .raddr(rhs_raddr), .rdata(rhs_rdata[n]));
  end

  // ---------------- execute stage and result buffer ----------------
  logic                  res_we;
  logic [$clog2(BR)-1:0] res_slot;
  logic signed [A-1:0]   res_data [DM][DN];
  logic                  e_active;

  execute_stage #(.DM(DM), .DN(DN), .DK(DK), .A(A), .BM(BM), .BN(BN), .BR(BR)) u_exec (
    .clk, .rst_n, .run_valid(e_run_v), .run(exec_run_t'(e_run)), .run_done(e_run_done),
    .lhs_raddr, .rhs_raddr, .lhs_rdata, .rhs_rdata,
    .res_we, .res_slot, .res_data, .active(e_active));

  logic [$clog2(BR)-1:0] rb_slot;
  logic [$clog2(DM)-1:0] rb_row;
  logic [DN*A-1:0]       rb_rdata;

  result_buffer #(.DM(DM), .DN(DN), .A(A), .BR(BR)) u_resbuf (
    .clk, .we(res_we), .wslot(res_slot), .wdata(res_data),
    .rslot(rb_slot), .rrow(rb_row), .rdata(rb_rdata));

  // ---------------- result stage ----------------
  result_stage #(.DM(DM), .DN(DN), .A(A), .R(R), .BR(BR)) u_res (
    .clk, .rst_n, .run_valid(r_run_v), .run(result_run_t'(r_run)), .run_done(r_run_done),
    .rb_slot, .rb_row, .rb_rdata,
    .wr_valid(res_wr_valid), .wr_ready(res_wr_ready), .wr_addr(res_wr_addr), .wr_data(res_wr_data));

  // ---------------- parallel-to-serial converter ----------------
  logic p2s_busy;
  p2s #(.F(F), .R(R), .M(M)) u_p2s (
    .clk, .rst_n, .cmd_valid(p2s_cmd_valid), .cmd_ready(p2s_cmd_ready), .cmd(p2s_cmd), .busy(p2s_busy),
    .rd_req_valid(p2s_rd_req_valid), .rd_req_ready(p2s_rd_req_ready), .rd_req_addr(p2s_rd_req_addr),
    .rd_rsp_valid(p2s_rd_rsp_valid), .rd_rsp_data(p2s_rd_rsp_data),
    .wr_valid(p2s_wr_valid), .wr_ready(p2s_wr_ready), .wr_addr(p2s_wr_addr), .wr_data(p2s_wr_data));

  assign busy = fq_v || eq_v || rq_v || fc_busy || ec_busy || rc_busy || p2s_busy;
endmodule
