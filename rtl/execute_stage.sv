// execute_stage: runs one RunExecute instruction on the dot product array.
// A single sequence generator produces buffer addresses offset+0 .. offset+len-1;
// the same sequence, with its own offset, addresses all left-hand and all
// right-hand matrix buffers. Each beat the DPA receives one DK-bit word per
// buffer, so every DPU adds the binary dot product of DK more columns. The
// accumulator mode of the instruction (zero, keep, shift left by one) is applied
// on the first beat; later beats keep accumulating. The negate flag applies to
// every beat. A run that only accumulates ends right after its last buffer
// read is issued, so the next run's beats follow it through the DPU pipeline
// without a bubble (mode and negate travel with each beat). Only a run that
// writes a result waits for the matrix buffer read and the DPU pipeline to
// drain, then copies all DM x DN accumulators in one cycle into a slot of the
// result buffer: as in the paper, the pipeline empties only where the execute
// stage synchronises with the result stage.
//
// Interface: run_valid/run (exec_run_t) in, run_done pulse out; lhs_raddr and
// rhs_raddr go to all buffers of each side (read latency one cycle); res_we,
// res_slot, res_data go to the result buffer.
// Timing: one beat per cycle; a run of L beats ends (run_done) L + 1 cycles
// after run_valid, or L + 5 cycles (run_done and the result write) when it
// writes a result. The datapath organisation follows the
// design; the split offsets, the result-write fields and the exact latency are
// this design's choices.
module execute_stage
  import bismo_pkg::*;
#(
  parameter int DM = 10,
  parameter int DN = 10,
  parameter int DK = 256,
  parameter int A  = 32,
  parameter int BM = 1024,
  parameter int BN = 1024,
  parameter int BR = 2
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                run_valid,
  input  exec_run_t           run,
  output logic                run_done,
  output logic [$clog2(BM)-1:0] lhs_raddr,
  output logic [$clog2(BN)-1:0] rhs_raddr,
  input  logic [DK-1:0]       lhs_rdata [DM],
  input  logic [DK-1:0]       rhs_rdata [DN],
  output logic                res_we,
  output logic [$clog2(BR)-1:0] res_slot,
  output logic signed [A-1:0] res_data [DM][DN],
  output logic                active     // a run is in progress
);
  localparam int DRAIN = 4;  // buffer read (1) + DPU (4) - 1

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_DRAIN, S_FINISH} state_e;
  state_e      state;
  exec_run_t   r;
  logic [15:0] beat;
  logic [2:0]  drain_cnt;

  // address sequence
  assign lhs_raddr = $clog2(BM)'(r.lhs_offset + beat);
  assign rhs_raddr = $clog2(BN)'(r.rhs_offset + beat);

  // control aligned with the buffer read data
  logic      beat_v_q, first_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat_v_q <= 1'b0;
      first_q  <= 1'b0;
    end else begin
      beat_v_q <= (state == S_ISSUE);
      first_q  <= (state == S_ISSUE) && (beat == '0);
    end
  end

  acc_mode_e mode;
  assign mode = first_q ? r.acc_mode : ACC_KEEP;

  dpa #(.DM(DM), .DN(DN), .DK(DK), .A(A)) u_dpa (
    .clk, .rst_n, .in_valid(beat_v_q), .lhs(lhs_rdata), .rhs(rhs_rdata),
    .negate(r.negate), .acc_mode(mode), .acc(res_data)
  );

  assign res_we   = (state == S_FINISH) && r.write_res;
  assign res_slot = $clog2(BR)'(r.res_slot);
  assign run_done = (state == S_FINISH);
  assign active   = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      r         <= '0;
      beat      <= '0;
      drain_cnt <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (run_valid) begin
          r         <= run;
          beat      <= '0;
          drain_cnt <= '0;
          state     <= (run.length != '0) ? S_ISSUE :
                       (run.write_res ? S_DRAIN : S_FINISH);
        end
        S_ISSUE: begin
          if (beat == r.length - 1'b1) state <= r.write_res ? S_DRAIN : S_FINISH;
          else                         beat  <= beat + 1'b1;
        end
        S_DRAIN: begin
          if (drain_cnt == 3'(DRAIN - 1)) state <= S_FINISH;
          drain_cnt <= drain_cnt + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
