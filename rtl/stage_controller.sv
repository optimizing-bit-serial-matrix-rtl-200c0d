// stage_controller: the in-order instruction engine of one pipeline stage
// (fetch, execute or result). It pops the stage's instruction queue one
// instruction at a time:
//   Wait   - blocks until the selected incoming synchronization FIFO holds a
//            token, then takes it;
//   Signal - puts a token into the selected outgoing synchronization FIFO
//            (waiting while that FIFO is full);
//   Run    - hands the run payload to the stage (run_valid for one cycle) and
//            blocks until the stage reports run_done.
// Tokens mean nothing by themselves; software decides what each one stands for
// (a buffer filled, a buffer free), which is how the three stages overlap.
//
// Interface: instruction word {run[RUN_W], chan, op[2]} (op: 0 Run, 1 Wait,
// 2 Signal); NCHAN incoming (tok_avail/tok_pop) and outgoing
// (tok_space/tok_push) FIFO pairs, chan selects the pair when NCHAN is 2.
// Timing: an instruction is taken in one cycle and executed from the next, so
// Wait/Signal cost two cycles when not blocked. One controller design serving
// all stages and the encoding are this design's choices.
//
// Lint note: the channel index is an int for clean array indexing; only its
// low bit can be non-zero.
module stage_controller
  import bismo_pkg::*;
#(
  parameter int RUN_W = 8,
  parameter int NCHAN = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             instr_valid,
  output logic             instr_ready,
  input  logic [RUN_W+2:0] instr,
  input  logic [NCHAN-1:0] tok_avail,
  output logic [NCHAN-1:0] tok_pop,
  input  logic [NCHAN-1:0] tok_space,
  output logic [NCHAN-1:0] tok_push,
  output logic             run_valid,
  output logic [RUN_W-1:0] run,
  input  logic             run_done,
  output logic             busy,
  output logic             waiting     // blocked on a Wait with no token
);
  typedef enum logic [1:0] {S_FETCH, S_EXEC, S_RUN} state_e;
  state_e           state;
  op_e              op_q;
  logic             chan_q;
  logic [RUN_W-1:0] run_q;
  int unsigned      ch;

  assign ch          = (NCHAN > 1) ? int'(chan_q) : 0;
  assign instr_ready = (state == S_FETCH);
  assign run         = run_q;
  assign busy        = (state != S_FETCH);

  always_comb begin
    tok_pop   = '0;
    tok_push  = '0;
    run_valid = 1'b0;
    waiting   = 1'b0;
    if (state == S_EXEC) begin
      unique case (op_q)
        OP_WAIT: begin
          tok_pop[ch] = tok_avail[ch];
          waiting     = !tok_avail[ch];
        end
        OP_SIGNAL: tok_push[ch] = tok_space[ch];
        default:   run_valid    = 1'b1;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_FETCH;
      op_q   <= OP_RUN;
      chan_q <= 1'b0;
      run_q  <= '0;
    end else begin
      unique case (state)
        S_FETCH: if (instr_valid) begin
          op_q   <= op_e'(instr[1:0]);
          chan_q <= instr[2];
          run_q  <= instr[RUN_W+2:3];
          state  <= S_EXEC;
        end
        S_EXEC: begin
          unique case (op_q)
            OP_WAIT:   if (tok_avail[ch]) state <= S_FETCH;
            OP_SIGNAL: if (tok_space[ch]) state <= S_FETCH;
            default:   state <= S_RUN;
          endcase
        end
        default: if (run_done) state <= S_FETCH;
      endcase
    end
  end
endmodule
