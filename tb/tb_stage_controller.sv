// tb_stage_controller: self-checking testbench for the per-stage controller
// that executes the Run / Wait / Signal instruction stream (paper Sec. 3.3).
// NCHAN=2 token channels. A scripted instruction sequence is issued:
//  - Run: run_valid must pulse for exactly one cycle carrying the run field,
//    and the controller must accept nothing else until run_done is given
//    (the testbench delays run_done by a random number of cycles);
//  - Wait on a channel with no token: waiting must be high and no token may
//    be popped until tok_avail rises; then exactly one tok_pop on that channel;
//  - Signal on a channel whose FIFO is full: blocked until tok_space rises;
//    then exactly one tok_push on that channel.
// Wait/Signal with the token/space already present complete in 2 cycles.
module tb_stage_controller;
  import bismo_pkg::*;
  localparam int RUN_W = 8, NCHAN = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic instr_valid = 1'b0, instr_ready;
  logic [RUN_W+2:0] instr = '0;
  logic [NCHAN-1:0] tok_avail = '0, tok_pop, tok_space = '0, tok_push;
  logic run_valid, run_done = 1'b0, busy, waiting;
  logic [RUN_W-1:0] run;
  int checks = 0, failures = 0;
  int n_runv = 0, n_pop [NCHAN], n_push [NCHAN];
  logic [RUN_W-1:0] last_run = '0;

  stage_controller #(.RUN_W(RUN_W), .NCHAN(NCHAN)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin   // sample the values the DUT sees at this edge
    if (run_valid) begin n_runv++; last_run = run; end
    for (int c = 0; c < NCHAN; c++) begin
      if (tok_pop[c]) n_pop[c]++;
      if (tok_push[c]) n_push[c]++;
    end
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("%0t FAIL: %s", $time, msg); end
  endtask

  task automatic issue(input op_e op, input bit ch, input logic [RUN_W-1:0] r);
    @(negedge clk);
    instr = {r, ch, 2'(op)};
    instr_valid = 1'b1;
    while (!instr_ready) @(negedge clk);
    @(negedge clk);
    instr_valid = 1'b0;
  endtask

  initial begin
    int p0, q0, d, t;
    foreach (n_pop[c]) begin n_pop[c] = 0; n_push[c] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Run instructions with random completion delays
    for (int k = 0; k < 20; k++) begin
      logic [RUN_W-1:0] rv;
      int n_before;
      rv = $urandom;
      n_before = n_runv;
      issue(OP_RUN, 1'b0, rv);
      d = 1 + $urandom % 6;   // run_valid is seen on the first of these cycles
      repeat (d) begin
        @(negedge clk);
        check(instr_ready == 1'b0 && busy, "accepted an instruction while a run is in progress");
      end
      check(n_runv == n_before + 1, "run_valid was not a single-cycle pulse");
      check(last_run == rv, "run field wrong");
      run_done = 1'b1;
      @(negedge clk);
      run_done = 1'b0;
      check(instr_ready, "not ready after run_done");
    end
    // Wait with no token
    for (int c = 0; c < NCHAN; c++) begin
      p0 = n_pop[c]; q0 = n_pop[1-c];
      issue(OP_WAIT, c[0], '0);
      repeat (5) begin
        @(negedge clk);
        check(waiting && !instr_ready, "Wait did not block without a token");
      end
      check(n_pop[c] == p0, "token popped while none available");
      tok_avail[c] = 1'b1;
      @(negedge clk);
      tok_avail[c] = 1'b0;
      @(negedge clk);
      check(n_pop[c] == p0 + 1 && n_pop[1-c] == q0, "Wait popped the wrong number of tokens");
      check(instr_ready && !waiting, "Wait did not complete");
    end
    // Signal with a full FIFO
    for (int c = 0; c < NCHAN; c++) begin
      q0 = n_push[c]; p0 = n_push[1-c];
      issue(OP_SIGNAL, c[0], '0);
      repeat (5) @(negedge clk);
      check(n_push[c] == q0 && !instr_ready, "Signal did not block on a full FIFO");
      tok_space[c] = 1'b1;
      @(negedge clk);
      tok_space[c] = 1'b0;
      @(negedge clk);
      check(n_push[c] == q0 + 1 && n_push[1-c] == p0, "Signal pushed the wrong number of tokens");
    end
    // Wait / Signal that can complete at once take two cycles
    tok_avail = '1; tok_space = '1;
    @(negedge clk);
    instr = {8'h0, 1'b1, 2'(OP_WAIT)}; instr_valid = 1'b1;
    t = 0;
    @(negedge clk); instr_valid = 1'b0;
    while (!instr_ready) begin @(negedge clk); t++; end
    check(t == 1, $sformatf("Wait with a token took %0d extra cycles", t));
    check(n_pop[1] == 2, "Wait with a token did not pop exactly once");
    tok_avail = '0; tok_space = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
