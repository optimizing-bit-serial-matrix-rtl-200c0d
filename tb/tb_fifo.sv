// tb_fifo: self-checking testbench for the valid/ready FIFO that holds the
// instruction queue of each pipeline stage. WIDTH=8, DEPTH=4 so the full and
// empty conditions are hit often. Random push and pop requests are driven at
// the falling edge; a SystemVerilog queue is the reference. Every cycle it
// checks out_valid, in_ready and the head data against the reference, and
// confirms that a pushed item is visible at the output one edge later.
module tb_fifo;
  localparam int WIDTH = 8, DEPTH = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, out_ready = 1'b0;
  logic in_ready, out_valid;
  logic [WIDTH-1:0] in_data = '0, out_data;
  logic [WIDTH-1:0] q[$];
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;

  fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      checks++;
      if (out_valid !== (q.size() > 0) || in_ready !== (q.size() < DEPTH)) begin
        failures++;
        if (failures < 10) $display("t=%0d flags valid=%b ready=%b size=%0d", t, out_valid, in_ready, q.size());
      end
      if (q.size() > 0) begin
        checks++;
        if (out_data !== q[0]) begin
          failures++;
          if (failures < 10) $display("t=%0d data %h expected %h", t, out_data, q[0]);
        end
      end
      if (q.size() == DEPTH) n_full++;
      if (q.size() == 0) n_empty++;
      // bias the traffic so the queue fills in some phases and drains in others
      in_valid  = ($urandom % 8) < ((t / 200) % 2 ? 6 : 2);
      out_ready = ($urandom % 8) < ((t / 200) % 2 ? 2 : 6);
      in_data   = $urandom;
      // update the reference with what the rising edge will do
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    checks++;
    if (n_full == 0 || n_empty == 0) begin failures++; $display("full/empty not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
