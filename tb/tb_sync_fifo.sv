// tb_sync_fifo: self-checking testbench for the token synchronisation FIFO
// between two pipeline stages. Tokens carry no data, so the reference is a
// counter. Random push/pop (only when allowed by space/avail, as a stage
// controller would) are driven; count, avail and space are checked every
// cycle, and the counter must reach both empty and full (DEPTH=4).
module tb_sync_fifo;
  localparam int DEPTH = 4, CW = $clog2(DEPTH + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  logic push = 1'b0, pop = 1'b0;
  logic avail, space;
  logic [CW-1:0] count;
  int ref_cnt = 0, checks = 0, failures = 0, n_full = 0, n_empty = 0, n_both = 0;

  sync_fifo #(.DEPTH(DEPTH)) dut (.*);

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
      if (count !== CW'(ref_cnt) || avail !== (ref_cnt > 0) || space !== (ref_cnt < DEPTH)) begin
        failures++;
        if (failures < 10) $display("t=%0d count=%0d avail=%b space=%b expected %0d", t, count, avail, space, ref_cnt);
      end
      if (ref_cnt == DEPTH) n_full++;
      if (ref_cnt == 0) n_empty++;
      push = space && (($urandom % 8) < ((t / 100) % 2 ? 6 : 2));
      pop  = avail && (($urandom % 8) < ((t / 100) % 2 ? 2 : 6));
      if (push && pop) n_both++;
      ref_cnt = ref_cnt + int'(push) - int'(pop);
    end
    checks++;
    if (n_full == 0 || n_empty == 0 || n_both == 0) begin failures++; $display("coverage incomplete"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
