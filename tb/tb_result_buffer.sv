// tb_result_buffer: self-checking testbench for the multi-slot result buffer
// that decouples the execute stage (writes a whole DM x DN tile at once) from
// the result stage (reads one row of DN accumulators at a time).
// DM=3, DN=2, BR=2. Random tiles are written into random slots; every row of
// every slot is then read back combinationally and compared, including after
// a write to the other slot (which must not disturb this slot).
module tb_result_buffer;
  localparam int DM = 3, DN = 2, A = 32, BR = 2;
  logic clk = 1'b0, we = 1'b0;
  logic [$clog2(BR)-1:0] wslot = '0, rslot = '0;
  logic [$clog2(DM)-1:0] rrow = '0;
  logic signed [A-1:0] wdata [DM][DN];
  logic [DN*A-1:0] rdata;
  int img [BR][DM][DN];
  int checks = 0, failures = 0;

  result_buffer #(.DM(DM), .DN(DN), .A(A), .BR(BR)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int s = 0; s < BR; s++)
      for (int m = 0; m < DM; m++) begin
        rslot = s; rrow = m;
        #1;
        for (int n = 0; n < DN; n++) begin
          checks++;
          if (rdata[n*A +: A] !== A'(img[s][m][n])) begin
            failures++;
            if (failures < 10) $display("slot %0d row %0d col %0d = %0d expected %0d", s, m, n, $signed(rdata[n*A +: A]), img[s][m][n]);
          end
        end
      end
  endtask

  initial begin
    for (int m = 0; m < DM; m++) for (int n = 0; n < DN; n++) wdata[m][n] = '0;
    for (int t = 0; t < 40; t++) begin
      int s;
      s = (t < 2) ? t : $urandom % BR;
      @(negedge clk);
      we = 1'b1; wslot = s;
      for (int m = 0; m < DM; m++)
        for (int n = 0; n < DN; n++) begin
          wdata[m][n] = $urandom;
          img[s][m][n] = wdata[m][n];
        end
      @(negedge clk);
      we = 1'b0;
      if (t >= 1) check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
