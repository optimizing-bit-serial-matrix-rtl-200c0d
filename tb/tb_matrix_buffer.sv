// tb_matrix_buffer: self-checking testbench for one LHS/RHS matrix buffer.
// Small geometry (DEPTH=16 rows of DK=128 bits, filled in F=32-bit words).
// Phase 1 writes every word in a random order, keeping a reference image;
// phase 2 reads every row and checks the registered read data one cycle
// after the address is presented (this design's one-cycle read latency);
// phase 3 overlaps random writes with reads of other rows.
module tb_matrix_buffer;
  localparam int DEPTH = 16, DK = 128, F = 32, WPR = DK / F;
  localparam int WAW = $clog2(DEPTH * WPR), RAW = $clog2(DEPTH);

  logic clk = 1'b0, we = 1'b0;
  logic [WAW-1:0] waddr = '0;
  logic [F-1:0] wdata = '0;
  logic [RAW-1:0] raddr = '0;
  logic [DK-1:0] rdata;
  logic [DK-1:0] img [DEPTH];
  int checks = 0, failures = 0;

  matrix_buffer #(.DEPTH(DEPTH), .DK(DK), .F(F)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_word(input int w, input logic [F-1:0] d);
    @(negedge clk);
    we = 1'b1; waddr = WAW'(w); wdata = d;
    img[w / WPR][(w % WPR) * F +: F] = d;
    @(negedge clk);
    we = 1'b0;
  endtask

  task automatic check_row(input int r);
    raddr = RAW'(r);
    @(negedge clk);   // one rising edge later the registered data is valid
    checks++;
    if (rdata !== img[r]) begin
      failures++;
      if (failures < 10) $display("row %0d = %h expected %h", r, rdata, img[r]);
    end
  endtask

  initial begin
    int order[DEPTH*WPR];
    for (int r = 0; r < DEPTH; r++) img[r] = '0;
    for (int i = 0; i < DEPTH*WPR; i++) order[i] = i;
    order.shuffle();
    foreach (order[i]) write_word(order[i], $urandom);
    @(negedge clk);
    for (int r = 0; r < DEPTH; r++) check_row(r);
    for (int t = 0; t < 100; t++) begin
      int w, r;
      w = $urandom % (DEPTH*WPR);
      r = ($urandom % DEPTH);
      if (r == w / WPR) r = (r + 1) % DEPTH;
      @(negedge clk);
      we = 1'b1; waddr = WAW'(w); wdata = $urandom; raddr = RAW'(r);
      @(negedge clk);
      we = 1'b0;
      checks++;
      if (rdata !== img[r]) begin failures++; $display("overlap row %0d wrong", r); end
      img[w / WPR][(w % WPR) * F +: F] = wdata;
      check_row(w / WPR);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
