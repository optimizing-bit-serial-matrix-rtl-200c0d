// tb_and_popcount: self-checking testbench for the fused AND-popcount unit.
// It drives random operand pairs every cycle (plus all-ones and all-zeros
// corner cases) at the default width DK=256 and compares the count against
// $countones(a & b) exactly three clock edges later, so both the value and
// the three-stage pipeline latency of this design are checked.
// Interface under test: a, b in, count out; no handshake, one result per cycle.
module tb_and_popcount;
  localparam int DK = 256;
  localparam int CW = $clog2(DK + 1);
  localparam int LAT = 3;

  logic clk = 1'b0;
  logic [DK-1:0] a = '0, b = '0;
  logic [CW-1:0] count;
  int checks = 0, failures = 0;
  int exp_q[$];

  and_popcount #(.DK(DK)) dut (.clk(clk), .a(a), .b(b), .count(count));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [DK-1:0] rand_vec();
    logic [DK-1:0] v;
    for (int i = 0; i < DK; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    int exp_v;
    for (int i = 0; i < LAT; i++) exp_q.push_back(-1);
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      // compare the result of the operands driven LAT cycles ago
      exp_v = exp_q.pop_front();
      if (exp_v >= 0) begin
        checks++;
        if (count !== CW'(exp_v)) begin
          failures++;
          if (failures < 10) $display("t=%0d count=%0d expected %0d", t, count, exp_v);
        end
      end
      case (t)
        0: begin a = '1; b = '1; end
        1: begin a = '0; b = '1; end
        2: begin a = '1; b = {DK/2{2'b01}}; end
        default: begin a = rand_vec(); b = rand_vec(); end
      endcase
      exp_q.push_back($countones(a & b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
