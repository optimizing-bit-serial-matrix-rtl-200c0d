// tb_p2s: self-checking testbench for the standalone parallel-to-serial
// (P2S) converter at its default parameters (F=64, R=64, M=8).
// Input: a rows x cols matrix of M-bit elements, row-major, in main memory.
// Output: prec bit planes, plane b starting at dst + b*rows*cols/8, each a
// row-major rows x cols bit matrix. Two conversions are checked bit by bit:
// 2 x 128 at 4 bits and 3 x 256 at 3 bits, with random memory stalls.
// Bytes just past the last plane must stay untouched.
module tb_p2s;
  import bismo_pkg::*;
  localparam int F = 64, R = 64, M = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid = 1'b0, cmd_ready, busy;
  p2s_run_t cmd = '0;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid;
  logic [ADDR_W-1:0] rd_req_addr, wr_addr;
  logic [F-1:0] rd_rsp_data;
  logic wr_valid, wr_ready;
  logic [R-1:0] wr_data;
  int checks = 0, failures = 0;

  p2s #(.F(F), .R(R), .M(M)) dut (.*);

  logic m_rv [1], m_rr [1], m_sv [1], m_wv [1], m_wr [1];
  logic [31:0] m_ra [1], m_wa [1];
  logic [F-1:0] m_sd [1], m_wd [1];
  main_memory_model #(.DW(F), .WORDS(2048), .NRD(1), .NWR(1), .LAT(4), .STALL(1'b1)) mem (
    .clk, .rd_req_valid(m_rv), .rd_req_ready(m_rr), .rd_req_addr(m_ra),
    .rd_rsp_valid(m_sv), .rd_rsp_data(m_sd),
    .wr_valid(m_wv), .wr_ready(m_wr), .wr_addr(m_wa), .wr_data(m_wd));
  assign m_rv[0] = rd_req_valid;
  assign m_ra[0] = rd_req_addr;
  assign rd_req_ready = m_rr[0];
  assign rd_rsp_valid = m_sv[0];
  assign rd_rsp_data  = m_sd[0];
  assign m_wv[0] = wr_valid;
  assign m_wa[0] = wr_addr;
  assign m_wd[0] = wr_data;
  assign wr_ready = m_wr[0];

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] get_byte(input int addr);
    return mem.mem[addr / 8][(addr % 8) * 8 +: 8];
  endfunction

  task automatic convert(input int src, input int dst, input int rows, input int cols, input int prec);
    int plane, e, a;
    logic [7:0] v;
    for (e = 0; e < rows * cols; e++) begin
      v = $urandom;
      mem.mem[(src + e) / 8][((src + e) % 8) * 8 +: 8] = v;
    end
    @(negedge clk);
    cmd.src_addr = src; cmd.dst_addr = dst;
    cmd.rows = 16'(rows); cmd.cols = 16'(cols); cmd.prec = 4'(prec);
    cmd_valid = 1'b1;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 1'b0;
    while (busy) @(negedge clk);
    plane = rows * cols / 8;
    for (int b = 0; b < prec; b++)
      for (e = 0; e < rows * cols; e++) begin
        logic got, want;
        a = dst + b * plane + e / 8;
        got  = get_byte(a)[e % 8];
        want = get_byte(src + e)[b];
        checks++;
        if (got !== want) begin
          failures++;
          if (failures < 10) $display("plane %0d element %0d = %b expected %b", b, e, got, want);
        end
      end
    checks++;
    if (get_byte(dst + prec * plane) !== 8'hA5) begin failures++; $display("wrote past the last plane"); end
  endtask

  initial begin
    #1;
    for (int a = 0; a < 2048; a++) mem.mem[a] = {8{8'hA5}};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    convert(32'h0, 32'h2000, 2, 128, 4);
    convert(32'h1000, 32'h3000, 3, 256, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
