// tb_p2s_workload: the parallel-to-serial workload of the evaluation, run on
// the P2S converter at its default parameters (F=64, R=64, M=8): a 20 x 1280
// matrix of byte-padded elements converted at 1, 2, 3 and 4 bits of
// precision. Every output bit is compared with the source element's bit, the
// bytes after the last plane must stay untouched, and the cycle count of each
// conversion is printed and checked against a bound of one memory word per
// cycle plus the memory latency once per 64-column group (memory stalls are
// turned off for this measurement). The converter reads 3,200 words and
// writes 400 words per bit plane.
module tb_p2s_workload;
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

  p2s dut (.*);

  logic m_rv [1], m_rr [1], m_sv [1], m_wv [1], m_wr [1];
  logic [31:0] m_ra [1], m_wa [1];
  logic [F-1:0] m_sd [1], m_wd [1];
  main_memory_model #(.DW(F), .WORDS(16384), .NRD(1), .NWR(1), .LAT(4), .STALL(1'b1)) mem (
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
    int plane, e, a, cyc, bound;
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
    cyc = 1;
    while (busy) begin @(negedge clk); cyc++; end
    // one bus word per cycle: rows*cols/8 reads and prec*rows*cols/64 writes,
    // plus the memory latency once per 64-column group
    bound = rows * cols / 8 + prec * rows * cols / 64 + (rows * cols / 64) * 8 + 20;
    $display("P2S %0dx%0d at %0d bits: %0d cycles (%0.1f us at 300 MHz), bound %0d",
             rows, cols, prec, cyc, cyc / 300.0, bound);
    checks++;
    if (cyc > bound) begin failures++; $display("conversion slower than the bound"); end
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
    for (int a = 0; a < 16384; a++) mem.mem[a] = {8{8'hA5}};
    mem.stall_en = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int p = 1; p <= 4; p++) convert(32'h0, 32'h10000, 20, 1280, p);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
