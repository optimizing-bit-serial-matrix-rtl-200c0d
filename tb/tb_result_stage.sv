// tb_result_stage: self-checking testbench for the result stage, which copies
// one DM x DN tile of A-bit accumulators from a result-buffer slot to main
// memory, one row of DN values at a time in R-bit words.
// DM=3, DN=3, A=32, R=64, BR=2: a row is 96 bits, sent as two 64-bit words
// (the upper half of the second word is padding and ignored). The result
// buffer is modelled as an array with a combinational row read, like
// result_buffer. The memory model accepts writes with random ready stalls.
// Checks: every accumulator lands at base + offset + row*row_stride + n*A/8;
// bytes between rows are untouched; run_done pulses once per run; and with
// stalls disabled a run takes DM * ceil(DN*A/R) + 1 cycles (one word per cycle).
module tb_result_stage;
  import bismo_pkg::*;
  localparam int DM = 3, DN = 3, A = 32, R = 64, BR = 2;
  localparam int WPR = (DN * A + R - 1) / R;

  logic clk = 1'b0, rst_n = 1'b0;
  logic run_valid = 1'b0, run_done;
  result_run_t run = '0;
  logic [$clog2(BR)-1:0] rb_slot;
  logic [$clog2(DM)-1:0] rb_row;
  logic [DN*A-1:0] rb_rdata;
  logic wr_valid, wr_ready;
  logic [ADDR_W-1:0] wr_addr;
  logic [R-1:0] wr_data;
  int checks = 0, failures = 0;
  logic [A-1:0] tile [BR][DM][DN];

  result_stage #(.DM(DM), .DN(DN), .A(A), .R(R), .BR(BR)) dut (.*);

  always_comb
    for (int n = 0; n < DN; n++) rb_rdata[n*A +: A] = tile[rb_slot][rb_row][n];

  logic m_rv [1], m_rr [1], m_sv [1], m_wv [1], m_wr [1];
  logic [31:0] m_ra [1], m_wa [1];
  logic [R-1:0] m_sd [1], m_wd [1];
  main_memory_model #(.DW(R), .WORDS(1024), .NRD(1), .NWR(1), .LAT(4), .STALL(1'b1)) mem (
    .clk, .rd_req_valid(m_rv), .rd_req_ready(m_rr), .rd_req_addr(m_ra),
    .rd_rsp_valid(m_sv), .rd_rsp_data(m_sd),
    .wr_valid(m_wv), .wr_ready(m_wr), .wr_addr(m_wa), .wr_data(m_wd));
  assign m_rv[0] = 1'b0;
  assign m_ra[0] = '0;
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

  int n_done = 0;
  always @(posedge clk) if (run_done) n_done++;

  function automatic logic [A-1:0] get32(input int addr);
    return mem.mem[addr / 8][(addr % 8) * 8 +: 32];
  endfunction

  task automatic store(input int base, input int off, input int stride, input int slot, input bit timed);
    int cyc, d0;
    result_run_t x;
    x = '0;
    x.base_addr = base; x.offset = off; x.row_stride = stride; x.res_slot = 4'(slot);
    d0 = n_done;
    @(negedge clk);
    run = x; run_valid = 1'b1;
    @(negedge clk);
    run_valid = 1'b0;
    cyc = 1;
    while (!run_done) begin @(negedge clk); cyc++; end
    repeat (3) @(negedge clk);
    checks++;
    if (n_done != d0 + 1) begin failures++; $display("run_done pulsed %0d times", n_done - d0); end
    for (int m = 0; m < DM; m++) begin
      for (int n = 0; n < DN; n++) begin
        checks++;
        if (get32(base + off + m * stride + n * (A/8)) !== tile[slot][m][n]) begin
          failures++;
          if (failures < 10) $display("slot %0d [%0d][%0d] at %h = %h expected %h", slot, m, n,
            base + off + m * stride + n * (A/8), get32(base + off + m * stride + n * (A/8)), tile[slot][m][n]);
        end
      end
      // the gap after each padded row must stay untouched
      checks++;
      if (get32(base + off + m * stride + WPR * (R/8)) !== 32'hCAFEF00D) begin
        failures++; $display("row %0d wrote past its end", m);
      end
    end
    if (timed) begin
      checks++;
      if (cyc != DM * WPR + 1) begin
        failures++;
        $display("run took %0d cycles, expected %0d", cyc, DM * WPR + 1);
      end
    end
  endtask

  initial begin
    #1;
    for (int a = 0; a < 1024; a++) mem.mem[a] = {2{32'hCAFEF00D}};
    for (int s = 0; s < BR; s++)
      for (int m = 0; m < DM; m++)
        for (int n = 0; n < DN; n++) tile[s][m][n] = $urandom;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    store(32'h100, 0, 64, 0, 1'b0);
    store(32'h100, 32'h200, 24 * 8, 1, 1'b0);
    for (int s = 0; s < BR; s++)
      for (int m = 0; m < DM; m++)
        for (int n = 0; n < DN; n++) tile[s][m][n] = $urandom;
    store(32'h800, 32'h40, 32, 1, 1'b0);
    mem.stall_en = 1'b0;
    store(32'hC00, 0, 32, 0, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
