// tb_fetch_stage: self-checking testbench for the fetch stage (stream reader
// plus the two chains of routers that deliver F-bit words to the LHS and RHS
// matrix buffers). Geometry DM=3, DN=2, DK=128, F=64, buffers of 16 rows.
// Main memory is the behavioural model (latency 4, random ready stalls).
// Every buffer write is captured into a shadow array and compared with the
// layout the run describes: the strided stream of num_blocks blocks is cut
// into pieces of words_per_buf words that go round-robin to buffers
// buf_start .. buf_start+buf_range-1, then the next round continues at the
// next words_per_buf rows' worth of addresses. Writes to any other buffer or
// address are detected because the shadow arrays start at a sentinel.
// Rate check: with stalls disabled a run of W words must complete within
// W + memory latency + router chain depth + a few control cycles, i.e. the
// fetch stage moves one F-bit word per cycle.
module tb_fetch_stage;
  import bismo_pkg::*;
  localparam int DM = 3, DN = 2, DK = 128, F = 64, BM = 16, BN = 16;
  localparam int FW = DK / F;                       // F-words per buffer row
  localparam int LA = $clog2(BM * FW), RA = $clog2(BN * FW);
  localparam int LAT = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic run_valid = 1'b0, run_done;
  fetch_run_t run = '0;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid;
  logic [ADDR_W-1:0] rd_req_addr;
  logic [F-1:0] rd_rsp_data;
  logic lhs_we [DM];
  logic [LA-1:0] lhs_waddr [DM];
  logic [F-1:0] lhs_wdata [DM];
  logic rhs_we [DN];
  logic [RA-1:0] rhs_waddr [DN];
  logic [F-1:0] rhs_wdata [DN];
  int checks = 0, failures = 0;

  fetch_stage #(.DM(DM), .DN(DN), .DK(DK), .F(F), .BM(BM), .BN(BN)) dut (.*);

  // memory: one read port, the write port is unused
  logic m_rv [1], m_rr [1], m_sv [1], m_wv [1], m_wr [1];
  logic [31:0] m_ra [1], m_wa [1];
  logic [F-1:0] m_sd [1], m_wd [1];
  main_memory_model #(.DW(F), .WORDS(1024), .NRD(1), .NWR(1), .LAT(LAT), .STALL(1'b1)) mem (
    .clk, .rd_req_valid(m_rv), .rd_req_ready(m_rr), .rd_req_addr(m_ra),
    .rd_rsp_valid(m_sv), .rd_rsp_data(m_sd),
    .wr_valid(m_wv), .wr_ready(m_wr), .wr_addr(m_wa), .wr_data(m_wd));
  assign m_rv[0] = rd_req_valid;
  assign m_ra[0] = rd_req_addr;
  assign rd_req_ready = m_rr[0];
  assign rd_rsp_valid = m_sv[0];
  assign rd_rsp_data  = m_sd[0];
  assign m_wv[0] = 1'b0;
  assign m_wa[0] = '0;
  assign m_wd[0] = '0;

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // shadow buffers: index 0..DM-1 are LHS, DM..DM+DN-1 are RHS
  localparam logic [F-1:0] SENT = {F/4{4'hD}};
  logic [F-1:0] shadow [DM+DN][BM*FW];
  logic [F-1:0] expect_b [DM+DN][BM*FW];
  always @(posedge clk) begin
    for (int m = 0; m < DM; m++) if (lhs_we[m]) shadow[m][lhs_waddr[m]] <= lhs_wdata[m];
    for (int n = 0; n < DN; n++) if (rhs_we[n]) shadow[DM+n][rhs_waddr[n]] <= rhs_wdata[n];
  end

  task automatic fetch(input int base, input int bbytes, input int stride, input int nblk,
                       input int boff, input int bstart, input int brange, input int wpb,
                       input bit timed);
    int w, cyc, total;
    fetch_run_t x;
    x = '0;
    x.base_addr = base; x.block_bytes = 16'(bbytes); x.block_stride = stride;
    x.num_blocks = 16'(nblk); x.buf_offset = 16'(boff); x.buf_start = 8'(bstart);
    x.buf_range = 8'(brange); x.words_per_buf = 16'(wpb);
    // expected placement
    w = 0;
    for (int b = 0; b < nblk; b++)
      for (int j = 0; j < bbytes / (F/8); j++) begin
        int a, id, addr;
        a    = base + b * stride + j * (F/8);
        id   = bstart + (w / wpb) % brange;
        addr = boff + (w / (wpb * brange)) * wpb + w % wpb;
        expect_b[id][addr] = mem.mem[a / (F/8)];
        w++;
      end
    total = w;
    @(negedge clk);
    run = x; run_valid = 1'b1;
    @(negedge clk);
    run_valid = 1'b0;
    cyc = 1;
    while (!run_done) begin @(negedge clk); cyc++; end
    repeat (2) @(negedge clk);
    for (int i = 0; i < DM+DN; i++)
      for (int a = 0; a < BM*FW; a++) begin
        checks++;
        if (shadow[i][a] !== expect_b[i][a]) begin
          failures++;
          if (failures < 10) $display("buffer %0d addr %0d = %h expected %h", i, a, shadow[i][a], expect_b[i][a]);
        end
      end
    if (timed) begin
      checks++;
      if (cyc > total + LAT + (DM > DN ? DM : DN) + 4) begin
        failures++;
        $display("%0d words took %0d cycles: below one word per cycle", total, cyc);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < DM+DN; i++)
      for (int a = 0; a < BM*FW; a++) begin shadow[i][a] = SENT; expect_b[i][a] = SENT; end
    #1;
    for (int a = 0; a < 1024; a++) mem.mem[a] = {$urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // LHS: 3 rows of one bit plane (DK bits each), two planes 256 bytes apart,
    // gathered as two blocks into buffer rows 0..1 of LHS buffers 0..2
    fetch(0, DM*FW*(F/8), 256, 2, 0, 0, DM, FW, 1'b0);
    // RHS: one contiguous block of 2 rows x 2 planes into rows 4..5 of RHS buffers
    fetch(1024, DN*FW*(F/8)*2, 0, 1, 4*FW, DM, DN, FW, 1'b0);
    // LHS, 4 buffer rows per buffer in one piece (longer words_per_buf)
    fetch(2048, DM*FW*4*(F/8), 0, 1, 8*FW, 0, DM, 4*FW, 1'b0);
    // timed run without memory stalls
    mem.stall_en = 1'b0;
    fetch(4096, DM*FW*(F/8)*4, 0, 1, 12*FW, 0, DM, FW, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
