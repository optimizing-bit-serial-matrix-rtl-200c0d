// fetch_stage: moves bit-serial matrix data from main memory into the matrix
// buffers for one RunFetch instruction. A stream_reader issues the strided reads
// and tags every returned F-bit word with its destination buffer and address;
// the tagged packets travel through a linear array of router nodes, one chain
// past the DM left-hand buffers (ids 0..DM-1) and one past the DN right-hand
// buffers (ids DM..DM+DN-1), each node writing its own buffer. The interconnect
// is as wide as the memory read channel (F bits), so it never limits the
// fetch rate: one word per cycle when memory delivers one word per cycle.
//
// Interface: run_valid/run start a fetch, run_done pulses once the last word
// has been written into its buffer. The memory read channel and the per-buffer
// write ports (we, waddr in F-bit words, wdata) are brought out.
// Timing: a word returned in cycle t is written into buffer i of a chain at the
// end of cycle t+i+1; run_done follows the last response by max(DM,DN)+1 cycles.
// The StreamReader/router organisation follows the design; the route formula,
// buffer numbering and handshakes are this design's choices.
module fetch_stage
  import bismo_pkg::*;
#(
  parameter int DM = 10,
  parameter int DN = 10,
  parameter int DK = 256,
  parameter int F  = 64,
  parameter int BM = 1024,
  parameter int BN = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run_valid,
  input  fetch_run_t        run,
  output logic              run_done,
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output logic [ADDR_W-1:0] rd_req_addr,
  input  logic              rd_rsp_valid,
  input  logic [F-1:0]      rd_rsp_data,
  output logic              lhs_we    [DM],
  output logic [$clog2(BM*(DK/F))-1:0] lhs_waddr [DM],
  output logic [F-1:0]      lhs_wdata [DM],
  output logic              rhs_we    [DN],
  output logic [$clog2(BN*(DK/F))-1:0] rhs_waddr [DN],
  output logic [F-1:0]      rhs_wdata [DN]
);
  localparam int LAW   = $clog2(BM * (DK / F));
  localparam int RAW   = $clog2(BN * (DK / F));
  localparam int AW    = (LAW > RAW) ? LAW : RAW;
  localparam int DRAIN = ((DM > DN) ? DM : DN) + 1;

  logic          all_rcvd;
  logic          pkt_valid;
  logic [7:0]    pkt_id;
  logic [AW-1:0] pkt_addr;
  logic [F-1:0]  pkt_data;

  stream_reader #(.F(F), .AW(AW)) u_reader (
    .clk, .rst_n, .run_valid, .run, .all_rcvd,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_data,
    .pkt_valid, .pkt_id, .pkt_addr, .pkt_data
  );

  // LHS chain
  logic          lv [DM+1];
  logic [7:0]    li [DM+1];
  logic [AW-1:0] la [DM+1];
  logic [F-1:0]  ld [DM+1];
  assign lv[0] = pkt_valid;
  assign li[0] = pkt_id;
  assign la[0] = pkt_addr;
  assign ld[0] = pkt_data;
  for (genvar m = 0; m < DM; m++) begin : g_lhs
    fetch_router #(.F(F), .AW(AW), .ID(m)) u_r (
      .clk, .rst_n, .in_valid(lv[m]), .in_id(li[m]), .in_addr(la[m]), .in_data(ld[m]),
      .out_valid(lv[m+1]), .out_id(li[m+1]), .out_addr(la[m+1]), .out_data(ld[m+1]),
      .buf_we(lhs_we[m])
    );
    assign lhs_waddr[m] = LAW'(la[m+1]);
    assign lhs_wdata[m] = ld[m+1];
  end

  // RHS chain
  logic          rv [DN+1];
  logic [7:0]    ri [DN+1];
  logic [AW-1:0] ra [DN+1];
  logic [F-1:0]  rd [DN+1];
  assign rv[0] = pkt_valid;
  assign ri[0] = pkt_id;
  assign ra[0] = pkt_addr;
  assign rd[0] = pkt_data;
  for (genvar n = 0; n < DN; n++) begin : g_rhs
    fetch_router #(.F(F), .AW(AW), .ID(DM + n)) u_r (
      .clk, .rst_n, .in_valid(rv[n]), .in_id(ri[n]), .in_addr(ra[n]), .in_data(rd[n]),
      .out_valid(rv[n+1]), .out_id(ri[n+1]), .out_addr(ra[n+1]), .out_data(rd[n+1]),
      .buf_we(rhs_we[n])
    );
    assign rhs_waddr[n] = RAW'(ra[n+1]);
    assign rhs_wdata[n] = rd[n+1];
  end

  // completion: wait for the last packet to leave both chains
  logic [$clog2(DRAIN+1)-1:0] drain_cnt;
  logic                       draining;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      draining  <= 1'b0;
      drain_cnt <= '0;
      run_done  <= 1'b0;
    end else begin
      run_done <= 1'b0;
      if (all_rcvd) begin
        draining  <= 1'b1;
        drain_cnt <= '0;
      end else if (draining) begin
        if (drain_cnt == ($clog2(DRAIN+1))'(DRAIN - 1)) begin
          draining <= 1'b0;
          run_done <= 1'b1;
        end else begin
          drain_cnt <= drain_cnt + 1'b1;
        end
      end
    end
  end
endmodule
