// p2s: standalone parallel-to-serial converter. Host software keeps matrices in
// the usual bit-parallel layout [rows][cols][bits], each element padded to M
// bits; the multiplier wants bit-serial layout [bits][rows][cols], one binary
// matrix per bit position. The P2S reads the bit-parallel matrix and writes the
// prec binary matrices (bit 0 first), each rows*cols/8 bytes, back to back.
//
// How it works: the read DMA fetches F-bit words, each holding N = F/M
// elements. The serializer spreads bit b of every element over coalescing
// buffer b (one per bit position, M of them, each R bits wide); an element's
// column index within the current group of R columns picks the bit position it
// is written to. After R/N reads the buffers are full; the converter stalls
// reading and the write DMA writes buffers 0..prec-1 through a multiplexer to
// dst + b*rows*cols/8 + (r*cols + c)/8, the binary matrices being a
// rows*cols/8-byte stride apart. Because source and destination groups are both
// contiguous in row-major order, one pointer per side suffices.
// Columns must be a multiple of R; bits at and above prec are dropped.
//
// Interface: cmd_valid/cmd_ready/cmd (p2s_run_t); busy; read channel as the
// fetch stage's (in-order, no back pressure on responses); write channel
// wr_valid/wr_ready/wr_addr/wr_data. Timing: per group of R columns, R/N read
// requests, then prec writes. The structure follows the design; the command
// port and handshakes are this design's choices.
//
// Lint note: the command register keeps the whole command struct; the
// upper fields are consumed when the command is accepted, so only the
// precision field is read afterwards.
module p2s
  import bismo_pkg::*;
#(
  parameter int F = 64,
  parameter int R = 64,
  parameter int M = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  p2s_run_t          cmd,
  output logic              busy,
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output logic [ADDR_W-1:0] rd_req_addr,
  input  logic              rd_rsp_valid,
  input  logic [F-1:0]      rd_rsp_data,
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [R-1:0]      wr_data
);
  localparam int N   = F / M;        // elements per read word
  localparam int RPG = R / N;        // reads per group of R columns
  localparam int GW  = $clog2(RPG + 1);
  localparam int BW  = $clog2(M + 1);

  typedef enum logic [1:0] {S_IDLE, S_READ, S_WRITE} state_e;
  state_e            state;
  p2s_run_t          c;
  logic [ADDR_W-1:0] src_ptr, dst_ptr, plane_bytes, plane_addr;
  logic [31:0]       groups_left;
  logic [GW-1:0]     req_cnt, rsp_cnt;
  logic [BW-1:0]     wb;
  logic [R-1:0]      cbuf [M];       // coalescing buffers

  initial begin
    assert (F % M == 0 && R % N == 0) else $error("p2s: F must be N*M and R a multiple of N");
  end

  assign cmd_ready    = (state == S_IDLE);
  assign busy         = (state != S_IDLE);
  assign rd_req_valid = (state == S_READ) && (req_cnt != GW'(RPG));
  assign rd_req_addr  = src_ptr;
  assign wr_valid     = (state == S_WRITE);
  assign wr_addr      = plane_addr;
  assign wr_data      = cbuf[wb[$clog2(M)-1:0]];

  // serializer: bit b of element n of response k -> cbuf[b][k*N + n]
  always_ff @(posedge clk) begin
    if (state == S_READ && rd_rsp_valid) begin
      for (int n = 0; n < N; n++)
        for (int b = 0; b < M; b++)
          cbuf[b][int'(rsp_cnt) * N + n] <= rd_rsp_data[n*M + b];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      c           <= '0;
      src_ptr     <= '0;
      dst_ptr     <= '0;
      plane_bytes <= '0;
      plane_addr  <= '0;
      groups_left <= '0;
      req_cnt     <= '0;
      rsp_cnt     <= '0;
      wb          <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c           <= cmd;
          src_ptr     <= cmd.src_addr;
          dst_ptr     <= cmd.dst_addr;
          plane_bytes <= (ADDR_W'(cmd.rows) * ADDR_W'(cmd.cols)) / 8;
          groups_left <= (32'(cmd.rows) * 32'(cmd.cols)) / R;
          req_cnt     <= '0;
          rsp_cnt     <= '0;
          if (cmd.rows != 0 && cmd.cols >= 16'(R) && cmd.prec != 0) state <= S_READ;
        end
        S_READ: begin
          if (rd_req_valid && rd_req_ready) begin
            req_cnt <= req_cnt + 1'b1;
            src_ptr <= src_ptr + ADDR_W'(F / 8);
          end
          if (rd_rsp_valid) begin
            rsp_cnt <= rsp_cnt + 1'b1;
            if (rsp_cnt == GW'(RPG - 1)) begin
              state      <= S_WRITE;   // stall reading, write the buffers back
              wb         <= '0;
              plane_addr <= dst_ptr;
            end
          end
        end
        S_WRITE: if (wr_ready) begin
          if (wb == BW'(c.prec - 1)) begin
            dst_ptr     <= dst_ptr + ADDR_W'(R / 8);
            groups_left <= groups_left - 1'b1;
            req_cnt     <= '0;
            rsp_cnt     <= '0;
            state       <= (groups_left == 32'd1) ? S_IDLE : S_READ;
          end else begin
            wb         <= wb + 1'b1;
            plane_addr <= plane_addr + plane_bytes;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
