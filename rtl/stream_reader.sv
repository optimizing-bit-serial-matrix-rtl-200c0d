// stream_reader: DMA engine and route generator of the fetch stage.
// For a RunFetch it issues one read request per F-bit word: num_blocks blocks of
// block_bytes contiguous bytes, block_stride bytes apart. Every returned word
// gets a destination: word k goes to buffer
//   buf_start + (k / words_per_buf) mod buf_range
// at F-bit address
//   buf_offset + (k / (words_per_buf*buf_range))*words_per_buf + k mod words_per_buf,
// i.e. words_per_buf consecutive words per buffer, cycling over the range.
//
// Memory channel: rd_req_valid/rd_req_ready/rd_req_addr (byte address, F/8
// aligned), responses rd_rsp_valid/rd_rsp_data in request order without back
// pressure. Output: one packet per response in the same cycle. all_rcvd pulses
// when the last response of the run has been routed (or at once for an empty run).
//
// Lint note: the stored run struct keeps all fields; base_addr, block_bytes
// and buf_offset are used only when the run starts, so their stored copies are not read.
module stream_reader
  import bismo_pkg::*;
#(
  parameter int F  = 64,
  parameter int AW = 12
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          run_valid,
  input  fetch_run_t    run,
  output logic          all_rcvd,
  output logic          rd_req_valid,
  input  logic          rd_req_ready,
  output logic [ADDR_W-1:0] rd_req_addr,
  input  logic          rd_rsp_valid,
  input  logic [F-1:0]  rd_rsp_data,
  output logic          pkt_valid,
  output logic [7:0]    pkt_id,
  output logic [AW-1:0] pkt_addr,
  output logic [F-1:0]  pkt_data
);
  localparam int BYTES = F / 8;

  fetch_run_t        r;
  logic              req_active, rsp_active;
  logic [ADDR_W-1:0] blk_addr, cur_addr;
  logic [15:0]       blk_cnt, wrd_cnt, words_per_blk;
  logic [31:0]       rsp_left;
  logic [15:0]       in_buf_cnt;
  logic [7:0]        buf_idx;
  logic [AW-1:0]     grp_addr;

  assign rd_req_valid = req_active;
  assign rd_req_addr  = cur_addr;

  assign pkt_valid = rsp_active && rd_rsp_valid;
  assign pkt_id    = r.buf_start + buf_idx;
  assign pkt_addr  = grp_addr + AW'(in_buf_cnt);
  assign pkt_data  = rd_rsp_data;

  logic [15:0] wpb_in;
  logic [31:0] total_in;
  assign wpb_in   = 16'(run.block_bytes / 16'(BYTES));
  assign total_in = 32'(wpb_in) * 32'(run.num_blocks);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_active <= 1'b0;
      rsp_active <= 1'b0;
      all_rcvd   <= 1'b0;
      r          <= '0;
      blk_addr   <= '0;
      cur_addr   <= '0;
      blk_cnt    <= '0;
      wrd_cnt    <= '0;
      words_per_blk <= '0;
      rsp_left   <= '0;
      in_buf_cnt <= '0;
      buf_idx    <= '0;
      grp_addr   <= '0;
    end else begin
      all_rcvd <= 1'b0;
      if (run_valid) begin
        r             <= run;
        words_per_blk <= wpb_in;
        blk_addr      <= run.base_addr;
        cur_addr      <= run.base_addr;
        blk_cnt       <= '0;
        wrd_cnt       <= '0;
        rsp_left      <= total_in;
        in_buf_cnt    <= '0;
        buf_idx       <= '0;
        grp_addr      <= AW'(run.buf_offset);
        req_active    <= (total_in != 0);
        rsp_active    <= (total_in != 0);
        all_rcvd      <= (total_in == 0);
      end else begin
        // request generation: strided blocks of contiguous words
        if (req_active && rd_req_ready) begin
          if (wrd_cnt == words_per_blk - 1'b1) begin
            wrd_cnt  <= '0;
            blk_cnt  <= blk_cnt + 1'b1;
            blk_addr <= blk_addr + r.block_stride;
            cur_addr <= blk_addr + r.block_stride;
            if (blk_cnt == r.num_blocks - 1'b1) req_active <= 1'b0;
          end else begin
            wrd_cnt  <= wrd_cnt + 1'b1;
            cur_addr <= cur_addr + ADDR_W'(BYTES);
          end
        end
        // route generation for each returned word
        if (pkt_valid) begin
          rsp_left <= rsp_left - 1'b1;
          if (rsp_left == 32'd1) begin
            rsp_active <= 1'b0;
            all_rcvd   <= 1'b1;
          end
          if (in_buf_cnt == r.words_per_buf - 1'b1) begin
            in_buf_cnt <= '0;
            if (buf_idx == r.buf_range - 1'b1) begin
              buf_idx  <= '0;
              grp_addr <= grp_addr + AW'(r.words_per_buf);
            end else begin
              buf_idx <= buf_idx + 1'b1;
            end
          end else begin
            in_buf_cnt <= in_buf_cnt + 1'b1;
          end
        end
      end
    end
  end
endmodule
