// result_stage: the StreamWriter. For a RunResult it reads the chosen result
// buffer slot row by row, cuts each row of DN A-bit results into R-bit words
// (the downsizer, wide in, narrow out) and writes them to main memory. Row m goes
// to base_addr + offset + m*row_stride, its word w to that address + w*R/8, so a
// tile lands inside a larger result matrix (strided write).
//
// Interface: run_valid/run (result_run_t), run_done pulse after the last write
// is accepted; rb_slot/rb_row select the result buffer row, rb_rdata returns it;
// memory write channel wr_valid/wr_ready/wr_addr/wr_data.
// Timing: one word per cycle while wr_ready is high, DM*ceil(DN*A/R) words per
// tile; run_done in the cycle after the last accepted word. Words are taken from
// the row least significant first, the last one zero-padded. The address
// arithmetic and channel handshake are this design's choices.
//
// Lint note: the stored run struct keeps all fields; base_addr and offset are
// used only when the run starts, so their stored copies are not read.
module result_stage
  import bismo_pkg::*;
#(
  parameter int DM = 10,
  parameter int DN = 10,
  parameter int A  = 32,
  parameter int R  = 64,
  parameter int BR = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  run_valid,
  input  result_run_t           run,
  output logic                  run_done,
  output logic [$clog2(BR)-1:0] rb_slot,
  output logic [$clog2(DM)-1:0] rb_row,
  input  logic [DN*A-1:0]       rb_rdata,
  output logic                  wr_valid,
  input  logic                  wr_ready,
  output logic [ADDR_W-1:0]     wr_addr,
  output logic [R-1:0]          wr_data
);
  localparam int WPR = (DN * A + R - 1) / R;   // words per row
  localparam int WW  = (WPR > 1) ? $clog2(WPR) : 1;

  result_run_t       r;
  logic              active;
  logic [$clog2(DM)-1:0] row;
  logic [WW-1:0]     word;
  logic [ADDR_W-1:0] row_addr;
  logic [WPR*R-1:0]  row_bits;

  assign rb_slot  = $clog2(BR)'(r.res_slot);
  assign rb_row   = row;
  assign row_bits = (WPR*R)'(rb_rdata);
  assign wr_valid = active;
  assign wr_addr  = row_addr + ADDR_W'(word) * ADDR_W'(R / 8);
  assign wr_data  = row_bits[word*R +: R];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active   <= 1'b0;
      run_done <= 1'b0;
      r        <= '0;
      row      <= '0;
      word     <= '0;
      row_addr <= '0;
    end else begin
      run_done <= 1'b0;
      if (run_valid && !active) begin
        r        <= run;
        active   <= 1'b1;
        row      <= '0;
        word     <= '0;
        row_addr <= run.base_addr + run.offset;
      end else if (active && wr_ready) begin
        if (word == WW'(WPR - 1)) begin
          word     <= '0;
          row_addr <= row_addr + r.row_stride;
          if (row == $clog2(DM)'(DM - 1)) begin
            active   <= 1'b0;
            run_done <= 1'b1;
          end else begin
            row <= row + 1'b1;
          end
        end else begin
          word <= word + 1'b1;
        end
      end
    end
  end
endmodule
