// main_memory_model: behavioural model of the off-chip DRAM, for testbenches
// only (not synthesizable logic of the design). Word-addressed storage of
// DW-bit words reached through NRD read channels and NWR write channels, all
// using byte addresses aligned to DW/8.
// Read channel: req_valid/req_ready/req_addr; the response comes back LAT
// cycles after acceptance, in order, on rsp_valid/rsp_data, without back
// pressure. Write channel: wr_valid/wr_ready/wr_addr/wr_data, written on
// acceptance. With STALL set, ready drops pseudo-randomly about one cycle in
// four to exercise back-pressure handling. Testbenches preload and inspect
// `mem` hierarchically.
module main_memory_model #(
  parameter int DW    = 64,
  parameter int WORDS = 16384,
  parameter int NRD   = 1,
  parameter int NWR   = 1,
  parameter int LAT   = 4,
  parameter bit STALL = 1'b1
) (
  input  logic          clk,
  input  logic          rd_req_valid [NRD],
  output logic          rd_req_ready [NRD],
  input  logic [31:0]   rd_req_addr  [NRD],
  output logic          rd_rsp_valid [NRD],
  output logic [DW-1:0] rd_rsp_data  [NRD],
  input  logic          wr_valid [NWR],
  output logic          wr_ready [NWR],
  input  logic [31:0]   wr_addr  [NWR],
  input  logic [DW-1:0] wr_data  [NWR]
);
  localparam int BYTES = DW / 8;
  logic [DW-1:0] mem [WORDS];

  logic          pv [NRD][LAT];
  logic [DW-1:0] pd [NRD][LAT];
  int unsigned   rd_stalls = 0, wr_stalls = 0;
  bit            stall_en = 1'b1;   // testbenches may clear this for timing checks

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = '0;
    for (int p = 0; p < NRD; p++)
      for (int s = 0; s < LAT; s++) pv[p][s] = 1'b0;
    for (int p = 0; p < NRD; p++) rd_req_ready[p] = 1'b1;
    for (int p = 0; p < NWR; p++) wr_ready[p] = 1'b1;
  end

  for (genvar p = 0; p < NRD; p++) begin : g_rd
    assign rd_rsp_valid[p] = pv[p][LAT-1];
    assign rd_rsp_data[p]  = pd[p][LAT-1];
  end

  always @(posedge clk) begin
    for (int p = 0; p < NRD; p++) begin
      for (int s = LAT-1; s > 0; s--) begin
        pv[p][s] <= pv[p][s-1];
        pd[p][s] <= pd[p][s-1];
      end
      pv[p][0] <= rd_req_valid[p] && rd_req_ready[p];
      if (rd_req_valid[p] && rd_req_ready[p]) begin
        if (rd_req_addr[p] % BYTES != 0 || rd_req_addr[p] / BYTES >= WORDS)
          $display("MEMORY MODEL: bad read address %h", rd_req_addr[p]);
        pd[p][0] <= mem[(rd_req_addr[p] / BYTES) % WORDS];
      end
      if (rd_req_valid[p] && !rd_req_ready[p]) rd_stalls++;
      rd_req_ready[p] <= (STALL && stall_en) ? (($urandom % 4) != 0) : 1'b1;
    end
    for (int p = 0; p < NWR; p++) begin
      if (wr_valid[p] && wr_ready[p]) begin
        if (wr_addr[p] % BYTES != 0 || wr_addr[p] / BYTES >= WORDS)
          $display("MEMORY MODEL: bad write address %h", wr_addr[p]);
        mem[(wr_addr[p] / BYTES) % WORDS] <= wr_data[p];
      end
      if (wr_valid[p] && !wr_ready[p]) wr_stalls++;
      wr_ready[p] <= (STALL && stall_en) ? (($urandom % 4) != 0) : 1'b1;
    end
  end
endmodule
