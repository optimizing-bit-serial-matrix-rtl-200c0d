// fetch_router: one node of the fetch stage's linear-array interconnect. A
// packet (destination buffer id, buffer address, F data bits) is registered
// once per node; the node writes its own matrix buffer when the id matches and
// always forwards the packet to the next node. Packets move one node per cycle
// and never stall, since the fetch stage only runs once the execute stage has
// released the buffers.
module fetch_router #(
  parameter int F    = 64,
  parameter int AW   = 12,
  parameter int ID   = 0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [7:0]    in_id,
  input  logic [AW-1:0] in_addr,
  input  logic [F-1:0]  in_data,
  output logic          out_valid,
  output logic [7:0]    out_id,
  output logic [AW-1:0] out_addr,
  output logic [F-1:0]  out_data,
  output logic          buf_we
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
  always_ff @(posedge clk) begin
    out_id   <= in_id;
    out_addr <= in_addr;
    out_data <= in_data;
  end
  assign buf_we = out_valid && (out_id == 8'(ID));
endmodule
