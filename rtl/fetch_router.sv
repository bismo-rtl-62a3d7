// fetch_router: one node ("R") of the fetch stage's linear interconnect.
//
// Registers the packet it receives, passes the registered packet on to the
// next node, and writes it into its own matrix buffer when the packet's
// destination id equals MY_ID. One cycle per hop, no backpressure.
module fetch_router #(
  parameter int unsigned F     = 64,
  parameter int unsigned IDW   = 8,
  parameter int unsigned BAW   = 16,
  parameter int unsigned MY_ID = 0
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [IDW-1:0] in_id,
  input  logic [BAW-1:0] in_addr,
  input  logic [F-1:0]   in_data,
  output logic           out_valid,
  output logic [IDW-1:0] out_id,
  output logic [BAW-1:0] out_addr,
  output logic [F-1:0]   out_data,
  output logic           wr_en
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_id <= '0; out_addr <= '0; out_data <= '0;
    end else begin
      out_valid <= in_valid;
      out_id    <= in_id;
      out_addr  <= in_addr;
      out_data  <= in_data;
    end
  end
  assign wr_en = out_valid && (out_id == IDW'(MY_ID));
endmodule
