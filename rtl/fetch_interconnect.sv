// fetch_interconnect: linear array of router nodes feeding the matrix buffers.
//
// The stream reader's packets enter two chains of routers, following the
// overlay's datapath diagram: one chain runs along the DM left-hand-side
// buffers (starting at buffer DM-1, ending at buffer 0) and one along the DN
// right-hand-side buffers (starting at buffer DM, i.e. RHS 0). Every node
// registers the packet and writes it into its buffer if the id matches.
// Buffer ids: 0..DM-1 LHS rows, DM..DM+DN-1 RHS columns. Both chains carry F
// bits per cycle, the width of the memory read channel, so the interconnect
// never throttles the fetch stream.
//
// Latency: a packet for LHS buffer i is written p+1 cycles after it enters,
// p = DM-1-i its position in the chain; for RHS buffer j it is j+1 cycles.
// The worst case is max(DM,DN) cycles. Write ports: wr_en/wr_addr/wr_data per buffer,
// index = buffer id.
module fetch_interconnect #(
  parameter int unsigned DM  = 8,
  parameter int unsigned DN  = 8,
  parameter int unsigned F   = 64,
  parameter int unsigned IDW = 8,
  parameter int unsigned BAW = 16,
  localparam int unsigned NB = DM + DN
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [IDW-1:0]           in_id,
  input  logic [BAW-1:0]           in_addr,
  input  logic [F-1:0]             in_data,
  output logic [NB-1:0]            wr_en,
  output logic [NB-1:0][BAW-1:0]   wr_addr,
  output logic [NB-1:0][F-1:0]     wr_data
);
  // chain signals: index p is the input of position p, p+1 its output
  logic [DM:0]          l_valid;
  logic [DM:0][IDW-1:0] l_id;
  logic [DM:0][BAW-1:0] l_addr;
  logic [DM:0][F-1:0]   l_data;
  logic [DN:0]          r_valid;
  logic [DN:0][IDW-1:0] r_id;
  logic [DN:0][BAW-1:0] r_addr;
  logic [DN:0][F-1:0]   r_data;

  assign l_valid[0] = in_valid; assign l_id[0] = in_id; assign l_addr[0] = in_addr; assign l_data[0] = in_data;
  assign r_valid[0] = in_valid; assign r_id[0] = in_id; assign r_addr[0] = in_addr; assign r_data[0] = in_data;

  for (genvar p = 0; p < DM; p++) begin : g_lhs
    localparam int unsigned ID = DM - 1 - p;
    fetch_router #(.F(F), .IDW(IDW), .BAW(BAW), .MY_ID(ID)) u_r (
      .clk, .rst_n,
      .in_valid(l_valid[p]), .in_id(l_id[p]), .in_addr(l_addr[p]), .in_data(l_data[p]),
      .out_valid(l_valid[p+1]), .out_id(l_id[p+1]), .out_addr(l_addr[p+1]), .out_data(l_data[p+1]),
      .wr_en(wr_en[ID])
    );
    assign wr_addr[ID] = l_addr[p+1];
    assign wr_data[ID] = l_data[p+1];
  end

  for (genvar p = 0; p < DN; p++) begin : g_rhs
    localparam int unsigned ID = DM + p;
    fetch_router #(.F(F), .IDW(IDW), .BAW(BAW), .MY_ID(ID)) u_r (
      .clk, .rst_n,
      .in_valid(r_valid[p]), .in_id(r_id[p]), .in_addr(r_addr[p]), .in_data(r_data[p]),
      .out_valid(r_valid[p+1]), .out_id(r_id[p+1]), .out_addr(r_addr[p+1]), .out_data(r_data[p+1]),
      .wr_en(wr_en[ID])
    );
    assign wr_addr[ID] = r_addr[p+1];
    assign wr_data[ID] = r_data[p+1];
  end
endmodule
