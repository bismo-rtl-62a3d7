// fetch_stage: executes RunFetch instructions.
//
// A stream reader (DMA engine plus route generator) followed by the linear
// router interconnect. start latches the instruction; done pulses once the
// last word read has been written into its matrix buffer (the stream reader's
// done delayed by the interconnect's worst-case latency). Read requests and
// responses use the main-memory read channel (F bits, byte addresses), and
// the matrix-buffer write ports (one per buffer, id order: LHS 0..DM-1, then
// RHS 0..DN-1) are outputs.
module fetch_stage
  import bismo_pkg::*;
#(
  parameter int unsigned DM  = 8,
  parameter int unsigned DN  = 8,
  parameter int unsigned F   = 64,
  parameter int unsigned IDW = 8,
  parameter int unsigned BAW = 16,
  localparam int unsigned NB = DM + DN
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  fetch_run_t             cfg,
  output logic                   busy,
  output logic                   done,
  output logic                   rd_req_valid,
  input  logic                   rd_req_ready,
  output logic [ADDR_W-1:0]      rd_req_addr,
  input  logic                   rd_resp_valid,
  input  logic [F-1:0]           rd_resp_data,
  output logic [NB-1:0]          mb_wr_en,
  output logic [NB-1:0][BAW-1:0] mb_wr_addr,
  output logic [NB-1:0][F-1:0]   mb_wr_data
);
  // the last packet's write reaches its buffer LAT+1 edges after sr_done
  localparam int unsigned LAT = ((DM > DN) ? DM : DN) + 1;

  logic           sr_busy, sr_done;
  logic           pkt_valid;
  logic [IDW-1:0] pkt_id;
  logic [BAW-1:0] pkt_addr;
  logic [F-1:0]   pkt_data;
  logic [LAT-1:0] drain;  // sr_done travelling alongside the last packet

  stream_reader #(.F(F), .IDW(IDW), .BAW(BAW)) u_reader (
    .clk, .rst_n, .start, .cfg, .busy(sr_busy), .done(sr_done),
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_data,
    .pkt_valid, .pkt_id, .pkt_addr, .pkt_data
  );

  fetch_interconnect #(.DM(DM), .DN(DN), .F(F), .IDW(IDW), .BAW(BAW)) u_net (
    .clk, .rst_n,
    .in_valid(pkt_valid), .in_id(pkt_id), .in_addr(pkt_addr), .in_data(pkt_data),
    .wr_en(mb_wr_en), .wr_addr(mb_wr_addr), .wr_data(mb_wr_data)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) drain <= '0;
    else        drain <= {drain[LAT-2:0], sr_done};
  end

  assign done = drain[LAT-1];
  assign busy = sr_busy || (drain != '0);
endmodule
