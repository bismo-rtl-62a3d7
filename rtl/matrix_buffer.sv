// matrix_buffer: one on-chip input matrix buffer (block RAM).
//
// A simple dual-port memory of DEPTH words of DK bits. The write port is F bits
// wide and is driven by the fetch interconnect; the read port is DK bits wide
// and feeds one row (LHS) or one column (RHS) of the dot product array. The two
// widths follow the overlay's datapath diagram; DK must be a multiple of F.
// Write address wr_addr counts F-bit words: F-word a lands in DK-word a/(DK/F),
// bits (a mod (DK/F))*F upwards, so consecutive F-bit words fill a DK-bit word
// from its least significant end.
//
// Timing: writes take effect at the clock edge; a read presented with rd_en in
// cycle t returns rd_data in cycle t+1 (registered output, as a block RAM).
// Contents are not reset.
module matrix_buffer #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned DK    = 256,
  parameter int unsigned F     = 64,
  localparam int unsigned RATIO = DK / F,
  localparam int unsigned WA_W  = $clog2(DEPTH * RATIO),
  localparam int unsigned RA_W  = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            wr_en,
  input  logic [WA_W-1:0] wr_addr,
  input  logic [F-1:0]    wr_data,
  input  logic            rd_en,
  input  logic [RA_W-1:0] rd_addr,
  output logic [DK-1:0]   rd_data
);
  logic [DK-1:0] mem [DEPTH];

  logic [RA_W-1:0] wr_row;
  logic [$clog2(RATIO+1)-1:0] wr_sel;
  assign wr_row = RA_W'(wr_addr / WA_W'(RATIO));
  assign wr_sel = $bits(wr_sel)'(wr_addr % WA_W'(RATIO));

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row][wr_sel*F +: F] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
