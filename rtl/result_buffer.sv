// result_buffer: small buffer between the execute and the result stage.
//
// BR entries, each holding a whole DM x DN tile of A-bit accumulators. The
// execute stage writes a complete tile in one cycle when it has finished a
// group of binary products; the result stage reads an entry and writes it out
// to main memory. With BR >= 2 the execute stage can compute the next tile
// while the previous one is being written out. Built from registers (LUT RAM
// on an FPGA), as the overlay assumes for this buffer.
//
// Timing: write at the clock edge; rd_data is registered and shows entry
// rd_addr one cycle after rd_addr is presented. Contents are not reset.
module result_buffer #(
  parameter int unsigned BR = 2,
  parameter int unsigned DM = 8,
  parameter int unsigned DN = 8,
  parameter int unsigned A  = 32,
  localparam int unsigned TW  = DM * DN * A,
  localparam int unsigned AW  = (BR > 1) ? $clog2(BR) : 1
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [TW-1:0] wr_data,
  input  logic [AW-1:0] rd_addr,
  output logic [TW-1:0] rd_data
);
  logic [TW-1:0] mem [BR];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
