// dpa: dot product array, a DM x DN grid of dot product units.
//
// DPU (i,j) receives LHS word i and RHS word j: every LHS matrix buffer
// broadcasts its word along one row of DPUs and every RHS matrix buffer along
// one column, so one cycle computes DM*DN binary dot products of DK bits each
// (2*DK*DM*DN binary operations). The weight (shift, negate), the accumulator
// clear and the valid flag are shared by the whole array, as the overlay uses a
// single sequence generator for all buffers. Timing is that of one DPU: acc
// reflects operands presented three cycles earlier.
//
// acc[i][j] is the accumulator of DPU (i,j), i.e. element (i,j) of the result
// tile.
module dpa #(
  parameter int unsigned DM      = 8,
  parameter int unsigned DN      = 8,
  parameter int unsigned DK      = 256,
  parameter int unsigned A       = 32,
  parameter int unsigned SHIFT_W = 6
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            in_valid,
  input  logic [DM-1:0][DK-1:0]           lhs,
  input  logic [DN-1:0][DK-1:0]           rhs,
  input  logic [SHIFT_W-1:0]              shift,
  input  logic                            negate,
  input  logic                            acc_clear,
  output logic [DM-1:0][DN-1:0][A-1:0]    acc
);
  for (genvar i = 0; i < DM; i++) begin : g_row
    for (genvar j = 0; j < DN; j++) begin : g_col
      dpu #(.DK(DK), .A(A), .SHIFT_W(SHIFT_W)) u_dpu (
        .clk, .rst_n, .in_valid,
        .lhs(lhs[i]), .rhs(rhs[j]),
        .shift, .negate, .acc_clear,
        .acc(acc[i][j])
      );
    end
  end
endmodule
