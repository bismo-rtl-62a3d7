// dpu: dot product unit of the bit-serial overlay.
//
// Computes one binary dot product per cycle between a DK-bit slice of a row of
// the left-hand-side bit matrix and a DK-bit slice of a column of the
// right-hand-side bit matrix: AND the two words, count the ones, shift the
// count left by the weight exponent, optionally negate it, and add it to an
// A-bit accumulator. The order AND -> popcount -> shift -> negate -> add ->
// accumulator register and the widths DK and A follow the overlay's DPU
// diagram; the placement of pipeline registers is this design's choice.
//
// Pipeline (in_valid at cycle t):
//   edge t+1: popcount of (lhs & rhs) registered, with shift/negate/clear
//   edge t+2: weighted (shifted, maybe negated) contribution registered
//   edge t+3: accumulator updated; acc shows it from cycle t+3
// acc_clear makes the accumulator load the contribution instead of adding to
// it, which is how a new dot product starts. Arithmetic wraps modulo 2^A.
// Reset (active low, synchronous) clears the pipeline and the accumulator.
module dpu #(
  parameter int unsigned DK      = 256,
  parameter int unsigned A       = 32,
  parameter int unsigned SHIFT_W = 6
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic [DK-1:0]      lhs,
  input  logic [DK-1:0]      rhs,
  input  logic [SHIFT_W-1:0] shift,
  input  logic               negate,
  input  logic               acc_clear,
  output logic [A-1:0]       acc
);
  localparam int unsigned PC_W = $clog2(DK + 1);

  logic [PC_W-1:0]    pc_comb;
  logic               v1, neg1, clr1;
  logic [PC_W-1:0]    pc1;
  logic [SHIFT_W-1:0] sh1;
  logic               v2, clr2;
  logic [A-1:0]       contrib2;
  logic [A-1:0]       shifted;

  popcount #(.W(DK)) u_popcount (.in_bits(lhs & rhs), .count(pc_comb));

  assign shifted = A'(pc1) << sh1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; acc <= '0;
      pc1 <= '0; sh1 <= '0; neg1 <= 1'b0; clr1 <= 1'b0; clr2 <= 1'b0; contrib2 <= '0;
    end else begin
      // stage 1: AND + popcount
      v1   <= in_valid;
      pc1  <= pc_comb;
      sh1  <= shift;
      neg1 <= negate;
      clr1 <= acc_clear;
      // stage 2: shift + negate
      v2       <= v1;
      clr2     <= clr1;
      contrib2 <= neg1 ? (~shifted + A'(1)) : shifted;
      // stage 3: accumulate
      if (v2) acc <= clr2 ? contrib2 : acc + contrib2;
    end
  end
endmodule
