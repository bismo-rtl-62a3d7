// popcount: number of ones in a W-bit vector.
//
// Purely combinational. The count is written as a sum over the bits; synthesis
// turns it into an adder (compressor) tree. In the dot product unit it is the
// "addition" half of a binary dot product, the AND gates being the
// multiplication half. The overlay only fixes that a popcount is used; how it
// is built here is this design's choice.
//
// Interface: in_bits (W bits) -> count ($clog2(W+1) bits), no clock.
module popcount #(
  parameter int unsigned W = 256
) (
  input  logic [W-1:0]         in_bits,
  output logic [$clog2(W+1)-1:0] count
);
  always_comb begin
    count = '0;
    for (int i = 0; i < W; i++) count = count + {{($clog2(W+1)-1){1'b0}}, in_bits[i]};
  end
endmodule
