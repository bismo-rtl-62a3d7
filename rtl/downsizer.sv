// downsizer: wide-in, narrow-out parallel-to-serial converter.
//
// Accepts one IN_W-bit word when empty and emits it as IN_W/OUT_W words of
// OUT_W bits, least significant word first. Both sides use valid/ready; a
// word moves when valid and ready are both high at a clock edge. A new input
// is accepted only once the previous one has been fully emitted. IN_W must be
// a multiple of OUT_W. Used by the result stage to narrow a tile of
// accumulators to the width of the memory write channel.
module downsizer #(
  parameter int unsigned IN_W  = 2048,
  parameter int unsigned OUT_W = 64,
  localparam int unsigned NW  = IN_W / OUT_W,
  localparam int unsigned CW  = $clog2(NW + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [IN_W-1:0]  in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [OUT_W-1:0] out_data
);
  logic [IN_W-1:0] sr;
  logic [CW-1:0]   cnt;

  assign in_ready  = (cnt == '0);
  assign out_valid = (cnt != '0);
  assign out_data  = sr[OUT_W-1:0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt <= '0; sr <= '0;
    end else if (in_valid && in_ready) begin
      sr  <= in_data;
      cnt <= CW'(NW);
    end else if (out_valid && out_ready) begin
      sr  <= sr >> OUT_W;
      cnt <= cnt - CW'(1);
    end
  end
endmodule
