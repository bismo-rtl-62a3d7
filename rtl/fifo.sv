// fifo: synchronous first-in first-out queue, used as an instruction queue.
//
// DEPTH entries of W bits in a circular buffer. Push with in_valid/in_ready,
// pop with out_valid/out_ready; an entry moves when valid and ready are both
// high at a clock edge. out_data shows the oldest entry whenever out_valid is
// high (first-word fall-through). A push and a pop may happen in the same
// cycle. Reset empties the queue. The host fills one such queue per stage and
// the stage's controller drains it in order.
module fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic         empty
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic [AW:0]   count;
  logic          push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign empty     = (count == '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0; wr_ptr <= '0; count <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_count_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    count <= (AW+1)'(DEPTH));
endmodule
