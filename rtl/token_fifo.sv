// token_fifo: synchronization FIFO between two pipeline stages.
//
// Tokens carry no information, so the FIFO only needs to know how many it
// holds: a counter from 0 to DEPTH. SIGNAL pushes a token (push, only while
// full is low); WAIT pops one (pop, only while avail is high). A push and a
// pop in the same cycle leave the count unchanged. Reset empties it. The
// producer stage blocks on a full FIFO, the consumer on an empty one; that
// blocking is the whole inter-stage synchronization of the overlay.
module token_fifo #(
  parameter int unsigned DEPTH = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  output logic full,
  input  logic pop,
  output logic avail
);
  localparam int unsigned CW = $clog2(DEPTH + 1);
  logic [CW-1:0] count;

  assign full  = (count == CW'(DEPTH));
  assign avail = (count != '0);

  always_ff @(posedge clk) begin
    if (!rst_n) count <= '0;
    else count <= count + CW'(push && !full) - CW'(pop && avail);
  end

  a_no_push_when_full: assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_pop_when_empty: assert property (@(posedge clk) disable iff (!rst_n) pop |-> avail);
endmodule
