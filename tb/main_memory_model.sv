// main_memory_model: behavioural model of the main memory seen by the overlay
// (not synthesizable; for testbenches only).
//
// 64-bit words in a sparse array indexed by byte address / 8. Read requests
// are accepted when rd_req_ready is high and answered in order LAT cycles
// later, one word per cycle, never stalled. Writes are accepted when wr_ready
// is high. Both ready signals are redrawn at random every cycle, high with
// probability READY_PCT percent, so the overlay sees backpressure on requests.
// rd_stalls / wr_stalls count cycles in which a request waited.
module main_memory_model #(
  parameter int unsigned LAT       = 5,
  parameter int unsigned READY_PCT = 75
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        rd_req_valid,
  output logic        rd_req_ready,
  input  logic [31:0] rd_req_addr,
  output logic        rd_resp_valid,
  output logic [63:0] rd_resp_data,
  input  logic        wr_valid,
  output logic        wr_ready,
  input  logic [31:0] wr_addr,
  input  logic [63:0] wr_data
);
  typedef struct packed { logic [31:0] addr; longint unsigned due; } rd_t;

  logic [63:0] mem [logic [28:0]];
  rd_t         pend [$];
  longint unsigned cyc = 0;
  int unsigned rd_stalls = 0, wr_stalls = 0, rd_count = 0, wr_count = 0;

  function automatic logic [63:0] peek(input logic [31:0] a);
    return mem.exists(a[31:3]) ? mem[a[31:3]] : 64'd0;
  endfunction

  function automatic void poke(input logic [31:0] a, input logic [63:0] d);
    mem[a[31:3]] = d;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      rd_req_ready  <= 1'b0;
      wr_ready      <= 1'b0;
      rd_resp_valid <= 1'b0;
      rd_resp_data  <= '0;
      pend.delete();
    end else begin
      if (rd_req_valid && rd_req_ready) begin
        pend.push_back('{addr: rd_req_addr, due: cyc + LAT});
        rd_count++;
      end
      if (rd_req_valid && !rd_req_ready) rd_stalls++;
      if (wr_valid && wr_ready) begin
        poke(wr_addr, wr_data);
        wr_count++;
      end
      if (wr_valid && !wr_ready) wr_stalls++;
      rd_resp_valid <= 1'b0;
      if (pend.size() > 0 && pend[0].due <= cyc) begin
        rd_resp_valid <= 1'b1;
        rd_resp_data  <= peek(pend[0].addr);
        void'(pend.pop_front());
      end
      rd_req_ready <= ($urandom % 100) < READY_PCT;
      wr_ready     <= ($urandom % 100) < READY_PCT;
    end
  end
endmodule
