// execute_stage: executes RunExecute instructions on the dot product array.
//
// A RunExecute multiplies num_words DK-bit words of every LHS buffer with the
// same words of every RHS buffer and accumulates the weighted popcounts in the
// DPA. A single sequence generator produces the read addresses
//   lhs_offset + w  (all LHS buffers)   and   rhs_offset + w  (all RHS buffers)
// for w = 0..num_words-1, one word per cycle. The weight of Algorithm-style
// bit-serial multiplication, +/- 2^(i+j), is given by shift and negate; with
// acc_clear the first word restarts the accumulators, otherwise the products
// add to what they hold. When the last word has passed through the DPA
// pipeline and write_en is set, the DM x DN accumulators are copied into
// result buffer entry write_addr.
//
// Timing: start in cycle t; reads are issued in cycles t+1..t+N (N =
// num_words); the accumulators are final PIPE-1 cycles after the last read;
// done pulses (together with the result buffer write) in cycle t+N+PIPE, PIPE =
// 1 buffer read + 3 DPU stages. The next instruction is only accepted after
// done: the pipeline is drained between instructions, which costs PIPE cycles
// per instruction and is why short dot products use the array poorly.
module execute_stage
  import bismo_pkg::*;
#(
  parameter int unsigned DM = 8,
  parameter int unsigned DN = 8,
  parameter int unsigned DK = 256,
  parameter int unsigned A  = 32,
  parameter int unsigned BM = 1024,
  parameter int unsigned BN = 1024,
  parameter int unsigned BR = 2,
  localparam int unsigned LAW  = $clog2(BM),
  localparam int unsigned RAW  = $clog2(BN),
  localparam int unsigned RBAW = (BR > 1) ? $clog2(BR) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  exec_run_t                     cfg,
  output logic                          busy,
  output logic                          done,
  // matrix buffer read ports (shared address, one data word per buffer)
  output logic                          mb_rd_en,
  output logic [LAW-1:0]                lhs_rd_addr,
  output logic [RAW-1:0]                rhs_rd_addr,
  input  logic [DM-1:0][DK-1:0]         lhs_rd_data,
  input  logic [DN-1:0][DK-1:0]         rhs_rd_data,
  // result buffer write port
  output logic                          rb_wr_en,
  output logic [RBAW-1:0]               rb_wr_addr,
  output logic [DM*DN*A-1:0]            rb_wr_data
);
  localparam int unsigned PIPE = 4;

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_DRAIN} state_e;
  state_e    state;
  exec_run_t c;
  logic [15:0] w;
  logic [2:0]  drain_cnt;
  logic        v1, first0, first1;
  logic [DM-1:0][DN-1:0][A-1:0] acc;

  assign busy        = (state != S_IDLE);
  assign mb_rd_en    = (state == S_ISSUE);
  assign lhs_rd_addr = LAW'(c.lhs_offset + w);
  assign rhs_rd_addr = RAW'(c.rhs_offset + w);
  assign first0      = (w == 16'd0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; c <= '0; w <= '0; drain_cnt <= '0; v1 <= 1'b0; first1 <= 1'b0;
    end else begin
      // buffer read latency: data of the word issued now arrives next cycle
      v1     <= mb_rd_en;
      first1 <= first0;
      case (state)
        S_IDLE: if (start) begin
          c     <= cfg;
          w     <= '0;
          state <= (cfg.num_words != 0) ? S_ISSUE : S_DRAIN;
          drain_cnt <= 3'(PIPE - 1);
        end
        S_ISSUE: begin
          if (w + 16'd1 == c.num_words) state <= S_DRAIN;
          else                          w     <= w + 16'd1;
        end
        S_DRAIN: begin
          if (drain_cnt == 0) state <= S_IDLE;
          else                drain_cnt <= drain_cnt - 3'd1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  dpa #(.DM(DM), .DN(DN), .DK(DK), .A(A), .SHIFT_W(6)) u_dpa (
    .clk, .rst_n,
    .in_valid(v1),
    .lhs(lhs_rd_data), .rhs(rhs_rd_data),
    .shift(c.shift), .negate(c.negate),
    .acc_clear(first1 && c.acc_clear),
    .acc
  );

  assign done       = (state == S_DRAIN) && (drain_cnt == 0);
  assign rb_wr_en   = done && c.write_en;
  assign rb_wr_addr = RBAW'(c.write_addr);
  assign rb_wr_data = acc;
endmodule
