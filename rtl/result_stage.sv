// result_stage: executes RunResult instructions (the stream writer).
//
// Reads one result buffer entry (a DM x DN tile of A-bit accumulators),
// narrows it with a downsizer to the R-bit memory write channel and writes it
// to main memory with a row stride: tile row i (DN accumulators, column 0 in
// the least significant bits) is written to
//   base_addr + offset + i * row_stride,
// as DN*A/R consecutive R-bit words. The stride lets a large result matrix be
// produced one tile at a time: offset places the tile, row_stride is the byte
// length of one row of the whole result matrix.
//
// Timing: start in cycle t, the entry is read in t+1, the tile enters the
// downsizer in t+2 and the first write request is valid in t+3; one word per
// cycle after that while wr_ready is high. done pulses in the cycle the last
// word is accepted. A write counts as done when it is accepted (no write
// response). DN*A must be a multiple of R.
module result_stage
  import bismo_pkg::*;
#(
  parameter int unsigned DM = 8,
  parameter int unsigned DN = 8,
  parameter int unsigned A  = 32,
  parameter int unsigned R  = 64,
  parameter int unsigned BR = 2,
  localparam int unsigned TW   = DM * DN * A,
  localparam int unsigned RBAW = (BR > 1) ? $clog2(BR) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  result_run_t       cfg,
  output logic              busy,
  output logic              done,
  output logic [RBAW-1:0]   rb_rd_addr,
  input  logic [TW-1:0]     rb_rd_data,
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [R-1:0]      wr_data
);
  localparam int unsigned WPR = DN * A / R;   // words per tile row
  localparam int unsigned RB  = R / 8;        // bytes per word

  typedef enum logic [1:0] {S_IDLE, S_READ, S_LOAD, S_WRITE} state_e;
  state_e      state;
  result_run_t c;
  logic [ADDR_W-1:0] row_addr;
  logic [$clog2(WPR+1)-1:0] col;
  logic [$clog2(DM+1)-1:0]  row;
  logic ds_in_valid, ds_in_ready, ds_out_valid, ds_out_ready;

  assign busy       = (state != S_IDLE);
  assign rb_rd_addr = RBAW'(c.rb_addr);

  assign ds_in_valid  = (state == S_LOAD);
  assign ds_out_ready = (state == S_WRITE) && wr_ready;
  assign wr_valid     = (state == S_WRITE) && ds_out_valid;
  assign wr_addr      = row_addr + ADDR_W'(col) * ADDR_W'(RB);

  downsizer #(.IN_W(TW), .OUT_W(R)) u_ds (
    .clk, .rst_n,
    .in_valid(ds_in_valid), .in_ready(ds_in_ready), .in_data(rb_rd_data),
    .out_valid(ds_out_valid), .out_ready(ds_out_ready), .out_data(wr_data)
  );

  logic last_word;
  assign last_word = (row == $bits(row)'(DM - 1)) && (col == $bits(col)'(WPR - 1));
  assign done      = wr_valid && wr_ready && last_word;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; c <= '0; row_addr <= '0; col <= '0; row <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          c        <= cfg;
          row_addr <= cfg.base_addr + cfg.offset;
          col      <= '0;
          row      <= '0;
          state    <= S_READ;
        end
        S_READ:  state <= S_LOAD;             // result buffer read latency
        S_LOAD:  if (ds_in_ready) state <= S_WRITE;
        S_WRITE: if (wr_valid && wr_ready) begin
          if (col == $bits(col)'(WPR - 1)) begin
            col      <= '0;
            row      <= row + 1'b1;
            row_addr <= row_addr + c.row_stride;
            if (last_word) state <= S_IDLE;
          end else begin
            col <= col + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
