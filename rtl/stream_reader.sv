// stream_reader: DMA engine and route generator of the fetch stage.
//
// On start it latches a RunFetch description and
//  * issues one read request per F-bit word, block by block: block b covers
//    bytes [base + b*block_offset, base + b*block_offset + block_size), which
//    gives strided access when block_offset > block_size;
//  * tags every read response with the matrix buffer and buffer address it is
//    to be written to, and sends the (id, address, data) packet into the fetch
//    interconnect.
// Response number i (counted from 0 in the order they arrive) goes to buffer
//    buf_start + ((i / W) mod buf_range)
// at F-word address
//    buf_offset + (i / (W*buf_range))*W + (i mod W),   W = words_per_buf,
// so W consecutive words go to one buffer before moving to the next, and the
// range of buffers is filled cyclically. That placement rule, the one-word
// requests and the valid/ready request channel are this design's choices; the
// RunFetch fields themselves follow the overlay's instruction set.
//
// Interface: the read request channel is valid/ready with a byte address;
// responses come back in request order, one word per cycle at most, and are
// never stalled (the fetch stage has no backpressure: it is only started once
// its destination buffers may be overwritten). done pulses for one cycle, in the
// same cycle as the last packet leaves this block. block_size must be a
// non-zero multiple of F/8 when num_blocks is non-zero; words_per_buf and
// buf_range must be non-zero.
module stream_reader
  import bismo_pkg::*;
#(
  parameter int unsigned F     = 64,
  parameter int unsigned IDW   = 8,
  parameter int unsigned BAW   = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  fetch_run_t        cfg,
  output logic              busy,
  output logic              done,
  // main memory read channel
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output logic [ADDR_W-1:0] rd_req_addr,
  input  logic              rd_resp_valid,
  input  logic [F-1:0]      rd_resp_data,
  // packet to the interconnect
  output logic              pkt_valid,
  output logic [IDW-1:0]    pkt_id,
  output logic [BAW-1:0]    pkt_addr,
  output logic [F-1:0]      pkt_data
);
  localparam int unsigned FB = F / 8;  // bytes per word

  fetch_run_t        c;
  // request side
  logic              req_active;
  logic [ADDR_W-1:0] blk_addr;
  logic [15:0]       in_blk;      // byte offset inside the current block
  logic [15:0]       blk_cnt;
  // response side
  logic              resp_active;
  logic [31:0]       resp_left;
  logic [15:0]       w_in_buf;
  logic [7:0]        buf_idx;
  logic [BAW-1:0]    grp_base;

  logic [31:0]       total_words;
  assign total_words = 32'(cfg.num_blocks) * 32'(cfg.block_size / 16'(FB));

  assign busy         = req_active || resp_active;
  assign rd_req_valid = req_active;
  assign rd_req_addr  = blk_addr + ADDR_W'(in_blk);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      req_active <= 1'b0; resp_active <= 1'b0; done <= 1'b0; pkt_valid <= 1'b0;
      c <= '0; blk_addr <= '0; in_blk <= '0; blk_cnt <= '0; resp_left <= '0;
      w_in_buf <= '0; buf_idx <= '0; grp_base <= '0; pkt_id <= '0; pkt_addr <= '0; pkt_data <= '0;
    end else begin
      done      <= 1'b0;
      pkt_valid <= 1'b0;
      if (start && !busy) begin
        c           <= cfg;
        blk_addr    <= cfg.base_addr;
        in_blk      <= '0;
        blk_cnt     <= '0;
        resp_left   <= total_words;
        w_in_buf    <= '0;
        buf_idx     <= '0;
        grp_base    <= BAW'(cfg.buf_offset);
        req_active  <= (total_words != 0);
        resp_active <= (total_words != 0);
        done        <= (total_words == 0);
      end else begin
        // request address generation
        if (req_active && rd_req_ready) begin
          if (in_blk + 16'(FB) >= c.block_size) begin
            in_blk   <= '0;
            blk_addr <= blk_addr + c.block_offset;
            blk_cnt  <= blk_cnt + 16'd1;
            if (blk_cnt + 16'd1 == c.num_blocks) req_active <= 1'b0;
          end else begin
            in_blk <= in_blk + 16'(FB);
          end
        end
        // route generation
        if (resp_active && rd_resp_valid) begin
          pkt_valid <= 1'b1;
          pkt_id    <= c.buf_start + buf_idx;
          pkt_addr  <= grp_base + BAW'(w_in_buf);
          pkt_data  <= rd_resp_data;
          if (w_in_buf + 16'd1 == c.words_per_buf) begin
            w_in_buf <= '0;
            if (buf_idx + 8'd1 == c.buf_range) begin
              buf_idx  <= '0;
              grp_base <= grp_base + BAW'(c.words_per_buf);
            end else begin
              buf_idx <= buf_idx + 8'd1;
            end
          end else begin
            w_in_buf <= w_in_buf + 16'd1;
          end
          resp_left <= resp_left - 32'd1;
          if (resp_left == 32'd1) begin
            resp_active <= 1'b0;
            done        <= 1'b1;
          end
        end
      end
    end
  end

  // The memory must not answer more words than were asked for.
  a_no_spurious_resp: assert property (@(posedge clk) disable iff (!rst_n)
    rd_resp_valid |-> resp_active);
endmodule
