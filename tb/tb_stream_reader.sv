// tb_stream_reader: runs three RunFetch descriptions (strided blocks spread
// cyclically over three buffers, one contiguous block into one buffer, and an
// empty fetch) against the memory model with random request stalls. Checks
// every request address, every packet's buffer id, buffer address and data
// against the placement rule, the packet count, and that done pulses once
// with the last packet.
module tb_stream_reader;
  import bismo_pkg::*;
  localparam int unsigned F = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, done;
  fetch_run_t cfg;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, wr_ready;
  logic [31:0] rd_req_addr;
  logic [63:0] rd_resp_data;
  logic pkt_valid;
  logic [7:0] pkt_id;
  logic [15:0] pkt_addr;
  logic [63:0] pkt_data;
  int checks = 0, failures = 0;
  int n_pkt, n_req, n_done;
  logic [31:0] exp_addr [$];

  stream_reader #(.F(F)) dut (.*);
  main_memory_model #(.LAT(3), .READY_PCT(60)) u_mem (
    .clk, .rst_n, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_data,
    .wr_valid(1'b0), .wr_ready, .wr_addr(32'd0), .wr_data(64'd0));

  // request addresses must come in the expected order
  always @(posedge clk) if (rst_n && rd_req_valid && rd_req_ready) begin
    checks++; n_req++;
    if (exp_addr.size() == 0 || rd_req_addr != exp_addr[0]) begin
      failures++;
      $display("FAIL: request address %h, expected %h", rd_req_addr, exp_addr.size() ? exp_addr[0] : 0);
    end
    if (exp_addr.size()) void'(exp_addr.pop_front());
  end

  // packets: word i of the fetch
  always @(posedge clk) if (rst_n) begin
    if (done) n_done++;
    if (pkt_valid) begin
      int i, W, rg;
      logic [7:0]  eid;
      logic [15:0] ea;
      logic [31:0] src;
      i = n_pkt; W = int'(cfg.words_per_buf); rg = int'(cfg.buf_range);
      eid = cfg.buf_start + 8'((i / W) % rg);
      ea  = cfg.buf_offset + 16'((i / (W * rg)) * W + (i % W));
      src = cfg.base_addr + 32'(i / (cfg.block_size / 8)) * cfg.block_offset + 32'((i % (cfg.block_size / 8)) * 8);
      checks++;
      if (pkt_id != eid || pkt_addr != ea || pkt_data != u_mem.peek(src)) begin
        failures++;
        $display("FAIL: packet %0d id %0d addr %0d data %h, expected %0d %0d %h", i, pkt_id, pkt_addr, pkt_data, eid, ea, u_mem.peek(src));
      end
      n_pkt++;
    end
  end

  task automatic run(input fetch_run_t c);
    int words;
    words = int'(c.num_blocks) * int'(c.block_size) / 8;
    for (int b = 0; b < int'(c.num_blocks); b++)
      for (int w = 0; w < int'(c.block_size) / 8; w++)
        exp_addr.push_back(c.base_addr + 32'(b) * c.block_offset + 32'(w * 8));
    n_pkt = 0; n_req = 0; n_done = 0;
    @(negedge clk); cfg = c; start = 1'b1;
    @(negedge clk); start = 1'b0;
    while (busy) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (n_pkt != words || n_req != words || n_done != 1 || exp_addr.size() != 0) begin
      failures++;
      $display("FAIL: %0d packets, %0d requests, %0d done pulses; expected %0d, %0d, 1", n_pkt, n_req, n_done, words, words);
    end
    exp_addr.delete();
  endtask

  initial begin
    fetch_run_t c;
    start = 0; cfg = '0;
    for (int a = 0; a < 4096; a++) u_mem.poke(32'h1000 + 32'(a * 8), {$urandom, $urandom});
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    c = '0;
    c.base_addr = 32'h1000; c.block_size = 16'd48; c.block_offset = 32'd200; c.num_blocks = 16'd5;
    c.buf_offset = 16'd7; c.buf_start = 8'd2; c.buf_range = 8'd3; c.words_per_buf = 16'd2;
    run(c);
    c.base_addr = 32'h2000; c.block_size = 16'd256; c.block_offset = 32'd256; c.num_blocks = 16'd1;
    c.buf_offset = 16'd0; c.buf_start = 8'd5; c.buf_range = 8'd1; c.words_per_buf = 16'd32;
    run(c);
    c.num_blocks = 16'd0;
    run(c);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
