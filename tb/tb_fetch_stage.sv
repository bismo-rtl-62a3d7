// tb_fetch_stage: a 2 x 2 fetch stage runs two RunFetch instructions (LHS
// rows as strided blocks, then RHS rows) against the memory model with random
// stalls. Shadow copies of the four buffers are built from the write ports and
// compared with the expected placement; no write may follow done.
module tb_fetch_stage;
  import bismo_pkg::*;
  localparam int unsigned DM = 2, DN = 2, F = 64, NB = DM + DN;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, done;
  fetch_run_t cfg;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, wr_ready;
  logic [31:0] rd_req_addr;
  logic [63:0] rd_resp_data;
  logic [NB-1:0] mb_wr_en;
  logic [NB-1:0][15:0] mb_wr_addr;
  logic [NB-1:0][F-1:0] mb_wr_data;
  logic [63:0] shadow [NB][64];
  int checks = 0, failures = 0, late_writes = 0;
  bit finished;

  fetch_stage #(.DM(DM), .DN(DN), .F(F)) dut (.*);
  main_memory_model #(.LAT(4), .READY_PCT(70)) u_mem (
    .clk, .rst_n, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_data,
    .wr_valid(1'b0), .wr_ready, .wr_addr(32'd0), .wr_data(64'd0));

  always @(posedge clk) if (rst_n) begin
    for (int b = 0; b < NB; b++) if (mb_wr_en[b]) begin
      shadow[b][mb_wr_addr[b] % 64] = mb_wr_data[b];
      if (finished) late_writes++;
    end
    if (done) finished = 1;
  end

  task automatic run(input fetch_run_t c);
    finished = 0;
    @(negedge clk); cfg = c; start = 1'b1;
    @(negedge clk); start = 1'b0;
    while (!finished) @(negedge clk);
    repeat (6) @(negedge clk);
    checks++;
    if (late_writes != 0) begin failures++; $display("FAIL: %0d writes after done", late_writes); end
  endtask

  initial begin
    fetch_run_t c;
    start = 0; cfg = '0;
    for (int b = 0; b < NB; b++) for (int a = 0; a < 64; a++) shadow[b][a] = '0;
    for (int a = 0; a < 1024; a++) u_mem.poke(32'(a * 8), {$urandom, $urandom});
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    // LHS: 3 planes (blocks), each 2 rows of 4 words, planes 512 bytes apart
    c = '0;
    c.base_addr = 32'h100; c.block_size = 16'd64; c.block_offset = 32'd512; c.num_blocks = 16'd3;
    c.buf_offset = 16'd0; c.buf_start = 8'd0; c.buf_range = 8'(DM); c.words_per_buf = 16'd4;
    run(c);
    // RHS: 2 rows of 8 words
    c.base_addr = 32'h1000; c.block_size = 16'd128; c.block_offset = 32'd128; c.num_blocks = 16'd1;
    c.buf_offset = 16'd16; c.buf_start = 8'(DM); c.buf_range = 8'(DN); c.words_per_buf = 16'd8;
    run(c);
    for (int p = 0; p < 3; p++) for (int r = 0; r < DM; r++) for (int w = 0; w < 4; w++) begin
      checks++;
      if (shadow[r][p*4 + w] !== u_mem.peek(32'h100 + 32'(p*512 + r*32 + w*8))) begin
        failures++; $display("FAIL: LHS %0d word %0d", r, p*4 + w);
      end
    end
    for (int r = 0; r < DN; r++) for (int w = 0; w < 8; w++) begin
      checks++;
      if (shadow[DM + r][16 + w] !== u_mem.peek(32'h1000 + 32'(r*64 + w*8))) begin
        failures++; $display("FAIL: RHS %0d word %0d", r, 16 + w);
      end
    end
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
