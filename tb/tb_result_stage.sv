// tb_result_stage: a result stage for 2 x 4 tiles of 32-bit accumulators and
// a 64-bit write channel writes tiles from a behavioural two-entry result
// buffer to the memory model (random write stalls) at several offsets and
// row strides. Checks every word in memory, that nothing outside the tile was
// written, and that done pulses once per tile.
module tb_result_stage;
  import bismo_pkg::*;
  localparam int unsigned DM = 2, DN = 4, A = 32, R = 64, BR = 2, TW = DM * DN * A;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, done;
  result_run_t cfg;
  logic [0:0] rb_rd_addr;
  logic [TW-1:0] rb_rd_data;
  logic [TW-1:0] rb [BR];
  logic wr_valid, wr_ready, rd_req_ready, rd_resp_valid;
  logic [31:0] wr_addr;
  logic [63:0] wr_data, rd_resp_data;
  int checks = 0, failures = 0, n_done = 0;

  result_stage #(.DM(DM), .DN(DN), .A(A), .R(R), .BR(BR)) dut (.*);
  main_memory_model #(.LAT(2), .READY_PCT(60)) u_mem (
    .clk, .rst_n, .rd_req_valid(1'b0), .rd_req_ready, .rd_req_addr(32'd0), .rd_resp_valid, .rd_resp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data);

  always_ff @(posedge clk) rb_rd_data <= rb[rb_rd_addr];
  always @(posedge clk) if (rst_n && done) n_done++;

  task automatic run(input int entry, input logic [31:0] base, input logic [31:0] off, input logic [31:0] stride);
    int n_before;
    n_before = int'(u_mem.wr_count);
    @(negedge clk);
    cfg = '0; cfg.base_addr = base; cfg.offset = off; cfg.row_stride = stride; cfg.rb_addr = 4'(entry);
    start = 1'b1;
    @(negedge clk); start = 1'b0;
    while (busy) @(negedge clk);
    checks++;
    if (int'(u_mem.wr_count) - n_before != DM * DN * A / R) begin failures++; $display("FAIL: write count"); end
    for (int i = 0; i < DM; i++)
      for (int j = 0; j < DN; j++) begin
        logic [31:0] a;
        logic [63:0] w;
        a = base + off + 32'(i) * stride + 32'(j * 4);
        w = u_mem.peek(a);
        checks++;
        if ((a[2] ? w[63:32] : w[31:0]) !== rb[entry][(i*DN + j)*A +: A]) begin
          failures++;
          $display("FAIL: entry %0d element (%0d,%0d) at %h", entry, i, j, a);
        end
      end
  endtask

  initial begin
    start = 0; cfg = '0;
    for (int e = 0; e < BR; e++) for (int k = 0; k < TW / 32; k++) rb[e][k*32 +: 32] = $urandom;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    run(0, 32'h4000, 32'h0, 32'd64);
    run(1, 32'h4000, 32'd16, 32'd64);
    run(1, 32'h8000, 32'h100, 32'd16);
    run(0, 32'h9000, 32'h0, 32'd256);
    // the four tiles above were 4*DM*DN/2 words; nothing else may be written
    checks++;
    if (u_mem.wr_count != 4 * DM * DN * A / R || n_done != 4) begin
      failures++; $display("FAIL: %0d words written, %0d done pulses", u_mem.wr_count, n_done);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
