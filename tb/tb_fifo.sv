// tb_fifo: random pushes and pops on a 4-entry, 8-bit FIFO, compared with a
// queue model: order, full (in_ready low at four entries), empty, and
// simultaneous push and pop.
module tb_fifo;
  localparam int unsigned W = 8, DEPTH = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, empty;
  logic [W-1:0] in_data, out_data;
  logic [W-1:0] q [$];
  int checks = 0, failures = 0, n_full = 0, n_both = 0;

  fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    for (int c = 0; c < 2000; c++) begin
      in_valid  = ($urandom % 100) < ((c / 250) % 2 ? 70 : 35);
      out_ready = ($urandom % 100) < ((c / 250) % 2 ? 35 : 70);
      in_data   = W'($urandom);
      #1;
      checks++;
      if (in_ready != (q.size() < DEPTH) || out_valid != (q.size() > 0) || empty != (q.size() == 0) ||
          (q.size() > 0 && out_data !== q[0])) begin
        failures++;
        if (failures < 10) $display("FAIL: cycle %0d size %0d in_ready %b out_valid %b data %h", c, q.size(), in_ready, out_valid, out_data);
      end
      if (!in_ready) n_full++;
      if (in_valid && in_ready && out_valid && out_ready) n_both++;
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
      @(negedge clk);
    end
    checks++;
    if (n_full == 0 || n_both == 0) begin failures++; $display("FAIL: full %0d both %0d", n_full, n_both); end
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
