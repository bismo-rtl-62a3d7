// tb_token_fifo: random pushes (only while not full) and pops (only while
// avail) on a 3-token FIFO, compared with a counter model; checks that full
// and avail follow the count and that both states are reached.
module tb_token_fifo;
  localparam int unsigned DEPTH = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic push, full, pop, avail;
  int cnt = 0, checks = 0, failures = 0, n_full = 0, n_empty = 0;

  token_fifo #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    push = 0; pop = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    for (int c = 0; c < 1000; c++) begin
      #1;
      checks++;
      if (full != (cnt == DEPTH) || avail != (cnt > 0)) begin
        failures++;
        if (failures < 10) $display("FAIL: cycle %0d count %0d full %b avail %b", c, cnt, full, avail);
      end
      if (full) n_full++;
      if (!avail) n_empty++;
      push = !full && (($urandom % 100) < ((c / 100) % 2 ? 75 : 30));
      pop  = avail && (($urandom % 100) < ((c / 100) % 2 ? 30 : 75));
      @(posedge clk);
      cnt = cnt + int'(push) - int'(pop);
      @(negedge clk);
    end
    push = 0; pop = 0;
    checks++;
    if (n_full == 0 || n_empty == 0) begin failures++; $display("FAIL: full/empty never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
