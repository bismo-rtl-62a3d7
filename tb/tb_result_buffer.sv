// tb_result_buffer: writes random tiles into both entries of a 2-entry buffer
// (2 x 2 accumulators of 32 bits), reads them back and checks the data one
// cycle after the address, including a write that overwrites one entry.
module tb_result_buffer;
  localparam int unsigned BR = 2, DM = 2, DN = 2, A = 32, TW = DM * DN * A;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic wr_en;
  logic [0:0] wr_addr, rd_addr;
  logic [TW-1:0] wr_data, rd_data;
  logic [TW-1:0] model [BR];
  int checks = 0, failures = 0;

  result_buffer #(.BR(BR), .DM(DM), .DN(DN), .A(A)) dut (.*);

  task automatic write(input int e);
    @(negedge clk);
    wr_en = 1'b1; wr_addr = 1'(e);
    wr_data = {$urandom, $urandom, $urandom, $urandom};
    model[e] = wr_data;
    @(negedge clk); wr_en = 1'b0;
  endtask

  task automatic read(input int e);
    rd_addr = 1'(e);
    @(negedge clk);
    checks++;
    if (rd_data !== model[e]) begin
      failures++;
      $display("FAIL: entry %0d = %h, expected %h", e, rd_data, model[e]);
    end
  endtask

  initial begin
    wr_en = 0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    for (int n = 0; n < 20; n++) begin
      write(n % 2);
      if (n >= 1) begin read(0); read(1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
