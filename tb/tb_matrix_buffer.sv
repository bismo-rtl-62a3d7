// tb_matrix_buffer: fills a 32-word, 256-bit buffer through its 64-bit write
// port in random order, then reads every word back and checks the data one
// cycle after the read (F-word a must land in bits (a mod 4)*64 of word a/4).
module tb_matrix_buffer;
  localparam int unsigned DEPTH = 32, DK = 256, F = 64, RATIO = DK / F;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic wr_en, rd_en;
  logic [$clog2(DEPTH*RATIO)-1:0] wr_addr;
  logic [$clog2(DEPTH)-1:0] rd_addr;
  logic [F-1:0] wr_data;
  logic [DK-1:0] rd_data;
  logic [F-1:0] model [DEPTH*RATIO];
  int checks = 0, failures = 0;

  matrix_buffer #(.DEPTH(DEPTH), .DK(DK), .F(F)) dut (.*);

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    for (int a = 0; a < DEPTH * RATIO; a++) model[a] = '0;
    // write every F-word once in order, then 200 random overwrites
    for (int n = 0; n < DEPTH * RATIO + 200; n++) begin
      @(negedge clk);
      wr_en = 1'b1;
      wr_addr = (n < DEPTH * RATIO) ? $bits(wr_addr)'(n) : $bits(wr_addr)'($urandom);
      wr_data = {$urandom, $urandom};
      model[wr_addr] = wr_data;
    end
    @(negedge clk); wr_en = 1'b0;
    for (int r = 0; r < DEPTH; r++) begin
      logic [DK-1:0] exp;
      for (int s = 0; s < RATIO; s++) exp[s*F +: F] = model[r*RATIO + s];
      rd_en = 1'b1; rd_addr = $bits(rd_addr)'(r);
      @(negedge clk);
      rd_en = 1'b0;
      checks++;
      if (rd_data !== exp) begin
        failures++;
        $display("FAIL: word %0d = %h, expected %h", r, rd_data, exp);
      end
    end
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
