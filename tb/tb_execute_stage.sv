// tb_execute_stage: a 2 x 3 execute stage with 64-bit DPUs reads from
// behavioural matrix buffers (random contents, one-cycle read latency). It
// runs sequences of RunExecute instructions with random offsets, lengths,
// shifts, negation and accumulator clears, and checks
//  * the result buffer tile written at the end of each group against a
//    reference computed from the buffer contents,
//  * that done comes exactly num_words + 4 cycles after start (one word per
//    cycle plus the read and DPU pipeline).
module tb_execute_stage;
  import bismo_pkg::*;
  localparam int unsigned DM = 2, DN = 3, DK = 64, A = 32, BM = 32, BN = 32, BR = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, done, mb_rd_en, rb_wr_en;
  exec_run_t cfg;
  logic [4:0] lhs_rd_addr, rhs_rd_addr;
  logic [DM-1:0][DK-1:0] lhs_rd_data;
  logic [DN-1:0][DK-1:0] rhs_rd_data;
  logic [0:0] rb_wr_addr;
  logic [DM*DN*A-1:0] rb_wr_data;
  logic [DK-1:0] lmem [DM][BM];
  logic [DK-1:0] rmem [DN][BN];
  int model [DM][DN];
  int checks = 0, failures = 0, n_writes = 0;

  execute_stage #(.DM(DM), .DN(DN), .DK(DK), .A(A), .BM(BM), .BN(BN), .BR(BR)) dut (.*);

  always_ff @(posedge clk) if (mb_rd_en) begin
    for (int i = 0; i < DM; i++) lhs_rd_data[i] <= lmem[i][lhs_rd_addr];
    for (int j = 0; j < DN; j++) rhs_rd_data[j] <= rmem[j][rhs_rd_addr];
  end

  task automatic run(input exec_run_t c);
    int cyc;
    for (int i = 0; i < DM; i++)
      for (int j = 0; j < DN; j++) begin
        int s = 0;
        for (int w = 0; w < int'(c.num_words); w++)
          s += $countones(lmem[i][(int'(c.lhs_offset) + w) % BM] & rmem[j][(int'(c.rhs_offset) + w) % BN]);
        s = s << c.shift;
        if (c.negate) s = -s;
        model[i][j] = c.acc_clear ? s : model[i][j] + s;
      end
    @(negedge clk); cfg = c; start = 1'b1;
    @(negedge clk); start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != int'(c.num_words) + 4) begin
      failures++;
      $display("FAIL: done after %0d cycles, expected %0d", cyc, int'(c.num_words) + 4);
    end
    checks++;
    if (rb_wr_en != c.write_en || (c.write_en && rb_wr_addr != c.write_addr[0])) begin
      failures++; $display("FAIL: result buffer write enable/address");
    end
    if (c.write_en) begin
      n_writes++;
      for (int i = 0; i < DM; i++)
        for (int j = 0; j < DN; j++) begin
          checks++;
          if (rb_wr_data[(i*DN + j)*A +: A] !== 32'(model[i][j])) begin
            failures++;
            $display("FAIL: tile (%0d,%0d) = %0d, expected %0d", i, j, $signed(rb_wr_data[(i*DN + j)*A +: A]), model[i][j]);
          end
        end
    end
    @(negedge clk);
  endtask

  initial begin
    exec_run_t c;
    start = 0; cfg = '0;
    for (int i = 0; i < DM; i++) for (int a = 0; a < BM; a++) lmem[i][a] = {$urandom, $urandom};
    for (int j = 0; j < DN; j++) for (int a = 0; a < BN; a++) rmem[j][a] = {$urandom, $urandom};
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    for (int g = 0; g < 12; g++) begin
      int n = 1 + ($urandom % 4);
      for (int k = 0; k < n; k++) begin
        c = '0;
        c.lhs_offset = 16'($urandom % 16);
        c.rhs_offset = 16'($urandom % 16);
        c.num_words  = 16'(1 + ($urandom % 16));
        c.shift      = 6'($urandom % 8);
        c.negate     = $urandom % 2;
        c.acc_clear  = (k == 0);
        c.write_en   = (k == n - 1);
        c.write_addr = 4'(g % 2);
        run(c);
      end
    end
    checks++;
    if (n_writes != 12) begin failures++; $display("FAIL: %0d tile writes", n_writes); end
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
