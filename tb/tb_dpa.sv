// tb_dpa: a 3 x 2 array of 64-bit DPUs. Streams random words for 40 cycles
// with a fixed weight and checks every accumulator against the weighted sum of
// popcount(lhs[i] & rhs[j]), i.e. that row i sees LHS word i and column j
// RHS word j.
module tb_dpa;
  localparam int unsigned DM = 3, DN = 2, DK = 64, A = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, negate, acc_clear;
  logic [DM-1:0][DK-1:0] lhs;
  logic [DN-1:0][DK-1:0] rhs;
  logic [5:0] shift;
  logic [DM-1:0][DN-1:0][A-1:0] acc;
  int model [DM][DN];
  int checks = 0, failures = 0;

  dpa #(.DM(DM), .DN(DN), .DK(DK), .A(A)) dut (.*);

  task automatic run(input int ncyc, input int sh, input bit neg);
    for (int c = 0; c < ncyc; c++) begin
      @(negedge clk);
      in_valid = 1'b1; shift = 6'(sh); negate = neg; acc_clear = (c == 0);
      for (int i = 0; i < DM; i++) lhs[i] = {$urandom, $urandom};
      for (int j = 0; j < DN; j++) rhs[j] = {$urandom, $urandom};
      for (int i = 0; i < DM; i++)
        for (int j = 0; j < DN; j++) begin
          int p = $countones(lhs[i] & rhs[j]) << sh;
          if (neg) p = -p;
          model[i][j] = (c == 0) ? p : model[i][j] + p;
        end
    end
    @(negedge clk); in_valid = 1'b0; acc_clear = 1'b0;
    repeat (4) @(negedge clk);
    for (int i = 0; i < DM; i++)
      for (int j = 0; j < DN; j++) begin
        checks++;
        if (acc[i][j] !== 32'(model[i][j])) begin
          failures++;
          $display("FAIL: acc[%0d][%0d]=%0d expected %0d", i, j, $signed(acc[i][j]), model[i][j]);
        end
      end
  endtask

  initial begin
    in_valid = 0; negate = 0; acc_clear = 0; lhs = '0; rhs = '0; shift = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    run(40, 0, 0);
    run(17, 3, 1);
    run(5, 1, 0);
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
