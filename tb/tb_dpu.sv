// tb_dpu: streams random operands into one DPU (DK = 256, A = 32), one per
// cycle with random gaps, random shift, negate and clear, and checks that the
// accumulator equals a reference model exactly three cycles after each input
// (full rate, three-cycle latency).
module tb_dpu;
  localparam int unsigned DK = 256, A = 32, NCYC = 2000;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, negate, acc_clear;
  logic [DK-1:0] lhs, rhs;
  logic [5:0] shift;
  logic [A-1:0] acc;
  logic [A-1:0] exp_hist [NCYC];
  logic [A-1:0] model;
  int checks = 0, failures = 0;

  dpu #(.DK(DK), .A(A)) dut (.*);

  initial begin
    in_valid = 0; negate = 0; acc_clear = 0; lhs = '0; rhs = '0; shift = '0;
    model = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    for (int c = 0; c < NCYC; c++) begin
      // check: accumulator shows the inputs of three cycles ago
      if (c >= 3) begin
        checks++;
        if (acc !== exp_hist[c-3]) begin
          failures++;
          if (failures < 10) $display("FAIL: cycle %0d acc=%h expected %h", c, acc, exp_hist[c-3]);
        end
      end
      in_valid  = ($urandom % 4) != 0;
      for (int k = 0; k < DK / 32; k++) begin lhs[k*32 +: 32] = $urandom; rhs[k*32 +: 32] = $urandom; end
      if (c % 5 == 0) rhs = '1;
      shift     = 6'($urandom % 24);
      negate    = $urandom % 2;
      acc_clear = ($urandom % 16) == 0;
      if (in_valid) begin
        logic [A-1:0] contrib;
        contrib = A'($countones(lhs & rhs)) << shift;
        if (negate) contrib = -contrib;
        model = acc_clear ? contrib : model + contrib;
      end
      exp_hist[c] = model;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NCYC + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
