// tb_popcount: checks the popcount of all-zero, all-one, single-bit and random
// 256-bit vectors against $countones.
module tb_popcount;
  localparam int unsigned W = 256;
  logic [W-1:0] v;
  logic [$clog2(W+1)-1:0] cnt;
  int checks = 0, failures = 0;

  popcount #(.W(W)) dut (.in_bits(v), .count(cnt));

  task automatic check(input logic [W-1:0] x);
    v = x; #1;
    checks++;
    if (cnt != $bits(cnt)'($countones(x))) begin
      failures++;
      $display("FAIL: popcount(%h) = %0d, expected %0d", x, cnt, $countones(x));
    end
  endtask

  initial begin
    check('0);
    check('1);
    for (int i = 0; i < W; i++) check(W'(1) << i);
    for (int n = 0; n < 500; n++) begin
      logic [W-1:0] x;
      for (int k = 0; k < W / 32; k++) x[k*32 +: 32] = $urandom;
      if (n % 3 == 0) x = x & {W/32{$urandom}};
      check(x);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
