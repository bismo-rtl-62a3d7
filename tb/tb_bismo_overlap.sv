// tb_bismo_overlap: gain from overlapping the fetch, execute and result
// stages on a 256 x 4096 x 256 binary matrix product.
//
// Two copies of bismo_sched_run run side by side, one with the overlapped
// schedule and one with every stage serialized (see that module for both
// schedules and the overlay size, D_m = D_n = 8, D_k = 64). When both are
// done the testbench checks all 65536 result elements of each against a
// reference computed from the same operand hash, that each spent exactly
// 32 x 32 tiles x 64 words = 65536 cycles feeding the DPA, and that the
// overlapped schedule is at least 1.5 times faster. Both runtimes and the
// speedup are printed.
module tb_bismo_overlap;
  localparam int unsigned MM = 256, NN = 256, KW = 64;
  localparam logic [31:0] P_BASE = 32'h0040_0000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic done_o, done_s;
  longint cyc_o, cyc_s, mac_o, mac_s;
  int checks = 0, failures = 0;

  bismo_sched_run #(.OVERLAP(1'b1)) u_ovl (.clk(clk), .done(done_o), .cycles(cyc_o), .macs(mac_o));
  bismo_sched_run #(.OVERLAP(1'b0)) u_ser (.clk(clk), .done(done_s), .cycles(cyc_s), .macs(mac_s));

  initial begin
    wait (done_o && done_s);
    for (int i = 0; i < MM; i++)
      for (int j = 0; j < NN; j++) begin
        int exp;
        logic [63:0] wo, ws;
        exp = 0;
        for (int w = 0; w < KW; w++) exp += $countones(u_ovl.word_of(0, i, w) & u_ovl.word_of(1, j, w));
        wo = u_ovl.u_mem.peek(P_BASE + 32'((i * NN + j) * 4));
        ws = u_ser.u_mem.peek(P_BASE + 32'((i * NN + j) * 4));
        checks += 2;
        if (wo[(j % 2) * 32 +: 32] != 32'(exp)) begin
          failures++;
          if (failures < 10) $display("FAIL: overlapped P[%0d][%0d] = %0d, expected %0d", i, j, wo[(j % 2) * 32 +: 32], exp);
        end
        if (ws[(j % 2) * 32 +: 32] != 32'(exp)) begin
          failures++;
          if (failures < 10) $display("FAIL: serialized P[%0d][%0d] = %0d, expected %0d", i, j, ws[(j % 2) * 32 +: 32], exp);
        end
      end
    $display("overlapped: %0d cycles, serialized: %0d cycles, speedup %0.2f", cyc_o, cyc_s,
             real'(cyc_s) / real'(cyc_o));
    checks += 2;
    if (mac_o != 65536 || mac_s != 65536) begin
      failures++; $display("FAIL: DPA cycles %0d / %0d, expected 65536", mac_o, mac_s);
    end
    if (real'(cyc_s) < 1.5 * real'(cyc_o)) begin
      failures++; $display("FAIL: overlap gains too little");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
