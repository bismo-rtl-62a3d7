// tb_bismo_instances: the six array shapes of the evaluated instances, each
// computing a signed 2-bit product tile.
//
//   #1  8 x  64 x 8     #2  8 x 128 x 8     #3  8 x 256 x 8 (the default)
//   #4  4 x 256 x 4     #5  8 x 256 x 4     #6  4 x 512 x 4      (D_m x D_k x D_n)
//
// Each instance is a bismo_inst_run with its own memory and its own random
// operands; the instances run side by side. When all are done the testbench
// adds up their checks, prints each instance's peak binary throughput
// (2 D_m D_n D_k operations per cycle, in GOPS at 200 MHz) and its execute
// runtime, and checks the throughput figures against the published ones
// (1638.4, 3276.8, 6553.6, 1638.4, 3276.8, 3276.8 GOPS).
module tb_bismo_instances;
  localparam int NI = 6;
  localparam int IM [NI] = '{8, 8, 8, 4, 8, 4};
  localparam int IK [NI] = '{64, 128, 256, 256, 256, 512};
  localparam int IN [NI] = '{8, 8, 8, 4, 4, 4};
  localparam real GOPS [NI] = '{1638.4, 3276.8, 6553.6, 1638.4, 3276.8, 3276.8};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [NI-1:0] done;
  int c [NI], f [NI], ec [NI];
  int checks = 0, failures = 0;

  for (genvar g = 0; g < NI; g++) begin : g_inst
    bismo_inst_run #(.DM(IM[g]), .DK(IK[g]), .DN(IN[g])) u_run (
      .clk(clk), .done(done[g]), .checks(c[g]), .failures(f[g]), .exec_cycles(ec[g]));
  end

  initial begin
    wait (&done);
    for (int n = 0; n < NI; n++) begin
      real gops;
      gops = 2.0 * IM[n] * IN[n] * IK[n] * 0.2;
      $display("instance #%0d: %0d x %0d x %0d DPUs, %0d result checks, %0d failures, execute %0d cycles, peak %0.1f binary GOPS at 200 MHz",
               n + 1, IM[n], IK[n], IN[n], c[n], f[n], ec[n], gops);
      checks += c[n] + 1;
      failures += f[n];
      if (gops < GOPS[n] - 0.05 || gops > GOPS[n] + 0.05) begin
        failures++; $display("FAIL: instance #%0d peak %0.1f GOPS", n + 1, gops);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
