// tb_downsizer: feeds random 256-bit words into a 256-to-64-bit downsizer with
// random valid and ready, and checks that the 64-bit words come out in order,
// least significant first, and that input is refused while busy.
module tb_downsizer;
  localparam int unsigned IN_W = 256, OUT_W = 64, NW = IN_W / OUT_W;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [IN_W-1:0] in_data;
  logic [OUT_W-1:0] out_data;
  logic [OUT_W-1:0] q [$];
  int checks = 0, failures = 0, n_out = 0;

  downsizer #(.IN_W(IN_W), .OUT_W(OUT_W)) dut (.*);

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    for (int c = 0; c < 3000; c++) begin
      in_valid  = ($urandom % 3) == 0;
      out_ready = ($urandom % 4) != 0;
      for (int k = 0; k < IN_W / 32; k++) in_data[k*32 +: 32] = $urandom;
      #1;
      checks++;
      if (in_ready != (q.size() == 0) || out_valid != (q.size() > 0) ||
          (out_valid && out_data !== q[0])) begin
        failures++;
        if (failures < 10) $display("FAIL: cycle %0d out %h expected %h", c, out_data, q.size() ? q[0] : '0);
      end
      @(posedge clk);
      if (out_valid && out_ready) begin void'(q.pop_front()); n_out++; end
      if (in_valid && in_ready) for (int w = 0; w < NW; w++) q.push_back(in_data[w*OUT_W +: OUT_W]);
      @(negedge clk);
    end
    checks++;
    if (n_out < 100) begin failures++; $display("FAIL: only %0d words out", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
