// tb_fetch_interconnect: injects a random packet (random id among the 3 + 2
// buffers) in most cycles and checks, every cycle, that exactly the expected
// buffer write ports are active with the right address and data: a packet for
// LHS buffer i arrives DM-i cycles after injection, one for RHS buffer j j+1
// cycles after (the position of the node in its chain, plus one).
module tb_fetch_interconnect;
  localparam int unsigned DM = 3, DN = 2, F = 64, NB = DM + DN, NCYC = 500;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid;
  logic [7:0] in_id;
  logic [15:0] in_addr;
  logic [F-1:0] in_data;
  logic [NB-1:0] wr_en;
  logic [NB-1:0][15:0] wr_addr;
  logic [NB-1:0][F-1:0] wr_data;
  // expected write per (cycle, buffer)
  bit          e_en   [NCYC+10][NB];
  logic [15:0] e_addr [NCYC+10][NB];
  logic [F-1:0] e_data [NCYC+10][NB];
  int checks = 0, failures = 0;

  fetch_interconnect #(.DM(DM), .DN(DN), .F(F)) dut (.*);

  initial begin
    in_valid = 0; in_id = '0; in_addr = '0; in_data = '0;
    for (int c = 0; c < NCYC + 10; c++) for (int b = 0; b < NB; b++) e_en[c][b] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    for (int c = 0; c < NCYC + 8; c++) begin
      // check the write ports of this cycle
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (wr_en[b] != e_en[c][b] || (wr_en[b] && (wr_addr[b] != e_addr[c][b] || wr_data[b] != e_data[c][b]))) begin
          failures++;
          if (failures < 10) $display("FAIL: cycle %0d buffer %0d en %b addr %0d, expected %b %0d", c, b, wr_en[b], wr_addr[b], e_en[c][b], e_addr[c][b]);
        end
      end
      in_valid = (c < NCYC) && (($urandom % 5) != 0);
      in_id    = 8'($urandom % NB);
      in_addr  = 16'($urandom);
      in_data  = {$urandom, $urandom};
      if (in_valid) begin
        int lat;
        lat = (in_id < DM) ? (DM - int'(in_id)) : (int'(in_id) - DM + 1);
        e_en[c + lat][in_id] = 1; e_addr[c + lat][in_id] = in_addr; e_data[c + lat][in_id] = in_data;
      end
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
