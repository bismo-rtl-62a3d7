// bismo_inst_run: one overlay of a given array shape plus main memory,
// computing one signed product tile and checking it (testbench helper, not
// synthesizable).
//
// The overlay is built with DM x DN DPUs of DK bits (other parameters at
// their defaults) and computes a DM x (4*DK) x DN product of signed 2-bit
// matrices: one RunFetch per operand loads both bit planes, four RunExecute
// instructions apply the weights +1, -2, -2, +4 (the top planes are negative)
// and one RunResult writes the tile. Main memory stalls requests at random.
// When the overlay is idle again, done rises; checks / failures then count
// the result elements compared, the DPA cycle count (exactly 4 x 4 words)
// and the execute runtime (at most 4 x (4 + 5) cycles from the first DPA
// input to the result buffer write).
module bismo_inst_run #(
  parameter int unsigned DM = 8,
  parameter int unsigned DK = 256,
  parameter int unsigned DN = 8
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   exec_cycles
);
  import bismo_pkg::*;
  localparam int unsigned KD = 4, K = KD * DK, KW = K / 64;
  localparam logic [31:0] L_BASE = 32'h0001_0000, R_BASE = 32'h0002_0000, P_BASE = 32'h0003_0000;

  logic rst_n;
  logic fetch_instr_valid, fetch_instr_ready, exec_instr_valid, exec_instr_ready;
  logic result_instr_valid, result_instr_ready;
  fetch_instr_t fetch_instr; exec_instr_t exec_instr; result_instr_t result_instr;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, wr_valid, wr_ready, idle;
  logic [31:0] rd_req_addr, wr_addr;
  logic [63:0] rd_resp_data, wr_data;

  bismo_top #(.DM(DM), .DN(DN), .DK(DK)) u_dut (.*);
  main_memory_model #(.LAT(6), .READY_PCT(75)) u_mem (.*);

  int macs = 0, first_mac = -1, last_wr = -1, cyc = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (u_dut.u_exec.u_dpa.in_valid) begin
      macs++;
      if (first_mac < 0) first_mac = cyc;
    end
    if (u_dut.rb_wr_en) last_wr = cyc;
  end

  task automatic push_f(input fetch_instr_t ins);
    @(negedge clk); fetch_instr_valid = 1'b1; fetch_instr = ins;
    while (!fetch_instr_ready) @(negedge clk);
    @(posedge clk); @(negedge clk); fetch_instr_valid = 1'b0;
  endtask
  task automatic push_e(input exec_instr_t ins);
    @(negedge clk); exec_instr_valid = 1'b1; exec_instr = ins;
    while (!exec_instr_ready) @(negedge clk);
    @(posedge clk); @(negedge clk); exec_instr_valid = 1'b0;
  endtask
  task automatic push_r(input result_instr_t ins);
    @(negedge clk); result_instr_valid = 1'b1; result_instr = ins;
    while (!result_instr_ready) @(negedge clk);
    @(posedge clk); @(negedge clk); result_instr_valid = 1'b0;
  endtask

  byte Lv [DM][K];
  byte Rv [DN][K];

  initial begin
    fetch_instr_t f;
    exec_instr_t e;
    result_instr_t r;
    rst_n = 1'b0; done = 1'b0; checks = 0; failures = 0; exec_cycles = 0;
    fetch_instr_valid = 0; exec_instr_valid = 0; result_instr_valid = 0;
    fetch_instr = '0; exec_instr = '0; result_instr = '0;
    for (int i = 0; i < DM; i++) for (int x = 0; x < K; x++) Lv[i][x] = byte'(int'($urandom % 4) - 2);
    for (int j = 0; j < DN; j++) for (int x = 0; x < K; x++) Rv[j][x] = byte'(int'($urandom % 4) - 2);
    // plane p, row r, word w at base + ((p*rows + r)*KW + w)*8
    for (int p = 0; p < 2; p++)
      for (int w = 0; w < KW; w++) begin
        for (int i = 0; i < DM; i++) begin
          logic [63:0] word;
          for (int b = 0; b < 64; b++) word[b] = Lv[i][w*64+b][p];
          u_mem.poke(L_BASE + 32'(((p * DM + i) * KW + w) * 8), word);
        end
        for (int j = 0; j < DN; j++) begin
          logic [63:0] word;
          for (int b = 0; b < 64; b++) word[b] = Rv[j][w*64+b][p];
          u_mem.poke(R_BASE + 32'(((p * DN + j) * KW + w) * 8), word);
        end
      end
    repeat (4) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    fork
      begin
        f = '0; f.op = OP_RUN;
        f.run.base_addr = L_BASE; f.run.block_size = 16'(2 * DM * KW * 8); f.run.block_offset = '0;
        f.run.num_blocks = 16'd1; f.run.buf_offset = '0; f.run.buf_start = 8'd0;
        f.run.buf_range = 8'(DM); f.run.words_per_buf = 16'(KW);
        push_f(f);
        f.run.base_addr = R_BASE; f.run.block_size = 16'(2 * DN * KW * 8);
        f.run.buf_start = 8'(DM); f.run.buf_range = 8'(DN);
        push_f(f);
        f = '0; f.op = OP_SIGNAL; push_f(f);
      end
      begin
        e = '0; e.op = OP_WAIT; e.chan = CH_FETCH; push_e(e);
        for (int i = 0; i < 2; i++)
          for (int j = 0; j < 2; j++) begin
            e = '0; e.op = OP_RUN;
            e.run.lhs_offset = 16'(i * KD); e.run.rhs_offset = 16'(j * KD); e.run.num_words = 16'(KD);
            e.run.shift = 6'(i + j); e.run.negate = (i == 1) != (j == 1);
            e.run.acc_clear = (i == 0 && j == 0); e.run.write_en = (i == 1 && j == 1);
            push_e(e);
          end
        e = '0; e.op = OP_SIGNAL; e.chan = CH_RESULT; push_e(e);
      end
      begin
        r = '0; r.op = OP_WAIT; push_r(r);
        r.op = OP_RUN; r.run.base_addr = P_BASE; r.run.row_stride = 32'(DN * 4);
        push_r(r);
      end
    join
    do @(posedge clk); while (!idle);
    repeat (2) @(posedge clk);
    for (int i = 0; i < DM; i++)
      for (int j = 0; j < DN; j++) begin
        int exp;
        logic [63:0] word;
        exp = 0;
        for (int x = 0; x < K; x++) exp += int'(Lv[i][x]) * int'(Rv[j][x]);
        word = u_mem.peek(P_BASE + 32'((i * DN + j) * 4));
        checks++;
        if (word[(j % 2) * 32 +: 32] != 32'(exp)) begin
          failures++;
          if (failures < 5) $display("FAIL: %0dx%0dx%0d P[%0d][%0d] = %0d, expected %0d", DM, DK, DN, i, j,
                                     $signed(word[(j % 2) * 32 +: 32]), exp);
        end
      end
    exec_cycles = last_wr - first_mac + 1;
    checks += 2;
    if (macs != 4 * KD) begin failures++; $display("FAIL: %0dx%0dx%0d DPA cycles %0d", DM, DK, DN, macs); end
    if (exec_cycles > 4 * (KD + 5)) begin
      failures++; $display("FAIL: %0dx%0dx%0d execute took %0d cycles", DM, DK, DN, exec_cycles);
    end
    done = 1'b1;
  end
endmodule
