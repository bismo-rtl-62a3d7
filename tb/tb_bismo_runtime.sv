// tb_bismo_runtime: execute-stage runtime of 8 x k x 8 products on the
// overlay at its default size (8 x 8 DPUs of 256 bits).
//
// Two sweeps, each configuration run to completion before the next:
//   1. binary operands, k = 256 ... 131072: execute efficiency against k
//      (efficiency = ideal DPA cycles w*a*k/256 over measured cycles);
//   2. k = 2048 and k = 16384 with w*a = 1, 2, 3, 4 bits (1x1, 2x1, 3x1,
//      2x2): runtime against operand precision.
// Per configuration the fetch stage loads every bit plane of both operands
// into the matrix buffers, the execute stage runs one instruction per plane
// pair and the result stage writes the 8 x 8 result, which is checked
// element by element against a reference product. The execute runtime is
// counted from the first DPA input to the result buffer write of the last
// instruction; memory is not on this path, as in the measurement it models.
// Further checks: the runtime is never below the ideal, stays within a fixed
// per-instruction overhead of it, efficiency does not fall as k grows, and
// a w*a-bit product costs no more than w*a times the binary one plus that
// overhead.
module tb_bismo_runtime;
  import bismo_pkg::*;
  localparam int unsigned DM = 8, DN = 8, DK = 256;
  localparam int unsigned OVERHEAD = 6;   // cycles per execute instruction beyond its words
  localparam logic [31:0] L_BASE = 32'h0010_0000, R_BASE = 32'h0080_0000, P_BASE = 32'h0000_1000;
  localparam int unsigned KMAX = 131072;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n;
  logic fetch_instr_valid, fetch_instr_ready, exec_instr_valid, exec_instr_ready;
  logic result_instr_valid, result_instr_ready;
  fetch_instr_t fetch_instr; exec_instr_t exec_instr; result_instr_t result_instr;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, wr_valid, wr_ready, idle;
  logic [31:0] rd_req_addr, wr_addr;
  logic [63:0] rd_resp_data, wr_data;

  bismo_top u_dut (.*);
  main_memory_model #(.LAT(4), .READY_PCT(100)) u_mem (.*);

  int checks = 0, failures = 0;
  longint cyc = 0, first_mac = -1, last_wr = -1;
  byte Lv [DM][KMAX];
  byte Rv [DN][KMAX];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && u_dut.u_exec.u_dpa.in_valid && first_mac < 0) first_mac = cyc;
    if (rst_n && u_dut.rb_wr_en) last_wr = cyc;
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

  // Store bit planes: plane p, row r, word w at base + ((p*rows + r)*KW + w)*8.
  task automatic store(input logic [31:0] base, input int bits, input int k, input bit is_l);
    int kw = k / 64;
    for (int p = 0; p < bits; p++)
      for (int r = 0; r < 8; r++)
        for (int w = 0; w < kw; w++) begin
          logic [63:0] word;
          for (int b = 0; b < 64; b++) word[b] = is_l ? Lv[r][w*64+b][p] : Rv[r][w*64+b][p];
          u_mem.poke(base + 32'(((p * 8 + r) * kw + w) * 8), word);
        end
  endtask

  // Run one 8 x k x 8 product with w-bit L and a-bit R; returns execute cycles.
  task automatic run_one(input int k, input int w, input int a, output longint exec_cycles);
    int kw = k / 64, kd = k / DK;
    fetch_instr_t f;
    exec_instr_t e;
    result_instr_t r;
    for (int i = 0; i < 8; i++)
      for (int x = 0; x < k; x++) begin
        Lv[i][x] = byte'($urandom % (1 << w));
        Rv[i][x] = byte'($urandom % (1 << a));
      end
    store(L_BASE, w, k, 1'b1);
    store(R_BASE, a, k, 1'b0);
    // fetch: all planes of L into the LHS buffers, all planes of R into the RHS buffers
    f = '0; f.op = OP_RUN;
    f.run.base_addr = L_BASE; f.run.block_size = 16'(8 * kw * 8 > 65535 ? kw * 8 : 8 * kw * 8);
    f.run.block_offset = 32'(f.run.block_size); f.run.num_blocks = 16'(w * 8 * kw * 8 / f.run.block_size);
    f.run.buf_offset = '0; f.run.buf_start = 8'd0; f.run.buf_range = 8'(DM); f.run.words_per_buf = 16'(kw);
    push_f(f);
    f.run.base_addr = R_BASE; f.run.num_blocks = 16'(a * 8 * kw * 8 / f.run.block_size);
    f.run.buf_start = 8'(DM); f.run.buf_range = 8'(DN);
    push_f(f);
    f = '0; f.op = OP_SIGNAL; push_f(f);
    // execute: wait for the data, one instruction per plane pair, hand over
    e = '0; e.op = OP_WAIT; e.chan = CH_FETCH; push_e(e);
    first_mac = -1;
    for (int i = 0; i < w; i++)
      for (int j = 0; j < a; j++) begin
        e = '0; e.op = OP_RUN;
        e.run.lhs_offset = 16'(i * kd); e.run.rhs_offset = 16'(j * kd); e.run.num_words = 16'(kd);
        e.run.shift = 6'(i + j); e.run.acc_clear = (i == 0 && j == 0);
        e.run.write_en = (i == w - 1 && j == a - 1); e.run.write_addr = 4'd0;
        push_e(e);
      end
    e = '0; e.op = OP_SIGNAL; e.chan = CH_RESULT; push_e(e);
    r = '0; r.op = OP_WAIT; push_r(r);
    r.op = OP_RUN; r.run.base_addr = P_BASE; r.run.offset = '0; r.run.row_stride = 32'(DN * 4);
    push_r(r);
    do @(posedge clk); while (!idle);
    repeat (2) @(posedge clk);
    exec_cycles = last_wr - first_mac + 1;
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++) begin
        int exp = 0;
        logic [63:0] word;
        for (int x = 0; x < k; x++) exp += int'(Lv[i][x]) * int'(Rv[j][x]);
        word = u_mem.peek(P_BASE + 32'((i * DN + j) * 4 / 8 * 8));
        checks++;
        if (word[(j % 2) * 32 +: 32] != 32'(exp)) begin
          failures++;
          if (failures < 10) $display("FAIL: k=%0d %0dx%0d P[%0d][%0d] = %0d, expected %0d", k, w, a,
                                      i, j, word[(j % 2) * 32 +: 32], exp);
        end
      end
  endtask

  initial begin
    int ks [10] = '{256, 512, 1024, 2048, 4096, 8192, 16384, 32768, 65536, 131072};
    int ws [4] = '{1, 2, 3, 2};
    int as [4] = '{1, 1, 1, 2};
    real prev_eff = 0.0;
    longint t1, tc;
    rst_n = 1'b0;
    fetch_instr_valid = 0; exec_instr_valid = 0; result_instr_valid = 0;
    fetch_instr = '0; exec_instr = '0; result_instr = '0;
    repeat (4) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;

    $display("sweep 1: binary 8 x k x 8, execute efficiency");
    foreach (ks[n]) begin
      real eff;
      int ideal;
      ideal = ks[n] / DK;
      run_one(ks[n], 1, 1, tc);
      eff = 100.0 * real'(ideal) / real'(tc);
      $display("  k=%6d  ideal %4d  measured %4d cycles  efficiency %5.1f%%", ks[n], ideal, tc, eff);
      checks++;
      if (tc < ideal || tc > ideal + OVERHEAD) begin
        failures++; $display("FAIL: k=%0d runtime %0d outside [%0d, %0d]", ks[n], tc, ideal, ideal + OVERHEAD);
      end
      checks++;
      if (eff < prev_eff) begin failures++; $display("FAIL: efficiency fell at k=%0d", ks[n]); end
      prev_eff = eff;
    end

    $display("sweep 2: 8 x k x 8 with w x a bits, execute runtime");
    foreach (ks[n]) if (ks[n] == 2048 || ks[n] == 16384) begin
      for (int c = 0; c < 4; c++) begin
        int wa;
        wa = ws[c] * as[c];
        run_one(ks[n], ws[c], as[c], tc);
        if (c == 0) t1 = tc;
        $display("  k=%6d  w x a = %0d x %0d  measured %5d cycles  projected w*a*t = %5d", ks[n], ws[c], as[c],
                 tc, wa * t1);
        checks++;
        if (tc < wa * (ks[n] / DK) || tc > wa * t1 + wa * OVERHEAD) begin
          failures++; $display("FAIL: k=%0d %0dx%0d runtime %0d", ks[n], ws[c], as[c], tc);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
