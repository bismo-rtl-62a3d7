// bismo_e2e_driver: host, main memory and checker for end-to-end runs of the
// overlay (testbench only).
//
// Generates a random M x K matrix L of LB-bit elements and a K x N matrix R of
// RB-bit elements (two's complement when SIGNED, else unsigned), stores them in
// the memory model bit plane by bit plane (bit-packed rows, R stored
// transposed, i.e. one row per column of R), writes the three instruction
// streams that compute P = L * R tile by tile (DM x DN tiles, all LB*RB binary
// products per tile) and checks every element of P in memory against a
// product computed here with plain integer arithmetic.
//
// Memory layout: plane p of L is M rows of K bits; row r of plane p starts at
// L_BASE + (p*M + r)*K/8. Likewise R with N rows. P is M x N 32-bit words,
// row-major, at P_BASE.
//
// Schedule per tile t (mirroring the overlay's example schedule):
//   fetch : [WAIT exec if t>0]  RUN L-tile (all planes, strided)  RUN R-tile  SIGNAL exec
//   exec  : WAIT fetch  [WAIT result if t>=BR]  RUN x LB*RB (weights +/-2^(i+j))
//           [SIGNAL fetch if not last]  SIGNAL result
//   result: WAIT exec  RUN (tile t, entry t mod BR)  [SIGNAL exec if t+BR < T]
// After the last tile the execute stage sends SQ_DEPTH+3 extra tokens to the
// result stage, which waits for them, so that a blocked SIGNAL is exercised.
//
// The probe inputs come from inside the overlay; every mechanism listed in the
// final report must have occurred at least once or a failure is counted.
module bismo_e2e_driver
  import bismo_pkg::*;
#(
  parameter int unsigned DM = 8, parameter int unsigned DN = 8, parameter int unsigned DK = 256,
  parameter int unsigned BM = 1024, parameter int unsigned BN = 1024, parameter int unsigned BR = 2,
  parameter int unsigned SQ_DEPTH = 8,
  parameter int unsigned M = 16, parameter int unsigned N = 16, parameter int unsigned K = 512,
  parameter int unsigned LB = 2, parameter int unsigned RB = 2, parameter bit SIGNED = 1,
  parameter int unsigned MAX_CYCLES = 200000
) (
  input  logic              clk,
  output logic              rst_n,
  output logic              fetch_instr_valid,
  input  logic              fetch_instr_ready,
  output fetch_instr_t      fetch_instr,
  output logic              exec_instr_valid,
  input  logic              exec_instr_ready,
  output exec_instr_t       exec_instr,
  output logic              result_instr_valid,
  input  logic              result_instr_ready,
  output result_instr_t     result_instr,
  input  logic              rd_req_valid,
  output logic              rd_req_ready,
  input  logic [31:0]       rd_req_addr,
  output logic              rd_resp_valid,
  output logic [63:0]       rd_resp_data,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  logic [31:0]       wr_addr,
  input  logic [63:0]       wr_data,
  input  logic              idle,
  // probes
  input  logic              p_f_stall_w,
  input  logic              p_e_stall_w,
  input  logic              p_r_stall_w,
  input  logic              p_e_stall_s,
  input  logic              p_dpa_valid,
  input  logic              p_negate,
  input  logic              p_shift_nz,
  input  logic              p_clear,
  input  logic              p_rb_wr_en,
  input  logic [3:0]        p_rb_wr_addr,
  input  logic [DM+DN-1:0]  p_mb_wr_en
);
  localparam int unsigned KW = K / 64;      // 64-bit words per bit-plane row
  localparam int unsigned KD = K / DK;      // DK-bit words per bit-plane row
  localparam int unsigned TM = M / DM, TN = N / DN, T = TM * TN;
  localparam logic [31:0] L_BASE = 32'h0001_0000;
  localparam logic [31:0] R_BASE = 32'h0010_0000;
  localparam logic [31:0] P_BASE = 32'h0020_0000;

  int checks = 0, failures = 0;
  longint unsigned cycles = 0;
  int Lv [M][K];
  int Rv [N][K];

  // mechanism counters
  int n_f_stall = 0, n_e_stall = 0, n_r_stall = 0, n_sig_stall = 0, n_neg = 0, n_shift = 0,
      n_clear = 0, n_mac = 0, n_iq_full = 0;
  int n_rb_slot [BR];
  int n_mb_wr [DM+DN];

  main_memory_model #(.LAT(5), .READY_PCT(75)) u_mem (
    .clk, .rst_n, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data);

  initial begin
    for (int s = 0; s < BR; s++) n_rb_slot[s] = 0;
    for (int b = 0; b < DM + DN; b++) n_mb_wr[b] = 0;
  end

  always @(posedge clk) begin
    cycles <= cycles + 1;
    if (rst_n) begin
      if (p_f_stall_w) n_f_stall++;
      if (p_e_stall_w) n_e_stall++;
      if (p_r_stall_w) n_r_stall++;
      if (p_e_stall_s) n_sig_stall++;
      if (p_dpa_valid) n_mac++;
      if (p_dpa_valid && p_negate) n_neg++;
      if (p_dpa_valid && p_shift_nz) n_shift++;
      if (p_dpa_valid && p_clear) n_clear++;
      if (p_rb_wr_en) n_rb_slot[p_rb_wr_addr % BR]++;
      for (int b = 0; b < DM + DN; b++) if (p_mb_wr_en[b]) n_mb_wr[b]++;
      if ((fetch_instr_valid && !fetch_instr_ready) || (exec_instr_valid && !exec_instr_ready) ||
          (result_instr_valid && !result_instr_ready)) n_iq_full++;
    end
  end

  // ------------------------------------------------------------ data
  function automatic int rand_elem(input int bits);
    int v = int'($urandom % (1 << bits));
    if (SIGNED && v >= (1 << (bits - 1))) v -= (1 << bits);
    return v;
  endfunction

  task automatic store_planes(input logic [31:0] base, input int rows, input int bits, input bit is_l);
    for (int p = 0; p < bits; p++)
      for (int r = 0; r < rows; r++)
        for (int w = 0; w < KW; w++) begin
          logic [63:0] word = '0;
          for (int b = 0; b < 64; b++) begin
            int v = is_l ? Lv[r][w*64+b] : Rv[r][w*64+b];
            word[b] = v[p];
          end
          u_mem.poke(base + 32'(((p * rows + r) * KW + w) * 8), word);
        end
  endtask

  // ------------------------------------------------------------ instruction pushes
  task automatic push_f(input fetch_instr_t ins);
    @(negedge clk); fetch_instr_valid = 1'b1; fetch_instr = ins;
    while (!fetch_instr_ready) @(negedge clk);
    @(posedge clk);
  endtask
  task automatic push_e(input exec_instr_t ins);
    @(negedge clk); exec_instr_valid = 1'b1; exec_instr = ins;
    while (!exec_instr_ready) @(negedge clk);
    @(posedge clk);
  endtask
  task automatic push_r(input result_instr_t ins);
    @(negedge clk); result_instr_valid = 1'b1; result_instr = ins;
    while (!result_instr_ready) @(negedge clk);
    @(posedge clk);
  endtask

  function automatic fetch_instr_t f_sync(input op_e op);
    fetch_instr_t i = '0; i.op = op; i.chan = 1'b0; return i;
  endfunction
  function automatic exec_instr_t e_sync(input op_e op, input logic ch);
    exec_instr_t i = '0; i.op = op; i.chan = ch; return i;
  endfunction
  function automatic result_instr_t r_sync(input op_e op);
    result_instr_t i = '0; i.op = op; i.chan = 1'b0; return i;
  endfunction

  task automatic fetch_prog();
    for (int t = 0; t < T; t++) begin
      int ti = t / TN, tj = t % TN;
      fetch_instr_t i = '0;
      if (t > 0) push_f(f_sync(OP_WAIT));
      i.op = OP_RUN;
      i.run.base_addr     = L_BASE + 32'(ti * DM * KW * 8);
      i.run.block_size    = 16'(DM * KW * 8);
      i.run.block_offset  = 32'(M * KW * 8);
      i.run.num_blocks    = 16'(LB);
      i.run.buf_offset    = '0;
      i.run.buf_start     = 8'd0;
      i.run.buf_range     = 8'(DM);
      i.run.words_per_buf = 16'(KW);
      push_f(i);
      i.run.base_addr     = R_BASE + 32'(tj * DN * KW * 8);
      i.run.block_size    = 16'(DN * KW * 8);
      i.run.block_offset  = 32'(N * KW * 8);
      i.run.num_blocks    = 16'(RB);
      i.run.buf_start     = 8'(DM);
      i.run.buf_range     = 8'(DN);
      push_f(i);
      push_f(f_sync(OP_SIGNAL));
    end
    @(negedge clk); fetch_instr_valid = 1'b0;
  endtask

  task automatic exec_prog();
    for (int t = 0; t < T; t++) begin
      push_e(e_sync(OP_WAIT, CH_FETCH));
      if (t >= BR) push_e(e_sync(OP_WAIT, CH_RESULT));
      for (int i = 0; i < LB; i++)
        for (int j = 0; j < RB; j++) begin
          exec_instr_t e = '0;
          e.op = OP_RUN;
          e.run.lhs_offset = 16'(i * KD);
          e.run.rhs_offset = 16'(j * KD);
          e.run.num_words  = 16'(KD);
          e.run.shift      = 6'(i + j);
          e.run.negate     = SIGNED && ((i == LB - 1) != (j == RB - 1));
          e.run.acc_clear  = (i == 0 && j == 0);
          e.run.write_en   = (i == LB - 1 && j == RB - 1);
          e.run.write_addr = 4'(t % BR);
          push_e(e);
        end
      if (t < T - 1) push_e(e_sync(OP_SIGNAL, CH_FETCH));
      push_e(e_sync(OP_SIGNAL, CH_RESULT));
    end
    for (int x = 0; x < SQ_DEPTH + 3; x++) push_e(e_sync(OP_SIGNAL, CH_RESULT));
    @(negedge clk); exec_instr_valid = 1'b0;
  endtask

  task automatic result_prog();
    for (int t = 0; t < T; t++) begin
      int ti = t / TN, tj = t % TN;
      result_instr_t r = '0;
      push_r(r_sync(OP_WAIT));
      r.op = OP_RUN;
      r.run.base_addr  = P_BASE;
      r.run.offset     = 32'((ti * DM * N + tj * DN) * 4);
      r.run.row_stride = 32'(N * 4);
      r.run.rb_addr    = 4'(t % BR);
      push_r(r);
      if (t + BR < T) push_r(r_sync(OP_SIGNAL));
    end
    for (int x = 0; x < SQ_DEPTH + 3; x++) push_r(r_sync(OP_WAIT));
    @(negedge clk); result_instr_valid = 1'b0;
  endtask

  task automatic need(input string what, input int count);
    checks++;
    $display("  mechanism %-34s %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL: mechanism '%s' never happened", what);
    end
  endtask

  // ------------------------------------------------------------ main
  initial begin
    rst_n = 1'b0;
    fetch_instr_valid = 1'b0; exec_instr_valid = 1'b0; result_instr_valid = 1'b0;
    fetch_instr = '0; exec_instr = '0; result_instr = '0;
    if (LB * KD > BM || RB * KD > BN) $fatal(1, "workload does not fit the matrix buffers");
    for (int r = 0; r < M; r++) for (int k = 0; k < K; k++) Lv[r][k] = rand_elem(LB);
    for (int c = 0; c < N; c++) for (int k = 0; k < K; k++) Rv[c][k] = rand_elem(RB);
    repeat (4) @(posedge clk);
    store_planes(L_BASE, M, LB, 1'b1);
    store_planes(R_BASE, N, RB, 1'b0);
    @(negedge clk); rst_n = 1'b1;
    $display("run: %0dx%0dx%0d, %0d x %0d bits, %s, DPA %0dx%0dx%0d", M, K, N, LB, RB,
             SIGNED ? "signed" : "unsigned", DM, DK, DN);
    fork
      fetch_prog();
      exec_prog();
      result_prog();
    join
    do @(posedge clk); while (!idle);
    repeat (4) @(posedge clk);
    $display("finished after %0d cycles, %0d DPA cycles", cycles, n_mac);
    // results
    for (int r = 0; r < M; r++)
      for (int c = 0; c < N; c++) begin
        int exp;
        logic [31:0] a, got;
        logic [63:0] wd;
        exp = 0;
        a   = P_BASE + 32'((r * N + c) * 4);
        wd  = u_mem.peek(a);
        got = a[2] ? wd[63:32] : wd[31:0];
        for (int k = 0; k < K; k++) exp += Lv[r][k] * Rv[c][k];
        checks++;
        if (got !== 32'(exp)) begin
          failures++;
          if (failures < 10) $display("FAIL: P[%0d][%0d] = %0d, expected %0d", r, c, $signed(got), exp);
        end
      end
    // every binary product of every tile went through the array
    checks++;
    if (n_mac != T * LB * RB * KD) begin
      failures++;
      $display("FAIL: %0d DPA cycles, expected %0d", n_mac, T * LB * RB * KD);
    end
    need("fetch WAIT blocked", n_f_stall);
    need("execute WAIT blocked", n_e_stall);
    need("result WAIT blocked", n_r_stall);
    need("execute SIGNAL blocked (FIFO full)", n_sig_stall);
    need("read request backpressure", int'(u_mem.rd_stalls));
    need("write request backpressure", int'(u_mem.wr_stalls));
    need("instruction queue full", n_iq_full);
    need("accumulator clear", n_clear);
    need("weight shift > 0", n_shift);
    if (SIGNED) need("negated weight", n_neg);
    for (int s = 0; s < BR; s++) need($sformatf("result buffer entry %0d written", s), n_rb_slot[s]);
    for (int b = 0; b < DM + DN; b++) need($sformatf("matrix buffer %0d filled", b), n_mb_wr[b]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (MAX_CYCLES) @(posedge clk);
    failures++;
    $display("FAIL: watchdog after %0d cycles", MAX_CYCLES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
