// tb_bismo_example: the worked example of the bit-serial scheme, run with the
// exact instruction queues of its published schedule.
//
// L = [2 0; 1 3] and R = [0 1; 1 2] are 2-bit unsigned matrices, so
// P = L*R = [0 2; 3 7] = 4 L1*R1 + 2 L1*R0 + 2 L0*R1 + L0*R0. The array is
// 2 x 2 (as large as the matrices); rows are padded to one 64-bit word. As in
// the published example only three of the four bit planes fit in the buffers:
// R1 is fetched into the place of R0, so the fetch of R1 must wait until the
// execute stage has finished with R0.
//
//   fetch : F1 RUN L0  F2 RUN R0  F3 SIGNAL  F4 RUN L1  F5 SIGNAL  F6 WAIT  F7 RUN R1  F8 SIGNAL
//   exec  : E1 WAIT  E2 RUN L0.R0  E3 WAIT  E4 RUN L1.R0  E5 SIGNAL  E6 WAIT
//           E7 RUN L0.R1  E8 RUN L1.R1  E9 SIGNAL(result)
//   result: R1 WAIT  R2 RUN P
//
// The published table prints E4 as L[2].R[0]; there is no L[2], and the
// accompanying text describes E4 as L[1].R[0], which is what is run here.
//
// Checks: the four elements of P in memory; that the fetch stage blocked on
// F6 and the execute stage on a WAIT; that fetching and executing overlapped
// (F4 runs while E2 executes); and that R1's first buffer write came after
// E4 had finished (the hazard the tokens guard against).
module tb_bismo_example;
  import bismo_pkg::*;
  localparam int unsigned DM = 2, DN = 2, DK = 64, BM = 4, BN = 4;
  localparam logic [31:0] L_BASE = 32'h100, R_BASE = 32'h200, P_BASE = 32'h400;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n;
  logic fetch_instr_valid, fetch_instr_ready, exec_instr_valid, exec_instr_ready;
  logic result_instr_valid, result_instr_ready;
  fetch_instr_t fetch_instr; exec_instr_t exec_instr; result_instr_t result_instr;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, wr_valid, wr_ready, idle;
  logic [31:0] rd_req_addr, wr_addr;
  logic [63:0] rd_resp_data, wr_data;
  int checks = 0, failures = 0;
  int n_exec_done = 0, n_rhs_wr = 0, n_f_stall = 0, n_e_stall = 0, n_overlap = 0;
  int e4_done_cycle = -1, r1_first_wr_cycle = -1, cyc = 0;

  bismo_top #(.DM(DM), .DN(DN), .DK(DK), .BM(BM), .BN(BN)) u_dut (.*);
  main_memory_model #(.LAT(5), .READY_PCT(75)) u_mem (.*);

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (u_dut.e_done) begin
      n_exec_done++;
      if (n_exec_done == 2) e4_done_cycle = cyc;
    end
    if (u_dut.mb_wr_en[DM]) begin
      n_rhs_wr++;
      if (n_rhs_wr == 2) r1_first_wr_cycle = cyc;  // 1st write of R0 is #1, of R1 is #2
    end
    if (u_dut.f_stall_w) n_f_stall++;
    if (u_dut.e_stall_w) n_e_stall++;
    if (u_dut.f_busy && u_dut.e_busy) n_overlap++;
  end

  function automatic fetch_instr_t f_run(input logic [31:0] base, input int first_buf, input int offs);
    fetch_instr_t i = '0;
    i.op = OP_RUN; i.run.base_addr = base; i.run.block_size = 16'd16; i.run.block_offset = 32'd16;
    i.run.num_blocks = 16'd1; i.run.buf_offset = 16'(offs); i.run.buf_start = 8'(first_buf);
    i.run.buf_range = 8'd2; i.run.words_per_buf = 16'd1;
    return i;
  endfunction
  function automatic fetch_instr_t f_op(input op_e op);
    fetch_instr_t i = '0; i.op = op; return i;
  endfunction
  function automatic exec_instr_t e_run(input int lo, input int ro, input int sh, input bit clr, input bit wr);
    exec_instr_t i = '0;
    i.op = OP_RUN; i.run.lhs_offset = 16'(lo); i.run.rhs_offset = 16'(ro); i.run.num_words = 16'd1;
    i.run.shift = 6'(sh); i.run.acc_clear = clr; i.run.write_en = wr; i.run.write_addr = 4'd0;
    return i;
  endfunction
  function automatic exec_instr_t e_op(input op_e op, input logic ch);
    exec_instr_t i = '0; i.op = op; i.chan = ch; return i;
  endfunction

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

  initial begin
    int Lm [2][2] = '{'{2, 0}, '{1, 3}};
    int Rm [2][2] = '{'{0, 1}, '{1, 2}};
    int Pm [2][2] = '{'{0, 2}, '{3, 7}};
    result_instr_t r;
    rst_n = 1'b0;
    fetch_instr_valid = 0; exec_instr_valid = 0; result_instr_valid = 0;
    fetch_instr = '0; exec_instr = '0; result_instr = '0;
    // plane p, row i of L at L_BASE + (p*2 + i)*8; R stored by columns
    for (int p = 0; p < 2; p++)
      for (int i = 0; i < 2; i++) begin
        logic [63:0] lw, rw;
        lw = '0; rw = '0;
        for (int k = 0; k < 2; k++) begin
          lw[k] = Lm[i][k] >> p & 1;
          rw[k] = Rm[k][i] >> p & 1;
        end
        u_mem.poke(L_BASE + 32'((p * 2 + i) * 8), lw);
        u_mem.poke(R_BASE + 32'((p * 2 + i) * 8), rw);
      end
    repeat (4) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    r = '0;
    fork
      begin  // fetch queue
        push_f(f_run(L_BASE, 0, 0));          // F1 L0 -> LHS offset 0
        push_f(f_run(R_BASE, DM, 0));         // F2 R0 -> RHS offset 0
        push_f(f_op(OP_SIGNAL));              // F3
        push_f(f_run(L_BASE + 32'd16, 0, 1)); // F4 L1 -> LHS offset 1
        push_f(f_op(OP_SIGNAL));              // F5
        push_f(f_op(OP_WAIT));                // F6
        push_f(f_run(R_BASE + 32'd16, DM, 0));// F7 R1 -> RHS offset 0, over R0
        push_f(f_op(OP_SIGNAL));              // F8
        @(negedge clk); fetch_instr_valid = 0;
      end
      begin  // execute queue
        push_e(e_op(OP_WAIT, CH_FETCH));      // E1
        push_e(e_run(0, 0, 0, 1, 0));         // E2 P  = L0.R0
        push_e(e_op(OP_WAIT, CH_FETCH));      // E3
        push_e(e_run(1, 0, 1, 0, 0));         // E4 P += 2 L1.R0
        push_e(e_op(OP_SIGNAL, CH_FETCH));    // E5
        push_e(e_op(OP_WAIT, CH_FETCH));      // E6
        push_e(e_run(0, 0, 1, 0, 0));         // E7 P += 2 L0.R1
        push_e(e_run(1, 0, 2, 0, 1));         // E8 P += 4 L1.R1, to result buffer
        push_e(e_op(OP_SIGNAL, CH_RESULT));   // E9
        @(negedge clk); exec_instr_valid = 0;
      end
      begin  // result queue
        r.op = OP_WAIT;
        push_r(r);                            // R1
        r.op = OP_RUN; r.run.base_addr = P_BASE; r.run.offset = '0; r.run.row_stride = 32'd8;
        push_r(r);                            // R2
        @(negedge clk); result_instr_valid = 0;
      end
    join
    do @(posedge clk); while (!idle);
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 2; j++) begin
        logic [63:0] w;
        w = u_mem.peek(P_BASE + 32'(i * 8));
        checks++;
        if (w[j*32 +: 32] != 32'(Pm[i][j])) begin
          failures++;
          $display("FAIL: P[%0d][%0d] = %0d, expected %0d", i, j, w[j*32 +: 32], Pm[i][j]);
        end
      end
    checks++;
    if (n_overlap == 0) begin failures++; $display("FAIL: fetch and execute never overlapped"); end
    $display("fetch and execute overlapped %0d cycles", n_overlap);
    $display("fetch blocked %0d cycles, execute blocked %0d cycles; E4 done in cycle %0d, R1 first written in cycle %0d, total %0d cycles",
             n_f_stall, n_e_stall, e4_done_cycle, r1_first_wr_cycle, cyc);
    checks++;
    if (n_f_stall == 0) begin failures++; $display("FAIL: fetch never blocked on F6"); end
    checks++;
    if (n_e_stall == 0) begin failures++; $display("FAIL: execute never blocked"); end
    checks++;
    if (e4_done_cycle < 0 || r1_first_wr_cycle <= e4_done_cycle) begin
      failures++; $display("FAIL: R1 overwrote R0 before E4 finished");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
