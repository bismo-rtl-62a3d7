// bismo_sched_run: one overlay plus main memory, running a 256 x 4096 x 256
// binary matrix product with either an overlapped or a serialized schedule
// (testbench helper, not synthesizable).
//
// The overlay is built with D_m = D_n = 8, D_k = 64 and 1024-word matrix
// buffers: its 8 LHS and 8 RHS buffers hold 64 KiB each, while each operand
// is 128 KiB (256 rows of 4096 bits), so the operands are twice the on-chip
// storage and must be streamed. The product is split into 32 x 32 tiles of
// 8 x 8; a tile needs one 64-word dot product per DPU.
//
// Schedule. The columns of R are processed in two halves of 128; a half fills
// the RHS buffers (16 column groups of 64 words per buffer) and stays resident
// while all 32 row bands of L (8 rows each) stream through the LHS buffers,
// each band executed against the 16 resident column groups.
//   OVERLAP = 1: L bands alternate between two LHS slots, so the fetch of
//     band n+1 runs while band n executes; the execute stage hands tiles to
//     the result stage through the two result buffer entries and only waits
//     for a free entry, so result writing also overlaps execution.
//   OVERLAP = 0: every stage waits for the one before it to finish: a band is
//     fetched only after the previous band was executed and written, and the
//     execute stage waits for each tile to be written before the next.
// Operand bits come from a fixed hash (word_of) so two instances compute
// the same product. When all instructions have been issued and the overlay
// is idle, done goes high and cycles holds the runtime.
module bismo_sched_run #(
  parameter bit OVERLAP = 1'b1
) (
  input  logic   clk,
  output logic   done,
  output longint cycles,
  output longint macs
);
  import bismo_pkg::*;
  localparam int unsigned DM = 8, DN = 8, DK = 64, BM = 1024, BN = 1024, BR = 2;
  localparam int unsigned MM = 256, NN = 256, KK = 4096;
  localparam int unsigned KW = KK / 64;                    // 64-bit words per row (= D_k words)
  localparam int unsigned BANDS = MM / DM, HALVES = 2, GROUPS = NN / HALVES / DN;
  localparam int unsigned T = BANDS * HALVES * GROUPS;     // 1024 tiles
  localparam logic [31:0] L_BASE = 32'h0010_0000, R_BASE = 32'h0020_0000, P_BASE = 32'h0040_0000;

  logic rst_n;
  logic fetch_instr_valid, fetch_instr_ready, exec_instr_valid, exec_instr_ready;
  logic result_instr_valid, result_instr_ready;
  fetch_instr_t fetch_instr; exec_instr_t exec_instr; result_instr_t result_instr;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, wr_valid, wr_ready, idle;
  logic [31:0] rd_req_addr, wr_addr;
  logic [63:0] rd_resp_data, wr_data;

  bismo_top #(.DM(DM), .DN(DN), .DK(DK), .BM(BM), .BN(BN), .BR(BR)) u_dut (.*);
  main_memory_model #(.LAT(8), .READY_PCT(100)) u_mem (.*);

  always @(posedge clk) if (rst_n && !done) begin
    cycles <= cycles + 1;
    if (u_dut.u_exec.u_dpa.in_valid) macs <= macs + 1;
  end

  // splitmix64 of (matrix, row, word)
  function automatic logic [63:0] word_of(input int mat, input int row, input int w);
    logic [63:0] x;
    x = {16'(mat), 16'(row), 32'(w)} + 64'h9E37_79B9_7F4A_7C15;
    x = (x ^ (x >> 30)) * 64'hBF58_476D_1CE4_E5B9;
    x = (x ^ (x >> 27)) * 64'h94D0_49BB_1331_11EB;
    return x ^ (x >> 31);
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

  function automatic fetch_instr_t f_op(input op_e op);
    fetch_instr_t i = '0; i.op = op; return i;
  endfunction
  function automatic exec_instr_t e_op(input op_e op, input logic ch);
    exec_instr_t i = '0; i.op = op; i.chan = ch; return i;
  endfunction
  function automatic result_instr_t r_op(input op_e op);
    result_instr_t i = '0; i.op = op; return i;
  endfunction

  task automatic fetch_prog();
    fetch_instr_t f;
    for (int g = 0; g < HALVES; g++) begin
      if (g > 0) repeat (OVERLAP ? 2 : 1) push_f(f_op(OP_WAIT));   // previous half fully used
      // R columns 128g .. 128g+127: column c to RHS buffer c%8, word (c/8)*64
      f = '0; f.op = OP_RUN;
      f.run.base_addr = R_BASE + 32'(g * (NN / HALVES) * KW * 8);
      f.run.block_size = 16'(KW * 8); f.run.block_offset = 32'(KW * 8);
      f.run.num_blocks = 16'(NN / HALVES);
      f.run.buf_offset = '0; f.run.buf_start = 8'(DM); f.run.buf_range = 8'(DN);
      f.run.words_per_buf = 16'(KW);
      push_f(f);
      push_f(f_op(OP_SIGNAL));
      for (int b = 0; b < BANDS; b++) begin
        int n;
        n = g * BANDS + b;
        if (OVERLAP ? (b >= 2) : (b >= 1)) push_f(f_op(OP_WAIT));  // slot free / previous band done
        f = '0; f.op = OP_RUN;
        f.run.base_addr = L_BASE + 32'(b * DM * KW * 8);
        f.run.block_size = 16'(DM * KW * 8); f.run.block_offset = 32'(DM * KW * 8);
        f.run.num_blocks = 16'd1;
        f.run.buf_offset = 16'((n % 2) * KW); f.run.buf_start = 8'd0; f.run.buf_range = 8'(DM);
        f.run.words_per_buf = 16'(KW);
        push_f(f);
        push_f(f_op(OP_SIGNAL));
      end
    end
    @(negedge clk); fetch_instr_valid = 1'b0;
  endtask

  task automatic exec_prog();
    int t;
    exec_instr_t e;
    t = 0;
    for (int g = 0; g < HALVES; g++)
      for (int b = 0; b < BANDS; b++) begin
        int n;
        n = g * BANDS + b;
        if (b == 0) push_e(e_op(OP_WAIT, CH_FETCH));               // R half resident
        push_e(e_op(OP_WAIT, CH_FETCH));                           // L band resident
        for (int j = 0; j < GROUPS; j++) begin
          if (OVERLAP && t >= BR) push_e(e_op(OP_WAIT, CH_RESULT));  // result buffer entry free
          e = '0; e.op = OP_RUN;
          e.run.lhs_offset = 16'((n % 2) * KW); e.run.rhs_offset = 16'(j * KW);
          e.run.num_words = 16'(KW); e.run.shift = '0; e.run.acc_clear = 1'b1;
          e.run.write_en = 1'b1; e.run.write_addr = 4'(t % BR);
          push_e(e);
          push_e(e_op(OP_SIGNAL, CH_RESULT));
          if (!OVERLAP) push_e(e_op(OP_WAIT, CH_RESULT));          // tile written
          t++;
        end
        push_e(e_op(OP_SIGNAL, CH_FETCH));
      end
    @(negedge clk); exec_instr_valid = 1'b0;
  endtask

  task automatic result_prog();
    result_instr_t r;
    for (int t = 0; t < T; t++) begin
      int n, b, g, j;
      n = t / GROUPS; j = t % GROUPS; g = n / BANDS; b = n % BANDS;
      push_r(r_op(OP_WAIT));
      r = '0; r.op = OP_RUN;
      r.run.base_addr = P_BASE;
      r.run.offset = 32'((b * DM * NN + (g * GROUPS + j) * DN) * 4);
      r.run.row_stride = 32'(NN * 4);
      r.run.rb_addr = 4'(t % BR);
      push_r(r);
      if (!OVERLAP || t + BR < T) push_r(r_op(OP_SIGNAL));
    end
    @(negedge clk); result_instr_valid = 1'b0;
  endtask

  initial begin
    rst_n = 1'b0; done = 1'b0; cycles = 0; macs = 0;
    fetch_instr_valid = 0; exec_instr_valid = 0; result_instr_valid = 0;
    fetch_instr = '0; exec_instr = '0; result_instr = '0;
    for (int r = 0; r < MM; r++)
      for (int w = 0; w < KW; w++) u_mem.poke(L_BASE + 32'((r * KW + w) * 8), word_of(0, r, w));
    for (int c = 0; c < NN; c++)
      for (int w = 0; w < KW; w++) u_mem.poke(R_BASE + 32'((c * KW + w) * 8), word_of(1, c, w));
    repeat (4) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    fork
      fetch_prog();
      exec_prog();
      result_prog();
    join
    do @(posedge clk); while (!idle);
    done = 1'b1;
  end
endmodule
