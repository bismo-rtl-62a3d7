// bismo_top: the bit-serial matrix multiplication overlay.
//
// An integer matrix product is computed as a weighted sum of binary matrix
// products, P = sum_i sum_j (+/-)2^(i+j) L[i] * R[j], where L[i] and R[j] are
// the bit planes of the operands. The overlay has three pipeline stages that
// run concurrently and each execute their own instruction stream:
//   fetch   - reads bit-plane data from main memory (F-bit read channel) and
//             routes it into DM left-hand-side and DN right-hand-side matrix
//             buffers;
//   execute - streams DK-bit words from the buffers through a DM x DN array
//             of dot product units (AND, popcount, shift, negate, accumulate)
//             and copies finished accumulator tiles to the result buffer;
//   result  - writes result buffer tiles to main memory (R-bit write channel)
//             with a row stride.
// Stages hand data over only through the shared buffers. They are kept in
// step by four token FIFOs (fetch<->execute and execute<->result, one per
// direction) operated by the WAIT and SIGNAL instructions; the software
// decides what a token means (e.g. "buffer full" or "buffer free").
//
// Ports: one valid/ready push port per instruction queue (host side); the
// main-memory read channel (request valid/ready + byte address, in-order
// responses that are never stalled); the main-memory write channel (valid/
// ready, byte address, R-bit data); idle, high when all queues are empty and
// no stage is running. Clock and synchronous active-low reset are shared.
// The default parameters are the overlay's largest evaluated instance (8 x 8
// DPUs of 256 bits, 64-bit memory channels, 32-bit accumulators, two result
// buffer entries); the buffer depths of 1024 words are this design's
// assumption.
module bismo_top
  import bismo_pkg::*;
#(
  parameter int unsigned DM       = 8,
  parameter int unsigned DN       = 8,
  parameter int unsigned DK       = 256,
  parameter int unsigned BM       = 1024,
  parameter int unsigned BN       = 1024,
  parameter int unsigned BR       = 2,
  parameter int unsigned A        = 32,
  parameter int unsigned F        = 64,
  parameter int unsigned R        = 64,
  parameter int unsigned IQ_DEPTH = 16,
  parameter int unsigned SQ_DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // instruction queues
  input  logic              fetch_instr_valid,
  output logic              fetch_instr_ready,
  input  fetch_instr_t      fetch_instr,
  input  logic              exec_instr_valid,
  output logic              exec_instr_ready,
  input  exec_instr_t       exec_instr,
  input  logic              result_instr_valid,
  output logic              result_instr_ready,
  input  result_instr_t     result_instr,
  // main memory read channel
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output logic [ADDR_W-1:0] rd_req_addr,
  input  logic              rd_resp_valid,
  input  logic [F-1:0]      rd_resp_data,
  // main memory write channel
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [R-1:0]      wr_data,
  // status
  output logic              idle
);
  localparam int unsigned NB   = DM + DN;
  localparam int unsigned BAW  = 16;
  localparam int unsigned LWA  = $clog2(BM * (DK / F));
  localparam int unsigned RWA  = $clog2(BN * (DK / F));
  localparam int unsigned LAW  = $clog2(BM);
  localparam int unsigned RAW  = $clog2(BN);
  localparam int unsigned RBAW = (BR > 1) ? $clog2(BR) : 1;
  localparam int unsigned TW   = DM * DN * A;

  // ---------------------------------------------------------------- queues
  fetch_instr_t  fq_head;
  exec_instr_t   eq_head;
  result_instr_t rq_head;
  logic fq_valid, fq_ready, fq_empty;
  logic eq_valid, eq_ready, eq_empty;
  logic rq_valid, rq_ready, rq_empty;

  fifo #(.W($bits(fetch_instr_t)), .DEPTH(IQ_DEPTH)) u_fetch_q (
    .clk, .rst_n, .in_valid(fetch_instr_valid), .in_ready(fetch_instr_ready), .in_data(fetch_instr),
    .out_valid(fq_valid), .out_ready(fq_ready), .out_data(fq_head), .empty(fq_empty));
  fifo #(.W($bits(exec_instr_t)), .DEPTH(IQ_DEPTH)) u_exec_q (
    .clk, .rst_n, .in_valid(exec_instr_valid), .in_ready(exec_instr_ready), .in_data(exec_instr),
    .out_valid(eq_valid), .out_ready(eq_ready), .out_data(eq_head), .empty(eq_empty));
  fifo #(.W($bits(result_instr_t)), .DEPTH(IQ_DEPTH)) u_result_q (
    .clk, .rst_n, .in_valid(result_instr_valid), .in_ready(result_instr_ready), .in_data(result_instr),
    .out_valid(rq_valid), .out_ready(rq_ready), .out_data(rq_head), .empty(rq_empty));

  // ------------------------------------------------------- sync FIFOs
  logic f2e_push, f2e_full, f2e_pop, f2e_avail;   // fetch   -> execute
  logic e2f_push, e2f_full, e2f_pop, e2f_avail;   // execute -> fetch
  logic e2r_push, e2r_full, e2r_pop, e2r_avail;   // execute -> result
  logic r2e_push, r2e_full, r2e_pop, r2e_avail;   // result  -> execute

  token_fifo #(.DEPTH(SQ_DEPTH)) u_f2e (.clk, .rst_n, .push(f2e_push), .full(f2e_full), .pop(f2e_pop), .avail(f2e_avail));
  token_fifo #(.DEPTH(SQ_DEPTH)) u_e2f (.clk, .rst_n, .push(e2f_push), .full(e2f_full), .pop(e2f_pop), .avail(e2f_avail));
  token_fifo #(.DEPTH(SQ_DEPTH)) u_e2r (.clk, .rst_n, .push(e2r_push), .full(e2r_full), .pop(e2r_pop), .avail(e2r_avail));
  token_fifo #(.DEPTH(SQ_DEPTH)) u_r2e (.clk, .rst_n, .push(r2e_push), .full(r2e_full), .pop(r2e_pop), .avail(r2e_avail));

  // ------------------------------------------------------- controllers
  logic f_start, f_done, f_busy, f_ctl_busy;
  logic e_start, e_done, e_busy, e_ctl_busy;
  logic r_start, r_done, r_busy, r_ctl_busy;
  logic f_stall_w, f_stall_s, e_stall_w, e_stall_s, r_stall_w, r_stall_s;

  stage_controller #(.NCH(1)) u_fetch_ctl (
    .clk, .rst_n, .instr_valid(fq_valid), .instr_ready(fq_ready), .op(fq_head.op), .chan(fq_head.chan),
    .tok_avail(e2f_avail), .tok_pop(e2f_pop), .tok_full(f2e_full), .tok_push(f2e_push),
    .run_start(f_start), .run_done(f_done), .busy(f_ctl_busy),
    .stall_wait(f_stall_w), .stall_signal(f_stall_s));

  stage_controller #(.NCH(2)) u_exec_ctl (
    .clk, .rst_n, .instr_valid(eq_valid), .instr_ready(eq_ready), .op(eq_head.op), .chan(eq_head.chan),
    .tok_avail({r2e_avail, f2e_avail}), .tok_pop({r2e_pop, f2e_pop}),
    .tok_full({e2r_full, e2f_full}), .tok_push({e2r_push, e2f_push}),
    .run_start(e_start), .run_done(e_done), .busy(e_ctl_busy),
    .stall_wait(e_stall_w), .stall_signal(e_stall_s));

  stage_controller #(.NCH(1)) u_result_ctl (
    .clk, .rst_n, .instr_valid(rq_valid), .instr_ready(rq_ready), .op(rq_head.op), .chan(rq_head.chan),
    .tok_avail(e2r_avail), .tok_pop(e2r_pop), .tok_full(r2e_full), .tok_push(r2e_push),
    .run_start(r_start), .run_done(r_done), .busy(r_ctl_busy),
    .stall_wait(r_stall_w), .stall_signal(r_stall_s));

  // ------------------------------------------------------- fetch stage
  logic [NB-1:0]          mb_wr_en;
  logic [NB-1:0][BAW-1:0] mb_wr_addr;
  logic [NB-1:0][F-1:0]   mb_wr_data;

  fetch_stage #(.DM(DM), .DN(DN), .F(F), .BAW(BAW)) u_fetch (
    .clk, .rst_n, .start(f_start), .cfg(fq_head.run), .busy(f_busy), .done(f_done),
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_data,
    .mb_wr_en, .mb_wr_addr, .mb_wr_data);

  // ------------------------------------------------------- matrix buffers
  logic                  mb_rd_en;
  logic [LAW-1:0]        lhs_rd_addr;
  logic [RAW-1:0]        rhs_rd_addr;
  logic [DM-1:0][DK-1:0] lhs_rd_data;
  logic [DN-1:0][DK-1:0] rhs_rd_data;

  for (genvar i = 0; i < DM; i++) begin : g_lhs_buf
    matrix_buffer #(.DEPTH(BM), .DK(DK), .F(F)) u_buf (
      .clk, .wr_en(mb_wr_en[i]), .wr_addr(LWA'(mb_wr_addr[i])), .wr_data(mb_wr_data[i]),
      .rd_en(mb_rd_en), .rd_addr(lhs_rd_addr), .rd_data(lhs_rd_data[i]));
  end
  for (genvar j = 0; j < DN; j++) begin : g_rhs_buf
    matrix_buffer #(.DEPTH(BN), .DK(DK), .F(F)) u_buf (
      .clk, .wr_en(mb_wr_en[DM+j]), .wr_addr(RWA'(mb_wr_addr[DM+j])), .wr_data(mb_wr_data[DM+j]),
      .rd_en(mb_rd_en), .rd_addr(rhs_rd_addr), .rd_data(rhs_rd_data[j]));
  end

  // ------------------------------------------------------- execute stage
  logic            rb_wr_en;
  logic [RBAW-1:0] rb_wr_addr;
  logic [TW-1:0]   rb_wr_data;
  logic [RBAW-1:0] rb_rd_addr;
  logic [TW-1:0]   rb_rd_data;

  execute_stage #(.DM(DM), .DN(DN), .DK(DK), .A(A), .BM(BM), .BN(BN), .BR(BR)) u_exec (
    .clk, .rst_n, .start(e_start), .cfg(eq_head.run), .busy(e_busy), .done(e_done),
    .mb_rd_en, .lhs_rd_addr, .rhs_rd_addr, .lhs_rd_data, .rhs_rd_data,
    .rb_wr_en, .rb_wr_addr, .rb_wr_data);

  result_buffer #(.BR(BR), .DM(DM), .DN(DN), .A(A)) u_rbuf (
    .clk, .wr_en(rb_wr_en), .wr_addr(rb_wr_addr), .wr_data(rb_wr_data),
    .rd_addr(rb_rd_addr), .rd_data(rb_rd_data));

  // ------------------------------------------------------- result stage
  result_stage #(.DM(DM), .DN(DN), .A(A), .R(R), .BR(BR)) u_result (
    .clk, .rst_n, .start(r_start), .cfg(rq_head.run), .busy(r_busy), .done(r_done),
    .rb_rd_addr, .rb_rd_data, .wr_valid, .wr_ready, .wr_addr, .wr_data);

  assign idle = fq_empty && eq_empty && rq_empty &&
                !f_ctl_busy && !e_ctl_busy && !r_ctl_busy &&
                !f_busy && !e_busy && !r_busy;
endmodule
