// tb_bismo_top: end-to-end test of the overlay at a reduced size.
//
// A 3 x 2 array of 128-bit DPUs (F = R = 64, A = 32, two result buffer
// entries) computes a signed 6 x 512 x 4 product of 3-bit by 2-bit matrices
// in 2 x 2 tiles, with randomly stalling memory. bismo_e2e_driver builds the
// instruction streams, checks every result element and checks that each
// mechanism of the overlay (blocking WAIT and SIGNAL, memory backpressure,
// full instruction queue, accumulator clear, shift, negation, both result
// buffer entries, every matrix buffer) occurred.
module tb_bismo_top;
  import bismo_pkg::*;
  localparam int unsigned DM = 3, DN = 2, DK = 128, BM = 64, BN = 64, BR = 2, SQ = 8;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n;
  logic fetch_instr_valid, fetch_instr_ready, exec_instr_valid, exec_instr_ready;
  logic result_instr_valid, result_instr_ready;
  fetch_instr_t fetch_instr; exec_instr_t exec_instr; result_instr_t result_instr;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, wr_valid, wr_ready, idle;
  logic [31:0] rd_req_addr, wr_addr;
  logic [63:0] rd_resp_data, wr_data;

  bismo_top #(.DM(DM), .DN(DN), .DK(DK), .BM(BM), .BN(BN), .BR(BR), .SQ_DEPTH(SQ)) u_dut (.*);

  bismo_e2e_driver #(.DM(DM), .DN(DN), .DK(DK), .BM(BM), .BN(BN), .BR(BR), .SQ_DEPTH(SQ),
                     .M(6), .N(4), .K(512), .LB(3), .RB(2), .SIGNED(1), .MAX_CYCLES(200000)) u_drv (
    .*,
    .p_f_stall_w(u_dut.f_stall_w), .p_e_stall_w(u_dut.e_stall_w), .p_r_stall_w(u_dut.r_stall_w),
    .p_e_stall_s(u_dut.e_stall_s), .p_dpa_valid(u_dut.u_exec.u_dpa.in_valid),
    .p_negate(u_dut.u_exec.u_dpa.negate), .p_shift_nz(u_dut.u_exec.u_dpa.shift != 0),
    .p_clear(u_dut.u_exec.u_dpa.acc_clear), .p_rb_wr_en(u_dut.rb_wr_en),
    .p_rb_wr_addr(4'(u_dut.rb_wr_addr)), .p_mb_wr_en(u_dut.mb_wr_en));
endmodule
