// tb_bismo_full: end-to-end test of the overlay at its default size.
//
// The top is instantiated with its default parameters (8 x 8 DPUs of 256
// bits, 1024-word matrix buffers, 64-bit memory channels, 32-bit
// accumulators, two result buffer entries). It computes an unsigned
// 16 x 1024 x 16 product of 2-bit by 3-bit matrices as four 8 x 8 tiles, with
// randomly stalling memory, and checks all 256 result elements and every
// mechanism counted by bismo_e2e_driver (negation excepted: the operands are
// unsigned).
module tb_bismo_full;
  import bismo_pkg::*;

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

  bismo_e2e_driver #(.DM(8), .DN(8), .DK(256), .BM(1024), .BN(1024), .BR(2), .SQ_DEPTH(8),
                     .M(16), .N(16), .K(1024), .LB(2), .RB(3), .SIGNED(0), .MAX_CYCLES(400000)) u_drv (
    .*,
    .p_f_stall_w(u_dut.f_stall_w), .p_e_stall_w(u_dut.e_stall_w), .p_r_stall_w(u_dut.r_stall_w),
    .p_e_stall_s(u_dut.e_stall_s), .p_dpa_valid(u_dut.u_exec.u_dpa.in_valid),
    .p_negate(u_dut.u_exec.u_dpa.negate), .p_shift_nz(u_dut.u_exec.u_dpa.shift != 0),
    .p_clear(u_dut.u_exec.u_dpa.acc_clear), .p_rb_wr_en(u_dut.rb_wr_en),
    .p_rb_wr_addr(4'(u_dut.rb_wr_addr)), .p_mb_wr_en(u_dut.mb_wr_en));
endmodule
