// tb_stage_controller: drives an execute-style controller (two channels) with
// a scripted instruction stream and checks each behaviour cycle by cycle:
// WAIT blocks while the channel has no token and pops it when one arrives;
// SIGNAL blocks while the FIFO is full and pushes when there is room; RUN
// pulses run_start once and retires only on run_done; the channel field
// selects the FIFO.
module tb_stage_controller;
  import bismo_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic instr_valid, instr_ready, chan, run_start, run_done, busy, stall_wait, stall_signal;
  op_e op;
  logic [1:0] tok_avail, tok_pop, tok_full, tok_push;
  int checks = 0, failures = 0;

  stage_controller #(.NCH(2)) dut (.*);

  task automatic expect_now(input string what, input bit cond);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  initial begin
    instr_valid = 0; op = OP_RUN; chan = 0; tok_avail = '0; tok_full = '0; run_done = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    // WAIT on channel 1 with no token: blocks
    instr_valid = 1; op = OP_WAIT; chan = 1'b1;
    repeat (3) begin
      #1 expect_now("WAIT blocks", !instr_ready && tok_pop == 2'b00 && stall_wait);
      @(negedge clk);
    end
    tok_avail = 2'b01;  // token on the other channel only: still blocked
    #1 expect_now("WAIT ignores other channel", !instr_ready && tok_pop == 2'b00);
    @(negedge clk);
    tok_avail = 2'b10;
    #1 expect_now("WAIT pops its channel", instr_ready && tok_pop == 2'b10 && !stall_wait);
    @(negedge clk); tok_avail = '0;
    // SIGNAL on channel 0 while full: blocks
    op = OP_SIGNAL; chan = 1'b0; tok_full = 2'b01;
    repeat (2) begin
      #1 expect_now("SIGNAL blocks when full", !instr_ready && tok_push == 2'b00 && stall_signal);
      @(negedge clk);
    end
    tok_full = 2'b10;
    #1 expect_now("SIGNAL pushes its channel", instr_ready && tok_push == 2'b01);
    @(negedge clk); tok_full = '0;
    // RUN: one start pulse, retire on done
    op = OP_RUN;
    #1 expect_now("RUN starts", run_start && !instr_ready);
    @(negedge clk);
    repeat (4) begin
      #1 expect_now("RUN waits for done", !run_start && !instr_ready && busy);
      @(negedge clk);
    end
    run_done = 1;
    #1 expect_now("RUN retires on done", instr_ready);
    @(negedge clk); run_done = 0; instr_valid = 0;
    #1 expect_now("idle after retire", !busy && !run_start);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
