// stage_controller: in-order instruction execution for one pipeline stage.
//
// Looks at the head of the stage's instruction queue and
//   WAIT   ch: if sync FIFO ch (incoming) holds a token, pops it and retires
//              the instruction; otherwise stalls (blocking read);
//   SIGNAL ch: if sync FIFO ch (outgoing) is not full, pushes a token and
//              retires the instruction; otherwise stalls (blocking write);
//   RUN      : pulses run_start for one cycle and retires the instruction
//              when the stage pulses run_done.
// WAIT and SIGNAL retire in one cycle when they do not block. The fetch and
// result controllers have one channel pair (NCH = 1, chan ignored), the
// execute controller two (chan 0 = fetch, 1 = result). stall_wait and
// stall_signal report a blocked WAIT or SIGNAL in the current cycle.
module stage_controller
  import bismo_pkg::*;
#(
  parameter int unsigned NCH = 2
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           instr_valid,
  output logic           instr_ready,
  input  op_e            op,
  input  logic           chan,
  input  logic [NCH-1:0] tok_avail,
  output logic [NCH-1:0] tok_pop,
  input  logic [NCH-1:0] tok_full,
  output logic [NCH-1:0] tok_push,
  output logic           run_start,
  input  logic           run_done,
  output logic           busy,
  output logic           stall_wait,
  output logic           stall_signal
);
  typedef enum logic {S_IDLE, S_RUN} state_e;
  state_e state;
  int unsigned ch;

  assign ch   = (NCH == 1) ? 0 : int'(chan);
  assign busy = (state == S_RUN);

  always_comb begin
    instr_ready  = 1'b0;
    tok_pop      = '0;
    tok_push     = '0;
    run_start    = 1'b0;
    stall_wait   = 1'b0;
    stall_signal = 1'b0;
    if (state == S_IDLE && instr_valid) begin
      case (op)
        OP_WAIT: begin
          if (tok_avail[ch]) begin tok_pop[ch] = 1'b1; instr_ready = 1'b1; end
          else stall_wait = 1'b1;
        end
        OP_SIGNAL: begin
          if (!tok_full[ch]) begin tok_push[ch] = 1'b1; instr_ready = 1'b1; end
          else stall_signal = 1'b1;
        end
        OP_RUN:  run_start = 1'b1;
        default: instr_ready = 1'b1;  // unknown operation: dropped
      endcase
    end else if (state == S_RUN && run_done) begin
      instr_ready = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) state <= S_IDLE;
    else if (state == S_IDLE && run_start) state <= S_RUN;
    else if (state == S_RUN && run_done)   state <= S_IDLE;
  end

  a_done_only_when_running: assert property (@(posedge clk) disable iff (!rst_n)
    run_done |-> state == S_RUN);
endmodule
