// bismo_pkg: types shared by the bit-serial matrix multiplication overlay.
//
// The overlay is programmed with three instruction streams, one per pipeline
// stage (fetch, execute, result). Every stage understands the same three
// operations: WAIT (block until a token arrives on a synchronization FIFO),
// SIGNAL (push a token to a synchronization FIFO) and RUN (perform the stage's
// work as described by the stage-specific RUN fields). The list of RUN fields
// follows the overlay's instruction summary; the bit widths of the fields, the
// operation encoding and the few extra fields noted below are this design's
// own choices.
//
// Addresses into main memory are byte addresses. Matrix buffer addresses in a
// fetch instruction count F-bit write words; those in an execute instruction
// count DK-bit read words.
package bismo_pkg;

  localparam int unsigned ADDR_W = 32;  // main-memory byte address width

  // Operation of an instruction, common to all three stages.
  typedef enum logic [1:0] {
    OP_RUN    = 2'd0,
    OP_WAIT   = 2'd1,
    OP_SIGNAL = 2'd2
  } op_e;

  // Synchronization channel named by WAIT/SIGNAL. The fetch and result stages
  // only talk to the execute stage (channel 0). The execute stage uses
  // channel 0 for the fetch stage and channel 1 for the result stage.
  localparam logic CH_FETCH  = 1'b0;
  localparam logic CH_RESULT = 1'b1;

  // RUN fields of the fetch stage: a strided read from main memory and the
  // placement of the words read into the matrix buffers.
  typedef struct packed {
    logic [ADDR_W-1:0] base_addr;     // byte address of the first block
    logic [15:0]       block_size;    // bytes per contiguous block (multiple of F/8)
    logic [ADDR_W-1:0] block_offset;  // bytes between the starts of two blocks
    logic [15:0]       num_blocks;    // number of blocks
    logic [15:0]       buf_offset;    // first matrix buffer address (F-bit words)
    logic [7:0]        buf_start;     // first matrix buffer: 0..DM-1 LHS, DM..DM+DN-1 RHS
    logic [7:0]        buf_range;     // number of consecutive buffers written in turn
    logic [15:0]       words_per_buf; // F-bit words written to one buffer before the next
  } fetch_run_t;

  // RUN fields of the execute stage. num_words, write_en and write_addr are
  // additions of this design: the length of the read sequence and whether
  // (and where) to copy the accumulators into the result buffer at the end.
  typedef struct packed {
    logic [15:0] lhs_offset;  // first LHS buffer address (DK-bit words)
    logic [15:0] rhs_offset;  // first RHS buffer address (DK-bit words)
    logic [15:0] num_words;   // DK-bit words to multiply-accumulate
    logic [5:0]  shift;       // weight: left shift of each popcount
    logic        negate;      // weight: subtract instead of add
    logic        acc_clear;   // start from zero instead of the old accumulators
    logic        write_en;    // copy the accumulators to the result buffer when done
    logic [3:0]  write_addr;  // result buffer entry to write
  } exec_run_t;

  // RUN fields of the result stage. row_stride and rb_addr are additions of
  // this design: the byte distance between two rows of the result tile in
  // main memory, and which result buffer entry to write out.
  typedef struct packed {
    logic [ADDR_W-1:0] base_addr;   // result matrix base address
    logic [ADDR_W-1:0] offset;      // byte offset of this tile from base_addr
    logic [ADDR_W-1:0] row_stride;  // bytes between consecutive tile rows
    logic [3:0]        rb_addr;     // result buffer entry to read
  } result_run_t;

  typedef struct packed {
    op_e        op;
    logic       chan;
    fetch_run_t run;
  } fetch_instr_t;

  typedef struct packed {
    op_e       op;
    logic      chan;
    exec_run_t run;
  } exec_instr_t;

  typedef struct packed {
    op_e         op;
    logic        chan;
    result_run_t run;
  } result_instr_t;

endpackage
