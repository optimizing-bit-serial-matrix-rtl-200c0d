// bismo_pkg: types and constants shared by the bit-serial matrix multiplication
// overlay. It holds the accumulator-mode and opcode encodings, the run-instruction
// field layouts of the fetch, execute and result stages and of the P2S converter,
// and the full instruction words that the instruction queues carry.
//
// The instruction fields follow the instruction summary of the design (base
// address, block size, buffer offsets, dot product length, negate, accumulator
// mode, ...). Field widths, the opcode encoding and the few fields that the
// summary does not list (separate LHS/RHS offsets, result-buffer slot, row stride
// of the result write) are this implementation's choices.
package bismo_pkg;

  localparam int ADDR_W = 32;

  // Second adder input of every DPU: zero, the accumulator, or the accumulator
  // shifted left by one (moving to the next, lower-weight wavefront).
  typedef enum logic [1:0] {
    ACC_ZERO  = 2'd0,
    ACC_KEEP  = 2'd1,
    ACC_SHIFT = 2'd2
  } acc_mode_e;

  // Stage instruction opcodes.
  typedef enum logic [1:0] {
    OP_RUN    = 2'd0,
    OP_WAIT   = 2'd1,
    OP_SIGNAL = 2'd2
  } op_e;

  // RunFetch: strided block read from main memory, scattered over a range of
  // matrix buffers. Buffers 0..DM-1 are the LHS buffers, DM..DM+DN-1 the RHS ones.
  typedef struct packed {
    logic [ADDR_W-1:0] base_addr;     // byte address of the first block
    logic [15:0]       block_bytes;   // bytes per contiguous block (multiple of F/8)
    logic [ADDR_W-1:0] block_stride;  // bytes between the starts of two blocks
    logic [15:0]       num_blocks;    // number of blocks
    logic [15:0]       buf_offset;    // first write address in the buffers (F-bit words)
    logic [7:0]        buf_start;     // first buffer written
    logic [7:0]        buf_range;     // number of consecutive buffers used
    logic [15:0]       words_per_buf; // F-bit words put in one buffer before moving on
  } fetch_run_t;

  // RunExecute: one weighted binary matrix multiplication step over the DPA.
  typedef struct packed {
    logic [15:0] lhs_offset;  // first LHS buffer address (DK-bit words)
    logic [15:0] rhs_offset;  // first RHS buffer address (DK-bit words)
    logic [15:0] length;      // dot product length in DK-bit words
    logic        negate;      // subtract the contribution
    acc_mode_e   acc_mode;    // applied on the first beat
    logic        write_res;   // copy the accumulators to the result buffer at the end
    logic [3:0]  res_slot;    // result buffer slot written
  } exec_run_t;

  // RunResult: write one result-buffer slot to main memory, row by row.
  typedef struct packed {
    logic [ADDR_W-1:0] base_addr;   // result matrix base address
    logic [ADDR_W-1:0] offset;      // byte offset of this tile
    logic [ADDR_W-1:0] row_stride;  // bytes between two result rows
    logic [3:0]        res_slot;    // result buffer slot read
  } result_run_t;

  // RunP2S: convert a bit-parallel matrix into bit-serial matrices.
  typedef struct packed {
    logic [ADDR_W-1:0] src_addr;  // bit-parallel matrix, elements padded to M bits
    logic [ADDR_W-1:0] dst_addr;  // first bit-serial matrix
    logic [15:0]       rows;
    logic [15:0]       cols;      // multiple of the write width R
    logic [3:0]        prec;      // bits to convert, from the LSB (1..M)
  } p2s_run_t;

  typedef struct packed {
    fetch_run_t run;
    logic       chan;   // unused: fetch only syncs with execute
    op_e        op;
  } fetch_instr_t;

  typedef struct packed {
    exec_run_t run;
    logic      chan;    // 0: fetch FIFO pair, 1: result FIFO pair
    op_e       op;
  } exec_instr_t;

  typedef struct packed {
    result_run_t run;
    logic        chan;  // unused: result only syncs with execute
    op_e         op;
  } result_instr_t;

  localparam int FETCH_RUN_W  = $bits(fetch_run_t);
  localparam int EXEC_RUN_W   = $bits(exec_run_t);
  localparam int RESULT_RUN_W = $bits(result_run_t);

endpackage
