// iser_pkg -- types and constants shared by the ISER recomputation blocks.
//
// ISER (invisible speculative execution through value recomputation) replaces
// a shadowed load that misses in the L1 with the re-execution of a short
// backward slice of arithmetic/logic instructions. This package holds the
// slice instruction format, the opcode set, the three outcomes of an RCMP
// instruction, the reasons for abandoning a recomputation and the default
// sizes of the buffers.
//
// What follows the source design: the RCMP outcomes (perform the load, delay
// on miss, recompute), the maximum slice length of 100 instructions, a History
// table of 22 KiB, slices that contain only arithmetic and logic instructions
// ended by RTN, and instruction addresses that step by one per slice
// instruction (S, S+1, ...), and falling back to delay on miss when a slice
// instruction raises an exception. What is this design's own choice: the bit-level
// instruction encoding, the opcode list, 64-bit data, 48-bit instruction
// addresses, 16 architectural registers and the sizes of the shadow buffer,
// release queue, IBuff and SFile, none of which the source design states,
// and the abort reasons other than the exception.
package iser_pkg;

  // ---- widths ----------------------------------------------------------
  localparam int unsigned DATA_W    = 64;  // x86-64 integer registers
  localparam int unsigned ADDR_W    = 48;  // instruction (leaf) address width
  localparam int unsigned NUM_AREGS = 16;  // x86-64 general purpose registers
  localparam int unsigned AREG_W    = $clog2(NUM_AREGS);
  localparam int unsigned LOAD_ID_W = 8;   // core's tag for a load / its destination
  localparam int unsigned SEQ_W     = 16;  // shadow-buffer and release-queue sequence numbers
  localparam int unsigned IMM_W     = 32;  // sign-extended immediate

  // ---- default sizes ---------------------------------------------------
  localparam int unsigned MAX_SLICE_LEN  = 100;  // slice length limit used when forming slices
  localparam int unsigned HIST_ENTRIES   = 1024; // 1024 x (48 + 2 x 64) bits = 22 KiB
  localparam int unsigned HIST_INPUTS    = 2;    // checkpointed operands per leaf instruction
  localparam int unsigned IBUFF_ENTRIES  = 128;  // holds one slice of MAX_SLICE_LEN
  localparam int unsigned SFILE_ENTRIES  = 32;
  localparam int unsigned SB_ENTRIES     = 64;
  localparam int unsigned RQ_ENTRIES     = 64;

  // ---- slice instructions ----------------------------------------------
  typedef enum logic [3:0] {
    OP_NOP = 4'd0,   // no operation (e.g. a declaration kept at the slice entry)
    OP_MOV = 4'd1,   // dst = src1, or dst = imm when use_imm
    OP_ADD = 4'd2,
    OP_SUB = 4'd3,
    OP_MUL = 4'd4,   // low 64 bits of the product
    OP_AND = 4'd5,
    OP_OR  = 4'd6,
    OP_XOR = 4'd7,
    OP_SHL = 4'd8,   // shift amounts use the low 6 bits
    OP_SHR = 4'd9,
    OP_SAR = 4'd10,
    OP_RTN = 4'd15   // end of slice: return src1 as the load's value
  } op_e;

  // One slice instruction as held in the IBuff. A source flagged *_hist is an
  // input checkpointed by REC into the History table under this instruction's
  // own address (slot 0 for src1, slot 1 for src2). Any other source is read
  // from the SFile if a slice instruction has written that register, and from
  // the core's register file (a live value) otherwise.
  typedef struct packed {
    op_e                op;
    logic [AREG_W-1:0]  dst;
    logic [AREG_W-1:0]  src1;
    logic [AREG_W-1:0]  src2;
    logic               src1_hist;
    logic               src2_hist;
    logic               use_imm;   // second operand (or MOV source) is imm
    logic [IMM_W-1:0]   imm;
  } slice_instr_t;

  localparam int unsigned INSTR_W = $bits(slice_instr_t);

  // ---- RCMP outcome (Fig. 1(b) flowchart) ------------------------------
  typedef enum logic [1:0] {
    DEC_LOAD      = 2'd0,  // not shadowed, or shadowed L1 hit / MSHR hit
    DEC_DELAY     = 2'd1,  // shadowed L1 miss without usable slice: delay on miss
    DEC_RECOMPUTE = 2'd2   // shadowed L1 miss with a slice: recompute
  } rcmp_dec_e;

  // ---- reasons for giving up a recomputation ---------------------------
  typedef enum logic [2:0] {
    AB_NONE      = 3'd0,
    AB_HIST_MISS = 3'd1,  // a checkpointed input is not in the History table
    AB_TOO_LONG  = 3'd2,  // no RTN within MAX_SLICE_LEN instructions
    AB_SQUASH    = 3'd3,  // the RCMP was squashed by the core
    AB_EXCEPTION = 3'd4   // a slice instruction raised an exception
  } abort_e;

  // Sign-extended immediate.
  function automatic logic [DATA_W-1:0] sext_imm(input logic [IMM_W-1:0] imm);
    return {{(DATA_W-IMM_W){imm[IMM_W-1]}}, imm};
  endfunction

endpackage
