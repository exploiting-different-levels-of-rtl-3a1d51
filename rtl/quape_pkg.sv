// quape_pkg: shared types, constants and the instruction encoding of the
// multiprocessor / superscalar quantum control processor.
//
// All instructions are 32 bits wide (fixed length, RISC style). The opcode
// sits in bits [31:26]; opcodes 0x10..0x1F are quantum instructions, all
// others are classical. The field layout of every instruction is this
// design's own choice; only the MRCE field order (opcode, result qubit,
// target qubit, op0, op1) follows the published description.
//
//   classical ALU   : op | rd[25:22] | rs[21:18] | rt[17:14] | imm[13:0]
//   LDI             : op | rd[25:22] | imm[21:0]           (sign extended)
//   CMP             : op | --        | rs[21:18] | rt[17:14]
//   BR              : op | cond[25:22] | target[11:0]      (block relative)
//   FMR             : op | rd[25:22] | qubit[5:0]
//   LDS / STS       : op | rd[25:22] | rs[21:18] | sidx[3:0]
//   QOP             : op | label[25:19] | qop[18:12] | q0[11:6] | q1[5:0]
//   MRCE            : op | q_result[25:20] | q_target[19:14] | op0[13:7] | op1[6:0]
//
// A quantum operation code (7 bits) with bit 6 set is a two-qubit gate
// applied to the pair (q0, q1); QOP_MEAS is the measurement.
//
// Lint note: when a module that uses only part of this package is linted on
// its own, verilator lists the package constants that module does not use
// (UNUSEDPARAM); each constant is used somewhere in the design.
package quape_pkg;

  localparam int unsigned QADDR_W  = 6;   // qubit address width
  localparam int unsigned QOP_W    = 7;   // quantum operation code width
  localparam int unsigned LABEL_W  = 7;   // timing label width (cycles)
  localparam int unsigned NREGS    = 16;  // general purpose registers
  localparam int unsigned NSREGS   = 16;  // shared registers
  localparam int unsigned DATA_W   = 32;

  typedef enum logic [5:0] {
    OP_NOP  = 6'h00,
    OP_ADD  = 6'h01,
    OP_SUB  = 6'h02,
    OP_AND  = 6'h03,
    OP_OR   = 6'h04,
    OP_XOR  = 6'h05,
    OP_ADDI = 6'h06,
    OP_LDI  = 6'h07,
    OP_CMP  = 6'h08,
    OP_BR   = 6'h09,
    OP_FMR  = 6'h0A,
    OP_LDS  = 6'h0B,
    OP_STS  = 6'h0C,
    OP_QOP  = 6'h10,
    OP_MRCE = 6'h11
  } opcode_e;

  typedef enum logic [3:0] {
    BR_ALWAYS = 4'd0,
    BR_EQ     = 4'd1,
    BR_NE     = 4'd2,
    BR_LT     = 4'd3,
    BR_GE     = 4'd4
  } brcond_e;

  localparam logic [QOP_W-1:0] QOP_MEAS = 7'h3F;

  // Status register of one program block (scheduler).
  typedef enum logic [1:0] {
    BLK_WAIT     = 2'd0,
    BLK_PREFETCH = 2'd1,
    BLK_EXEC     = 2'd2,
    BLK_DONE     = 2'd3
  } blk_status_e;

  // Decoded quantum operation as held in an operation queue.
  typedef struct packed {
    logic [QOP_W-1:0]   op;
    logic [QADDR_W-1:0] q0;
    logic [QADDR_W-1:0] q1;
  } qop_t;

  // A QOP instruction seen as its fields.
  typedef struct packed {
    logic [5:0]         opc;
    logic [LABEL_W-1:0] label;
    qop_t               q;
  } qop_instr_t;

  function automatic logic is_qop(input logic [5:0] opc);
    return opc == OP_QOP;
  endfunction

  function automatic logic is_mrce(input logic [5:0] opc);
    return opc == OP_MRCE;
  endfunction

  function automatic logic is_two_qubit(input logic [QOP_W-1:0] op);
    return op[QOP_W-1];
  endfunction

  // Block information table entry (32 bits): pc_start | pc_end | priority.
  typedef struct packed {
    logic [11:0] pc_start;
    logic [11:0] pc_end;
    logic [7:0]  prio;
  } bit_entry_t;

endpackage
