// secured_pkg - types and constants shared by the SecureD dual-core blocks.
//
// The SecureD system pairs two identical PISA cores with a CONTROLLER that
// (a) switches both cores into "balancing" (the same encryption code run on
// true data by CORE1 and on complemented data by CORE2, cycle for cycle) and
// (b) services interrupts, and it adds to every core a basic-block checksum
// checker against code injection.
//
// From the paper: the 37 saved registers (32 GPRs, PC, HI, LO, hashed,
// incHashed), the delays of the switch and interrupt sequence (6-cycle
// pipeline flush, 320 cycles for the 32 GPRs, i.e. 10 cycles per register,
// 1 cycle to enter, 1 cycle to exit, 748 in total) and the names of the new
// instructions chk, startBal and endBal and registers hashedReg, incHashedReg
// and switchFlag.
//
// This design's own choices: the 64-bit instruction word follows the
// SimpleScalar PISA layout (16-bit annotation, 16-bit opcode, 32-bit operand
// word); the opcode numbers of the control-flow instructions are the
// SimpleScalar PISA ones; the opcodes of chk, startBal, endBal and of the
// end-of-interrupt instruction (eint) are picked from unused PISA opcodes;
// the checksum is the XOR of the two halves of every instruction word; the
// index map of the 37 registers is below.
package secured_pkg;

  localparam int unsigned XLEN     = 32;  // PISA register width
  localparam int unsigned ILEN     = 64;  // PISA instruction width
  localparam int unsigned NCORES   = 2;
  localparam int unsigned NSAVE    = 37;  // registers saved per context
  localparam int unsigned RIDX_W   = 6;   // index of a saved register

  // Index map of the saved registers (own choice; the set is the paper's).
  localparam logic [RIDX_W-1:0] RIDX_HI   = 6'd32;
  localparam logic [RIDX_W-1:0] RIDX_LO   = 6'd33;
  localparam logic [RIDX_W-1:0] RIDX_PC   = 6'd34;
  localparam logic [RIDX_W-1:0] RIDX_HASH = 6'd35;  // hashedReg
  localparam logic [RIDX_W-1:0] RIDX_INC  = 6'd36;  // incHashedReg

  // Delays of the switch / interrupt sequence (Table 2 of the paper).
  localparam int unsigned FLUSH_CYCLES   = 6;
  localparam int unsigned CYCLES_PER_REG = 10;  // 320 cycles / 32 registers
  localparam int unsigned SWITCH_CYCLES  = 1;
  localparam int unsigned EXIT_CYCLES    = 1;

  // PISA opcodes (instr[47:32]).
  typedef logic [15:0] opcode_t;
  localparam opcode_t OP_NOP   = 16'h0000;
  localparam opcode_t OP_J     = 16'h0001;
  localparam opcode_t OP_JAL   = 16'h0002;
  localparam opcode_t OP_JR    = 16'h0003;
  localparam opcode_t OP_JALR  = 16'h0004;
  localparam opcode_t OP_BEQ   = 16'h0005;
  localparam opcode_t OP_BNE   = 16'h0006;
  localparam opcode_t OP_BLEZ  = 16'h0007;
  localparam opcode_t OP_BGTZ  = 16'h0008;
  localparam opcode_t OP_BLTZ  = 16'h0009;
  localparam opcode_t OP_BGEZ  = 16'h000a;
  localparam opcode_t OP_LW    = 16'h0028;
  localparam opcode_t OP_SW    = 16'h0034;
  localparam opcode_t OP_ADDU  = 16'h0042;
  localparam opcode_t OP_ADDIU = 16'h0043;
  localparam opcode_t OP_XOR   = 16'h0052;
  localparam opcode_t OP_XORI  = 16'h0053;
  localparam opcode_t OP_NOR   = 16'h0054;
  // SecureD special instructions (encodings are this design's choice).
  localparam opcode_t OP_CHK      = 16'h00b0;  // operand word = checksum
  localparam opcode_t OP_STARTBAL = 16'h00b1;
  localparam opcode_t OP_ENDBAL   = 16'h00b2;
  localparam opcode_t OP_EINT     = 16'h00b3;  // end of interrupt routine

  typedef logic [ILEN-1:0] instr_t;
  typedef logic [XLEN-1:0] word_t;

  function automatic opcode_t opcode_of(instr_t i);
    return i[47:32];
  endfunction

  // Instructions that end a basic block. startBal, endBal and eint hand the
  // PC over to the CONTROLLER, so they close a block as a jump does.
  function automatic logic is_cfi(instr_t i);
    opcode_t op;
    op = opcode_of(i);
    return (op >= OP_J && op <= OP_BGEZ) ||
           op == OP_STARTBAL || op == OP_ENDBAL || op == OP_EINT;
  endfunction

  // Contribution of one instruction to a basic-block checksum.
  function automatic word_t hash_of(instr_t i);
    return i[63:32] ^ i[31:0];
  endfunction

  // Instruction a core has just completed, as seen by the security logic.
  typedef struct packed {
    logic   valid;
    word_t  pc;
    instr_t instr;
  } retire_t;

  // Access by the CONTROLLER to one saved register of a core.
  typedef struct packed {
    logic              we;
    logic [RIDX_W-1:0] idx;
    word_t             wdata;
  } regacc_t;

endpackage
