// pisa_asm_pkg - instruction builders for the SecureD testbenches.
//
// Each function returns one 64-bit PISA instruction word in the layout of
// secured_pkg (opcode in [47:32], operand word in [31:0]). bb_sum() is the
// testbench's own model of the basic-block checksum: the XOR, over all
// instructions of the block after its chk, of the two 32-bit halves of each
// instruction word.
package pisa_asm_pkg;
  import secured_pkg::*;

  function automatic instr_t mk(opcode_t op, logic [31:0] operands);
    return {16'h0000, op, operands};
  endfunction
  function automatic instr_t a_nop();            return mk(OP_NOP, 32'h0); endfunction
  function automatic instr_t a_addiu(int rt, int rs, int imm);
    return mk(OP_ADDIU, {8'(rs), 8'(rt), 16'(imm)});
  endfunction
  function automatic instr_t a_xori(int rt, int rs, int imm);
    return mk(OP_XORI, {8'(rs), 8'(rt), 16'(imm)});
  endfunction
  function automatic instr_t a_addu(int rd, int rs, int rt);
    return mk(OP_ADDU, {8'(rs), 8'(rt), 8'(rd), 8'h0});
  endfunction
  function automatic instr_t a_xor(int rd, int rs, int rt);
    return mk(OP_XOR, {8'(rs), 8'(rt), 8'(rd), 8'h0});
  endfunction
  function automatic instr_t a_lw(int rt, int rs, int imm);
    return mk(OP_LW, {8'(rs), 8'(rt), 16'(imm)});
  endfunction
  function automatic instr_t a_sw(int rt, int rs, int imm);
    return mk(OP_SW, {8'(rs), 8'(rt), 16'(imm)});
  endfunction
  function automatic instr_t a_bne(int rs, int rt, int off);
    return mk(OP_BNE, {8'(rs), 8'(rt), 16'(off)});
  endfunction
  function automatic instr_t a_j(int target);
    return mk(OP_J, {6'h0, 26'(target)});
  endfunction
  function automatic instr_t a_chk(logic [31:0] sum); return mk(OP_CHK, sum);       endfunction
  function automatic instr_t a_startbal();            return mk(OP_STARTBAL, 32'h0); endfunction
  function automatic instr_t a_endbal();              return mk(OP_ENDBAL, 32'h0);   endfunction
  function automatic instr_t a_eint();                return mk(OP_EINT, 32'h0);     endfunction

  function automatic logic [31:0] bb_sum(instr_t i);
    return i[63:32] ^ i[31:0];
  endfunction
endpackage
