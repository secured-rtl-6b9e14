// pisa_core_model - behavioural stand-in for one PISA core of SecureD.
//
// Simulation model only. It executes a small subset of the PISA instruction
// set (SimpleScalar operand layout: rs [31:24], rt [23:16], rd [15:8],
// imm [15:0], target [25:0]) one instruction per cycle, without a pipeline:
// nop, addu, addiu, xor, xori, nor, lw, sw, beq, bne, j, and the SecureD
// instructions chk, startBal, endBal and eint, which do nothing in the core
// itself; the checker and the controller act on them. PCs and branch offsets
// count instructions. The model stops executing while hold is high and for
// good after a code-integrity violation. pc_load overwrites the PC at the
// clock edge. Registers 0-31, 32 (HI), 33 (LO) and 34 (PC) are readable and
// writable through the register access port. Every completed instruction is
// reported on ret in the cycle it executes.
module pisa_core_model
  import secured_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  output word_t   imab,
  input  instr_t  imdb,
  output word_t   dmab,
  output logic    dm_we,
  output word_t   dmdb_w,
  input  word_t   dmdb_r,
  output retire_t ret,
  input  regacc_t reg_acc,
  output word_t   reg_rdata,
  input  logic    hold,
  input  logic    pc_load,
  input  word_t   pc_value,
  input  logic    violation,
  output logic    halted
);

  word_t gpr [32];
  word_t hi, lo, pc;
  logic  stopped;

  opcode_t op;
  logic [7:0] rs, rt, rd;
  word_t simm, zimm, rsv, rtv;
  logic  run;

  always_comb begin
    op   = opcode_of(imdb);
    rs   = imdb[31:24];
    rt   = imdb[23:16];
    rd   = imdb[15:8];
    simm = {{16{imdb[15]}}, imdb[15:0]};
    zimm = {16'h0, imdb[15:0]};
    rsv  = gpr[rs[4:0]];
    rtv  = gpr[rt[4:0]];
    run  = rst_n && !hold && !stopped && !pc_load;
    imab = pc;
    dmab   = rsv + simm;
    dm_we  = run && op == OP_SW;
    dmdb_w = rtv;
    ret.valid = run;
    ret.pc    = pc;
    ret.instr = imdb;
    halted    = stopped;
    unique case (reg_acc.idx)
      RIDX_HI: reg_rdata = hi;
      RIDX_LO: reg_rdata = lo;
      RIDX_PC: reg_rdata = pc;
      default: reg_rdata = (reg_acc.idx < 6'd32) ? gpr[reg_acc.idx[4:0]] : '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc      <= '0;
      hi      <= '0;
      lo      <= '0;
      stopped <= 1'b0;
      for (int i = 0; i < 32; i++) gpr[i] <= '0;
    end else begin
      if (violation) stopped <= 1'b1;
      if (reg_acc.we) begin
        if (reg_acc.idx < 6'd32 && reg_acc.idx != 6'd0) gpr[reg_acc.idx[4:0]] <= reg_acc.wdata;
        else if (reg_acc.idx == RIDX_HI) hi <= reg_acc.wdata;
        else if (reg_acc.idx == RIDX_LO) lo <= reg_acc.wdata;
        else if (reg_acc.idx == RIDX_PC) pc <= reg_acc.wdata;
      end
      if (pc_load) pc <= pc_value;
      else if (run) begin
        pc <= pc + 1;
        unique case (op)
          OP_ADDU:  if (rd[4:0] != 0) gpr[rd[4:0]] <= rsv + rtv;
          OP_XOR:   if (rd[4:0] != 0) gpr[rd[4:0]] <= rsv ^ rtv;
          OP_NOR:   if (rd[4:0] != 0) gpr[rd[4:0]] <= ~(rsv | rtv);
          OP_ADDIU: if (rt[4:0] != 0) gpr[rt[4:0]] <= rsv + simm;
          OP_XORI:  if (rt[4:0] != 0) gpr[rt[4:0]] <= rsv ^ zimm;
          OP_LW:    if (rt[4:0] != 0) gpr[rt[4:0]] <= dmdb_r;
          OP_BEQ:   if (rsv == rtv) pc <= pc + 1 + simm;
          OP_BNE:   if (rsv != rtv) pc <= pc + 1 + simm;
          OP_J:     pc <= {6'b0, imdb[25:0]};
          default:  ;
        endcase
      end
    end
  end

endmodule
