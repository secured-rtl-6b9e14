// bb_checker - basic-block code-integrity checker of one SecureD core.
//
// Every basic block of an instrumented program starts with a chk instruction
// whose operand word is the block's checksum, computed at compile time, and
// ends with a control-flow instruction (CFI). When a chk completes, its
// checksum is loaded into hashedReg and incHashedReg is cleared. Every other
// completed instruction is folded into incHashedReg. When the CFI completes,
// the checksum including the CFI itself is compared with hashedReg; a
// mismatch means the code of the block was changed (injected code, a bit
// flip, or a jump into the middle of a block) and raises a one-cycle
// violation in the next cycle. incHashedReg is cleared after each CFI.
//
// Both registers can be read and written through the save port, so that the
// CONTROLLER can save and restore them with the rest of a core's context.
// A save-port write takes precedence over a retiring instruction.
//
// From the paper: the chk instruction, hashedReg, incHashedReg, incremental
// re-computation and the compare at the CFI raising an exception.
// Own choices: the checksum (XOR of hash_of() of the instructions, see
// secured_pkg), the clearing of incHashedReg, the one-cycle registered
// violation output, the sticky error flag and the enable input.
module bb_checker
  import secured_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,          // checking enabled
  input  retire_t ret,         // instruction completed by the core
  // save / restore port
  input  logic    wr_hash,
  input  logic    wr_inc,
  input  word_t   wdata,
  output word_t   hashed_reg,
  output word_t   inc_hashed_reg,
  // result
  output logic    violation,   // pulse, cycle after the failing CFI
  output logic    err_sticky   // set by a violation, cleared by reset
);

  word_t  hashed_q, inc_q;
  word_t  inc_next;
  logic   is_chk, cfi, mismatch;

  always_comb begin
    is_chk   = ret.valid && (opcode_of(ret.instr) == OP_CHK);
    cfi      = ret.valid && is_cfi(ret.instr);
    inc_next = inc_q ^ hash_of(ret.instr);
    mismatch = en && cfi && (inc_next != hashed_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hashed_q   <= '0;
      inc_q      <= '0;
      violation  <= 1'b0;
      err_sticky <= 1'b0;
    end else begin
      violation <= mismatch;
      if (mismatch) err_sticky <= 1'b1;

      if (wr_hash)     hashed_q <= wdata;
      else if (is_chk) hashed_q <= ret.instr[31:0];

      if (wr_inc)               inc_q <= wdata;
      else if (is_chk || cfi)   inc_q <= '0;
      else if (ret.valid)       inc_q <= inc_next;
    end
  end

  assign hashed_reg     = hashed_q;
  assign inc_hashed_reg = inc_q;

endmodule
