// tb_bb_checker - self-checking test of the basic-block integrity checker.
// Feeds random instrumented basic blocks (chk, straight-line instructions,
// a control-flow instruction) with idle cycles in between. The testbench
// keeps its own checksum model and checks hashedReg and incHashedReg after
// every instruction, no violation on intact blocks, a violation exactly one
// cycle after the CFI of a block with one flipped bit, a violation for a jump
// into the middle of a block, none while checking is disabled, and the
// save / restore port.
module tb_bb_checker;
  import secured_pkg::*;
  import pisa_asm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic    en, wr_hash, wr_inc, violation, err_sticky;
  retire_t ret;
  word_t   wdata, hashed_reg, inc_hashed_reg;

  bb_checker dut (.clk, .rst_n, .en, .ret, .wr_hash, .wr_inc, .wdata,
                  .hashed_reg, .inc_hashed_reg, .violation, .err_sticky);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic instr_t rand_plain();
    opcode_t ops [6] = '{OP_ADDU, OP_ADDIU, OP_XOR, OP_LW, OP_SW, OP_NOP};
    return {16'($urandom), ops[$urandom % 6], 32'($urandom)};
  endfunction
  function automatic instr_t rand_cfi();
    opcode_t ops [13] = '{OP_J, OP_JAL, OP_JR, OP_JALR, OP_BEQ, OP_BNE, OP_BLEZ,
                          OP_BGTZ, OP_BLTZ, OP_BGEZ, OP_STARTBAL, OP_ENDBAL, OP_EINT};
    return {16'($urandom), ops[$urandom % 13], 32'($urandom)};
  endfunction

  // retire one instruction, return the violation seen one cycle later
  task automatic issue(instr_t i, output bit v);
    @(negedge clk); ret.valid = 1; ret.instr = i; ret.pc = $urandom;
    @(negedge clk); ret.valid = 0; v = violation;
    if ($urandom % 3 == 0) @(negedge clk);
  endtask

  // run one block; flip: index of the instruction to corrupt (-1 = none);
  // skip: number of leading instructions (with chk) left out
  task automatic run_block(int len, int flip, int skip, output bit v_end, output bit v_any);
    instr_t body [$];
    word_t  s = '0, inc = '0;
    bit v;
    for (int i = 0; i < len; i++) body.push_back(rand_plain());
    body.push_back(rand_cfi());
    foreach (body[i]) s ^= bb_sum(body[i]);
    if (flip >= 0) begin
      int b = $urandom % 32;
      body[flip][b] = ~body[flip][b];
    end
    v_any = 0;
    if (skip == 0) begin
      issue(a_chk(s), v); v_any |= v;
      chk(hashed_reg == s && inc_hashed_reg == 0, "chk loads hashedReg, clears incHashedReg");
    end
    for (int i = (skip > 0 ? skip - 1 : 0); i < body.size(); i++) begin
      issue(body[i], v);
      if (i < body.size() - 1) begin
        v_any |= v;
        inc ^= bb_sum(body[i]);
        if (skip == 0) chk(inc_hashed_reg == inc, "incHashedReg accumulates");
      end else begin
        v_end = v;
        chk(inc_hashed_reg == 0, "incHashedReg cleared after the CFI");
      end
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ve, va;
    int n_det = 0;
    en = 1; wr_hash = 0; wr_inc = 0; wdata = 0; ret = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // intact blocks
    for (int n = 0; n < 200; n++) begin
      run_block($urandom % 12, -1, 0, ve, va);
      chk(!ve && !va, "no violation on an intact block");
    end
    chk(!err_sticky, "no sticky error after intact code");
    // blocks with one flipped bit
    for (int n = 0; n < 100; n++) begin
      int len = 1 + $urandom % 10;
      run_block(len, $urandom % (len + 1), 0, ve, va);
      chk(ve && !va, "violation right after the CFI of a corrupted block");
      if (ve) n_det++;
    end
    chk(err_sticky, "sticky error set");
    // control flow error: jump past the chk into the middle of a block
    for (int n = 0; n < 50; n++) begin
      run_block(4 + $urandom % 6, -1, 2 + $urandom % 3, ve, va);
      chk(ve, "violation after a jump into the middle of a block");
    end
    // checking disabled
    en = 0;
    for (int n = 0; n < 20; n++) begin
      int len = 1 + $urandom % 10;
      run_block(len, $urandom % (len + 1), 0, ve, va);
      chk(!ve, "no violation while disabled");
    end
    en = 1;
    // save / restore port
    @(negedge clk); wr_hash = 1; wdata = 32'h1234_5678;
    @(negedge clk); wr_hash = 0; wr_inc = 1; wdata = 32'h0bad_f00d;
    @(negedge clk); wr_inc = 0;
    chk(hashed_reg == 32'h1234_5678 && inc_hashed_reg == 32'h0bad_f00d, "registers written through the save port");
    begin
      instr_t c = {16'h0, OP_J, 32'h0bad_f00d ^ 32'h1234_5678 ^ {16'h0, OP_J}};
      issue(c, ve);
      chk(!ve, "restored registers continue the block");
    end
    $display("corrupted blocks detected: %0d of 100", n_det);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
