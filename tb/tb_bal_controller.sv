// tb_bal_controller - self-checking test of the SecureD CONTROLLER.
// The testbench stands in for both cores (a 37-entry register file each,
// with PC at index 34) and for both stacks (queues). It drives completed
// instructions and interrupt lines and checks, cycle by cycle:
//  - switch on startBal: both cores held 377 cycles, CORE2's 37 registers
//    pushed in order, one every 10 cycles, both PCs loaded on one edge with
//    the address after startBal and that address plus the offset;
//  - interrupt to CORE2 during balancing: both cores held, CORE2's context
//    nested on its stack, PC loaded with the vector, CORE1 held during the
//    routine; on eint the context is restored in reverse order and both PCs
//    reloaded on one edge, 371 cycles after eint;
//  - endBal: only CORE2 held, its original context restored, CORE1 free;
//  - a regular interrupt to CORE1 that holds only CORE1;
//  - a startBal that arrives while CORE2 serves an interrupt waits for it;
//  - a switch and an interrupt that wait while the core masks them.
module tb_bal_controller;
  import secured_pkg::*;
  import pisa_asm_pkg::*;
  localparam word_t VEC = 32'h0000_0040;
  localparam word_t OFF = 32'h0000_0300;
  localparam int ENTRY = FLUSH_CYCLES + NSAVE * CYCLES_PER_REG + 1;  // 377
  localparam int LEAVE = NSAVE * CYCLES_PER_REG + 1;                 // 371

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  retire_t ret [NCORES];
  logic    irq [NCORES], int_mask [NCORES], hold [NCORES], pc_load [NCORES], switch_flag [NCORES];
  logic    stk_push [NCORES], stk_pop [NCORES], isr_active [NCORES];
  word_t   pc_value [NCORES], reg_rdata [NCORES], stk_rdata [NCORES], stk_wdata;
  regacc_t reg_acc [NCORES];
  logic    bal_active, busy;

  bal_controller #(.IRQ_VECTOR(VEC)) dut (
    .clk, .rst_n, .ret, .irq, .int_mask, .comp_pc_offset(OFF), .hold, .pc_load, .pc_value,
    .reg_acc, .reg_rdata, .switch_flag, .stk_push, .stk_pop, .stk_wdata,
    .stk_rdata, .bal_active, .isr_active, .busy);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- core and stack models ----------------------------------------------
  word_t regs [NCORES][NSAVE];
  word_t stk  [NCORES][$];
  word_t pushed [NCORES][$];   // log of pushes
  int    push_cyc [NCORES][$];
  int    cyc = 0;
  int    hold_cnt [NCORES];
  int    load_cyc [NCORES];
  word_t load_val [NCORES];

  always_comb
    for (int k = 0; k < NCORES; k++) begin
      reg_rdata[k] = regs[k][reg_acc[k].idx];
      stk_rdata[k] = stk[k].size() > 0 ? stk[k][$] : '0;
    end

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    for (int k = 0; k < NCORES; k++) begin
      if (hold[k]) hold_cnt[k]++;
      if (pc_load[k]) begin load_cyc[k] = cyc; load_val[k] = pc_value[k]; end
      if (stk_push[k]) begin
        stk[k].push_back(stk_wdata); pushed[k].push_back(stk_wdata); push_cyc[k].push_back(cyc);
      end
      if (stk_pop[k]) void'(stk[k].pop_back());
      if (reg_acc[k].we) regs[k][reg_acc[k].idx] <= reg_acc[k].wdata;
      if (pc_load[k]) regs[k][RIDX_PC] <= pc_value[k];
    end
  end

  task automatic clear_log();
    for (int k = 0; k < NCORES; k++) begin
      hold_cnt[k] = 0; load_cyc[k] = -1; pushed[k].delete(); push_cyc[k].delete();
    end
  endtask

  task automatic retire(int k, instr_t i, word_t pc);
    @(negedge clk); ret[k].valid = 1; ret[k].instr = i; ret[k].pc = pc;
    @(negedge clk); ret[k].valid = 0;
  endtask
  task automatic pulse(int k);
    @(negedge clk) irq[k] = 1;
    @(negedge clk) irq[k] = 0;
  endtask
  task automatic wait_idle();
    @(negedge clk);
    while (busy) @(negedge clk);
    @(negedge clk);
  endtask
  task automatic randomize_regs(int k);
    for (int r = 0; r < NSAVE; r++) regs[k][r] = $urandom;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t ctx1 [NSAVE], ctx1b [NSAVE], ctx0 [NSAVE];
    int t0;
    for (int k = 0; k < NCORES; k++) begin
      ret[k] = '0; irq[k] = 0; int_mask[k] = 0; randomize_regs(k);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!hold[0] && !hold[1] && !bal_active, "idle after reset");

    // ---- 1. switch to balancing -----------------------------------------
    ctx1 = regs[1];
    clear_log();
    retire(0, a_startbal(), 32'h100); t0 = cyc - 1;   // cycle of startBal
    wait_idle();
    chk(hold_cnt[0] == ENTRY && hold_cnt[1] == ENTRY,
        $sformatf("switch holds %0d/%0d cycles, expected %0d", hold_cnt[0], hold_cnt[1], ENTRY));
    chk(load_cyc[0] == load_cyc[1] && load_cyc[0] == t0 + ENTRY, "both PCs loaded on one edge after 377 cycles");
    chk(load_val[0] == 32'h101 && load_val[1] == 32'h101 + OFF, "launch PCs");
    chk(pushed[1].size() == NSAVE && pushed[0].size() == 0, "CORE2 context pushed");
    for (int r = 0; r < NSAVE && r < pushed[1].size(); r++) begin
      chk(pushed[1][r] == ctx1[r], $sformatf("pushed register %0d", r));
      if (r > 0) chk(push_cyc[1][r] - push_cyc[1][r-1] == CYCLES_PER_REG, "10 cycles per register");
    end
    chk(bal_active && switch_flag[0] && switch_flag[1], "balancing on, switchFlag set");

    // ---- 2. interrupt to CORE2 during balancing ---------------------------
    randomize_regs(1); randomize_regs(0);
    ctx1b = regs[1]; ctx0 = regs[0];
    clear_log();
    pulse(1); t0 = cyc - 1;
    wait_idle();
    chk(load_cyc[1] == t0 + ENTRY && load_val[1] == VEC && load_cyc[0] == -1, "CORE2 enters the routine");
    chk(stk[1].size() == 2 * NSAVE, "second context nested on CORE2's stack");
    chk(hold[0] && !hold[1] && isr_active[1], "CORE1 held while CORE2 serves the interrupt");
    repeat (20) @(negedge clk);
    chk(hold[0], "CORE1 still held");
    for (int r = 0; r < NSAVE; r++) if (r != RIDX_PC) regs[1][r] = $urandom;  // routine clobbers
    clear_log();
    retire(1, a_eint(), VEC + 9); t0 = cyc - 1;
    wait_idle();
    chk(load_cyc[0] == t0 + LEAVE && load_cyc[1] == t0 + LEAVE, "both PCs reloaded on one edge 371 cycles after eint");
    chk(load_val[1] == ctx1b[RIDX_PC] && load_val[0] == ctx0[RIDX_PC], "resume addresses");
    for (int r = 0; r < NSAVE; r++) chk(regs[1][r] == ctx1b[r], $sformatf("CORE2 register %0d restored", r));
    chk(!hold[0] && !hold[1] && stk[1].size() == NSAVE, "both free, one context left");

    // ---- 3. endBal ----------------------------------------------------------
    clear_log();
    retire(0, a_endbal(), 32'h180); t0 = cyc - 1;
    wait_idle();
    chk(hold_cnt[0] == 0 && hold_cnt[1] == LEAVE, $sformatf("endBal holds only CORE2, %0d cycles", hold_cnt[1]));
    chk(load_cyc[1] == t0 + LEAVE && load_val[1] == ctx1[RIDX_PC], "CORE2 resumes its own program");
    for (int r = 0; r < NSAVE; r++) chk(regs[1][r] == ctx1[r], $sformatf("CORE2 original register %0d", r));
    chk(!bal_active && !switch_flag[0] && !switch_flag[1] && stk[1].size() == 0, "balancing off");

    // ---- 4. regular interrupt to CORE1 --------------------------------------
    ctx0 = regs[0];
    clear_log();
    pulse(0); t0 = cyc - 1;
    wait_idle();
    chk(hold_cnt[0] == ENTRY && hold_cnt[1] == 0, "regular interrupt holds only CORE1");
    chk(load_cyc[0] == t0 + ENTRY && load_val[0] == VEC, "CORE1 enters the routine");
    for (int r = 0; r < NSAVE; r++) chk(pushed[0][r] == ctx0[r], "CORE1 context pushed");
    for (int r = 0; r < NSAVE; r++) if (r != RIDX_PC) regs[0][r] = $urandom;
    clear_log();
    retire(0, a_eint(), VEC + 3); t0 = cyc - 1;
    wait_idle();
    chk(load_cyc[0] == t0 + LEAVE && load_val[0] == ctx0[RIDX_PC] && load_cyc[1] == -1, "CORE1 resumes alone");
    for (int r = 0; r < NSAVE; r++) chk(regs[0][r] == ctx0[r], "CORE1 context restored");

    // ---- 5. startBal while CORE2 serves an interrupt ------------------------
    pulse(1);
    wait_idle();
    chk(isr_active[1], "CORE2 in its routine");
    clear_log();
    retire(0, a_startbal(), 32'h200);
    repeat (30) @(negedge clk);
    chk(hold[0] && !busy && !bal_active, "startBal waits, CORE1 held");
    retire(1, a_eint(), VEC + 5);
    wait_idle();   // restore of CORE2
    wait_idle();   // then the switch
    chk(bal_active && load_val[0] == 32'h201 && load_val[1] == 32'h201 + OFF, "deferred switch done");
    chk(stk[1].size() == NSAVE && stk[0].size() == 0, "one context on CORE2's stack");

    // ---- 6. masking ----------------------------------------------------------
    retire(0, a_endbal(), 32'h280);
    wait_idle();
    chk(!bal_active, "balancing ended");
    int_mask[1] = 1;
    clear_log();
    retire(0, a_startbal(), 32'h300);
    repeat (40) @(negedge clk);
    chk(!busy && !bal_active && hold[0] && load_cyc[0] == -1, "switch waits while CORE2 masks");
    int_mask[0] = 1;
    pulse(0);
    repeat (10) @(negedge clk);
    chk(!busy && !isr_active[0], "masked interrupt of CORE1 waits");
    int_mask[1] = 0;
    wait_idle();
    chk(bal_active && load_val[0] == 32'h301 && load_val[1] == 32'h301 + OFF, "switch after unmasking");
    chk(!isr_active[0], "CORE1 interrupt still masked");
    int_mask[0] = 0;
    wait_idle();
    chk(isr_active[0] && hold[1], "CORE1 interrupt taken after unmasking, CORE2 held");
    retire(0, a_eint(), VEC + 2);
    wait_idle();
    chk(!isr_active[0] && !hold[0] && !hold[1], "both free again");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
