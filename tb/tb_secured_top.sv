// tb_secured_top - end-to-end test of the SecureD dual-core system.
//
// Two behavioural PISA cores run instrumented programs on secured_top at
// its default sizes. CORE1 runs program A: a block, startBal, an XOR
// "encryption" loop over N words, endBal, then a short next program. CORE2
// runs program B, a counting loop, and holds at comp_pc_offset the
// complementary copy of A's encryption code, whose data memory holds the
// complemented plaintext. Both cores have an interrupt routine at the
// vector that bumps a counter in data memory and clobbers r1.
//
// The test checks, against values it works out itself:
//  - the encryption results of both cores, complementary word by word;
//  - that CORE2's program B finishes with the right results although its
//    context was parked for balancing and for two interrupts (one of them
//    taken during balancing, which nests a second context on its stack);
//  - lock step during balancing: both cores complete an instruction in the
//    same cycles, the same instruction at addresses OFF apart;
//  - the cycle counts of the switch (377 cycles held), of the endBal exit
//    (371), of interrupt entry (377) and exit (371): 748 per interrupt;
//  - that the partner core is held while one core serves an interrupt
//    during balancing, and both resume on the same edge;
//  - that an injected instruction in each core's code raises a code
//    integrity violation within one cycle of the block's end and stops
//    the core, and that no violation happens before;
//  - that a masked interrupt waits until the core unmasks it.
// Each mechanism is counted; one that never happens is a failure.
module tb_secured_top;
  import secured_pkg::*;
  import pisa_asm_pkg::*;

  localparam int N      = 16;        // words encrypted
  localparam int M      = 300;       // iterations of program B
  localparam int KEY    = 16'h3c5a;
  localparam int OFF    = 32'h200;   // complementary program offset in IMEM2
  localparam int VEC    = 32'h1000;  // interrupt vector (secured_top default)
  localparam int ENTRY  = FLUSH_CYCLES + NSAVE * CYCLES_PER_REG + 1;  // 377
  localparam int LEAVE  = NSAVE * CYCLES_PER_REG + 1;                 // 371

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---- DUT and core models -----------------------------------------------
  logic    irq [NCORES], int_mask [NCORES];
  word_t   imab [NCORES], dmab [NCORES], dmdb_w [NCORES], dmdb_r [NCORES];
  instr_t  imdb [NCORES];
  logic    dm_we [NCORES];
  retire_t ret [NCORES];
  word_t   core_reg_rdata [NCORES];
  regacc_t core_reg_acc [NCORES];
  logic    hold [NCORES], pc_load [NCORES], switch_flag [NCORES], ci_violation [NCORES];
  word_t   pc_value [NCORES];
  logic    im_ld_we [NCORES], dm_ld_we [NCORES];
  word_t   im_ld_addr [NCORES], dm_ld_addr [NCORES], dm_ld_wdata [NCORES], dm_ld_rdata [NCORES];
  instr_t  im_ld_data [NCORES];
  logic    bal_active, ctrl_busy;
  logic    isr_active [NCORES], ci_err [NCORES], stack_err [NCORES], halted [NCORES];
  logic [6:0] stack_depth [NCORES];

  secured_top dut (
    .clk, .rst_n, .check_en(1'b1), .comp_pc_offset(word_t'(OFF)), .irq, .int_mask,
    .imab, .imdb, .dmab, .dm_we, .dmdb_w, .dmdb_r, .ret, .core_reg_rdata,
    .core_reg_acc, .hold, .pc_load, .pc_value, .switch_flag, .ci_violation,
    .im_ld_we, .im_ld_addr, .im_ld_data, .dm_ld_we, .dm_ld_addr, .dm_ld_wdata,
    .dm_ld_rdata, .bal_active, .isr_active, .ctrl_busy, .ci_err, .stack_err,
    .stack_depth
  );

  for (genvar k = 0; k < NCORES; k++) begin : g_core
    pisa_core_model u_core (
      .clk, .rst_n,
      .imab(imab[k]), .imdb(imdb[k]), .dmab(dmab[k]), .dm_we(dm_we[k]),
      .dmdb_w(dmdb_w[k]), .dmdb_r(dmdb_r[k]), .ret(ret[k]),
      .reg_acc(core_reg_acc[k]), .reg_rdata(core_reg_rdata[k]),
      .hold(hold[k]), .pc_load(pc_load[k]), .pc_value(pc_value[k]),
      .violation(ci_violation[k]), .halted(halted[k])
    );
  end

  // ---- program images -----------------------------------------------------
  instr_t img [NCORES][int];

  // Put a basic block at addr: chk, then body; the chk carries the checksum.
  function automatic int block(int k, int addr, instr_t body[$]);
    logic [31:0] s = '0;
    foreach (body[i]) s ^= bb_sum(body[i]);
    img[k][addr] = a_chk(s);
    foreach (body[i]) img[k][addr + 1 + i] = body[i];
    return addr + 1 + body.size();
  endfunction

  task automatic build_programs();
    int a;
    // program A, CORE1
    a = block(0, 0,  '{a_addiu(1, 0, 5), a_startbal()});                        // 0..2
    a = block(0, 3,  '{a_xori(2, 0, KEY), a_addiu(3, 0, 0), a_addiu(4, 0, N),
                      a_bne(4, 0, 0)});  // relative, so the copy needs no relocation  // 3..7
    a = block(0, 8,  '{a_lw(5, 3, 0), a_xor(6, 5, 2), a_sw(6, 3, 256),
                      a_addiu(3, 3, 1), a_bne(3, 4, -6)});                       // 8..13
    a = block(0, 14, '{a_endbal()});                                             // 14..15
    a = block(0, 16, '{a_addiu(7, 0, 77), a_sw(7, 0, 512), a_j(20)});            // 16..19
    a = block(0, 20, '{a_j(21)});                                                // 20..21
    // complementary copy of the encryption code in IMEM2 (same instructions,
    // a nop in the slot of endBal)
    for (int i = 3; i <= 14; i++) img[1][OFF + i] = img[0][i];
    img[1][OFF + 15] = a_nop();
    // program B, CORE2
    a = block(1, 0,  '{a_addiu(1, 0, 0), a_addiu(2, 0, M), a_addiu(9, 0, 0), a_j(5)});
    a = block(1, 5,  '{a_addiu(1, 1, 1), a_addiu(9, 9, 3), a_bne(1, 2, -4)});
    a = block(1, 9,  '{a_sw(1, 0, 600), a_sw(9, 0, 601), a_j(13)});
    a = block(1, 13, '{a_j(14)});
    // interrupt routine, both cores
    for (int k = 0; k < NCORES; k++)
      a = block(k, VEC, '{a_lw(11, 0, 700), a_addiu(11, 11, 1), a_sw(11, 0, 700),
                          a_addiu(1, 0, 16'h7777), a_eint()});
  endtask

  logic [31:0] plain [N];

  // ---- monitor -------------------------------------------------------------
  int cyc = 0;
  int t_sb = -1, t_launch = -1, t_eb = -1, t_eb_resume = -1;
  int t_irq [NCORES], t_isr [NCORES], t_eint [NCORES];
  int n_switch = 0, n_endbal = 0, n_irq_bal = 0, n_irq_reg = 0, n_partner_hold = 0,
      n_same_edge_resume = 0, n_lockstep = 0, n_nested = 0, n_violation = 0;
  int last_ret [NCORES];
  bit in_bal_run = 0, eb_seen = 0, tamper_on = 0;
  int max_depth1 = 0;
  bit seen_v [NCORES] = '{0, 0};
  bit irq_wait [NCORES] = '{0, 0};
  int n_masked = 0;

  initial begin
    for (int k = 0; k < NCORES; k++) begin
      t_irq[k] = -1; t_isr[k] = -1; t_eint[k] = -1; last_ret[k] = -1;
    end
  end

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (32'(stack_depth[1]) > max_depth1) max_depth1 = 32'(stack_depth[1]);
    for (int k = 0; k < NCORES; k++) begin
      if (irq[k]) irq_wait[k] = 1'b1;
      if (irq_wait[k] && !int_mask[k]) begin
        t_irq[k] = cyc;
        irq_wait[k] = 1'b0;
      end
      if (ci_violation[k]) begin
        if (!seen_v[k]) n_violation++;
        seen_v[k] = 1'b1;
        check(tamper_on, $sformatf("violation on core %0d only after tampering", k));
      end
    end

    if (bal_active && isr_active[1] && hold[0] && !hold[1]) n_partner_hold++;

    // lock step during balancing, from launch up to CORE1's endBal
    if (in_bal_run && !eb_seen && !isr_active[0] && !isr_active[1]) begin
      check(ret[0].valid == ret[1].valid, $sformatf("lock step of completion, cycle %0d", cyc));
      if (ret[0].valid && ret[1].valid) begin
        check(ret[1].pc == ret[0].pc + OFF, $sformatf("lock step addresses OFF apart: %0h %0h cyc %0d", ret[0].pc, ret[1].pc, cyc));
        if (ret[0].pc != 15)
          check(ret[1].instr == ret[0].instr, "lock step: same instruction");
        n_lockstep++;
      end
    end

    if (ret[0].valid) begin
      unique case (opcode_of(ret[0].instr))
        OP_STARTBAL: t_sb = cyc;
        OP_ENDBAL: begin
          t_eb = cyc; eb_seen = 1; n_endbal++;
        end
        default: ;
      endcase
      if (t_sb >= 0 && t_launch < 0) begin
        if (ret[0].pc != 2) begin
          t_launch = cyc; in_bal_run = 1; n_switch++;
          check(cyc - t_sb == ENTRY + 1,
                $sformatf("switch: CORE1 held %0d cycles, expected %0d", cyc - t_sb - 1, ENTRY));
          check(ret[1].valid && ret[1].pc == OFF + 3, "switch: CORE2 starts on the same edge at OFF+3");
          check(switch_flag[0] && switch_flag[1], "switchFlag set during balancing");
        end
      end
    end

    if (eb_seen && t_eb_resume < 0 && ret[1].valid && cyc > t_eb) begin
      t_eb_resume = cyc;
      check(cyc - t_eb == LEAVE + 1,
            $sformatf("endBal: CORE2 held %0d cycles, expected %0d", cyc - t_eb - 1, LEAVE));
      check(!switch_flag[1], "switchFlag cleared after balancing");
    end

    for (int k = 0; k < NCORES; k++) if (ret[k].valid) begin
      if (ret[k].pc == VEC) begin
        t_isr[k] = cyc;
        check(cyc - t_irq[k] == ENTRY + 1,
              $sformatf("core %0d interrupt entry %0d cycles, expected %0d", k, cyc - t_irq[k] - 1, ENTRY));
        if (bal_active) begin
          n_irq_bal++;
          check(hold[1-k], "partner core held during interrupt in balancing");
          if (32'(stack_depth[k]) == 2 * NSAVE) n_nested++;
        end else n_irq_reg++;
      end
      if (opcode_of(ret[k].instr) == OP_EINT) t_eint[k] = cyc;
      if (t_eint[k] >= 0 && cyc == t_eint[k] + LEAVE + 1) begin
        check(1'b1, "resume after eint");
        if (bal_active) begin
          check(ret[1-k].valid, "both cores resume on the same edge after eint");
          n_same_edge_resume++;
        end
      end
      if (t_eint[k] >= 0 && cyc > t_eint[k] && cyc < t_eint[k] + LEAVE + 1)
        check(1'b0, $sformatf("core %0d completed an instruction during restore", k));
    end
  end

  task automatic pulse_irq(int k);
    @(negedge clk) irq[k] = 1'b1;
    @(negedge clk) irq[k] = 1'b0;
  endtask

  // ---- watchdog ------------------------------------------------------------
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- stimulus ------------------------------------------------------------
  initial begin
    for (int k = 0; k < NCORES; k++) begin
      irq[k] = 0; int_mask[k] = 0; im_ld_we[k] = 0; dm_ld_we[k] = 0;
      im_ld_addr[k] = '0; im_ld_data[k] = '0; dm_ld_addr[k] = '0; dm_ld_wdata[k] = '0;
    end
    build_programs();
    for (int i = 0; i < N; i++) plain[i] = $urandom();

    // set up the memories while the cores are in reset
    for (int k = 0; k < NCORES; k++) begin
      foreach (img[k][a]) begin
        @(negedge clk);
        im_ld_we[k] = 1; im_ld_addr[k] = a; im_ld_data[k] = img[k][a];
      end
      @(negedge clk) im_ld_we[k] = 0;
      for (int i = 0; i < 1024; i++) begin
        @(negedge clk);
        dm_ld_we[k] = 1; dm_ld_addr[k] = i;
        dm_ld_wdata[k] = (i < N) ? (k == 0 ? plain[i] : ~plain[i]) : 32'h0;
      end
      @(negedge clk) dm_ld_we[k] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;

    // interrupt to CORE2 during balancing
    wait (t_launch >= 0);
    repeat (40) @(posedge clk);
    pulse_irq(1);
    // regular interrupt to CORE2 while it runs program B again
    wait (t_eb_resume >= 0);
    repeat (100) @(posedge clk);
    wait (!ctrl_busy);
    pulse_irq(1);
    repeat (LEAVE + ENTRY + 60) @(posedge clk);
    // regular interrupt to CORE1 while it idles in its last block
    // masked at first: it waits until CORE1 unmasks
    wait (!ctrl_busy);
    @(negedge clk) int_mask[0] = 1'b1;
    pulse_irq(0);
    repeat (60) @(posedge clk);
    check(!isr_active[0] && !ctrl_busy && !hold[0], "masked interrupt waits");
    if (!isr_active[0] && !ctrl_busy) n_masked++;
    @(negedge clk) int_mask[0] = 1'b0;
    repeat (LEAVE + ENTRY + 60) @(posedge clk);
    wait (!ctrl_busy && !isr_active[0] && !isr_active[1]);
    // wait for program B to finish
    wait (ret[1].valid && ret[1].pc == 14);
    repeat (5) @(posedge clk);

    // results
    for (int i = 0; i < N; i++) begin
      logic [31:0] r0, r1;
      @(negedge clk) dm_ld_addr[0] = 256 + i; dm_ld_addr[1] = 256 + i;
      #1 r0 = dm_ld_rdata[0]; r1 = dm_ld_rdata[1];
      check(r0 == (plain[i] ^ 32'(KEY)), $sformatf("CORE1 ciphertext word %0d", i));
      check(r1 == ~(plain[i] ^ 32'(KEY)), $sformatf("CORE2 complementary word %0d", i));
      check(r1 == ~r0, "complementary results");
    end
    @(negedge clk) dm_ld_addr[0] = 512;
    #1 check(dm_ld_rdata[0] == 77, "CORE1 ran its next program after endBal");
    @(negedge clk) dm_ld_addr[1] = 600;
    #1 check(dm_ld_rdata[1] == M, "program B counter survives balancing and interrupts");
    @(negedge clk) dm_ld_addr[1] = 601;
    #1 check(dm_ld_rdata[1] == 3 * M, "program B sum survives balancing and interrupts");
    @(negedge clk) dm_ld_addr[0] = 700; dm_ld_addr[1] = 700;
    #1 check(dm_ld_rdata[0] == 1, "one interrupt served by CORE1");
    check(dm_ld_rdata[1] == 2, "two interrupts served by CORE2");
    check(!ci_err[0] && !ci_err[1], "no integrity violation on intact code");
    check(!stack_err[0] && !stack_err[1], "no stack error");
    check(stack_depth[0] == 0 && stack_depth[1] == 0, "stacks empty at the end");
    check(max_depth1 == 2 * NSAVE, "CORE2 stack held two contexts");

    // code injection: replace the last jump of each core's idle loop
    tamper_on = 1;
    @(negedge clk);
    im_ld_we[0] = 1; im_ld_addr[0] = 21; im_ld_data[0] = a_bne(0, 1, -1);
    im_ld_we[1] = 1; im_ld_addr[1] = 14; im_ld_data[1] = a_bne(0, 1, -1);
    @(negedge clk);
    im_ld_we[0] = 0; im_ld_we[1] = 0;
    repeat (4) @(posedge clk);
    check(ci_err[0] && ci_err[1], "injected code detected on both cores");
    check(halted[0] && halted[1], "both cores stopped by the violation");

    // mechanisms seen
    check(n_switch == 1,  "switch to balancing happened");
    check(n_endbal == 1,  "endBal happened");
    check(n_irq_bal == 1, "interrupt during balancing happened");
    check(n_irq_reg == 2, "regular interrupts happened");
    check(n_partner_hold > 0, "partner held during an interrupt in balancing");
    check(n_same_edge_resume == 1, "same-edge resume after the interrupt in balancing");
    check(n_nested == 1, "nested context on CORE2's stack");
    check(n_lockstep >= N * 5, "lock-step execution observed");
    check(n_violation == 2, "two violations raised");
    check(n_masked == 1, "masked interrupt deferred");
    $display("mechanisms: switch=%0d endBal=%0d irq_bal=%0d irq_regular=%0d partner_hold_cycles=%0d same_edge_resume=%0d nested=%0d lockstep_cycles=%0d violations=%0d masked=%0d",
             n_switch, n_endbal, n_irq_bal, n_irq_reg, n_partner_hold, n_same_edge_resume,
             n_nested, n_lockstep, n_violation, n_masked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
