// bal_controller - the SecureD CONTROLLER: balancing switch and interrupts.
//
// The CONTROLLER watches the instructions both cores complete and the two
// external interrupt lines, and runs four register-transfer sequences. All
// of them hold the cores involved (hold) and move a core's 37 registers
// between the core (reg_acc / reg_rdata) and that core's stack (stk_*), one
// register every CYCLES_PER_REG cycles.
//
//   switch  CORE1 completes startBal. Both cores are held; after the
//           pipeline flush (FLUSH_CYCLES) CORE2's context is pushed to its
//           stack; then, in one cycle, both PCs are loaded on the same clock
//           edge: CORE1 with the address after startBal, CORE2 with that
//           address plus comp_pc_offset, where the complementary program
//           sits. Both cores then run in lock step and switchFlag is set.
//   endBal  CORE1 completes endBal. CORE2 is held, its context is popped
//           from the stack and, in one more cycle, its PC is reloaded and it
//           resumes; CORE1 goes on with its own next program at once.
//   irq     An external interrupt for core k. Core k is held (and during
//           balancing the other core as well), flushed, its context pushed,
//           and its PC loaded with IRQ_VECTOR.
//   eint    Core k completes eint, the last instruction of an interrupt
//           routine (the NMI of the paper). Its context is popped, then in
//           one cycle its PC is reloaded and, during balancing, the other
//           core's PC too, so both resume on the same edge.
//
// The switch is a maskable interrupt to CORE2 and the irq lines are
// maskable too: while int_mask[k] is high, a switch (k = CORE2) or an irq
// of core k waits, and CORE1 stays held on a waiting startBal. eint is the
// non-maskable return and is never masked.
//
// Timing, from a completing startBal / eint or a sampled irq in cycle t:
// hold from t+1; entry = FLUSH_CYCLES + 37*CYCLES_PER_REG + SWITCH_CYCLES
// = 377 cycles, exit = 37*CYCLES_PER_REG + EXIT_CYCLES = 371 cycles, 748 in
// total as in Table 2 of the paper. Events that arrive while a sequence runs
// are kept pending; a core whose startBal, endBal or eint is pending is held.
//
// From the paper: the four sequences, their order, the delays, the same-edge
// PC loads and that the other core is held while one services an interrupt
// during balancing. Own choices: the save and restore of a context are done
// by this controller in hardware (the paper's text has the interrupt routine
// save and restore the registers in software, while its Table 2 counts the
// same 37-register save and restore for both switching and interrupts; the
// hardware sequence gives the Table 2 cycle counts for both); only CORE1
// starts balancing; interrupts do not nest; the priority among pending
// events (eint, endBal, startBal, irq of CORE1, irq of CORE2); the interrupt
// vector; events that do not fit the current mode are dropped; the mask
// input, which the paper names ("a maskable interrupt") but does not
// describe.
module bal_controller
  import secured_pkg::*;
#(
  parameter word_t       IRQ_VECTOR = 32'h0000_1000,
  parameter int unsigned FLUSH_CYC  = FLUSH_CYCLES,
  parameter int unsigned CPR        = CYCLES_PER_REG
) (
  input  logic    clk,
  input  logic    rst_n,
  input  retire_t ret         [NCORES],
  input  logic    irq         [NCORES],   // external interrupt request, level
  input  logic    int_mask    [NCORES],   // core k masks maskable interrupts
  input  word_t   comp_pc_offset,         // CORE2 program = CORE1 PC + this
  // to the cores
  output logic    hold        [NCORES],
  output logic    pc_load     [NCORES],
  output word_t   pc_value    [NCORES],
  output regacc_t reg_acc     [NCORES],
  input  word_t   reg_rdata   [NCORES],   // register reg_acc[k].idx of core k
  output logic    switch_flag [NCORES],
  // to the stacks
  output logic    stk_push    [NCORES],
  output logic    stk_pop     [NCORES],
  output word_t   stk_wdata,
  input  word_t   stk_rdata   [NCORES],
  // status
  output logic    bal_active,
  output logic    isr_active  [NCORES],
  output logic    busy
);

  typedef enum logic [2:0] {S_IDLE, S_FLUSH, S_SAVE, S_CALL, S_RESTORE, S_EXIT} state_t;
  typedef enum logic [1:0] {K_SWITCH, K_IRQ, K_EINT, K_ENDBAL} kind_t;

  localparam int unsigned FW = $clog2(FLUSH_CYC + 1);
  localparam int unsigned CW = $clog2(CPR + 1);

  state_t            state, state_n;
  kind_t             kind;
  logic              tgt;                 // core whose context moves
  logic [1:0]        inv;                 // cores held by the sequence
  logic [FW-1:0]     fcnt;
  logic [CW-1:0]     sub;
  logic [RIDX_W-1:0] ridx;
  word_t             sb_pc;               // PC of the pending startBal
  word_t             resume_pc;           // PC popped from the stack
  word_t             other_pc;            // PC of the core held during an ISR
  logic              bal_q;
  logic [1:0]        isr_q;
  logic              sb_pend, eb_pend;
  logic [1:0]        ei_pend, irq_seen;

  // ---- events completed this cycle -------------------------------------
  logic       ev_sb, ev_eb;
  logic [1:0] ev_ei;
  always_comb begin
    ev_sb = ret[0].valid && opcode_of(ret[0].instr) == OP_STARTBAL;
    ev_eb = ret[0].valid && opcode_of(ret[0].instr) == OP_ENDBAL;
    for (int k = 0; k < NCORES; k++)
      ev_ei[k] = ret[k].valid && opcode_of(ret[k].instr) == OP_EINT;
  end

  logic       sb_req, eb_req;
  logic [1:0] ei_req, irq_req;
  always_comb begin
    sb_req  = sb_pend | ev_sb;
    eb_req  = eb_pend | ev_eb;
    ei_req  = ei_pend | ev_ei;
    irq_req = irq_seen | {irq[1], irq[0]};
  end

  // ---- choice of the next sequence in S_IDLE ---------------------------
  logic       start;
  kind_t      start_kind;
  logic       start_tgt;
  logic [1:0] start_inv;
  always_comb begin
    start      = 1'b0;
    start_kind = K_IRQ;
    start_tgt  = 1'b0;
    start_inv  = 2'b00;
    if (ei_req[0] && isr_q[0]) begin
      start = 1'b1; start_kind = K_EINT; start_tgt = 1'b0;
      start_inv = bal_q ? 2'b11 : 2'b01;
    end else if (ei_req[1] && isr_q[1]) begin
      start = 1'b1; start_kind = K_EINT; start_tgt = 1'b1;
      start_inv = bal_q ? 2'b11 : 2'b10;
    end else if (eb_req && bal_q && isr_q == 2'b00) begin
      start = 1'b1; start_kind = K_ENDBAL; start_tgt = 1'b1; start_inv = 2'b10;
    end else if (sb_req && !bal_q && isr_q == 2'b00 && !int_mask[1]) begin
      start = 1'b1; start_kind = K_SWITCH; start_tgt = 1'b1; start_inv = 2'b11;
    end else if (irq_req[0] && !int_mask[0] && !sb_req && !isr_q[0] && !(bal_q && isr_q[1])) begin
      start = 1'b1; start_kind = K_IRQ; start_tgt = 1'b0;
      start_inv = bal_q ? 2'b11 : 2'b01;
    end else if (irq_req[1] && !int_mask[1] && !eb_req && !isr_q[1] && !(bal_q && isr_q[0])) begin
      start = 1'b1; start_kind = K_IRQ; start_tgt = 1'b1;
      start_inv = bal_q ? 2'b11 : 2'b10;
    end
  end

  // ---- next state -------------------------------------------------------
  logic reg_done;
  assign reg_done = (sub == CW'(CPR - 1));

  always_comb begin
    state_n = state;
    unique case (state)
      S_IDLE:    if (start) state_n = (start_kind == K_EINT || start_kind == K_ENDBAL)
                                      ? S_RESTORE : S_FLUSH;
      S_FLUSH:   if (fcnt == FW'(FLUSH_CYC - 1)) state_n = S_SAVE;
      S_SAVE:    if (reg_done && ridx == RIDX_W'(NSAVE - 1)) state_n = S_CALL;
      S_CALL:    state_n = S_IDLE;
      S_RESTORE: if (reg_done && ridx == '0) state_n = S_EXIT;
      S_EXIT:    state_n = S_IDLE;
      default:   state_n = S_IDLE;
    endcase
  end

  // ---- sequencing registers --------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      kind      <= K_IRQ;
      tgt       <= 1'b0;
      inv       <= 2'b00;
      fcnt      <= '0;
      sub       <= '0;
      ridx      <= '0;
      sb_pc     <= '0;
      resume_pc <= '0;
      other_pc  <= '0;
      bal_q     <= 1'b0;
      isr_q     <= 2'b00;
      sb_pend   <= 1'b0;
      eb_pend   <= 1'b0;
      ei_pend   <= 2'b00;
      irq_seen  <= 2'b00;
    end else begin
      state <= state_n;
      if (ev_sb) sb_pc <= ret[0].pc;

      // pending events: set on arrival, cleared when their sequence starts
      // or when they cannot apply (startBal while balancing, endBal outside
      // balancing, eint outside an interrupt routine)
      sb_pend  <= sb_req && !bal_q;
      eb_pend  <= eb_req && bal_q;
      ei_pend  <= ei_req & isr_q;
      irq_seen <= irq_req;

      unique case (state)
        S_IDLE: if (start) begin
          kind <= start_kind;
          tgt  <= start_tgt;
          inv  <= start_inv;
          fcnt <= '0;
          sub  <= '0;
          ridx <= (start_kind == K_EINT || start_kind == K_ENDBAL)
                  ? RIDX_W'(NSAVE - 1) : '0;
          unique case (start_kind)
            K_SWITCH: sb_pend <= 1'b0;
            K_ENDBAL: eb_pend <= 1'b0;
            K_EINT:   ei_pend[start_tgt] <= 1'b0;
            default:  irq_seen[start_tgt] <= 1'b0;
          endcase
        end
        S_FLUSH: fcnt <= fcnt + 1'b1;
        S_SAVE: begin
          sub <= reg_done ? '0 : sub + 1'b1;
          if (reg_done) ridx <= ridx + 1'b1;
        end
        S_CALL: begin
          if (kind == K_SWITCH) bal_q <= 1'b1;
          else                  isr_q[tgt] <= 1'b1;
          if (kind == K_IRQ) other_pc <= reg_rdata[!tgt];
        end
        S_RESTORE: begin
          sub <= reg_done ? '0 : sub + 1'b1;
          if (reg_done) begin
            ridx <= ridx - 1'b1;
            if (ridx == RIDX_PC) resume_pc <= stk_rdata[tgt];
          end
        end
        S_EXIT: begin
          if (kind == K_ENDBAL) bal_q      <= 1'b0;
          else                  isr_q[tgt] <= 1'b0;
        end
        default: ;
      endcase
    end
  end

  // ---- outputs ----------------------------------------------------------
  always_comb begin
    stk_wdata = reg_rdata[tgt];
    for (int k = 0; k < NCORES; k++) begin
      stk_push[k]      = (state == S_SAVE)    && (tgt == k[0]) && reg_done;
      stk_pop[k]       = (state == S_RESTORE) && (tgt == k[0]) && reg_done;
      reg_acc[k].idx   = (state == S_CALL && tgt != k[0]) ? RIDX_PC : ridx;
      reg_acc[k].wdata = stk_rdata[k];
      reg_acc[k].we    = stk_pop[k] && (ridx != RIDX_PC);
      pc_load[k]       = 1'b0;
      pc_value[k]      = '0;
      switch_flag[k]   = bal_q;
      isr_active[k]    = isr_q[k];
    end

    if (state == S_CALL) begin
      if (kind == K_SWITCH) begin
        pc_load[0]  = 1'b1;
        pc_value[0] = sb_pc + 1'b1;
        pc_load[1]  = 1'b1;
        pc_value[1] = sb_pc + 1'b1 + comp_pc_offset;
      end else begin
        pc_load[tgt]  = 1'b1;
        pc_value[tgt] = IRQ_VECTOR;
      end
    end
    if (state == S_EXIT) begin
      pc_load[tgt]  = 1'b1;
      pc_value[tgt] = resume_pc;
      if (kind == K_EINT && bal_q) begin
        pc_load[!tgt]  = 1'b1;
        pc_value[!tgt] = other_pc;
      end
    end

    // hold: cores in a running sequence, cores with a pending event, and
    // during balancing the core whose partner is in an interrupt routine
    hold[0] = (state != S_IDLE && inv[0]) || sb_pend || ei_pend[0] ||
              (bal_q && isr_q[1]);
    hold[1] = (state != S_IDLE && inv[1]) || eb_pend || ei_pend[1] ||
              (bal_q && isr_q[0]);

    bal_active = bal_q;
    busy       = (state != S_IDLE);
  end

  // the switch loads both PCs on the same edge
  a_same_edge_switch: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_CALL && kind == K_SWITCH) |-> (pc_load[0] && pc_load[1]));
  a_same_edge_resume: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_EXIT && kind == K_EINT && bal_q) |-> (pc_load[0] && pc_load[1]));
  // a core that moves registers is held
  a_held_while_moving: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_SAVE || state == S_RESTORE) |-> hold[tgt]);

endmodule
