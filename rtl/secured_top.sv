// secured_top - SecureD: a dual-core embedded processor hardened against
// code injection and power analysis.
//
// Two identical PISA cores (outside this module: their ports are brought
// out per core) each get a private instruction memory, a private data
// memory, a basic-block checksum checker (hashedReg / incHashedReg) and a
// context stack. One CONTROLLER serves both cores: on startBal it parks
// CORE2's context on CORE2's stack and starts both cores on the same clock
// edge, CORE1 on the original encryption code and CORE2 on the
// complementary copy at comp_pc_offset, so that their power draw balances;
// on endBal it restores CORE2. It also enters and leaves interrupt routines,
// holding the partner core when the interrupt arrives during balancing.
//
// Register index map seen by the CONTROLLER: 0-31 GPRs, 32 HI, 33 LO, 34 PC
// come from the core (core_reg_rdata, written through core_reg_acc); 35
// hashedReg and 36 incHashedReg come from the checker of that core.
//
// Core interface per core k (arrays indexed by k, 0 = CORE1, 1 = CORE2):
// imab/imdb fetch one 64-bit instruction per instruction address; dmab,
// dm_we, dmdb_w, dmdb_r are a word-addressed data port with combinational
// read; ret reports the instruction the core completes in this cycle; hold
// stalls the core; pc_load/pc_value overwrite its PC at the clock edge;
// core_reg_acc writes its registers; ci_violation is the code-integrity
// exception, one cycle after the failing basic block's last instruction.
// The load ports of the memories are for setting up programs and data.
//
// Follows the paper: memory organisation (Fig. 1), the added registers and
// instructions (Fig. 2), the CONTROLLER and stacks (Fig. 3). Own choices:
// the core interface, memory sizes and the load ports.
module secured_top
  import secured_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 65536,
  parameter int unsigned DMEM_DEPTH = 262144,
  parameter word_t       IRQ_VECTOR = 32'h0000_1000,
  parameter int unsigned FRAMES     = 2,
  parameter int unsigned IAW        = $clog2(IMEM_DEPTH),
  parameter int unsigned DAW        = $clog2(DMEM_DEPTH)
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    check_en,
  input  word_t   comp_pc_offset,
  input  logic    irq            [NCORES],
  input  logic    int_mask       [NCORES],  // core masks maskable interrupts
  // core ports
  input  word_t   imab           [NCORES],
  output instr_t  imdb           [NCORES],
  input  word_t   dmab           [NCORES],
  input  logic    dm_we          [NCORES],
  input  word_t   dmdb_w         [NCORES],
  output word_t   dmdb_r         [NCORES],
  input  retire_t ret            [NCORES],
  input  word_t   core_reg_rdata [NCORES],
  output regacc_t core_reg_acc   [NCORES],
  output logic    hold           [NCORES],
  output logic    pc_load        [NCORES],
  output word_t   pc_value       [NCORES],
  output logic    switch_flag    [NCORES],
  output logic    ci_violation   [NCORES],
  // memory load ports
  input  logic    im_ld_we       [NCORES],
  input  word_t   im_ld_addr     [NCORES],
  input  instr_t  im_ld_data     [NCORES],
  input  logic    dm_ld_we       [NCORES],
  input  word_t   dm_ld_addr     [NCORES],
  input  word_t   dm_ld_wdata    [NCORES],
  output word_t   dm_ld_rdata    [NCORES],
  // status
  output logic    bal_active,
  output logic    isr_active     [NCORES],
  output logic    ctrl_busy,
  output logic    ci_err         [NCORES],
  output logic    stack_err      [NCORES],
  output logic [6:0] stack_depth [NCORES]  // words held on each stack
);

  regacc_t reg_acc   [NCORES];
  word_t   reg_rdata [NCORES];
  logic    stk_push  [NCORES];
  logic    stk_pop   [NCORES];
  word_t   stk_rdata [NCORES];
  word_t   stk_wdata;
  word_t   hashed    [NCORES];
  word_t   inc_hashed[NCORES];

  for (genvar k = 0; k < NCORES; k++) begin : g_core

    imem #(.DEPTH(IMEM_DEPTH)) u_imem (
      .clk     (clk),
      .imab    (imab[k][IAW-1:0]),
      .imdb    (imdb[k]),
      .ld_we   (im_ld_we[k]),
      .ld_addr (im_ld_addr[k][IAW-1:0]),
      .ld_data (im_ld_data[k])
    );

    dmem #(.DEPTH(DMEM_DEPTH)) u_dmem (
      .clk      (clk),
      .dmab     (dmab[k][DAW-1:0]),
      .dm_we    (dm_we[k]),
      .dmdb_w   (dmdb_w[k]),
      .dmdb_r   (dmdb_r[k]),
      .ld_addr  (dm_ld_addr[k][DAW-1:0]),
      .ld_we    (dm_ld_we[k]),
      .ld_wdata (dm_ld_wdata[k]),
      .ld_rdata (dm_ld_rdata[k])
    );

    bb_checker u_chk (
      .clk            (clk),
      .rst_n          (rst_n),
      .en             (check_en),
      .ret            (ret[k]),
      .wr_hash        (reg_acc[k].we && reg_acc[k].idx == RIDX_HASH),
      .wr_inc         (reg_acc[k].we && reg_acc[k].idx == RIDX_INC),
      .wdata          (reg_acc[k].wdata),
      .hashed_reg     (hashed[k]),
      .inc_hashed_reg (inc_hashed[k]),
      .violation      (ci_violation[k]),
      .err_sticky     (ci_err[k])
    );

    logic [$clog2(NSAVE * FRAMES + 1)-1:0] depth_w;
    assign stack_depth[k] = 7'(depth_w);

    reg_stack #(.FRAMES(FRAMES)) u_stack (
      .clk   (clk),
      .rst_n (rst_n),
      .push  (stk_push[k]),
      .pop   (stk_pop[k]),
      .wdata (stk_wdata),
      .rdata (stk_rdata[k]),
      .count (depth_w),
      .empty (),
      .full  (),
      .err   (stack_err[k])
    );

    // registers 35 and 36 live in the checker, the others in the core
    always_comb begin
      unique case (reg_acc[k].idx)
        RIDX_HASH: reg_rdata[k] = hashed[k];
        RIDX_INC:  reg_rdata[k] = inc_hashed[k];
        default:   reg_rdata[k] = core_reg_rdata[k];
      endcase
      core_reg_acc[k]    = reg_acc[k];
      core_reg_acc[k].we = reg_acc[k].we && reg_acc[k].idx < RIDX_HASH;
    end
  end

  bal_controller #(.IRQ_VECTOR(IRQ_VECTOR)) u_ctrl (
    .clk            (clk),
    .rst_n          (rst_n),
    .ret            (ret),
    .irq            (irq),
    .int_mask       (int_mask),
    .comp_pc_offset (comp_pc_offset),
    .hold           (hold),
    .pc_load        (pc_load),
    .pc_value       (pc_value),
    .reg_acc        (reg_acc),
    .reg_rdata      (reg_rdata),
    .switch_flag    (switch_flag),
    .stk_push       (stk_push),
    .stk_pop        (stk_pop),
    .stk_wdata      (stk_wdata),
    .stk_rdata      (stk_rdata),
    .bal_active     (bal_active),
    .isr_active     (isr_active),
    .busy           (ctrl_busy)
  );

  // the CONTROLLER never nests deeper than the stacks hold
  for (genvar k = 0; k < NCORES; k++) begin : g_assert
    a_stack_ok: assert property (@(posedge clk) disable iff (!rst_n) !stack_err[k]);
  end

endmodule
