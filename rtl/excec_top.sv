// excec_top -- EXCEC control-flow-integrity unit, as attached to the decode
// stage of a small in-order RISC-V core.
//
// The unit watches every instruction the core executes and enforces
// fine-grained control-flow integrity:
//   * backward edges: every call (JAL/JALR with link register ra) pushes its
//     return-address bits [18:1] on a flip-flop shadow stack, every return
//     (jalr x0, 0(ra)) is compared with the top entry. Direct recursion is
//     folded into a per-entry counter. No extra instruction is needed.
//   * forward edges: an indirect call or jump is preceded by CFI_CALL/CFI_JUMP
//     <label> and its target starts with CFI_CHECK <label>; the labels must
//     match and the three instructions must follow each other directly.
//   * setjmp/longjmp: CFI_SETJMP <index> saves the shadow-stack pointer, and
//     after an announced longjmp (CFI_LONGJMP) restores it.
//   * CFI_ENABLE/CFI_DISABLE/CFI_RESET manage the unit.
//
// Blocks: cfi_decoder (classifies the instruction), cfi_controller
// (sequence state machine, violation causes, interrupt mask), shadow_stack
// (128 x (18 + 7) bits) and setjmp_table (8 saved pointers).
//
// Core interface: instr_valid_i is high for exactly one cycle per executed
// instruction, with the expanded instruction word, its pc, whether it was a
// compressed instruction, and the jump target the core computed (for a
// return: the value of ra). violation_o/cause_o answer in that same cycle
// and are meant to raise an exception for that instruction in the core's
// pipeline controller; irq_disable_o must hold off interrupts while high.
// All state changes happen at the clock edge that ends the cycle. The core
// itself is not part of this module.
//
// The mechanisms, their sizes (128-entry stack of 18-bit slices, 7-bit
// recursion counters, 8 setjmp slots, labels for 64 + 64 sites) and the
// error kinds follow the EXCEC design; the split into these four blocks, the
// core interface signals and the observation outputs ss_depth_o and
// ss_recursion_o are this design's choices.
//
// Lint notes: the shadow stack's top_cnt_o output is left open on purpose
// (the counter is only needed inside the stack and by its testbench);
// target_i bits outside [18:1] are unused; rst_ni is reported as both
// asynchronous and synchronous because the assertions below use it as
// their disable condition.
module excec_top
  import excec_pkg::*;
#(
  parameter int unsigned SHADOW_STACK_SIZE = excec_pkg::SHADOW_STACK_SIZE_DEF,  // 128
  parameter int unsigned RECURSION_DEPTH   = excec_pkg::RECURSION_DEPTH_DEF,    // 128
  localparam int unsigned SP_W = $clog2(SHADOW_STACK_SIZE + 1)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             instr_valid_i,
  input  logic [31:0]      instr_i,
  input  logic [31:0]      pc_i,
  input  logic             is_compressed_i,
  input  logic [31:0]      target_i,
  output logic             violation_o,
  output cfi_cause_e       cause_o,
  output logic             irq_disable_o,
  output logic             enabled_o,
  output cfi_state_e       state_o,
  output logic [SP_W-1:0]  ss_depth_o,        // occupied shadow-stack entries
  output logic             ss_recursion_o     // this cycle's push went to a counter
);

  localparam int unsigned SJ_W  = $clog2(SETJMP_CALLS);

  cfi_dec_t          dec;
  logic [RA_W-1:0]   ret_addr;

  logic              ss_clear, ss_push, ss_pop, ss_unwind;
  logic [RA_W-1:0]   ss_push_addr, ss_pop_addr;
  logic [SP_W-1:0]   ss_unwind_sp, ss_sp;
  logic              ss_push_err, ss_push_rec, ss_pop_empty, ss_pop_mismatch, ss_unwind_err;
  logic              ss_full, ss_empty;
  logic [RA_W-1:0]   ss_top_addr;

  logic              sj_clear, sj_longjmp, sj_setjmp, sj_pending, sj_slot_valid;
  logic [SJ_W-1:0]   sj_index;
  logic [SP_W-1:0]   sj_slot_sp;

  cfi_decoder u_decoder (
    .instr_i         (instr_i),
    .pc_i            (pc_i),
    .is_compressed_i (is_compressed_i),
    .dec_o           (dec),
    .ret_addr_o      (ret_addr)
  );

  cfi_controller #(.SP_W(SP_W)) u_controller (
    .clk_i             (clk_i),
    .rst_ni            (rst_ni),
    .instr_valid_i     (instr_valid_i),
    .dec_i             (dec),
    .ret_addr_i        (ret_addr),
    .target_i          (target_i),
    .ss_clear_o        (ss_clear),
    .ss_push_o         (ss_push),
    .ss_push_addr_o    (ss_push_addr),
    .ss_pop_o          (ss_pop),
    .ss_pop_addr_o     (ss_pop_addr),
    .ss_unwind_o       (ss_unwind),
    .ss_unwind_sp_o    (ss_unwind_sp),
    .ss_push_err_i     (ss_push_err),
    .ss_pop_empty_i    (ss_pop_empty),
    .ss_pop_mismatch_i (ss_pop_mismatch),
    .ss_unwind_err_i   (ss_unwind_err),
    .sj_clear_o        (sj_clear),
    .sj_longjmp_o      (sj_longjmp),
    .sj_setjmp_o       (sj_setjmp),
    .sj_index_o        (sj_index),
    .sj_pending_i      (sj_pending),
    .sj_slot_valid_i   (sj_slot_valid),
    .sj_slot_sp_i      (sj_slot_sp),
    .violation_o       (violation_o),
    .cause_o           (cause_o),
    .irq_disable_o     (irq_disable_o),
    .enabled_o         (enabled_o),
    .state_o           (state_o)
  );

  shadow_stack #(
    .SIZE            (SHADOW_STACK_SIZE),
    .RECURSION_DEPTH (RECURSION_DEPTH),
    .RA_W            (RA_W)
  ) u_shadow_stack (
    .clk_i          (clk_i),
    .rst_ni         (rst_ni),
    .clear_i        (ss_clear),
    .push_i         (ss_push),
    .push_addr_i    (ss_push_addr),
    .pop_i          (ss_pop),
    .pop_addr_i     (ss_pop_addr),
    .unwind_i       (ss_unwind),
    .unwind_sp_i    (ss_unwind_sp),
    .push_err_o     (ss_push_err),
    .push_rec_o     (ss_push_rec),
    .pop_empty_o    (ss_pop_empty),
    .pop_mismatch_o (ss_pop_mismatch),
    .unwind_err_o   (ss_unwind_err),
    .sp_o           (ss_sp),
    .full_o         (ss_full),
    .empty_o        (ss_empty),
    .top_addr_o     (ss_top_addr),
    .top_cnt_o      ()
  );

  setjmp_table #(
    .SETJMP_CALLS (SETJMP_CALLS),
    .SP_W         (SP_W)
  ) u_setjmp_table (
    .clk_i        (clk_i),
    .rst_ni       (rst_ni),
    .clear_i      (sj_clear),
    .longjmp_i    (sj_longjmp),
    .setjmp_i     (sj_setjmp),
    .index_i      (sj_index),
    .sp_i         (ss_sp),
    .pending_o    (sj_pending),
    .slot_valid_o (sj_slot_valid),
    .slot_sp_o    (sj_slot_sp)
  );

  assign ss_depth_o     = ss_sp;
  assign ss_recursion_o = ss_push && ss_push_rec && !violation_o;

  // a pop can only be granted on a matching, non-empty stack
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   ss_pop && !violation_o |-> !ss_empty && ss_top_addr == ss_pop_addr)
    else $error("excec_top: return granted against the shadow stack");
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   ss_push && !violation_o |-> !ss_full || ss_push_rec)
    else $error("excec_top: push granted on a full shadow stack");

endmodule
