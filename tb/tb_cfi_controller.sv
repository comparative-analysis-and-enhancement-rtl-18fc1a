// tb_cfi_controller -- self-checking testbench of cfi_controller.
//
// The shadow-stack and setjmp-table status inputs are driven by the
// testbench, so each rule of the sequence state machine can be exercised on
// its own. Every step presents one decoded instruction, checks the
// combinational answer (violation cause, stack/table requests, interrupt
// mask) against the value expected from the valid-sequence rules, clocks,
// and checks the state that follows. Covered: disabled unit ignores
// everything, enable/disable/reset, JAL push and stack full, RET pop with
// empty and mismatch, CFI_CALL->JALR->CFI_CHECK and CFI_JUMP->JR->CFI_CHECK
// with matching and wrong labels, every out-of-sequence instruction, label
// 0x0, setjmp save/restore with unused slot, out-of-range index and bad
// unwind, returns ignored during a pending longjmp, interrupt masking.
// A random phase then runs 20000 cycles of instructions biased to continue
// the current sequence, with random stack/table status, and compares every
// output and the next state with a reference model of the same rules.
module tb_cfi_controller;
  import excec_pkg::*;

  logic clk = 0, rst_n = 0;
  logic instr_valid;
  cfi_dec_t dec;
  logic [RA_W-1:0] ret_addr;
  logic [31:0] target;
  logic ss_clear, ss_push, ss_pop, ss_unwind;
  logic [RA_W-1:0] ss_push_addr, ss_pop_addr;
  logic [7:0] ss_unwind_sp;
  logic ss_push_err, ss_pop_empty, ss_pop_mismatch, ss_unwind_err;
  logic sj_clear, sj_longjmp, sj_setjmp, sj_pending, sj_slot_valid;
  logic [2:0] sj_index;
  logic [7:0] sj_slot_sp;
  logic violation, irq_dis, enabled;
  cfi_cause_e cause;
  cfi_state_e state;
  int checks = 0, failures = 0;

  cfi_controller dut (
    .clk_i(clk), .rst_ni(rst_n), .instr_valid_i(instr_valid), .dec_i(dec),
    .ret_addr_i(ret_addr), .target_i(target),
    .ss_clear_o(ss_clear), .ss_push_o(ss_push), .ss_push_addr_o(ss_push_addr),
    .ss_pop_o(ss_pop), .ss_pop_addr_o(ss_pop_addr), .ss_unwind_o(ss_unwind),
    .ss_unwind_sp_o(ss_unwind_sp), .ss_push_err_i(ss_push_err),
    .ss_pop_empty_i(ss_pop_empty), .ss_pop_mismatch_i(ss_pop_mismatch),
    .ss_unwind_err_i(ss_unwind_err),
    .sj_clear_o(sj_clear), .sj_longjmp_o(sj_longjmp), .sj_setjmp_o(sj_setjmp),
    .sj_index_o(sj_index), .sj_pending_i(sj_pending), .sj_slot_valid_i(sj_slot_valid),
    .sj_slot_sp_i(sj_slot_sp),
    .violation_o(violation), .cause_o(cause), .irq_disable_o(irq_dis),
    .enabled_o(enabled), .state_o(state)
  );

  always #5 clk = ~clk;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t: cause=%s state=%s push=%0d pop=%0d unwind=%0d irq=%0d",
               what, $time, cause.name(), state.name(), ss_push, ss_pop, ss_unwind, irq_dis);
    end
  endtask

  // expected request bits: {clear, push, pop, unwind, sj_clear, longjmp, setjmp}
  task automatic step(input cfi_op_e op, input logic [LABEL_W-1:0] lbl,
                      input cfi_cause_e exp_cause, input logic [6:0] exp_req,
                      input cfi_state_e exp_next, input string what);
    instr_valid = 1'b1;
    dec.op = op; dec.label = lbl;
    #1;
    chk(cause == exp_cause, {what, ": cause"});
    chk(violation == (exp_cause != CAUSE_NONE), {what, ": violation"});
    chk({ss_clear, ss_push, ss_pop, ss_unwind, sj_clear, sj_longjmp, sj_setjmp} == exp_req,
        {what, ": requests"});
    @(posedge clk);
    #1;
    instr_valid = 1'b0;
    chk(state == exp_next, {what, ": next state"});
    chk(irq_dis == (enabled && exp_next != ST_IDLE), {what, ": interrupt mask"});
  endtask

  localparam logic [6:0] R_NONE = 7'b0000000, R_PUSH = 7'b0100000, R_POP = 7'b0010000,
                         R_UNW  = 7'b0001001, R_CLR  = 7'b1000100, R_LJ  = 7'b0000010,
                         R_SJ   = 7'b0000001;


  // ---- reference model for the random phase ----
  bit                 m_en;
  cfi_state_e         m_state;
  logic [LABEL_W-1:0] m_lbl;
  int n_rand_viol = 0, n_rand_seq = 0;

  // one random cycle: pick an instruction that often continues the current
  // sequence, random stack/table status, then compare with the rules
  task automatic rand_step();
    int k;
    cfi_op_e o;
    cfi_cause_e e_cause;
    logic [6:0] e_req;
    cfi_state_e e_state;
    bit e_en, v, act;
    logic [LABEL_W-1:0] l;
    k = $urandom_range(0, 99);
    if (m_state == ST_CALL_ANN && k < 70)      o = OP_JALR;
    else if (m_state == ST_JUMP_ANN && k < 70) o = OP_JR;
    else if (m_state == ST_CHECK_PEND && k < 70) o = OP_CHECK;
    else if (k < 75) o = cfi_op_e'($urandom_range(0, 9));   // up to LONGJMP
    else if (k < 90) o = ($urandom_range(0, 1) != 0) ? OP_CALL : OP_JUMP;
    else             o = cfi_op_e'($urandom_range(10, 12)); // ENABLE/DISABLE/RESET
    if (o == OP_RESET && $urandom_range(0, 3) != 0) o = OP_ENABLE;
    case ($urandom_range(0, 3))
      0: l = '0;
      1: l = LABEL_W'($urandom_range(1, 255));
      default: l = m_lbl;
    endcase
    v = ($urandom_range(0, 9) != 0);
    instr_valid = v; dec.op = o; dec.label = l;
    dec.idx_ok = ($urandom_range(0, 7) != 0);
    dec.sj_index = 3'($urandom_range(0, 7));
    ret_addr = 18'($urandom); target = $urandom;
    ss_push_err = ($urandom_range(0, 7) == 0); ss_pop_empty = ($urandom_range(0, 7) == 0);
    ss_pop_mismatch = ($urandom_range(0, 5) == 0); ss_unwind_err = ($urandom_range(0, 5) == 0);
    sj_pending = ($urandom_range(0, 3) == 0); sj_slot_valid = ($urandom_range(0, 3) != 0);
    sj_slot_sp = 8'($urandom);
    // expectation
    e_cause = CAUSE_NONE; e_req = R_NONE; e_state = m_state; e_en = m_en;
    act = v && m_en;
    if (v && o == OP_RESET) begin
      e_req = R_CLR; e_state = ST_IDLE; e_en = 0;
    end else if (v && !m_en) begin
      if (o == OP_ENABLE) e_en = 1;
    end else if (act && o == OP_DISABLE) begin
      e_en = 0; e_state = ST_IDLE;
    end else if (act) begin
      case (m_state)
        ST_IDLE:
          case (o)
            OP_JAL, OP_JALR: begin e_req = R_PUSH; if (ss_push_err) e_cause = CAUSE_STACK_FULL; end
            OP_RET: if (!sj_pending) begin
                      e_req = R_POP;
                      if (ss_pop_empty) e_cause = CAUSE_STACK_EMPTY;
                      else if (ss_pop_mismatch) e_cause = CAUSE_RET_MISMATCH;
                    end
            OP_CALL: e_state = ST_CALL_ANN;
            OP_JUMP: e_state = ST_JUMP_ANN;
            OP_CHECK: if (l == 0) e_cause = CAUSE_LABEL_MISMATCH;
            OP_SETJMP:
              if (!dec.idx_ok) e_cause = CAUSE_INVALID_FLOW;
              else if (!sj_pending) e_req = R_SJ;
              else if (!sj_slot_valid || ss_unwind_err) begin e_req = R_SJ; e_cause = CAUSE_INVALID_FLOW; end
              else e_req = R_UNW;
            OP_LONGJMP: e_req = R_LJ;
            default: ;
          endcase
        ST_CALL_ANN:
          if (o != OP_JALR) e_cause = CAUSE_INVALID_FLOW;
          else begin
            e_req = R_PUSH;
            if (ss_push_err) e_cause = CAUSE_STACK_FULL; else e_state = ST_CHECK_PEND;
          end
        ST_JUMP_ANN:
          if (o == OP_JR) e_state = ST_CHECK_PEND; else e_cause = CAUSE_INVALID_FLOW;
        default:  // ST_CHECK_PEND
          if (o != OP_CHECK) e_cause = CAUSE_INVALID_FLOW;
          else if (l == m_lbl && l != 0) begin e_state = ST_IDLE; n_rand_seq++; end
          else e_cause = CAUSE_LABEL_MISMATCH;
      endcase
      if (e_cause != CAUSE_NONE) begin e_state = ST_IDLE; n_rand_viol++; end
    end
    #1;
    chk(cause == e_cause, "random: cause");
    chk(violation == (e_cause != CAUSE_NONE), "random: violation");
    chk({ss_clear, ss_push, ss_pop, ss_unwind, sj_clear, sj_longjmp, sj_setjmp} == e_req,
        "random: requests");
    chk(irq_dis == ((m_en && m_state != ST_IDLE) ||
                    (act && m_state == ST_IDLE && (o == OP_CALL || o == OP_JUMP))),
        "random: interrupt mask");
    chk(ss_push_addr == ret_addr && ss_pop_addr == target[18:1] &&
        ss_unwind_sp == sj_slot_sp && sj_index == dec.sj_index, "random: data paths");
    @(posedge clk);
    #1;
    if (act && m_state == ST_IDLE && (o == OP_CALL || o == OP_JUMP)) m_lbl = l;
    if (v && o == OP_RESET) m_lbl = '0;
    m_en = e_en; m_state = e_state;
    instr_valid = 0;
    chk(state == m_state && enabled == m_en, "random: state and enable");
  endtask

  initial begin : watchdog
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    instr_valid = 0; dec = '0; dec.idx_ok = 1; ret_addr = 18'h1234; target = 32'h1C00_2468;
    ss_push_err = 0; ss_pop_empty = 0; ss_pop_mismatch = 0; ss_unwind_err = 0;
    sj_pending = 0; sj_slot_valid = 0; sj_slot_sp = 8'd5;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    chk(!enabled, "disabled out of reset");
    // disabled: everything is a no-op
    step(OP_JAL,   0,    CAUSE_NONE, R_NONE, ST_IDLE, "disabled JAL");
    step(OP_CHECK, 0,    CAUSE_NONE, R_NONE, ST_IDLE, "disabled CHECK 0");
    step(OP_CALL,  8'h42, CAUSE_NONE, R_NONE, ST_IDLE, "disabled CALL");
    step(OP_ENABLE, 0,   CAUSE_NONE, R_NONE, ST_IDLE, "enable");
    chk(enabled, "enabled");
    // backward edges
    step(OP_JAL, 0, CAUSE_NONE, R_PUSH, ST_IDLE, "JAL push");
    chk(ss_push_addr == 18'h1234, "push address");
    ss_push_err = 1;
    step(OP_JAL, 0, CAUSE_STACK_FULL, R_PUSH, ST_IDLE, "JAL stack full");
    ss_push_err = 0;
    step(OP_RET, 0, CAUSE_NONE, R_POP, ST_IDLE, "RET");
    chk(ss_pop_addr == 18'h1234, "pop address bits [18:1]");
    ss_pop_empty = 1;
    step(OP_RET, 0, CAUSE_STACK_EMPTY, R_POP, ST_IDLE, "RET empty");
    ss_pop_empty = 0; ss_pop_mismatch = 1;
    step(OP_RET, 0, CAUSE_RET_MISMATCH, R_POP, ST_IDLE, "RET mismatch");
    ss_pop_mismatch = 0;
    // forward edge: indirect call
    instr_valid = 1; dec.op = OP_CALL; #1;
    chk(irq_dis, "interrupts masked by CFI_CALL itself");
    instr_valid = 0;
    step(OP_CALL, 8'h42, CAUSE_NONE, R_NONE, ST_CALL_ANN, "CFI_CALL");
    step(OP_JALR, 0,     CAUSE_NONE, R_PUSH, ST_CHECK_PEND, "JALR");
    step(OP_NONE, 0,     CAUSE_INVALID_FLOW, R_NONE, ST_IDLE, "JALR not followed by CHECK");
    step(OP_CALL, 8'h42, CAUSE_NONE, R_NONE, ST_CALL_ANN, "CFI_CALL 2");
    step(OP_JALR, 0,     CAUSE_NONE, R_PUSH, ST_CHECK_PEND, "JALR 2");
    step(OP_CHECK, 8'h42, CAUSE_NONE, R_NONE, ST_IDLE, "CFI_CHECK match");
    step(OP_CALL, 8'h42, CAUSE_NONE, R_NONE, ST_CALL_ANN, "CFI_CALL 3");
    step(OP_JALR, 0,     CAUSE_NONE, R_PUSH, ST_CHECK_PEND, "JALR 3");
    step(OP_CHECK, 8'h60, CAUSE_LABEL_MISMATCH, R_NONE, ST_IDLE, "CFI_CHECK mismatch");
    step(OP_CALL, 8'h42, CAUSE_NONE, R_NONE, ST_CALL_ANN, "CFI_CALL 4");
    step(OP_JAL,  0,     CAUSE_INVALID_FLOW, R_NONE, ST_IDLE, "CFI_CALL then JAL");
    step(OP_CALL, 8'h42, CAUSE_NONE, R_NONE, ST_CALL_ANN, "CFI_CALL 5");
    step(OP_JR,   0,     CAUSE_INVALID_FLOW, R_NONE, ST_IDLE, "CFI_CALL then JR");
    step(OP_CALL, 8'h42, CAUSE_NONE, R_NONE, ST_CALL_ANN, "CFI_CALL 6");
    ss_push_err = 1;
    step(OP_JALR, 0,     CAUSE_STACK_FULL, R_PUSH, ST_IDLE, "JALR stack full");
    ss_push_err = 0;
    // forward edge: indirect jump
    step(OP_JUMP, 8'h05, CAUSE_NONE, R_NONE, ST_JUMP_ANN, "CFI_JUMP");
    step(OP_JR,   0,     CAUSE_NONE, R_NONE, ST_CHECK_PEND, "JR");
    step(OP_CHECK, 8'h05, CAUSE_NONE, R_NONE, ST_IDLE, "CFI_CHECK jump match");
    step(OP_JUMP, 8'h05, CAUSE_NONE, R_NONE, ST_JUMP_ANN, "CFI_JUMP 2");
    step(OP_JALR, 0,     CAUSE_INVALID_FLOW, R_NONE, ST_IDLE, "CFI_JUMP then JALR");
    step(OP_JUMP, 8'h05, CAUSE_NONE, R_NONE, ST_JUMP_ANN, "CFI_JUMP 3");
    step(OP_JR,   0,     CAUSE_NONE, R_NONE, ST_CHECK_PEND, "JR 3");
    step(OP_RET,  0,     CAUSE_INVALID_FLOW, R_NONE, ST_IDLE, "JR then RET");
    step(OP_JUMP, 8'h05, CAUSE_NONE, R_NONE, ST_JUMP_ANN, "CFI_JUMP 4");
    step(OP_JR,   0,     CAUSE_NONE, R_NONE, ST_CHECK_PEND, "JR 4");
    step(OP_CHECK, 8'h00, CAUSE_LABEL_MISMATCH, R_NONE, ST_IDLE, "CHECK 0 after JR");
    // CHECK outside a sequence
    step(OP_CHECK, 8'h70, CAUSE_NONE, R_NONE, ST_IDLE, "CHECK in IDLE: no effect");
    step(OP_CHECK, 8'h00, CAUSE_LABEL_MISMATCH, R_NONE, ST_IDLE, "CHECK 0x0 in IDLE");
    // unannounced indirect transfers
    step(OP_JALR, 0, CAUSE_NONE, R_PUSH, ST_IDLE, "unannounced JALR pushes");
    step(OP_JR,   0, CAUSE_NONE, R_NONE, ST_IDLE, "unannounced JR");
    // setjmp / longjmp
    dec.sj_index = 3'd2;
    step(OP_SETJMP, 0, CAUSE_NONE, R_SJ, ST_IDLE, "SETJMP save");
    chk(sj_index == 3'd2, "setjmp index");
    step(OP_LONGJMP, 0, CAUSE_NONE, R_LJ, ST_IDLE, "LONGJMP");
    sj_pending = 1;
    step(OP_RET, 0, CAUSE_NONE, R_NONE, ST_IDLE, "RET during longjmp unchecked");
    sj_slot_valid = 1;
    step(OP_SETJMP, 0, CAUSE_NONE, R_UNW, ST_IDLE, "SETJMP restore");
    chk(ss_unwind_sp == 8'd5, "unwind pointer");
    sj_slot_valid = 0;
    step(OP_SETJMP, 0, CAUSE_INVALID_FLOW, R_SJ, ST_IDLE, "SETJMP restore unused slot");
    sj_slot_valid = 1; ss_unwind_err = 1;
    step(OP_SETJMP, 0, CAUSE_INVALID_FLOW, R_SJ, ST_IDLE, "SETJMP restore above pointer");
    ss_unwind_err = 0; sj_pending = 0;
    dec.idx_ok = 0;
    step(OP_SETJMP, 0, CAUSE_INVALID_FLOW, R_NONE, ST_IDLE, "SETJMP index out of range");
    dec.idx_ok = 1;
    // management inside a sequence
    step(OP_CALL, 8'h11, CAUSE_NONE, R_NONE, ST_CALL_ANN, "CFI_CALL before DISABLE");
    step(OP_DISABLE, 0,  CAUSE_NONE, R_NONE, ST_IDLE, "DISABLE");
    chk(!enabled, "disabled again");
    step(OP_RET, 0, CAUSE_NONE, R_NONE, ST_IDLE, "disabled RET");
    step(OP_ENABLE, 0, CAUSE_NONE, R_NONE, ST_IDLE, "enable 2");
    step(OP_JUMP, 8'h11, CAUSE_NONE, R_NONE, ST_JUMP_ANN, "CFI_JUMP before RESET");
    step(OP_RESET, 0, CAUSE_NONE, R_CLR, ST_IDLE, "RESET");
    chk(!enabled, "reset disables");
    step(OP_RESET, 0, CAUSE_NONE, R_CLR, ST_IDLE, "RESET while disabled");
    // random phase against the reference model
    m_en = 0; m_state = ST_IDLE; m_lbl = '0;
    step(OP_ENABLE, 0, CAUSE_NONE, R_NONE, ST_IDLE, "enable for random phase");
    m_en = 1;
    repeat (20000) rand_step();
    chk(n_rand_viol > 100 && n_rand_seq > 100, "random phase reached violations and sequences");
    $display("random phase: violations=%0d completed sequences=%0d", n_rand_viol, n_rand_seq);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
