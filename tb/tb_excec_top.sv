// tb_excec_top -- end-to-end testbench of the EXCEC CFI unit at its default
// sizes (shadow stack 128 entries, recursion depth 128, 8 setjmp slots).
//
// The testbench plays the core: it walks a randomly generated program and
// presents one executed instruction per cycle (instruction word, pc,
// compressed flag, jump target). The program keeps its own call stack of
// full 32-bit return addresses, the way the software stack would hold them.
// Instrumented like the compiler would do it, it makes:
//   direct calls (jal ra) and returns (ret), 16- and 32-bit forms;
//   direct recursion bursts of one call site;
//   indirect calls CFI_CALL L / jalr ra / CFI_CHECK L, some through a
//   trampoline that compares the target with its table and ends in
//   CFI_CHECK 0x0 when nothing matches;
//   indirect jumps CFI_JUMP L / jr / CFI_CHECK L;
//   setjmp (CFI_SETJMP i after the call) and longjmp (CFI_LONGJMP, call,
//   return to the setjmp site, CFI_SETJMP i unwinds);
//   stretches with CFI_DISABLE ... CFI_ENABLE;
//   interrupts, requested at random and taken only at an instruction
//   boundary where irq_disable_o is low, with a handler that calls a
//   function.
// A legal walk must give no violation. Attacks are then injected: a return
// to a corrupted address, a wrong label, a jump past CFI_CHECK, a trampoline
// miss, a return with an empty stack, a call chain deeper than the stack
// and a recursion deeper than the counter. Each must be answered with the
// right cause in the cycle of the offending instruction; the "exception
// handler" then issues CFI_RESET and CFI_ENABLE and the walk restarts.
// The expected cause and stack depth come from the program's own call stack
// and a reference model of depth and recursion folding kept here. Every
// mechanism is counted, and one that never happened is a failure.
module tb_excec_top;
  import excec_pkg::*;

  localparam int unsigned SSZ   = excec_pkg::SHADOW_STACK_SIZE_DEF;
  localparam int unsigned DEPTH = excec_pkg::RECURSION_DEPTH_DEF;
  localparam logic [31:0] CODE_BASE = 32'h1C00_8000;

  logic clk = 0, rst_n = 0;
  logic instr_valid, is_c;
  logic [31:0] instr, pc, target;
  logic violation, irq_dis, enabled, ss_rec;
  cfi_cause_e cause;
  cfi_state_e state;
  logic [7:0] depth;

  excec_top dut (
    .clk_i(clk), .rst_ni(rst_n), .instr_valid_i(instr_valid), .instr_i(instr),
    .pc_i(pc), .is_compressed_i(is_c), .target_i(target),
    .violation_o(violation), .cause_o(cause), .irq_disable_o(irq_dis),
    .enabled_o(enabled), .state_o(state), .ss_depth_o(depth), .ss_recursion_o(ss_rec)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_push = 0, n_ipush = 0, n_rec = 0, n_pop = 0, n_lbl_ok = 0, n_jmp_ok = 0,
      n_tramp = 0, n_full = 0, n_rec_bound = 0, n_empty = 0, n_ret_mis = 0,
      n_lbl_mis = 0, n_tramp_miss = 0, n_inv = 0, n_sj_save = 0, n_sj_unwind = 0,
      n_irq_taken = 0, n_irq_deferred = 0, n_disable = 0, n_reset = 0;

  // ---------------- program model ----------------
  logic [31:0] sw_ra[$];     // software return addresses (full width)
  logic [31:0] sw_site[$];   // pc of the call that made each frame
  // reference model of the shadow stack: depth after recursion folding
  logic [RA_W-1:0] m_addr[$];
  int              m_cnt[$];
  bit  m_en = 0;
  bit  irq_req = 0, in_isr = 0;
  bit  no_irq = 0;                  // no interrupt while a longjmp is in flight

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 30)
        $display("FAIL %s at %0t: cause=%s state=%s depth=%0d model=%0d",
                 what, $time, cause.name(), state.name(), depth, m_addr.size());
    end
  endtask

  function automatic logic [31:0] rnd_pc();
    return CODE_BASE + ({$urandom} % 32'h3_0000 & 32'hFFFF_FFFE);
  endfunction
  function automatic logic [31:0] w_jal();
    return {20'h00100, 5'd1, 7'h6F};
  endfunction
  function automatic logic [31:0] w_jalr(logic [4:0] rd_f, logic [4:0] rs1_f);
    return {12'h000, rs1_f, 3'b000, rd_f, 7'h67};
  endfunction
  localparam logic [31:0] W_NOP = 32'h0000_0013;

  // model: would a push of address a be refused / folded?
  function automatic bit m_push_err(logic [RA_W-1:0] a);
    int n = m_addr.size();
    if (n > 0 && m_addr[n-1] == a) return m_cnt[n-1] == DEPTH - 1;
    return n == SSZ;
  endfunction
  task automatic m_push(logic [RA_W-1:0] a);
    int n = m_addr.size();
    if (n > 0 && m_addr[n-1] == a) m_cnt[n-1]++;
    else begin m_addr.push_back(a); m_cnt.push_back(0); end
  endtask
  task automatic m_pop();
    int n = m_addr.size();
    if (m_cnt[n-1] > 0) m_cnt[n-1]--;
    else begin void'(m_addr.pop_back()); void'(m_cnt.pop_back()); end
  endtask

  // instruction boundary: a pending interrupt is taken here unless masked.
  // Actions call it before they work out their expectations, because the
  // handler's own calls and returns move the shadow stack meanwhile.
  task automatic boundary();
    while (irq_req && !in_isr && !no_irq && !irq_dis) begin
      irq_req = 0;
      take_irq();
    end
    if (irq_req && !in_isr && !no_irq && irq_dis) n_irq_deferred++;
  endtask

  // present one instruction, check the answer, clock
  task automatic emit(input logic [31:0] w, input logic [31:0] p, input bit c,
                      input logic [31:0] tgt, input cfi_cause_e exp, input string what);
    boundary();
    chk(irq_dis == (enabled && state != ST_IDLE), {what, ": interrupt mask"});
    instr_valid = 1; instr = w; pc = p; is_c = c; target = tgt;
    #1;
    chk(cause == exp, {what, ": cause"});
    @(posedge clk);
    #1;
    instr_valid = 0;
    chk(int'(depth) == m_addr.size(), {what, ": shadow stack depth"});
    if ($urandom_range(0, 59) == 0) irq_req = 1;
  endtask

  // after a violation: the handler resets and re-enables CFI
  task automatic recover();
    bit save = no_irq;
    no_irq = 1;
    m_addr.delete(); m_cnt.delete(); sw_ra.delete(); sw_site.delete();
    m_en = 0;
    emit(cfi_instr(F3_RESET, 0), rnd_pc(), 0, 0, CAUSE_NONE, "handler CFI_RESET");
    n_reset++;
    emit(cfi_instr(F3_ENABLE, 0), rnd_pc(), 0, 0, CAUSE_NONE, "handler CFI_ENABLE");
    m_en = 1;
    no_irq = save;
  endtask

  // ---------------- program actions ----------------
  // direct call from site p (returns 1 if it was refused)
  task automatic call_direct(input logic [31:0] p, input bit c);
    logic [31:0] ra = p + (c ? 2 : 4);
    bit err, fold;
    boundary();
    err  = m_en && m_push_err(ra[18:1]);
    fold = m_addr.size() > 0 && m_addr[m_addr.size()-1] == ra[18:1];
    if (m_en && !err) begin
      if (fold) n_rec++;
      m_push(ra[18:1]);
    end
    emit(w_jal(), p, c, rnd_pc(), err ? CAUSE_STACK_FULL : CAUSE_NONE, "jal");
    if (err) begin
      if (m_addr[m_addr.size()-1] == ra[18:1]) n_rec_bound++; else n_full++;
      recover();
    end else begin
      if (m_en) n_push++;
      sw_ra.push_back(ra); sw_site.push_back(p);
    end
  endtask

  task automatic ret_normal();
    logic [31:0] ra;
    boundary();
    ra = sw_ra.pop_back();
    void'(sw_site.pop_back());
    if (m_en) begin m_pop(); n_pop++; end
    emit(w_jalr(5'd0, 5'd1), rnd_pc(), 1'($urandom_range(0, 1)), ra, CAUSE_NONE, "ret");
  endtask

  // indirect call, optionally through a trampoline
  task automatic call_indirect(input bit tramp, input bit miss);
    logic [31:0] p = rnd_pc();
    logic [31:0] ra = p + 4;
    logic [LABEL_W-1:0] l = LABEL_W'($urandom_range(1, 127));
    bit err;
    emit(cfi_instr(F3_CALL, 12'(l)), p - 4, 0, 0, CAUSE_NONE, "cfi_call");
    err = m_push_err(ra[18:1]);
    if (!err) m_push(ra[18:1]);
    emit(w_jalr(5'd1, 5'd19), p, 0, rnd_pc(), err ? CAUSE_STACK_FULL : CAUSE_NONE, "jalr");
    if (err) begin n_full++; recover(); return; end
    n_ipush++;
    sw_ra.push_back(ra); sw_site.push_back(p);
    emit(cfi_instr(F3_CHECK, 12'(l)), rnd_pc(), 0, 0, CAUSE_NONE, "cfi_check");
    n_lbl_ok++;
    if (tramp) begin
      // lw s3 / addi sp / la t0 / beq s3,t0 ... (ordinary instructions)
      repeat (4 + 2 * $urandom_range(0, 2)) emit(W_NOP, rnd_pc(), 0, 0, CAUSE_NONE, "trampoline body");
      if (miss) begin
        emit(cfi_instr(F3_CHECK, 0), rnd_pc(), 0, 0, CAUSE_LABEL_MISMATCH, "trampoline miss");
        n_tramp_miss++;
        recover();
        return;
      end
      n_tramp++;
    end
  endtask

  task automatic jump_indirect();
    logic [LABEL_W-1:0] l = LABEL_W'($urandom_range(1, 127));
    emit(cfi_instr(F3_JUMP, 12'(l)), rnd_pc(), 0, 0, CAUSE_NONE, "cfi_jump");
    emit(w_jalr(5'd0, 5'd10), rnd_pc(), 0, rnd_pc(), CAUSE_NONE, "jr");
    emit(cfi_instr(F3_CHECK, 12'(l)), rnd_pc(), 0, 0, CAUSE_NONE, "cfi_check jump");
    n_jmp_ok++;
  endtask

  task automatic take_irq();
    logic [31:0] p = rnd_pc();
    in_isr = 1;
    n_irq_taken++;
    emit(W_NOP, p, 0, 0, CAUSE_NONE, "isr entry");
    if (m_addr.size() < SSZ - 1) call_direct(p + 4, 0);
    if (sw_site.size() > 0 && sw_site[sw_site.size()-1] == p + 4) begin
      emit(W_NOP, rnd_pc(), 0, 0, CAUSE_NONE, "isr callee");
      ret_normal();
    end
    emit(32'h3020_0073, rnd_pc(), 0, 0, CAUSE_NONE, "mret");
    in_isr = 0;
  endtask

  // one step of the legal random walk
  task automatic walk_step();
    int k = $urandom_range(0, 99);
    int d = sw_ra.size();
    if (k < 30 && d < 40)       call_direct(rnd_pc(), 1'($urandom_range(0, 1)));
    else if (k < 55 && d > 0)   ret_normal();
    else if (k < 62 && d < 40)  call_indirect(1'($urandom_range(0, 1)), 0);
    else if (k < 67)            jump_indirect();
    else if (k < 70 && d < 30) begin  // recursion burst of one site
      logic [31:0] p = rnd_pc();
      int r = $urandom_range(2, 12);
      for (int i = 0; i < r; i++) call_direct(p, 0);
      for (int i = 0; i < r; i++) if (sw_ra.size() > 0) ret_normal();
    end
    else if (k < 72 && d < 30) do_setjmp_walk();
    else if (k < 74)            disabled_stretch();
    else                        emit(W_NOP, rnd_pc(), 0, 0, CAUSE_NONE, "alu");
  endtask

  // setjmp, deeper calls, then longjmp back
  task automatic do_setjmp_walk();
    int idx = $urandom_range(0, SETJMP_CALLS - 1);
    int d0, p0;
    logic [31:0] p = rnd_pc();
    call_direct(p, 0);
    ret_normal();
    d0 = sw_ra.size();
    p0 = m_addr.size();
    emit(cfi_instr(F3_SETJMP, 12'(idx)), p + 4, 0, 0, CAUSE_NONE, "cfi_setjmp save");
    n_sj_save++;
    repeat ($urandom_range(1, 6)) call_direct(rnd_pc(), 0);
    no_irq = 1;
    emit(cfi_instr(F3_LONGJMP, 0), rnd_pc(), 0, 0, CAUSE_NONE, "cfi_longjmp");
    p = rnd_pc();
    call_direct(p, 0);
    emit(w_jalr(5'd0, 5'd1), rnd_pc(), 0, rnd_pc(), CAUSE_NONE, "longjmp ret");
    while (sw_ra.size() > d0) begin void'(sw_ra.pop_back()); void'(sw_site.pop_back()); end
    while (m_addr.size() > p0) begin void'(m_addr.pop_back()); void'(m_cnt.pop_back()); end
    emit(cfi_instr(F3_SETJMP, 12'(idx)), rnd_pc(), 0, 0, CAUSE_NONE, "cfi_setjmp unwind");
    no_irq = 0;
    chk(int'(depth) == p0, "shadow stack unwound to setjmp pointer");
    n_sj_unwind++;
  endtask

  // CFI off for a balanced piece of code (startup-like)
  task automatic disabled_stretch();
    int d0 = sw_ra.size();
    emit(cfi_instr(F3_DISABLE, 0), rnd_pc(), 0, 0, CAUSE_NONE, "cfi_disable");
    m_en = 0;
    n_disable++;
    repeat ($urandom_range(1, 4)) call_direct(rnd_pc(), 0);
    emit(cfi_instr(F3_CHECK, 0), rnd_pc(), 0, 0, CAUSE_NONE, "check 0 while disabled");
    while (sw_ra.size() > d0) ret_normal();
    emit(cfi_instr(F3_ENABLE, 0), rnd_pc(), 0, 0, CAUSE_NONE, "cfi_enable");
    m_en = 1;
  endtask

  initial begin : watchdog
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] p;
    instr_valid = 0; instr = 0; pc = 0; is_c = 0; target = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    // startup code runs with CFI off: nothing is tracked
    call_direct(rnd_pc(), 0);
    ret_normal();
    chk(!enabled && depth == 0, "startup untracked");
    emit(cfi_instr(F3_ENABLE, 0), rnd_pc(), 0, 0, CAUSE_NONE, "cfi_enable");
    m_en = 1;

    // ---- legal program walk: no violation allowed ----
    repeat (4000) walk_step();
    while (sw_ra.size() > 0) ret_normal();

    // ---- attacks ----
    repeat (5) begin
      // corrupted return address (bits [18:1] changed)
      call_direct(rnd_pc(), 0);
      call_direct(rnd_pc(), 1);
      begin
        automatic logic [31:0] bad = sw_ra[sw_ra.size()-1] ^ (32'h1 << $urandom_range(1, 18));
        emit(w_jalr(5'd0, 5'd1), rnd_pc(), 0, bad, CAUSE_RET_MISMATCH, "ret to corrupted address");
        n_ret_mis++;
        recover();
      end
      // wrong label at the target of an indirect call
      emit(cfi_instr(F3_CALL, 12'h42), rnd_pc(), 0, 0, CAUSE_NONE, "cfi_call");
      p = rnd_pc();
      m_push(18'(((p + 4) >> 1)));
      emit(w_jalr(5'd1, 5'd19), p, 0, rnd_pc(), CAUSE_NONE, "jalr");
      emit(cfi_instr(F3_CHECK, 12'h43), rnd_pc(), 0, 0, CAUSE_LABEL_MISMATCH, "wrong label");
      n_lbl_mis++;
      recover();
      // indirect jump that skips the CFI_CHECK of its target
      emit(cfi_instr(F3_JUMP, 12'h17), rnd_pc(), 0, 0, CAUSE_NONE, "cfi_jump");
      emit(w_jalr(5'd0, 5'd10), rnd_pc(), 0, rnd_pc(), CAUSE_NONE, "jr");
      emit(W_NOP, rnd_pc(), 0, 0, CAUSE_INVALID_FLOW, "jump past cfi_check");
      n_inv++;
      recover();
      // trampoline without a matching entry
      call_indirect(1, 1);
      // return with an empty shadow stack
      emit(w_jalr(5'd0, 5'd1), rnd_pc(), 0, rnd_pc(), CAUSE_STACK_EMPTY, "ret on empty stack");
      n_empty++;
      recover();
    end

    // ---- capacity: call chain deeper than the stack ----
    while (n_full == 0) begin
      call_direct(rnd_pc(), 0);
      if (sw_ra.size() > SSZ + 2) break;
    end
    chk(n_full > 0, "stack full at 128 frames");
    // ---- recursion deeper than the counter ----
    p = rnd_pc();
    while (n_rec_bound == 0) begin
      call_direct(p, 0);
      if (sw_ra.size() > DEPTH + 2) break;
    end
    chk(n_rec_bound > 0, "recursion bound at 128 calls");

    // ---- mechanisms seen ----
    chk(n_push > 0, "JAL push");
    chk(n_ipush > 0, "JALR push");
    chk(n_rec > 0, "recursion folding");
    chk(n_pop > 0, "RET pop");
    chk(n_lbl_ok > 0, "call label check");
    chk(n_jmp_ok > 0, "jump label check");
    chk(n_tramp > 0, "trampoline pass");
    chk(n_tramp_miss > 0, "trampoline miss");
    chk(n_ret_mis > 0 && n_lbl_mis > 0 && n_inv > 0 && n_empty > 0, "attacks");
    chk(n_sj_save > 0 && n_sj_unwind > 0, "setjmp save and unwind");
    chk(n_irq_taken > 0, "interrupt taken");
    chk(n_irq_deferred > 0, "interrupt deferred by mask");
    chk(n_disable > 0, "mode switch");
    chk(n_reset > 0, "reset");
    $display("push=%0d ipush=%0d rec=%0d pop=%0d lbl=%0d jmp=%0d tramp=%0d miss=%0d full=%0d recbound=%0d",
             n_push, n_ipush, n_rec, n_pop, n_lbl_ok, n_jmp_ok, n_tramp, n_tramp_miss, n_full, n_rec_bound);
    $display("empty=%0d retmis=%0d lblmis=%0d inv=%0d sjsave=%0d sjunw=%0d irq=%0d deferred=%0d disable=%0d reset=%0d",
             n_empty, n_ret_mis, n_lbl_mis, n_inv, n_sj_save, n_sj_unwind, n_irq_taken, n_irq_deferred, n_disable, n_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
