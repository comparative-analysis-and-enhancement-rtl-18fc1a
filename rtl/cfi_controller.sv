// cfi_controller -- sequence state machine of the EXCEC CFI unit.
//
// Takes one decoded instruction per cycle (instr_valid_i) and enforces the
// valid control-flow sequences of the design:
//   IDLE -> JAL (push to stack)            -> IDLE
//   IDLE -> RET (check stack, pop)         -> IDLE
//   IDLE -> CFI_CALL -> JALR (push) -> CFI_CHECK (compare label) -> IDLE
//   IDLE -> CFI_JUMP -> JR          -> CFI_CHECK (compare label) -> IDLE
// JAL, RET and CFI_CHECK are actions of a single instruction, so only the
// three states that span instructions are stored (CALL_ANN, JUMP_ANN,
// CHECK_PEND). CFI_CALL/CFI_JUMP latch their label; the CFI_CHECK that must
// follow the JALR/JR compares its label with it. Violations and their cause:
//   stack full        JAL or JALR push on a full stack / recursion bound
//   stack empty       RET with an empty shadow stack
//   return mismatch   RET target differs from the top of the shadow stack
//   label mismatch    CFI_CHECK label differs, or CFI_CHECK 0x0 anywhere
//   invalid flow      any other instruction where the sequence expects a
//                     JALR, JR or CFI_CHECK; a setjmp index out of range or
//                     a restore from an unused slot
// violation_o/cause_o are combinational in the cycle of the offending
// instruction, for the core's pipeline controller to raise an exception; the
// state machine then returns to IDLE and the stacks are left unchanged.
//
// Management: CFI_ENABLE/CFI_DISABLE switch enforcement on and off (while
// off every CFI instruction and every call/return is ignored), CFI_RESET
// clears shadow stack, setjmp table and state and disables. Out of reset the
// unit is disabled. irq_disable_o masks interrupts from a CFI_CALL/CFI_JUMP
// up to its CFI_CHECK so that a guarded transfer is atomic.
//
// setjmp/longjmp: CFI_LONGJMP marks a longjmp as announced; until the
// CFI_SETJMP that it lands on unwinds the shadow stack, returns are neither
// checked nor popped, because longjmp leaves through a return to the setjmp
// site. States, transitions and causes follow the design; the handling of an
// unannounced JALR (pushed like a JAL) and JR (passed), of returns during a
// pending longjmp, and of DISABLE/RESET inside a sequence are this design's
// choices.
//
// Lint notes: only bits [18:1] of target_i are compared with the shadow
// stack, so the other bits are reported unused; rst_ni is reported as used
// both asynchronously and synchronously because the assertions use it as
// their disable condition.
module cfi_controller
  import excec_pkg::*;
#(
  parameter int unsigned SP_W = 8,     // shadow-stack pointer width
  localparam int unsigned SJ_W = $clog2(SETJMP_CALLS)
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // from the decode stage
  input  logic               instr_valid_i,  // instruction executes this cycle
  input  cfi_dec_t           dec_i,
  input  logic [RA_W-1:0]    ret_addr_i,     // link address of a call
  input  logic [31:0]        target_i,       // jump target (return address of RET)
  // shadow stack
  output logic               ss_clear_o,
  output logic               ss_push_o,
  output logic [RA_W-1:0]    ss_push_addr_o,
  output logic               ss_pop_o,
  output logic [RA_W-1:0]    ss_pop_addr_o,
  output logic               ss_unwind_o,
  output logic [SP_W-1:0]    ss_unwind_sp_o,
  input  logic               ss_push_err_i,
  input  logic               ss_pop_empty_i,
  input  logic               ss_pop_mismatch_i,
  input  logic               ss_unwind_err_i,
  // setjmp table
  output logic               sj_clear_o,
  output logic               sj_longjmp_o,
  output logic               sj_setjmp_o,
  output logic [SJ_W-1:0]    sj_index_o,
  input  logic               sj_pending_i,
  input  logic               sj_slot_valid_i,
  input  logic [SP_W-1:0]    sj_slot_sp_i,
  // to the core
  output logic               violation_o,
  output cfi_cause_e         cause_o,
  output logic               irq_disable_o,
  output logic               enabled_o,
  output cfi_state_e         state_o
);

  cfi_state_e         state_q, state_d;
  logic [LABEL_W-1:0] label_q, label_d;
  logic               en_q, en_d;
  logic               act;     // an instruction the unit must look at
  cfi_op_e            op;

  assign op  = dec_i.op;
  assign act = instr_valid_i && en_q;

  assign ss_push_addr_o = ret_addr_i;
  assign ss_pop_addr_o  = target_i[ADDR_MSB:ADDR_LSB];
  assign ss_unwind_sp_o = sj_slot_sp_i;
  assign sj_index_o     = dec_i.sj_index;

  always_comb begin
    state_d      = state_q;
    label_d      = label_q;
    en_d         = en_q;
    ss_clear_o   = 1'b0;
    ss_push_o    = 1'b0;
    ss_pop_o     = 1'b0;
    ss_unwind_o  = 1'b0;
    sj_clear_o   = 1'b0;
    sj_longjmp_o = 1'b0;
    sj_setjmp_o  = 1'b0;
    cause_o      = CAUSE_NONE;

    if (instr_valid_i && op == OP_RESET) begin
      // CFI_RESET works whether enabled or not
      ss_clear_o = 1'b1;
      sj_clear_o = 1'b1;
      state_d    = ST_IDLE;
      label_d    = '0;
      en_d       = 1'b0;
    end else if (instr_valid_i && !en_q) begin
      if (op == OP_ENABLE) en_d = 1'b1;
    end else if (act && op == OP_DISABLE) begin
      en_d    = 1'b0;
      state_d = ST_IDLE;
    end else if (act) begin
      unique case (state_q)
        ST_IDLE: begin
          unique case (op)
            OP_JAL, OP_JALR: begin
              ss_push_o = 1'b1;
              if (ss_push_err_i) cause_o = CAUSE_STACK_FULL;
            end
            OP_RET: begin
              if (!sj_pending_i) begin
                ss_pop_o = 1'b1;
                if (ss_pop_empty_i)         cause_o = CAUSE_STACK_EMPTY;
                else if (ss_pop_mismatch_i) cause_o = CAUSE_RET_MISMATCH;
              end
            end
            OP_CALL: begin
              label_d = dec_i.label;
              state_d = ST_CALL_ANN;
            end
            OP_JUMP: begin
              label_d = dec_i.label;
              state_d = ST_JUMP_ANN;
            end
            OP_CHECK: begin
              if (dec_i.label == '0) cause_o = CAUSE_LABEL_MISMATCH;
            end
            OP_SETJMP: begin
              if (!dec_i.idx_ok) begin
                cause_o = CAUSE_INVALID_FLOW;
              end else begin
                sj_setjmp_o = 1'b1;
                if (sj_pending_i) begin
                  // second return of setjmp, through longjmp: unwind
                  if (!sj_slot_valid_i || ss_unwind_err_i) cause_o = CAUSE_INVALID_FLOW;
                  else                                     ss_unwind_o = 1'b1;
                end
              end
            end
            OP_LONGJMP: sj_longjmp_o = 1'b1;
            default: ;   // JR without announcement, ENABLE, other instructions
          endcase
        end
        ST_CALL_ANN: begin
          if (op == OP_JALR) begin
            ss_push_o = 1'b1;
            if (ss_push_err_i) cause_o = CAUSE_STACK_FULL;
            else               state_d = ST_CHECK_PEND;
          end else begin
            cause_o = CAUSE_INVALID_FLOW;
          end
        end
        ST_JUMP_ANN: begin
          if (op == OP_JR) state_d = ST_CHECK_PEND;
          else             cause_o = CAUSE_INVALID_FLOW;
        end
        ST_CHECK_PEND: begin
          if (op == OP_CHECK) begin
            if (dec_i.label != label_q || dec_i.label == '0) cause_o = CAUSE_LABEL_MISMATCH;
            else                                              state_d = ST_IDLE;
          end else begin
            cause_o = CAUSE_INVALID_FLOW;
          end
        end
        default: state_d = ST_IDLE;
      endcase
      if (cause_o != CAUSE_NONE) state_d = ST_IDLE;
    end
  end

  assign violation_o = (cause_o != CAUSE_NONE);
  assign enabled_o   = en_q;
  assign state_o     = state_q;
  // masked from the announcing instruction on, until the CFI_CHECK
  assign irq_disable_o = (en_q && state_q != ST_IDLE) ||
                         (act && (op == OP_CALL || op == OP_JUMP) && state_q == ST_IDLE);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= ST_IDLE;
      label_q <= '0;
      en_q    <= 1'b0;
    end else begin
      state_q <= state_d;
      label_q <= label_d;
      en_q    <= en_d;
    end
  end

  // a pending sequence only exists while enforcement is on
  assert property (@(posedge clk_i) disable iff (!rst_ni) !en_q |-> state_q == ST_IDLE)
    else $error("cfi_controller: sequence state while disabled");

endmodule
