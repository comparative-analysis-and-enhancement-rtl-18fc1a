// excec_pkg -- types and constants shared by the EXCEC control-flow-integrity
// unit (decoder extension, sequence controller, shadow stack, setjmp table).
//
// Sizes follow the common implementation parameters of the design:
// shadow stack of 128 entries, recursion depth 128 (7-bit counters),
// 64 indirect calls, 64 indirect jumps, 8 distinct setjmp call sites.
// The shadow stack keeps only return-address bits [18:1]: bit 0 of an
// instruction address is always zero and the 13 upper bits are constant in
// the target memory map.
//
// The binary encoding of the custom CFI instructions is this design's own
// choice (the instruction set is given, its encoding is not): all eight use
// the I-type layout with the otherwise reserved major opcode 7'b1101011,
// funct3 selects the instruction and imm[11:0] carries the label or the
// setjmp index; rd and rs1 are zero.
//
// Lint note: a tool that checks one module at a time reports the constants
// of this package that the module in question does not use (unused
// parameter); every constant here is used by at least one module or by the
// testbenches, so these reports are expected.
package excec_pkg;

  // ---- common implementation parameters -------------------------------
  // (the first two are defaults of the module parameters of the same name)
  localparam int unsigned SHADOW_STACK_SIZE_DEF = 128;
  localparam int unsigned RECURSION_DEPTH_DEF   = 128;
  localparam int unsigned INDIRECT_CALLS    = 64;
  localparam int unsigned INDIRECT_JUMPS    = 64;
  localparam int unsigned SETJMP_CALLS      = 8;

  // Stored return-address slice [ADDR_MSB:ADDR_LSB]
  localparam int unsigned ADDR_MSB = 18;
  localparam int unsigned ADDR_LSB = 1;
  localparam int unsigned RA_W     = ADDR_MSB - ADDR_LSB + 1;   // 18

  // One label per indirect call site and per indirect jump site, plus the
  // reserved violation label 0x0.
  localparam int unsigned LABEL_W  = $clog2(INDIRECT_CALLS + INDIRECT_JUMPS + 1); // 8

  // ---- custom instruction encoding (design choice) --------------------
  localparam logic [6:0] OPC_CFI    = 7'b1101011;
  localparam logic [6:0] OPC_JAL    = 7'b1101111;
  localparam logic [6:0] OPC_JALR   = 7'b1100111;
  localparam logic [4:0] REG_RA     = 5'd1;

  localparam logic [2:0] F3_CALL    = 3'd0;
  localparam logic [2:0] F3_JUMP    = 3'd1;
  localparam logic [2:0] F3_CHECK   = 3'd2;
  localparam logic [2:0] F3_SETJMP  = 3'd3;
  localparam logic [2:0] F3_LONGJMP = 3'd4;
  localparam logic [2:0] F3_ENABLE  = 3'd5;
  localparam logic [2:0] F3_DISABLE = 3'd6;
  localparam logic [2:0] F3_RESET   = 3'd7;

  // ---- decoded operation ----------------------------------------------
  typedef enum logic [3:0] {
    OP_NONE    = 4'd0,   // not control-flow relevant
    OP_JAL     = 4'd1,   // direct call (jal ra, ...)          -> push
    OP_JALR    = 4'd2,   // indirect call (jalr ra, rs1)       -> push
    OP_JR      = 4'd3,   // indirect jump (jalr x0, rs1 != ra)
    OP_RET     = 4'd4,   // return (jalr x0, 0(ra))            -> check/pop
    OP_CALL    = 4'd5,   // CFI_CALL label
    OP_JUMP    = 4'd6,   // CFI_JUMP label
    OP_CHECK   = 4'd7,   // CFI_CHECK label
    OP_SETJMP  = 4'd8,   // CFI_SETJMP index
    OP_LONGJMP = 4'd9,   // CFI_LONGJMP
    OP_ENABLE  = 4'd10,  // CFI_ENABLE
    OP_DISABLE = 4'd11,  // CFI_DISABLE
    OP_RESET   = 4'd12   // CFI_RESET
  } cfi_op_e;

  // ---- controller states (Fig. "valid instruction sequences") ----------
  // JAL, RET and CFI_CHECK are single-instruction actions that return to
  // IDLE, so only the states that span instructions are stored.
  typedef enum logic [1:0] {
    ST_IDLE       = 2'd0,
    ST_CALL_ANN   = 2'd1,   // after CFI_CALL, expecting JALR
    ST_JUMP_ANN   = 2'd2,   // after CFI_JUMP, expecting JR
    ST_CHECK_PEND = 2'd3    // after JALR / JR, expecting CFI_CHECK
  } cfi_state_e;

  // ---- violation causes -----------------------------------------------
  typedef enum logic [2:0] {
    CAUSE_NONE           = 3'd0,
    CAUSE_STACK_FULL     = 3'd1,  // push on full stack or recursion bound hit
    CAUSE_STACK_EMPTY    = 3'd2,  // return with empty shadow stack
    CAUSE_RET_MISMATCH   = 3'd3,  // return address differs from stack top
    CAUSE_LABEL_MISMATCH = 3'd4,  // CFI_CHECK label differs / label 0x0
    CAUSE_INVALID_FLOW   = 3'd5   // instruction outside the valid sequences
  } cfi_cause_e;

  typedef struct packed {
    cfi_op_e              op;
    logic [LABEL_W-1:0]   label;     // CFI_CALL / CFI_JUMP / CFI_CHECK
    logic [$clog2(SETJMP_CALLS)-1:0] sj_index;  // CFI_SETJMP
    logic                 idx_ok;    // index below SETJMP_CALLS
  } cfi_dec_t;

  // Build a custom CFI instruction word (used by testbenches and firmware
  // generators).
  function automatic logic [31:0] cfi_instr(logic [2:0] f3, logic [11:0] imm);
    return {imm, 5'd0, f3, 5'd0, OPC_CFI};
  endfunction

endpackage
