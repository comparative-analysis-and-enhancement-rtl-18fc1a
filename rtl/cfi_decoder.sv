// cfi_decoder -- decoder extension of the EXCEC CFI unit.
//
// Classifies the instruction that leaves the core's decode stage into the
// control-flow operations the CFI unit acts on. Besides the eight custom CFI
// instructions (CFI_CALL/JUMP/CHECK/SETJMP/LONGJMP/ENABLE/DISABLE/RESET) it
// recognises the existing RISC-V control transfers, so that returns are
// protected without any added instruction:
//   JAL  ra, off        -> OP_JAL   (direct call, pushes)
//   JALR ra, off(rs1)   -> OP_JALR  (indirect call, pushes)
//   JALR x0, 0(ra)      -> OP_RET   (return, checked against the stack)
//   JALR x0, off(rs1)   -> OP_JR    (indirect jump; rs1 != ra or off != 0)
// JAL with rd = x0 is a plain direct jump and is ignored. Only x1 (ra) is
// taken as link register (the compiler's call convention); treating x5 as
// an alternate link is not done. Compressed instructions are expected in
// their expanded 32-bit form, as the core's compressed decoder delivers
// them, with is_compressed_i telling the instruction length.
//
// The return address of a call (pc + 2 or pc + 4) is computed here and
// handed on as the stored slice [ADDR_MSB:ADDR_LSB].
//
// Purely combinational; outputs are valid in the cycle the instruction is
// presented. Which instructions are recognised follows the design; the bit
// encoding of the custom ones is this design's choice (see excec_pkg).
//
// Lint note: bits [31:19] and [0] of the computed link address are unused
// on purpose; only the slice [18:1] is stored.
module cfi_decoder
  import excec_pkg::*;
(
  input  logic [31:0]       instr_i,          // expanded instruction word
  input  logic [31:0]       pc_i,             // its address
  input  logic              is_compressed_i,  // 16-bit instruction
  output cfi_dec_t          dec_o,            // operation, label, index
  output logic [RA_W-1:0]   ret_addr_o        // link address slice of a call
);

  logic [6:0]  opcode;
  logic [4:0]  rd, rs1;
  logic [2:0]  funct3;
  logic [11:0] imm;
  logic [31:0] link;

  assign opcode = instr_i[6:0];
  assign rd     = instr_i[11:7];
  assign funct3 = instr_i[14:12];
  assign rs1    = instr_i[19:15];
  assign imm    = instr_i[31:20];
  assign link   = pc_i + (is_compressed_i ? 32'd2 : 32'd4);
  assign ret_addr_o = link[ADDR_MSB:ADDR_LSB];

  always_comb begin
    dec_o          = '0;
    dec_o.op       = OP_NONE;
    dec_o.label    = imm[LABEL_W-1:0];
    dec_o.sj_index = imm[$clog2(SETJMP_CALLS)-1:0];
    dec_o.idx_ok   = (imm < 12'(SETJMP_CALLS));

    unique case (opcode)
      OPC_JAL: begin
        if (rd == REG_RA) dec_o.op = OP_JAL;
      end
      OPC_JALR: begin
        if (funct3 == 3'b000) begin
          if (rd == REG_RA)                        dec_o.op = OP_JALR;
          else if (rd == 5'd0 && rs1 == REG_RA && imm == 12'd0)
                                                   dec_o.op = OP_RET;
          else if (rd == 5'd0)                     dec_o.op = OP_JR;
          // jalr with another link register: not a tracked transfer
        end
      end
      OPC_CFI: begin
        if (rd == 5'd0 && rs1 == 5'd0) begin
          unique case (funct3)
            F3_CALL:    dec_o.op = OP_CALL;
            F3_JUMP:    dec_o.op = OP_JUMP;
            F3_CHECK:   dec_o.op = OP_CHECK;
            F3_SETJMP:  dec_o.op = OP_SETJMP;
            F3_LONGJMP: dec_o.op = OP_LONGJMP;
            F3_ENABLE:  dec_o.op = OP_ENABLE;
            F3_DISABLE: dec_o.op = OP_DISABLE;
            F3_RESET:   dec_o.op = OP_RESET;
            default:    dec_o.op = OP_NONE;
          endcase
        end
      end
      default: dec_o.op = OP_NONE;
    endcase
  end

endmodule
