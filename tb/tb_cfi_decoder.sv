// tb_cfi_decoder -- self-checking testbench of cfi_decoder.
//
// Drives directed instructions (every custom CFI instruction, call, return,
// indirect jump, plain jump, compressed forms) and 4000 random instruction
// words built around the interesting opcodes, and compares the decoded
// operation, label, setjmp index and return-address slice with a reference
// decoder written here from the RISC-V encodings. The decoder is purely
// combinational; each vector is checked 1 ns after it is applied.
module tb_cfi_decoder;
  import excec_pkg::*;

  logic [31:0]     instr, pc;
  logic            is_c;
  cfi_dec_t        dec;
  logic [RA_W-1:0] ra;
  int checks = 0, failures = 0;

  cfi_decoder dut (
    .instr_i         (instr),
    .pc_i            (pc),
    .is_compressed_i (is_c),
    .dec_o           (dec),
    .ret_addr_o      (ra)
  );

  // reference: operation of an instruction word
  function automatic cfi_op_e ref_op(logic [31:0] w);
    logic [4:0] rd_f  = w[11:7];
    logic [4:0] rs1_f = w[19:15];
    logic [2:0] f3    = w[14:12];
    if (w[6:0] == 7'h6F) return (rd_f == 5'd1) ? OP_JAL : OP_NONE;
    if (w[6:0] == 7'h67) begin
      if (f3 != 3'b000)                                 return OP_NONE;
      if (rd_f == 5'd1)                                 return OP_JALR;
      if (rd_f == 5'd0 && rs1_f == 5'd1 && w[31:20] == 12'h000) return OP_RET;
      if (rd_f == 5'd0)                                 return OP_JR;
      return OP_NONE;
    end
    if (w[6:0] == 7'h6B && rd_f == 5'd0 && rs1_f == 5'd0) begin
      case (f3)
        3'd0: return OP_CALL;
        3'd1: return OP_JUMP;
        3'd2: return OP_CHECK;
        3'd3: return OP_SETJMP;
        3'd4: return OP_LONGJMP;
        3'd5: return OP_ENABLE;
        3'd6: return OP_DISABLE;
        default: return OP_RESET;
      endcase
    end
    return OP_NONE;
  endfunction

  task automatic check(input logic [31:0] w, input logic [31:0] p, input logic c);
    logic [31:0] nxt;
    instr = w; pc = p; is_c = c;
    #1;
    nxt = p + (c ? 2 : 4);
    checks++;
    if (dec.op !== ref_op(w)) begin
      failures++;
      $display("FAIL op: instr=%h got %s exp %s", w, dec.op.name(), ref_op(w).name());
    end
    checks++;
    if (ra !== nxt[18:1]) begin
      failures++;
      $display("FAIL ret addr: pc=%h c=%0d got %h exp %h", p, c, ra, nxt[18:1]);
    end
    if (ref_op(w) inside {OP_CALL, OP_JUMP, OP_CHECK}) begin
      checks++;
      if (dec.label !== w[20 +: LABEL_W]) begin
        failures++;
        $display("FAIL label: instr=%h got %h", w, dec.label);
      end
    end
    if (ref_op(w) == OP_SETJMP) begin
      checks++;
      if (dec.idx_ok !== (w[31:20] < 12'd8) || (w[31:20] < 12'd8 && dec.sj_index !== w[22:20])) begin
        failures++;
        $display("FAIL setjmp index: instr=%h got %0d ok=%0d", w, dec.sj_index, dec.idx_ok);
      end
    end
  endtask

  function automatic logic [31:0] jalr(logic [4:0] rd_f, logic [4:0] rs1_f, logic [11:0] off);
    return {off, rs1_f, 3'b000, rd_f, 7'h67};
  endfunction

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] w;
    int sel;
    // directed
    check(cfi_instr(F3_CALL,    12'h042), 32'h1C00_0100, 1'b0);
    check(cfi_instr(F3_JUMP,    12'h07F), 32'h1C00_0104, 1'b0);
    check(cfi_instr(F3_CHECK,   12'h000), 32'h1C00_0108, 1'b0);
    check(cfi_instr(F3_CHECK,   12'h060), 32'h1C00_010C, 1'b0);
    check(cfi_instr(F3_SETJMP,  12'h003), 32'h1C00_0110, 1'b0);
    check(cfi_instr(F3_SETJMP,  12'h009), 32'h1C00_0110, 1'b0);
    check(cfi_instr(F3_LONGJMP, 12'h000), 32'h1C00_0114, 1'b0);
    check(cfi_instr(F3_ENABLE,  12'h000), 32'h1C00_0118, 1'b0);
    check(cfi_instr(F3_DISABLE, 12'h000), 32'h1C00_011C, 1'b0);
    check(cfi_instr(F3_RESET,   12'h000), 32'h1C00_0120, 1'b0);
    check(32'h0100_00EF,                  32'h1C00_0124, 1'b0);  // jal ra, +16
    check(32'h0100_006F,                  32'h1C00_0128, 1'b0);  // j +16 (no call)
    check(jalr(5'd1, 5'd19, 12'h0),       32'h1C00_012C, 1'b0);  // call s3
    check(jalr(5'd1, 5'd1,  12'h0),       32'h1C00_012E, 1'b1);  // c.jalr ra
    check(jalr(5'd0, 5'd1,  12'h0),       32'h1C00_0130, 1'b1);  // c.ret
    check(jalr(5'd0, 5'd1,  12'h4),       32'h1C00_0132, 1'b0);  // jr 4(ra): jump
    check(jalr(5'd0, 5'd6,  12'h0),       32'h1C00_0136, 1'b0);  // jr t1
    check(jalr(5'd5, 5'd6,  12'h0),       32'h1C00_013A, 1'b0);  // jalr t0: none
    check(32'h0000_0013,                  32'h1C00_013E, 1'b0);  // nop
    check({12'h042, 5'd3, 3'd0, 5'd0, 7'h6B}, 32'h1C00_0140, 1'b0); // rs1 != 0
    // random
    repeat (4000) begin
      w = $urandom;
      sel = $urandom_range(0, 3);
      case (sel)
        0: w[6:0] = 7'h6F;
        1: begin w[6:0] = 7'h67; if ($urandom_range(0, 1) != 0) w[14:12] = 3'b000; end
        2: begin w[6:0] = 7'h6B; if ($urandom_range(0, 3) != 0) begin w[11:7] = 0; w[19:15] = 0; end end
        default: ;
      endcase
      if ($urandom_range(0, 1) != 0) w[11:7]  = 5'($urandom_range(0, 1));
      if ($urandom_range(0, 1) != 0) w[19:15] = 5'($urandom_range(0, 1));
      if ($urandom_range(0, 2) == 0) w[31:20] = 12'($urandom_range(0, 12));
      check(w, $urandom & 32'hFFFF_FFFE, 1'($urandom_range(0, 1)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
