// tb_setjmp_table -- self-checking testbench of setjmp_table (8 slots,
// 8-bit pointers).
//
// A reference model holds the saved pointers, their valid bits and the
// "longjmp announced" flag. Directed steps save and restore one slot, read
// an unused slot and clear the table; then 5000 random CFI_SETJMP,
// CFI_LONGJMP and clear requests are applied. Before every clock edge the
// pending flag and the slot read-out for the requested index are compared
// with the model. Every request takes effect at the next clock edge.
module tb_setjmp_table;
  localparam int unsigned N = 8;
  localparam int unsigned SP_W = 8;

  logic clk = 0, rst_n = 0;
  logic clear, longjmp, setjmp;
  logic [2:0] index;
  logic [SP_W-1:0] sp, slot_sp;
  logic pending, slot_valid;
  int checks = 0, failures = 0;
  int n_save = 0, n_restore = 0;

  setjmp_table dut (
    .clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .longjmp_i(longjmp),
    .setjmp_i(setjmp), .index_i(index), .sp_i(sp),
    .pending_o(pending), .slot_valid_o(slot_valid), .slot_sp_o(slot_sp)
  );

  always #5 clk = ~clk;

  logic [SP_W-1:0] m_sp[N];
  bit              m_valid[N];
  bit              m_pend;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // kind: 0 idle, 1 setjmp, 2 longjmp, 3 clear
  task automatic req(input int kind, input int idx, input int cur_sp);
    clear = (kind == 3); setjmp = (kind == 1); longjmp = (kind == 2);
    index = 3'(idx); sp = SP_W'(cur_sp);
    #1;
    chk(pending == m_pend, "pending flag");
    chk(slot_valid == m_valid[idx], "slot valid");
    if (m_valid[idx]) chk(slot_sp == m_sp[idx], "slot pointer");
    case (kind)
      1: if (m_pend) begin m_pend = 0; n_restore++; end
         else begin m_sp[idx] = SP_W'(cur_sp); m_valid[idx] = 1; n_save++; end
      2: m_pend = 1;
      3: begin m_pend = 0; foreach (m_valid[i]) m_valid[i] = 0; end
      default: ;
    endcase
    @(posedge clk);
    #1;
    clear = 0; setjmp = 0; longjmp = 0;
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k;
    clear = 0; setjmp = 0; longjmp = 0; index = 0; sp = 0;
    m_pend = 0; foreach (m_valid[i]) m_valid[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    req(1, 3, 17);      // setjmp at depth 17 -> saved
    req(0, 3, 0);
    chk(slot_valid && slot_sp == 8'd17, "directed save");
    req(2, 0, 25);      // longjmp announced
    req(0, 3, 0);
    chk(pending, "directed pending");
    req(1, 3, 26);      // second return: restore, flag cleared
    req(0, 3, 0);
    chk(!pending && slot_sp == 8'd17, "directed restore");
    req(0, 5, 0);
    chk(!slot_valid, "unused slot");
    req(3, 0, 0);
    req(0, 3, 0);
    chk(!slot_valid, "cleared slot");
    repeat (5000) begin
      k = $urandom_range(0, 9);
      req(k < 6 ? 1 : (k < 9 ? 2 : ($urandom_range(0, 9) == 0 ? 3 : 0)),
          $urandom_range(0, N - 1), $urandom_range(0, 128));
    end
    chk(n_save > 0 && n_restore > 0, "save and restore seen");
    $display("saves=%0d restores=%0d", n_save, n_restore);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
