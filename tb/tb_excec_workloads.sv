// tb_excec_workloads -- runs the control flow of small benchmark-style
// programs through the EXCEC unit at its default sizes and measures how much
// of the shadow stack they need.
//
// Each program is executed here as ordinary recursive SystemVerilog code
// that records its calls and returns in a trace; every call site has a fixed
// address, the way it would in a linked binary. The trace is then presented
// to excec_top one instruction per cycle, as the core would execute it:
//   factorial(20)        direct recursion from one call site
//   tak(18, 12, 6)       Takeuchi function: nested recursion from 4 sites
//   nqueens(8)           backtracking, recursion from one site in a loop
//   chain of 50 calls    50 distinct functions nested, the deepest call
//                        nesting of the target programs
//   sort with comparator insertion sort calling its comparison through a
//                        function pointer (CFI_CALL / jalr / CFI_CHECK)
//   switch interpreter   a byte-code loop whose switch is a jump table
//                        (CFI_JUMP / jr / CFI_CHECK)
// The input sizes are common textbook choices, not taken from any
// measurement. For every instruction the testbench checks that no violation
// is raised and that the shadow-stack depth equals a reference model with
// recursion folding; at the end of each program the stack must be empty
// again. The largest depth and the largest recursion count seen are
// printed per program, and the folding of recursion into counters must
// have happened. Every instruction takes one cycle.
module tb_excec_workloads;
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

  // ---------------- trace of one program ----------------
  typedef enum int {EV_CALL, EV_RET, EV_ICALL, EV_IJUMP} ev_kind_e;
  typedef struct {
    ev_kind_e    kind;
    logic [31:0] site;    // address of the call / jump instruction
    int          label;   // CFI label of an indirect transfer
  } ev_t;
  ev_t tr[$];

  // call site addresses: site n of the program sits at CODE_BASE + 0x40 * n
  function automatic logic [31:0] site(int n);
    return CODE_BASE + 32'(n) * 32'h40;
  endfunction

  function automatic void ev(ev_kind_e k, int s, int l = 0);
    ev_t e;
    e.kind = k; e.site = site(s); e.label = l;
    tr.push_back(e);
  endfunction

  // ---- the programs (site numbers are arbitrary but fixed) ----
  function automatic longint fact(int n);
    longint r;
    if (n <= 1) return 1;
    ev(EV_CALL, 10);
    r = fact(n - 1);
    ev(EV_RET, 10);
    return longint'(n) * r;
  endfunction

  function automatic int tak(int x, int y, int z);
    int a, b, c, r;
    if (y >= x) return z;
    ev(EV_CALL, 21); a = tak(x - 1, y, z); ev(EV_RET, 21);
    ev(EV_CALL, 22); b = tak(y - 1, z, x); ev(EV_RET, 22);
    ev(EV_CALL, 23); c = tak(z - 1, x, y); ev(EV_RET, 23);
    ev(EV_CALL, 24); r = tak(a, b, c);     ev(EV_RET, 24);
    return r;
  endfunction

  int q_col[8];
  function automatic bit q_safe(int row, int col);
    for (int r = 0; r < row; r++)
      if (q_col[r] == col || q_col[r] - col == row - r || col - q_col[r] == row - r) return 0;
    return 1;
  endfunction
  function automatic int queens(int row, int n);
    int cnt = 0;
    if (row == n) return 1;
    for (int col = 0; col < n; col++) begin
      ev(EV_CALL, 31); void'(q_safe(row, col)); ev(EV_RET, 31);
      if (q_safe(row, col)) begin
        q_col[row] = col;
        ev(EV_CALL, 32);
        cnt += queens(row + 1, n);
        ev(EV_RET, 32);
      end
    end
    return cnt;
  endfunction

  function automatic void chain(int lvl, int n);
    if (lvl == n) return;
    ev(EV_CALL, 100 + lvl);
    chain(lvl + 1, n);
    ev(EV_RET, 100 + lvl);
  endfunction

  int arr[16];
  function automatic void sort_cmp();
    int t, j;
    foreach (arr[i]) arr[i] = (i * 7 + 3) % 16;
    for (int i = 1; i < 16; i++) begin
      t = arr[i];
      j = i - 1;
      while (j >= 0) begin
        ev(EV_ICALL, 40, 5);            // cmp(arr[j], t) through a pointer
        ev(EV_RET, 40);
        if (arr[j] <= t) break;
        arr[j + 1] = arr[j];
        j--;
      end
      arr[j + 1] = t;
    end
  endfunction

  function automatic int interp();
    // byte code: push 3, push 4, add, dup, mul, halt -> 49
    int code[6] = '{1, 1, 2, 3, 4, 0};
    int arg[6]  = '{3, 4, 0, 0, 0, 0};
    int stk[$];
    int a, b;
    for (int ip = 0; ip < 6; ip++) begin
      ev(EV_IJUMP, 50, 64 + code[ip]);  // switch (code[ip]) via jump table
      case (code[ip])
        1: stk.push_back(arg[ip]);
        2: begin a = stk.pop_back(); b = stk.pop_back(); stk.push_back(a + b); end
        3: begin a = stk[$]; stk.push_back(a); end
        4: begin
             a = stk.pop_back(); b = stk.pop_back();
             ev(EV_CALL, 51); ev(EV_RET, 51);    // __mulsi3 helper
             stk.push_back(a * b);
           end
        default: return stk[$];
      endcase
    end
    return -1;
  endfunction

  // ---------------- driving the unit ----------------
  logic [RA_W-1:0] m_addr[$];
  int              m_cnt[$];
  int max_depth, max_cnt, n_fold;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20)
        $display("FAIL %s at %0t: cause=%s depth=%0d model=%0d", what, $time,
                 cause.name(), depth, m_addr.size());
    end
  endtask

  task automatic issue(input logic [31:0] w, input logic [31:0] p, input logic [31:0] tgt,
                       input string what);
    instr_valid = 1; instr = w; pc = p; is_c = 0; target = tgt;
    #1;
    chk(!violation, {what, ": no violation"});
    @(posedge clk);
    #1;
    instr_valid = 0;
    chk(int'(depth) == m_addr.size(), {what, ": shadow stack depth"});
    if (int'(depth) > max_depth) max_depth = int'(depth);
  endtask

  function automatic logic [31:0] w_jalr(logic [4:0] rd_f, logic [4:0] rs1_f);
    return {12'h000, rs1_f, 3'b000, rd_f, 7'h67};
  endfunction

  task automatic m_push(logic [RA_W-1:0] a);
    int n = m_addr.size();
    if (n > 0 && m_addr[n-1] == a) begin
      m_cnt[n-1]++;
      n_fold++;
      if (m_cnt[n-1] > max_cnt) max_cnt = m_cnt[n-1];
    end else begin m_addr.push_back(a); m_cnt.push_back(0); end
  endtask
  task automatic m_pop();
    int n = m_addr.size();
    if (m_cnt[n-1] > 0) m_cnt[n-1]--;
    else begin void'(m_addr.pop_back()); void'(m_cnt.pop_back()); end
  endtask

  task automatic replay(input string name);
    logic [31:0] ra;
    int n_ev = tr.size();
    max_depth = 0; max_cnt = 0; n_fold = 0;
    foreach (tr[i]) begin
      ra = tr[i].site + 4;
      case (tr[i].kind)
        EV_CALL: begin
          m_push(ra[18:1]);
          issue({20'h00100, 5'd1, 7'h6F}, tr[i].site, 32'h0, "jal");
        end
        EV_ICALL: begin
          issue(cfi_instr(F3_CALL, 12'(tr[i].label)), tr[i].site - 4, 32'h0, "cfi_call");
          m_push(ra[18:1]);
          issue(w_jalr(5'd1, 5'd15), tr[i].site, CODE_BASE + 32'h8000, "jalr");
          issue(cfi_instr(F3_CHECK, 12'(tr[i].label)), CODE_BASE + 32'h8000, 32'h0, "cfi_check");
        end
        EV_IJUMP: begin
          issue(cfi_instr(F3_JUMP, 12'(tr[i].label)), tr[i].site - 4, 32'h0, "cfi_jump");
          issue(w_jalr(5'd0, 5'd15), tr[i].site, CODE_BASE + 32'h9000, "jr");
          issue(cfi_instr(F3_CHECK, 12'(tr[i].label)), CODE_BASE + 32'h9000, 32'h0, "cfi_check");
        end
        default: begin  // EV_RET: ret from inside the callee back to site + 4
          m_pop();
          issue(w_jalr(5'd0, 5'd1), CODE_BASE + 32'h2_0000, ra, "ret");
        end
      endcase
    end
    chk(n_ev > 0, {name, ": program ran"});
    chk(depth == 0, {name, ": stack empty at the end"});
    $display("workload %-20s events=%0d max_entries=%0d (of %0d) max_recursion_count=%0d folded=%0d",
             name, n_ev, max_depth, SSZ, max_cnt, n_fold);
    tr.delete();
  endtask

  initial begin : watchdog
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint f;
    int t, q, v;
    int fold_fact, fold_queens, depth_chain;
    instr_valid = 0; instr = 0; pc = 0; is_c = 0; target = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    issue(cfi_instr(F3_ENABLE, 0), CODE_BASE, 0, "CFI_ENABLE");
    chk(enabled, "enabled");

    f = fact(20);
    chk(f == 64'd2432902008176640000, "factorial result");
    replay("factorial(20)");
    fold_fact = n_fold;

    t = tak(18, 12, 6);
    chk(t == 7, "tak result");
    replay("tak(18,12,6)");

    q = queens(0, 8);
    chk(q == 92, "nqueens result");
    replay("nqueens(8)");
    fold_queens = n_fold;

    chain(0, 50);
    replay("call chain 50");
    depth_chain = max_depth;

    sort_cmp();
    for (int i = 0; i < 15; i++) chk(arr[i] <= arr[i + 1], "sort result");
    replay("sort with comparator");

    v = interp();
    chk(v == 49, "interpreter result");
    replay("switch interpreter");

    chk(fold_fact > 0 && fold_queens > 0, "recursion folded into counters");
    chk(depth_chain == 50, "50 nested calls use 50 entries");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
