// tb_shadow_stack -- self-checking testbench of shadow_stack at its default
// size (128 entries, recursion depth 128, 18-bit addresses).
//
// A reference model keeps the stack as a queue of (address, count) pairs.
// Every cycle one operation (push, pop, unwind, clear or idle) is applied to
// both, and the error flags, pointer, top address and top counter are
// compared before the clock edge. Directed phases fill the stack to 128
// entries and push once more (full), recurse one call site 128 times and
// once more (recursion bound), and empty it (empty); random phases mix all
// operations with a small set of addresses so that recursion, mismatches
// and unwinds happen often. Every operation takes effect in one cycle.
module tb_shadow_stack;
  localparam int unsigned SIZE  = 128;
  localparam int unsigned DEPTH = 128;
  localparam int unsigned RA_W  = 18;
  localparam int unsigned SP_W  = $clog2(SIZE + 1);

  logic clk = 0, rst_n = 0;
  logic clear, push, pop, unwind;
  logic [RA_W-1:0] push_addr, pop_addr;
  logic [SP_W-1:0] unwind_sp, sp;
  logic push_err, push_rec, pop_empty, pop_mismatch, unwind_err, full, empty;
  logic [RA_W-1:0] top_addr;
  logic [6:0] top_cnt;

  int checks = 0, failures = 0;
  int n_full = 0, n_rec_bound = 0, n_empty = 0, n_mismatch = 0, n_rec = 0, n_unwind = 0;

  shadow_stack dut (
    .clk_i(clk), .rst_ni(rst_n), .clear_i(clear),
    .push_i(push), .push_addr_i(push_addr),
    .pop_i(pop), .pop_addr_i(pop_addr),
    .unwind_i(unwind), .unwind_sp_i(unwind_sp),
    .push_err_o(push_err), .push_rec_o(push_rec),
    .pop_empty_o(pop_empty), .pop_mismatch_o(pop_mismatch),
    .unwind_err_o(unwind_err), .sp_o(sp), .full_o(full), .empty_o(empty),
    .top_addr_o(top_addr), .top_cnt_o(top_cnt)
  );

  always #5 clk = ~clk;

  // reference model
  logic [RA_W-1:0] m_addr[$];
  int              m_cnt[$];

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t (sp=%0d model=%0d)", what, $time, sp, m_addr.size());
    end
  endtask

  // apply one operation: 0 idle, 1 push, 2 pop, 3 unwind, 4 clear
  task automatic op(input int kind, input logic [RA_W-1:0] a, input int usp);
    int n;
    bit e_err, e_rec, e_empty, e_mis, e_uerr;
    clear = (kind == 4); push = (kind == 1); pop = (kind == 2); unwind = (kind == 3);
    push_addr = a; pop_addr = a; unwind_sp = SP_W'(usp);
    #1;
    n = m_addr.size();
    // state before the edge
    chk(sp == SP_W'(n), "pointer");
    chk(empty == (n == 0), "empty flag");
    chk(full == (n == SIZE), "full flag");
    if (n > 0) begin
      chk(top_addr == m_addr[n-1], "top address");
      chk(int'(top_cnt) == m_cnt[n-1], "top counter");
    end
    e_rec   = (n > 0) && m_addr[n-1] == a && m_cnt[n-1] != DEPTH - 1;
    e_err   = ((n > 0) && m_addr[n-1] == a) ? (m_cnt[n-1] == DEPTH - 1) : (n == SIZE);
    e_empty = (n == 0);
    e_mis   = (n > 0) && m_addr[n-1] != a;
    e_uerr  = usp > n;
    if (kind == 1) begin
      chk(push_err == e_err, "push error");
      chk(push_rec == e_rec, "push recursion");
      if (e_err && n == SIZE && !((n > 0) && m_addr[n-1] == a)) n_full++;
      if (e_err && (n > 0) && m_addr[n-1] == a) n_rec_bound++;
      if (e_rec) n_rec++;
      if (!e_err) begin
        if (e_rec) m_cnt[n-1]++;
        else begin m_addr.push_back(a); m_cnt.push_back(0); end
      end
    end else if (kind == 2) begin
      chk(pop_empty == e_empty, "pop empty");
      chk(pop_mismatch == e_mis, "pop mismatch");
      if (e_empty) n_empty++;
      if (e_mis) n_mismatch++;
      if (!e_empty && !e_mis) begin
        if (m_cnt[n-1] > 0) m_cnt[n-1]--;
        else begin void'(m_addr.pop_back()); void'(m_cnt.pop_back()); end
      end
    end else if (kind == 3) begin
      chk(unwind_err == e_uerr, "unwind error");
      if (!e_uerr) begin
        n_unwind++;
        while (m_addr.size() > usp) begin void'(m_addr.pop_back()); void'(m_cnt.pop_back()); end
      end
    end else if (kind == 4) begin
      m_addr.delete(); m_cnt.delete();
    end
    @(posedge clk);
    #1;
    clear = 0; push = 0; pop = 0; unwind = 0;
  endtask

  initial begin : watchdog
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k;
    logic [RA_W-1:0] a;
    clear = 0; push = 0; pop = 0; unwind = 0; push_addr = 0; pop_addr = 0; unwind_sp = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    // fill: 128 distinct return addresses, then one more
    for (int i = 0; i < SIZE; i++) op(1, RA_W'(i * 2 + 1), 0);
    op(1, RA_W'(12345), 0);
    // unwind half, refused unwind above pointer
    op(3, '0, 64);
    op(3, '0, 100);
    // empty by returns, with one wrong return on the way
    op(2, RA_W'(7), 0);
    for (int i = 63; i >= 0; i--) op(2, RA_W'(i * 2 + 1), 0);
    op(2, RA_W'(1), 0);
    // recursion of one call site up to the bound and once more
    for (int i = 0; i < DEPTH; i++) op(1, RA_W'(18'h2A2A), 0);
    op(1, RA_W'(18'h2A2A), 0);
    for (int i = 0; i < DEPTH; i++) op(2, RA_W'(18'h2A2A), 0);
    op(4, '0, 0);
    // random mix
    repeat (20000) begin
      k = $urandom_range(0, 99);
      a = RA_W'($urandom_range(1, 6));
      if (k < 45)      op(1, a, 0);
      else if (k < 90) op(2, (m_addr.size() > 0 && $urandom_range(0, 3) != 0) ? m_addr[m_addr.size()-1] : a, 0);
      else if (k < 97) op(3, '0, $urandom_range(0, m_addr.size() + 2));
      else if (k < 98) op(4, '0, 0);
      else             op(0, a, 0);
    end
    // mechanisms seen
    chk(n_full > 0, "stack full seen");
    chk(n_rec_bound > 0, "recursion bound seen");
    chk(n_empty > 0, "stack empty seen");
    chk(n_mismatch > 0, "mismatch seen");
    chk(n_rec > 0, "recursion counter seen");
    chk(n_unwind > 0, "unwind seen");
    $display("full=%0d rec_bound=%0d empty=%0d mismatch=%0d rec=%0d unwind=%0d",
             n_full, n_rec_bound, n_empty, n_mismatch, n_rec, n_unwind);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
