// shadow_stack -- return-address shadow stack of the EXCEC CFI unit.
//
// A flip-flop array of SIZE entries, each holding the return-address slice
// [18:1] of one call and a recursion counter. All entries are registers so
// that the top can be read and compared in the same cycle as the return
// instruction (no memory latency), as in the design.
//
// Operations, at most one per cycle, all taking effect at the next clock edge:
//   push_i   : a call with return address push_addr_i. If the stack is not
//              empty and the top entry already holds that address (the same
//              call site calls again, i.e. direct recursion), the top entry's
//              counter is incremented instead of taking a new entry. The push
//              is refused (push_err_o) if the stack is full, or if the top
//              counter already stands at RECURSION_DEPTH-1.
//   pop_i    : a return to pop_addr_i. Refused with pop_empty_o on an empty
//              stack and with pop_mismatch_o if the top address differs.
//              Otherwise the top counter is decremented, or the entry is
//              removed when its counter is zero.
//   unwind_i : set the stack pointer back to unwind_sp_i (setjmp/longjmp).
//              Refused with unwind_err_o if unwind_sp_i lies above the
//              current pointer.
//   clear_i  : empty the stack (CFI_RESET); has priority over the others.
// The error outputs are combinational and say whether the operation would be
// refused if it were requested in this cycle; they depend only on the stack
// contents and the address/pointer inputs, not on the request strobes, so a
// controller may use them to decide on its request without a loop. A refused
// operation changes nothing.
//
// Entry contents are not reset, only the pointer: no entry at or above the
// pointer is ever read. Stack, counter and recursion handling follow the
// design; the rule that the same return address on top means recursion, and
// that a saturated counter is refused rather than spilled into a new entry,
// are this design's reading of it.
//
// Lint note: rst_ni is reported as used both asynchronously (pointer flops)
// and synchronously; the synchronous use is only the disable condition of
// the assertions, and the entry arrays deliberately have no reset.
module shadow_stack #(
  parameter int unsigned SIZE            = 128,  // SHADOW_STACK_SIZE
  parameter int unsigned RECURSION_DEPTH = 128,  // calls of one site per entry
  parameter int unsigned RA_W            = 18,   // stored address bits [18:1]
  localparam int unsigned SP_W  = $clog2(SIZE + 1),
  localparam int unsigned CNT_W = (RECURSION_DEPTH > 1) ? $clog2(RECURSION_DEPTH) : 1,
  localparam int unsigned IDX_W = (SIZE > 1) ? $clog2(SIZE) : 1
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             clear_i,
  input  logic             push_i,
  input  logic [RA_W-1:0]  push_addr_i,
  input  logic             pop_i,
  input  logic [RA_W-1:0]  pop_addr_i,
  input  logic             unwind_i,
  input  logic [SP_W-1:0]  unwind_sp_i,
  output logic             push_err_o,     // a push would hit full stack / recursion bound
  output logic             push_rec_o,     // a push would go to the recursion counter
  output logic             pop_empty_o,
  output logic             pop_mismatch_o,
  output logic             unwind_err_o,
  output logic [SP_W-1:0]  sp_o,           // number of occupied entries
  output logic             full_o,
  output logic             empty_o,
  output logic [RA_W-1:0]  top_addr_o,
  output logic [CNT_W-1:0] top_cnt_o
);

  localparam logic [CNT_W-1:0] CNT_MAX = CNT_W'(RECURSION_DEPTH - 1);

  logic [RA_W-1:0]  addr_q [SIZE];
  logic [CNT_W-1:0] cnt_q  [SIZE];
  logic [SP_W-1:0]  sp_q;
  logic [IDX_W-1:0] top_idx;
  logic [IDX_W-1:0] wr_idx;
  logic             top_hit;

  assign empty_o    = (sp_q == '0);
  assign full_o     = (sp_q == SP_W'(SIZE));
  assign top_idx    = IDX_W'(sp_q - 1'b1);
  assign wr_idx     = IDX_W'(sp_q);
  assign top_addr_o = empty_o ? '0 : addr_q[top_idx];
  assign top_cnt_o  = empty_o ? '0 : cnt_q[top_idx];
  assign sp_o       = sp_q;

  assign top_hit        = !empty_o && (top_addr_o == push_addr_i);
  assign push_rec_o     = top_hit && (top_cnt_o != CNT_MAX);
  assign push_err_o     = top_hit ? (top_cnt_o == CNT_MAX) : full_o;
  assign pop_empty_o    = empty_o;
  assign pop_mismatch_o = !empty_o && (top_addr_o != pop_addr_i);
  assign unwind_err_o   = (unwind_sp_i > sp_q);

  // stack pointer
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      sp_q <= '0;
    end else if (clear_i) begin
      sp_q <= '0;
    end else if (unwind_i) begin
      if (!unwind_err_o) sp_q <= unwind_sp_i;
    end else if (push_i && !push_err_o && !push_rec_o) begin
      sp_q <= sp_q + 1'b1;
    end else if (pop_i && !pop_empty_o && !pop_mismatch_o && top_cnt_o == '0) begin
      sp_q <= sp_q - 1'b1;
    end
  end

  // entries and recursion counters
  always_ff @(posedge clk_i) begin
    if (!clear_i && !unwind_i) begin
      if (push_i && !push_err_o) begin
        if (push_rec_o) begin
          cnt_q[top_idx] <= top_cnt_o + 1'b1;
        end else begin
          addr_q[wr_idx] <= push_addr_i;
          cnt_q[wr_idx] <= '0;
        end
      end else if (pop_i && !pop_empty_o && !pop_mismatch_o && top_cnt_o != '0) begin
        cnt_q[top_idx] <= top_cnt_o - 1'b1;
      end
    end
  end

  // one operation per cycle
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   $onehot0({push_i, pop_i, unwind_i}))
    else $error("shadow_stack: more than one operation requested");
  assert property (@(posedge clk_i) disable iff (!rst_ni) sp_q <= SP_W'(SIZE))
    else $error("shadow_stack: pointer out of range");

endmodule
