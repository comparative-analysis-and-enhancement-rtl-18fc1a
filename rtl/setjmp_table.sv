// setjmp_table -- saved shadow-stack pointers for setjmp/longjmp support.
//
// One slot per distinct setjmp call site (SETJMP_CALLS = 8). The compiler
// places CFI_SETJMP <index> right after every setjmp call and CFI_LONGJMP
// right before every longjmp call:
//   * CFI_LONGJMP sets the "longjmp announced" flag (pending_o).
//   * CFI_SETJMP with the flag clear is the first return of setjmp: the
//     current shadow-stack pointer sp_i is saved in slot <index>.
//   * CFI_SETJMP with the flag set is the second return of setjmp, reached
//     through longjmp: the flag is cleared and the controller unwinds the
//     shadow stack to the saved pointer slot_sp_o. slot_valid_o tells
//     whether slot <index> was ever written, so that a restore from an
//     unused slot can be refused.
// clear_i (CFI_RESET) drops the flag and invalidates all slots.
//
// Interface timing: slot_sp_o and slot_valid_o are combinational reads of
// slot index_i (independent of setjmp_i); saves, flag and valid bits change
// at the clock edge that ends the request cycle. The save/restore rule
// follows the design; the per-slot valid bit is this design's addition.
//
// Lint note: rst_ni is reported as used both asynchronously and
// synchronously; the synchronous use is only the disable condition of the
// assertion. The saved pointers have no reset (guarded by valid bits).
module setjmp_table #(
  parameter int unsigned SETJMP_CALLS = 8,
  parameter int unsigned SP_W         = 8,   // width of a shadow-stack pointer
  localparam int unsigned IDX_W = (SETJMP_CALLS > 1) ? $clog2(SETJMP_CALLS) : 1
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             clear_i,       // CFI_RESET
  input  logic             longjmp_i,     // CFI_LONGJMP
  input  logic             setjmp_i,      // CFI_SETJMP
  input  logic [IDX_W-1:0] index_i,       // its index
  input  logic [SP_W-1:0]  sp_i,          // current shadow-stack pointer
  output logic             pending_o,     // longjmp announced, not yet landed
  output logic             slot_valid_o,  // slot index_i holds a pointer
  output logic [SP_W-1:0]  slot_sp_o      // the pointer saved in slot index_i
);

  logic [SP_W-1:0]         slot_q  [SETJMP_CALLS];
  logic [SETJMP_CALLS-1:0] valid_q;
  logic                    pending_q;

  assign pending_o     = pending_q;
  assign slot_sp_o     = slot_q[index_i];
  assign slot_valid_o  = valid_q[index_i];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q   <= '0;
      pending_q <= 1'b0;
    end else if (clear_i) begin
      valid_q   <= '0;
      pending_q <= 1'b0;
    end else if (longjmp_i) begin
      pending_q <= 1'b1;
    end else if (setjmp_i) begin
      if (pending_q) pending_q <= 1'b0;
      else           valid_q[index_i] <= 1'b1;
    end
  end

  always_ff @(posedge clk_i) begin
    if (!clear_i && !longjmp_i && setjmp_i && !pending_q) slot_q[index_i] <= sp_i;
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) !(longjmp_i && setjmp_i))
    else $error("setjmp_table: CFI_LONGJMP and CFI_SETJMP in the same cycle");

endmodule
