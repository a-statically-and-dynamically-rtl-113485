// predicate_stack: one thread's predicate stack.
//
// A chain of LEVELS one-bit registers. Level 0 is the top and its value is
// predicate_status (1 = thread runs). When en is high:
//   IF    pushes the condition bit onto the top, every level moving down one;
//   ELSE  inverts the top level;
//   ENDIF pops, every level moving up one and a 1 entering at the bottom.
// Reset fills every level with 1, so a thread with no open IF is active.
// The structure (a top-level mux choosing the condition or the inverted top,
// push/pop chaining, one enable for all levels) follows the source's
// predicate-stack diagram. Exactly one of do_if/do_else/do_endif is expected
// per enabled clock; the reset value and the 1 refilled on a pop are this
// design's choice. Nesting: the SP body ANDs the condition it pushes with the
// thread's current status, so an IF inside a disabled region stays disabled.
//
// Timing: the new status is visible the clock after the update.
module predicate_stack #(
  parameter int unsigned LEVELS = 5
) (
  input  logic clk,
  input  logic rst,
  input  logic en,
  input  logic do_if,
  input  logic do_else,
  input  logic do_endif,
  input  logic condition,
  output logic predicate_status
);
  logic [LEVELS-1:0] lvl;

  always_ff @(posedge clk) begin
    if (rst) begin
      lvl <= '1;
    end else if (en) begin
      if (do_if)         lvl <= {lvl[LEVELS-2:0], condition};
      else if (do_else)  lvl[0] <= ~lvl[0];
      else if (do_endif) lvl <= {1'b1, lvl[LEVELS-1:1]};
    end
  end

  assign predicate_status = lvl[0];
endmodule
