// predicate_block: the predicate circuitry of one scalar processor (SP).
//
// One predicate_stack per thread mapped to this SP (THREADS = 32 for 512
// threads on 16 SPs), i.e. one per wavefront. A comparator per stack checks
// the wavefront index against the stack's own number and, combined with the
// OR of the decoded IF/ELSE/ENDIF signals, enables only that stack. The
// thread_active output is the selected stack's status, muxed by the same
// wavefront index. The narrow interface (wavefront index, three decoded
// instruction bits, one condition bit in; one bit out) is the source's.
//
// Timing: thread_active is combinational from wavefront and reflects all
// updates made up to the previous clock edge.
module predicate_block #(
  parameter int unsigned THREADS = 32,
  parameter int unsigned LEVELS  = 5,
  localparam int unsigned WFW    = (THREADS > 1) ? $clog2(THREADS) : 1
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [WFW-1:0] wavefront,
  input  logic           do_if,
  input  logic           do_else,
  input  logic           do_endif,
  input  logic           condition,
  output logic           thread_active
);
  logic [THREADS-1:0] status;
  logic               any_op;

  assign any_op = do_if | do_else | do_endif;

  for (genvar t = 0; t < THREADS; t++) begin : g_stack
    predicate_stack #(.LEVELS(LEVELS)) u_stack (
      .clk             (clk),
      .rst             (rst),
      .en              (any_op && (wavefront == WFW'(t))),
      .do_if           (do_if),
      .do_else         (do_else),
      .do_endif        (do_endif),
      .condition       (condition),
      .predicate_status(status[t])
    );
  end

  assign thread_active = status[wavefront];
endmodule
