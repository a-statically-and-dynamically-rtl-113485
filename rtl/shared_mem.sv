// shared_mem: shared data memory of the streaming multiprocessor.
//
// WORDS 32-bit words (default 32K words = 128 KB, the largest shared memory
// the source evaluates and the one its vector and matrix benchmarks use),
// with four read ports and one write port: the source's simple-dual-port
// ("DP") organisation, in which the block RAMs are replicated four times so
// that each copy serves one read port and all copies take the same write.
// Here the four copies are written as four arrays that always receive the
// same write.
//
// WPORTS = 2 selects the source's other organisation ("QP", emulated quad
// port blocks), which doubles the write bandwidth: a second write port
// (we1/waddr1/wdata1) writes every copy as well. If both ports write one
// address in the same clock, port 1 wins (the source does not say; the
// sequencer never lets that happen within one store). With WPORTS = 1 the
// second port is ignored.
//
// Timing: synchronous, rdata[k] is valid one clock after raddr[k]; a read of
// an address being written in the same clock returns the old word. No reset.
module shared_mem #(
  parameter int unsigned WORDS  = 32768,
  parameter int unsigned RPORTS = 4,
  parameter int unsigned WPORTS = 1,
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [31:0]   wdata,
  input  logic          we1,
  input  logic [AW-1:0] waddr1,
  input  logic [31:0]   wdata1,
  input  logic [AW-1:0] raddr [RPORTS],
  output logic [31:0]   rdata [RPORTS]
);
  for (genvar k = 0; k < RPORTS; k++) begin : g_copy
    logic [31:0] mem [WORDS];
    always_ff @(posedge clk) begin
      if (we) mem[waddr] <= wdata;
      if (WPORTS > 1 && we1) mem[waddr1] <= wdata1;
      rdata[k] <= mem[raddr[k]];
    end
  end
endmodule
