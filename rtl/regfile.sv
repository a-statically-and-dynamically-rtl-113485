// regfile: thread register memory of one scalar processor (SP).
//
// Holds REGS registers for each of the THREADS threads mapped onto this SP,
// addressed as {wavefront, register}. As in the source design, it is built
// from two simple dual-port memories that are always written together, so
// that two different registers (Ra and Rb) can be read each clock while one
// register is written. Each copy maps onto one column of FPGA block RAM.
//
// Timing: synchronous read, data appear on rdata_a/rdata_b one clock after
// the addresses. A write takes effect at the clock edge; a read of the same
// address in that clock returns the old contents. No reset: the contents are
// whatever the program writes. The two-copy organisation follows the source;
// the read-during-write behaviour is this design's choice.
module regfile #(
  parameter int unsigned THREADS = 32,   // threads per SP (512 threads / 16 SPs)
  parameter int unsigned REGS    = 32,   // registers per thread
  parameter int unsigned W       = 32,
  localparam int unsigned DEPTH  = THREADS * REGS,
  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr_a,
  input  logic [AW-1:0] raddr_b,
  output logic [W-1:0]  rdata_a,
  output logic [W-1:0]  rdata_b
);
  logic [W-1:0] mem_a [DEPTH];
  logic [W-1:0] mem_b [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem_a[waddr] <= wdata;
    rdata_a <= mem_a[raddr_a];
  end

  always_ff @(posedge clk) begin
    if (we) mem_b[waddr] <= wdata;
    rdata_b <= mem_b[raddr_b];
  end
endmodule
