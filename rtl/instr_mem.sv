// instr_mem: program memory of the streaming multiprocessor.
//
// DEPTH instruction words of IW_W bits (43 bits for 32 registers per thread),
// one synchronous read port for the sequencer and one write port through
// which the host loads programs. 512 words fit the source's largest
// benchmark (about 250 instructions) with room for a second program.
//
// Timing: rdata is the word at raddr of the previous clock. A write and a
// read of the same address in one clock return the old word.
module instr_mem #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned IW_W  = 43,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            we,
  input  logic [AW-1:0]   waddr,
  input  logic [IW_W-1:0] wdata,
  input  logic [AW-1:0]   raddr,
  output logic [IW_W-1:0] rdata
);
  logic [IW_W-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
