// mem_xbar: the muxes between the scalar processors (SPs) and shared memory.
//
// Read address mux: the shared memory has RPORTS (4) read ports and read
// port k is wired to SPs k, k+4, k+8, ... (the connection pattern of the
// source's block diagram). Each clock the sequencer lets at most one SP of
// each such set issue a load, so port k takes the address of whichever SP
// of its set raises mem_rd. Read data of port k is returned to every SP of
// the set; only the SP that asked writes it into its registers.
// Write address and write data muxes: one store per clock. The requesting
// SP is chosen in two levels, first within groups of four SPs, then among
// the groups (16 -> 4 -> 1 for 16 SPs, the 4:1-plus-4:1 arrangement of the
// source's diagram).
//
// With WPORTS = 2 (the two-write-port shared memory) SP j stores through
// write port j mod 2, each port with its own two-level mux, and the
// sequencer lets two SPs store per clock. With WPORTS = 1 the second write
// port's outputs stay inactive.
//
// Timing: the selected read addresses and the write request are registered
// (one pipeline stage to the memory), and the read data are registered once
// on the way back, so load data reach the SPs three clocks after the SP
// presents the address (address register, memory read, return register).
// The port-to-SP wiring and the two-level write mux follow the source; the
// single register in each direction is the minimum depth the source reports.
module mem_xbar #(
  parameter int unsigned NSP    = 16,
  parameter int unsigned RPORTS = 4,
  parameter int unsigned AW     = 15,
  parameter int unsigned WPORTS = 1
) (
  input  logic          clk,
  input  logic          rst,
  // from the SPs
  input  logic          sp_rd    [NSP],
  input  logic          sp_wr    [NSP],
  input  logic [AW-1:0] sp_addr  [NSP],
  input  logic [31:0]   sp_wdata [NSP],
  output logic [31:0]   sp_rdata [NSP],
  // to the shared memory
  output logic [AW-1:0] m_raddr  [RPORTS],
  input  logic [31:0]   m_rdata  [RPORTS],
  output logic          m_we,
  output logic [AW-1:0] m_waddr,
  output logic [31:0]   m_wdata,
  output logic          m_we1,
  output logic [AW-1:0] m_waddr1,
  output logic [31:0]   m_wdata1
);
  localparam int unsigned NGRP = (NSP + 3) / 4;

  // read address mux
  logic [AW-1:0] raddr_c [RPORTS];
  always_comb begin
    for (int k = 0; k < int'(RPORTS); k++) begin
      raddr_c[k] = '0;
      for (int j = k; j < int'(NSP); j += int'(RPORTS))
        if (sp_rd[j]) raddr_c[k] = sp_addr[j];
    end
  end

  // write muxes: port p takes the SPs j with j mod WPORTS == p; first level
  // one candidate per group of four SPs, second level among the groups
  logic          g_we    [2][NGRP];
  logic [AW-1:0] g_addr  [2][NGRP];
  logic [31:0]   g_data  [2][NGRP];
  logic          we_c    [2];
  logic [AW-1:0] waddr_c [2];
  logic [31:0]   wdata_c [2];
  always_comb begin
    for (int p = 0; p < 2; p++) begin
      for (int g = 0; g < int'(NGRP); g++) begin
        g_we[p][g] = 1'b0; g_addr[p][g] = '0; g_data[p][g] = '0;
        for (int j = 4*g; j < 4*g + 4 && j < int'(NSP); j++)
          if (sp_wr[j] && (j % int'(WPORTS) == p) && !g_we[p][g]) begin
            g_we[p][g] = 1'b1; g_addr[p][g] = sp_addr[j]; g_data[p][g] = sp_wdata[j];
          end
      end
      we_c[p] = 1'b0; waddr_c[p] = '0; wdata_c[p] = '0;
      for (int g = 0; g < int'(NGRP); g++)
        if (g_we[p][g] && !we_c[p]) begin
          we_c[p] = 1'b1; waddr_c[p] = g_addr[p][g]; wdata_c[p] = g_data[p][g];
        end
    end
  end

  logic [31:0] rdata_q [RPORTS];
  always_ff @(posedge clk) begin
    if (rst) begin
      m_we  <= 1'b0;
      m_we1 <= 1'b0;
    end else begin
      m_we  <= we_c[0];
      m_we1 <= we_c[1];
    end
    m_waddr  <= waddr_c[0];
    m_wdata  <= wdata_c[0];
    m_waddr1 <= waddr_c[1];
    m_wdata1 <= wdata_c[1];
    m_raddr <= raddr_c;
    rdata_q <= m_rdata;
  end

  for (genvar j = 0; j < NSP; j++) begin : g_ret
    assign sp_rdata[j] = rdata_q[j % RPORTS];
  end
endmodule
