// egpu_top: one eGPU streaming multiprocessor (SM).
//
// NSP scalar processors (16) run the threads of a thread block one wavefront
// (one thread per SP) per clock, under a single sequencer that can shrink the
// active thread space instruction by instruction. They share a data memory
// with four read ports and one write port, reached through the read-address,
// write-address and write-data muxes (mem_xbar). An optional dot-product
// core (with the reciprocal-square-root unit) reduces across the SPs and
// writes its result back into SP0.
//
// Default configuration: 16 SPs, 512 threads (32 wavefronts), 32 registers
// per thread, 32-bit integer ALU, 128 KB shared memory, 5 predicate levels,
// dot-product core present: the source's configuration for its vector and
// matrix benchmarks, with predicates enabled so the sorting benchmark runs.
//
// SMEM_WPORTS = 2 builds the source's alternative two-write-port ("QP")
// shared memory: stores then take one clock per two SPs. The default is the
// one-write-port ("DP") memory the source uses as its baseline.
//
// Host interface: while the SM is not running, the host writes the program
// memory (imem_*), and reads and writes the shared memory (smem_*), one
// 32-bit word per clock; smem_rdata is valid two clocks after smem_re.
// cfg_depth gives the number of wavefronts in the thread block (threads /
// NSP). start pulses for one clock to run from address 0; done rises at
// STOP. These host ports stand in for the surrounding system, which the
// source does not describe.
//
// Pipeline from issue to register write-back: issue register, register-file
// read, operand register, 5 ALU stages, write-back register. Loads leave the
// SP at S3, are muxed and registered (S4), read (S5) and returned (S6).
// There is no hazard detection.
module egpu_top
  import egpu_pkg::*;
#(
  parameter int unsigned NSP         = 16,
  parameter int unsigned THREADS     = 512,
  parameter int unsigned REGS        = 32,
  parameter int unsigned SMEM_WORDS  = 32768,
  parameter int unsigned PRED_LEVELS = 5,
  parameter int unsigned IMEM_DEPTH  = 512,
  parameter bit          DOT_EN      = 1'b1,
  parameter int unsigned SMEM_WPORTS = 1,       // 1: DP memory, 2: QP memory
  localparam int unsigned TPS        = THREADS / NSP,     // threads per SP
  localparam int unsigned WFW        = (TPS > 1) ? $clog2(TPS) : 1,
  localparam int unsigned DW         = $clog2(TPS + 1),
  localparam int unsigned SAW        = $clog2(SMEM_WORDS),
  localparam int unsigned PCW        = $clog2(IMEM_DEPTH),
  localparam int unsigned RAW        = $clog2(TPS * REGS)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             start,
  input  logic [DW-1:0]    cfg_depth,
  output logic             running,
  output logic             done,
  // host access to program memory
  input  logic             imem_we,
  input  logic [PCW-1:0]   imem_waddr,
  input  logic [IW_W-1:0]  imem_wdata,
  // host access to shared memory
  input  logic             smem_we,
  input  logic             smem_re,
  input  logic [SAW-1:0]   smem_addr,
  input  logic [31:0]      smem_wdata,
  output logic [31:0]      smem_rdata
);
  localparam int unsigned RP = 4;

  // ---------------------------------------------------------------- sequencer
  logic [PCW-1:0] imem_raddr, pc;
  logic [IW_W-1:0] imem_rdata;
  issue_t         issue;
  logic [NSP-1:0] lane_en;

  instr_mem #(.DEPTH(IMEM_DEPTH), .IW_W(IW_W)) u_imem (
    .clk(clk), .we(imem_we), .waddr(imem_waddr), .wdata(imem_wdata),
    .raddr(imem_raddr), .rdata(imem_rdata)
  );

  sequencer #(.NSP(NSP), .THREADS(TPS), .IMEM_DEPTH(IMEM_DEPTH), .WPORTS(SMEM_WPORTS)) u_seq (
    .clk(clk), .rst(rst), .start(start), .cfg_depth(cfg_depth),
    .imem_raddr(imem_raddr), .iw(iw_t'(imem_rdata)), .issue(issue),
    .lane_en(lane_en), .running(running), .done(done), .pc(pc)
  );

  // ---------------------------------------------------------------- SPs
  logic           sp_rd    [NSP];
  logic           sp_wr    [NSP];
  logic [SAW-1:0] sp_addr  [NSP];
  logic [31:0]    sp_wdata [NSP];
  logic [31:0]    sp_rdata [NSP];
  logic           dot_en   [NSP];
  logic [31:0]    dot_a    [NSP];
  logic [31:0]    dot_b    [NSP];
  logic           ext_we;
  logic [RAW-1:0] ext_waddr;
  logic [31:0]    ext_wdata;
  logic [NSP-1:0] active_dbg;

  for (genvar j = 0; j < NSP; j++) begin : g_sp
    sp #(
      .SP_ID(j), .THREADS(TPS), .REGS(REGS), .PRED_LEVELS(PRED_LEVELS),
      .SMEM_AW(SAW)
    ) u_sp (
      .clk(clk), .rst(rst), .issue(issue), .lane_en(lane_en[j]),
      .mem_rd(sp_rd[j]), .mem_wr(sp_wr[j]), .mem_addr(sp_addr[j]),
      .mem_wdata(sp_wdata[j]), .ld_data(sp_rdata[j]),
      .dot_en(dot_en[j]), .dot_a(dot_a[j]), .dot_b(dot_b[j]),
      .ext_we   (j == 0 ? ext_we : 1'b0),
      .ext_waddr(ext_waddr),
      .ext_wdata(ext_wdata),
      .thread_active_dbg(active_dbg[j])
    );
  end

  // ---------------------------------------------------------------- shared memory
  logic [SAW-1:0] x_raddr [RP];
  logic [SAW-1:0] m_raddr [RP];
  logic [31:0]    m_rdata [RP];
  logic           x_we, m_we;
  logic [SAW-1:0] x_waddr, m_waddr;
  logic [31:0]    x_wdata, m_wdata;

  logic           x_we1;
  logic [SAW-1:0] x_waddr1;
  logic [31:0]    x_wdata1;
  mem_xbar #(.NSP(NSP), .RPORTS(RP), .AW(SAW), .WPORTS(SMEM_WPORTS)) u_xbar (
    .clk(clk), .rst(rst),
    .sp_rd(sp_rd), .sp_wr(sp_wr), .sp_addr(sp_addr), .sp_wdata(sp_wdata),
    .sp_rdata(sp_rdata),
    .m_raddr(x_raddr), .m_rdata(m_rdata),
    .m_we(x_we), .m_waddr(x_waddr), .m_wdata(x_wdata),
    .m_we1(x_we1), .m_waddr1(x_waddr1), .m_wdata1(x_wdata1)
  );

  // the host uses write port and read port 0 while the SM is idle
  always_comb begin
    m_raddr = x_raddr;
    m_we    = x_we;
    m_waddr = x_waddr;
    m_wdata = x_wdata;
    if (!running) begin
      if (smem_re) m_raddr[0] = smem_addr;
      if (smem_we) begin
        m_we = 1'b1; m_waddr = smem_addr; m_wdata = smem_wdata;
      end
    end
  end

  shared_mem #(.WORDS(SMEM_WORDS), .RPORTS(RP), .WPORTS(SMEM_WPORTS)) u_smem (
    .clk(clk), .we(m_we), .waddr(m_waddr), .wdata(m_wdata),
    .we1(x_we1), .waddr1(x_waddr1), .wdata1(x_wdata1),
    .raddr(m_raddr), .rdata(m_rdata)
  );

  always_ff @(posedge clk) smem_rdata <= m_rdata[0];

  // ---------------------------------------------------------------- dot core
  // the dot core sees the SP operands at S3: delay the issue bundle to match
  issue_t iss_d [3];
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < 3; i++) iss_d[i].valid <= 1'b0;
    end else begin
      iss_d[0].valid <= issue.valid;
      for (int i = 1; i < 3; i++) iss_d[i].valid <= iss_d[i-1].valid;
    end
    iss_d[0].op    <= issue.op;
    iss_d[0].dtype <= issue.dtype;
    iss_d[0].rd    <= issue.rd;
    iss_d[0].ra    <= issue.ra;
    iss_d[0].rb    <= issue.rb;
    iss_d[0].imm   <= issue.imm;
    iss_d[0].wf    <= issue.wf;
    for (int i = 1; i < 3; i++) begin
      iss_d[i].op    <= iss_d[i-1].op;
      iss_d[i].dtype <= iss_d[i-1].dtype;
      iss_d[i].rd    <= iss_d[i-1].rd;
      iss_d[i].ra    <= iss_d[i-1].ra;
      iss_d[i].rb    <= iss_d[i-1].rb;
      iss_d[i].imm   <= iss_d[i-1].imm;
      iss_d[i].wf    <= iss_d[i-1].wf;
    end
  end

  logic any_dot;
  always_comb begin
    any_dot = 1'b0;
    for (int j = 0; j < int'(NSP); j++) any_dot |= dot_en[j];
  end

  if (DOT_EN) begin : g_dot
    dot_core #(.NSP(NSP), .WFW(WFW), .RAW(RAW)) u_dot (
      .clk(clk), .rst(rst),
      .valid(any_dot),
      .op(iss_d[2].op), .rd(iss_d[2].rd), .wf(WFW'(iss_d[2].wf)),
      .en(dot_en), .a(dot_a), .b(dot_b),
      .wb_we(ext_we), .wb_addr(ext_waddr), .wb_data(ext_wdata)
    );
  end else begin : g_nodot
    assign ext_we    = 1'b0;
    assign ext_waddr = '0;
    assign ext_wdata = '0;
  end
endmodule
