// tb_mem_xbar: self-checking test of the SP-to-shared-memory muxes with 16
// SPs. Each clock one random SP of each read-port set (SPs k, k+4, k+8,
// k+12) raises a load and one random SP raises a store; one clock later the
// memory-side read addresses and write request must carry exactly those
// SPs' values. Read data driven on the memory side must reach every SP of
// the port's set one clock later.
module tb_mem_xbar;
  localparam int N = 16, AW = 15;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst;
  logic sp_rd [N], sp_wr [N]; logic [AW-1:0] sp_addr [N]; logic [31:0] sp_wdata [N], sp_rdata [N];
  logic [AW-1:0] m_raddr [4]; logic [31:0] m_rdata [4];
  logic m_we; logic [AW-1:0] m_waddr; logic [31:0] m_wdata;
  int checks = 0, failures = 0;

  mem_xbar #(.NSP(N), .AW(AW)) dut (.clk(clk), .rst(rst), .sp_rd(sp_rd), .sp_wr(sp_wr),
    .sp_addr(sp_addr), .sp_wdata(sp_wdata), .sp_rdata(sp_rdata), .m_raddr(m_raddr),
    .m_rdata(m_rdata), .m_we(m_we), .m_waddr(m_waddr), .m_wdata(m_wdata));

  task automatic chk(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; if (failures < 10) $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [AW-1:0] ea [4]; int sj; logic ewe; logic [AW-1:0] ewa; logic [31:0] ewd;
    logic [31:0] rdv [4];
    rst = 1;
    for (int j = 0; j < N; j++) begin sp_rd[j] = 0; sp_wr[j] = 0; sp_addr[j] = 0; sp_wdata[j] = 0; end
    for (int k = 0; k < 4; k++) m_rdata[k] = 0;
    @(negedge clk); @(negedge clk); rst = 0;
    for (int n = 0; n < 1000; n++) begin
      for (int j = 0; j < N; j++) begin
        sp_rd[j] = 0; sp_wr[j] = 0; sp_addr[j] = AW'($urandom); sp_wdata[j] = $urandom;
      end
      // one SP per read port set raises a load (stores use other clocks)
      if (n % 2 == 0) begin
        for (int k = 0; k < 4; k++) begin
          sj = k + 4 * ($urandom % 4); sp_rd[sj] = 1; ea[k] = sp_addr[sj];
        end
        ewe = 0;
      end else begin
        sj = $urandom % N;
        ewe = ($urandom % 4 != 0); sp_wr[sj] = ewe; ewa = sp_addr[sj]; ewd = sp_wdata[sj];
      end
      for (int k = 0; k < 4; k++) begin rdv[k] = $urandom; m_rdata[k] = rdv[k]; end
      @(negedge clk);
      if (n % 2 == 0) for (int k = 0; k < 4; k++) chk(32'(m_raddr[k]), 32'(ea[k]), "raddr");
      chk(32'(m_we), 32'(ewe), "we");
      if (ewe) begin chk(32'(m_waddr), 32'(ewa), "waddr"); chk(m_wdata, ewd, "wdata"); end
      for (int j = 0; j < N; j++) chk(sp_rdata[j], rdv[j % 4], "rdata");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
