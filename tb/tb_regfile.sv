// tb_regfile: self-checking test of the two-read, one-write thread register
// memory. Fills it with random data through the write port, then reads two
// different addresses per clock and checks both against a model, including
// one-clock read latency and old-data on a simultaneous read and write.
module tb_regfile;
  localparam int TH = 32, RG = 32, D = TH * RG, AW = $clog2(D);
  logic clk = 0;
  always #5 clk = ~clk;
  logic we; logic [AW-1:0] wa, ra, rb; logic [31:0] wd, qa, qb;
  logic [31:0] model [D];
  int checks = 0, failures = 0;

  regfile #(.THREADS(TH), .REGS(RG)) dut (.clk(clk), .we(we), .waddr(wa), .wdata(wd),
    .raddr_a(ra), .raddr_b(rb), .rdata_a(qa), .rdata_b(qb));

  task automatic chk(logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 10) $display("FAIL got %h exp %h", got, exp); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] ea, eb;
    we = 0; wa = 0; ra = 0; rb = 0; wd = 0;
    for (int i = 0; i < D; i++) begin
      @(negedge clk); we = 1; wa = AW'(i); wd = $urandom; model[i] = wd;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      ra = AW'($urandom); rb = AW'($urandom);
      we = ($urandom % 2 == 0); wa = ($urandom % 4 == 0) ? ra : AW'($urandom); wd = $urandom;
      ea = model[ra]; eb = model[rb];
      if (we) model[wa] = wd;
      @(negedge clk);
      we = 0;
      chk(qa, ea); chk(qb, eb);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
