// tb_instr_mem: self-checking test of the program memory: 43-bit words
// written through the host port are read back with one clock of latency.
module tb_instr_mem;
  localparam int D = 512, W = 43;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we; logic [8:0] wa, ra; logic [W-1:0] wd, rd;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  instr_mem #(.DEPTH(D), .IW_W(W)) dut (.clk(clk), .we(we), .waddr(wa), .wdata(wd), .raddr(ra), .rdata(rd));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wa = 0; ra = 0; wd = 0;
    for (int i = 0; i < D; i++) begin
      @(negedge clk); we = 1; wa = 9'(i); wd = {11'($urandom), 32'($urandom)}; model[i] = wd;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 1000; n++) begin
      ra = 9'($urandom);
      @(negedge clk);
      checks++;
      if (rd !== model[ra]) begin failures++; if (failures < 10) $display("FAIL %0d", ra); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
