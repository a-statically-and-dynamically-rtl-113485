// tb_shared_mem: self-checking test of the four-read, one-write shared
// memory (full 32K-word size). Random writes and four independent random
// reads per clock are compared with a model, checking one-clock read latency
// on every port and old-data on a read of the word being written.
module tb_shared_mem;
  localparam int W = 32768, AW = 15;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we; logic [AW-1:0] wa; logic [31:0] wd;
  logic [AW-1:0] ra [4]; logic [31:0] rd [4];
  logic [31:0] model [logic [AW-1:0]];
  logic [AW-1:0] used [$];
  int checks = 0, failures = 0;

  shared_mem #(.WORDS(W)) dut (.clk(clk), .we(we), .waddr(wa), .wdata(wd), .raddr(ra), .rdata(rd));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] e [4];
    we = 0; wa = 0; wd = 0; for (int k = 0; k < 4; k++) ra[k] = 0;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk); we = 1; wa = AW'($urandom); wd = $urandom;
      model[wa] = wd; used.push_back(wa);
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      for (int k = 0; k < 4; k++) begin
        ra[k] = used[$urandom % used.size()];
        e[k] = model[ra[k]];
      end
      we = 1; wa = ($urandom % 3 == 0) ? ra[0] : used[$urandom % used.size()]; wd = $urandom;
      model[wa] = wd;
      @(negedge clk);
      we = 0;
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (rd[k] !== e[k]) begin failures++; if (failures < 10) $display("FAIL port %0d", k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
