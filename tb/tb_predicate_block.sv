// tb_predicate_block: self-checking test of the per-SP predicate block. IF,
// ELSE and ENDIF instructions are sent to random wavefronts; after every
// clock thread_active is read for a random wavefront and compared with a
// reference model holding one stack per wavefront. Checks that only the
// addressed stack changes.
module tb_predicate_block;
  localparam int TH = 32, L = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst, di, de, dn, c, act;
  logic [4:0] wf;
  int checks = 0, failures = 0;
  bit model [TH][$];

  predicate_block #(.THREADS(TH), .LEVELS(L)) dut (.clk(clk), .rst(rst), .wavefront(wf),
    .do_if(di), .do_else(de), .do_endif(dn), .condition(c), .thread_active(act));

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k, w;
    rst = 1; di = 0; de = 0; dn = 0; c = 0; wf = 0;
    @(negedge clk); @(negedge clk); rst = 0;
    for (int n = 0; n < 5000; n++) begin
      // read back a random wavefront
      di = 0; de = 0; dn = 0;
      w = $urandom % TH; wf = 5'(w);
      #1;
      checks++;
      if (act !== (model[w].size() == 0 ? 1'b1 : model[w][0])) begin
        failures++; if (failures < 10) $display("FAIL n=%0d wf=%0d act=%b", n, w, act);
      end
      // update a random wavefront
      w = $urandom % 8;  // concentrate on a few wavefronts to build depth
      wf = 5'(w); c = 1'($urandom);
      k = $urandom % 4;
      if (model[w].size() >= L && k == 0) k = 2;
      if (model[w].size() == 0 && (k == 1 || k == 2)) k = 0;
      di = (k == 0); de = (k == 1); dn = (k == 2);
      if (di) model[w].push_front(c);
      else if (de) model[w][0] = !model[w][0];
      else if (dn) void'(model[w].pop_front());
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
