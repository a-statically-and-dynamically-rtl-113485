// tb_predicate_stack: self-checking test of one predicate stack. Random
// IF/ELSE/ENDIF sequences (with the enable sometimes low) are applied and
// predicate_status is compared each clock with a reference stack kept as a
// queue here: IF pushes the condition, ELSE inverts the top, ENDIF pops and
// an empty stack reads as 1.
module tb_predicate_stack;
  localparam int L = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst, en, di, de, dn, c, st;
  int checks = 0, failures = 0;
  bit model [$];

  predicate_stack #(.LEVELS(L)) dut (.clk(clk), .rst(rst), .en(en), .do_if(di),
    .do_else(de), .do_endif(dn), .condition(c), .predicate_status(st));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k;
    rst = 1; en = 0; di = 0; de = 0; dn = 0; c = 0;
    @(negedge clk); @(negedge clk); rst = 0;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      checks++;
      if (st !== (model.size() == 0 ? 1'b1 : model[0])) begin
        failures++; if (failures < 10) $display("FAIL n=%0d st=%b", n, st);
      end
      en = ($urandom % 5 != 0); c = 1'($urandom);
      k = $urandom % 3;
      // keep the nesting within the stack depth
      if (model.size() >= L && k == 0) k = 2;
      if (model.size() == 0 && k != 0) k = 0;
      di = (k == 0); de = (k == 1); dn = (k == 2);
      if (en) begin
        if (di) model.push_front(c);
        else if (de) model[0] = !model[0];
        else void'(model.pop_front());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
