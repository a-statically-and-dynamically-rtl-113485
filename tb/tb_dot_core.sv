// tb_dot_core: self-checking test of the dot-product core with 16 SPs.
// Random DOT, SUM and INVSQR requests with random SP enables are issued one
// per clock. Exactly 10 clocks later the core must request a write of
// register {wf, rd} in SP0 with the dot product, the sum of the enabled Ra
// values, or 1/sqrt(Ra of SP0). Results are compared with real arithmetic
// with an error bound of 1e-5 times the sum of the magnitudes of the terms
// (the tree adds in a different order than the reference).
module tb_dot_core;
  import egpu_pkg::*;
  import fp_ref_pkg::*;
  localparam int N = 16, WFW = 5, RAW = 10, LAT = 10;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst, valid, we;
  opcode_e op; logic [4:0] rd; logic [WFW-1:0] wf;
  logic en [N]; logic [31:0] a [N], b [N];
  logic [RAW-1:0] wa; logic [31:0] wd;
  int checks = 0, failures = 0;

  typedef struct { bit v; logic [RAW-1:0] addr; real val; real mag; bit inv; } exp_t;
  exp_t q [$];

  dot_core #(.NSP(N), .WFW(WFW), .RAW(RAW)) dut (.clk(clk), .rst(rst), .valid(valid),
    .op(op), .rd(rd), .wf(wf), .en(en), .a(a), .b(b), .wb_we(we), .wb_addr(wa), .wb_data(wd));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    exp_t e; real p, err;
    rst = 1; valid = 0; op = OP_NOP; rd = 0; wf = 0;
    for (int j = 0; j < N; j++) begin en[j] = 0; a[j] = 0; b[j] = 0; end
    @(negedge clk); @(negedge clk); rst = 0;
    for (int n = 0; n < 1500 + LAT; n++) begin
      if (n >= LAT) begin
        e = q.pop_front();
        checks++;
        if (we !== e.v) begin failures++; if (failures < 10) $display("FAIL we n=%0d", n); end
        if (e.v) begin
          checks++;
          if (wa !== e.addr) failures++;
          err = f2r(wd) - e.val; if (err < 0) err = -err;
          checks++;
          if (err > 1.0e-5 * e.mag) begin
            failures++; if (failures < 10) $display("FAIL val n=%0d got %g exp %g", n, f2r(wd), e.val);
          end
        end
      end
      valid = ($urandom % 4 != 0);
      case ($urandom % 3) 0: op = OP_DOT; 1: op = OP_SUM; default: op = OP_INVSQR; endcase
      rd = 5'($urandom); wf = WFW'($urandom);
      e.v = valid; e.addr = {wf, rd}; e.val = 0; e.mag = 0; e.inv = (op == OP_INVSQR);
      for (int j = 0; j < N; j++) begin
        en[j] = valid && (op == OP_INVSQR ? (j == 0) : ($urandom % 5 != 0));
        a[j] = rand_f(110, 140); b[j] = rand_f(110, 140);
        if (op == OP_INVSQR) a[j][31] = 1'b0;
        if (en[j] && op != OP_INVSQR) begin
          p = (op == OP_DOT) ? f2r(a[j]) * f2r(b[j]) : f2r(a[j]);
          e.val += p; e.mag += (p < 0) ? -p : p;
        end
      end
      if (op == OP_INVSQR) begin e.val = 1.0 / $sqrt(f2r(a[0])); e.mag = e.val * 2.0; end
      q.push_back(e);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
