// tb_int_alu: self-checking test of the integer ALU. Random operands and
// every integer opcode in both signed and unsigned form are applied one per
// clock; each result is compared, exactly LAT clocks later, with a
// reference computed here from the instruction definitions.
module tb_int_alu;
  import egpu_pkg::*;
  localparam int LAT = 5;
  logic clk = 0;
  always #5 clk = ~clk;
  opcode_e op; dtype_e dt; logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  int_alu #(.LAT(LAT)) dut (.clk(clk), .op(op), .dtype(dt), .a(a), .b(b), .y(y));

  function automatic logic [31:0] ref_model(opcode_e o, dtype_e t, logic [31:0] x, logic [31:0] z);
    longint sx, sz, p;
    int c;
    logic [31:0] r;
    case (o)
      OP_ADD: return x + z;
      OP_SUB: return x - z;
      OP_NEG: return 32'(0) - x;
      OP_ABS: return (t == T_INT && x[31]) ? 32'(0) - x : x;
      OP_MUL16LO, OP_MUL16HI: begin
        sx = (t == T_INT) ? longint'($signed(x[15:0])) : longint'(x[15:0]);
        sz = (t == T_INT) ? longint'($signed(z[15:0])) : longint'(z[15:0]);
        p = sx * sz;
        return (o == OP_MUL16LO) ? p[31:0] : p[47:16];
      end
      OP_MUL24LO, OP_MUL24HI: begin
        sx = (t == T_INT) ? longint'($signed(x[23:0])) : longint'(x[23:0]);
        sz = (t == T_INT) ? longint'($signed(z[23:0])) : longint'(z[23:0]);
        p = sx * sz;
        return (o == OP_MUL24LO) ? p[31:0] : p[55:24];
      end
      OP_AND: return x & z;
      OP_OR:  return x | z;
      OP_XOR: return x ^ z;
      OP_NOT: return ~x;
      OP_CNOT: return (x == 0) ? 1 : 0;
      OP_BVS: begin for (int i = 0; i < 32; i++) r[i] = x[31-i]; return r; end
      OP_SHL: return x << z[4:0];
      OP_SHR: return (t == T_INT) ? 32'($signed(x) >>> z[4:0]) : x >> z[4:0];
      OP_POP: begin c = 0; for (int i = 0; i < 32; i++) c += int'(x[i]); return 32'(c); end
      OP_MAX: if (t == T_INT) return ($signed(x) > $signed(z)) ? x : z; else return (x > z) ? x : z;
      OP_MIN: if (t == T_INT) return ($signed(x) < $signed(z)) ? x : z; else return (x < z) ? x : z;
      default: return 0;
    endcase
  endfunction

  opcode_e ops [19] = '{OP_ADD, OP_SUB, OP_NEG, OP_ABS, OP_MUL16LO, OP_MUL16HI,
                        OP_MUL24LO, OP_MUL24HI, OP_AND, OP_OR, OP_XOR, OP_NOT,
                        OP_CNOT, OP_BVS, OP_SHL, OP_SHR, OP_POP, OP_MAX, OP_MIN};
  logic [31:0] expq [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op = OP_NOP; dt = T_UINT; a = 0; b = 0;
    for (int n = 0; n < 2000 + LAT; n++) begin
      @(negedge clk);
      if (n >= LAT) begin
        checks++;
        if (y !== expq[0]) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d got %h exp %h", n, y, expq[0]);
        end
        void'(expq.pop_front());
      end
      op = ops[$urandom % 19];
      dt = ($urandom % 2) ? T_INT : T_UINT;
      a  = $urandom;
      b  = ($urandom % 4 == 0) ? a : $urandom;
      if ($urandom % 8 == 0) a = 0;
      expq.push_back(ref_model(op, dt, a, b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
