// tb_wl_fft: FFT workload on the full-size SM (default parameters).
//
// Radix-2 decimation-in-time FFT of n = 32, 64, 128 and 256 complex FP32
// points, in place in shared memory: real parts at word 0, imaginary parts at
// 512, and the twiddle factors cos(2 pi k / n) and -sin(2 pi k / n)
// (k < n/2) at 1024 and 1536, written by the host. The host stores the input
// in bit-reversed order, so the result comes out in natural order.
// The thread-block depth is n / 32 wavefronts: thread b performs butterfly b
// of every stage. For stage s (span h = 2^s) the main program loads five
// stage constants (s, h - 1, s + 1, h, log2(n) - 1 - s) and calls one
// butterfly subroutine (JSR/RTS), which:
//   computes i0 = ((b >> s) << (s + 1)) + (b & (h - 1)), i1 = i0 + h and
//     the twiddle index (b & (h - 1)) << (log2(n) - 1 - s);
//   loads x[i0], x[i1] and the twiddle (LOD);
//   forms t = w * x[i1] with four FP MULs, an FP SUB and an FP ADD;
//   stores x[i0] + t and x[i0] - t (STO).
// NOPs (12 - depth of them) separate layers of dependent instructions.
// The output is compared with a double-precision DFT, absolute error below
// 2e-3 for inputs in [-1, 1). The run time is checked against the clock
// count obtained by walking the program's control flow, and printed next to
// published counts for the same sizes.
module tb_wl_fft;
  import egpu_pkg::*;
  import egpu_asm_pkg::*;
  import fp_ref_pkg::*;
  localparam int N = 16;
  localparam int RE = 0, IM = 512, WR = 1024, WI = 1536;
  int WF;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst, start, running, done;
  logic imem_we; logic [8:0] imem_waddr; logic [42:0] imem_wdata;
  logic smem_we, smem_re; logic [14:0] smem_addr; logic [31:0] smem_wdata, smem_rdata;
  int checks = 0, failures = 0;

  egpu_top dut (.clk(clk), .rst(rst), .start(start), .cfg_depth(6'(WF)), .running(running),
    .done(done), .imem_we(imem_we), .imem_waddr(imem_waddr), .imem_wdata(imem_wdata),
    .smem_we(smem_we), .smem_re(smem_re), .smem_addr(smem_addr), .smem_wdata(smem_wdata),
    .smem_rdata(smem_rdata));

  task automatic host_wr(int a, logic [31:0] d);
    @(negedge clk); smem_we = 1; smem_addr = 15'(a); smem_wdata = d;
    @(negedge clk); smem_we = 0;
  endtask

  task automatic host_rd(int a, output logic [31:0] d);
    @(negedge clk); smem_re = 1; smem_addr = 15'(a);
    @(negedge clk); smem_re = 0;
    @(negedge clk); d = smem_rdata;
  endtask

  function automatic int cost(logic [42:0] w);
    iw_t i; int nwf, nl;
    i = iw_t'(w);
    if (is_control(i.opcode) || i.opcode == OP_NOP) return 1;
    case (i.depth) 2'b00: nwf = 1; 2'b01: nwf = WF; 2'b10: nwf = WF / 2; default: nwf = WF / 4; endcase
    case (i.width) 2'b01: nl = 4; 2'b10: nl = 1; default: nl = N; endcase
    if (i.opcode == OP_LOD) return nwf * ((nl + 3) / 4);
    if (i.opcode == OP_STO) return nwf * nl;
    return nwf;
  endfunction

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // clocks of a run: walk the control flow of the program
  function automatic int run_cost(logic [42:0] p [$]);
    int pc, total, cs [$], ls [$];
    iw_t i;
    pc = 0; total = 0;
    for (int guard = 0; guard < 1000000; guard++) begin
      i = iw_t'(p[pc]);
      total += cost(p[pc]);
      case (i.opcode)
        OP_STOP: return total;
        OP_JMP:  pc = int'(i.imm);
        OP_JSR:  begin cs.push_back(pc + 1); pc = int'(i.imm); end
        OP_RTS:  pc = cs.pop_back();
        OP_INIT: begin ls.push_back(int'(i.imm)); pc++; end
        OP_LOOP: begin
          ls[$] = ls[$] - 1;
          if (ls[$] != 0) pc = int'(i.imm);
          else begin void'(ls.pop_back()); pc++; end
        end
        default: pc++;
      endcase
    end
    return -1;
  endfunction

  initial begin
    logic [42:0] prog [$];
    logic [31:0] d;
    int n, lg, exp_cycles, cyc, pad, sub_at, bad;
    real xr [256], xi [256], yr, yi, er, ei, err_max;
    int paper [4] = '{876, 1695, 3463, 6813};

    rst = 1; start = 0; imem_we = 0; imem_waddr = 0; imem_wdata = 0;
    smem_we = 0; smem_re = 0; smem_addr = 0; smem_wdata = 0;
    WF = 1;

    for (int sz = 0; sz < 4; sz++) begin
      n = 32 << sz; lg = 5 + sz; WF = n / 32;
      pad = 12 - WF;

      // r5 = b; stage constants r6 = s, r7 = h - 1, r8 = s + 1, r9 = h, r10 = twiddle shift
      prog.delete();
      prog.push_back(ins(W_ALL, D_ALL, OP_TDX, T_UINT, 1));
      prog.push_back(ins(W_ALL, D_ALL, OP_TDY, T_UINT, 2));
      prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 3, 0, 0, 4));
      repeat (pad) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
      prog.push_back(ins(W_ALL, D_ALL, OP_SHL, T_UINT, 4, 2, 3));
      repeat (pad) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
      prog.push_back(ins(W_ALL, D_ALL, OP_ADD, T_UINT, 5, 4, 1));
      for (int s = 0; s < lg; s++) begin
        prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 6, 0, 0, s));
        prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 7, 0, 0, (1 << s) - 1));
        prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 8, 0, 0, s + 1));
        prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 9, 0, 0, 1 << s));
        prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 10, 0, 0, lg - 1 - s));
        repeat (pad) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
        prog.push_back(ctl(OP_JSR, 0));                                   // patched below
      end
      prog.push_back(ctl(OP_STOP));
      sub_at = prog.size();
      foreach (prog[a]) begin
        iw_t iw;
        iw = iw_t'(prog[a]);
        if (iw.opcode == OP_JSR) prog[a] = ctl(OP_JSR, sub_at);
      end
      // butterfly subroutine
      prog.push_back(ins(W_ALL, D_ALL, OP_SHR, T_UINT, 11, 5, 6));        // group
      prog.push_back(ins(W_ALL, D_ALL, OP_AND, T_UINT, 12, 5, 7));        // position
      repeat (pad) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
      prog.push_back(ins(W_ALL, D_ALL, OP_SHL, T_UINT, 13, 11, 8));
      prog.push_back(ins(W_ALL, D_ALL, OP_SHL, T_UINT, 14, 12, 10));      // twiddle index
      repeat (pad) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
      prog.push_back(ins(W_ALL, D_ALL, OP_ADD, T_UINT, 15, 13, 12));      // i0
      repeat (pad) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
      prog.push_back(ins(W_ALL, D_ALL, OP_ADD, T_UINT, 16, 15, 9));       // i1
      prog.push_back(ins(W_ALL, D_ALL, OP_LOD, T_FP32, 17, 15, 0, RE));
      prog.push_back(ins(W_ALL, D_ALL, OP_LOD, T_FP32, 18, 15, 0, IM));
      prog.push_back(ins(W_ALL, D_ALL, OP_LOD, T_FP32, 19, 14, 0, WR));
      prog.push_back(ins(W_ALL, D_ALL, OP_LOD, T_FP32, 20, 14, 0, WI));
      prog.push_back(ins(W_ALL, D_ALL, OP_LOD, T_FP32, 21, 16, 0, RE));
      prog.push_back(ins(W_ALL, D_ALL, OP_LOD, T_FP32, 22, 16, 0, IM));
      repeat (pad) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
      prog.push_back(ins(W_ALL, D_ALL, OP_MUL, T_FP32, 23, 19, 21));      // wr * x1r
      prog.push_back(ins(W_ALL, D_ALL, OP_MUL, T_FP32, 24, 20, 22));      // wi * x1i
      prog.push_back(ins(W_ALL, D_ALL, OP_MUL, T_FP32, 25, 19, 22));      // wr * x1i
      prog.push_back(ins(W_ALL, D_ALL, OP_MUL, T_FP32, 26, 20, 21));      // wi * x1r
      repeat (pad) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
      prog.push_back(ins(W_ALL, D_ALL, OP_SUB, T_FP32, 27, 23, 24));      // t re
      prog.push_back(ins(W_ALL, D_ALL, OP_ADD, T_FP32, 28, 25, 26));      // t im
      repeat (pad) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
      prog.push_back(ins(W_ALL, D_ALL, OP_ADD, T_FP32, 23, 17, 27));
      prog.push_back(ins(W_ALL, D_ALL, OP_ADD, T_FP32, 24, 18, 28));
      prog.push_back(ins(W_ALL, D_ALL, OP_SUB, T_FP32, 25, 17, 27));
      prog.push_back(ins(W_ALL, D_ALL, OP_SUB, T_FP32, 26, 18, 28));
      repeat (pad) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
      prog.push_back(ins(W_ALL, D_ALL, OP_STO, T_FP32, 23, 15, 0, RE));
      prog.push_back(ins(W_ALL, D_ALL, OP_STO, T_FP32, 24, 15, 0, IM));
      prog.push_back(ins(W_ALL, D_ALL, OP_STO, T_FP32, 25, 16, 0, RE));
      prog.push_back(ins(W_ALL, D_ALL, OP_STO, T_FP32, 26, 16, 0, IM));
      prog.push_back(ctl(OP_RTS));
      exp_cycles = run_cost(prog);

      rst = 1;
      repeat (3) @(negedge clk);
      rst = 0;
      foreach (prog[a]) begin
        @(negedge clk); imem_we = 1; imem_waddr = 9'(a); imem_wdata = prog[a];
      end
      @(negedge clk); imem_we = 0;

      for (int k = 0; k < n; k++) begin
        int rev;
        rev = 0;
        for (int q = 0; q < lg; q++) rev |= ((k >> q) & 1) << (lg - 1 - q);
        xr[k] = f2r(r2f((real'($urandom % 2000) - 1000.0) / 1000.0));
        xi[k] = f2r(r2f((real'($urandom % 2000) - 1000.0) / 1000.0));
        host_wr(RE + rev, r2f(xr[k]));
        host_wr(IM + rev, r2f(xi[k]));
      end
      for (int k = 0; k < n / 2; k++) begin
        host_wr(WR + k, r2f($cos(2.0 * 3.14159265358979 * k / n)));
        host_wr(WI + k, r2f(-$sin(2.0 * 3.14159265358979 * k / n)));
      end

      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
      repeat (30) @(negedge clk);
      checks++;
      if (cyc - 1 != exp_cycles) begin
        failures++; $display("FAIL n=%0d run time %0d clocks, expected %0d", n, cyc - 1, exp_cycles);
      end

      bad = 0; err_max = 0.0;
      for (int f = 0; f < n; f++) begin
        yr = 0.0; yi = 0.0;
        for (int k = 0; k < n; k++) begin
          yr += xr[k] * $cos(2.0 * 3.14159265358979 * f * k / n) + xi[k] * $sin(2.0 * 3.14159265358979 * f * k / n);
          yi += xi[k] * $cos(2.0 * 3.14159265358979 * f * k / n) - xr[k] * $sin(2.0 * 3.14159265358979 * f * k / n);
        end
        host_rd(RE + f, d); er = f2r(d) - yr; if (er < 0) er = -er;
        host_rd(IM + f, d); ei = f2r(d) - yi; if (ei < 0) ei = -ei;
        if (er > err_max) err_max = er;
        if (ei > err_max) err_max = ei;
        checks++;
        if (er > 2.0e-3 || ei > 2.0e-3) begin
          failures++; bad++;
          if (bad < 8) $display("FAIL n=%0d X[%0d] error %g %g", n, f, er, ei);
        end
      end
      $display("FFT n=%0d: %0d clocks, %0d instruction words, max error %g (published DP count %0d)",
               n, cyc - 1, prog.size(), err_max, paper[sz]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
