// tb_wl_bitonic: bitonic-sort workload on the full-size SM (default
// parameters), exercising predicates and subroutine calls.
//
// For n = 32, 64, 128 and 256 signed integers, the host stores the keys at
// word 0 and sets the thread-block depth to n / 16 wavefronts, so thread i
// owns key i. For every stage k = 2, 4, ..., n the program sets k and
// j = k / 2 and runs a loop of log2(k) passes (INIT/LOOP). Each pass calls
// (JSR) a compare-exchange subroutine and halves j. In the subroutine,
// thread i:
//   loads its key a[i] and its partner's key a[i xor j];
//   works out whether it keeps the smaller key: it does if "i is the lower
//     of the pair" equals "the block of size k is ascending" (bits j and k
//     of i);
//   computes MIN and MAX, then IF (keep smaller) picks MIN, ELSE picks MAX,
//     ENDIF, so each thread writes one of two predicated results;
//   stores the chosen key back to a[i].
// With few wavefronts an instruction takes few clocks, so NOPs are inserted
// between dependent instructions (12 - depth of them, which always leaves
// the 9 issue slots the pipeline needs).
//
// The output must be the keys in ascending order. The run time is checked
// against a clock count obtained by walking the program's control flow and
// adding each instruction's issue clocks; it is printed next to published
// counts for the same sizes.
module tb_wl_bitonic;
  import egpu_pkg::*;
  import egpu_asm_pkg::*;
  import fp_ref_pkg::*;
  localparam int N = 16;
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
    int n, exp_cycles, cyc, pad, sub_at, body_at, bad;
    int keys [256], srt [$];
    int paper [4] = '{1742, 3728, 8326, 16578};

    rst = 1; start = 0; imem_we = 0; imem_waddr = 0; imem_wdata = 0;
    smem_we = 0; smem_re = 0; smem_addr = 0; smem_wdata = 0;
    WF = 2;

    for (int s = 0; s < 4; s++) begin
      n = 32 << s; WF = n / N;
      pad = (12 - WF > 0) ? 12 - WF : 0;

      // registers: r5 = i, r6 = k, r7 = j, r8 = 1, r9 = 0
      prog.delete();
      prog.push_back(ins(W_ALL, D_ALL, OP_TDX, T_UINT, 1));
      prog.push_back(ins(W_ALL, D_ALL, OP_TDY, T_UINT, 2));
      prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 3, 0, 0, 4));
      prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 8, 0, 0, 1));
      prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 9, 0, 0, 0));
      repeat (pad) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
      prog.push_back(ins(W_ALL, D_ALL, OP_SHL, T_UINT, 4, 2, 3));
      repeat (pad) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
      prog.push_back(ins(W_ALL, D_ALL, OP_ADD, T_UINT, 5, 4, 1));       // i
      for (int k = 2; k <= n; k *= 2) begin
        prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 6, 0, 0, k));
        prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 7, 0, 0, k / 2));
        repeat (pad) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
        prog.push_back(ctl(OP_INIT, $clog2(k)));
        body_at = prog.size();
        prog.push_back(ctl(OP_JSR, 0));                                  // patched below
        prog.push_back(ins(W_ALL, D_ALL, OP_SHR, T_UINT, 7, 7, 8));      // j /= 2
        repeat (pad) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
        prog.push_back(ctl(OP_LOOP, body_at));
      end
      prog.push_back(ctl(OP_STOP));
      sub_at = prog.size();
      foreach (prog[a]) begin
        iw_t iw;
        iw = iw_t'(prog[a]);
        if (iw.opcode == OP_JSR) prog[a] = ctl(OP_JSR, sub_at);
      end
      // compare-exchange subroutine
      prog.push_back(ins(W_ALL, D_ALL, OP_XOR, T_UINT, 20, 5, 7));       // partner
      prog.push_back(ins(W_ALL, D_ALL, OP_AND, T_UINT, 23, 5, 7));
      prog.push_back(ins(W_ALL, D_ALL, OP_AND, T_UINT, 24, 5, 6));
      prog.push_back(ins(W_ALL, D_ALL, OP_LOD, T_INT, 21, 5, 0, 0));     // a[i]
      prog.push_back(ins(W_ALL, D_ALL, OP_LOD, T_INT, 22, 20, 0, 0));    // a[i xor j]
      prog.push_back(ins(W_ALL, D_ALL, OP_CNOT, T_UINT, 25, 23));        // lower of the pair
      prog.push_back(ins(W_ALL, D_ALL, OP_CNOT, T_UINT, 26, 24));        // ascending block
      repeat (pad) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
      prog.push_back(ins(W_ALL, D_ALL, OP_XOR, T_UINT, 27, 25, 26));     // 0: keep smaller
      prog.push_back(ins(W_ALL, D_ALL, OP_MIN, T_INT, 28, 21, 22));
      prog.push_back(ins(W_ALL, D_ALL, OP_MAX, T_INT, 29, 21, 22));
      repeat (pad) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
      prog.push_back(ins(W_ALL, D_ALL, OP_IF, T_UINT, int'(CC_EQ), 27, 9));
      prog.push_back(ins(W_ALL, D_ALL, OP_OR, T_UINT, 30, 28, 9));
      prog.push_back(ins(W_ALL, D_ALL, OP_ELSE));
      prog.push_back(ins(W_ALL, D_ALL, OP_OR, T_UINT, 30, 29, 9));
      prog.push_back(ins(W_ALL, D_ALL, OP_ENDIF));
      repeat (pad) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
      prog.push_back(ins(W_ALL, D_ALL, OP_STO, T_INT, 30, 5, 0, 0));
      prog.push_back(ctl(OP_RTS));
      exp_cycles = run_cost(prog);

      rst = 1;
      repeat (3) @(negedge clk);
      rst = 0;
      foreach (prog[a]) begin
        @(negedge clk); imem_we = 1; imem_waddr = 9'(a); imem_wdata = prog[a];
      end
      @(negedge clk); imem_we = 0;

      srt.delete();
      for (int t = 0; t < n; t++) begin
        keys[t] = int'($urandom % 2001) - 1000;
        srt.push_back(keys[t]);
        host_wr(t, 32'(keys[t]));
      end
      for (int x = 1; x < n; x++)            // reference: signed insertion sort
        for (int y = x; y > 0 && srt[y-1] > srt[y]; y--) begin
          int tmp;
          tmp = srt[y]; srt[y] = srt[y-1]; srt[y-1] = tmp;
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
      $display("bitonic sort n=%0d: %0d clocks, %0d instruction words (published DP count %0d)",
               n, cyc - 1, prog.size(), paper[s]);

      bad = 0;
      for (int t = 0; t < n; t++) begin
        host_rd(t, d);
        checks++;
        if (d !== 32'(srt[t])) begin
          failures++; bad++;
          if (bad < 8) $display("FAIL n=%0d a[%0d] got %0d exp %0d", n, t, $signed(d), srt[t]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
