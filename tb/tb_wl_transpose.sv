// tb_wl_transpose: matrix-transpose workload on the full-size SM (default
// parameters: 16 SPs, 512 threads, 32 registers, 128 KB shared memory).
//
// For n = 32, 64 and 128 the host stores an n x n matrix A row-major at
// word 0, runs a transpose program and reads B = A^T back from word 16384.
// Thread t (t = 16 * wavefront + SP) handles elements e = t + 512 k: it
// loads A[e] (LOD, four SPs per clock) and stores it at
// 16384 + col(e) * n + row(e) (STO, one SP per clock). Since 512 k is a
// multiple of n, element e + 512 k lands 512 k / n words further on, so the
// offsets of LOD and STO carry the k-dependence and only two address
// registers are needed. At most 8 elements are handled per pass; larger
// matrices loop (INIT/LOOP) with the two addresses advanced each pass.
//
// Every output word is checked, and the run time is checked against the
// per-instruction clock counts (one clock per wavefront for ALU
// instructions, one per four SPs for LOD, one per SP for STO). The run time
// is printed next to the n^2 + n^2/4 clocks of memory traffic that bound it
// from below, for comparison with published cycle counts.
module tb_wl_transpose;
  import egpu_pkg::*;
  import egpu_asm_pkg::*;
  localparam int N = 16, WF = 32, T = 512, OUT = 16384;
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
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [42:0] prog [$];
    logic [31:0] d, a_val;
    int n, lg, per, k_pass, passes, exp_cycles, cyc, body_at, bad;
    int paper [3] = '{1720, 5529, 20481};

    rst = 1; start = 0; imem_we = 0; imem_waddr = 0; imem_wdata = 0;
    smem_we = 0; smem_re = 0; smem_addr = 0; smem_wdata = 0;

    for (int s = 0; s < 3; s++) begin
      n = 32 << s; lg = 5 + s;
      per = n * n / T;                        // elements per thread
      k_pass = (per > 8) ? 8 : per;           // elements per pass
      passes = per / k_pass;

      // ---------------- program
      prog.delete();
      prog.push_back(ins(W_ALL, D_ALL, OP_TDX, T_UINT, 1));
      prog.push_back(ins(W_ALL, D_ALL, OP_TDY, T_UINT, 2));
      prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 3, 0, 0, 4));
      prog.push_back(ins(W_ALL, D_ALL, OP_SHL, T_UINT, 4, 2, 3));        // wf * 16
      prog.push_back(ins(W_ALL, D_ALL, OP_ADD, T_UINT, 5, 4, 1));        // e = t
      prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 6, 0, 0, lg));
      prog.push_back(ins(W_ALL, D_ALL, OP_SHR, T_UINT, 7, 5, 6));        // row
      prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 8, 0, 0, n - 1));
      prog.push_back(ins(W_ALL, D_ALL, OP_AND, T_UINT, 9, 5, 8));        // col
      prog.push_back(ins(W_ALL, D_ALL, OP_SHL, T_UINT, 20, 9, 6));       // col * n
      prog.push_back(ins(W_ALL, D_ALL, OP_ADD, T_UINT, 21, 20, 7));      // destination
      prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 22, 0, 0, T * k_pass));
      prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 23, 0, 0, T * k_pass / n));
      prog.push_back(ctl(OP_INIT, passes));
      body_at = prog.size();
      for (int k = 0; k < k_pass; k++)
        prog.push_back(ins(W_ALL, D_ALL, OP_LOD, T_UINT, 10 + k, 5, 0, T * k));
      for (int k = 0; k < k_pass; k++)
        prog.push_back(ins(W_ALL, D_ALL, OP_STO, T_UINT, 10 + k, 21, 0, OUT + T * k / n));
      prog.push_back(ins(W_ALL, D_ALL, OP_ADD, T_UINT, 5, 5, 22));
      prog.push_back(ins(W_ALL, D_ALL, OP_ADD, T_UINT, 21, 21, 23));
      prog.push_back(ctl(OP_LOOP, body_at));
      prog.push_back(ctl(OP_STOP));

      exp_cycles = 0;
      for (int a = 0; a < body_at; a++) exp_cycles += cost(prog[a]);
      for (int p = 0; p < passes; p++)
        for (int a = body_at; a < prog.size() - 1; a++) exp_cycles += cost(prog[a]);
      exp_cycles += 1;                        // STOP

      rst = 1;
      repeat (3) @(negedge clk);
      rst = 0;
      foreach (prog[a]) begin
        @(negedge clk); imem_we = 1; imem_waddr = 9'(a); imem_wdata = prog[a];
      end
      @(negedge clk); imem_we = 0;

      // ---------------- data: A[r][c] = (s << 28) | (r << 12) | c, B cleared
      for (int e = 0; e < n * n; e++) begin
        host_wr(e, 32'((s << 28) | ((e >> lg) << 12) | (e & (n - 1))));
        host_wr(OUT + e, 32'hdead_beef);
      end

      // ---------------- run
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done && cyc < 200000) begin @(negedge clk); cyc++; end
      repeat (20) @(negedge clk);
      checks++;
      if (cyc - 1 != exp_cycles) begin
        failures++; $display("FAIL %0dx%0d run time %0d clocks, expected %0d", n, n, cyc - 1, exp_cycles);
      end
      $display("transpose %0dx%0d: %0d clocks (memory traffic alone %0d; published DP count %0d)",
               n, n, cyc - 1, n * n + n * n / 4, paper[s]);

      // ---------------- check B[c][r] = A[r][c]
      bad = 0;
      for (int e = 0; e < n * n; e++) begin
        host_rd(OUT + e, d);
        a_val = 32'((s << 28) | ((e & (n - 1)) << 12) | (e >> lg));
        checks++;
        if (d !== a_val) begin
          failures++; bad++;
          if (bad < 8) $display("FAIL %0dx%0d B[%0d] got %h exp %h", n, n, e, d, a_val);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
