// tb_wl_reduction: vector-reduction workload on the full-size SM (default
// parameters), using the dot-product core.
//
// For n = 32, 64 and 128 FP32 elements the host stores the vector at word 0
// and sets the thread-block depth to n / 16 wavefronts, so one thread holds
// one element. The program:
//   every thread loads its element (LOD, four SPs per clock);
//   SUM adds the 16 elements of each wavefront in the dot core, the partial
//     sum landing in SP0's register of that wavefront;
//   SP0 alone stores the partial sums, one per wavefront ("SP0 only" width);
//   wavefront 0 alone loads them back, one per SP (unused SPs read zeros);
//   a second SUM over wavefront 0 gives the total in SP0, which SP0 stores
//   using the single-thread ("wavefront 0 only") mode.
// There is no hazard detection, so NOPs separate dependent instructions
// (9 issue slots after ordinary instructions, 16 after SUM for the dot-core
// write-back).
// Element values are small integers, so every FP32 sum is exact whatever
// the order of addition. The partial sums and the total are checked, and the
// run time is checked against the per-instruction clock counts and printed
// next to published counts for the same sizes.
module tb_wl_reduction;
  import egpu_pkg::*;
  import egpu_asm_pkg::*;
  import fp_ref_pkg::*;
  localparam int N = 16, TMP = 2048, RES = 4000;
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
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [42:0] prog [$];
    logic [31:0] d;
    int n, exp_cycles, cyc, ref_tot, part;
    int x [128];
    int paper [3] = '{62, 94, 101};

    rst = 1; start = 0; imem_we = 0; imem_waddr = 0; imem_wdata = 0;
    smem_we = 0; smem_re = 0; smem_addr = 0; smem_wdata = 0;
    WF = 2;

    for (int s = 0; s < 3; s++) begin
      n = 32 << s; WF = n / N;

      prog.delete();
      prog.push_back(ins(W_ALL, D_ALL, OP_TDX, T_UINT, 1));
      prog.push_back(ins(W_ALL, D_ALL, OP_TDY, T_UINT, 2));
      prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 3, 0, 0, 4));
      repeat (9) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
      prog.push_back(ins(W_ALL, D_ALL, OP_SHL, T_UINT, 4, 2, 3));        // wf * 16
      repeat (9) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
      prog.push_back(ins(W_ALL, D_ALL, OP_ADD, T_UINT, 5, 4, 1));        // t
      repeat (9) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
      prog.push_back(ins(W_ALL, D_ALL, OP_LOD, T_FP32, 6, 5, 0, 0));     // x[t]
      repeat (9) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
      prog.push_back(ins(W_ALL, D_ALL, OP_SUM, T_FP32, 7, 6, 0));        // partial per wavefront
      repeat (16) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
      prog.push_back(ins(W_SP0, D_ALL, OP_STO, T_FP32, 7, 2, 0, TMP));   // tmp[wf]
      repeat (2) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
      prog.push_back(ins(W_ALL, D_WF0, OP_LOD, T_FP32, 8, 1, 0, TMP));   // SP j: tmp[j]
      repeat (9) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
      prog.push_back(ins(W_ALL, D_WF0, OP_SUM, T_FP32, 9, 8, 0));        // total
      repeat (16) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
      prog.push_back(ins(W_SP0, D_WF0, OP_STO, T_FP32, 9, 1, 0, RES));
      prog.push_back(ctl(OP_STOP));
      exp_cycles = 0;
      foreach (prog[a]) exp_cycles += cost(prog[a]);

      rst = 1;
      repeat (3) @(negedge clk);
      rst = 0;
      foreach (prog[a]) begin
        @(negedge clk); imem_we = 1; imem_waddr = 9'(a); imem_wdata = prog[a];
      end
      @(negedge clk); imem_we = 0;

      ref_tot = 0;
      for (int t = 0; t < n; t++) begin
        x[t] = int'(($urandom % 201)) - 100;
        ref_tot += x[t];
        host_wr(t, r2f(real'(x[t])));
      end
      for (int j = 0; j < N; j++) host_wr(TMP + j, 32'd0);
      host_wr(RES, 32'hdead_beef);

      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done && cyc < 20000) begin @(negedge clk); cyc++; end
      repeat (30) @(negedge clk);
      checks++;
      if (cyc - 1 != exp_cycles) begin
        failures++; $display("FAIL n=%0d run time %0d clocks, expected %0d", n, cyc - 1, exp_cycles);
      end
      $display("reduction n=%0d: %0d clocks (published count with the dot core %0d)", n, cyc - 1, paper[s]);

      for (int w = 0; w < WF; w++) begin
        part = 0;
        for (int j = 0; j < N; j++) part += x[16 * w + j];
        host_rd(TMP + w, d);
        checks++;
        if (d !== r2f(real'(part))) begin
          failures++; $display("FAIL n=%0d partial[%0d] got %h exp %h", n, w, d, r2f(real'(part)));
        end
      end
      host_rd(RES, d);
      checks++;
      if (d !== r2f(real'(ref_tot))) begin
        failures++; $display("FAIL n=%0d total got %h exp %h", n, d, r2f(real'(ref_tot)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
