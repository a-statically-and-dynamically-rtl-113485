// tb_egpu_top: end-to-end test of the streaming multiprocessor at its
// default size (16 SPs, 512 threads, 32 registers per thread, 128 KB shared
// memory, 5 predicate levels, dot-product core).
//
// The host loads two 512-element FP32 vectors x and y into shared memory
// and a program into program memory, runs it with a thread-block depth of 32
// wavefronts and reads the results back. The program, per thread t
// (t = 16 * wavefront + SP number, built from TDX/TDY):
//   z[t] = x[t] + y[t]                             (LOD, FP ADD, STO)
//   w[t] = z[t] * (t < 100 ? 2 : 3)                (IF / ELSE / ENDIF)
//   per wavefront, in SP0: dot = sum x*y, sum = sum x (DOT, SUM), stored by
//   SP0 alone (width code "SP0 only")
//   per wavefront, in SP0: 1/sqrt(x[16*wf])        (INVSQR)
//   77 written by the first 4 SPs of the first half of the wavefronts only
//   a counter incremented 3 times in a subroutine called from a loop
// Every result is checked against values computed here. The run time in
// clocks is checked against the sum of the per-instruction counts (one
// clock per wavefront for ordinary instructions, one per four SPs for loads,
// one per SP for stores, one per control instruction). Each mechanism
// (grouped loads, serial stores, width and depth subsets, predicated-off
// writes, dot-core and invsqrt write-back, loop, subroutine call, host
// access) is counted and must happen at least once.
module tb_egpu_top;
  import egpu_pkg::*;
  import egpu_asm_pkg::*;
  import fp_ref_pkg::*;
  localparam int N = 16, WF = 32, T = 512;
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

  // ------------------------------------------------------------ mechanism counters
  int n_lod_grp, n_sto, n_width, n_depth, n_pred_off, n_dot_wb, n_inv, n_loop, n_jsr, n_host;
  always @(posedge clk) if (!rst) begin
    if (dut.issue.valid && dut.issue.op == OP_LOD && dut.lane_en != '1) n_lod_grp++;
    if (dut.issue.valid && dut.issue.op == OP_STO) n_sto++;
    if (dut.issue.valid && !(dut.issue.op inside {OP_LOD, OP_STO, OP_INVSQR}) && dut.lane_en != '1) n_width++;
    if (dut.running && dut.u_seq.iw.depth != D_ALL && !is_control(dut.u_seq.iw.opcode)) n_depth++;
    if (dut.g_sp[0].u_sp.cw.valid && !dut.g_sp[0].u_sp.cw.active) n_pred_off++;
    if (dut.ext_we) n_dot_wb++;
    if (dut.g_dot.u_dot.ctl[8].v && dut.g_dot.u_dot.ctl[8].inv) n_inv++;
    if (dut.running && dut.u_seq.iw.opcode == OP_LOOP && dut.u_seq.next_pc != dut.pc + 9'd1) n_loop++;
    if (dut.running && dut.u_seq.iw.opcode == OP_JSR) n_jsr++;
    if (!dut.running && (smem_we || smem_re)) n_host++;
  end

  task automatic chk(logic [31:0] got, logic [31:0] exp, string what, int idx);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 15) $display("FAIL %s[%0d]: got %h exp %h", what, idx, got, exp);
    end
  endtask

  task automatic host_wr(int a, logic [31:0] d);
    @(negedge clk); smem_we = 1; smem_addr = 15'(a); smem_wdata = d;
    @(negedge clk); smem_we = 0;
  endtask

  task automatic host_rd(int a, output logic [31:0] d);
    @(negedge clk); smem_re = 1; smem_addr = 15'(a);
    @(negedge clk); smem_re = 0;
    @(negedge clk); d = smem_rdata;
  endtask

  // program and its expected run time
  logic [42:0] prog [$];
  int exp_cycles;
  function automatic int cost(logic [42:0] w);
    iw_t i; int nwf, nl;
    i = iw_t'(w);
    if (is_control(i.opcode) || i.opcode == OP_NOP) return 1;
    case (i.depth) 2'b00: nwf = 1; 2'b01: nwf = WF; 2'b10: nwf = WF / 2; default: nwf = WF / 4; endcase
    case (i.width) 2'b01: nl = 4; 2'b10: nl = 1; default: nl = N; endcase
    if (i.opcode == OP_INVSQR) nl = 1;
    if (i.opcode == OP_LOD) return nwf * ((nl + 3) / 4);
    if (i.opcode == OP_STO) return nwf * nl;
    return nwf;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] x [T], y [T], d;
    int cyc, sub_at, body_at;
    real rr, err;
    logic [31:0] fz, fw;
    int trace [$];

    rst = 1; start = 0; imem_we = 0; imem_waddr = 0; imem_wdata = 0;
    smem_we = 0; smem_re = 0; smem_addr = 0; smem_wdata = 0;
    {n_lod_grp, n_sto, n_width, n_depth, n_pred_off, n_dot_wb, n_inv, n_loop, n_jsr, n_host} = '0;

    // ---------------- program
    prog.push_back(ins(W_ALL, D_ALL, OP_TDX, T_UINT, 1));            // 0  r1 = SP number
    prog.push_back(ins(W_ALL, D_ALL, OP_TDY, T_UINT, 2));            // 1  r2 = wavefront
    prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 3, 0, 0, 4));   // 2  r3 = 4
    prog.push_back(ins(W_ALL, D_ALL, OP_SHL, T_UINT, 4, 2, 3));      // 3  r4 = wf * 16
    prog.push_back(ins(W_ALL, D_ALL, OP_ADD, T_UINT, 5, 4, 1));      // 4  r5 = t
    prog.push_back(ins(W_ALL, D_ALL, OP_LOD, T_FP32, 6, 5, 0, 0));   // 5  r6 = x[t]
    prog.push_back(ins(W_ALL, D_ALL, OP_LOD, T_FP32, 7, 5, 0, 512)); // 6  r7 = y[t]
    prog.push_back(ins(W_ALL, D_ALL, OP_ADD, T_FP32, 8, 6, 7));      // 7  r8 = x + y
    prog.push_back(ins(W_ALL, D_ALL, OP_STO, T_FP32, 8, 5, 0, 1024));// 8  z[t]
    prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 10, 0, 0, 100));// 9  r10 = 100
    prog.push_back(ins(W_ALL, D_ALL, OP_IF, T_UINT, int'(CC_LT), 5, 10)); // 10 if t < 100
    prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_FP32, 11, 0, 0, 16'h4000)); // 11 r11 = 2.0
    prog.push_back(ins(W_ALL, D_ALL, OP_ELSE));                      // 12
    prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_FP32, 11, 0, 0, 16'h4040)); // 13 r11 = 3.0
    prog.push_back(ins(W_ALL, D_ALL, OP_ENDIF));                     // 14
    prog.push_back(ins(W_ALL, D_ALL, OP_MUL, T_FP32, 12, 8, 11));    // 15 r12 = z * r11
    prog.push_back(ins(W_ALL, D_ALL, OP_STO, T_FP32, 12, 5, 0, 1536));// 16 w[t]
    prog.push_back(ins(W_ALL, D_ALL, OP_DOT, T_FP32, 13, 6, 7));     // 17 SP0 r13 = sum x*y
    prog.push_back(ins(W_ALL, D_ALL, OP_SUM, T_FP32, 14, 6, 7));     // 18 SP0 r14 = sum x
    prog.push_back(ins(W_SP0, D_ALL, OP_INVSQR, T_FP32, 16, 6));     // 19 SP0 r16 = 1/sqrt(x)
    prog.push_back(ins(W_SP0, D_ALL, OP_STO, T_FP32, 13, 5, 0, 2048));// 20
    prog.push_back(ins(W_SP0, D_ALL, OP_STO, T_FP32, 14, 5, 0, 2049));// 21
    prog.push_back(ins(W_SP0, D_ALL, OP_STO, T_FP32, 16, 5, 0, 2560));// 22
    prog.push_back(ins(W_QTR, D_HALF, OP_LDI, T_UINT, 15, 0, 0, 77)); // 23
    prog.push_back(ins(W_QTR, D_HALF, OP_STO, T_UINT, 15, 5, 0, 3072));// 24
    prog.push_back(ins(W_SP0, D_WF0, OP_LDI, T_UINT, 17, 0, 0, 0));   // 25 r17 = 0
    prog.push_back(ins(W_SP0, D_WF0, OP_LDI, T_UINT, 18, 0, 0, 1));   // 26 r18 = 1
    for (int k = 0; k < 8; k++) prog.push_back(ins(W_ALL, D_ALL, OP_NOP));  // result distance
    prog.push_back(ctl(OP_INIT, 3));
    body_at = prog.size();
    prog.push_back(ctl(OP_JSR, 0));                                   // target patched below
    prog.push_back(ctl(OP_LOOP, body_at));
    for (int k = 0; k < 8; k++) prog.push_back(ins(W_ALL, D_ALL, OP_NOP));
    prog.push_back(ins(W_SP0, D_WF0, OP_STO, T_UINT, 17, 5, 0, 4000));
    prog.push_back(ctl(OP_STOP));
    sub_at = prog.size();
    prog[body_at] = ctl(OP_JSR, sub_at);
    prog.push_back(ins(W_SP0, D_WF0, OP_ADD, T_UINT, 17, 17, 18));  // subroutine
    for (int k = 0; k < 8; k++) prog.push_back(ins(W_ALL, D_ALL, OP_NOP));
    prog.push_back(ctl(OP_RTS));

    // execution trace and expected clocks
    for (int a = 0; a < body_at; a++) trace.push_back(a);
    for (int it = 0; it < 3; it++) begin
      trace.push_back(body_at);
      for (int a = sub_at; a < prog.size(); a++) trace.push_back(a);
      trace.push_back(body_at + 1);
    end
    for (int a = body_at + 2; a < sub_at; a++) trace.push_back(a);
    exp_cycles = 0;
    foreach (trace[k]) exp_cycles += cost(prog[trace[k]]);

    repeat (3) @(negedge clk);
    rst = 0;
    foreach (prog[a]) begin
      @(negedge clk); imem_we = 1; imem_waddr = 9'(a); imem_wdata = prog[a];
    end
    @(negedge clk); imem_we = 0;

    // ---------------- data
    for (int t = 0; t < T; t++) begin
      x[t] = r2f(real'(t % 7 + 1));
      y[t] = r2f(real'(t % 5) - 2.0);
      host_wr(t, x[t]);
      host_wr(512 + t, y[t]);
      host_wr(3072 + t, 32'd0);
    end

    // ---------------- run
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
    repeat (20) @(negedge clk);   // let the pipeline drain
    checks++;
    if (cyc - 1 != exp_cycles) begin
      failures++; $display("FAIL run time %0d clocks, expected %0d", cyc - 1, exp_cycles);
    end
    $display("run time %0d clocks", cyc - 1);

    // ---------------- results
    for (int t = 0; t < T; t++) begin
      fz = r2f(f2r(x[t]) + f2r(y[t]));
      fw = r2f(f2r(fz) * (t < 100 ? 2.0 : 3.0));
      host_rd(1024 + t, d); chk(d, fz, "z", t);
      host_rd(1536 + t, d); chk(d, fw, "w", t);
      host_rd(3072 + t, d); chk(d, ((t % 16) < 4 && (t / 16) < WF / 2) ? 32'd77 : 32'd0, "subset", t);
    end
    for (int w = 0; w < WF; w++) begin
      rr = 0; for (int j = 0; j < N; j++) rr += f2r(x[16*w+j]) * f2r(y[16*w+j]);
      host_rd(2048 + 16*w, d); chk(d, r2f(rr), "dot", w);
      rr = 0; for (int j = 0; j < N; j++) rr += f2r(x[16*w+j]);
      host_rd(2049 + 16*w, d); chk(d, r2f(rr), "sum", w);
      rr = 1.0 / $sqrt(f2r(x[16*w]));
      host_rd(2560 + 16*w, d);
      err = (f2r(d) - rr) / rr; if (err < 0) err = -err;
      checks++;
      if (err > 2.0e-5) begin failures++; $display("FAIL invsqrt[%0d] %h", w, d); end
    end
    host_rd(4000, d); chk(d, 32'd3, "loop counter", 0);

    // ---------------- mechanisms
    $display("grouped loads %0d, stores %0d, width subsets %0d, depth subsets %0d, predicated-off writes %0d",
             n_lod_grp, n_sto, n_width, n_depth, n_pred_off);
    $display("dot-core write-backs %0d, invsqrt %0d, loop jumps %0d, calls %0d, host accesses %0d",
             n_dot_wb, n_inv, n_loop, n_jsr, n_host);
    checks++; if (n_lod_grp == 0) begin failures++; $display("FAIL no grouped load"); end
    checks++; if (n_sto == 0) begin failures++; $display("FAIL no store"); end
    checks++; if (n_width == 0) begin failures++; $display("FAIL no width subset"); end
    checks++; if (n_depth == 0) begin failures++; $display("FAIL no depth subset"); end
    checks++; if (n_pred_off == 0) begin failures++; $display("FAIL no predicated-off write"); end
    checks++; if (n_dot_wb == 0) begin failures++; $display("FAIL no dot write-back"); end
    checks++; if (n_inv == 0) begin failures++; $display("FAIL no invsqrt"); end
    checks++; if (n_loop == 0) begin failures++; $display("FAIL no loop jump"); end
    checks++; if (n_jsr == 0) begin failures++; $display("FAIL no call"); end
    checks++; if (n_host == 0) begin failures++; $display("FAIL no host access"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
