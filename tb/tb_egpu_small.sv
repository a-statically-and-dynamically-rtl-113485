// tb_egpu_small: the streaming multiprocessor in a reduced static
// configuration: 16 SPs, 128 threads (8 wavefronts), 16 registers per
// thread, 4096-word (16 KB) shared memory with two write ports (the "QP"
// organisation, stores take one clock per two SPs), a 128-word program
// memory, no predicates and no dot-product core. It shows that the parameters reshape
// the whole design: register addresses, wavefront counters, address widths
// and the optional blocks.
//
// The program, per thread t = 16 * wavefront + SP:
//   z[t] = x[t] + y[t]              (FP32, LOD / ADD / STO)
//   v[t] = (t * t) >> 1 using MUL16LO and SHR, kept in register 15
//   an IF / ELSE / ENDIF pair, which has no effect without predicates, so
//     every thread takes both branches and ends with the ELSE value
//   77 stored by the first 4 SPs of the first quarter of the wavefronts
//   v[t] + 3 accumulated by a loop of 3 iterations (INIT / LOOP), stored
// Every result word and the run time (the sum of the per-instruction issue
// clocks) are checked.
module tb_egpu_small;
  import egpu_pkg::*;
  import egpu_asm_pkg::*;
  import fp_ref_pkg::*;
  localparam int N = 16, WF = 8, T = 128;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst, start, running, done;
  logic imem_we; logic [6:0] imem_waddr; logic [42:0] imem_wdata;
  logic smem_we, smem_re; logic [11:0] smem_addr; logic [31:0] smem_wdata, smem_rdata;
  int checks = 0, failures = 0;

  egpu_top #(.THREADS(T), .REGS(16), .SMEM_WORDS(4096), .PRED_LEVELS(0), .IMEM_DEPTH(128),
             .DOT_EN(1'b0), .SMEM_WPORTS(2)) dut (
    .clk(clk), .rst(rst), .start(start), .cfg_depth(4'(WF)), .running(running),
    .done(done), .imem_we(imem_we), .imem_waddr(imem_waddr), .imem_wdata(imem_wdata),
    .smem_we(smem_we), .smem_re(smem_re), .smem_addr(smem_addr), .smem_wdata(smem_wdata),
    .smem_rdata(smem_rdata));

  task automatic chk(logic [31:0] got, logic [31:0] exp, string what, int idx);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 15) $display("FAIL %s[%0d]: got %h exp %h", what, idx, got, exp);
    end
  endtask

  task automatic host_wr(int a, logic [31:0] d);
    @(negedge clk); smem_we = 1; smem_addr = 12'(a); smem_wdata = d;
    @(negedge clk); smem_we = 0;
  endtask

  task automatic host_rd(int a, output logic [31:0] d);
    @(negedge clk); smem_re = 1; smem_addr = 12'(a);
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
    if (i.opcode == OP_STO) return nwf * ((nl + 1) / 2);   // two write ports
    return nwf;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("clocks with two stores %0d", n_dual);
    checks++; if (n_dual == 0) begin failures++; $display("FAIL second write port never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_dual;   // clocks in which both write ports store
  always @(posedge clk) if (!rst && dut.m_we && dut.x_we1) n_dual++;

  initial begin
    logic [42:0] prog [$];
    logic [31:0] x [T], y [T], d;
    int cyc, exp_cycles, body_at;
    int n_iter = 3;

    n_dual = 0;
    rst = 1; start = 0; imem_we = 0; imem_waddr = 0; imem_wdata = 0;
    smem_we = 0; smem_re = 0; smem_addr = 0; smem_wdata = 0;

    // 8 wavefronts: dependent instructions need a gap of 9 issue slots
    prog.push_back(ins(W_ALL, D_ALL, OP_TDX, T_UINT, 1));
    prog.push_back(ins(W_ALL, D_ALL, OP_TDY, T_UINT, 2));
    prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 3, 0, 0, 4));
    prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 9, 0, 0, 1));
    prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 10, 0, 0, 3));
    prog.push_back(ins(W_ALL, D_ALL, OP_SHL, T_UINT, 4, 2, 3));        // wf * 16
    prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
    prog.push_back(ins(W_ALL, D_ALL, OP_ADD, T_UINT, 5, 4, 1));        // t
    prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
    prog.push_back(ins(W_ALL, D_ALL, OP_LOD, T_FP32, 6, 5, 0, 0));     // x[t]
    prog.push_back(ins(W_ALL, D_ALL, OP_LOD, T_FP32, 7, 5, 0, 256));   // y[t]
    prog.push_back(ins(W_ALL, D_ALL, OP_MUL16LO, T_UINT, 12, 5, 5));   // t * t
    prog.push_back(ins(W_ALL, D_ALL, OP_ADD, T_FP32, 8, 6, 7));
    prog.push_back(ins(W_ALL, D_ALL, OP_SHR, T_UINT, 15, 12, 9));      // >> 1
    prog.push_back(ins(W_ALL, D_ALL, OP_STO, T_FP32, 8, 5, 0, 512));   // z
    prog.push_back(ins(W_ALL, D_ALL, OP_STO, T_UINT, 15, 5, 0, 768));  // v
    prog.push_back(ins(W_ALL, D_ALL, OP_IF, T_UINT, int'(CC_EQ), 5, 5));
    prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 11, 0, 0, 1));
    prog.push_back(ins(W_ALL, D_ALL, OP_ELSE));
    prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 11, 0, 0, 2));
    prog.push_back(ins(W_ALL, D_ALL, OP_ENDIF));
    prog.push_back(ins(W_QTR, D_QTR, OP_LDI, T_UINT, 13, 0, 0, 77));
    prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
    prog.push_back(ins(W_ALL, D_ALL, OP_STO, T_UINT, 11, 5, 0, 1024)); // branch value
    prog.push_back(ins(W_QTR, D_QTR, OP_STO, T_UINT, 13, 5, 0, 1280));
    prog.push_back(ctl(OP_INIT, n_iter));
    body_at = prog.size();
    prog.push_back(ins(W_ALL, D_ALL, OP_ADD, T_UINT, 15, 15, 9));      // v += 1
    prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
    prog.push_back(ctl(OP_LOOP, body_at));
    prog.push_back(ins(W_ALL, D_ALL, OP_STO, T_UINT, 15, 5, 0, 1536));
    prog.push_back(ctl(OP_STOP));

    exp_cycles = 0;
    foreach (prog[a]) exp_cycles += cost(prog[a]);
    exp_cycles += (n_iter - 1) * (cost(prog[body_at]) + cost(prog[body_at + 1]) + 1);

    repeat (3) @(negedge clk);
    rst = 0;
    foreach (prog[a]) begin
      @(negedge clk); imem_we = 1; imem_waddr = 7'(a); imem_wdata = prog[a];
    end
    @(negedge clk); imem_we = 0;

    for (int t = 0; t < T; t++) begin
      x[t] = r2f(real'(t % 11) * 0.5);
      y[t] = r2f(real'(t % 3) - 1.25);
      host_wr(t, x[t]);
      host_wr(256 + t, y[t]);
      host_wr(1280 + t, 32'd0);
    end

    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 20000) begin @(negedge clk); cyc++; end
    repeat (20) @(negedge clk);
    checks++;
    if (cyc - 1 != exp_cycles) begin
      failures++; $display("FAIL run time %0d clocks, expected %0d", cyc - 1, exp_cycles);
    end
    $display("run time %0d clocks", cyc - 1);

    for (int t = 0; t < T; t++) begin
      host_rd(512 + t, d);  chk(d, r2f(f2r(x[t]) + f2r(y[t])), "z", t);
      host_rd(768 + t, d);  chk(d, 32'((t * t) >> 1), "v", t);
      host_rd(1024 + t, d); chk(d, 32'd2, "branch", t);
      host_rd(1280 + t, d); chk(d, ((t % 16) < 4 && (t / 16) < WF / 4) ? 32'd77 : 32'd0, "subset", t);
      host_rd(1536 + t, d); chk(d, 32'(((t * t) >> 1) + n_iter), "loop", t);
    end
    $display("clocks with two stores %0d", n_dual);
    checks++; if (n_dual == 0) begin failures++; $display("FAIL second write port never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
