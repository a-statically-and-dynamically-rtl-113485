// tb_wl_mmm: matrix-matrix multiply workload, C = A * B for 32 x 32 FP32
// matrices, on the full-size SM (default parameters) with the dot-product
// core.
//
// Wavefront w stands for column w of C. Thread (w, SP j) first loads
// B[j][w] and B[16+j][w] into two registers, where they stay. Then, for each
// row i (an INIT 32 / LOOP loop):
//   every thread loads A[i][j] and A[i][16+j] (the same row in every
//     wavefront, LOD at four SPs per clock);
//   two DOT instructions sum A[i][j]*B[j][w] and A[i][16+j]*B[16+j][w] over
//     the 16 SPs, each leaving one partial result per wavefront in SP0;
//   SP0 alone adds the two partials and stores C[i][w] ("SP0 only" width,
//     one store per wavefront);
//   the row addresses of every thread advance by 32.
// All instructions span the full thread-block depth (32 wavefronts), which
// already spaces dependent instructions by more than the pipeline and
// dot-core latencies. Six NOPs after the second DOT keep the SP0 ADD's
// register writes clear of the dot core's write-backs, which use the same
// register-file write port.
// Elements are small integers, so all FP32 sums are exact. Every element of
// C is checked, and the run time is checked against the per-instruction
// clock counts and printed next to the published count for this size.
// The larger published sizes (64 x 64, 128 x 128) need a different thread
// mapping (more columns than wavefronts) and are not run here.
module tb_wl_mmm;
  import egpu_pkg::*;
  import egpu_asm_pkg::*;
  import fp_ref_pkg::*;
  localparam int N = 16, WF = 32, T = 512, NM = 32;
  localparam int A0 = 0, B0 = 1024, C0 = 2048;
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
    int exp_cycles, cyc, body_at, bad, c_ref;
    int a [NM][NM], b [NM][NM];

    rst = 1; start = 0; imem_we = 0; imem_waddr = 0; imem_wdata = 0;
    smem_we = 0; smem_re = 0; smem_addr = 0; smem_wdata = 0;

    prog.push_back(ins(W_ALL, D_ALL, OP_TDX, T_UINT, 1));               // j
    prog.push_back(ins(W_ALL, D_ALL, OP_TDY, T_UINT, 2));               // w
    prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 3, 0, 0, 5));
    prog.push_back(ins(W_ALL, D_ALL, OP_SHL, T_UINT, 4, 1, 3));         // 32 j
    prog.push_back(ins(W_ALL, D_ALL, OP_ADD, T_UINT, 5, 4, 2));         // 32 j + w
    prog.push_back(ins(W_ALL, D_ALL, OP_LOD, T_FP32, 6, 5, 0, B0));     // B[j][w]
    prog.push_back(ins(W_ALL, D_ALL, OP_LOD, T_FP32, 7, 5, 0, B0 + 512)); // B[16+j][w]
    prog.push_back(ins(W_ALL, D_ALL, OP_TDX, T_UINT, 8));               // A row address
    prog.push_back(ins(W_ALL, D_ALL, OP_TDY, T_UINT, 9));               // C address
    prog.push_back(ins(W_ALL, D_ALL, OP_LDI, T_UINT, 10, 0, 0, 32));
    prog.push_back(ctl(OP_INIT, NM));
    body_at = prog.size();
    prog.push_back(ins(W_ALL, D_ALL, OP_LOD, T_FP32, 11, 8, 0, A0));      // A[i][j]
    prog.push_back(ins(W_ALL, D_ALL, OP_LOD, T_FP32, 12, 8, 0, A0 + 16)); // A[i][16+j]
    prog.push_back(ins(W_ALL, D_ALL, OP_DOT, T_FP32, 13, 11, 6));
    prog.push_back(ins(W_ALL, D_ALL, OP_DOT, T_FP32, 14, 12, 7));
    // the dot core writes SP0 until about 14 clocks after the last DOT
    // thread operation: wait so the ADD's write-backs start after that
    repeat (6) prog.push_back(ins(W_ALL, D_WF0, OP_NOP));
    prog.push_back(ins(W_SP0, D_ALL, OP_ADD, T_FP32, 15, 13, 14));
    prog.push_back(ins(W_SP0, D_ALL, OP_STO, T_FP32, 15, 9, 0, C0));     // C[i][w]
    prog.push_back(ins(W_ALL, D_ALL, OP_ADD, T_UINT, 8, 8, 10));
    prog.push_back(ins(W_ALL, D_ALL, OP_ADD, T_UINT, 9, 9, 10));
    prog.push_back(ctl(OP_LOOP, body_at));
    prog.push_back(ctl(OP_STOP));

    exp_cycles = 0;
    for (int k = 0; k < body_at; k++) exp_cycles += cost(prog[k]);
    for (int i = 0; i < NM; i++)
      for (int k = body_at; k < prog.size() - 1; k++) exp_cycles += cost(prog[k]);
    exp_cycles += 1;

    repeat (3) @(negedge clk);
    rst = 0;
    foreach (prog[k]) begin
      @(negedge clk); imem_we = 1; imem_waddr = 9'(k); imem_wdata = prog[k];
    end
    @(negedge clk); imem_we = 0;

    for (int i = 0; i < NM; i++)
      for (int j = 0; j < NM; j++) begin
        a[i][j] = int'($urandom % 9) - 4;
        b[i][j] = int'($urandom % 9) - 4;
        host_wr(A0 + NM * i + j, r2f(real'(a[i][j])));
        host_wr(B0 + NM * i + j, r2f(real'(b[i][j])));
        host_wr(C0 + NM * i + j, 32'hdead_beef);
      end

    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 60000) begin @(negedge clk); cyc++; end
    repeat (30) @(negedge clk);
    checks++;
    if (cyc - 1 != exp_cycles) begin
      failures++; $display("FAIL run time %0d clocks, expected %0d", cyc - 1, exp_cycles);
    end
    $display("MMM 32x32 with the dot core: %0d clocks (published count 19800)", cyc - 1);

    bad = 0;
    for (int i = 0; i < NM; i++)
      for (int j = 0; j < NM; j++) begin
        c_ref = 0;
        for (int k = 0; k < NM; k++) c_ref += a[i][k] * b[k][j];
        host_rd(C0 + NM * i + j, d);
        checks++;
        if (d !== r2f(real'(c_ref))) begin
          failures++; bad++;
          if (bad < 8) $display("FAIL C[%0d][%0d] got %h exp %h", i, j, d, r2f(real'(c_ref)));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
