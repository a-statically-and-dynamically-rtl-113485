// tb_sp: self-checking test of one scalar processor (SP number 3, 4 threads,
// 2 predicate levels). Issue bundles are driven directly, and results are
// observed where they leave the SP: the store data, address and write enable
// of STO. A small behavioural model of the memory path returns load data at
// the stage the SP expects. Covers immediates (INT sign extension, FP32
// upper half), TDX/TDY, integer and FP arithmetic, LOD, STO addressing,
// per-wavefront registers, lanes not enabled, the external write port,
// dot-core operand outputs, IF/ELSE/ENDIF write gating, and the
// write-to-read distance: a result can be read by an instruction issued 9
// clocks after it, not 8.
module tb_sp;
  import egpu_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst;
  issue_t iss;
  logic en;
  logic mem_rd, mem_wr, dot_en, ext_we, act;
  logic [9:0] mem_addr;
  logic [31:0] mem_wdata, ld_data, dot_a, dot_b, ext_wdata;
  logic [6:0] ext_waddr;
  int checks = 0, failures = 0;

  sp #(.SP_ID(3), .THREADS(4), .REGS(32), .PRED_LEVELS(2), .SMEM_AW(10)) dut (
    .clk(clk), .rst(rst), .issue(iss), .lane_en(en), .mem_rd(mem_rd), .mem_wr(mem_wr),
    .mem_addr(mem_addr), .mem_wdata(mem_wdata), .ld_data(ld_data), .dot_en(dot_en),
    .dot_a(dot_a), .dot_b(dot_b), .ext_we(ext_we), .ext_waddr(ext_waddr),
    .ext_wdata(ext_wdata), .thread_active_dbg(act));

  // memory path model: address at S3, data back at S6
  logic [31:0] dmem [1024];
  logic [9:0] a4; logic [31:0] d5;
  always_ff @(posedge clk) begin
    a4 <= mem_addr;
    d5 <= dmem[a4];
    ld_data <= d5;
  end

  // store monitor
  logic [31:0] st_data [$]; logic [9:0] st_addr [$];
  always @(negedge clk) if (mem_wr) begin st_data.push_back(mem_wdata); st_addr.push_back(mem_addr); end

  task automatic op(opcode_e o, dtype_e t, int rd, int ra, int rb, int imm, int wf, bit lane = 1);
    @(negedge clk);
    iss.valid = 1; iss.op = o; iss.dtype = t; iss.rd = 5'(rd); iss.ra = 5'(ra); iss.rb = 5'(rb);
    iss.imm = 16'(imm); iss.wf = 8'(wf); en = lane;
    @(negedge clk);
    iss.valid = 0; en = 0;
  endtask

  task automatic nops(int n);
    repeat (n) @(negedge clk);
  endtask

  // store Rd of wavefront wf to address wf + ofs, wait, return the stored value
  task automatic store_chk(int rd, int wf, logic [31:0] exp, string what);
    op(OP_STO, T_INT, rd, 4, 0, 100, wf);
    nops(6);
    checks++;
    if (st_data.size() != 1 || st_data[0] !== exp || st_addr[0] !== 10'(100 + wf)) begin
      failures++;
      $display("FAIL %s: stores=%0d data=%h exp %h", what, st_data.size(),
               st_data.size() ? st_data[0] : 0, exp);
    end
    st_data.delete(); st_addr.delete();
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; iss = '0; en = 0; ext_we = 0; ext_waddr = 0; ext_wdata = 0;
    for (int i = 0; i < 1024; i++) dmem[i] = 32'hA000_0000 + 32'(i);
    nops(3); rst = 0;
    for (int w = 0; w < 4; w++) begin
      op(OP_TDY, T_INT, 4, 0, 0, 0, w);             // r4 = wavefront number
      op(OP_LDI, T_INT, 1, 0, 0, 100 + w, w);       // r1 = 100 + w
      op(OP_LDI, T_INT, 2, 0, 0, 16'hFFFD, w);      // r2 = -3
    end
    nops(10);
    for (int w = 0; w < 4; w++) store_chk(1, w, 32'(100 + w), "LDI per wavefront");
    store_chk(2, 1, 32'hFFFF_FFFD, "LDI sign extension");
    op(OP_TDX, T_INT, 6, 0, 0, 0, 2); nops(9);
    store_chk(6, 2, 32'd3, "TDX");

    // write-to-read distance: dependent read 8 clocks later sees the old value
    op(OP_LDI, T_INT, 3, 0, 0, 1, 0); nops(10);
    op(OP_ADD, T_INT, 3, 1, 2, 0, 0);                // r3 = 100 + -3 = 97
    nops(6);                                         // STO issued 8 clocks after ADD
    op(OP_STO, T_INT, 3, 4, 0, 100, 0);
    op(OP_STO, T_INT, 3, 4, 0, 100, 0);              // 9 clocks after ADD
    nops(6);
    checks++;
    if (st_data.size() != 2 || st_data[0] !== 32'd1 || st_data[1] !== 32'd97) begin
      failures++; $display("FAIL latency: %0d stores %h %h", st_data.size(), st_data[0], st_data[1]);
    end
    st_data.delete(); st_addr.delete();

    // FP multiply and subtract, integer shift
    op(OP_LDI, T_FP32, 5, 0, 0, 16'h4040, 1);        // 3.0
    op(OP_LDI, T_FP32, 7, 0, 0, 16'h3FC0, 1);        // 1.5
    nops(9);
    op(OP_MUL, T_FP32, 8, 5, 7, 0, 1);
    op(OP_SUB, T_FP32, 9, 5, 7, 0, 1);
    op(OP_SHL, T_UINT, 10, 1, 5, 0, 1);              // 101 << (0x40400000 & 31 = 0)
    nops(9);
    store_chk(8, 1, 32'h4090_0000, "FP MUL 4.5");
    store_chk(9, 1, 32'h3FC0_0000, "FP SUB 1.5");
    store_chk(10, 1, 32'd101, "SHL");

    // load: r11 = mem[r4 + 200]
    op(OP_LOD, T_INT, 11, 4, 0, 200, 2); nops(9);
    store_chk(11, 2, 32'hA000_0000 + 32'd202, "LOD");

    // lane not enabled: no write
    op(OP_LDI, T_INT, 12, 0, 0, 55, 0); nops(9);
    op(OP_LDI, T_INT, 12, 0, 0, 66, 0, 0); nops(9);
    store_chk(12, 0, 32'd55, "lane disabled");

    // external write port (dot-core write-back)
    @(negedge clk); ext_we = 1; ext_waddr = {2'd3, 5'd13}; ext_wdata = 32'h1234_5678;
    @(negedge clk); ext_we = 0; nops(2);
    store_chk(13, 3, 32'h1234_5678, "external write");

    // dot-core operands
    op(OP_DOT, T_FP32, 0, 1, 2, 0, 0);
    @(negedge clk); @(negedge clk);
    checks++;
    if (!(dot_en && dot_a == 32'd100 && dot_b == 32'hFFFF_FFFD)) begin
      failures++; $display("FAIL dot operands");
    end
    nops(4);

    // predicates, wavefront 0: r1 = 100, r2 = -3 (INT)
    op(OP_LDI, T_INT, 14, 0, 0, 1, 0); op(OP_LDI, T_INT, 15, 0, 0, 1, 0); nops(9);
    op(OP_IF, T_INT, int'(CC_LT), 1, 2, 0, 0);      // 100 < -3 : false
    op(OP_LDI, T_INT, 14, 0, 0, 7, 0);              // suppressed
    op(OP_ELSE, T_INT, 0, 0, 0, 0, 0);
    op(OP_LDI, T_INT, 15, 0, 0, 8, 0);              // runs
    op(OP_ENDIF, T_INT, 0, 0, 0, 0, 0);
    nops(9);
    store_chk(14, 0, 32'd1, "IF false suppresses write");
    store_chk(15, 0, 32'd8, "ELSE branch writes");
    op(OP_IF, T_UINT, int'(CC_LT), 1, 2, 0, 0);     // 100 < 0xFFFFFFFD unsigned: true
    op(OP_LDI, T_INT, 14, 0, 0, 9, 0);
    op(OP_IF, T_INT, int'(CC_GT), 1, 2, 0, 1);      // other wavefront, true
    op(OP_ENDIF, T_INT, 0, 0, 0, 0, 0);
    nops(9);
    store_chk(14, 0, 32'd9, "IF true (unsigned compare) writes");
    op(OP_IF, T_INT, int'(CC_EQ), 1, 2, 0, 0);      // false, and stores are gated too
    op(OP_STO, T_INT, 1, 4, 0, 100, 0);
    op(OP_ENDIF, T_INT, 0, 0, 0, 0, 0);
    nops(6);
    checks++;
    if (st_data.size() != 0) begin failures++; $display("FAIL store not gated"); end
    st_data.delete();
    store_chk(1, 0, 32'd100, "after ENDIF stores again");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
