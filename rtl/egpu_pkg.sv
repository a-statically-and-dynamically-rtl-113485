// egpu_pkg: types and constants shared by the eGPU streaming multiprocessor.
//
// The instruction word (IW) is 43 bits wide for a configuration with 32
// registers per thread. Its fields are numbered 43 down to 1, as in the
// published instruction-word diagram:
//   [43:40] variable (thread-space control)  [39:34] opcode  [33:32] type
//   [31:27] RD  [26:22] RA  [21:17] RB  [16:1] immediate
// The 4-bit thread-space field holds the wavefront width code in its upper
// two bits ([4:3] of the field) and the depth code in its lower two ([2:1]).
// Field positions follow the published layout. The numeric opcode values, the
// type encoding and the condition-code encoding are this design's own choice;
// the source only names the instructions.
package egpu_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned DATA_W    = 32;  // natural FP32 datapath width
  localparam int unsigned IW_W      = 43;  // instruction word, 32 regs/thread
  localparam int unsigned IMM_W     = 16;
  localparam int unsigned REG_IDX_W = 5;   // 32 registers per thread

  // ---------------------------------------------------------------- type field
  typedef enum logic [1:0] {
    T_UINT = 2'b00,
    T_INT  = 2'b01,
    T_FP32 = 2'b10
  } dtype_e;

  // ---------------------------------------------------------------- opcodes
  typedef enum logic [5:0] {
    OP_NOP     = 6'd0,
    // integer / FP arithmetic (type selects INT, UINT or FP32)
    OP_ADD     = 6'd1,
    OP_SUB     = 6'd2,
    OP_NEG     = 6'd3,
    OP_ABS     = 6'd4,
    OP_MUL16LO = 6'd5,
    OP_MUL16HI = 6'd6,
    OP_MUL24LO = 6'd7,
    OP_MUL24HI = 6'd8,
    OP_MUL     = 6'd9,   // MUL.FP32
    OP_AND     = 6'd10,
    OP_OR      = 6'd11,
    OP_XOR     = 6'd12,
    OP_NOT     = 6'd13,
    OP_CNOT    = 6'd14,
    OP_BVS     = 6'd15,
    OP_SHL     = 6'd16,
    OP_SHR     = 6'd17,
    OP_POP     = 6'd18,
    OP_MAX     = 6'd19,
    OP_MIN     = 6'd20,
    // memory and data movement
    OP_LOD     = 6'd24,  // Rd = shared[Ra + offset]
    OP_STO     = 6'd25,  // shared[Ra + offset] = Rd
    OP_LDI     = 6'd26,  // Rd = immediate
    OP_TDX     = 6'd27,  // Rd = thread ID x
    OP_TDY     = 6'd28,  // Rd = thread ID y
    // extension (dot-product core / special function unit)
    OP_DOT     = 6'd32,
    OP_SUM     = 6'd33,
    OP_INVSQR  = 6'd34,
    // control (sequencer only)
    OP_JMP     = 6'd40,
    OP_JSR     = 6'd41,
    OP_RTS     = 6'd42,
    OP_LOOP    = 6'd43,
    OP_INIT    = 6'd44,
    OP_STOP    = 6'd45,
    // conditional (predicates)
    OP_IF      = 6'd48,
    OP_ELSE    = 6'd49,
    OP_ENDIF   = 6'd50
  } opcode_e;

  // condition codes of IF.cc, held in the low 3 bits of the RD field
  typedef enum logic [2:0] {
    CC_EQ = 3'd0,
    CC_NE = 3'd1,
    CC_LT = 3'd2,   // lt (INT) / lo (UINT) / FP less than
    CC_LE = 3'd3,   // le / ls
    CC_GT = 3'd4,   // gt / hi
    CC_GE = 3'd5    // ge / hs
  } cc_e;

  // thread-space width codes (IW bits [43:42])
  localparam logic [1:0] W_ALL  = 2'b00;  // all 16 SPs
  localparam logic [1:0] W_QTR  = 2'b01;  // first 4 SPs
  localparam logic [1:0] W_SP0  = 2'b10;  // SP0 only
  // depth codes (IW bits [41:40])
  localparam logic [1:0] D_WF0  = 2'b00;  // wavefront 0 only
  localparam logic [1:0] D_ALL  = 2'b01;  // all wavefronts
  localparam logic [1:0] D_HALF = 2'b10;  // first 1/2 of the wavefronts
  localparam logic [1:0] D_QTR  = 2'b11;  // first 1/4 of the wavefronts

  // instruction word, declared MSB first so bit 42 of the packed value is
  // printed bit 43 of the published layout
  typedef struct packed {
    logic [1:0]           width;   // [43:42]
    logic [1:0]           depth;   // [41:40]
    opcode_e              opcode;  // [39:34]
    dtype_e               dtype;   // [33:32]
    logic [4:0]           rd;      // [31:27]
    logic [4:0]           ra;      // [26:22]
    logic [4:0]           rb;      // [21:17]
    logic [IMM_W-1:0]     imm;     // [16:1]
  } iw_t;

  // One issued thread operation: the decoded instruction plus the wavefront
  // it runs on. The lanes taking part are sent alongside as a per-SP enable.
  localparam int unsigned WF_MAX_W = 8;   // up to 256 wavefronts
  typedef struct packed {
    logic                valid;
    opcode_e             op;
    dtype_e              dtype;
    logic [4:0]          rd;
    logic [4:0]          ra;
    logic [4:0]          rb;
    logic [IMM_W-1:0]    imm;
    logic [WF_MAX_W-1:0] wf;
  } issue_t;

  // instruction class helpers
  function automatic logic is_control(opcode_e op);
    return op inside {OP_JMP, OP_JSR, OP_RTS, OP_LOOP, OP_INIT, OP_STOP};
  endfunction

  function automatic logic writes_reg(opcode_e op);
    return !(op inside {OP_NOP, OP_STO, OP_IF, OP_ELSE, OP_ENDIF,
                        OP_DOT, OP_SUM, OP_INVSQR,
                        OP_JMP, OP_JSR, OP_RTS, OP_LOOP, OP_INIT, OP_STOP});
  endfunction

  function automatic logic is_int_op(opcode_e op);
    return op inside {OP_ADD, OP_SUB, OP_NEG, OP_ABS, OP_MUL16LO, OP_MUL16HI,
                      OP_MUL24LO, OP_MUL24HI, OP_AND, OP_OR, OP_XOR, OP_NOT,
                      OP_CNOT, OP_BVS, OP_SHL, OP_SHR, OP_POP, OP_MAX, OP_MIN};
  endfunction

  // FP32 compare on IEEE-754 bit patterns (sign-magnitude, -0 == +0)
  function automatic logic fp_lt(logic [31:0] a, logic [31:0] b);
    logic a_zero, b_zero;
    a_zero = (a[30:0] == '0);
    b_zero = (b[30:0] == '0);
    if (a_zero && b_zero) return 1'b0;
    if (a[31] != b[31])   return a[31];
    if (a[31])            return a[30:0] > b[30:0];
    return a[30:0] < b[30:0];
  endfunction

  function automatic logic fp_eq(logic [31:0] a, logic [31:0] b);
    return (a == b) || ((a[30:0] == '0) && (b[30:0] == '0));
  endfunction

  // Evaluate IF.cc for one thread.
  function automatic logic eval_cc(cc_e cc, dtype_e t, logic [31:0] a, logic [31:0] b);
    logic lt, eq;
    eq = (t == T_FP32) ? fp_eq(a, b) : (a == b);
    unique case (t)
      T_INT:   lt = $signed(a) < $signed(b);
      T_FP32:  lt = fp_lt(a, b);
      default: lt = a < b;
    endcase
    unique case (cc)
      CC_EQ:   return eq;
      CC_NE:   return !eq;
      CC_LT:   return lt;
      CC_LE:   return lt || eq;
      CC_GT:   return !(lt || eq);
      CC_GE:   return !lt;
      default: return 1'b0;
    endcase
  endfunction

endpackage
