// egpu_asm_pkg: a tiny assembler for the testbenches. ins() packs one
// 43-bit instruction word from its fields (thread-space width and depth
// codes, opcode, type, Rd, Ra, Rb, 16-bit immediate) in the layout of
// egpu_pkg::iw_t.
package egpu_asm_pkg;
  import egpu_pkg::*;

  function automatic logic [42:0] ins(logic [1:0] w, logic [1:0] d, opcode_e op,
                                      dtype_e t = T_INT, int rd = 0, int ra = 0,
                                      int rb = 0, int imm = 0);
    iw_t i;
    i.width = w; i.depth = d; i.opcode = op; i.dtype = t;
    i.rd = 5'(rd); i.ra = 5'(ra); i.rb = 5'(rb); i.imm = 16'(imm);
    return i;
  endfunction

  // control instruction (thread-space bits unused)
  function automatic logic [42:0] ctl(opcode_e op, int imm = 0);
    return ins(W_ALL, D_WF0, op, T_UINT, 0, 0, 0, imm);
  endfunction
endpackage
