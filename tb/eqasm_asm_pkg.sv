// eqasm_asm_pkg -- instruction encoders used by the testbenches.
//
// Small "assembler" functions that build 32-bit eQASM words from their fields,
// following the instruction layouts of the CC-Light eQASM ISA (bit 31 = 0 and
// a 6-bit opcode in [30:25] for single-format words, bit 31 = 1 for quantum
// bundle words).  Branch offsets are given in instructions and converted to the
// byte offset the BR word holds.
package eqasm_asm_pkg;
  import eqasm_pkg::*;

  function automatic logic [31:0] r3(logic [5:0] op, int rd, int rs, int rt);
    return {1'b0, op, 5'(rd), 5'(rs), 5'(rt), 10'd0};
  endfunction
  function automatic logic [31:0] a_add(int rd, int rs, int rt); return r3(OP_ADD, rd, rs, rt); endfunction
  function automatic logic [31:0] a_sub(int rd, int rs, int rt); return r3(OP_SUB, rd, rs, rt); endfunction
  function automatic logic [31:0] a_and(int rd, int rs, int rt); return r3(OP_AND, rd, rs, rt); endfunction
  function automatic logic [31:0] a_or (int rd, int rs, int rt); return r3(OP_OR,  rd, rs, rt); endfunction
  function automatic logic [31:0] a_xor(int rd, int rs, int rt); return r3(OP_XOR, rd, rs, rt); endfunction
  function automatic logic [31:0] a_not(int rd, int rt);         return r3(OP_NOT, rd, 0, rt);  endfunction
  function automatic logic [31:0] a_cmp(int rs, int rt);         return r3(OP_CMP, 0, rs, rt);  endfunction
  function automatic logic [31:0] a_nop();                       return 32'd0;                  endfunction
  function automatic logic [31:0] a_stop();                      return {1'b0, OP_STOP, 25'd0}; endfunction
  function automatic logic [31:0] a_ldi(int rd, int imm);
    return {1'b0, OP_LDI, 5'(rd), 20'(imm)};
  endfunction
  function automatic logic [31:0] a_ldui(int rd, int rs, int imm15);
    return {1'b0, OP_LDUI, 5'(rd), 5'(rs), 15'(imm15)};
  endfunction
  function automatic logic [31:0] a_ld(int rd, int rt, int imm10);
    return {1'b0, OP_LD, 5'(rd), 5'd0, 5'(rt), 10'(imm10)};
  endfunction
  function automatic logic [31:0] a_st(int rs, int rt, int imm10);
    return {1'b0, OP_ST, 5'd0, 5'(rs), 5'(rt), 10'(imm10)};
  endfunction
  // offset counted in instructions relative to the BR itself
  function automatic logic [31:0] a_br(cflag_e cf, int off_insn);
    logic [16:0] byte_off;
    byte_off = 17'(off_insn * 4);
    return {1'b0, OP_BR, 6'd0, byte_off[16:2], 4'(cf)};
  endfunction
  function automatic logic [31:0] a_fbr(cflag_e cf, int rd);
    return {1'b0, OP_FBR, 5'(rd), 16'd0, 4'(cf)};
  endfunction
  function automatic logic [31:0] a_fmr(int rd, int qi);
    return {1'b0, OP_FMR, 5'(rd), 17'd0, 3'(qi)};
  endfunction
  function automatic logic [31:0] a_qwait(int imm);
    return {1'b0, OP_QWAIT, 5'd0, 20'(imm)};
  endfunction
  function automatic logic [31:0] a_qwaitr(int rs);
    return {1'b0, OP_QWAITR, 5'd0, 5'(rs), 15'd0};
  endfunction
  function automatic logic [31:0] a_smis(int sd, logic [6:0] mask);
    return {1'b0, OP_SMIS, 6'(sd), 12'd0, mask};
  endfunction
  function automatic logic [31:0] a_smit(int td, logic [15:0] mask);
    return {1'b0, OP_SMIT, 6'(td), 3'd0, mask};
  endfunction
  function automatic logic [31:0] a_bundle(int pi, int op0, int r0, int op1, int r1);
    return {1'b1, 9'(op0), 5'(r0), 9'(op1), 5'(r1), 3'(pi)};
  endfunction
endpackage
