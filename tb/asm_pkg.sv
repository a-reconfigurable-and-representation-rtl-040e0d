// asm_pkg -- instruction assembler for testbenches.
//
// One function per instruction format of the accelerator ISA, returning the
// 32-bit word with the field layout of accel_pkg: R-type add/sub/logic with
// byte pre-shift s and byte mask m, immediates, branches with an absolute
// target, ld/ld_add, st/st_add, st_simd and the offloaded SIMD/PPU
// instructions. Plain functions, no state.
package asm_pkg;
  import accel_pkg::*;

  function automatic logic [31:0] R(opcode_e op, int rd, int rs1, int rs2,
                                    int s1 = 0, int m1 = 15, int s2 = 0, int m2 = 15);
    return {op, 5'(rd), 5'(rs1), 5'(rs2), 2'(s1), 4'(m1), 2'(s2), 4'(m2)};
  endfunction
  function automatic logic [31:0] I(opcode_e op, int rd, int rs1, int imm);
    return {op, 5'(rd), 5'(rs1), 1'b0, 16'(imm)};
  endfunction
  function automatic logic [31:0] BR(opcode_e op, int ra, int rb, int tgt);
    return {op, 5'(ra), 5'(rb), 1'b0, 16'(tgt)};
  endfunction
  function automatic logic [31:0] LD(int ra, int ben, int cp = 0, int rd = 0, int rb = 0, int rc = 0, int add = 0);
    return {OP_LD, 5'(ra), 5'(rd), 5'(rb), 5'(rc), 4'(ben), 1'(cp), 1'(add), 1'b0};
  endfunction
  function automatic logic [31:0] ST(int ra, int rdat, int ben, int rb = 0, int inc = 0);
    return {OP_ST, 5'(ra), 5'(rdat), 5'(rb), 4'(ben), 1'(inc), 7'b0};
  endfunction
  function automatic logic [31:0] STS(int ra, int rb, int tpa, int pe, int tr = 0, int hp = 0, int pool = 0);
    return {OP_STSIMD, 5'(ra), 5'(rb), 4'(tpa), 5'(pe), 1'(tr), 1'(hp), 2'(pool), 4'b0};
  endfunction
  function automatic logic [31:0] SIMD(simd_fn_e fn, int blk = 0, int a = 0, int sf = 0,
                                       int f = 0, int d = 0, int s = 0, int t = 0);
    return {OP_SIMD, fn, 1'(blk), 5'(a), 5'(sf), 3'(f), 2'(d), 2'(s), 2'(t), 2'b0};
  endfunction
  function automatic logic [31:0] NOP();
    return 32'h0;
  endfunction
  function automatic logic [31:0] WAITI();
    return {OP_WAIT, 27'h0};
  endfunction
  function automatic logic [31:0] INTREN(int mask);
    return {OP_INTREN, 11'h0, 16'(mask)};
  endfunction
  function automatic logic [31:0] INTRA(int line, int addr);
    return {OP_INTRA, 5'(line), 6'h0, 16'(addr)};
  endfunction
endpackage
