// ecore_asm_pkg: small assembler used by the testbenches to build eCore
// programs in the encoding of ecore_isa_pkg (R, I, M and B forms).
package ecore_asm_pkg;
  import ecore_isa_pkg::*;

  function automatic logic [31:0] R(opcode_e op, int rd, int rn = 0, int rm = 0, int sub = 0);
    return {op, 6'(rd), 6'(rn), 6'(rm), 8'(sub)};
  endfunction
  function automatic logic [31:0] I(opcode_e op, int rd, int rn, int imm);
    return {op, 6'(rd), 6'(rn), 14'(imm)};
  endfunction
  // displacement load/store: size 0..3, signed byte displacement
  function automatic logic [31:0] LSD(opcode_e op, int rd, int rn, int size, int disp);
    return {op, 6'(rd), 6'(rn), 2'(size), 12'(disp)};
  endfunction
  function automatic logic [31:0] M(opcode_e op, int rd, int imm16);
    return {op, 6'(rd), 4'd0, 16'(imm16)};
  endfunction
  // branch to word offset from this instruction
  function automatic logic [31:0] B(opcode_e op, cond_e c, int words);
    return {op, c, 22'(words)};
  endfunction
endpackage
