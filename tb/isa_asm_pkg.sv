// isa_asm_pkg -- instruction encoders for the testbenches (see model_isa_decoder for
// the encoding): [31:28] opcode [27:23] rd [22:18] rs1 [17:13] rs2 [12:0] immediate.
package isa_asm_pkg;

  function automatic logic [31:0] r3(logic [3:0] op, int rd, int rs1, int rs2);
    return {op, 5'(rd), 5'(rs1), 5'(rs2), 13'h0};
  endfunction
  function automatic logic [31:0] i_add(int rd, int a, int b); return r3(4'h0, rd, a, b); endfunction
  function automatic logic [31:0] i_sub(int rd, int a, int b); return r3(4'h1, rd, a, b); endfunction
  function automatic logic [31:0] i_mul(int rd, int a, int b); return r3(4'h2, rd, a, b); endfunction
  function automatic logic [31:0] i_and(int rd, int a, int b); return r3(4'h3, rd, a, b); endfunction
  function automatic logic [31:0] i_xor(int rd, int a, int b); return r3(4'h4, rd, a, b); endfunction
  // rd <- (signed a < signed b)
  function automatic logic [31:0] i_slt(int rd, int a, int b); return r3(4'hB, rd, a, b); endfunction
  // rd <- mem[rs1 + off]
  function automatic logic [31:0] i_ld(int rd, int rs1, int off, bit byte_op = 0);
    return {4'h5, 5'(rd), 5'(rs1), 5'h0, 1'(byte_op), 12'(off)};
  endfunction
  // mem[rs1 + off] <- rs2
  function automatic logic [31:0] i_st(int rs1, int rs2, int off, bit byte_op = 0);
    return {4'h6, 5'h0, 5'(rs1), 5'(rs2), 1'(byte_op), 12'(off)};
  endfunction
  // if rs1 == 0 then pc <- rs2
  function automatic logic [31:0] i_bz(int cond, int target); return r3(4'h7, 0, cond, target); endfunction
  // import / export: buffer at rs1, rs2 words, counter in rd, client tag
  function automatic logic [31:0] i_blnd(int rctr, int raddr, int rlen, int tag);
    return {4'h8, 5'(rctr), 5'(raddr), 5'(rlen), 5'h0, 8'(tag)};
  endfunction
  function automatic logic [31:0] i_rblnd(int rctr, int raddr, int rlen, int tag);
    return {4'h9, 5'(rctr), 5'(raddr), 5'(rlen), 5'h0, 8'(tag)};
  endfunction
  function automatic logic [31:0] i_li(int rd, int imm);
    return {4'hA, 5'(rd), 23'(imm)};
  endfunction
  function automatic logic [31:0] i_halt(); return 32'hF000_0000; endfunction

endpackage
