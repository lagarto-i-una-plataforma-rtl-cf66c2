// Encoders for the MIPS32 Release 6 instructions used by the testbenches,
// so that test programs are written as assembly-like function calls.
// Branch offsets are in instructions, relative to the instruction after the
// branch (target = PC + 4 + 4*off).
package mips_asm_pkg;
  function automatic logic [31:0] rtype(input logic [4:0] rs, rt, rd, sa, input logic [5:0] fn);
    return {6'b000000, rs, rt, rd, sa, fn};
  endfunction
  function automatic logic [31:0] itype(input logic [5:0] op, input logic [4:0] rs, rt, input int imm);
    return {op, rs, rt, 16'(imm)};
  endfunction
  function automatic logic [31:0] addu(input logic [4:0] rd, rs, rt); return rtype(rs, rt, rd, 0, 6'b100001); endfunction
  function automatic logic [31:0] subu(input logic [4:0] rd, rs, rt); return rtype(rs, rt, rd, 0, 6'b100011); endfunction
  function automatic logic [31:0] and_(input logic [4:0] rd, rs, rt); return rtype(rs, rt, rd, 0, 6'b100100); endfunction
  function automatic logic [31:0] or_ (input logic [4:0] rd, rs, rt); return rtype(rs, rt, rd, 0, 6'b100101); endfunction
  function automatic logic [31:0] xor_(input logic [4:0] rd, rs, rt); return rtype(rs, rt, rd, 0, 6'b100110); endfunction
  function automatic logic [31:0] nor_(input logic [4:0] rd, rs, rt); return rtype(rs, rt, rd, 0, 6'b100111); endfunction
  function automatic logic [31:0] slt (input logic [4:0] rd, rs, rt); return rtype(rs, rt, rd, 0, 6'b101010); endfunction
  function automatic logic [31:0] sltu(input logic [4:0] rd, rs, rt); return rtype(rs, rt, rd, 0, 6'b101011); endfunction
  function automatic logic [31:0] sll (input logic [4:0] rd, rt, sa); return rtype(0, rt, rd, sa, 6'b000000); endfunction
  function automatic logic [31:0] srl (input logic [4:0] rd, rt, sa); return rtype(0, rt, rd, sa, 6'b000010); endfunction
  function automatic logic [31:0] sra (input logic [4:0] rd, rt, sa); return rtype(0, rt, rd, sa, 6'b000011); endfunction
  function automatic logic [31:0] sllv(input logic [4:0] rd, rt, rs); return rtype(rs, rt, rd, 0, 6'b000100); endfunction
  function automatic logic [31:0] mul (input logic [4:0] rd, rs, rt); return rtype(rs, rt, rd, 5'd2, 6'b011000); endfunction
  function automatic logic [31:0] muh (input logic [4:0] rd, rs, rt); return rtype(rs, rt, rd, 5'd3, 6'b011000); endfunction
  function automatic logic [31:0] mulu(input logic [4:0] rd, rs, rt); return rtype(rs, rt, rd, 5'd2, 6'b011001); endfunction
  function automatic logic [31:0] seleqz(input logic [4:0] rd, rs, rt); return rtype(rs, rt, rd, 0, 6'b110101); endfunction
  function automatic logic [31:0] selnez(input logic [4:0] rd, rs, rt); return rtype(rs, rt, rd, 0, 6'b110111); endfunction
  function automatic logic [31:0] addiu(input logic [4:0] rt, rs, input int imm); return itype(6'b001001, rs, rt, imm); endfunction
  function automatic logic [31:0] slti (input logic [4:0] rt, rs, input int imm); return itype(6'b001010, rs, rt, imm); endfunction
  function automatic logic [31:0] sltiu(input logic [4:0] rt, rs, input int imm); return itype(6'b001011, rs, rt, imm); endfunction
  function automatic logic [31:0] andi (input logic [4:0] rt, rs, input int imm); return itype(6'b001100, rs, rt, imm); endfunction
  function automatic logic [31:0] ori  (input logic [4:0] rt, rs, input int imm); return itype(6'b001101, rs, rt, imm); endfunction
  function automatic logic [31:0] xori (input logic [4:0] rt, rs, input int imm); return itype(6'b001110, rs, rt, imm); endfunction
  function automatic logic [31:0] aui  (input logic [4:0] rt, rs, input int imm); return itype(6'b001111, rs, rt, imm); endfunction
  function automatic logic [31:0] lui  (input logic [4:0] rt, input int imm);     return itype(6'b001111, 0, rt, imm); endfunction
  function automatic logic [31:0] lb  (input logic [4:0] rt, input int off, input logic [4:0] base); return itype(6'b100000, base, rt, off); endfunction
  function automatic logic [31:0] lbu (input logic [4:0] rt, input int off, input logic [4:0] base); return itype(6'b100100, base, rt, off); endfunction
  function automatic logic [31:0] lh  (input logic [4:0] rt, input int off, input logic [4:0] base); return itype(6'b100001, base, rt, off); endfunction
  function automatic logic [31:0] lhu (input logic [4:0] rt, input int off, input logic [4:0] base); return itype(6'b100101, base, rt, off); endfunction
  function automatic logic [31:0] lw  (input logic [4:0] rt, input int off, input logic [4:0] base); return itype(6'b100011, base, rt, off); endfunction
  function automatic logic [31:0] sb  (input logic [4:0] rt, input int off, input logic [4:0] base); return itype(6'b101000, base, rt, off); endfunction
  function automatic logic [31:0] sh  (input logic [4:0] rt, input int off, input logic [4:0] base); return itype(6'b101001, base, rt, off); endfunction
  function automatic logic [31:0] sw  (input logic [4:0] rt, input int off, input logic [4:0] base); return itype(6'b101011, base, rt, off); endfunction
  function automatic logic [31:0] lwc1(input logic [4:0] ft, input int off, input logic [4:0] base); return itype(6'b110001, base, ft, off); endfunction
  function automatic logic [31:0] swc1(input logic [4:0] ft, input int off, input logic [4:0] base); return itype(6'b111001, base, ft, off); endfunction
  // compact branches
  function automatic logic [31:0] bc   (input int off); return {6'b110010, 26'(off)}; endfunction
  function automatic logic [31:0] balc (input int off); return {6'b111010, 26'(off)}; endfunction
  function automatic logic [31:0] beqzc(input logic [4:0] rs, input int off); return {6'b110110, rs, 21'(off)}; endfunction
  function automatic logic [31:0] bnezc(input logic [4:0] rs, input int off); return {6'b111110, rs, 21'(off)}; endfunction
  function automatic logic [31:0] jic  (input logic [4:0] rt, input int off); return {6'b110110, 5'd0, rt, 16'(off)}; endfunction
  function automatic logic [31:0] jialc(input logic [4:0] rt, input int off); return {6'b111110, 5'd0, rt, 16'(off)}; endfunction
  // rs < rt, rs != 0
  function automatic logic [31:0] beqc (input logic [4:0] rs, rt, input int off); return itype(6'b001000, rs, rt, off); endfunction
  function automatic logic [31:0] bnec (input logic [4:0] rs, rt, input int off); return itype(6'b011000, rs, rt, off); endfunction
  // rs != rt, both != 0
  function automatic logic [31:0] bltc (input logic [4:0] rs, rt, input int off); return itype(6'b010111, rs, rt, off); endfunction
  function automatic logic [31:0] bgec (input logic [4:0] rs, rt, input int off); return itype(6'b010110, rs, rt, off); endfunction
  function automatic logic [31:0] bltuc(input logic [4:0] rs, rt, input int off); return itype(6'b000111, rs, rt, off); endfunction
  function automatic logic [31:0] bgeuc(input logic [4:0] rs, rt, input int off); return itype(6'b000110, rs, rt, off); endfunction
  function automatic logic [31:0] blezc(input logic [4:0] rt, input int off); return itype(6'b010110, 0, rt, off); endfunction
  function automatic logic [31:0] bgezc(input logic [4:0] rt, input int off); return itype(6'b010110, rt, rt, off); endfunction
  function automatic logic [31:0] bgtzc(input logic [4:0] rt, input int off); return itype(6'b010111, 0, rt, off); endfunction
  function automatic logic [31:0] bltzc(input logic [4:0] rt, input int off); return itype(6'b010111, rt, rt, off); endfunction
  // COP1
  function automatic logic [31:0] cop1(input logic [4:0] fmt, ft, fs, fd, input logic [5:0] fn);
    return {6'b010001, fmt, ft, fs, fd, fn};
  endfunction
  function automatic logic [31:0] mfc1(input logic [4:0] rt, fs); return cop1(5'b00000, rt, fs, 0, 0); endfunction
  function automatic logic [31:0] mtc1(input logic [4:0] rt, fs); return cop1(5'b00100, rt, fs, 0, 0); endfunction
  function automatic logic [31:0] add_s (input logic [4:0] fd, fs, ft); return cop1(5'b10000, ft, fs, fd, 6'b000000); endfunction
  function automatic logic [31:0] sub_s (input logic [4:0] fd, fs, ft); return cop1(5'b10000, ft, fs, fd, 6'b000001); endfunction
  function automatic logic [31:0] mul_s (input logic [4:0] fd, fs, ft); return cop1(5'b10000, ft, fs, fd, 6'b000010); endfunction
  function automatic logic [31:0] div_s (input logic [4:0] fd, fs, ft); return cop1(5'b10000, ft, fs, fd, 6'b000011); endfunction
  function automatic logic [31:0] maddf_s(input logic [4:0] fd, fs, ft); return cop1(5'b10000, ft, fs, fd, 6'b011000); endfunction
  function automatic logic [31:0] msubf_s(input logic [4:0] fd, fs, ft); return cop1(5'b10000, ft, fs, fd, 6'b011001); endfunction
  function automatic logic [31:0] sqrt_s(input logic [4:0] fd, fs); return cop1(5'b10000, 0, fs, fd, 6'b000100); endfunction
  function automatic logic [31:0] abs_s (input logic [4:0] fd, fs); return cop1(5'b10000, 0, fs, fd, 6'b000101); endfunction
  function automatic logic [31:0] mov_s (input logic [4:0] fd, fs); return cop1(5'b10000, 0, fs, fd, 6'b000110); endfunction
  function automatic logic [31:0] neg_s (input logic [4:0] fd, fs); return cop1(5'b10000, 0, fs, fd, 6'b000111); endfunction
  function automatic logic [31:0] trunc_w_s(input logic [4:0] fd, fs); return cop1(5'b10000, 0, fs, fd, 6'b001101); endfunction
  function automatic logic [31:0] cvt_w_s(input logic [4:0] fd, fs); return cop1(5'b10000, 0, fs, fd, 6'b100100); endfunction
  function automatic logic [31:0] cvt_s_w(input logic [4:0] fd, fs); return cop1(5'b10100, 0, fs, fd, 6'b100000); endfunction
  function automatic logic [31:0] cmp_eq_s(input logic [4:0] fd, fs, ft); return cop1(5'b10100, ft, fs, fd, 6'b000010); endfunction
  function automatic logic [31:0] cmp_lt_s(input logic [4:0] fd, fs, ft); return cop1(5'b10100, ft, fs, fd, 6'b000100); endfunction
  function automatic logic [31:0] cmp_le_s(input logic [4:0] fd, fs, ft); return cop1(5'b10100, ft, fs, fd, 6'b000110); endfunction
  function automatic logic [31:0] nop(); return 32'd0; endfunction
endpackage
