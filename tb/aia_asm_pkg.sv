// aia_asm_pkg: instruction encoders used by the testbenches to build
// programs for the accelerator cores (RV32I/M subset plus Xprob).
package aia_asm_pkg;
  function automatic logic [31:0] r_type(input int f7, rs2, rs1, f3, rd, opc);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'(opc)};
  endfunction
  function automatic logic [31:0] i_type(input int imm, rs1, f3, rd, opc);
    return {12'(imm), 5'(rs1), 3'(f3), 5'(rd), 7'(opc)};
  endfunction
  function automatic logic [31:0] addi(input int rd, rs1, imm);  return i_type(imm, rs1, 0, rd, 7'h13); endfunction
  function automatic logic [31:0] andi(input int rd, rs1, imm);  return i_type(imm, rs1, 7, rd, 7'h13); endfunction
  function automatic logic [31:0] slli(input int rd, rs1, sh);   return i_type(sh, rs1, 1, rd, 7'h13); endfunction
  function automatic logic [31:0] srli(input int rd, rs1, sh);   return i_type(sh, rs1, 5, rd, 7'h13); endfunction
  function automatic logic [31:0] srai(input int rd, rs1, sh);   return i_type(sh | 32'h400, rs1, 5, rd, 7'h13); endfunction
  function automatic logic [31:0] add(input int rd, rs1, rs2);   return r_type(0, rs2, rs1, 0, rd, 7'h33); endfunction
  function automatic logic [31:0] sub(input int rd, rs1, rs2);   return r_type(32, rs2, rs1, 0, rd, 7'h33); endfunction
  function automatic logic [31:0] mul(input int rd, rs1, rs2);   return r_type(1, rs2, rs1, 0, rd, 7'h33); endfunction
  function automatic logic [31:0] mulhu(input int rd, rs1, rs2); return r_type(1, rs2, rs1, 3, rd, 7'h33); endfunction
  function automatic logic [31:0] sltu(input int rd, rs1, rs2);  return r_type(0, rs2, rs1, 3, rd, 7'h33); endfunction
  function automatic logic [31:0] xor_(input int rd, rs1, rs2);  return r_type(0, rs2, rs1, 4, rd, 7'h33); endfunction
  function automatic logic [31:0] lui(input int rd, imm20);      return {20'(imm20), 5'(rd), 7'h37}; endfunction
  function automatic logic [31:0] auipc(input int rd, imm20);    return {20'(imm20), 5'(rd), 7'h17}; endfunction
  function automatic logic [31:0] lw(input int rd, rs1, imm);    return i_type(imm, rs1, 2, rd, 7'h03); endfunction
  function automatic logic [31:0] lbu(input int rd, rs1, imm);   return i_type(imm, rs1, 4, rd, 7'h03); endfunction
  function automatic logic [31:0] lh(input int rd, rs1, imm);    return i_type(imm, rs1, 1, rd, 7'h03); endfunction
  function automatic logic [31:0] s_type(input int f3, rs2, rs1, imm);
    logic [11:0] i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:0], 7'h23};
  endfunction
  function automatic logic [31:0] sw(input int rs2, rs1, imm);   return s_type(2, rs2, rs1, imm); endfunction
  function automatic logic [31:0] sb(input int rs2, rs1, imm);   return s_type(0, rs2, rs1, imm); endfunction
  function automatic logic [31:0] sh(input int rs2, rs1, imm);   return s_type(1, rs2, rs1, imm); endfunction
  function automatic logic [31:0] b_type(input int f3, rs1, rs2, off);
    logic [12:0] o = 13'(off);
    return {o[12], o[10:5], 5'(rs2), 5'(rs1), 3'(f3), o[4:1], o[11], 7'h63};
  endfunction
  function automatic logic [31:0] beq(input int rs1, rs2, off);  return b_type(0, rs1, rs2, off); endfunction
  function automatic logic [31:0] bne(input int rs1, rs2, off);  return b_type(1, rs1, rs2, off); endfunction
  function automatic logic [31:0] blt(input int rs1, rs2, off);  return b_type(4, rs1, rs2, off); endfunction
  function automatic logic [31:0] bgeu(input int rs1, rs2, off); return b_type(7, rs1, rs2, off); endfunction
  function automatic logic [31:0] jal(input int rd, off);
    logic [20:0] o = 21'(off);
    return {o[20], o[10:1], o[11], o[19:12], 5'(rd), 7'h6f};
  endfunction
  function automatic logic [31:0] jalr(input int rd, rs1, imm);  return i_type(imm, rs1, 0, rd, 7'h67); endfunction
  function automatic logic [31:0] csrrw(input int rd, csr, rs1); return i_type(csr, rs1, 1, rd, 7'h73); endfunction
  function automatic logic [31:0] csrrs(input int rd, csr, rs1); return i_type(csr, rs1, 2, rd, 7'h73); endfunction
  function automatic logic [31:0] csrrwi(input int rd, csr, z);  return i_type(csr, z, 5, rd, 7'h73); endfunction
  function automatic logic [31:0] ebreak();                      return 32'h0010_0073; endfunction
  function automatic logic [31:0] nop();                         return addi(0, 0, 0); endfunction
  // Xprob: {Type[31:29], Op[28:25], rs2, rs1, DT[14:12], rd, 0x3b}
  function automatic logic [31:0] xprob(input int typ, op, rs2, rs1, dt, rd);
    return {3'(typ), 4'(op), 5'(rs2), 5'(rs1), 3'(dt), 5'(rd), 7'h3b};
  endfunction
  // large RF access; rd/rs1/rs2 are 6-bit indices (32..63 = private)
  function automatic logic [31:0] x_large(input int op, rd, rs1, rs2);
    return xprob(0, op, rs2 % 32, rs1 % 32, (rd / 32) * 4 + (rs1 / 32) * 2 + (rs2 / 32), rd % 32);
  endfunction
  // neighbour access: dir 0 W, 1 N, 2 S, 3 E
  function automatic logic [31:0] x_nb(input int op, rd, rs1, rs2, dir);
    return xprob(1, op, rs2, rs1, dir, rd);
  endfunction
  function automatic logic [31:0] x_sample(input int rd);        return xprob(2, 0, 0, 0, 0, rd); endfunction
  function automatic logic [31:0] x_lut(input int rd, rs1);      return xprob(3, 0, 0, rs1, 0, rd); endfunction
  function automatic logic [31:0] x_barrier();                   return xprob(4, 0, 0, 0, 0, 0); endfunction
endpackage
