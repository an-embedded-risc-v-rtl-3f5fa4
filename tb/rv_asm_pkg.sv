// rv_asm_pkg: a tiny RV32EC assembler for the testbenches.
//
// Each function returns the machine code of one instruction, written from
// the RISC-V base and C extension encodings (independently of the design's
// decoder and expander), plus the MMUL custom instruction of this core:
// R4-type, opcode custom-0 (0001011), rs3 = N base, fnc2/fnc3 = length field
// {fnc3, fnc2} = words - 1, rs1 = A base, rs2 = B base, rd = result base.
package rv_asm_pkg;
  function automatic logic [31:0] r_t(int f7, int rs2, int rs1, int f3, int rd, int opc);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'(opc)};
  endfunction
  function automatic logic [31:0] i_t(int imm, int rs1, int f3, int rd, int opc);
    return {12'(imm), 5'(rs1), 3'(f3), 5'(rd), 7'(opc)};
  endfunction
  function automatic logic [31:0] s_t(int imm, int rs2, int rs1, int f3);
    logic [11:0] i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_t(int off, int rs1, int rs2, int f3);
    logic [12:0] o = 13'(off);
    return {o[12], o[10:5], 5'(rs2), 5'(rs1), 3'(f3), o[4:1], o[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] j_t(int off, int rd);
    logic [20:0] o = 21'(off);
    return {o[20], o[10:1], o[11], o[19:12], 5'(rd), 7'b1101111};
  endfunction

  function automatic logic [31:0] addi(int rd, int rs1, int imm); return i_t(imm, rs1, 0, rd, 'h13); endfunction
  function automatic logic [31:0] andi(int rd, int rs1, int imm); return i_t(imm, rs1, 7, rd, 'h13); endfunction
  function automatic logic [31:0] slli(int rd, int rs1, int sh);  return i_t(sh, rs1, 1, rd, 'h13); endfunction
  function automatic logic [31:0] srai(int rd, int rs1, int sh);  return i_t(sh | 'h400, rs1, 5, rd, 'h13); endfunction
  function automatic logic [31:0] add (int rd, int rs1, int rs2); return r_t(0, rs2, rs1, 0, rd, 'h33); endfunction
  function automatic logic [31:0] sub (int rd, int rs1, int rs2); return r_t('h20, rs2, rs1, 0, rd, 'h33); endfunction
  function automatic logic [31:0] xor_(int rd, int rs1, int rs2); return r_t(0, rs2, rs1, 4, rd, 'h33); endfunction
  function automatic logic [31:0] slt (int rd, int rs1, int rs2); return r_t(0, rs2, rs1, 2, rd, 'h33); endfunction
  function automatic logic [31:0] srli(int rd, int rs1, int sh);  return i_t(sh, rs1, 5, rd, 'h13); endfunction
  function automatic logic [31:0] or_ (int rd, int rs1, int rs2); return r_t(0, rs2, rs1, 6, rd, 'h33); endfunction
  function automatic logic [31:0] and_(int rd, int rs1, int rs2); return r_t(0, rs2, rs1, 7, rd, 'h33); endfunction
  function automatic logic [31:0] sltu(int rd, int rs1, int rs2); return r_t(0, rs2, rs1, 3, rd, 'h33); endfunction
  function automatic logic [31:0] lui (int rd, int imm20);        return {20'(imm20), 5'(rd), 7'b0110111}; endfunction
  function automatic logic [31:0] auipc(int rd, int imm20);       return {20'(imm20), 5'(rd), 7'b0010111}; endfunction
  function automatic logic [31:0] lw  (int rd, int rs1, int imm); return i_t(imm, rs1, 2, rd, 'h03); endfunction
  function automatic logic [31:0] lb  (int rd, int rs1, int imm); return i_t(imm, rs1, 0, rd, 'h03); endfunction
  function automatic logic [31:0] lhu (int rd, int rs1, int imm); return i_t(imm, rs1, 5, rd, 'h03); endfunction
  function automatic logic [31:0] sw  (int rs2, int rs1, int imm); return s_t(imm, rs2, rs1, 2); endfunction
  function automatic logic [31:0] sb  (int rs2, int rs1, int imm); return s_t(imm, rs2, rs1, 0); endfunction
  function automatic logic [31:0] beq (int rs1, int rs2, int off); return b_t(off, rs1, rs2, 0); endfunction
  function automatic logic [31:0] bne (int rs1, int rs2, int off); return b_t(off, rs1, rs2, 1); endfunction
  function automatic logic [31:0] blt (int rs1, int rs2, int off); return b_t(off, rs1, rs2, 4); endfunction
  function automatic logic [31:0] bge (int rs1, int rs2, int off); return b_t(off, rs1, rs2, 5); endfunction
  function automatic logic [31:0] bgeu(int rs1, int rs2, int off); return b_t(off, rs1, rs2, 7); endfunction
  function automatic logic [31:0] jal (int rd, int off);          return j_t(off, rd); endfunction
  function automatic logic [31:0] jalr(int rd, int rs1, int imm); return i_t(imm, rs1, 0, rd, 'h67); endfunction
  function automatic logic [31:0] csrrw(int rd, int csr, int rs1);  return i_t(csr, rs1, 1, rd, 'h73); endfunction
  function automatic logic [31:0] csrrs(int rd, int csr, int rs1);  return i_t(csr, rs1, 2, rd, 'h73); endfunction
  function automatic logic [31:0] csrrwi(int rd, int csr, int z);   return i_t(csr, z, 5, rd, 'h73); endfunction
  function automatic logic [31:0] csrrsi(int rd, int csr, int z);   return i_t(csr, z, 6, rd, 'h73); endfunction
  function automatic logic [31:0] csrrci(int rd, int csr, int z);   return i_t(csr, z, 7, rd, 'h73); endfunction
  function automatic logic [31:0] mret();   return 32'h3020_0073; endfunction
  function automatic logic [31:0] ecall();  return 32'h0000_0073; endfunction
  function automatic logic [31:0] nop();    return 32'h0000_0013; endfunction
  // MMUL rd(result base), rs1(A base), rs2(B base), rs3(N base), words
  function automatic logic [31:0] mmul(int rd, int rs1, int rs2, int rs3, int words);
    logic [4:0] l = 5'(words - 1);
    return {5'(rs3), l[1:0], 5'(rs2), 5'(rs1), l[4:2], 5'(rd), 7'b0001011};
  endfunction

  // compressed (16-bit) instructions
  function automatic logic [15:0] c_li(int rd, int imm);
    logic [5:0] i = 6'(imm);
    return {3'b010, i[5], 5'(rd), i[4:0], 2'b01};
  endfunction
  function automatic logic [15:0] c_addi(int rd, int imm);
    logic [5:0] i = 6'(imm);
    return {3'b000, i[5], 5'(rd), i[4:0], 2'b01};
  endfunction
  function automatic logic [15:0] c_mv(int rd, int rs2);  return {4'b1000, 5'(rd), 5'(rs2), 2'b10}; endfunction
  function automatic logic [15:0] c_add(int rd, int rs2); return {4'b1001, 5'(rd), 5'(rs2), 2'b10}; endfunction
  function automatic logic [15:0] c_slli(int rd, int sh); return {3'b000, 1'b0, 5'(rd), 5'(sh), 2'b10}; endfunction
  function automatic logic [15:0] c_jr(int rs1);          return {4'b1000, 5'(rs1), 5'd0, 2'b10}; endfunction
  // rd', rs1' are x8..x15; uimm is a multiple of 4 below 128
  function automatic logic [15:0] c_lw(int rd, int rs1, int uimm);
    logic [6:0] u = 7'(uimm);
    return {3'b010, u[5:3], 3'(rs1 - 8), u[2], u[6], 3'(rd - 8), 2'b00};
  endfunction
  function automatic logic [15:0] c_sw(int rs2, int rs1, int uimm);
    logic [6:0] u = 7'(uimm);
    return {3'b110, u[5:3], 3'(rs1 - 8), u[2], u[6], 3'(rs2 - 8), 2'b00};
  endfunction
  function automatic logic [15:0] c_sub(int rd, int rs2);
    return {6'b100011, 3'(rd - 8), 2'b00, 3'(rs2 - 8), 2'b01};
  endfunction
  function automatic logic [15:0] c_bnez(int rs1, int off);
    logic [8:0] o = 9'(off);
    return {3'b111, o[8], o[4:3], 3'(rs1 - 8), o[7:6], o[2:1], o[5], 2'b01};
  endfunction
  function automatic logic [15:0] c_j(int off);
    logic [11:0] o = 12'(off);
    return {3'b101, o[11], o[4], o[9:8], o[10], o[6], o[7], o[3:1], o[5], 2'b01};
  endfunction
  function automatic logic [15:0] c_lwsp(int rd, int uimm);
    logic [7:0] u = 8'(uimm);
    return {3'b010, u[5], 5'(rd), u[4:2], u[7:6], 2'b10};
  endfunction
  function automatic logic [15:0] c_swsp(int rs2, int uimm);
    logic [7:0] u = 8'(uimm);
    return {3'b110, u[5:2], u[7:6], 5'(rs2), 2'b10};
  endfunction
  function automatic logic [15:0] c_addi4spn(int rd, int uimm);
    logic [9:0] u = 10'(uimm);
    return {3'b000, u[5:4], u[9:6], u[2], u[3], 3'(rd - 8), 2'b00};
  endfunction
  function automatic logic [15:0] c_lui(int rd, int imm);
    logic [5:0] i = 6'(imm);
    return {3'b011, i[5], 5'(rd), i[4:0], 2'b01};
  endfunction
  function automatic logic [15:0] c_beqz(int rs1, int off);
    logic [8:0] o = 9'(off);
    return {3'b110, o[8], o[4:3], 3'(rs1 - 8), o[7:6], o[2:1], o[5], 2'b01};
  endfunction
  function automatic logic [15:0] c_jal(int off);
    logic [11:0] o = 12'(off);
    return {3'b001, o[11], o[4], o[9:8], o[10], o[6], o[7], o[3:1], o[5], 2'b01};
  endfunction
  function automatic logic [15:0] c_jalr(int rs1);        return {4'b1001, 5'(rs1), 5'd0, 2'b10}; endfunction
  function automatic logic [15:0] c_srli(int rd, int sh); return {3'b100, 1'b0, 2'b00, 3'(rd - 8), 5'(sh), 2'b01}; endfunction
  function automatic logic [15:0] c_srai(int rd, int sh); return {3'b100, 1'b0, 2'b01, 3'(rd - 8), 5'(sh), 2'b01}; endfunction
  function automatic logic [15:0] c_andi(int rd, int imm);
    logic [5:0] i = 6'(imm);
    return {3'b100, i[5], 2'b10, 3'(rd - 8), i[4:0], 2'b01};
  endfunction
  function automatic logic [15:0] c_ca(int rd, int rs2, int f2);
    return {6'b100011, 3'(rd - 8), 2'(f2), 3'(rs2 - 8), 2'b01};
  endfunction
  function automatic logic [15:0] c_addi16sp(int imm);
    logic [9:0] i = 10'(imm);
    return {3'b011, i[9], 5'd2, i[4], i[6], i[8:7], i[5], 2'b01};
  endfunction
endpackage
