// rv_asm_pkg: a small RV32IM instruction encoder for the testbenches, so
// that test programs can be written as readable instruction lists.
package rv_asm_pkg;
  typedef logic [31:0] u32;

  function automatic u32 r_t(int f7, int rs2, int rs1, int f3, int rd, int opc);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'(opc)};
  endfunction
  function automatic u32 i_t(int imm, int rs1, int f3, int rd, int opc);
    return {12'(imm), 5'(rs1), 3'(f3), 5'(rd), 7'(opc)};
  endfunction
  function automatic u32 s_t(int imm, int rs2, int rs1, int f3);
    logic [11:0] im; im = 12'(imm);
    return {im[11:5], 5'(rs2), 5'(rs1), 3'(f3), im[4:0], 7'b0100011};
  endfunction
  function automatic u32 b_t(int imm, int rs2, int rs1, int f3);
    logic [12:0] im; im = 13'(imm);
    return {im[12], im[10:5], 5'(rs2), 5'(rs1), 3'(f3), im[4:1], im[11], 7'b1100011};
  endfunction

  function automatic u32 addi(int rd, int rs1, int imm); return i_t(imm, rs1, 0, rd, 7'h13); endfunction
  function automatic u32 slli(int rd, int rs1, int sh);  return i_t(sh, rs1, 1, rd, 7'h13);  endfunction
  function automatic u32 srai(int rd, int rs1, int sh);  return i_t(sh | 12'h400, rs1, 5, rd, 7'h13); endfunction
  function automatic u32 add (int rd, int rs1, int rs2); return r_t(0, rs2, rs1, 0, rd, 7'h33); endfunction
  function automatic u32 sub (int rd, int rs1, int rs2); return r_t(32, rs2, rs1, 0, rd, 7'h33); endfunction
  function automatic u32 sll (int rd, int rs1, int rs2); return r_t(0, rs2, rs1, 1, rd, 7'h33); endfunction
  function automatic u32 slt (int rd, int rs1, int rs2); return r_t(0, rs2, rs1, 2, rd, 7'h33); endfunction
  function automatic u32 xor_(int rd, int rs1, int rs2); return r_t(0, rs2, rs1, 4, rd, 7'h33); endfunction
  function automatic u32 mul (int rd, int rs1, int rs2); return r_t(1, rs2, rs1, 0, rd, 7'h33); endfunction
  function automatic u32 mulh(int rd, int rs1, int rs2); return r_t(1, rs2, rs1, 1, rd, 7'h33); endfunction
  function automatic u32 mulhu(int rd, int rs1, int rs2); return r_t(1, rs2, rs1, 3, rd, 7'h33); endfunction
  function automatic u32 div (int rd, int rs1, int rs2); return r_t(1, rs2, rs1, 4, rd, 7'h33); endfunction
  function automatic u32 divu(int rd, int rs1, int rs2); return r_t(1, rs2, rs1, 5, rd, 7'h33); endfunction
  function automatic u32 rem (int rd, int rs1, int rs2); return r_t(1, rs2, rs1, 6, rd, 7'h33); endfunction
  function automatic u32 remu(int rd, int rs1, int rs2); return r_t(1, rs2, rs1, 7, rd, 7'h33); endfunction
  function automatic u32 lw  (int rd, int rs1, int imm); return i_t(imm, rs1, 2, rd, 7'h03); endfunction
  function automatic u32 lb  (int rd, int rs1, int imm); return i_t(imm, rs1, 0, rd, 7'h03); endfunction
  function automatic u32 lbu (int rd, int rs1, int imm); return i_t(imm, rs1, 4, rd, 7'h03); endfunction
  function automatic u32 sw  (int rs2, int rs1, int imm); return s_t(imm, rs2, rs1, 2); endfunction
  function automatic u32 sb  (int rs2, int rs1, int imm); return s_t(imm, rs2, rs1, 0); endfunction
  function automatic u32 beq (int rs1, int rs2, int off); return b_t(off, rs2, rs1, 0); endfunction
  function automatic u32 bne (int rs1, int rs2, int off); return b_t(off, rs2, rs1, 1); endfunction
  function automatic u32 blt (int rs1, int rs2, int off); return b_t(off, rs2, rs1, 4); endfunction
  function automatic u32 bge (int rs1, int rs2, int off); return b_t(off, rs2, rs1, 5); endfunction
  function automatic u32 lui (int rd, int imm20); return {20'(imm20), 5'(rd), 7'h37}; endfunction
  function automatic u32 jal (int rd, int off);
    logic [20:0] im; im = 21'(off);
    return {im[20], im[10:1], im[11], im[19:12], 5'(rd), 7'h6f};
  endfunction
  function automatic u32 jalr(int rd, int rs1, int imm); return i_t(imm, rs1, 0, rd, 7'h67); endfunction
  function automatic u32 nop(); return addi(0, 0, 0); endfunction

  // SFR byte offsets (sign-extended 12-bit immediates relative to x0 do
  // not reach 0xF000, so programs use a base register loaded with lui).
  localparam int SFR_BASE_HI = 32'h0000F;  // lui rX, 0xF -> 0xF000
  localparam int O_ACTIVATE = 'h00, O_AC = 'h04, O_EXIT = 'h08, O_STALL = 'h0C,
                 O_STALL_SET = 'h10, O_STALL_CLR = 'h14, O_SID = 'h18, O_ACTIVE = 'h1C,
                 O_DMASA = 'h40, O_DMAL = 'h44, O_DMATA = 'h48, O_DMABUSY = 'h4C;
endpackage
