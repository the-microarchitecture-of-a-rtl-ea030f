// rv_asm_pkg: RV32I instruction encoders used by the testbenches to build
// programs in memory. Each function returns the 32-bit instruction word of
// the RISC-V base encoding (R, I, S, B, U, J formats); branch and jump offsets
// are byte offsets relative to the instruction.
package rv_asm_pkg;

  function automatic logic [31:0] r_t(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1,
                                      logic [2:0] f3, logic [4:0] rd, logic [6:0] opc);
    return {f7, rs2, rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] i_t(int imm, logic [4:0] rs1, logic [2:0] f3,
                                      logic [4:0] rd, logic [6:0] opc);
    logic [11:0] i12 = 12'(imm);
    return {i12, rs1, f3, rd, opc};
  endfunction
  function automatic logic [31:0] s_t(int imm, logic [4:0] rs2, logic [4:0] rs1,
                                      logic [2:0] f3, logic [6:0] opc);
    logic [11:0] i12 = 12'(imm);
    return {i12[11:5], rs2, rs1, f3, i12[4:0], opc};
  endfunction
  function automatic logic [31:0] b_t(int off, logic [4:0] rs2, logic [4:0] rs1, logic [2:0] f3);
    logic [12:0] o = 13'(off);
    return {o[12], o[10:5], rs2, rs1, f3, o[4:1], o[11], 7'b1100011};
  endfunction

  function automatic logic [31:0] ADD (int rd, int rs1, int rs2); return r_t(7'h00, 5'(rs2), 5'(rs1), 3'd0, 5'(rd), 7'b0110011); endfunction
  function automatic logic [31:0] SUB (int rd, int rs1, int rs2); return r_t(7'h20, 5'(rs2), 5'(rs1), 3'd0, 5'(rd), 7'b0110011); endfunction
  function automatic logic [31:0] SLL (int rd, int rs1, int rs2); return r_t(7'h00, 5'(rs2), 5'(rs1), 3'd1, 5'(rd), 7'b0110011); endfunction
  function automatic logic [31:0] SLT (int rd, int rs1, int rs2); return r_t(7'h00, 5'(rs2), 5'(rs1), 3'd2, 5'(rd), 7'b0110011); endfunction
  function automatic logic [31:0] SLTU(int rd, int rs1, int rs2); return r_t(7'h00, 5'(rs2), 5'(rs1), 3'd3, 5'(rd), 7'b0110011); endfunction
  function automatic logic [31:0] XOR (int rd, int rs1, int rs2); return r_t(7'h00, 5'(rs2), 5'(rs1), 3'd4, 5'(rd), 7'b0110011); endfunction
  function automatic logic [31:0] SRL (int rd, int rs1, int rs2); return r_t(7'h00, 5'(rs2), 5'(rs1), 3'd5, 5'(rd), 7'b0110011); endfunction
  function automatic logic [31:0] SRA (int rd, int rs1, int rs2); return r_t(7'h20, 5'(rs2), 5'(rs1), 3'd5, 5'(rd), 7'b0110011); endfunction
  function automatic logic [31:0] OR  (int rd, int rs1, int rs2); return r_t(7'h00, 5'(rs2), 5'(rs1), 3'd6, 5'(rd), 7'b0110011); endfunction
  function automatic logic [31:0] AND (int rd, int rs1, int rs2); return r_t(7'h00, 5'(rs2), 5'(rs1), 3'd7, 5'(rd), 7'b0110011); endfunction

  function automatic logic [31:0] ADDI(int rd, int rs1, int imm); return i_t(imm, 5'(rs1), 3'd0, 5'(rd), 7'b0010011); endfunction
  function automatic logic [31:0] SLTI(int rd, int rs1, int imm); return i_t(imm, 5'(rs1), 3'd2, 5'(rd), 7'b0010011); endfunction
  function automatic logic [31:0] XORI(int rd, int rs1, int imm); return i_t(imm, 5'(rs1), 3'd4, 5'(rd), 7'b0010011); endfunction
  function automatic logic [31:0] ORI (int rd, int rs1, int imm); return i_t(imm, 5'(rs1), 3'd6, 5'(rd), 7'b0010011); endfunction
  function automatic logic [31:0] ANDI(int rd, int rs1, int imm); return i_t(imm, 5'(rs1), 3'd7, 5'(rd), 7'b0010011); endfunction
  function automatic logic [31:0] SLLI(int rd, int rs1, int sh);  return i_t(sh & 31, 5'(rs1), 3'd1, 5'(rd), 7'b0010011); endfunction
  function automatic logic [31:0] SRLI(int rd, int rs1, int sh);  return i_t(sh & 31, 5'(rs1), 3'd5, 5'(rd), 7'b0010011); endfunction
  function automatic logic [31:0] SRAI(int rd, int rs1, int sh);  return i_t((sh & 31) | 32'h400, 5'(rs1), 3'd5, 5'(rd), 7'b0010011); endfunction

  function automatic logic [31:0] LUI  (int rd, int imm20); return {20'(imm20), 5'(rd), 7'b0110111}; endfunction
  function automatic logic [31:0] AUIPC(int rd, int imm20); return {20'(imm20), 5'(rd), 7'b0010111}; endfunction
  function automatic logic [31:0] JAL(int rd, int off);
    logic [20:0] o = 21'(off);
    return {o[20], o[10:1], o[11], o[19:12], 5'(rd), 7'b1101111};
  endfunction
  function automatic logic [31:0] JALR(int rd, int rs1, int imm); return i_t(imm, 5'(rs1), 3'd0, 5'(rd), 7'b1100111); endfunction

  function automatic logic [31:0] BEQ (int rs1, int rs2, int off); return b_t(off, 5'(rs2), 5'(rs1), 3'd0); endfunction
  function automatic logic [31:0] BNE (int rs1, int rs2, int off); return b_t(off, 5'(rs2), 5'(rs1), 3'd1); endfunction
  function automatic logic [31:0] BLT (int rs1, int rs2, int off); return b_t(off, 5'(rs2), 5'(rs1), 3'd4); endfunction
  function automatic logic [31:0] BGE (int rs1, int rs2, int off); return b_t(off, 5'(rs2), 5'(rs1), 3'd5); endfunction
  function automatic logic [31:0] BLTU(int rs1, int rs2, int off); return b_t(off, 5'(rs2), 5'(rs1), 3'd6); endfunction
  function automatic logic [31:0] BGEU(int rs1, int rs2, int off); return b_t(off, 5'(rs2), 5'(rs1), 3'd7); endfunction

  function automatic logic [31:0] LB (int rd, int rs1, int imm); return i_t(imm, 5'(rs1), 3'd0, 5'(rd), 7'b0000011); endfunction
  function automatic logic [31:0] LH (int rd, int rs1, int imm); return i_t(imm, 5'(rs1), 3'd1, 5'(rd), 7'b0000011); endfunction
  function automatic logic [31:0] LW (int rd, int rs1, int imm); return i_t(imm, 5'(rs1), 3'd2, 5'(rd), 7'b0000011); endfunction
  function automatic logic [31:0] LBU(int rd, int rs1, int imm); return i_t(imm, 5'(rs1), 3'd4, 5'(rd), 7'b0000011); endfunction
  function automatic logic [31:0] LHU(int rd, int rs1, int imm); return i_t(imm, 5'(rs1), 3'd5, 5'(rd), 7'b0000011); endfunction
  function automatic logic [31:0] SB (int rs2, int rs1, int imm); return s_t(imm, 5'(rs2), 5'(rs1), 3'd0, 7'b0100011); endfunction
  function automatic logic [31:0] SH (int rs2, int rs1, int imm); return s_t(imm, 5'(rs2), 5'(rs1), 3'd1, 7'b0100011); endfunction
  function automatic logic [31:0] SW (int rs2, int rs1, int imm); return s_t(imm, 5'(rs2), 5'(rs1), 3'd2, 7'b0100011); endfunction

  function automatic logic [31:0] CSRRW (int rd, int csr, int rs1); return i_t(csr, 5'(rs1), 3'd1, 5'(rd), 7'b1110011); endfunction
  function automatic logic [31:0] CSRRS (int rd, int csr, int rs1); return i_t(csr, 5'(rs1), 3'd2, 5'(rd), 7'b1110011); endfunction
  function automatic logic [31:0] CSRRC (int rd, int csr, int rs1); return i_t(csr, 5'(rs1), 3'd3, 5'(rd), 7'b1110011); endfunction
  function automatic logic [31:0] CSRRWI(int rd, int csr, int z);   return i_t(csr, 5'(z),   3'd5, 5'(rd), 7'b1110011); endfunction
  function automatic logic [31:0] CSRRSI(int rd, int csr, int z);   return i_t(csr, 5'(z),   3'd6, 5'(rd), 7'b1110011); endfunction
  function automatic logic [31:0] CSRRCI(int rd, int csr, int z);   return i_t(csr, 5'(z),   3'd7, 5'(rd), 7'b1110011); endfunction

  function automatic logic [31:0] ECALL();  return 32'h0000_0073; endfunction
  function automatic logic [31:0] EBREAK(); return 32'h0010_0073; endfunction
  function automatic logic [31:0] MRET();   return 32'h3020_0073; endfunction
  function automatic logic [31:0] WFI();    return 32'h1050_0073; endfunction
  function automatic logic [31:0] FENCE();  return 32'h0000_000F; endfunction
  function automatic logic [31:0] NOP();    return 32'h0000_0013; endfunction
  function automatic logic [31:0] AMOSWAP(int rd, int rs2, int rs1);
    return r_t(7'b0000100, 5'(rs2), 5'(rs1), 3'd2, 5'(rd), 7'b0101111);
  endfunction

endpackage
