// rv_asm_pkg: instruction encoders used by the testbenches to write RV32I programs
// (and the custom-0 BAA / RPA instructions) without an external assembler.
// Each function returns one 32-bit instruction word. Register arguments are
// register numbers; immediates are in bytes as in the ISA manual.
package rv_asm_pkg;
  function automatic logic [31:0] r_t(input logic [6:0] f7, input int rs2, input int rs1,
                                      input logic [2:0] f3, input int rd, input logic [6:0] op);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] i_t(input int imm, input int rs1, input logic [2:0] f3,
                                      input int rd, input logic [6:0] op);
    return {12'(imm), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] s_t(input int imm, input int rs2, input int rs1,
                                      input logic [2:0] f3);
    logic [11:0] i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), f3, i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] b_t(input int imm, input int rs2, input int rs1,
                                      input logic [2:0] f3);
    logic [12:0] i = 13'(imm);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), f3, i[4:1], i[11], 7'b1100011};
  endfunction

  function automatic logic [31:0] ADD (int rd, int rs1, int rs2); return r_t(7'h00, rs2, rs1, 3'b000, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SUB (int rd, int rs1, int rs2); return r_t(7'h20, rs2, rs1, 3'b000, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SLL (int rd, int rs1, int rs2); return r_t(7'h00, rs2, rs1, 3'b001, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SLT (int rd, int rs1, int rs2); return r_t(7'h00, rs2, rs1, 3'b010, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SLTU(int rd, int rs1, int rs2); return r_t(7'h00, rs2, rs1, 3'b011, rd, 7'b0110011); endfunction
  function automatic logic [31:0] XOR (int rd, int rs1, int rs2); return r_t(7'h00, rs2, rs1, 3'b100, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SRL (int rd, int rs1, int rs2); return r_t(7'h00, rs2, rs1, 3'b101, rd, 7'b0110011); endfunction
  function automatic logic [31:0] SRA (int rd, int rs1, int rs2); return r_t(7'h20, rs2, rs1, 3'b101, rd, 7'b0110011); endfunction
  function automatic logic [31:0] OR  (int rd, int rs1, int rs2); return r_t(7'h00, rs2, rs1, 3'b110, rd, 7'b0110011); endfunction
  function automatic logic [31:0] AND (int rd, int rs1, int rs2); return r_t(7'h00, rs2, rs1, 3'b111, rd, 7'b0110011); endfunction

  function automatic logic [31:0] ADDI(int rd, int rs1, int imm); return i_t(imm, rs1, 3'b000, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SLTI(int rd, int rs1, int imm); return i_t(imm, rs1, 3'b010, rd, 7'b0010011); endfunction
  function automatic logic [31:0] XORI(int rd, int rs1, int imm); return i_t(imm, rs1, 3'b100, rd, 7'b0010011); endfunction
  function automatic logic [31:0] ORI (int rd, int rs1, int imm); return i_t(imm, rs1, 3'b110, rd, 7'b0010011); endfunction
  function automatic logic [31:0] ANDI(int rd, int rs1, int imm); return i_t(imm, rs1, 3'b111, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SLLI(int rd, int rs1, int sh);  return i_t(sh, rs1, 3'b001, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SRLI(int rd, int rs1, int sh);  return i_t(sh, rs1, 3'b101, rd, 7'b0010011); endfunction
  function automatic logic [31:0] SRAI(int rd, int rs1, int sh);  return i_t(sh | 32'h400, rs1, 3'b101, rd, 7'b0010011); endfunction

  function automatic logic [31:0] LW (int rd, int rs1, int imm); return i_t(imm, rs1, 3'b010, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LH (int rd, int rs1, int imm); return i_t(imm, rs1, 3'b001, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LB (int rd, int rs1, int imm); return i_t(imm, rs1, 3'b000, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LBU(int rd, int rs1, int imm); return i_t(imm, rs1, 3'b100, rd, 7'b0000011); endfunction
  function automatic logic [31:0] LHU(int rd, int rs1, int imm); return i_t(imm, rs1, 3'b101, rd, 7'b0000011); endfunction
  function automatic logic [31:0] SW (int rs2, int rs1, int imm); return s_t(imm, rs2, rs1, 3'b010); endfunction
  function automatic logic [31:0] SH (int rs2, int rs1, int imm); return s_t(imm, rs2, rs1, 3'b001); endfunction
  function automatic logic [31:0] SB (int rs2, int rs1, int imm); return s_t(imm, rs2, rs1, 3'b000); endfunction

  function automatic logic [31:0] BEQ (int rs1, int rs2, int off); return b_t(off, rs2, rs1, 3'b000); endfunction
  function automatic logic [31:0] BNE (int rs1, int rs2, int off); return b_t(off, rs2, rs1, 3'b001); endfunction
  function automatic logic [31:0] BLT (int rs1, int rs2, int off); return b_t(off, rs2, rs1, 3'b100); endfunction
  function automatic logic [31:0] BGE (int rs1, int rs2, int off); return b_t(off, rs2, rs1, 3'b101); endfunction
  function automatic logic [31:0] BLTU(int rs1, int rs2, int off); return b_t(off, rs2, rs1, 3'b110); endfunction
  function automatic logic [31:0] BGEU(int rs1, int rs2, int off); return b_t(off, rs2, rs1, 3'b111); endfunction

  function automatic logic [31:0] LUI  (int rd, int imm20); return {20'(imm20), 5'(rd), 7'b0110111}; endfunction
  function automatic logic [31:0] AUIPC(int rd, int imm20); return {20'(imm20), 5'(rd), 7'b0010111}; endfunction
  function automatic logic [31:0] JAL(int rd, int off);
    logic [20:0] i = 21'(off);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111};
  endfunction
  function automatic logic [31:0] JALR(int rd, int rs1, int imm); return i_t(imm, rs1, 3'b000, rd, 7'b1100111); endfunction

  // custom-0: BAA (funct3 000) and RPA (funct3 001), I-type
  function automatic logic [31:0] BAA(int rs1, int imm); return i_t(imm, rs1, 3'b000, 0, 7'b0001011); endfunction
  function automatic logic [31:0] RPA(int rs1, int imm); return i_t(imm, rs1, 3'b001, 0, 7'b0001011); endfunction

  function automatic logic [31:0] NOP(); return ADDI(0, 0, 0); endfunction
endpackage
