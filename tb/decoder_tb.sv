// decoder_tb: self-checking test of the instruction decoder.
// Encodes instructions with rv_asm_pkg (random registers and immediates) and
// checks the decoded control word and immediate against the expected values of
// each instruction class, including BAA and RPA (custom-0, funct3 000 / 001),
// an unused custom-0 funct3, a CSR instruction and writes to x0.
module decoder_tb;
  import rv_pkg::*;
  import rv_asm_pkg::*;
  logic [31:0] inst, imm;
  ctrl_t ctrl;
  int checks = 0, failures = 0;

  decoder dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s inst=%h", what, inst); end
  endtask

  initial begin
    for (int n = 0; n < 200; n++) begin
      automatic int rd = 1 + $urandom % 31, r1 = 1 + $urandom % 31, r2 = 1 + $urandom % 31;
      automatic int i12 = int'($urandom % 4096) - 2048;
      automatic int b13 = (int'($urandom % 4096) - 2048) * 2;
      automatic int j21 = (int'($urandom % 1048576) - 524288) * 2;

      inst = ADDI(rd, r1, i12); #1;
      chk("addi", ctrl.legal && ctrl.reg_we && ctrl.rd == rd && ctrl.rs1 == r1 && ctrl.use_rs1 &&
                  !ctrl.use_rs2 && ctrl.b_sel == B_IMM && ctrl.alu_op == ALU_ADD && imm == 32'(i12));
      inst = SUB(rd, r1, r2); #1;
      chk("sub", ctrl.reg_we && ctrl.use_rs1 && ctrl.use_rs2 && ctrl.rs2 == r2 &&
                 ctrl.b_sel == B_RS2 && ctrl.alu_op == ALU_SUB);
      inst = SRAI(rd, r1, i12 & 31); #1;
      chk("srai", ctrl.alu_op == ALU_SRA && imm[4:0] == 5'(i12 & 31));
      inst = SRLI(rd, r1, i12 & 31); #1;
      chk("srli", ctrl.alu_op == ALU_SRL);
      inst = LW(rd, r1, i12); #1;
      chk("lw", ctrl.load && ctrl.reg_we && ctrl.ma_use_rs1 && ctrl.ma_sel == MA_RS1 &&
                ctrl.funct3 == 3'b010 && imm == 32'(i12));
      inst = SB(r2, r1, i12); #1;
      chk("sb", ctrl.store && !ctrl.reg_we && ctrl.use_rs2 && ctrl.rs2 == r2 && ctrl.ma_use_rs1 &&
                imm == 32'(i12) && ctrl.funct3 == 3'b000);
      inst = BGE(r1, r2, b13); #1;
      chk("bge", ctrl.branch && !ctrl.reg_we && ctrl.ma_sel == MA_PC && !ctrl.ma_use_rs1 &&
                 imm == 32'(b13) && ctrl.funct3 == 3'b101);
      inst = JAL(rd, j21); #1;
      chk("jal", ctrl.jal && ctrl.reg_we && ctrl.ma_sel == MA_PC && imm == 32'(j21));
      inst = JALR(rd, r1, i12); #1;
      chk("jalr", ctrl.jalr && ctrl.reg_we && ctrl.ma_use_rs1 && imm == 32'(i12));
      inst = LUI(rd, i12 & 32'hFFFFF); #1;
      chk("lui", ctrl.reg_we && ctrl.alu_op == ALU_PASSB && ctrl.b_sel == B_IMM &&
                 imm == {20'(i12 & 32'hFFFFF), 12'd0});
      inst = AUIPC(rd, 5); #1;
      chk("auipc", ctrl.a_sel == A_PC && ctrl.alu_op == ALU_ADD && imm == 32'h5000);
      inst = BAA(r1, i12); #1;
      chk("baa", ctrl.legal && ctrl.baa && !ctrl.rpa && !ctrl.reg_we && ctrl.ma_use_rs1 &&
                 ctrl.rs1 == r1 && imm == 32'(i12) && !ctrl.load && !ctrl.store);
      inst = RPA(r1, i12); #1;
      chk("rpa", ctrl.legal && ctrl.rpa && !ctrl.baa && !ctrl.reg_we && ctrl.ma_use_rs1 &&
                 ctrl.rs1 == r1 && imm == 32'(i12));
      inst = {12'(i12), 5'(r1), 3'b010, 5'(rd), 7'b0001011}; #1;   // unused custom-0
      chk("custom0 other", !ctrl.legal && !ctrl.baa && !ctrl.rpa && !ctrl.reg_we);
      inst = {12'h300, 5'(r1), 3'b001, 5'(rd), 7'b1110011}; #1;    // csrrw
      chk("csr", !ctrl.legal && !ctrl.reg_we && !ctrl.store);
      inst = ADD(0, r1, r2); #1;
      chk("add x0", !ctrl.reg_we);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
