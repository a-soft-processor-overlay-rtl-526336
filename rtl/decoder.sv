// decoder: control-path decoder of the DEC stage.
//
// Combinational. Turns a 32-bit instruction into the control word ctrl_t that
// travels down the pipeline and the sign-extended immediate. It decodes RV32I
// (LUI, AUIPC, JAL, JALR, branches, loads, stores, register and immediate ALU
// operations) and the two custom-0 instructions of the tightly-coupled
// architecture:
//   BAA  imm[11:0] | rs1 | 000 | - | 0001011   launch the accelerator with the
//                                              argument array at rs1 + imm
//   RPA  imm[11:0] | rs1 | 001 | - | 0001011   jump to rs1 + imm, no link
// Like a load, both use the DEC-stage address adder on rs1 + imm. Anything else
// (FENCE, SYSTEM/CSR, unknown opcodes, other custom-0 funct3 values) decodes as a
// NOP with legal = 0, since the processor has no CSRs or exceptions.
//
// The opcode, I-type layout and the use of funct3 to tell BAA from RPA follow the
// paper; the funct3 values 000 and 001 are this design's choice.
module decoder
  import rv_pkg::*;
(
  input  logic [31:0] inst,
  output ctrl_t       ctrl,
  output logic [31:0] imm
);
  logic [6:0] opcode;
  logic [2:0] f3;
  logic [6:0] f7;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;

  assign opcode = inst[6:0];
  assign f3     = inst[14:12];
  assign f7     = inst[31:25];

  assign imm_i = {{20{inst[31]}}, inst[31:20]};
  assign imm_s = {{20{inst[31]}}, inst[31:25], inst[11:7]};
  assign imm_b = {{19{inst[31]}}, inst[31], inst[7], inst[30:25], inst[11:8], 1'b0};
  assign imm_u = {inst[31:12], 12'd0};
  assign imm_j = {{11{inst[31]}}, inst[31], inst[19:12], inst[20], inst[30:21], 1'b0};

  // ALU operation of OP / OP-IMM
  function automatic alu_op_e arith_op(input logic [2:0] fn3, input logic alt, input logic is_reg);
    unique case (fn3)
      3'b000: return (is_reg && alt) ? ALU_SUB : ALU_ADD;
      3'b001: return ALU_SLL;
      3'b010: return ALU_SLT;
      3'b011: return ALU_SLTU;
      3'b100: return ALU_XOR;
      3'b101: return alt ? ALU_SRA : ALU_SRL;
      3'b110: return ALU_OR;
      default: return ALU_AND;
    endcase
  endfunction

  always_comb begin
    ctrl        = CTRL_NOP;
    ctrl.rd     = inst[11:7];
    ctrl.rs1    = inst[19:15];
    ctrl.rs2    = inst[24:20];
    ctrl.funct3 = f3;
    imm         = imm_i;
    unique case (opcode)
      OP_LUI: begin
        ctrl.legal = 1'b1; ctrl.reg_we = 1'b1;
        ctrl.b_sel = B_IMM; ctrl.alu_op = ALU_PASSB; imm = imm_u;
      end
      OP_AUIPC: begin
        ctrl.legal = 1'b1; ctrl.reg_we = 1'b1;
        ctrl.a_sel = A_PC; ctrl.b_sel = B_IMM; ctrl.alu_op = ALU_ADD; imm = imm_u;
      end
      OP_JAL: begin
        ctrl.legal = 1'b1; ctrl.reg_we = 1'b1; ctrl.jal = 1'b1;
        ctrl.ma_sel = MA_PC; imm = imm_j;
      end
      OP_JALR: begin
        ctrl.legal = 1'b1; ctrl.reg_we = 1'b1; ctrl.jalr = 1'b1;
        ctrl.use_rs1 = 1'b1; ctrl.ma_sel = MA_RS1; ctrl.ma_use_rs1 = 1'b1; imm = imm_i;
      end
      OP_BRANCH: begin
        ctrl.legal = 1'b1; ctrl.branch = 1'b1;
        ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1; ctrl.ma_sel = MA_PC; imm = imm_b;
      end
      OP_LOAD: begin
        ctrl.legal = 1'b1; ctrl.reg_we = 1'b1; ctrl.load = 1'b1;
        ctrl.use_rs1 = 1'b1; ctrl.ma_sel = MA_RS1; ctrl.ma_use_rs1 = 1'b1; imm = imm_i;
      end
      OP_STORE: begin
        ctrl.legal = 1'b1; ctrl.store = 1'b1;
        ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1;
        ctrl.ma_sel = MA_RS1; ctrl.ma_use_rs1 = 1'b1; imm = imm_s;
      end
      OP_IMM: begin
        ctrl.legal = 1'b1; ctrl.reg_we = 1'b1; ctrl.use_rs1 = 1'b1;
        ctrl.b_sel = B_IMM; imm = imm_i;
        // only SRAI uses bit 30 as a selector among the immediate forms
        ctrl.alu_op = arith_op(f3, (f3 == 3'b101) && f7[5], 1'b0);
      end
      OP_REG: begin
        ctrl.legal = 1'b1; ctrl.reg_we = 1'b1;
        ctrl.use_rs1 = 1'b1; ctrl.use_rs2 = 1'b1;
        ctrl.alu_op = arith_op(f3, f7[5], 1'b1);
      end
      OP_CUSTOM0: begin
        imm = imm_i;
        if (f3 == F3_BAA || f3 == F3_RPA) begin
          ctrl.legal = 1'b1; ctrl.use_rs1 = 1'b1;
          ctrl.ma_sel = MA_RS1; ctrl.ma_use_rs1 = 1'b1;
          ctrl.baa = (f3 == F3_BAA);
          ctrl.rpa = (f3 == F3_RPA);
        end
      end
      default: ;
    endcase
    if (ctrl.rd == 5'd0) ctrl.reg_we = 1'b0;
    if (!ctrl.use_rs1) ctrl.rs1 = 5'd0;
    if (!ctrl.use_rs2) ctrl.rs2 = 5'd0;
    if (!ctrl.reg_we) ctrl.rd = 5'd0;
  end
endmodule
