// rv_pkg: types and constants shared by the soft processor, its memories and the
// auxiliary-architecture (accelerator) interface.
//
// The processor implements RV32I without CSRs, plus two custom-0 instructions that
// hand control to and from the accelerator: BAA (Branch-Auxiliary-Architecture) and
// RPA (Return-to-Primary-Architecture). Both are I-type with opcode 7'b0001011; the
// funct3 field tells them apart. The opcode and the I-type format follow the paper;
// the two funct3 values are this design's choice.
package rv_pkg;

  // ---------------------------------------------------------------- opcodes
  localparam logic [6:0] OP_LUI    = 7'b0110111;
  localparam logic [6:0] OP_AUIPC  = 7'b0010111;
  localparam logic [6:0] OP_JAL    = 7'b1101111;
  localparam logic [6:0] OP_JALR   = 7'b1100111;
  localparam logic [6:0] OP_BRANCH = 7'b1100011;
  localparam logic [6:0] OP_LOAD   = 7'b0000011;
  localparam logic [6:0] OP_STORE  = 7'b0100011;
  localparam logic [6:0] OP_IMM    = 7'b0010011;
  localparam logic [6:0] OP_REG    = 7'b0110011;
  localparam logic [6:0] OP_CUSTOM0 = 7'b0001011;  // BAA / RPA

  localparam logic [2:0] F3_BAA = 3'b000;
  localparam logic [2:0] F3_RPA = 3'b001;

  // load/store funct3
  localparam logic [2:0] F3_B  = 3'b000;
  localparam logic [2:0] F3_H  = 3'b001;
  localparam logic [2:0] F3_W  = 3'b010;
  localparam logic [2:0] F3_BU = 3'b100;
  localparam logic [2:0] F3_HU = 3'b101;

  // branch funct3
  localparam logic [2:0] F3_BEQ  = 3'b000;
  localparam logic [2:0] F3_BNE  = 3'b001;
  localparam logic [2:0] F3_BLT  = 3'b100;
  localparam logic [2:0] F3_BGE  = 3'b101;
  localparam logic [2:0] F3_BLTU = 3'b110;
  localparam logic [2:0] F3_BGEU = 3'b111;

  typedef enum logic [3:0] {
    ALU_ADD  = 4'd0,
    ALU_SUB  = 4'd1,
    ALU_SLL  = 4'd2,
    ALU_SLT  = 4'd3,
    ALU_SLTU = 4'd4,
    ALU_XOR  = 4'd5,
    ALU_SRL  = 4'd6,
    ALU_SRA  = 4'd7,
    ALU_OR   = 4'd8,
    ALU_AND  = 4'd9,
    ALU_PASSB = 4'd10
  } alu_op_e;

  // Source of operand A of the ALU
  typedef enum logic [0:0] { A_RS1 = 1'b0, A_PC = 1'b1 } a_sel_e;
  // Source of operand B of the ALU (the mux in front of B in the DEC stage)
  typedef enum logic [0:0] { B_RS2 = 1'b0, B_IMM = 1'b1 } b_sel_e;
  // Base of the memory-address adder in DEC
  typedef enum logic [0:0] { MA_RS1 = 1'b0, MA_PC = 1'b1 } ma_sel_e;

  // Decoded control word, carried down the pipeline with the instruction.
  typedef struct packed {
    logic     legal;      // recognised instruction (illegal ones act as NOP)
    logic     reg_we;     // writes rd
    logic [4:0] rd;
    logic [4:0] rs1;
    logic [4:0] rs2;
    logic     use_rs1;    // reads rs1 (ALU operand, store base, jump base)
    logic     use_rs2;    // reads rs2 (ALU operand, branch compare, store data)
    a_sel_e   a_sel;
    b_sel_e   b_sel;
    alu_op_e  alu_op;
    ma_sel_e  ma_sel;
    logic     ma_use_rs1; // the DEC-stage address adder reads rs1
    logic     load;
    logic     store;
    logic [2:0] funct3;
    logic     branch;
    logic     jal;
    logic     jalr;
    logic     baa;
    logic     rpa;
  } ctrl_t;

  localparam ctrl_t CTRL_NOP = '{
    legal: 1'b0, reg_we: 1'b0, rd: 5'd0, rs1: 5'd0, rs2: 5'd0, use_rs1: 1'b0, use_rs2: 1'b0,
    a_sel: A_RS1, b_sel: B_RS2, alu_op: ALU_ADD, ma_sel: MA_PC, ma_use_rs1: 1'b0,
    load: 1'b0, store: 1'b0, funct3: 3'd0, branch: 1'b0, jal: 1'b0, jalr: 1'b0,
    baa: 1'b0, rpa: 1'b0
  };

  // Branch condition of RV32I
  function automatic logic branch_taken(input logic [2:0] f3, input logic [31:0] a,
                                        input logic [31:0] b);
    unique case (f3)
      F3_BEQ:  return a == b;
      F3_BNE:  return a != b;
      F3_BLT:  return $signed(a) < $signed(b);
      F3_BGE:  return $signed(a) >= $signed(b);
      F3_BLTU: return a < b;
      F3_BGEU: return a >= b;
      default: return 1'b0;
    endcase
  endfunction

endpackage
