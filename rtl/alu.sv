// alu: the integer ALU of the EXE/MEM stage.
//
// Purely combinational. Implements the RV32I register and immediate operations
// (add, sub, shifts, signed/unsigned set-less-than, xor, or, and) and a pass of
// operand B used by LUI. Shift amounts are b[4:0]. There is no multiplier: the
// base RV32I set has none.
module alu
  import rv_pkg::*;
(
  input  alu_op_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  always_comb begin
    unique case (op)
      ALU_ADD:   y = a + b;
      ALU_SUB:   y = a - b;
      ALU_SLL:   y = a << b[4:0];
      ALU_SLT:   y = {31'd0, $signed(a) < $signed(b)};
      ALU_SLTU:  y = {31'd0, a < b};
      ALU_XOR:   y = a ^ b;
      ALU_SRL:   y = a >> b[4:0];
      ALU_SRA:   y = 32'($signed(a) >>> b[4:0]);
      ALU_OR:    y = a | b;
      ALU_AND:   y = a & b;
      ALU_PASSB: y = b;
      default:   y = a + b;
    endcase
  end
endmodule
