// alu_tb: self-checking test of the ALU.
// Every operation on random and corner-case operands, compared with the RV32I
// definition written out independently in the testbench.
module alu_tb;
  import rv_pkg::*;
  alu_op_e op;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  alu dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] model(alu_op_e o, logic [31:0] x, logic [31:0] z);
    int signed xs = x, zs = z;
    case (o)
      ALU_ADD:   return x + z;
      ALU_SUB:   return x - z;
      ALU_SLL:   return x << z[4:0];
      ALU_SLT:   return (xs < zs) ? 1 : 0;
      ALU_SLTU:  return (x < z) ? 1 : 0;
      ALU_XOR:   return x ^ z;
      ALU_SRL:   return x >> z[4:0];
      ALU_SRA:   return xs >>> z[4:0];
      ALU_OR:    return x | z;
      ALU_AND:   return x & z;
      ALU_PASSB: return z;
      default:   return 'x;
    endcase
  endfunction

  logic [31:0] corners [6] = '{32'h0, 32'h1, 32'hFFFF_FFFF, 32'h8000_0000, 32'h7FFF_FFFF, 32'h1F};

  task automatic one(alu_op_e o, logic [31:0] x, logic [31:0] z);
    op = o; a = x; b = z;
    #1;
    checks++;
    if (y !== model(o, x, z)) begin
      failures++;
      $display("FAIL op=%s a=%h b=%h y=%h exp=%h", o.name(), x, z, y, model(o, x, z));
    end
  endtask

  initial begin
    for (int o = 0; o <= 10; o++) begin
      for (int i = 0; i < 6; i++)
        for (int j = 0; j < 6; j++) one(alu_op_e'(o), corners[i], corners[j]);
      for (int n = 0; n < 300; n++) one(alu_op_e'(o), $urandom, $urandom);
    end
    // fixed known answers
    one(ALU_SRA, 32'h8000_0000, 32'd4);
    checks++; if (y !== 32'hF800_0000) failures++;
    one(ALU_SLT, 32'hFFFF_FFFF, 32'd1);
    checks++; if (y !== 32'd1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
