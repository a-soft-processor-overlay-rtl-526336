// regfile: the RV32I register file of the soft processor.
//
// NREGS x 32-bit registers with two combinational read ports (rs1/rd1, rs2/rd2) and
// one write port (wa, wd, we) written on the rising clock edge. Register x0 always
// reads zero and is never written. Reads are write-through: reading the register
// that is being written in the same cycle returns the value being written, which is
// how a result in the WB stage reaches an instruction in DEC without a separate
// forwarding path.
//
// Port names follow the paper's pipeline figure; the write-through behaviour and the
// absence of a reset are this design's choices.
module regfile #(
  parameter int unsigned NREGS = 32
) (
  input  logic        clk,
  input  logic [4:0]  rs1,
  input  logic [4:0]  rs2,
  output logic [31:0] rd1,
  output logic [31:0] rd2,
  input  logic        we,
  input  logic [4:0]  wa,
  input  logic [31:0] wd
);
  logic [31:0] regs [NREGS];

  always_ff @(posedge clk) begin
    if (we && wa != 5'd0) regs[wa] <= wd;
  end

  always_comb begin
    if (rs1 == 5'd0)             rd1 = '0;
    else if (we && wa == rs1)    rd1 = wd;
    else                         rd1 = regs[rs1];
    if (rs2 == 5'd0)             rd2 = '0;
    else if (we && wa == rs2)    rd2 = wd;
    else                         rd2 = regs[rs2];
  end
endmodule
