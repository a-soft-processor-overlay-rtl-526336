// lsu: load/store formatting for the merged EXE/MEM stage.
//
// Combinational. For a store it shifts the register value into the byte lanes
// selected by the low address bits and raises the matching byte enables (SB: one
// lane, SH: two, SW: all four). For a load it picks the addressed byte or halfword
// out of the DMEM word and sign- or zero-extends it (LB, LH, LW, LBU, LHU).
// Misaligned halfword and word accesses are not trapped, since the processor has no
// CSRs or exceptions: the address bits below the access size are ignored, so a
// halfword at offset 1 acts on lanes 0-1 and a word at any offset on the whole word.
module lsu
  import rv_pkg::*;
(
  input  logic [1:0]  addr_lo,
  input  logic [2:0]  funct3,
  input  logic        store,
  input  logic [31:0] st_data,
  output logic [31:0] wdata,
  output logic [3:0]  be,
  input  logic [31:0] rdata,
  output logic [31:0] ld_data
);
  logic [31:0] shifted;
  logic [4:0]  sh;      // lane shift in bits, address bits below the size ignored

  always_comb begin
    unique case (funct3[1:0])
      2'b00:   sh = {addr_lo, 3'b000};
      2'b01:   sh = {addr_lo[1], 4'b0000};
      default: sh = 5'd0;
    endcase
  end

  always_comb begin
    wdata = st_data << sh;
    be    = 4'b0000;
    if (store) begin
      unique case (funct3[1:0])
        2'b00:   be = 4'b0001 << addr_lo;
        2'b01:   be = addr_lo[1] ? 4'b1100 : 4'b0011;
        default: be = 4'b1111;
      endcase
    end
  end

  always_comb begin
    shifted = rdata >> sh;
    unique case (funct3)
      F3_B:    ld_data = {{24{shifted[7]}}, shifted[7:0]};
      F3_H:    ld_data = {{16{shifted[15]}}, shifted[15:0]};
      F3_BU:   ld_data = {24'd0, shifted[7:0]};
      F3_HU:   ld_data = {16'd0, shifted[15:0]};
      default: ld_data = rdata;
    endcase
  end
endmodule
