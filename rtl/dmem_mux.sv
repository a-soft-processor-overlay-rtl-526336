// dmem_mux: the multiplexers in front of the shared DMEM.
//
// Combinational. While sel_aux is low the processor's EXE/MEM stage drives the
// DMEM address, write data, byte enables and write enable. While the control path
// holds sel_aux high (the processor is stalled because a BAA instruction handed
// control to the accelerator), the accelerator's address (Aux_Mem_Addr), write
// data (Aux_Mem_WrData) and write enable drive the port instead; the accelerator
// always writes whole words. DMEM read data is not switched: it goes to both sides.
//
// The muxes on address and write data and the sel signal from the control path are
// the paper's; switching the enables too and whole-word accelerator writes are this
// design's choices.
module dmem_mux (
  input  logic        sel_aux,
  input  logic [31:0] cpu_addr,
  input  logic        cpu_we,
  input  logic [3:0]  cpu_be,
  input  logic [31:0] cpu_wdata,
  input  logic [31:0] aux_addr,
  input  logic        aux_we,
  input  logic [31:0] aux_wdata,
  output logic [31:0] mem_addr,
  output logic        mem_we,
  output logic [3:0]  mem_be,
  output logic [31:0] mem_wdata
);
  always_comb begin
    if (sel_aux) begin
      mem_addr  = aux_addr;
      mem_we    = aux_we;
      mem_be    = 4'b1111;
      mem_wdata = aux_wdata;
    end else begin
      mem_addr  = cpu_addr;
      mem_we    = cpu_we;
      mem_be    = cpu_be;
      mem_wdata = cpu_wdata;
    end
  end
endmodule
