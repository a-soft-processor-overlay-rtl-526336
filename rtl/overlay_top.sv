// overlay_top: the tightly-coupled architecture, soft processor plus accelerator.
//
// Two architectures share one address space. The primary architecture is the
// 4-stage RV32I core with its IMEM; the auxiliary architecture is the accelerator.
// They share the DMEM: multiplexers in front of DMEM (dmem_mux) pass either the
// core's EXE/MEM-stage access or the accelerator's Aux_Mem_Addr / Aux_Mem_WrData,
// chosen by the sel signal of the core's control path, and the DMEM read data goes
// to both. A BAA instruction launches the accelerator with a pointer to its
// argument array; the accelerator's Stall holds the core until it is done, and the
// program then continues after the BAA.
//
// Interface: clk, rst_n (synchronous, active low); a program-load port into IMEM
// (prog_we/prog_addr/prog_data, used while rst_n is low); pc and aux_busy for
// observation. Parameters size the two memories in 32-bit words.
//
// The structure follows the paper's block diagram; the memory sizes, the load port
// and the accelerator's compute function are this design's own choices.
module overlay_top #(
  parameter int unsigned IMEM_WORDS = 1024,
  parameter int unsigned DMEM_WORDS = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        prog_we,
  input  logic [31:0] prog_addr,
  input  logic [31:0] prog_data,
  output logic [31:0] pc,
  output logic        aux_busy
);
  logic [31:0] imem_addr, imem_inst;
  logic [31:0] cpu_addr, cpu_wdata, mem_addr, mem_wdata, mem_rdata;
  logic [3:0]  cpu_be, mem_be;
  logic        cpu_we, mem_we, sel_aux;
  logic        aux_start, aux_stall, aux_we;
  logic [31:0] aux_arg_addr, aux_addr, aux_wdata;

  imem #(.WORDS(IMEM_WORDS)) u_imem (
    .clk(clk), .addr(imem_addr), .inst(imem_inst),
    .load_we(prog_we), .load_addr(prog_addr), .load_data(prog_data)
  );

  core u_core (
    .clk(clk), .rst_n(rst_n),
    .imem_addr(imem_addr), .imem_inst(imem_inst),
    .dmem_addr(cpu_addr), .dmem_we(cpu_we), .dmem_be(cpu_be), .dmem_wdata(cpu_wdata),
    .dmem_rdata(mem_rdata), .dmem_sel_aux(sel_aux),
    .aux_start(aux_start), .aux_arg_addr(aux_arg_addr), .aux_stall(aux_stall)
  );

  dmem_mux u_mux (
    .sel_aux(sel_aux),
    .cpu_addr(cpu_addr), .cpu_we(cpu_we), .cpu_be(cpu_be), .cpu_wdata(cpu_wdata),
    .aux_addr(aux_addr), .aux_we(aux_we), .aux_wdata(aux_wdata),
    .mem_addr(mem_addr), .mem_we(mem_we), .mem_be(mem_be), .mem_wdata(mem_wdata)
  );

  dmem #(.WORDS(DMEM_WORDS)) u_dmem (
    .clk(clk), .addr(mem_addr), .we(mem_we), .be(mem_be), .wdata(mem_wdata),
    .rdata(mem_rdata)
  );

  accelerator u_acc (
    .clk(clk), .rst_n(rst_n), .start(aux_start), .arg_addr(aux_arg_addr),
    .stall(aux_stall), .mem_addr(aux_addr), .mem_we(aux_we), .mem_wdata(aux_wdata),
    .mem_rdata(mem_rdata)
  );

  assign pc       = imem_addr;
  assign aux_busy = aux_stall;
endmodule
