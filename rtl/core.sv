// core: the 4-stage RV32I soft processor (the primary architecture).
//
// Stages: IF (PC register, PC+4 adder, IMEM read), DEC (decoder, register file
// read, operand muxes, and the extra 32-bit memory-address adder), EXE/MEM (ALU
// and the DMEM access in one stage), WB (result register R written to the
// register file). Merging EXE and MEM is the paper's central choice: a load's data
// is ready at the same point as an ALU result, so a load followed by an
// instruction that uses the loaded value needs no stall. The price is that the
// memory address must be ready when the instruction enters EXE/MEM, hence the
// address adder (MA = rs1 + imm, or PC + imm for branches and JAL) sits in DEC.
//
// Hazards (this design's choices where the paper is silent):
//   * WB -> EXE/MEM: the result in R is forwarded to the ALU operands, the branch
//     compare and the store data of the instruction right behind it.
//   * WB -> DEC: the register file is write-through.
//   * The DEC address adder cannot see a result that is still in EXE/MEM; an
//     instruction whose address needs such an rs1 waits one cycle in DEC.
//   * Branches, JAL, JALR and RPA resolve in EXE/MEM, target = MA; a taken one
//     flushes IF and DEC (two bubbles).
//
// Tightly-coupled accelerator (the paper's MURAC execution model): when a BAA
// reaches EXE/MEM the core pulses aux_start for one cycle with aux_arg_addr =
// base + offset (the argument array), raises dmem_sel_aux so the DMEM muxes give
// the port to the accelerator, and freezes IF, DEC and EXE/MEM until aux_stall
// falls; the core also freezes on its own in the launch cycle. The BAA then
// retires and execution goes on at PC+4. RPA jumps to base + offset without a
// link. Timing of the launch pulse and the sel hand-over are this design's choice.
//
// No CSRs, exceptions or interrupts: the paper removes CSRs. Reset is synchronous
// and active low; the PC restarts at RESET_PC.
module core
  import rv_pkg::*;
#(
  parameter logic [31:0] RESET_PC = 32'h0000_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  // IMEM
  output logic [31:0] imem_addr,
  input  logic [31:0] imem_inst,
  // DMEM, processor side (through the sharing muxes)
  output logic [31:0] dmem_addr,
  output logic        dmem_we,
  output logic [3:0]  dmem_be,
  output logic [31:0] dmem_wdata,
  input  logic [31:0] dmem_rdata,
  output logic        dmem_sel_aux,
  // auxiliary architecture
  output logic        aux_start,
  output logic [31:0] aux_arg_addr,
  input  logic        aux_stall
);
  // ------------------------------------------------------------------ state
  logic [31:0] pc_q;

  logic        d_valid;
  logic [31:0] d_pc, d_inst;

  logic        e_valid;
  ctrl_t       e_ctrl;
  logic [31:0] e_pc, e_a, e_b, e_md, e_ma;

  logic        w_valid, w_we;
  logic [4:0]  w_rd;
  logic [31:0] w_result;      // register R of the pipeline figure

  logic        launched;      // BAA in EXE/MEM has started the accelerator

  // ------------------------------------------------------------------ IF
  assign imem_addr = pc_q;

  // ------------------------------------------------------------------ DEC
  ctrl_t       d_ctrl;
  logic [31:0] d_imm, rf_rd1, rf_rd2, d_ma, d_a, d_b;

  decoder u_dec (.inst(d_inst), .ctrl(d_ctrl), .imm(d_imm));

  regfile u_rf (
    .clk(clk),
    .rs1(d_ctrl.rs1), .rs2(d_ctrl.rs2), .rd1(rf_rd1), .rd2(rf_rd2),
    .we(w_valid && w_we), .wa(w_rd), .wd(w_result)
  );

  assign d_ma = ((d_ctrl.ma_sel == MA_RS1) ? rf_rd1 : d_pc) + d_imm;
  assign d_a  = (d_ctrl.a_sel == A_PC) ? d_pc : rf_rd1;
  assign d_b  = (d_ctrl.b_sel == B_IMM) ? d_imm : rf_rd2;

  logic addr_hazard;
  assign addr_hazard = d_valid && d_ctrl.ma_use_rs1 && e_valid && e_ctrl.reg_we &&
                       (e_ctrl.rd == d_ctrl.rs1);

  // ------------------------------------------------------------------ EXE/MEM
  logic        fwd_rs1, fwd_rs2;
  logic [31:0] x_a, x_b, x_rs2, alu_y, ld_data, e_result;
  logic        redirect;
  logic [31:0] target;

  assign fwd_rs1 = w_valid && w_we && e_ctrl.use_rs1 && (w_rd == e_ctrl.rs1);
  assign fwd_rs2 = w_valid && w_we && e_ctrl.use_rs2 && (w_rd == e_ctrl.rs2);

  assign x_a   = (fwd_rs1 && e_ctrl.a_sel == A_RS1) ? w_result : e_a;
  assign x_b   = (fwd_rs2 && e_ctrl.b_sel == B_RS2) ? w_result : e_b;
  assign x_rs2 = fwd_rs2 ? w_result : e_md;

  alu u_alu (.op(e_ctrl.alu_op), .a(x_a), .b(x_b), .y(alu_y));

  lsu u_lsu (
    .addr_lo(e_ma[1:0]), .funct3(e_ctrl.funct3), .store(e_ctrl.store),
    .st_data(x_rs2), .wdata(dmem_wdata), .be(dmem_be),
    .rdata(dmem_rdata), .ld_data(ld_data)
  );

  assign dmem_addr = e_ma;
  assign dmem_we   = e_valid && e_ctrl.store && !launched;

  always_comb begin
    if (e_ctrl.load)                    e_result = ld_data;
    else if (e_ctrl.jal || e_ctrl.jalr) e_result = e_pc + 32'd4;
    else                                e_result = alu_y;
  end

  assign redirect = e_valid && (e_ctrl.jal || e_ctrl.jalr || e_ctrl.rpa ||
                                (e_ctrl.branch && branch_taken(e_ctrl.funct3, x_a, x_rs2)));
  assign target   = (e_ctrl.jalr || e_ctrl.rpa) ? {e_ma[31:1], 1'b0} : e_ma;

  // ---------------------------------------------- auxiliary-architecture control
  logic e_baa, aux_hold;
  assign e_baa        = e_valid && e_ctrl.baa;
  assign aux_start    = e_baa && !launched;
  assign aux_arg_addr = e_ma;
  assign aux_hold     = e_baa && (!launched || aux_stall);
  assign dmem_sel_aux = launched;

  // ------------------------------------------------------------------ pipeline
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pc_q     <= RESET_PC;
      d_valid  <= 1'b0;
      e_valid  <= 1'b0;
      w_valid  <= 1'b0;
      launched <= 1'b0;
      d_pc     <= '0;
      d_inst   <= '0;
      e_ctrl   <= CTRL_NOP;
      e_pc     <= '0;
      e_a      <= '0;
      e_b      <= '0;
      e_md     <= '0;
      e_ma     <= '0;
      w_we     <= 1'b0;
      w_rd     <= '0;
      w_result <= '0;
    end else begin
      launched <= aux_hold;   // set by the launch cycle, cleared as the BAA leaves
      // WB register R
      w_valid  <= e_valid && !aux_hold;
      w_we     <= e_ctrl.reg_we;
      w_rd     <= e_ctrl.rd;
      w_result <= e_result;

      if (aux_hold) begin
        // whole pipeline frozen while the accelerator owns DMEM
      end else if (redirect) begin
        pc_q    <= target;
        d_valid <= 1'b0;
        e_valid <= 1'b0;
      end else if (addr_hazard) begin
        e_valid <= 1'b0;
      end else begin
        pc_q    <= pc_q + 32'd4;
        d_valid <= 1'b1;
        d_pc    <= pc_q;
        d_inst  <= imem_inst;
        e_valid <= d_valid;
        e_ctrl  <= d_ctrl;
        e_pc    <= d_pc;
        e_a     <= d_a;
        e_b     <= d_b;
        e_md    <= rf_rd2;
        e_ma    <= d_ma;
      end
    end
  end

  // A store must never be issued while the accelerator owns DMEM.
  assert property (@(posedge clk) disable iff (!rst_n) !(dmem_sel_aux && dmem_we));
  // The launch pulse lasts one cycle.
  assert property (@(posedge clk) disable iff (!rst_n) aux_start |=> !aux_start);
endmodule
