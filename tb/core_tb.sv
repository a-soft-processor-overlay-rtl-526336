// core_tb: self-checking program test of the 4-stage soft processor.
//
// The core runs with an IMEM, the DMEM sharing multiplexers and a DMEM; a small
// behavioural accelerator stands in for the auxiliary architecture: on aux_start
// it checks the argument pointer, holds Stall for AUX_BUSY cycles and writes one
// word into DMEM through the Aux_Mem port while the core is stalled.
//
// The program (assembled with rv_asm_pkg) exercises ALU and immediate
// operations, forwarding from WB, a load followed directly by a use, a load whose
// result is the next load's address, taken and untaken branches, a backward loop,
// JAL, JALR, LUI, AUIPC, byte and halfword loads and stores, BAA and RPA. Results
// are stored to DMEM and compared with values worked out by hand. Store times of
// marker stores give cycle checks: no stall for load-use, one stall for an address
// that needs the previous result, two bubbles after a taken branch, and the core
// frozen for exactly as long as the accelerator holds Stall.
module core_tb;
  import rv_asm_pkg::*;
  localparam int AUX_BUSY = 6;

  logic clk = 0, rst_n = 0;
  logic [31:0] imem_addr, imem_inst;
  logic [31:0] cpu_addr, cpu_wdata, mem_addr, mem_wdata, mem_rdata;
  logic [3:0]  cpu_be, mem_be;
  logic        cpu_we, mem_we, sel_aux;
  logic        aux_start, aux_stall;
  logic [31:0] aux_arg_addr;
  logic        ld_we = 0;
  logic [31:0] ld_addr = 0, ld_data = 0;

  // behavioural accelerator
  int          aux_cnt = 0;
  logic        aux_we;
  logic [31:0] aux_addr, aux_wdata;

  int checks = 0, failures = 0;
  longint cyc = 0;
  longint st_time [int];     // cycle of the last core store per byte address
  int stall_cycles = 0, launches = 0;

  imem #(.WORDS(256)) u_imem (.clk(clk), .addr(imem_addr), .inst(imem_inst),
                              .load_we(ld_we), .load_addr(ld_addr), .load_data(ld_data));
  core dut (
    .clk(clk), .rst_n(rst_n), .imem_addr(imem_addr), .imem_inst(imem_inst),
    .dmem_addr(cpu_addr), .dmem_we(cpu_we), .dmem_be(cpu_be), .dmem_wdata(cpu_wdata),
    .dmem_rdata(mem_rdata), .dmem_sel_aux(sel_aux),
    .aux_start(aux_start), .aux_arg_addr(aux_arg_addr), .aux_stall(aux_stall)
  );
  dmem_mux u_mux (.sel_aux(sel_aux), .cpu_addr(cpu_addr), .cpu_we(cpu_we), .cpu_be(cpu_be),
                  .cpu_wdata(cpu_wdata), .aux_addr(aux_addr), .aux_we(aux_we),
                  .aux_wdata(aux_wdata), .mem_addr(mem_addr), .mem_we(mem_we),
                  .mem_be(mem_be), .mem_wdata(mem_wdata));
  dmem #(.WORDS(256)) u_dmem (.clk(clk), .addr(mem_addr), .we(mem_we), .be(mem_be),
                              .wdata(mem_wdata), .rdata(mem_rdata));

  always #5 clk = ~clk;

  assign aux_stall = aux_start || (aux_cnt != 0);
  assign aux_we    = (aux_cnt == 2);
  assign aux_addr  = 32'h13C;
  assign aux_wdata = 32'hA5A5_A5A5;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (aux_start) begin
      aux_cnt <= AUX_BUSY - 1;
      launches <= launches + 1;
      checks++;
      if (aux_arg_addr !== 32'h50) begin
        failures++; $display("FAIL BAA argument address %h", aux_arg_addr);
      end
    end else if (aux_cnt != 0) aux_cnt <= aux_cnt - 1;
    if (aux_stall) stall_cycles <= stall_cycles + 1;
    if (rst_n && aux_stall && !aux_start && !sel_aux) begin
      failures++; $display("FAIL sel not given to the accelerator");
    end
    if (rst_n && aux_stall && cpu_we) begin
      failures++; $display("FAIL core store during accelerator run");
    end
    if (rst_n && cpu_we && !sel_aux) st_time[int'(cpu_addr)] = cyc;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] prog [$];

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic chk_mem(int a, logic [31:0] v);
    chk($sformatf("mem[%h] = %h, expected %h", a, u_dmem.mem[a/4], v), u_dmem.mem[a/4] === v);
  endtask

  task automatic chk_gap(int a0, int a1, int gap);
    longint d = st_time.exists(a1) && st_time.exists(a0) ? st_time[a1] - st_time[a0] : -1;
    chk($sformatf("cycles between stores %h and %h: %0d, expected %0d", a0, a1, d, gap), d == gap);
  endtask

  initial begin
    prog = '{
      ADDI(1, 0, 'h40),          // 0
      ADDI(2, 0, 5),             // 1
      ADDI(3, 2, 7),             // 2  x3 = 12, x2 from WB
      ADD(4, 3, 2),              // 3  x4 = 17
      SUB(5, 2, 4),              // 4  x5 = -12
      SW(5, 0, 'h100),           // 5  store data from WB
      SW(0, 0, 'h180),           // 6  marker A
      LW(6, 1, 0),               // 7  x6 = 0x80
      ADD(7, 6, 6),              // 8  load-use
      ADD(7, 7, 6),              // 9  x7 = 0x180
      SW(7, 0, 'h184),           // 10 marker B
      SW(0, 0, 'h188),           // 11 marker C
      LW(8, 1, 0),               // 12 x8 = 0x80
      LW(9, 8, 0),               // 13 address needs x8: one-cycle interlock
      SW(9, 0, 'h18C),           // 14 marker D
      SW(0, 0, 'h190),           // 15 marker E
      BEQ(0, 0, 8),              // 16 taken -> 18
      ADDI(5, 0, 99),            // 17 flushed
      SW(5, 0, 'h194),           // 18 marker F, x5 must still be -12
      BNE(0, 0, 8),              // 19 not taken
      ADDI(11, 0, 1),            // 20
      SW(11, 0, 'h104),          // 21
      JAL(12, 8),                // 22 -> 24, x12 = 92
      ADDI(11, 0, 55),           // 23 flushed
      SW(12, 0, 'h108),          // 24
      ADDI(13, 0, 112),          // 25
      JALR(14, 13, 4),           // 26 -> 116 (29), x14 = 108
      ADDI(11, 0, 77),           // 27 flushed
      ADDI(11, 0, 78),           // 28 skipped
      SW(14, 0, 'h10C),          // 29
      LUI(15, 'h12345),          // 30
      AUIPC(16, 1),              // 31 x16 = 124 + 0x1000
      SW(15, 0, 'h110),          // 32
      SW(16, 0, 'h114),          // 33
      ADDI(17, 0, -1),           // 34
      SB(17, 0, 'h119),          // 35
      LB(18, 0, 'h119),          // 36
      LBU(19, 0, 'h119),         // 37
      SW(18, 0, 'h11C),          // 38
      SW(19, 0, 'h120),          // 39
      SH(2, 0, 'h11A),           // 40
      LH(20, 0, 'h11A),          // 41
      SW(20, 0, 'h124),          // 42
      SLT(21, 5, 2),             // 43
      SLTU(22, 5, 2),            // 44
      SRAI(23, 5, 2),            // 45
      SW(21, 0, 'h128),          // 46
      SW(22, 0, 'h12C),          // 47
      SW(23, 0, 'h130),          // 48
      SW(0, 0, 'h198),           // 49 marker G
      BAA(1, 'h10),              // 50 accelerator, arguments at 0x50
      SW(0, 0, 'h19C),           // 51 marker H
      ADDI(24, 0, 220),          // 52
      RPA(24, 0),                // 53 -> 220 (55)
      ADDI(11, 0, 66),           // 54 flushed
      SW(11, 0, 'h134),          // 55 x11 must still be 1
      ADDI(25, 0, 0),            // 56
      ADDI(26, 0, 10),           // 57
      ADD(25, 25, 26),           // 58
      ADDI(26, 26, -1),          // 59
      BNE(26, 0, -8),            // 60 -> 58
      SW(25, 0, 'h138),          // 61 55
      SW(0, 0, 'h1FC),           // 62 done
      JAL(0, 0)                  // 63 halt
    };
    for (int i = 0; i < 256; i++) u_dmem.mem[i] = 0;
    u_dmem.mem['h40/4] = 32'h80;
    u_dmem.mem['h80/4] = 1234;
    for (int i = 0; i < prog.size(); i++) begin
      @(negedge clk);
      ld_we = 1; ld_addr = 4 * i; ld_data = prog[i];
    end
    @(negedge clk) ld_we = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (st_time.exists('h1FC));
    repeat (5) @(posedge clk);
    chk_mem('h100, -12);
    chk_mem('h104, 1);
    chk_mem('h108, 92);
    chk_mem('h10C, 108);
    chk_mem('h110, 32'h1234_5000);
    chk_mem('h114, 32'h107C);
    chk_mem('h118, 32'h0005_FF00);
    chk_mem('h11C, 32'hFFFF_FFFF);
    chk_mem('h120, 255);
    chk_mem('h124, 5);
    chk_mem('h128, 1);
    chk_mem('h12C, 0);
    chk_mem('h130, 32'hFFFF_FFFD);
    chk_mem('h134, 1);
    chk_mem('h138, 55);
    chk_mem('h13C, 32'hA5A5_A5A5);
    chk_mem('h184, 32'h180);
    chk_mem('h18C, 1234);
    chk_mem('h194, -12);
    chk_gap('h180, 'h184, 4);                 // load-use: no stall
    chk_gap('h188, 'h18C, 4);                 // address interlock: one stall
    chk_gap('h190, 'h194, 4);                 // taken branch: two bubbles
    chk_gap('h198, 'h19C, stall_cycles + 2);  // frozen while Stall is high
    chk("one accelerator launch", launches == 1);
    chk("stall length", stall_cycles == AUX_BUSY);
    chk("halted in the final loop", imem_addr == 63 * 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
