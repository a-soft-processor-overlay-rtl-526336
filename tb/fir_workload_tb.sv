// fir_workload_tb: the FIR workload at the size the default memories hold.
//
// Same program and checks as overlay_top_tb, with the accelerator computing
// blocks of 50 outputs of 50 taps each (the 50 x 50 unrolling of the FIR kernel
// the design is meant for) over 1900 inputs: 1851 outputs, 37 accelerator calls and
// one output left to software. The paper's FIR run uses 10000 inputs, which do
// not fit in the default 16 KB DMEM; with 1900 inputs x, h and y fill 3752 of
// its 4096 words. The top runs with its default parameters, and the testbench
// prints the cycle count of the run.
module fir_workload_tb;
  import fir_prog_pkg::*;

  localparam int NX = 1900, NT = 50, B = 50;
  localparam int NY = NX - NT + 1;
  localparam int HB = 'h100, XB = 'h200, YB = 'h2000;
  localparam longint MAX_CYCLES = 1000000;

  logic clk = 0, rst_n = 0;
  logic prog_we = 0;
  logic [31:0] prog_addr = 0, prog_data = 0, pc;
  logic aux_busy;
  int checks = 0, failures = 0;

  overlay_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (MAX_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------ mechanism counters
  int n_launch = 0, n_stall = 0, n_sel = 0, n_rpa = 0, n_flush = 0, n_interlock = 0;
  int n_fwd = 0, n_loaduse = 0, run_len = 0, bad_len = 0;
  logic prev_load = 0;
  longint cyc = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dut.u_core.aux_start) n_launch++;
    if (dut.u_core.aux_hold)  n_stall++;
    if (dut.u_core.dmem_sel_aux) n_sel++;
    if (dut.u_core.e_valid && dut.u_core.e_ctrl.rpa) n_rpa++;
    if (dut.u_core.redirect) n_flush++;
    if (dut.u_core.addr_hazard && !dut.u_core.redirect && !dut.u_core.aux_hold) n_interlock++;
    if (dut.u_core.e_valid && (dut.u_core.fwd_rs1 || dut.u_core.fwd_rs2)) begin
      n_fwd++;
      if (prev_load) n_loaduse++;
    end
    prev_load = dut.u_core.e_valid && dut.u_core.e_ctrl.load && !dut.u_core.aux_hold;
    // length of each Stall period
    if (aux_busy) run_len++;
    else if (run_len != 0) begin
      if (run_len != 13 + B * (2 * NT + 1)) bad_len++;
      run_len = 0;
    end
  end

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [31:0] p [$];
  logic [31:0] x [NX];
  logic [31:0] h [NT];

  initial begin
    fir_program(p);
    for (int i = 0; i < 4096; i++) dut.u_dmem.mem[i] = 0;
    for (int i = 0; i < NX; i++) begin x[i] = 32'($urandom % 2001) - 1000; dut.u_dmem.mem[XB/4 + i] = x[i]; end
    for (int i = 0; i < NT; i++) begin h[i] = 32'($urandom % 2001) - 1000; dut.u_dmem.mem[HB/4 + i] = h[i]; end
    dut.u_dmem.mem[PARAMS/4 + 0] = NY;
    dut.u_dmem.mem[PARAMS/4 + 1] = B;
    dut.u_dmem.mem[PARAMS/4 + 2] = NT;
    dut.u_dmem.mem[PARAMS/4 + 3] = XB;
    dut.u_dmem.mem[PARAMS/4 + 4] = HB;
    dut.u_dmem.mem[PARAMS/4 + 5] = YB;
    dut.u_dmem.mem[PARAMS/4 + 6] = 0;
    for (int i = 0; i < p.size(); i++) begin
      @(negedge clk);
      prog_we = 1; prog_addr = 4 * i; prog_data = p[i];
    end
    @(negedge clk) prog_we = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (dut.u_dmem.mem[DONE/4] == 1);
    repeat (4) @(posedge clk);
    for (int o = 0; o < NY; o++) begin
      automatic logic [31:0] e = 0;
      for (int k = 0; k < NT; k++) e += x[o + k] * h[k];
      chk($sformatf("y[%0d] = %0d, expected %0d", o, $signed(dut.u_dmem.mem[YB/4 + o]), $signed(e)),
          dut.u_dmem.mem[YB/4 + o] === e);
    end
    chk($sformatf("launches %0d, expected %0d", n_launch, NY / B), n_launch == NY / B);
    chk($sformatf("%0d stall periods of the wrong length", bad_len), bad_len == 0);
    chk("accelerator launched",        n_launch > 0);
    chk("core frozen by Stall",        n_stall > 0);
    chk("DMEM given to accelerator",   n_sel > 0);
    chk("RPA return",                  n_rpa > 0);
    chk("taken branch or jump",        n_flush > 0);
    chk("address interlock",           n_interlock > 0);
    chk("WB to EXE forwarding",        n_fwd > 0);
    chk("load result used next",       n_loaduse > 0);
    $display("cycles=%0d launches=%0d stall=%0d sel=%0d rpa=%0d flush=%0d interlock=%0d fwd=%0d loaduse=%0d",
             cyc, n_launch, n_stall, n_sel, n_rpa, n_flush, n_interlock, n_fwd, n_loaduse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
