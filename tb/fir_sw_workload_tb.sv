// fir_sw_workload_tb: the FIR workload with the processor alone.
//
// Runs the same FIR program on the top at its default parameters, but with the
// block size set larger than the number of outputs, so no block is ever handed to
// the accelerator and every output is computed in software with the
// shift-and-add multiply subroutine. This is the processor-only configuration of
// the benchmarks: the same program without acceleration. The size is 120 inputs
// and 20 taps (101 outputs), small enough to simulate quickly in software. Every
// output is compared with a value computed here; the testbench checks that no
// accelerator call, freeze or DMEM hand-over happened while the processor's own
// mechanisms (RPA return, taken branches, forwarding, load-use, address
// interlock) did, and prints the cycle count of the run.
module fir_sw_workload_tb;
  import fir_prog_pkg::*;

  localparam int NX = 120, NT = 20;
  localparam int B = NX - NT + 2;      // more than the number of outputs
  localparam int NY = NX - NT + 1;
  localparam int HB = 'h100, XB = 'h200, YB = 'h2000;
  localparam longint MAX_CYCLES = 3000000;

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
    chk($sformatf("launches %0d, expected 0", n_launch), n_launch == 0);
    chk("core never frozen by Stall",  n_stall == 0);
    chk("DMEM never given away",       n_sel == 0);
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
