// mm_workload_tb: the matrix-multiply workload on the whole design.
//
// Runs mm_prog_pkg on the top at its default parameters: C = A * B with N = 36,
// the largest square size whose three matrices fit in the default 16 KB DMEM
// (3 * 1296 of 4096 words). The accelerator computes one row of A times U = 5
// columns of B per call (the 1 x 5 x N unrolling of the MM kernel), 7 calls per
// row, and software computes the 36th column of every row. Every element of C is
// compared with a product computed here, the number of calls and the length of
// each Stall period (13 + U*(2N+1) cycles) are checked, and the cycle count of
// the run is printed.
module mm_workload_tb;
  import mm_prog_pkg::*;

  localparam int N = 36, U = 5;
  localparam int AB = 'h100, BB = AB + 4 * N * N, CB = BB + 4 * N * N;
  localparam longint MAX_CYCLES = 2000000;

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

  int n_launch = 0, run_len = 0, bad_len = 0;
  longint cyc = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dut.u_core.aux_start) n_launch++;
    if (aux_busy) run_len++;
    else if (run_len != 0) begin
      if (run_len != 13 + U * (2 * N + 1)) bad_len++;
      run_len = 0;
    end
  end

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [31:0] p [$];
  logic [31:0] a [N*N];
  logic [31:0] b [N*N];

  initial begin
    mm_program(p);
    for (int i = 0; i < 4096; i++) dut.u_dmem.mem[i] = 0;
    for (int i = 0; i < N*N; i++) begin
      a[i] = 32'($urandom % 201) - 100; dut.u_dmem.mem[AB/4 + i] = a[i];
      b[i] = 32'($urandom % 201) - 100; dut.u_dmem.mem[BB/4 + i] = b[i];
    end
    dut.u_dmem.mem[PARAMS/4 + 0] = U;
    dut.u_dmem.mem[PARAMS/4 + 1] = AB;
    dut.u_dmem.mem[PARAMS/4 + 2] = BB;
    dut.u_dmem.mem[PARAMS/4 + 3] = CB;
    dut.u_dmem.mem[PARAMS/4 + 4] = N;
    for (int i = 0; i < p.size(); i++) begin
      @(negedge clk);
      prog_we = 1; prog_addr = 4 * i; prog_data = p[i];
    end
    @(negedge clk) prog_we = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (dut.u_dmem.mem[DONE/4] == 1);
    repeat (4) @(posedge clk);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        automatic logic [31:0] e = 0;
        for (int k = 0; k < N; k++) e += a[i*N + k] * b[k*N + j];
        chk($sformatf("C[%0d][%0d] = %0d, expected %0d", i, j,
                      $signed(dut.u_dmem.mem[CB/4 + i*N + j]), $signed(e)),
            dut.u_dmem.mem[CB/4 + i*N + j] === e);
      end
    chk($sformatf("launches %0d, expected %0d", n_launch, N * (N / U)), n_launch == N * (N / U));
    chk($sformatf("%0d stall periods of the wrong length", bad_len), bad_len == 0);
    $display("cycles=%0d launches=%0d", cyc, n_launch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
