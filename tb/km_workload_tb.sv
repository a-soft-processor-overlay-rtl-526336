// km_workload_tb: the K-means assignment workload on the whole design.
//
// A program written here with rv_asm_pkg runs on the top at its default
// parameters. It labels NP = 1000 two-dimensional points against 4 centroids by
// handing blocks of 125 points to the accelerator's K-means kernel with BAA (the
// 125 x 4 x 2 unrolling of the KM loop), one call per block, then stores 1 to a
// done word. The point count is scaled down from 5000 so that points and labels
// fit the default 16 KB DMEM. Every label is compared with the nearest centroid
// found here (squared Euclidean distance, ties to the lower index), and the
// number of calls and the length of each Stall period
// (10 + 125 * (2*2*4 + 1) cycles) are checked. The cycle count is printed.
module km_workload_tb;
  import rv_asm_pkg::*;

  localparam int NP = 1000, BLK = 125, NC = 4, DIM = 2, NB = NP / BLK;
  localparam int ARG = 'h40, DONE = 'h78;
  localparam int CENT = 'h700, PTS = 'h1000, LAB = 'h3000;
  localparam longint MAX_CYCLES = 200000;

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
      if (run_len != 10 + BLK * (2 * DIM * NC + 1)) bad_len++;
      run_len = 0;
    end
  end

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [31:0] p [$];

  initial begin
    p = '{
      ADDI(5, 0, 7),             // 0  count = 7
      SW(5, 0, ARG + 0),         // 1
      ADDI(5, 0, 2),             // 2  kernel = 2, K-means
      SW(5, 0, ARG + 4),         // 3
      ADDI(6, 0, BLK),           // 4  n_pts per call
      SW(6, 0, ARG + 12),        // 5
      ADDI(7, 0, CENT),          // 6  centroids
      SW(7, 0, ARG + 16),        // 7
      ADDI(5, 0, NC),            // 8
      SW(5, 0, ARG + 20),        // 9  n_cent
      ADDI(5, 0, DIM),           // 10
      SW(5, 0, ARG + 24),        // 11 dim
      LUI(10, PTS >> 12),        // 12 point pointer
      LUI(11, LAB >> 12),        // 13 label pointer
      ADDI(12, 0, NB),           // 14 blocks left
      SW(10, 0, ARG + 8),        // 15 loop: pts_base
      SW(11, 0, ARG + 28),       // 16 label_base
      BAA(0, ARG),               // 17
      ADDI(10, 10, BLK * DIM * 4), // 18
      ADDI(11, 11, BLK * 4),     // 19
      ADDI(12, 12, -1),          // 20
      BNE(12, 0, -24),           // 21 -> 15
      ADDI(5, 0, 1),             // 22
      SW(5, 0, DONE),            // 23
      JAL(0, 0)                  // 24 halt
    };
    for (int i = 0; i < 4096; i++) dut.u_dmem.mem[i] = 32'hDEAD_BEEF;
    for (int i = 0; i < NC * DIM; i++) dut.u_dmem.mem[CENT/4 + i] = 32'($urandom % 201) - 100;
    // two equal centroids, so ties occur
    dut.u_dmem.mem[CENT/4 + 6] = dut.u_dmem.mem[CENT/4 + 2];
    dut.u_dmem.mem[CENT/4 + 7] = dut.u_dmem.mem[CENT/4 + 3];
    for (int i = 0; i < NP * DIM; i++) dut.u_dmem.mem[PTS/4 + i] = 32'($urandom % 201) - 100;
    dut.u_dmem.mem[DONE/4] = 0;
    for (int i = 0; i < p.size(); i++) begin
      @(negedge clk);
      prog_we = 1; prog_addr = 4 * i; prog_data = p[i];
    end
    @(negedge clk) prog_we = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (dut.u_dmem.mem[DONE/4] == 1);
    repeat (4) @(posedge clk);
    for (int i = 0; i < NP; i++) begin
      automatic logic [31:0] best = '1, bj = 0;
      for (int j = 0; j < NC; j++) begin
        automatic logic [31:0] d = 0;
        for (int k = 0; k < DIM; k++) begin
          automatic logic [31:0] df = dut.u_dmem.mem[PTS/4 + i*DIM + k] - dut.u_dmem.mem[CENT/4 + j*DIM + k];
          d += df * df;
        end
        if (d < best) begin best = d; bj = j; end
      end
      chk($sformatf("label[%0d] = %0d, expected %0d", i, dut.u_dmem.mem[LAB/4 + i], bj),
          dut.u_dmem.mem[LAB/4 + i] === bj);
    end
    chk("word after the labels untouched", dut.u_dmem.mem[LAB/4 + NP] === 32'hDEAD_BEEF);
    chk($sformatf("launches %0d, expected %0d", n_launch, NB), n_launch == NB);
    chk($sformatf("%0d stall periods of the wrong length", bad_len), bad_len == 0);
    $display("cycles=%0d launches=%0d", cyc, n_launch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
