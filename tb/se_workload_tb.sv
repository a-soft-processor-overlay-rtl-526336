// se_workload_tb: the Sobel edge-detection workload on the whole design.
//
// A program written here with rv_asm_pkg runs on the top at its default
// parameters. The image is W x W = 34 x 34 pixels (one 32-bit word each), scaled
// down from 130 x 130 so that input and output fit the default 16 KB DMEM; its
// interior is exactly 2 x 2 tiles of 16 x 16 output pixels. As in the usual
// hardware/software split for this filter, the program hands each complete tile
// to the accelerator's Sobel kernel with BAA (the 16 x 16 x 3 x 3 unrolling) and
// handles the boundary pixels, where the 3 x 3 window does not fit, in software:
// it writes 0 there. Every output pixel is compared with |Gx| + |Gy| computed
// here (0 on the boundary), and the number of calls and the length of each Stall
// period (10 + 9 * 256 cycles) are checked. The cycle count is printed.
module se_workload_tb;
  import rv_asm_pkg::*;

  localparam int W = 34, T = 16;
  localparam int ARG = 'h40, DONE = 'h78;
  localparam int IN = 'h1000, OUT = 'h2400;
  localparam longint MAX_CYCLES = 100000;

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
      if (run_len != 10 + 9 * T * T) bad_len++;
      run_len = 0;
    end
  end

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [31:0] px(int r, int c);
    return dut.u_dmem.mem[IN/4 + r*W + c];
  endfunction

  function automatic logic [31:0] iabs(logic [31:0] v);
    return v[31] ? -v : v;
  endfunction

  logic [31:0] p [$];

  initial begin
    p = '{
      ADDI(5, 0, 7),             // 0  count = 7
      SW(5, 0, ARG + 0),         // 1
      ADDI(5, 0, 1),             // 2  kernel = 1, Sobel
      SW(5, 0, ARG + 4),         // 3
      ADDI(5, 0, W),             // 4
      SW(5, 0, ARG + 12),        // 5  in_stride
      SW(5, 0, ARG + 20),        // 6  out_stride
      ADDI(5, 0, T),             // 7
      SW(5, 0, ARG + 24),        // 8  rows
      SW(5, 0, ARG + 28),        // 9  cols
      LUI(10, IN >> 12),         // 10 input window of tile row
      LUI(11, OUT >> 12),        // 11
      ADDI(11, 11, (OUT & 'hFFF) + (W + 1) * 4), // 12 output of tile row
      ADDI(14, 0, (W - 2) / T),  // 13 tile rows left
      ADD(12, 10, 0),            // 14 row loop
      ADD(13, 11, 0),            // 15
      ADDI(15, 0, (W - 2) / T),  // 16 tiles left in the row
      SW(12, 0, ARG + 8),        // 17 tile loop: in_base
      SW(13, 0, ARG + 16),       // 18 out_base
      BAA(0, ARG),               // 19
      ADDI(12, 12, T * 4),       // 20
      ADDI(13, 13, T * 4),       // 21
      ADDI(15, 15, -1),          // 22
      BNE(15, 0, -24),           // 23 -> 17
      ADDI(10, 10, T * W * 2),   // 24 next tile row: T*W words
      ADDI(10, 10, T * W * 2),   // 25
      ADDI(11, 11, T * W * 2),   // 26
      ADDI(11, 11, T * W * 2),   // 27
      ADDI(14, 14, -1),          // 28
      BNE(14, 0, -60),           // 29 -> 14
      LUI(20, OUT >> 12),        // 30 top row
      ADDI(20, 20, OUT & 'hFFF), // 31
      ADDI(21, 20, 2000),        // 32 bottom row
      ADDI(21, 21, 2000),        // 33
      ADDI(21, 21, (W - 1) * W * 4 - 4000), // 34
      ADDI(22, 0, W),            // 35
      SW(0, 20, 0),              // 36 loop over columns
      SW(0, 21, 0),              // 37
      ADDI(20, 20, 4),           // 38
      ADDI(21, 21, 4),           // 39
      ADDI(22, 22, -1),          // 40
      BNE(22, 0, -20),           // 41 -> 36
      ADDI(21, 20, (W - 1) * 4), // 42 x20 = row 1, column 0; x21 = column W-1
      ADDI(22, 0, W - 2),        // 43
      SW(0, 20, 0),              // 44 loop over rows 1 .. W-2
      SW(0, 21, 0),              // 45
      ADDI(20, 20, W * 4),       // 46
      ADDI(21, 21, W * 4),       // 47
      ADDI(22, 22, -1),          // 48
      BNE(22, 0, -20),           // 49 -> 44
      ADDI(5, 0, 1),             // 50
      SW(5, 0, DONE),            // 51
      JAL(0, 0)                  // 52 halt
    };
    for (int i = 0; i < 4096; i++) dut.u_dmem.mem[i] = 32'hDEAD_BEEF;
    for (int i = 0; i < W * W; i++) dut.u_dmem.mem[IN/4 + i] = $urandom % 256;
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
    for (int r = 0; r < W; r++)
      for (int c = 0; c < W; c++) begin
        automatic logic [31:0] e = 0, gx, gy;
        if (r > 0 && r < W - 1 && c > 0 && c < W - 1) begin
          gx = (px(r-1, c+1) + 2*px(r, c+1) + px(r+1, c+1)) - (px(r-1, c-1) + 2*px(r, c-1) + px(r+1, c-1));
          gy = (px(r+1, c-1) + 2*px(r+1, c) + px(r+1, c+1)) - (px(r-1, c-1) + 2*px(r-1, c) + px(r-1, c+1));
          e = iabs(gx) + iabs(gy);
        end
        chk($sformatf("out[%0d][%0d] = %0d, expected %0d", r, c, dut.u_dmem.mem[OUT/4 + r*W + c], e),
            dut.u_dmem.mem[OUT/4 + r*W + c] === e);
      end
    chk("word after the output untouched", dut.u_dmem.mem[OUT/4 + W*W] === 32'hDEAD_BEEF);
    chk($sformatf("launches %0d, expected %0d", n_launch, ((W-2)/T) ** 2), n_launch == ((W-2)/T) ** 2);
    chk($sformatf("%0d stall periods of the wrong length", bad_len), bad_len == 0);
    $display("cycles=%0d launches=%0d", cyc, n_launch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
