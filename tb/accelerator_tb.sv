// accelerator_tb: self-checking test of the example accelerator on its own.
//
// A behavioural memory (an array with a combinational read, like the DMEM) is
// attached to the Aux_Mem port. For each call the testbench writes an argument
// array and data, pulses start, and then checks that stall rises with start and
// lasts exactly as many cycles as the kernel's timing formula gives, that every
// result word equals a value computed here, and that no other word of the memory
// changed. Calls: dot products shaped as an FIR block and as a matrix-multiply
// block, n_in = 0, count = 0, wrap-around products, a Sobel tile, a K-means
// assignment with ties, a zero-size Sobel call and an unknown kernel number.
module accelerator_tb;
  localparam int unsigned MWORDS = 2048;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [31:0] arg_addr = 0;
  logic stall, mem_we;
  logic [31:0] mem_addr, mem_wdata, mem_rdata;
  int checks = 0, failures = 0;

  logic [31:0] mem [MWORDS];
  logic [31:0] shadow [MWORDS];

  accelerator dut (.*);

  always #5 clk = ~clk;
  assign mem_rdata = mem[mem_addr[12:2]];
  always_ff @(posedge clk) if (mem_we) mem[mem_addr[12:2]] <= mem_wdata;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // launch at word address argw and return the number of cycles stall was high
  task automatic launch(int argw, output int cycles);
    for (int i = 0; i < MWORDS; i++) shadow[i] = mem[i];
    @(negedge clk);
    start = 1; arg_addr = 4 * argw;
    #1 chk("stall rises with start", stall === 1'b1);
    @(negedge clk) start = 0;
    cycles = 1;
    while (stall) begin @(negedge clk); cycles++; end
  endtask

  task automatic compare(string what);
    int bad = 0;
    for (int i = 0; i < MWORDS; i++)
      if (mem[i] !== shadow[i]) begin
        bad++;
        if (bad < 5) $display("FAIL %s: word %0d = %h exp %h", what, i, mem[i], shadow[i]);
      end
    chk($sformatf("%s: %0d wrong words", what, bad), bad == 0);
  endtask

  // kernel 0; addresses are word indices here and converted to bytes
  task automatic dot(int argw, int count, int xb, int xo, int xi, int hb, int ho, int hi,
                     int yb, int nout, int nin);
    int cycles;
    logic [31:0] e;
    mem[argw] = count; mem[argw+1] = 0;
    mem[argw+2] = 4*xb; mem[argw+3] = xo; mem[argw+4] = xi;
    mem[argw+5] = 4*hb; mem[argw+6] = ho; mem[argw+7] = hi;
    mem[argw+8] = 4*yb; mem[argw+9] = nout; mem[argw+10] = nin;
    launch(argw, cycles);
    if (count == 0) chk($sformatf("count 0: %0d cycles", cycles), cycles == 2);
    else chk($sformatf("dot: %0d cycles, expected %0d", cycles, 13 + nout*(2*nin+1)),
             cycles == 13 + nout*(2*nin+1));
    if (count == 0) nout = 0;
    for (int o = 0; o < nout; o++) begin
      e = 0;
      for (int k = 0; k < nin; k++) e += shadow[xb + o*xo + k*xi] * shadow[hb + o*ho + k*hi];
      shadow[yb + o] = e;
    end
    compare("dot");
  endtask

  function automatic logic [31:0] iabs(logic [31:0] v);
    return v[31] ? -v : v;
  endfunction

  // kernel 1
  task automatic sobel(int argw, int ib, int istr, int ob, int ostr, int rows, int cols);
    int cycles;
    logic [31:0] gx, gy;
    mem[argw] = 7; mem[argw+1] = 1;
    mem[argw+2] = 4*ib; mem[argw+3] = istr; mem[argw+4] = 4*ob; mem[argw+5] = ostr;
    mem[argw+6] = rows; mem[argw+7] = cols;
    launch(argw, cycles);
    chk($sformatf("sobel: %0d cycles, expected %0d", cycles, 10 + 9*rows*cols),
        cycles == ((rows == 0 || cols == 0) ? 10 : 10 + 9*rows*cols));
    for (int r = 0; r < rows; r++)
      for (int c = 0; c < cols; c++) begin
        int t = ib + r*istr + c;
        gx = (shadow[t+2] + 2*shadow[t+istr+2] + shadow[t+2*istr+2])
           - (shadow[t]   + 2*shadow[t+istr]   + shadow[t+2*istr]);
        gy = (shadow[t+2*istr] + 2*shadow[t+2*istr+1] + shadow[t+2*istr+2])
           - (shadow[t]        + 2*shadow[t+1]        + shadow[t+2]);
        shadow[ob + r*ostr + c] = iabs(gx) + iabs(gy);
      end
    compare("sobel");
  endtask

  // kernel 2
  task automatic kmeans(int argw, int pb, int np, int cb, int nc, int dim, int lb);
    int cycles;
    logic [31:0] d, best, bj, df;
    mem[argw] = 7; mem[argw+1] = 2;
    mem[argw+2] = 4*pb; mem[argw+3] = np; mem[argw+4] = 4*cb; mem[argw+5] = nc;
    mem[argw+6] = dim; mem[argw+7] = 4*lb;
    launch(argw, cycles);
    chk($sformatf("kmeans: %0d cycles, expected %0d", cycles, 10 + np*(2*dim*nc+1)),
        cycles == 10 + np*(2*dim*nc+1));
    for (int i = 0; i < np; i++) begin
      best = '1; bj = 0;
      for (int j = 0; j < nc; j++) begin
        d = 0;
        for (int k = 0; k < dim; k++) begin
          df = shadow[pb + i*dim + k] - shadow[cb + j*dim + k];
          d += df * df;
        end
        if (d < best) begin best = d; bj = j; end
      end
      shadow[lb + i] = bj;
    end
    compare("kmeans");
  endtask

  initial begin
    for (int i = 0; i < MWORDS; i++) mem[i] = $urandom % 1000;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk("idle after reset", stall === 1'b0);
    // FIR shape: 8 outputs of 6 taps, y[o] = sum_k x[o+k] * h[k]
    dot(0, 10, 100, 1, 1, 200, 0, 1, 300, 8, 6);
    // MM shape: one row of A (4x4 at 400) times 3 columns of B (4x4 at 500)
    dot(20, 10, 400, 0, 1, 500, 1, 4, 600, 3, 4);
    // n_in = 0 writes zeros
    dot(40, 10, 100, 1, 1, 200, 0, 1, 700, 2, 0);
    // count = 0 returns at once
    dot(60, 0, 100, 1, 1, 200, 0, 1, 800, 2, 2);
    // large values wrap modulo 2^32
    for (int i = 0; i < 4; i++) begin mem[900+i] = $urandom; mem[910+i] = $urandom; end
    dot(80, 10, 900, 0, 1, 910, 0, 1, 920, 1, 4);
    // Sobel: 4 x 5 tile of a 10-wide image at 1000, output rows 8 apart at 1200;
    // signed pixel values so both signs of Gx and Gy occur
    for (int i = 0; i < 100; i++) mem[1000+i] = 32'($urandom % 511) - 255;
    sobel(950, 1000, 10, 1200, 8, 4, 5);
    sobel(960, 1000, 10, 1300, 8, 0, 5);
    // K-means: 12 points of 2 dimensions, 4 centroids, with two identical centroids
    for (int i = 0; i < 24; i++) mem[1400+i] = 32'($urandom % 201) - 100;
    for (int i = 0; i < 8; i++)  mem[1450+i] = 32'($urandom % 201) - 100;
    mem[1456] = mem[1452]; mem[1457] = mem[1453];
    kmeans(970, 1400, 12, 1450, 4, 2, 1500);
    // 5 points of 3 dimensions, 3 centroids
    kmeans(985, 1400, 5, 1450, 3, 3, 1550);
    // an unknown kernel number ends the call after set-up and writes nothing
    begin
      int cycles;
      mem[1600] = 2; mem[1601] = 5; mem[1602] = 4*1700;
      launch(1600, cycles);
      chk($sformatf("unknown kernel: %0d cycles", cycles), cycles == 5);
      compare("unknown kernel");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
