// imem_tb: self-checking test of the instruction memory.
// Loads a pseudo-random program through the load port, then reads every word back
// by byte address (including addresses with low bits set and above the size, which
// must wrap) and compares with a reference array kept by the testbench.
module imem_tb;
  localparam int unsigned WORDS = 64;
  logic clk = 0;
  logic [31:0] addr, inst, load_addr, load_data;
  logic load_we;
  int checks = 0, failures = 0;
  logic [31:0] ref_mem [WORDS];

  imem #(.WORDS(WORDS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load_we = 0; load_addr = 0; load_data = 0; addr = 0;
    for (int i = 0; i < WORDS; i++) begin
      ref_mem[i] = $urandom;
      @(negedge clk);
      load_we = 1; load_addr = 4 * i; load_data = ref_mem[i];
    end
    @(negedge clk) load_we = 0;
    for (int i = 0; i < 3 * WORDS; i++) begin
      addr = 4 * i + (i % 4);
      #1;
      checks++;
      if (inst !== ref_mem[i % WORDS]) begin
        failures++;
        $display("FAIL addr=%h inst=%h exp=%h", addr, inst, ref_mem[i % WORDS]);
      end
    end
    // overwrite one word, read-during-write returns the old word until the edge
    @(negedge clk);
    addr = 4 * 5; load_we = 1; load_addr = 4 * 5; load_data = 32'hDEAD_BEEF;
    #1 checks++; if (inst !== ref_mem[5]) failures++;
    @(negedge clk) load_we = 0;
    #1 checks++; if (inst !== 32'hDEAD_BEEF) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
