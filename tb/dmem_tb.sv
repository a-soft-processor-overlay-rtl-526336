// dmem_tb: self-checking test of the data memory.
// Random byte-enabled writes and combinational reads against a reference array,
// including wrap-around of addresses above the memory size.
module dmem_tb;
  localparam int unsigned WORDS = 128;
  logic clk = 0;
  logic [31:0] addr, wdata, rdata;
  logic we;
  logic [3:0] be;
  int checks = 0, failures = 0;
  logic [31:0] model [WORDS];

  dmem #(.WORDS(WORDS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; be = 0; addr = 0; wdata = 0;
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      we = 1; be = 4'hF; addr = 4 * i; wdata = $urandom; model[i] = wdata;
    end
    for (int n = 0; n < 4000; n++) begin
      int w;
      @(negedge clk);
      we = $urandom % 2; be = 4'($urandom); w = $urandom % (2 * WORDS);
      addr = 4 * w + $urandom % 4; wdata = $urandom;
      #1;
      checks++;
      if (rdata !== model[w % WORDS]) begin
        failures++; $display("FAIL read w=%0d %h exp %h", w, rdata, model[w % WORDS]);
      end
      @(posedge clk);
      if (we) for (int i = 0; i < 4; i++) if (be[i]) model[w % WORDS][8*i +: 8] = wdata[8*i +: 8];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
