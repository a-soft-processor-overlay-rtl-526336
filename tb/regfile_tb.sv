// regfile_tb: self-checking test of the register file.
// Random writes and reads against a reference model: x0 reads zero whatever is
// written to it, both read ports return the last value written, and a read of the
// register being written in the same cycle returns the new value (write-through).
module regfile_tb;
  logic clk = 0;
  logic [4:0] rs1, rs2, wa;
  logic [31:0] rd1, rd2, wd;
  logic we;
  int checks = 0, failures = 0;
  logic [31:0] model [32];

  regfile dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] expect_rd(input logic [4:0] r);
    if (r == 0) return 0;
    if (we && wa == r) return wd;
    return model[r];
  endfunction

  initial begin
    for (int i = 0; i < 32; i++) model[i] = 0;
    // initialise every register
    for (int i = 0; i < 32; i++) begin
      @(negedge clk);
      we = 1; wa = 5'(i); wd = $urandom; rs1 = 0; rs2 = 0;
      @(posedge clk); if (i != 0) model[i] = wd;
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      we  = ($urandom % 2) == 1;
      wa  = 5'($urandom);
      wd  = $urandom;
      rs1 = (n % 7 == 0) ? wa : 5'($urandom);
      rs2 = (n % 5 == 0) ? 5'd0 : 5'($urandom);
      #1;
      checks += 2;
      if (rd1 !== expect_rd(rs1)) begin failures++; $display("FAIL rd1 r%0d %h", rs1, rd1); end
      if (rd2 !== expect_rd(rs2)) begin failures++; $display("FAIL rd2 r%0d %h", rs2, rd2); end
      @(posedge clk);
      if (we && wa != 0) model[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
