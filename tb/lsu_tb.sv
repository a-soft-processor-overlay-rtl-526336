// lsu_tb: self-checking test of the load/store formatting.
// For every width and byte offset it checks the byte enables and lane placement
// of stores and the selection and extension of loads, on random data, against a
// byte-level model.
module lsu_tb;
  logic [1:0] addr_lo;
  logic [2:0] funct3;
  logic store;
  logic [31:0] st_data, wdata, rdata, ld_data;
  logic [3:0] be;
  int checks = 0, failures = 0;

  lsu dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      for (int f = 0; f < 8; f++) begin
        if (f == 3 || f == 6 || f == 7) continue;
        for (int off = 0; off < 4; off++) begin
          automatic int size = (f[1:0] == 0) ? 1 : (f[1:0] == 1) ? 2 : 4;
          automatic int base = off & ~(size - 1);
          automatic logic [3:0] exp_be = 0;
          automatic logic [31:0] exp_ld = 0;
          addr_lo = 2'(off); funct3 = 3'(f); st_data = $urandom; rdata = $urandom;
          // store side
          store = (f < 3);
          #1;
          if (store) begin
            for (int i = 0; i < size; i++) exp_be[base + i] = 1;
            checks++;
            if (be !== exp_be) begin failures++; $display("FAIL be f=%0d off=%0d %b", f, off, be); end
            for (int i = 0; i < size; i++) begin
              checks++;
              if (wdata[8*(base+i) +: 8] !== st_data[8*i +: 8]) begin
                failures++; $display("FAIL wdata f=%0d off=%0d", f, off);
              end
            end
          end else begin
            checks++;
            if (be !== 4'b0000) failures++;
          end
          // load side
          for (int i = 0; i < size; i++) exp_ld[8*i +: 8] = rdata[8*(base+i) +: 8];
          if (!f[2] && size < 4 && exp_ld[8*size-1])
            for (int i = size; i < 4; i++) exp_ld[8*i +: 8] = 8'hFF;
          checks++;
          if (ld_data !== exp_ld) begin
            failures++; $display("FAIL load f=%0d off=%0d %h exp %h", f, off, ld_data, exp_ld);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
