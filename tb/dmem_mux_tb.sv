// dmem_mux_tb: self-checking test of the DMEM sharing multiplexers.
// With random inputs on both sides it checks that sel_aux = 0 passes the
// processor's access unchanged and sel_aux = 1 passes the accelerator's address,
// write data and write enable with all byte enables set.
module dmem_mux_tb;
  logic sel_aux, cpu_we, aux_we, mem_we;
  logic [31:0] cpu_addr, cpu_wdata, aux_addr, aux_wdata, mem_addr, mem_wdata;
  logic [3:0] cpu_be, mem_be;
  int checks = 0, failures = 0;

  dmem_mux dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 1000; n++) begin
      sel_aux = $urandom % 2;
      cpu_addr = $urandom; cpu_wdata = $urandom; cpu_be = 4'($urandom); cpu_we = $urandom % 2;
      aux_addr = $urandom; aux_wdata = $urandom; aux_we = $urandom % 2;
      #1;
      checks++;
      if (sel_aux) begin
        if (mem_addr !== aux_addr || mem_wdata !== aux_wdata || mem_we !== aux_we || mem_be !== 4'hF)
          begin failures++; $display("FAIL aux side"); end
      end else begin
        if (mem_addr !== cpu_addr || mem_wdata !== cpu_wdata || mem_we !== cpu_we || mem_be !== cpu_be)
          begin failures++; $display("FAIL cpu side"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
