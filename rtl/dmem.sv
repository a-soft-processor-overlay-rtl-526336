// dmem: data memory (DMEM), shared by the soft processor and the accelerator.
//
// WORDS 32-bit words addressed by a byte address (word index addr[AW+1:2], upper
// bits wrap). Reads are combinational, so a load finishes inside the merged
// EXE/MEM stage; writes happen on the rising clock edge, per byte lane where
// be[i] is set. Which master drives the port is decided in front of it by the
// dmem_mux multiplexers.
//
// Follows the paper: one sized DMEM holding all data, written and read by both
// architectures. This design's own choices: the default size (16 KB), the
// asynchronous read and the byte enables' timing.
module dmem #(
  parameter int unsigned WORDS = 4096
) (
  input  logic        clk,
  input  logic [31:0] addr,
  input  logic        we,
  input  logic [3:0]  be,
  input  logic [31:0] wdata,
  output logic [31:0] rdata
);
  localparam int unsigned AW = $clog2(WORDS);

  logic [31:0]   mem [WORDS];
  logic [AW-1:0] idx;

  assign idx = addr[AW+1:2];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int i = 0; i < 4; i++) begin
        if (be[i]) mem[idx][8*i +: 8] <= wdata[8*i +: 8];
      end
    end
  end

  assign rdata = mem[idx];
endmodule
