// imem: instruction memory (IMEM) of the soft processor.
//
// An array of WORDS 32-bit words. The IF stage presents the PC as a byte address and
// gets the instruction word back in the same cycle (combinational read); the word
// index is addr[AW+1:2], so the upper address bits wrap. A separate write port,
// sampled on the rising clock edge, loads the program before the processor runs.
//
// Follows the paper: a sized IMEM in the IF stage, read by the PC. This design's own
// choices: the default size (4 KB), the asynchronous read and the load port.
module imem #(
  parameter int unsigned WORDS = 1024
) (
  input  logic        clk,
  input  logic [31:0] addr,
  output logic [31:0] inst,
  input  logic        load_we,
  input  logic [31:0] load_addr,
  input  logic [31:0] load_data
);
  localparam int unsigned AW = $clog2(WORDS);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (load_we) mem[load_addr[AW+1:2]] <= load_data;
  end

  assign inst = mem[addr[AW+1:2]];
endmodule
