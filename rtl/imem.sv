// imem: instruction scratchpad memory ("I$" in the pipeline schematic).
//
// A synchronous on-chip memory of WORDS 32-bit words. The fetch address
// is registered at the clock edge and the instruction appears during the
// following cycle, so the memory's address register doubles as the PC
// pipeline register of the IF stage. A second, write-only port loads the
// program while the core is held in reset. The paper uses scratchpad
// memories for testing but does not give their size or a load path: the
// 4 KB default (the smaller of the on-chip memories the paper measures)
// and the load port are this design's choice. Addresses are byte
// addresses; bits 1:0 are ignored and the upper bits wrap.
module imem #(
  parameter int unsigned WORDS = 1024
) (
  input  logic        clk,
  input  logic [31:0] raddr,      // byte address, registered inside
  output logic [31:0] rdata,      // instruction, valid one cycle later
  input  logic        we,         // program load port
  input  logic [31:0] waddr,
  input  logic [31:0] wdata
);

  localparam int unsigned AW = $clog2(WORDS);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr[AW+1:2]] <= wdata;
    rdata <= mem[raddr[AW+1:2]];
  end

endmodule
