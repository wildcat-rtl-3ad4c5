// dmem: data scratchpad memory ("D$" in the pipeline schematic).
//
// A synchronous on-chip memory of WORDS 32-bit words with one address
// port shared by reads and byte-masked writes. Address, write data, mask
// and enable are registered at the clock edge that ends the ID stage (the
// core computes the address in ID), and the read word is available during
// EX, in parallel with the ALU. A read in the same cycle as a write to the
// same word returns the old contents (a load and a store are never the
// same instruction). The 4 KB default is this design's choice; the paper
// gives no size. Addresses are byte addresses; the upper bits wrap.
module dmem #(
  parameter int unsigned WORDS = 1024
) (
  input  logic        clk,
  input  logic [31:0] addr,       // byte address, registered inside
  input  logic        we,
  input  logic [3:0]  wmask,      // byte lanes to write
  input  logic [31:0] wdata,
  output logic [31:0] rdata       // word read, valid one cycle later
);

  localparam int unsigned AW = $clog2(WORDS);

  logic [31:0] mem [WORDS];
  logic [AW-1:0] idx;
  assign idx = addr[AW+1:2];

  always_ff @(posedge clk) begin
    for (int i = 0; i < 4; i++)
      if (we && wmask[i]) mem[idx][8*i +: 8] <= wdata[8*i +: 8];
    rdata <= mem[idx];
  end

  // A write must enable at least one byte lane.
  a_mask: assert property (@(posedge clk) we |-> (wmask != 4'b0000))
    else $error("dmem: write with empty byte mask");

endmodule
