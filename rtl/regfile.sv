// regfile: the 32 x 32-bit integer register file, x0 reads as zero.
//
// Two read ports and one write port, all synchronous: the read addresses
// are taken from the instruction memory output and registered at the end
// of IF, so the read data is valid during ID; that input register is part
// of the IF/ID pipeline register. The write (rd, data, enable) comes
// combinationally from the end of EX and is registered at the same edge.
//
// RF_FLIPFLOPS = 0 (default) builds the on-chip-memory version: one copy
// of the 32 x 32 array per read port (2 x 1024 = 2048 RAM bits, as the
// paper reports for its memory-based register file), each read with a
// registered output plus a bypass that returns the data being written when
// a read and a write hit the same register in the same cycle.
// RF_FLIPFLOPS = 1 builds the flip-flop version: a single array of 31
// registers read combinationally at the registered addresses. Both versions
// behave identically at the ports. The paper names both variants; the
// bypass and the x0 handling are written here as this design chose.
module regfile #(
  parameter bit RF_FLIPFLOPS = 1'b0
) (
  input  logic        clk,
  input  logic [4:0]  rs1_addr,   // registered inside
  input  logic [4:0]  rs2_addr,   // registered inside
  output logic [31:0] rs1_data,   // valid one cycle after the address
  output logic [31:0] rs2_data,
  input  logic        we,
  input  logic [4:0]  waddr,
  input  logic [31:0] wdata
);

  logic wr;
  assign wr = we && (waddr != 5'd0);

  if (RF_FLIPFLOPS) begin : g_ff
    logic [31:0] regs [1:31];
    logic [4:0]  a1_q, a2_q;

    always_ff @(posedge clk) begin
      a1_q <= rs1_addr;
      a2_q <= rs2_addr;
      if (wr) regs[waddr] <= wdata;
    end

    assign rs1_data = (a1_q == 5'd0) ? 32'd0 : regs[a1_q];
    assign rs2_data = (a2_q == 5'd0) ? 32'd0 : regs[a2_q];

  end else begin : g_mem
    logic [31:0] mem1 [32];
    logic [31:0] mem2 [32];
    logic [31:0] rd1_q, rd2_q, wdata_q;
    logic        byp1_q, byp2_q, zero1_q, zero2_q;

    always_ff @(posedge clk) begin
      if (wr) begin
        mem1[waddr] <= wdata;
        mem2[waddr] <= wdata;
      end
      rd1_q   <= mem1[rs1_addr];
      rd2_q   <= mem2[rs2_addr];
      byp1_q  <= wr && (waddr == rs1_addr);
      byp2_q  <= wr && (waddr == rs2_addr);
      zero1_q <= (rs1_addr == 5'd0);
      zero2_q <= (rs2_addr == 5'd0);
      wdata_q <= wdata;
    end

    assign rs1_data = zero1_q ? 32'd0 : byp1_q ? wdata_q : rd1_q;
    assign rs2_data = zero2_q ? 32'd0 : byp2_q ? wdata_q : rd2_q;
  end

endmodule
