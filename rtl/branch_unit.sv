// branch_unit: branch decision and destination computation of the EX stage.
//
// Combinational. For a conditional branch it compares the two (forwarded)
// register operands according to funct3 (BEQ, BNE, BLT, BGE, BLTU, BGEU).
// JAL and JALR are always taken. The target has its own adder: pc + imm
// for branches and JAL, rs1 + imm with bit 0 cleared for JALR. The paper
// places branch decision and target computation in EX, which gives a
// taken branch two cycles of penalty in the 3-stage pipeline; the split
// into a separate unit with its own adder is this design's choice.
module branch_unit
  import wildcat_pkg::*;
(
  input  logic        is_branch,
  input  logic        is_jal,
  input  logic        is_jalr,
  input  logic [2:0]  funct3,
  input  logic [31:0] rs1,
  input  logic [31:0] rs2,
  input  logic [31:0] pc,
  input  logic [31:0] imm,
  output logic        taken,
  output logic [31:0] target
);

  logic cond;
  logic [31:0] sum;

  always_comb begin
    unique case (funct3)
      F3_BEQ:  cond = (rs1 == rs2);
      F3_BNE:  cond = (rs1 != rs2);
      F3_BLT:  cond = ($signed(rs1) < $signed(rs2));
      F3_BGE:  cond = ($signed(rs1) >= $signed(rs2));
      F3_BLTU: cond = (rs1 < rs2);
      F3_BGEU: cond = (rs1 >= rs2);
      default: cond = 1'b0;
    endcase
  end

  assign taken  = (is_branch && cond) || is_jal || is_jalr;
  assign sum    = (is_jalr ? rs1 : pc) + imm;
  assign target = is_jalr ? {sum[31:1], 1'b0} : sum;

endmodule
