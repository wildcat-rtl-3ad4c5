// alu: the arithmetic/logic unit of the EX stage.
//
// Combinational. Computes y = a OP b for the ten RV32I ALU operations
// (add, sub, shifts, set-less-than signed/unsigned, and, or, xor). Shift
// amounts use the low five bits of b, as RV32I requires. Address
// computation for loads and stores does not use this ALU: following the
// paper, the address has a dedicated adder in the ID stage, and branch
// targets have their own adder in the branch unit. The operation encoding
// comes from wildcat_pkg and is this design's own.
module alu
  import wildcat_pkg::*;
(
  input  alu_op_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  logic [4:0] shamt;
  assign shamt = b[4:0];

  always_comb begin
    unique case (op)
      ALU_ADD:  y = a + b;
      ALU_SUB:  y = a - b;
      ALU_SLL:  y = a << shamt;
      ALU_SLT:  y = {31'b0, $signed(a) < $signed(b)};
      ALU_SLTU: y = {31'b0, a < b};
      ALU_XOR:  y = a ^ b;
      ALU_SRL:  y = a >> shamt;
      ALU_SRA:  y = 32'($signed(a) >>> shamt);
      ALU_OR:   y = a | b;
      ALU_AND:  y = a & b;
      default:  y = a + b;
    endcase
  end

endmodule
