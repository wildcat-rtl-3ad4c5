// decode: instruction decoder and immediate generator of the ID stage
// ("Dec/Imm" in the pipeline schematic).
//
// Purely combinational. From a 32-bit RV32I instruction it extracts the
// register specifiers, builds the sign-extended I/S/B/U/J immediate and
// derives the control bits the EX stage needs: ALU operation, operand
// sources, register write, load/store/branch/jump flags. The decoder is
// placed in ID as in the paper; the choice of control signals is this
// design's own. FENCE, ECALL, EBREAK and CSR instructions and all
// non-RV32I encodings are executed as no-ops (illegal is raised for
// encodings outside RV32I); the paper does not treat them.
module decode
  import wildcat_pkg::*;
(
  input  logic [31:0] instr,
  output decoded_t    dec
);

  logic [6:0] opcode;
  logic [2:0] funct3;
  logic [6:0] funct7;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;

  assign opcode = instr[6:0];
  assign funct3 = instr[14:12];
  assign funct7 = instr[31:25];

  assign imm_i = {{20{instr[31]}}, instr[31:20]};
  assign imm_s = {{20{instr[31]}}, instr[31:25], instr[11:7]};
  assign imm_b = {{19{instr[31]}}, instr[31], instr[7], instr[30:25], instr[11:8], 1'b0};
  assign imm_u = {instr[31:12], 12'b0};
  assign imm_j = {{11{instr[31]}}, instr[31], instr[19:12], instr[20], instr[30:21], 1'b0};

  // ALU operation of OP and OP-IMM from funct3 (and funct7 bit 5)
  function automatic alu_op_e arith_op(input logic [2:0] f3, input logic alt, input logic is_reg);
    unique case (f3)
      3'b000:  return (is_reg && alt) ? ALU_SUB : ALU_ADD;
      3'b001:  return ALU_SLL;
      3'b010:  return ALU_SLT;
      3'b011:  return ALU_SLTU;
      3'b100:  return ALU_XOR;
      3'b101:  return alt ? ALU_SRA : ALU_SRL;
      3'b110:  return ALU_OR;
      default: return ALU_AND;
    endcase
  endfunction

  logic writes;

  always_comb begin
    dec           = '0;
    dec.rd        = instr[11:7];
    dec.rs1       = instr[19:15];
    dec.rs2       = instr[24:20];
    dec.funct3    = funct3;
    dec.alu_op    = ALU_ADD;
    dec.src_a     = SRC_A_RS1;
    dec.src_b_imm = 1'b1;
    dec.imm       = imm_i;
    writes        = 1'b0;
    unique case (opcode)
      OP_LUI: begin
        dec.imm = imm_u; dec.src_a = SRC_A_ZERO; writes = 1'b1;
      end
      OP_AUIPC: begin
        dec.imm = imm_u; dec.src_a = SRC_A_PC; writes = 1'b1;
      end
      OP_JAL: begin
        dec.imm = imm_j; dec.is_jal = 1'b1; writes = 1'b1;
      end
      OP_JALR: begin
        dec.imm = imm_i; dec.is_jalr = 1'b1; writes = 1'b1;
        dec.illegal = (funct3 != 3'b000);
      end
      OP_BRANCH: begin
        dec.imm = imm_b; dec.is_branch = 1'b1; dec.src_b_imm = 1'b0;
        dec.illegal = (funct3 == 3'b010) || (funct3 == 3'b011);
      end
      OP_LOAD: begin
        dec.imm = imm_i; dec.is_load = 1'b1; writes = 1'b1;
        dec.illegal = (funct3 == 3'b011) || (funct3 == 3'b110) || (funct3 == 3'b111);
      end
      OP_STORE: begin
        dec.imm = imm_s; dec.is_store = 1'b1;
        dec.illegal = (funct3[2] == 1'b1) || (funct3[1:0] == 2'b11);
      end
      OP_IMM: begin
        dec.imm = imm_i; writes = 1'b1;
        dec.alu_op = arith_op(funct3, instr[30], 1'b0);
        dec.illegal = (funct3 == 3'b001 && funct7 != 7'b0) ||
                      (funct3 == 3'b101 && (funct7 & 7'b1011111) != 7'b0);
      end
      OP_REG: begin
        dec.src_b_imm = 1'b0; writes = 1'b1;
        dec.alu_op = arith_op(funct3, instr[30], 1'b1);
        dec.illegal = (funct7 & 7'b1011111) != 7'b0 ||
                      (instr[30] && funct3 != 3'b000 && funct3 != 3'b101);
      end
      OP_FENCE, OP_SYSTEM: ;
      default: dec.illegal = 1'b1;
    endcase
    if (dec.illegal) begin
      writes        = 1'b0;
      dec.is_load   = 1'b0;
      dec.is_store  = 1'b0;
      dec.is_branch = 1'b0;
      dec.is_jal    = 1'b0;
      dec.is_jalr   = 1'b0;
    end
    dec.reg_write = writes && (dec.rd != 5'd0);
  end

endmodule
