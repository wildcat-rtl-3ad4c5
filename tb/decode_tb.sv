// decode_tb: self-checking test of the decoder and immediate generator.
// Encodes instructions of every RV32I format with random fields and checks
// register fields, the sign-extended immediate and the control bits.
module decode_tb;
  import wildcat_pkg::*;
  import rv32i_tb_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic [31:0] instr;
  decoded_t    dec;

  decode dut (.instr(instr), .dec(dec));

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s instr=%h got=%h exp=%h", what, instr, got, exp);
    end
  endtask

  initial begin
    int rd, rs1, rs2, imm;
    for (int n = 0; n < 400; n++) begin
      rd = $urandom_range(0, 31); rs1 = $urandom_range(0, 31); rs2 = $urandom_range(0, 31);
      imm = $urandom_range(0, 4095) - 2048;

      instr = ADDI(rd, rs1, imm); #1;
      chk("addi imm", dec.imm, 32'(imm));
      chk("addi rd", 32'(dec.rd), 32'(rd));
      chk("addi rs1", 32'(dec.rs1), 32'(rs1));
      chk("addi we", 32'(dec.reg_write), 32'(rd != 0));
      chk("addi op", 32'(dec.alu_op), 32'(ALU_ADD));
      chk("addi srcb", 32'(dec.src_b_imm), 1);

      instr = SUB(rd, rs1, rs2); #1;
      chk("sub op", 32'(dec.alu_op), 32'(ALU_SUB));
      chk("sub rs2", 32'(dec.rs2), 32'(rs2));
      chk("sub srcb", 32'(dec.src_b_imm), 0);

      instr = enc_i(imm & 31 | 32'h400, rs1, 3'b101, rd, 7'b0010011); #1;  // srai
      chk("srai op", 32'(dec.alu_op), 32'(ALU_SRA));

      instr = SW(rs2, rs1, imm); #1;
      chk("sw imm", dec.imm, 32'(imm));
      chk("sw store", 32'(dec.is_store), 1);
      chk("sw we", 32'(dec.reg_write), 0);

      instr = LB(rd, rs1, imm); #1;
      chk("lb load", 32'(dec.is_load), 1);
      chk("lb f3", 32'(dec.funct3), 0);

      instr = BNE(rs1, rs2, (imm * 2) & ~1); #1;
      chk("bne imm", dec.imm, 32'((imm * 2) & ~1));
      chk("bne branch", 32'(dec.is_branch), 1);
      chk("bne we", 32'(dec.reg_write), 0);

      instr = JAL(rd, (imm * 512) & ~1); #1;
      chk("jal imm", dec.imm, 32'((imm * 512) & ~1));
      chk("jal", 32'(dec.is_jal), 1);

      instr = JALR(rd, rs1, imm); #1;
      chk("jalr", 32'(dec.is_jalr), 1);
      chk("jalr imm", dec.imm, 32'(imm));

      instr = LUI(rd, imm & 32'hFFFFF); #1;
      chk("lui imm", dec.imm, 32'(imm) << 12);
      chk("lui srca", 32'(dec.src_a), 32'(SRC_A_ZERO));

      instr = AUIPC(rd, imm & 32'hFFFFF); #1;
      chk("auipc srca", 32'(dec.src_a), 32'(SRC_A_PC));
    end
    // unknown opcode: no side effects
    instr = 32'hFFFF_FFFF; #1;
    chk("illegal", 32'(dec.illegal), 1);
    chk("illegal we", 32'(dec.reg_write), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
