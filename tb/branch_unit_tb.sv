// branch_unit_tb: self-checking test of the branch decision and target
// adder. Random operands (with forced equal and sign-boundary cases) for all
// six branch conditions, plus JAL and JALR targets.
module branch_unit_tb;
  import wildcat_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        is_branch, is_jal, is_jalr, taken;
  logic [2:0]  funct3;
  logic [31:0] rs1, rs2, pc, imm, target;

  branch_unit dut (.*);

  task automatic expect_eq(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s f3=%0d rs1=%h rs2=%h got=%h exp=%h", what, funct3, rs1, rs2, got, exp);
    end
  endtask

  initial begin
    logic exp_t;
    automatic logic [2:0] f3s [6] = '{3'b000, 3'b001, 3'b100, 3'b101, 3'b110, 3'b111};
    for (int n = 0; n < 3000; n++) begin
      is_branch = 1'b1; is_jal = 1'b0; is_jalr = 1'b0;
      funct3 = f3s[$urandom_range(0, 5)];
      rs1 = $urandom; rs2 = $urandom;
      case ($urandom_range(0, 3))
        0: rs2 = rs1;
        1: begin rs1 = {1'b1, rs1[30:0]}; rs2 = {1'b0, rs2[30:0]}; end
        default: ;
      endcase
      pc = 32'($urandom) & ~32'd3; imm = {{19{1'b0}}, 13'($urandom) & 13'h1FFE};
      if ($urandom_range(0, 1) != 0) imm = -imm;
      #1;
      case (funct3)
        3'b000: exp_t = (rs1 == rs2);
        3'b001: exp_t = !(rs1 == rs2);
        3'b100: exp_t = (rs1[31] != rs2[31]) ? rs1[31] : (rs1 < rs2);
        3'b101: exp_t = !((rs1[31] != rs2[31]) ? rs1[31] : (rs1 < rs2));
        3'b110: exp_t = (rs1 < rs2);
        default: exp_t = !(rs1 < rs2);
      endcase
      expect_eq("taken", {31'b0, taken}, {31'b0, exp_t});
      expect_eq("target", target, pc + imm);
    end
    // not a branch: never taken
    is_branch = 1'b0; funct3 = 3'b000; rs1 = 5; rs2 = 5; #1;
    expect_eq("no-branch", {31'b0, taken}, 32'd0);
    // JAL: pc-relative, always taken
    is_jal = 1'b1; pc = 32'h100; imm = 32'hFFFF_FFF0; #1;
    expect_eq("jal taken", {31'b0, taken}, 32'd1);
    expect_eq("jal target", target, 32'h0F0);
    // JALR: rs1 + imm with bit 0 cleared
    is_jal = 1'b0; is_jalr = 1'b1; rs1 = 32'h2001; imm = 32'h10; #1;
    expect_eq("jalr taken", {31'b0, taken}, 32'd1);
    expect_eq("jalr target", target, 32'h2010);
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
