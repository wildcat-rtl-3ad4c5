// alu_tb: self-checking test of the ALU. Applies directed corner values and
// random operands to all ten operations and compares with a reference
// computed in the testbench.
module alu_tb;
  import wildcat_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  alu_op_e     op;
  logic [31:0] a, b, y;

  alu dut (.op(op), .a(a), .b(b), .y(y));

  function automatic logic [31:0] ref_alu(alu_op_e o, logic [31:0] x, logic [31:0] z);
    longint sx, sz;
    sx = longint'($signed(x));
    sz = longint'($signed(z));
    case (o)
      ALU_ADD:  return 32'(longint'(x) + longint'(z));
      ALU_SUB:  return 32'(longint'(x) - longint'(z));
      ALU_SLL:  return 32'(longint'(x) * (64'd1 << z[4:0]));
      ALU_SLT:  return (sx < sz) ? 32'd1 : 32'd0;
      ALU_SLTU: return (longint'(x) < longint'(z)) ? 32'd1 : 32'd0;
      ALU_XOR:  return x ^ z;
      ALU_SRL:  return 32'(longint'(x) / (64'd1 << z[4:0]));
      ALU_SRA:  return 32'(sx >>> z[4:0]);
      ALU_OR:   return x | z;
      ALU_AND:  return x & z;
      default:  return 32'hDEAD_BEEF;
    endcase
  endfunction

  task automatic check(alu_op_e o, logic [31:0] x, logic [31:0] z);
    logic [31:0] e;
    op = o; a = x; b = z;
    #1;
    e = ref_alu(o, x, z);
    checks++;
    if (y !== e) begin
      failures++;
      if (failures < 10) $display("FAIL op=%s a=%h b=%h y=%h exp=%h", o.name(), x, z, y, e);
    end
  endtask

  localparam logic [31:0] CORNER [6] = '{32'h0, 32'h1, 32'h7FFF_FFFF, 32'h8000_0000,
                                         32'hFFFF_FFFF, 32'h0000_001F};

  initial begin
    alu_op_e o;
    for (int k = 0; k < 10; k++) begin
      o = alu_op_e'(k);
      foreach (CORNER[i]) foreach (CORNER[j]) check(o, CORNER[i], CORNER[j]);
      for (int n = 0; n < 500; n++) check(o, $urandom, $urandom);
    end
    // a few hand-computed values
    check(ALU_SRA, 32'h8000_0000, 32'd4);   // expect F800_0000
    if (y !== 32'hF800_0000) failures++;
    checks++;
    check(ALU_SUB, 32'd3, 32'd5);           // expect FFFF_FFFE
    if (y !== 32'hFFFF_FFFE) failures++;
    checks++;
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
