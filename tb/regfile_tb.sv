// regfile_tb: self-checking test of the register file. Random reads and
// writes every cycle against a shadow model, including reads of x0, writes
// to x0, and reads of the register being written in the same cycle (the
// read, one cycle later, must return the new value). Runs both the memory
// and the flip-flop version. Read data must be valid exactly one cycle
// after the address is applied.
module regfile_tb;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic [4:0]  a1, a2, wa;
  logic        we;
  logic [31:0] wd;
  logic [31:0] d1 [2], d2 [2];

  regfile #(.RF_FLIPFLOPS(1'b0)) dut_mem (.clk(clk), .rs1_addr(a1), .rs2_addr(a2),
    .rs1_data(d1[0]), .rs2_data(d2[0]), .we(we), .waddr(wa), .wdata(wd));
  regfile #(.RF_FLIPFLOPS(1'b1)) dut_ff (.clk(clk), .rs1_addr(a1), .rs2_addr(a2),
    .rs1_data(d1[1]), .rs2_data(d2[1]), .we(we), .waddr(wa), .wdata(wd));

  logic [31:0] shadow [32];

  initial begin
    logic [31:0] e1, e2;
    we = 1'b0; a1 = '0; a2 = '0; wa = '0; wd = '0;
    // initialise all registers
    for (int r = 0; r < 32; r++) begin
      @(negedge clk);
      we = 1'b1; wa = 5'(r); wd = $urandom;
      shadow[r] = (r == 0) ? 32'd0 : wd;
    end
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      we = $urandom_range(0, 3) != 0;
      wa = 5'($urandom);
      wd = $urandom;
      a1 = ($urandom_range(0, 3) == 0) ? wa : 5'($urandom);
      a2 = ($urandom_range(0, 3) == 0) ? wa : 5'($urandom);
      if (n % 97 == 0) begin a1 = 5'd0; wa = 5'd0; end
      @(posedge clk);
      if (we && wa != 0) shadow[wa] = wd;
      e1 = shadow[a1];
      e2 = shadow[a2];
      #1;
      for (int k = 0; k < 2; k++) begin
        checks += 2;
        if (d1[k] !== e1) begin
          failures++;
          if (failures < 10) $display("FAIL v%0d rs1 x%0d got %h exp %h", k, a1, d1[k], e1);
        end
        if (d2[k] !== e2) begin
          failures++;
          if (failures < 10) $display("FAIL v%0d rs2 x%0d got %h exp %h", k, a2, d2[k], e2);
        end
      end
    end
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
