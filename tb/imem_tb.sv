// imem_tb: self-checking test of the instruction scratchpad. Loads random
// words through the load port, then reads random addresses and checks that
// the word appears exactly one cycle after the address is applied.
module imem_tb;

  localparam int unsigned WORDS = 1024;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        we;
  logic [31:0] raddr, waddr, wdata, rdata;
  logic [31:0] ref_mem [WORDS];

  imem #(.WORDS(WORDS)) dut (.*);

  initial begin
    logic [31:0] exp_q;
    we = 1'b0; raddr = '0; waddr = '0; wdata = '0;
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = 32'(i) << 2; wdata = $urandom;
      ref_mem[i] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      raddr = {20'($urandom), 10'($urandom), 2'($urandom)};
      exp_q = ref_mem[raddr[11:2]];
      @(negedge clk);   // one cycle later
      checks++;
      if (rdata !== exp_q) begin
        failures++;
        if (failures < 10) $display("FAIL addr=%h got=%h exp=%h", raddr, rdata, exp_q);
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
