// dmem_tb: self-checking test of the data scratchpad. Random byte-masked
// writes and reads against a byte-level reference; the read word must
// appear one cycle after the address, and a write must not disturb the
// byte lanes outside its mask.
module dmem_tb;

  localparam int unsigned WORDS = 256;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        we;
  logic [3:0]  wmask;
  logic [31:0] addr, wdata, rdata;
  logic [31:0] ref_mem [WORDS];

  dmem #(.WORDS(WORDS)) dut (.*);

  initial begin
    logic [31:0] exp_q;
    we = 1'b0; wmask = 4'hF; addr = '0; wdata = '0;
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      we = 1'b1; wmask = 4'hF; addr = 32'(i) << 2; wdata = $urandom;
      ref_mem[i] = wdata;
    end
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      addr = $urandom_range(0, 4 * WORDS - 1);
      we = 1'($urandom_range(0, 1));
      wmask = 4'($urandom_range(1, 15));
      wdata = $urandom;
      exp_q = ref_mem[addr[9:2]];
      if (we)
        for (int b = 0; b < 4; b++)
          if (wmask[b]) ref_mem[addr[9:2]][8*b +: 8] = wdata[8*b +: 8];
      @(negedge clk);
      we = 1'b0;
      checks++;
      if (rdata !== exp_q) begin   // old contents during the write cycle
        failures++;
        if (failures < 10) $display("FAIL rd addr=%h got=%h exp=%h", addr, rdata, exp_q);
      end
      @(negedge clk);            // read back the same word
      checks++;
      if (rdata !== ref_mem[addr[9:2]]) begin
        failures++;
        if (failures < 10) $display("FAIL wr addr=%h mask=%b got=%h exp=%h", addr, wmask, rdata, ref_mem[addr[9:2]]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
