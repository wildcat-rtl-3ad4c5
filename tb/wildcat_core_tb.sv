// wildcat_core_tb: directed test of the 3-stage pipeline.
//
// The core runs with the instruction and data scratchpads attached. A
// hand-written program exercises each pipeline mechanism once or more:
// EX forwarding at distance one, the register-file bypass at distance two,
// forwarding of the EX result to the store data and to the ID address
// adder, a load followed directly by a use (no stall), a taken branch, a
// not-taken branch, JAL and JALR (each flushing two instructions, one of
// them a store that must not happen), byte and half-word stores and loads.
// Two cores run side by side, one with the default parameters and one
// with the flip-flop register file and the operand-B multiplexer in ID.
// Every store each core issues is compared with the expected list worked
// out by hand, and the cycle on which the final store appears is checked
// against one cycle per instruction plus two per taken branch or jump.
module wildcat_core_tb;
  import rv32i_tb_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        rst, load_we;
  logic [31:0] load_addr, load_data;

  logic [31:0] prog [$];
  store_t      exp_st [$];
  int          cycle;
  bit          fin [2];


  function automatic store_t st(logic [31:0] a, logic [3:0] m, logic [31:0] d);
    store_t s;
    s.addr = a; s.mask = m; s.data = d;
    return s;
  endfunction

  localparam int DONE_CYCLE = 29 + 2 + 2 * 3;   // executed + fill + 2 per taken

  initial begin
    prog = '{
      ADDI(1, 0, 5),                // 0
      ADDI(2, 1, 7),                // 1  x2 = 12   (EX forward)
      ADD(3, 1, 2),                 // 2  x3 = 17   (RF bypass + EX forward)
      SW(3, 0, 0),                  // 3  [0] = 17  (store data from EX)
      LW(4, 0, 0),                  // 4  x4 = 17
      ADDI(5, 4, 1),                // 5  x5 = 18   (load-use, no stall)
      SW(5, 0, 4),                  // 6  [4] = 18
      ADDI(6, 0, 8),                // 7
      SW(1, 6, 0),                  // 8  [8] = 5   (address from EX)
      ADDI(7, 0, 1),                // 9
      BEQ(1, 1, 12),                // 10 taken -> 13
      SW(1, 0, 12),                 // 11 flushed
      ADDI(7, 0, 99),               // 12 flushed
      SW(7, 0, 16),                 // 13 [16] = 1
      JAL(8, 8),                    // 14 -> 16, x8 = 60
      SW(1, 0, 20),                 // 15 flushed
      SW(8, 0, 20),                 // 16 [20] = 60
      LUI(9, 32'h80000),            // 17 x9 = 8000_0000
      SB(2, 0, 25),                 // 18 byte 0x0C at 25
      LB(10, 0, 25),                // 19 x10 = 12
      ADDI(11, 0, -1),              // 20
      SH(11, 0, 30),                // 21 half 0xFFFF at 30
      LHU(12, 0, 30),               // 22 x12 = 0000_FFFF
      ADD(13, 12, 10),              // 23 x13 = 0001_000B
      SW(13, 0, 32),                // 24 [32]
      AUIPC(14, 0),                 // 25 x14 = 100
      JALR(15, 14, 12),             // 26 -> 112 (28), x15 = 108
      SW(1, 0, 36),                 // 27 flushed
      SW(15, 0, 36),                // 28 [36] = 108
      BNE(1, 1, 8),                 // 29 not taken
      ADDI(16, 0, -64),             // 30
      enc_i(32'h402, 16, 3'b101, 17, 7'b0010011), // 31 srai x17, x16, 2 = -16
      SW(17, 0, 40),                // 32 [40] = FFFF_FFF0
      SW(9, 0, 32'h3FC),            // 33 done flag
      JAL(0, 0)                     // 34 loop
    };
    exp_st = '{
      st(32'h00, 4'hF, 32'd17), st(32'h04, 4'hF, 32'd18), st(32'h08, 4'hF, 32'd5),
      st(32'h10, 4'hF, 32'd1),  st(32'h14, 4'hF, 32'd60),
      st(32'h18, 4'b0010, 32'h0000_0C00),
      st(32'h1C, 4'b1100, 32'hFFFF_0000),
      st(32'h20, 4'hF, 32'h0001_000B), st(32'h24, 4'hF, 32'd108),
      st(32'h28, 4'hF, 32'hFFFF_FFF0), st(32'h3FC, 4'hF, 32'h8000_0000)
    };
  end

  // load the program with the core in reset, then run
  initial begin
    rst = 1'b1; load_we = 1'b0; load_addr = '0; load_data = '0;
    #1;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      load_we = 1'b1; load_addr = 32'(i) << 2;
      load_data = (i < prog.size()) ? prog[i] : 32'h0000_0013;
    end
    @(negedge clk);
    load_we = 1'b0;
    repeat (2) @(negedge clk);
    rst = 1'b0;
  end

  always @(posedge clk) begin
    if (rst) cycle <= 0;
    else     cycle <= cycle + 1;
  end

  // Two cores run the same program: variant 0 with the default parameters,
  // variant 1 with the flip-flop register file and the operand-B
  // multiplexer in ID.
  for (genvar v = 0; v < 2; v++) begin : g_dut
    logic [31:0] imem_addr, imem_rdata, dmem_addr, dmem_wdata, dmem_rdata;
    logic        dmem_we;
    logic [3:0]  dmem_wmask;
    int          nst = 0;

    wildcat_core #(.RF_FLIPFLOPS(v == 1), .SRC_B_IN_ID(v == 1)) dut (
      .clk(clk), .rst(rst),
      .imem_addr(imem_addr), .imem_rdata(imem_rdata),
      .dmem_addr(dmem_addr), .dmem_we(dmem_we), .dmem_wmask(dmem_wmask),
      .dmem_wdata(dmem_wdata), .dmem_rdata(dmem_rdata)
    );
    imem #(.WORDS(256)) u_imem (.clk(clk), .raddr(imem_addr), .rdata(imem_rdata),
                                .we(load_we), .waddr(load_addr), .wdata(load_data));
    dmem #(.WORDS(256)) u_dmem (.clk(clk), .addr(dmem_addr), .we(dmem_we), .wmask(dmem_wmask),
                                .wdata(dmem_wdata), .rdata(dmem_rdata));

    // compare every store with the expected list
    always @(posedge clk) begin
      if (!rst && dmem_we && !fin[v]) begin
        logic [31:0] m;
        m = {{8{dmem_wmask[3]}}, {8{dmem_wmask[2]}}, {8{dmem_wmask[1]}}, {8{dmem_wmask[0]}}};
        checks++;
        if (nst >= exp_st.size() || {dmem_addr[31:2], 2'b00} != exp_st[nst].addr ||
            dmem_wmask != exp_st[nst].mask || (dmem_wdata & m) != exp_st[nst].data) begin
          failures++;
          $display("FAIL variant %0d store %0d: addr=%h mask=%b data=%h", v, nst, dmem_addr, dmem_wmask, dmem_wdata);
        end
        nst++;
        if (dmem_addr == 32'h3FC) begin
          fin[v] = 1'b1;
          checks++;
          if (cycle != DONE_CYCLE) begin
            failures++;
            $display("FAIL variant %0d: done in cycle %0d, expected %0d", v, cycle, DONE_CYCLE);
          end
          checks++;
          if (nst != exp_st.size()) begin
            failures++;
            $display("FAIL variant %0d: %0d stores seen, expected %0d", v, nst, exp_st.size());
          end
        end
      end
    end
  end

  initial begin
    fin = '{1'b0, 1'b0};
    wait (fin[0] && fin[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
