// wildcat_sort_tb: a small real program on wildcat_top at its default
// sizes: bubble sort of 16 signed words in data memory, followed by a copy
// of the sorted array to address 0x200 and a completion store to 0x3FC.
//
// Unlike the random-program test, this one has loops (backward taken
// branches), a load whose value feeds a branch in the very next cycle, and
// data-dependent stores. Checks: the copied array must equal the input
// sorted by the testbench itself; every store and the completion cycle
// must match the instruction-set simulator run of the same program (one
// cycle per instruction, two more per taken branch, no stalls).
module wildcat_sort_tb;
  import rv32i_tb_pkg::*;

  localparam int N = 16;
  localparam logic [31:0] DONE_ADDR = 32'h3FC;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        rst, load_we, st_valid;
  logic [31:0] load_addr, load_data, st_addr, st_data;
  logic [3:0]  st_mask;

  wildcat_top dut (.*);

  logic [31:0] prog [$];
  int          vals [N];
  int          sorted [N];
  store_t      exp_st [$];
  int          nst = 0, cycle, exp_cycle, n_back = 0;
  bit          running = 1'b0, done = 1'b0;

  function automatic logic [31:0] BGE(int rs1, int rs2, int off);
    return enc_b(off, rs2, rs1, 3'b101);
  endfunction
  function automatic logic [31:0] BLT(int rs1, int rs2, int off);
    return enc_b(off, rs2, rs1, 3'b100);
  endfunction

  always @(posedge clk) begin
    if (rst) cycle <= 0;
    else     cycle <= cycle + 1;
    if (!rst && dut.u_core.taken_ex && dut.u_core.target < dut.u_core.pc_ex) n_back++;
    if (running && !rst && st_valid && !done) begin
      checks++;
      if (nst >= exp_st.size() || st_addr != exp_st[nst].addr || st_mask != exp_st[nst].mask ||
          st_data != exp_st[nst].data) begin
        failures++;
        if (failures < 10) $display("FAIL store %0d: addr=%h data=%h", nst, st_addr, st_data);
      end
      if (st_addr >= 32'h200 && st_addr < 32'h200 + 4 * N) begin
        checks++;
        if (st_data != 32'(sorted[(st_addr - 32'h200) / 4])) begin
          failures++;
          $display("FAIL sorted[%0d] = %0d, expected %0d", (st_addr - 32'h200) / 4,
                   $signed(st_data), sorted[(st_addr - 32'h200) / 4]);
        end
      end
      nst++;
      if (st_addr == DONE_ADDR) begin
        done = 1'b1;
        checks++;
        if (cycle != exp_cycle) begin
          failures++;
          $display("FAIL completion in cycle %0d, expected %0d", cycle, exp_cycle);
        end
      end
    end
  end

  initial begin
    rv32i_iss iss;
    int base;
    // data: 16 random signed values, and the expected sorted order
    foreach (vals[i]) vals[i] = int'($urandom_range(4095, 0)) - 2048;
    sorted = vals;
    for (int i = 1; i < N; i++)          // insertion sort, signed compare
      for (int j = i; j > 0 && sorted[j - 1] > sorted[j]; j--) begin
        int t;
        t = sorted[j]; sorted[j] = sorted[j - 1]; sorted[j - 1] = t;
      end
    foreach (vals[i]) begin
      prog.push_back(ADDI(20, 0, vals[i]));
      prog.push_back(SW(20, 0, 4 * i));
    end
    base = prog.size();
    prog.push_back(ADDI(10, 0, N - 1));                      // 0  i = N-1
    prog.push_back(ADDI(11, 0, 0));                          // 1  outer: p = 0
    prog.push_back(enc_i(2, 10, 3'b001, 13, 7'b0010011));    // 2  end = i * 4
    prog.push_back(LW(14, 11, 0));                           // 3  inner: a = mem[p]
    prog.push_back(LW(15, 11, 4));                           // 4  b = mem[p+4]
    prog.push_back(BGE(15, 14, 12));                         // 5  if b >= a skip swap
    prog.push_back(SW(15, 11, 0));                           // 6
    prog.push_back(SW(14, 11, 4));                           // 7
    prog.push_back(ADDI(11, 11, 4));                         // 8  p += 4
    prog.push_back(BLT(11, 13, -24));                        // 9  -> 3
    prog.push_back(ADDI(10, 10, -1));                        // 10
    prog.push_back(BNE(10, 0, -40));                         // 11 -> 1
    prog.push_back(ADDI(11, 0, 0));                          // 12 copy
    prog.push_back(ADDI(13, 0, 4 * N));                      // 13
    prog.push_back(LW(14, 11, 0));                           // 14 loop
    prog.push_back(SW(14, 11, 32'h200));                     // 15
    prog.push_back(ADDI(11, 11, 4));                         // 16
    prog.push_back(BLT(11, 13, -12));                        // 17 -> 14
    prog.push_back(SW(0, 0, DONE_ADDR));                     // 18
    prog.push_back(JAL(0, 0));                               // 19
    // reference run
    iss = new(1024, 4096);
    foreach (prog[i]) iss.imem[i] = prog[i];
    while (!(iss.stores.size() > 0 && iss.stores[$].addr == DONE_ADDR) && iss.retired < 200000)
      iss.step();
    exp_st = iss.stores;
    exp_cycle = int'(iss.retired) - 1 + 2 + 2 * int'(iss.taken);
    // load, run
    rst = 1'b1; load_we = 1'b0; load_addr = '0; load_data = '0;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk);
      load_we = 1'b1; load_addr = 32'(i) << 2;
      load_data = (i < prog.size()) ? prog[i] : 32'h0000_0013;
    end
    @(negedge clk);
    load_we = 1'b0;
    running = 1'b1;
    @(negedge clk);
    rst = 1'b0;
    wait (done);
    checks++;
    if (nst != exp_st.size()) begin
      failures++;
      $display("FAIL %0d stores, expected %0d", nst, exp_st.size());
    end
    checks++;
    if (n_back == 0) begin
      failures++;
      $display("FAIL no backward branch was taken");
    end
    $display("sort: %0d instructions, %0d taken branches (%0d backward), %0d cycles",
             iss.retired, iss.taken, n_back, cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
