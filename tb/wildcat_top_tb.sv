// wildcat_top_tb: end-to-end test of the processor with its scratchpads,
// at the default sizes (no parameter overrides).
//
// For each of NPROG random programs: the testbench generates an RV32I
// program (register and data-memory initialisation, a random body of ALU,
// load, store, LUI/AUIPC, forward branch, JAL and JALR instructions, and an
// epilogue that stores every register and then a completion flag), runs it
// on an independent instruction-set simulator to get the expected store
// stream, loads it through the load port, releases reset and compares
// every store the processor makes. The cycle on which the completion store
// appears must equal the executed instruction count, plus two cycles of
// pipeline fill, plus two for every taken branch or jump: the 3-stage
// pipeline has no other stall. The testbench also counts how often each
// pipeline mechanism occurred and fails if one never did.
module wildcat_top_tb;
  import rv32i_tb_pkg::*;

  localparam int NPROG      = 12;
  localparam int BODY       = 600;
  localparam int IMEM_WORDS = 1024;      // default of wildcat_top
  localparam logic [31:0] DONE_ADDR = 32'h3FC;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        rst, load_we, st_valid;
  logic [31:0] load_addr, load_data, st_addr, st_data;
  logic [3:0]  st_mask;

  wildcat_top dut (.*);

  // ---------------------------------------------------------- generator
  logic [31:0] prog [$];

  function automatic int rnd(int lo, int hi);
    return $urandom_range(hi, lo);
  endfunction

  function automatic void gen_program();
    int n, k, skip;
    int jumps [$];          // indices of forward branches and JALs
    bit pair_jalr [int];    // indices of JALRs that rely on the AUIPC before them
    prog.delete();
    // registers x1..x30 random, x31 = 0 (data base)
    for (int r = 1; r <= 30; r++) begin
      prog.push_back(LUI(r, rnd(0, 32'hFFFFF)));
      prog.push_back(ADDI(r, r, rnd(-2048, 2047)));
    end
    prog.push_back(ADDI(31, 0, 0));
    // data region 0..255 initialised
    for (int w = 0; w < 64; w++) prog.push_back(SW(rnd(1, 30), 0, 4 * w));
    n = prog.size() + BODY;
    while (prog.size() < n) begin
      k = rnd(0, 99);
      if (k < 25) begin              // register-register ALU
        logic [2:0] f3;
        logic alt;
        f3 = 3'(rnd(0, 7));
        alt = (f3 == 3'b000 || f3 == 3'b101) ? 1'(rnd(0, 1)) : 1'b0;
        prog.push_back(enc_r({1'b0, alt, 5'b0}, rnd(0, 31), rnd(0, 31), f3, rnd(0, 30), 7'b0110011));
      end else if (k < 45) begin     // register-immediate ALU
        logic [2:0] f3;
        int imm;
        f3 = 3'(rnd(0, 7));
        imm = rnd(-2048, 2047);
        if (f3 == 3'b001) imm = rnd(0, 31);
        if (f3 == 3'b101) imm = rnd(0, 31) | (rnd(0, 1) << 10);
        prog.push_back(enc_i(imm, rnd(0, 31), f3, rnd(0, 30), 7'b0010011));
      end else if (k < 48) begin
        prog.push_back(LUI(rnd(0, 30), rnd(0, 32'hFFFFF)));
      end else if (k < 50) begin
        prog.push_back(AUIPC(rnd(0, 30), rnd(0, 32'hFFFFF)));
      end else if (k < 62) begin     // load
        logic [2:0] f3s [5] = '{3'b000, 3'b001, 3'b010, 3'b100, 3'b101};
        logic [2:0] f3;
        int sz;
        f3 = f3s[rnd(0, 4)];
        sz = (f3[1:0] == 2'b00) ? 1 : (f3[1:0] == 2'b01) ? 2 : 4;
        prog.push_back(enc_i(rnd(0, 127) / sz * sz, 31, f3, rnd(0, 30), 7'b0000011));
      end else if (k < 72) begin     // store
        logic [2:0] f3;
        int sz;
        f3 = 3'(rnd(0, 2));
        sz = 1 << f3;
        prog.push_back(enc_s(rnd(0, 127) / sz * sz, rnd(0, 31), 31, f3, 7'b0100011));
      end else if (k < 76) begin     // move the data base
        prog.push_back(ADDI(31, 0, 4 * rnd(0, 32)));
      end else if (k < 90) begin     // forward conditional branch
        logic [2:0] f3s [6] = '{3'b000, 3'b001, 3'b100, 3'b101, 3'b110, 3'b111};
        skip = rnd(0, 3);
        if (prog.size() + 1 + skip < n) begin
          logic [31:0] b;
          int r1, r2;
          r1 = rnd(0, 31);
          r2 = (rnd(0, 3) == 0) ? r1 : rnd(0, 31);
          b = enc_b(4 * (skip + 1), r2, r1, f3s[rnd(0, 5)]);
          jumps.push_back(prog.size());
          prog.push_back(b);
        end
      end else if (k < 95) begin     // JAL forward
        skip = rnd(0, 2);
        if (prog.size() + 1 + skip < n) begin
          jumps.push_back(prog.size());
          prog.push_back(JAL(rnd(0, 30), 4 * (skip + 1)));
        end
      end else begin                 // AUIPC + JALR skipping one instruction
        if (prog.size() + 3 < n) begin
          int ra;
          ra = rnd(1, 30);
          prog.push_back(AUIPC(ra, 0));
          pair_jalr[prog.size()] = 1'b1;
          prog.push_back(JALR(rnd(0, 30), ra, 8 + rnd(0, 1)));  // bit 0 is cleared
        end
      end
    end
    // a jump must not land between an AUIPC and its JALR: retarget it to
    // the AUIPC, which is still ahead of the jump
    foreach (jumps[q]) begin
      int i, t;
      logic [31:0] ins;
      i = jumps[q];
      ins = prog[i];
      if (ins[6:0] == 7'b1101111) t = i + int'(signed'({ins[31], ins[19:12], ins[20], ins[30:21], 1'b0})) / 4;
      else t = i + int'(signed'({ins[31], ins[7], ins[30:25], ins[11:8], 1'b0})) / 4;
      if (pair_jalr.exists(t)) begin
        if (ins[6:0] == 7'b1101111) prog[i] = enc_j(4 * (t - 1 - i), int'(ins[11:7]));
        else prog[i] = enc_b(4 * (t - 1 - i), int'(ins[24:20]), int'(ins[19:15]), ins[14:12]);
      end
    end
    // epilogue: all registers to 0x100.., then the completion flag
    for (int r = 1; r < 32; r++) prog.push_back(SW(r, 0, 32'h100 + 4 * r));
    prog.push_back(SW(1, 0, DONE_ADDR));
    prog.push_back(JAL(0, 0));
  endfunction

  // ---------------------------------------------------------- monitors
  store_t exp_st [$];
  int     nst, cycle, exp_cycle;
  bit     running, done;

  int n_taken, n_fwd_ex, n_rf_bypass, n_fwd_st_data, n_fwd_addr, n_load_use, n_flush_store;

  always @(posedge clk) begin
    if (rst) cycle <= 0;
    else     cycle <= cycle + 1;
    if (!rst) begin
      if (dut.u_core.taken_ex) n_taken++;
      if (dut.u_core.ex_valid && (dut.u_core.fwd_ex_rs1 || dut.u_core.fwd_ex_rs2)) n_fwd_ex++;
      if (dut.u_core.id_valid && (dut.u_core.u_regfile.g_mem.byp1_q || dut.u_core.u_regfile.g_mem.byp2_q))
        n_rf_bypass++;
      if (dut.u_core.dmem_we && dut.u_core.fwd_id_rs2) n_fwd_st_data++;
      if (dut.u_core.id_valid && (dut.u_core.dec.is_load || dut.u_core.dec.is_store) && dut.u_core.fwd_id_rs1)
        n_fwd_addr++;
      if (dut.u_core.rf_we && dut.u_core.ex.is_load && dut.u_core.id_valid &&
          (dut.u_core.dec.rs1 == dut.u_core.ex.rd || dut.u_core.dec.rs2 == dut.u_core.ex.rd))
        n_load_use++;
      if (dut.u_core.taken_ex && dut.u_core.id_valid && dut.u_core.dec.is_store) n_flush_store++;
    end
    if (running && !rst && st_valid && !done) begin
      logic [31:0] m;
      m = {{8{st_mask[3]}}, {8{st_mask[2]}}, {8{st_mask[1]}}, {8{st_mask[0]}}};
      checks++;
      if (nst >= exp_st.size() || {st_addr[31:2], 2'b00} != exp_st[nst].addr ||
          st_mask != exp_st[nst].mask || (st_data & m) != exp_st[nst].data) begin
        failures++;
        if (failures < 10)
          $display("FAIL store %0d: addr=%h mask=%b data=%h expected addr=%h mask=%b data=%h",
                   nst, st_addr, st_mask, st_data & m,
                   nst < exp_st.size() ? exp_st[nst].addr : 0,
                   nst < exp_st.size() ? exp_st[nst].mask : 0,
                   nst < exp_st.size() ? exp_st[nst].data : 0);
      end
      nst++;
      if (st_addr == DONE_ADDR) begin
        done = 1'b1;
        checks++;
        if (cycle != exp_cycle) begin
          failures++;
          $display("FAIL completion in cycle %0d, expected %0d", cycle, exp_cycle);
        end
        checks++;
        if (nst != exp_st.size()) begin
          failures++;
          $display("FAIL %0d stores, expected %0d", nst, exp_st.size());
        end
      end
    end
  end

  task automatic report_mechanism(string name, int count);
    checks++;
    $display("  %-34s %0d", name, count);
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", name);
    end
  endtask

  // ---------------------------------------------------------- sequence
  initial begin
    rv32i_iss iss;
    rst = 1'b1; load_we = 1'b0; load_addr = '0; load_data = '0;
    running = 1'b0; done = 1'b0;
    for (int p = 0; p < NPROG; p++) begin
      gen_program();
      // reference run
      iss = new(IMEM_WORDS, 4096);
      foreach (prog[i]) iss.imem[i] = prog[i];
      while (!(iss.stores.size() > 0 && iss.stores[$].addr == DONE_ADDR) && iss.retired < 100000)
        iss.step();
      exp_st = iss.stores;
      exp_cycle = int'(iss.retired) - 1 + 2 + 2 * int'(iss.taken);
      // load and run the processor
      @(negedge clk);
      rst = 1'b1;
      for (int i = 0; i < IMEM_WORDS; i++) begin
        @(negedge clk);
        load_we = 1'b1; load_addr = 32'(i) << 2;
        load_data = (i < prog.size()) ? prog[i] : 32'h0000_0013;
      end
      @(negedge clk);
      load_we = 1'b0;
      nst = 0; done = 1'b0; running = 1'b1;
      @(negedge clk);
      rst = 1'b0;
      fork
        wait (done);
        begin
          repeat (4 * exp_cycle + 100) @(posedge clk);
        end
      join_any
      disable fork;
      checks++;
      if (!done) begin
        failures++;
        $display("FAIL program %0d did not complete", p);
      end
      running = 1'b0;
      $display("program %0d: %0d instructions, %0d taken, %0d stores, done in cycle %0d",
               p, iss.retired, iss.taken, exp_st.size(), cycle);
    end
    $display("mechanisms:");
    report_mechanism("taken branch/jump (2-cycle flush)", n_taken);
    report_mechanism("EX forward from result register", n_fwd_ex);
    report_mechanism("register file read/write bypass", n_rf_bypass);
    report_mechanism("EX result to store data", n_fwd_st_data);
    report_mechanism("EX result to address adder", n_fwd_addr);
    report_mechanism("load followed by use, no stall", n_load_use);
    report_mechanism("store suppressed by flush", n_flush_store);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
