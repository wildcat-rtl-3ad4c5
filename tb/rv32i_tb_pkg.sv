// rv32i_tb_pkg: verification helpers for the Wildcat testbenches.
//
// * Instruction encoders for RV32I (a minimal assembler), so that test
//   programs are built in SystemVerilog rather than read from files.
// * rv32i_iss: an instruction-set simulator of RV32I written independently
//   of the RTL. It executes one instruction per step() call, keeps its own
//   register file, program and data memories, and records every store and
//   every taken control transfer. The end-to-end testbench compares the
//   pipeline's store stream and cycle count against it.
package rv32i_tb_pkg;

  // ------------------------------------------------------------ encoders
  function automatic logic [31:0] enc_r(input logic [6:0] f7, input int rs2, input int rs1,
                                        input logic [2:0] f3, input int rd, input logic [6:0] op);
    return {f7, 5'(rs2), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] enc_i(input int imm, input int rs1, input logic [2:0] f3,
                                        input int rd, input logic [6:0] op);
    return {12'(imm), 5'(rs1), f3, 5'(rd), op};
  endfunction
  function automatic logic [31:0] enc_s(input int imm, input int rs2, input int rs1,
                                        input logic [2:0] f3, input logic [6:0] op);
    logic [11:0] i;
    i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), f3, i[4:0], op};
  endfunction
  function automatic logic [31:0] enc_b(input int imm, input int rs2, input int rs1,
                                        input logic [2:0] f3);
    logic [12:0] i;
    i = 13'(imm);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), f3, i[4:1], i[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] enc_u(input int imm20, input int rd, input logic [6:0] op);
    return {20'(imm20), 5'(rd), op};
  endfunction
  function automatic logic [31:0] enc_j(input int imm, input int rd);
    logic [20:0] i;
    i = 21'(imm);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111};
  endfunction

  // a few named instructions used by directed tests
  function automatic logic [31:0] ADDI(input int rd, input int rs1, input int imm);
    return enc_i(imm, rs1, 3'b000, rd, 7'b0010011);
  endfunction
  function automatic logic [31:0] ADD(input int rd, input int rs1, input int rs2);
    return enc_r(7'b0, rs2, rs1, 3'b000, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] SUB(input int rd, input int rs1, input int rs2);
    return enc_r(7'b0100000, rs2, rs1, 3'b000, rd, 7'b0110011);
  endfunction
  function automatic logic [31:0] LUI(input int rd, input int imm20);
    return enc_u(imm20, rd, 7'b0110111);
  endfunction
  function automatic logic [31:0] AUIPC(input int rd, input int imm20);
    return enc_u(imm20, rd, 7'b0010111);
  endfunction
  function automatic logic [31:0] LW(input int rd, input int rs1, input int imm);
    return enc_i(imm, rs1, 3'b010, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] LB(input int rd, input int rs1, input int imm);
    return enc_i(imm, rs1, 3'b000, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] LHU(input int rd, input int rs1, input int imm);
    return enc_i(imm, rs1, 3'b101, rd, 7'b0000011);
  endfunction
  function automatic logic [31:0] SW(input int rs2, input int rs1, input int imm);
    return enc_s(imm, rs2, rs1, 3'b010, 7'b0100011);
  endfunction
  function automatic logic [31:0] SB(input int rs2, input int rs1, input int imm);
    return enc_s(imm, rs2, rs1, 3'b000, 7'b0100011);
  endfunction
  function automatic logic [31:0] SH(input int rs2, input int rs1, input int imm);
    return enc_s(imm, rs2, rs1, 3'b001, 7'b0100011);
  endfunction
  function automatic logic [31:0] BEQ(input int rs1, input int rs2, input int off);
    return enc_b(off, rs2, rs1, 3'b000);
  endfunction
  function automatic logic [31:0] BNE(input int rs1, input int rs2, input int off);
    return enc_b(off, rs2, rs1, 3'b001);
  endfunction
  function automatic logic [31:0] JAL(input int rd, input int off);
    return enc_j(off, rd);
  endfunction
  function automatic logic [31:0] JALR(input int rd, input int rs1, input int imm);
    return enc_i(imm, rs1, 3'b000, rd, 7'b1100111);
  endfunction

  // ------------------------------------------------------------ ISS
  typedef struct {
    logic [31:0] addr;   // word-aligned byte address
    logic [3:0]  mask;
    logic [31:0] data;   // lane-aligned data (only masked lanes meaningful)
  } store_t;

  class rv32i_iss;
    logic [31:0] regs [32];
    logic [31:0] imem [];
    logic [7:0]  dbytes [];
    logic [31:0] pc;
    store_t      stores [$];
    int unsigned retired;
    int unsigned taken;

    function new(int unsigned imem_words, int unsigned dmem_bytes);
      imem   = new[imem_words];
      dbytes = new[dmem_bytes];
      foreach (regs[i]) regs[i] = '0;
      foreach (imem[i]) imem[i] = 32'h0000_0013;
      foreach (dbytes[i]) dbytes[i] = '0;
      pc = '0;
      retired = 0;
      taken = 0;
    endfunction

    function automatic logic [31:0] rd8(logic [31:0] a);
      return {24'b0, dbytes[a % dbytes.size()]};
    endfunction

    function void step();
      logic [31:0] ins, a, b, res, imm_i, imm_s, imm_b, imm_u, imm_j, addr, npc, w;
      logic [6:0] op;
      logic [2:0] f3;
      int rd, rs1, rs2;
      bit wr, tk;
      ins = imem[(pc >> 2) % imem.size()];
      op = ins[6:0]; f3 = ins[14:12];
      rd = int'(ins[11:7]); rs1 = int'(ins[19:15]); rs2 = int'(ins[24:20]);
      a = regs[rs1]; b = regs[rs2];
      imm_i = {{20{ins[31]}}, ins[31:20]};
      imm_s = {{20{ins[31]}}, ins[31:25], ins[11:7]};
      imm_b = {{19{ins[31]}}, ins[31], ins[7], ins[30:25], ins[11:8], 1'b0};
      imm_u = {ins[31:12], 12'b0};
      imm_j = {{11{ins[31]}}, ins[31], ins[19:12], ins[20], ins[30:21], 1'b0};
      npc = pc + 4; wr = 0; tk = 0; res = 0;
      case (op)
        7'b0110111: begin res = imm_u; wr = 1; end
        7'b0010111: begin res = pc + imm_u; wr = 1; end
        7'b1101111: begin res = pc + 4; wr = 1; tk = 1; npc = pc + imm_j; end
        7'b1100111: begin res = pc + 4; wr = 1; tk = 1; npc = (a + imm_i) & ~32'd1; end
        7'b1100011: begin
          bit c;
          case (f3)
            3'b000: c = (a == b);
            3'b001: c = (a != b);
            3'b100: c = ($signed(a) < $signed(b));
            3'b101: c = ($signed(a) >= $signed(b));
            3'b110: c = (a < b);
            3'b111: c = (a >= b);
            default: c = 0;
          endcase
          if (c) begin npc = pc + imm_b; tk = 1; end
        end
        7'b0000011: begin
          addr = a + imm_i;
          case (f3)
            3'b000: begin w = rd8(addr); res = {{24{w[7]}}, w[7:0]}; end
            3'b100: res = rd8(addr);
            3'b001: begin w = rd8(addr) | (rd8(addr + 1) << 8); res = {{16{w[15]}}, w[15:0]}; end
            3'b101: res = rd8(addr) | (rd8(addr + 1) << 8);
            default: res = rd8(addr) | (rd8(addr + 1) << 8) | (rd8(addr + 2) << 16) | (rd8(addr + 3) << 24);
          endcase
          wr = 1;
        end
        7'b0100011: begin
          store_t s;
          int n;
          addr = a + imm_s;
          n = (f3 == 3'b000) ? 1 : (f3 == 3'b001) ? 2 : 4;
          s.addr = {addr[31:2], 2'b00};
          s.mask = '0;
          s.data = '0;
          for (int k = 0; k < n; k++) begin
            logic [1:0] lane;
            lane = 2'(addr[1:0] + 2'(k));
            dbytes[(addr + k) % dbytes.size()] = b[8*k +: 8];
            s.mask[lane] = 1'b1;
            s.data[8*lane +: 8] = b[8*k +: 8];
          end
          stores.push_back(s);
        end
        7'b0010011, 7'b0110011: begin
          logic [31:0] y;
          y = (op == 7'b0010011) ? imm_i : b;
          case (f3)
            3'b000: res = (op == 7'b0110011 && ins[30]) ? a - y : a + y;
            3'b001: res = a << y[4:0];
            3'b010: res = ($signed(a) < $signed(y)) ? 1 : 0;
            3'b011: res = (a < y) ? 1 : 0;
            3'b100: res = a ^ y;
            3'b101: res = ins[30] ? 32'($signed(a) >>> y[4:0]) : a >> y[4:0];
            3'b110: res = a | y;
            default: res = a & y;
          endcase
          wr = 1;
        end
        default: ;
      endcase
      if (wr && rd != 0) regs[rd] = res;
      if (tk) taken++;
      retired++;
      pc = npc;
    endfunction
  endclass

endpackage
