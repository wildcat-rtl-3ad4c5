// wildcat_core: the 3-stage RV32I pipeline.
//
// Stages:
//   IF  The next PC (PC + 4, or the target of a taken branch/jump resolved
//       in EX) is presented to the instruction memory, whose address
//       register is the PC pipeline register. The instruction appears
//       during IF and is registered into IR; its rs1/rs2 fields go straight
//       into the register file's read-address registers.
//   ID  Decode and immediate generation, register file read, and the
//       effective address of loads and stores on a dedicated adder
//       (rs1 + imm). Address, store data, byte mask and write enable are
//       registered into the data memory at the end of ID.
//   EX  ALU operation, and in parallel the data memory read; a 2:1 choice
//       between ALU result and (extended) load data forms the result, which
//       is written to the register file at the end of EX and kept in a
//       result register for forwarding. Branch decision and target are
//       computed here.
//
// Forwarding. (1) The registered result of the previous instruction can
// replace either ALU/branch operand in EX. (2) The combinational EX result
// (ALU or load data) can replace the rs2 value used as store data in ID,
// and the rs1 value used by the ID address adder. Two instructions apart,
// the register file's own read/write bypass supplies the value. Because a
// load's data is available in EX, in the same stage as the ALU, there is
// no load-use stall. A taken branch or jump flushes the instructions in IF
// and ID (two cycles of penalty); a store in ID is suppressed in that
// cycle. Every other instruction completes at one per cycle; the pipeline
// never stalls.
//
// Following the paper: three stages, memory access merged into EX,
// address adder in ID, immediate generation in ID, register/immediate
// selection in EX, branch decision and target in EX, forwarding from the
// ALU result or memory read to the ALU and to the memory input. This
// design's own choices: forwarding into the ID address adder (the
// schematic omits it), reset behaviour (synchronous, active-high, first
// fetch at RESET_PC), FENCE/SYSTEM/unknown instructions treated as no-ops,
// and no trap on misaligned accesses (the low address bits select the
// bytes within the addressed word).
//
// SRC_B_IN_ID selects where operand B chooses between rs2 and the
// immediate. 0 (default): in EX, after the forwarding multiplexer, as in
// the implementation the paper evaluates. 1: in ID, before the ID/EX
// register, as the paper proposes to shorten the EX path; forwarding to
// operand B is then disabled for immediate operands.
//
// Interface: instruction memory read port (address out, instruction in one
// cycle later) and data memory port (address, write enable, byte mask,
// write data out; read word in one cycle later).
module wildcat_core
  import wildcat_pkg::*;
#(
  parameter logic [31:0] RESET_PC     = 32'h0000_0000,
  parameter bit          RF_FLIPFLOPS = 1'b0,
  parameter bit          SRC_B_IN_ID  = 1'b0
) (
  input  logic        clk,
  input  logic        rst,          // synchronous, active high

  output logic [31:0] imem_addr,
  input  logic [31:0] imem_rdata,

  output logic [31:0] dmem_addr,
  output logic        dmem_we,
  output logic [3:0]  dmem_wmask,
  output logic [31:0] dmem_wdata,
  input  logic [31:0] dmem_rdata
);

  // ---------------------------------------------------------------- IF
  logic [31:0] pc_if, pc_next;
  logic        if_valid;

  // ---------------------------------------------------------------- ID
  logic [31:0] ir, pc_id;
  logic        id_valid;
  decoded_t    dec;
  logic [31:0] rs1_rf, rs2_rf, rs1_id, rs2_id, mem_addr;
  logic        fwd_id_rs1, fwd_id_rs2;

  // ---------------------------------------------------------------- EX
  decoded_t    ex;
  logic [31:0] pc_ex, rs1_ex_q, rs2_ex_q, rs1_ex, rs2_ex, op_a, op_b, alu_y;
  logic [1:0]  off_ex;
  logic        ex_valid, taken, taken_ex, fwd_ex_rs1, fwd_ex_rs2;
  logic [31:0] target, ex_result;
  logic        rf_we;

  // result register (forwarding source for EX)
  logic        wb_valid;
  logic [4:0]  wb_rd;
  logic [31:0] wb_data;

  // ------------------------------------------------------------ fetch
  assign pc_next   = taken_ex ? target : pc_if + 32'd4;
  assign imem_addr = pc_next;

  always_ff @(posedge clk) begin
    if (rst) begin
      pc_if    <= RESET_PC - 32'd4;
      if_valid <= 1'b0;
    end else begin
      pc_if    <= pc_next;
      if_valid <= 1'b1;
    end
  end

  // IF/ID register
  always_ff @(posedge clk) begin
    ir    <= imem_rdata;
    pc_id <= pc_if;
    if (rst) id_valid <= 1'b0;
    else     id_valid <= if_valid && !taken_ex;
  end

  // ------------------------------------------------------------ decode
  decode u_decode (.instr(ir), .dec(dec));

  regfile #(.RF_FLIPFLOPS(RF_FLIPFLOPS)) u_regfile (
    .clk      (clk),
    .rs1_addr (imem_rdata[19:15]),
    .rs2_addr (imem_rdata[24:20]),
    .rs1_data (rs1_rf),
    .rs2_data (rs2_rf),
    .we       (rf_we),
    .waddr    (ex.rd),
    .wdata    (ex_result)
  );

  // forwarding of the combinational EX result to the memory input
  assign fwd_id_rs1 = rf_we && (ex.rd == dec.rs1);
  assign fwd_id_rs2 = rf_we && (ex.rd == dec.rs2);
  assign rs1_id     = fwd_id_rs1 ? ex_result : rs1_rf;
  assign rs2_id     = fwd_id_rs2 ? ex_result : rs2_rf;

  // dedicated address adder in ID
  assign mem_addr   = rs1_id + dec.imm;
  assign dmem_addr  = mem_addr;
  assign dmem_we    = id_valid && dec.is_store && !taken_ex;
  assign dmem_wmask = store_mask(dec.funct3, mem_addr[1:0]);
  assign dmem_wdata = store_data(dec.funct3, rs2_id);

  // ID/EX register
  always_ff @(posedge clk) begin
    ex       <= dec;
    pc_ex    <= pc_id;
    rs1_ex_q <= rs1_rf;
    rs2_ex_q <= (SRC_B_IN_ID && dec.src_b_imm) ? dec.imm : rs2_rf;
    off_ex   <= mem_addr[1:0];
    if (rst) ex_valid <= 1'b0;
    else     ex_valid <= id_valid && !taken_ex;
  end

  // ------------------------------------------------------------ execute
  assign fwd_ex_rs1 = wb_valid && (wb_rd == ex.rs1);
  assign fwd_ex_rs2 = wb_valid && (wb_rd == ex.rs2) && !(SRC_B_IN_ID && ex.src_b_imm);
  assign rs1_ex     = fwd_ex_rs1 ? wb_data : rs1_ex_q;
  assign rs2_ex     = fwd_ex_rs2 ? wb_data : rs2_ex_q;

  always_comb begin
    unique case (ex.src_a)
      SRC_A_PC:   op_a = pc_ex;
      SRC_A_ZERO: op_a = 32'd0;
      default:    op_a = rs1_ex;
    endcase
  end
  assign op_b = (!SRC_B_IN_ID && ex.src_b_imm) ? ex.imm : rs2_ex;

  alu u_alu (.op(ex.alu_op), .a(op_a), .b(op_b), .y(alu_y));

  branch_unit u_branch (
    .is_branch (ex.is_branch),
    .is_jal    (ex.is_jal),
    .is_jalr   (ex.is_jalr),
    .funct3    (ex.funct3),
    .rs1       (rs1_ex),
    .rs2       (rs2_ex),
    .pc        (pc_ex),
    .imm       (ex.imm),
    .taken     (taken),
    .target    (target)
  );
  assign taken_ex = ex_valid && taken;

  always_comb begin
    if (ex.is_load)                   ex_result = load_extend(ex.funct3, off_ex, dmem_rdata);
    else if (ex.is_jal || ex.is_jalr) ex_result = pc_ex + 32'd4;
    else                              ex_result = alu_y;
  end

  assign rf_we = ex_valid && ex.reg_write;

  always_ff @(posedge clk) begin
    wb_rd   <= ex.rd;
    wb_data <= ex_result;
    if (rst) wb_valid <= 1'b0;
    else     wb_valid <= rf_we;
  end

  // ------------------------------------------------------------ checks
  a_no_x0_write: assert property (@(posedge clk) disable iff (rst) rf_we |-> ex.rd != 5'd0)
    else $error("core: write to x0 reached the register file");
  a_no_store_on_flush: assert property (@(posedge clk) disable iff (rst) taken_ex |-> !dmem_we)
    else $error("core: store issued from a flushed slot");

endmodule
