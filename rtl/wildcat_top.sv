// wildcat_top: the Wildcat 3-stage RV32I processor with its two scratchpad
// memories attached, one on the instruction interface and one on the data
// interface.
//
// The program is written into the instruction memory through the load
// port while rst is high; after rst falls the core fetches from RESET_PC.
// The data memory's write side (address, mask, data, enable) is brought
// out so that a host can watch the stores the program performs, for
// example results or a completion flag. The paper attaches scratchpads
// for testing but does not describe the load and observation ports; they
// are this design's own.
module wildcat_top #(
  parameter int unsigned IMEM_WORDS   = 1024,
  parameter int unsigned DMEM_WORDS   = 1024,
  parameter bit          RF_FLIPFLOPS = 1'b0,
  parameter bit          SRC_B_IN_ID  = 1'b0
) (
  input  logic        clk,
  input  logic        rst,
  // program load port into the instruction memory
  input  logic        load_we,
  input  logic [31:0] load_addr,
  input  logic [31:0] load_data,
  // data-memory write side, for observation
  output logic        st_valid,
  output logic [31:0] st_addr,
  output logic [3:0]  st_mask,
  output logic [31:0] st_data
);

  logic [31:0] imem_addr, imem_rdata;
  logic [31:0] dmem_addr, dmem_wdata, dmem_rdata;
  logic        dmem_we;
  logic [3:0]  dmem_wmask;

  wildcat_core #(.RF_FLIPFLOPS(RF_FLIPFLOPS), .SRC_B_IN_ID(SRC_B_IN_ID)) u_core (
    .clk        (clk),
    .rst        (rst),
    .imem_addr  (imem_addr),
    .imem_rdata (imem_rdata),
    .dmem_addr  (dmem_addr),
    .dmem_we    (dmem_we),
    .dmem_wmask (dmem_wmask),
    .dmem_wdata (dmem_wdata),
    .dmem_rdata (dmem_rdata)
  );

  imem #(.WORDS(IMEM_WORDS)) u_imem (
    .clk   (clk),
    .raddr (imem_addr),
    .rdata (imem_rdata),
    .we    (load_we),
    .waddr (load_addr),
    .wdata (load_data)
  );

  dmem #(.WORDS(DMEM_WORDS)) u_dmem (
    .clk   (clk),
    .addr  (dmem_addr),
    .we    (dmem_we),
    .wmask (dmem_wmask),
    .wdata (dmem_wdata),
    .rdata (dmem_rdata)
  );

  assign st_valid = dmem_we;
  assign st_addr  = dmem_addr;
  assign st_mask  = dmem_wmask;
  assign st_data  = dmem_wdata;

endmodule
