// secure_rv_pkg: sizes, random-bit allocation and RISC-V encodings shared by
// the secure bit-serial RISC-V testchip.
//
// The memory sizes follow the chip: a 1024x32 single-port SRAM for code and
// data and a 512x2 dual-port SRAM for the register file (32 registers x 32
// bits, two bits per word). The RNG delivers 243 fresh bits per system clock.
// How those bits are split between the masked core's remasking XORs and the
// memory-protection units is this design's own choice (see RB_* below).
package secure_rv_pkg;

  // Main memory (code and data): 1024 words of 32 bits.
  localparam int unsigned MEM_AW    = 10;
  localparam int unsigned MEM_DW    = 32;

  // Register file SRAM: 512 words of 2 bits = {reg[4:0], bitpair[3:0]}.
  localparam int unsigned RF_AW    = 9;
  localparam int unsigned RF_DW    = 2;

  // RNG output bus width.
  localparam int unsigned RAND_W = 243;

  // Allocation of the RNG output bus (this design's choice).
  //   [31:0]   remask of data read from main memory
  //   [33:32]  remask of data read from the register file
  //   [34]     perturbation / init bit for the clock-edge randomizer
  //   [242:35] remasking XORs of the masked core's registers
  localparam int unsigned RB_MEM    = 0;
  localparam int unsigned RB_RF     = 32;
  localparam int unsigned RB_CLK    = 34;
  localparam int unsigned RB_CORE   = 35;
  localparam int unsigned RB_CORE_W = RAND_W - RB_CORE;

  // Registers of the masked core, one fresh random bit each per clock. Must
  // equal the N_RND default of bm_core and fit in RB_CORE_W.
  localparam int unsigned BM_N_RND = 151;

  // Port bundle of a masked core, one struct per share.
  typedef struct packed {
    logic              mem_en;
    logic              mem_we;
    logic [3:0]        mem_be;
    logic [MEM_AW-1:0] mem_addr;
    logic [MEM_DW-1:0] mem_wdata;
    logic              rf_re;
    logic [RF_AW-1:0]  rf_raddr;
    logic              rf_we;
    logic [RF_AW-1:0]  rf_waddr;
    logic [RF_DW-1:0]  rf_wdata;
  } core_req_t;

  typedef struct packed {
    logic [MEM_DW-1:0] mem_rdata;
    logic [RF_DW-1:0]  rf_rdata;
  } core_rsp_t;

  // Microprocessor selection driven by the test logic.
  typedef enum logic [1:0] {
    SEL_NCM    = 2'd0,  // no counter-measures, direct SRAM access
    SEL_BM     = 2'd1,  // Boolean masked, through memory protection
    SEL_BM_DDL = 2'd2   // masked + DDL core (external ports), through protection
  } core_sel_e;

  // Clock-edge skip rate select.
  typedef enum logic [1:0] {
    SKIP_OFF = 2'd0,    // no edge is skipped
    SKIP_25  = 2'd1,    // AND of the two LFSR LSBs
    SKIP_50  = 2'd2,    // XOR
    SKIP_75  = 2'd3     // OR
  } skip_sel_e;

  // RV32I major opcodes (inst[6:2]).
  typedef enum logic [4:0] {
    OPC_LOAD   = 5'b00000,
    OPC_MISC   = 5'b00011,
    OPC_OPIMM  = 5'b00100,
    OPC_AUIPC  = 5'b00101,
    OPC_STORE  = 5'b01000,
    OPC_OP     = 5'b01100,
    OPC_LUI    = 5'b01101,
    OPC_BRANCH = 5'b11000,
    OPC_JALR   = 5'b11001,
    OPC_JAL    = 5'b11011,
    OPC_SYSTEM = 5'b11100
  } opcode_e;

endpackage
