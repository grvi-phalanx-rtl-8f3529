// grvi_pkg: types and constants shared by the GRVI Phalanx RTL.
//
// Holds the RV32I opcode and funct3 encodings (from the RISC-V spec), the
// request structs that travel from a core through its 2:1 concentrator and the
// 4x4 crossbar to the cluster RAM, the cluster address map, and the layout of
// the 300-bit Hoplite NOC message.
//
// Follows the paper: 32-bit datapath, 32 KB CRAM as eight 1Kx32 banks, 4 KB
// IRAM per PE pair, 300-bit NOC link carrying 32-byte messages, 5 x 10 array.
// Own choices: the address map (CRAM at 0x0000_0000, NOC interface MMIO at
// 0x4000_0000), the message header fields and the message kinds.
package grvi_pkg;

  localparam int unsigned XLEN = 32;

  // Array size: 10 rows (Y) by 5 columns (X) of clusters.
  localparam int unsigned COLS = 5;
  localparam int unsigned ROWS = 10;
  localparam int unsigned XW   = 3;   // bits of a column index
  localparam int unsigned YW   = 4;   // bits of a row index

  // Cluster memories.
  localparam int unsigned IRAM_WORDS = 1024;  // 4 KB
  localparam int unsigned CRAM_BANKS = 8;     // eight 1Kx32 BRAMs = 32 KB
  localparam int unsigned CRAM_ROWS  = 1024;
  localparam int unsigned LINE_W     = 256;   // one 32-byte message

  // Address map.
  localparam logic [1:0] REGION_CRAM = 2'b00;  // addr[31:30]
  localparam logic [1:0] REGION_MMIO = 2'b01;

  // RV32I major opcodes.
  localparam logic [6:0] OP_LUI    = 7'b0110111;
  localparam logic [6:0] OP_AUIPC  = 7'b0010111;
  localparam logic [6:0] OP_JAL    = 7'b1101111;
  localparam logic [6:0] OP_JALR   = 7'b1100111;
  localparam logic [6:0] OP_BRANCH = 7'b1100011;
  localparam logic [6:0] OP_LOAD   = 7'b0000011;
  localparam logic [6:0] OP_STORE  = 7'b0100011;
  localparam logic [6:0] OP_IMM    = 7'b0010011;
  localparam logic [6:0] OP_OP     = 7'b0110011;

  typedef enum logic [2:0] {
    ALU_ADD, ALU_SUB, ALU_AND, ALU_OR, ALU_XOR, ALU_PASSB
  } alu_op_e;

  typedef enum logic [1:0] {
    SH_SLL = 2'd0, SH_SRL = 2'd1, SH_SRA = 2'd2
  } sh_op_e;

  typedef enum logic [2:0] {
    RES_ALU, RES_CMP, RES_LINK, RES_LOAD, RES_SHIFT
  } res_sel_e;

  // Access size, RV32I funct3[1:0] of loads/stores.
  typedef enum logic [1:0] {
    SZ_B = 2'd0, SZ_H = 2'd1, SZ_W = 2'd2
  } size_e;

  // A core's data request (word or sub-word), before the concentrator.
  typedef struct packed {
    logic        valid;
    logic        we;
    logic [31:0] addr;
    logic [31:0] wdata;
    size_e       size;
    logic        uns;     // zero-extend a sub-word load
  } core_req_t;

  // A word request after the concentrator: byte lanes already steered.
  typedef struct packed {
    logic        valid;
    logic        we;
    logic [31:0] addr;
    logic [31:0] wdata;
    logic [3:0]  be;
    logic [2:0]  pe;      // requesting PE within the cluster
  } mem_req_t;

  // NOC message kinds.
  typedef enum logic [1:0] {
    K_CRAM = 2'd0,   // 32 B line written into the destination CRAM
    K_IRAM = 2'd1,   // one instruction word written into every IRAM
    K_CTRL = 2'd2,   // data[7:0]: PE run enables of the cluster
    K_HOST = 2'd3    // for the external client port
  } kind_e;

  // 300-bit Hoplite message.
  localparam int unsigned NOC_W = 300;
  typedef struct packed {
    logic             valid;
    logic [XW-1:0]    dx;
    logic [YW-1:0]    dy;
    kind_e            kind;
    logic [9:0]       addr;   // CRAM line or IRAM word
    logic [LINE_W-1:0] data;
    logic [NOC_W-LINE_W-20-1:0] rsvd;
  } noc_msg_t;

  // Store data of a send request written to the MMIO region.
  //   wdata[9:0] remote line/word, [13:10] dest y, [16:14] dest x, [18:17] kind
  // The store address bits [14:5] give the local CRAM line to send.
  function automatic noc_msg_t send_header(logic [31:0] wd);
    noc_msg_t m;
    m       = '0;
    m.valid = 1'b1;
    m.addr  = wd[9:0];
    m.dy    = wd[13:10];
    m.dx    = wd[16:14];
    m.kind  = kind_e'(wd[18:17]);
    return m;
  endfunction

endpackage
