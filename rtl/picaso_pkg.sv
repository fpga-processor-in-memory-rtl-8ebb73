// picaso_pkg: types and constants shared by the PiCaSO processing-in-memory overlay.
//
// A PE block holds 16 bit-serial processing elements (PEs) that share one BRAM
// configured 16 bits wide: word w of the BRAM holds bit w of a variable for all
// 16 PEs (the corner-turned, striped-column layout). Operands are streamed one bit
// per word, LSB first.
//
// Taken from the paper: 16 PEs per block, 1024 bits of register file per PE, the
// four FA/S op-codes (ADD, SUB, CPX, CPY), the 3-bit Op-Encoder Conf codes and the
// seven OpMux configurations. The binary encodings of the op-codes and OpMux
// configurations, the micro-operation format and the instruction format are this
// design's own choices (the alu_op_e encoding reuses the low two Conf bits).
package picaso_pkg;

  localparam int unsigned PES       = 16;    // PEs per block (BRAM width)
  localparam int unsigned RF_DEPTH  = 1024;  // bits per PE register file
  localparam int unsigned ADDR_W    = $clog2(RF_DEPTH);
  localparam int unsigned LEVEL_W   = 3;     // width of the network level register

  // FA/S op-codes (Table 1). Encoding equals Conf[1:0] of Table 2.
  typedef enum logic [1:0] {
    ALU_ADD = 2'b00,
    ALU_CPX = 2'b01,
    ALU_CPY = 2'b10,
    ALU_SUB = 2'b11
  } alu_op_e;

  // Op-Encoder Conf codes (Table 2): 0xx selects an op-code directly,
  // 1xx selects Booth radix-2 recoding of the operand bits Y (q_i) and X (q_i-1).
  localparam logic [2:0] CONF_ADD   = 3'b000;
  localparam logic [2:0] CONF_CPX   = 3'b001;
  localparam logic [2:0] CONF_CPY   = 3'b010;
  localparam logic [2:0] CONF_SUB   = 3'b011;
  localparam logic [2:0] CONF_BOOTH = 3'b100;

  // OpMux configurations (Table 3).
  typedef enum logic [2:0] {
    MUX_A_OP_B   = 3'd0,
    MUX_A_FOLD_1 = 3'd1,
    MUX_A_FOLD_2 = 3'd2,
    MUX_A_FOLD_3 = 3'd3,
    MUX_A_FOLD_4 = 3'd4,
    MUX_A_OP_NET = 3'd5,
    MUX_0_OP_B   = 3'd6
  } mux_cfg_e;

  // Reduction direction of the network (which neighbour a receiver listens to).
  typedef enum logic [1:0] {
    DIR_WEST  = 2'd0,   // data moves west, receivers listen east  (row reduction to column 0)
    DIR_NORTH = 2'd1,   // data moves north, receivers listen south (column reduction to row 0)
    DIR_EAST  = 2'd2,   // data moves east, receivers listen west
    DIR_SOUTH = 2'd3    // data moves south, receivers listen north
  } net_dir_e;

  typedef enum logic [1:0] {
    ROLE_R = 2'd0,      // receiver
    ROLE_T = 2'd1,      // transmitter
    ROLE_P = 2'd2       // pass-through
  } net_role_e;

  // Execute-side control that travels down the PE block pipeline with the data.
  typedef struct packed {
    mux_cfg_e    mux;      // used at the OpMux stage
    logic [2:0]  conf;     // Op-Encoder Conf, used at the ALU stage
    logic        op_load;  // load op-code register, clear carry/borrow
    logic        alu_en;   // a valid operand bit reaches the ALU
  } exec_t;

  // Micro-operation broadcast by the sequencer to every PE block, one per cycle.
  typedef struct packed {
    logic              rda_en;   // read port A
    logic [ADDR_W-1:0] rda_addr;
    logic              rdb_en;   // read port B
    logic [ADDR_W-1:0] rdb_addr;
    logic              tx_en;    // read port A at tx_addr, transmitter blocks only
    logic [ADDR_W-1:0] tx_addr;
    exec_t             ex;       // follows the read through the pipeline
    logic              wr_en;    // write ALU result through port B this cycle
    logic              wr_net;   // write only in receiver blocks
    logic [ADDR_W-1:0] wr_addr;
  } uop_t;

  // Network configuration broadcast by the sequencer.
  typedef struct packed {
    logic               we;
    logic [LEVEL_W-1:0] level;
    net_dir_e           dir;
  } net_cfg_t;

  // Array instructions understood by the sequencer.
  typedef enum logic [2:0] {
    OP_ADD  = 3'd0,   // dst = src1 + src2
    OP_SUB  = 3'd1,   // dst = src1 - src2
    OP_CPX  = 3'd2,   // dst = src1
    OP_CPY  = 3'd3,   // dst = src2
    OP_MULT = 3'd4,   // dst[2N] = src1 * src2 (signed, Booth radix-2)
    OP_FOLD = 3'd5,   // dst = src1 + fold_level(src1) inside each block
    OP_NET  = 3'd6    // dst = src1 + src1 of the transmitter at network level
  } instr_op_e;

  typedef struct packed {
    instr_op_e          op;
    logic [ADDR_W-1:0]  dst;
    logic [ADDR_W-1:0]  src1;
    logic [ADDR_W-1:0]  src2;
    logic [5:0]         width;   // operand width N in bits, 1..63
    logic [LEVEL_W-1:0] level;   // fold level 1..4 or network level 0..7
    net_dir_e           dir;     // network direction
  } instr_t;

endpackage
