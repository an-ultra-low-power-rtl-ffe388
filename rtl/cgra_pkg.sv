// cgra_pkg: types and constants shared by the CGRA blocks.
//
// The array is the 6 x 4 grid of tiles drawn as the PE/MOB array: rows 0, 2, 3
// and 5 hold processing elements (PEs), rows 1 and 4 hold memory operation
// blocks (MOBs), giving the 4 x 4 PE array and the 4 x 2 MOB array. The data
// word is 32 bits; for dot products it holds four signed 8-bit lanes (the
// "packed data" the PEs multiply and add). The lane width, the word width and
// the instruction encoding below are this design's choices, not the paper's.
//
// Instruction word (one per tile per step, 32 bits):
//   [31:28] op      operation (pe_op_e for PEs, mob_op_e for MOBs)
//   [27:24] src_a   first operand source (src_e)
//   [23:20] src_b   second operand source (src_e)
//   [19]    wr_out  write the result into the tile's output register, which
//                   the four torus neighbours read
//   [18]    wr_rf   (PE only) write the result into register rf_idx
//   [17:16] rf_idx  (PE only) register-file index
//   [15:0]  imm     signed immediate / address offset
package cgra_pkg;

  localparam int unsigned DATA_W    = 32;
  localparam int unsigned LANE_W    = 8;
  localparam int unsigned LANES     = DATA_W / LANE_W;   // 4 packed int8 lanes
  localparam int unsigned GRID_ROWS = 6;                 // PE,MOB,PE,PE,MOB,PE
  localparam int unsigned GRID_COLS = 4;
  localparam int unsigned N_TILES   = GRID_ROWS * GRID_COLS;  // 24
  localparam int unsigned N_MOBS    = 2 * GRID_COLS;          // 8
  localparam int unsigned RF_DEPTH  = 4;                 // PE registers
  localparam int unsigned ADDR_W    = 16;                // L1 word address

  typedef logic [DATA_W-1:0] word_t;

  // Operand sources. N/E/S/W are the neighbours' output registers on the torus.
  typedef enum logic [3:0] {
    SRC_N    = 4'd0,
    SRC_E    = 4'd1,
    SRC_S    = 4'd2,
    SRC_W    = 4'd3,
    SRC_R0   = 4'd4,
    SRC_R1   = 4'd5,
    SRC_R2   = 4'd6,
    SRC_R3   = 4'd7,
    SRC_SELF = 4'd8,   // own output register
    SRC_ACC  = 4'd9,   // own accumulator (PE only)
    SRC_IMM  = 4'd10,  // sign-extended immediate
    SRC_ZERO = 4'd15
  } src_e;

  typedef enum logic [3:0] {
    PE_NOP   = 4'd0,
    PE_ADD   = 4'd1,   // res = a + b
    PE_SUB   = 4'd2,   // res = a - b
    PE_MUL   = 4'd3,   // res = a * b (low 32 bits)
    PE_DOTP  = 4'd4,   // res = sum of the four int8 lane products
    PE_MAC   = 4'd5,   // acc += dotp(a, b); res = a (forwarding)
    PE_MOV   = 4'd6,   // res = a
    PE_ACCRD = 4'd7    // res = acc; acc = 0
  } pe_op_e;

  typedef enum logic [3:0] {
    MOB_NOP    = 4'd0,
    MOB_LOAD   = 4'd1,  // out <= L1[ptr + imm], visible two steps later
    MOB_STORE  = 4'd2,  // L1[ptr + imm] <= a
    MOB_MOV    = 4'd3,  // out <= a
    MOB_SETPTR = 4'd4,  // ptr <= imm
    MOB_ADDPTR = 4'd5   // ptr <= ptr + imm
  } mob_op_e;

  typedef struct packed {
    logic [3:0]  op;
    src_e        src_a;
    src_e        src_b;
    logic        wr_out;
    logic        wr_rf;
    logic [1:0]  rf_idx;
    logic [15:0] imm;
  } instr_t;

  // One word-wide request to the shared L1 memory (word addressed).
  typedef struct packed {
    logic              req;
    logic              we;
    logic [ADDR_W-1:0] addr;
    word_t             wdata;
  } l1_req_t;

  // Grant in the request cycle; read data one cycle after a granted read.
  typedef struct packed {
    logic  gnt;
    logic  rvalid;
    word_t rdata;
  } l1_rsp_t;

  // Configuration write from the memory controller into a tile's context slot.
  typedef struct packed {
    logic       valid;
    logic [4:0] tile;   // row * GRID_COLS + col
    logic [3:0] slot;
    word_t      data;
  } cfg_wr_t;

  function automatic bit row_is_mob(input int unsigned row);
    return (row == 1) || (row == 4);
  endfunction

  // Index of a MOB (0..7) from its grid position: row 1 -> 0..3, row 4 -> 4..7.
  function automatic int unsigned mob_index(input int unsigned row, input int unsigned col);
    return (row == 1) ? col : GRID_COLS + col;
  endfunction

  // Sum of the products of the four signed 8-bit lanes of a and b.
  function automatic word_t dotp4(input word_t a, input word_t b);
    logic signed [DATA_W-1:0] s;
    s = '0;
    for (int i = 0; i < LANES; i++)
      s += DATA_W'($signed(a[i*LANE_W +: LANE_W])) * DATA_W'($signed(b[i*LANE_W +: LANE_W]));
    return word_t'(s);
  endfunction

  function automatic word_t make_instr(input logic [3:0] op, input src_e a, input src_e b,
                                       input logic wr_out, input logic wr_rf,
                                       input logic [1:0] rf_idx, input logic [15:0] imm);
    instr_t i;
    i = '{op: op, src_a: a, src_b: b, wr_out: wr_out, wr_rf: wr_rf, rf_idx: rf_idx, imm: imm};
    return word_t'(i);
  endfunction

endpackage
