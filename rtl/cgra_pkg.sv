// cgra_pkg: sizes, encodings and shared types of the multi-task CGRA.
//
// The array has 32 columns by 16 rows of tiles; every fourth column is a
// column of MEM tiles, the other three are PE tiles (384 PE and 128 MEM
// tiles). Four adjacent columns form one array-slice, the unit in which
// compute is handed to a task, so there are 8 array-slices. The global
// buffer (GLB) has 32 banks of 128 KB; each bank is one GLB-slice. These
// counts follow the paper. The word width (16 bits), the configuration
// address layout and the opcode encodings are this design's own choices.
//
// Configuration address layout (32 bits), one 32-bit register per address:
//   [7:0]   column of the tile (0..31)
//   [15:8]  row of the tile (0..15)
//   [23:16] register index inside the tile (see CFG_* below)
//   [31:24] unused, must be zero
// A bitstream is a list of 64-bit GLB words {addr[31:0], data[31:0]}.
// Bitstreams are compiled for the leftmost region; on the way out of the
// GLB the column field is rewritten so that its upper bits name the target
// array-slice (run-time relocation).
package cgra_pkg;

  // ---- array geometry ------------------------------------------------------
  parameter int unsigned NUM_COLS        = 32;
  parameter int unsigned NUM_ROWS        = 16;
  parameter int unsigned COLS_PER_SLICE  = 4;
  parameter int unsigned NUM_SLICES      = NUM_COLS / COLS_PER_SLICE;  // 8
  parameter int unsigned NUM_TRACKS      = 5;   // tracks per direction per side
  parameter int unsigned DATA_W          = 16;  // word width of the interconnect

  // ---- global buffer ---------------------------------------------------------
  parameter int unsigned NUM_BANKS       = 32;
  parameter int unsigned BANK_BYTES      = 128 * 1024;
  parameter int unsigned GLB_WORD_W      = 64;  // = COLS_PER_SLICE * DATA_W
  parameter int unsigned BANK_WORDS      = BANK_BYTES / (GLB_WORD_W / 8);  // 16384

  // ---- MEM tile --------------------------------------------------------------
  parameter int unsigned MEM_DEPTH       = 512; // words of scratchpad per MEM tile

  // ---- sides -----------------------------------------------------------------
  typedef enum logic [1:0] {SIDE_N = 2'd0, SIDE_E = 2'd1, SIDE_S = 2'd2, SIDE_W = 2'd3} side_e;

  // A word on a routing track: data plus a valid bit.
  typedef struct packed {
    logic              valid;
    logic [DATA_W-1:0] data;
  } word_t;

  // All tracks leaving (or entering) one side of a tile.
  typedef word_t [NUM_TRACKS-1:0] side_t;
  // All four sides, indexed by side_e.
  typedef side_t [3:0] sides_t;

  // ---- configuration bus -----------------------------------------------------
  typedef struct packed {
    logic        valid;
    logic [31:0] addr;
    logic [31:0] data;
  } cfg_req_t;

  // Register indices inside a tile.
  // 0..19  : switch-box output select, one per outgoing track (side*5+track)
  // 32..34 : connection-box select for core input 0..2
  // 48     : core opcode / mode
  // 49     : core constant
  // 50     : core count (accumulation length or delay length)
  // 51     : MEM tile scratchpad write {addr[15:0], data[15:0]}
  parameter logic [7:0] CFG_SB_BASE  = 8'd0;
  parameter logic [7:0] CFG_CB_BASE  = 8'd32;
  parameter logic [7:0] CFG_OP       = 8'd48;
  parameter logic [7:0] CFG_CONST    = 8'd49;
  parameter logic [7:0] CFG_COUNT    = 8'd50;
  parameter logic [7:0] CFG_MEMWR    = 8'd51;

  // Switch-box select codes for one outgoing track:
  //   0..19 : incoming track (side*5 + track) of the same tile
  //   20    : core output 0
  //   others: drive an invalid word
  parameter int unsigned SB_SEL_W   = 5;
  parameter logic [SB_SEL_W-1:0] SB_SEL_CORE0 = 5'd20;
  // Connection-box select: 0..19 incoming track, 20..31 constant-invalid.
  parameter int unsigned CB_SEL_W   = 5;

  // ---- PE core opcodes ---------------------------------------------------------
  typedef enum logic [3:0] {
    PE_PASS = 4'd0,   // out = a
    PE_ADD  = 4'd1,   // out = a + b
    PE_SUB  = 4'd2,   // out = a - b
    PE_MUL  = 4'd3,   // out = a * b (low half)
    PE_MAC  = 4'd4,   // out = a * b + c
    PE_ACC  = 4'd5,   // acc += a * b; emit acc every COUNT inputs, then clear
    PE_MAX  = 4'd6,
    PE_MIN  = 4'd7,
    PE_SHR  = 4'd8,   // arithmetic shift right by b[3:0]
    PE_SHL  = 4'd9,
    PE_AND  = 4'd10,
    PE_OR   = 4'd11,
    PE_XOR  = 4'd12,
    PE_ABS  = 4'd13
  } pe_op_e;

  // ---- MEM core modes ------------------------------------------------------------
  typedef enum logic [1:0] {
    MEM_DELAY = 2'd0,  // line buffer: out = the input from COUNT valid words ago
    MEM_LUT   = 2'd1,  // lookup: out = mem[a]
    MEM_RAM   = 2'd2   // scratchpad: write mem[b] = a when c valid, read mem[b]
  } mem_mode_e;

  // ---- GLB bank registers (host address map in glb.sv) -------------------------
  typedef enum logic [3:0] {
    GLB_LD_START  = 4'd0,   // first word of the load stream
    GLB_LD_LEN    = 4'd1,   // words in the load stream
    GLB_ST_START  = 4'd2,   // first word written by the store stream
    GLB_ST_LEN    = 4'd3,   // words the store stream expects
    GLB_ST_MASK   = 4'd4,   // lanes that must be valid for a store word
    GLB_CFG_START = 4'd5,   // first word of the bitstream
    GLB_CFG_LEN   = 4'd6,   // words of bitstream
    GLB_DPR_DEST  = 4'd7,   // destination array-slice of DPR
    GLB_CTRL      = 4'd8,   // write: bit0 start load, bit1 start store, bit2 start DPR
    GLB_STATUS    = 4'd9    // read: bit0..2 busy (ld, st, dpr), bit4..6 done
  } glb_reg_e;

  // Host request to one bank: a register or a memory word.
  typedef struct packed {
    logic        valid;
    logic        we;
    logic        is_reg;
    logic [13:0] addr;      // memory word index, or register index in [3:0]
    logic [63:0] wdata;
  } bank_req_t;

  // Host bus request (address map in glb.sv).
  typedef struct packed {
    logic        valid;
    logic        we;
    logic [31:0] addr;
    logic [63:0] wdata;
  } host_req_t;

  // Connection-box index of a (side, track) pair.
  function automatic logic [4:0] trk(input side_e s, input int unsigned t);
    return 5'(int'(s) * NUM_TRACKS + t);
  endfunction

  // Configuration address of register reg_idx in tile (col,row).
  function automatic logic [31:0] cfg_addr(input int unsigned col, input int unsigned row,
                                           input logic [7:0] reg_idx);
    return {8'd0, reg_idx, 8'(row), 8'(col)};
  endfunction

endpackage
